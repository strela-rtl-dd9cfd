// elastic_buffer: two-slot elastic buffer with valid/ready handshakes.
//
// Used at every PE input port and at both FU data inputs. It holds up to two
// tokens in a main register (which drives the output) and a skid register.
// Data and valid are therefore registered twice and ready once, as the paper
// describes; because ready_o is a register and valid_o/data_o come straight
// from the main register, no combinational path crosses the buffer, which
// breaks loops through feedback routes.
//
// Interface: a token moves on the input when valid_i && ready_o and on the
// output when valid_o && ready_i. Timing: one cycle of latency; full
// throughput of one token per cycle. ready_o falls one cycle after the skid
// register fills. clr_i (synchronous) empties both slots; it is used at
// kernel start. The main/skid arrangement is this design's choice.
module elastic_buffer #(
  parameter int unsigned WIDTH = 32
) (
  input  logic             clk_i,
  input  logic             rst_ni,
  input  logic             clr_i,
  input  logic [WIDTH-1:0] data_i,
  input  logic             valid_i,
  output logic             ready_o,
  output logic [WIDTH-1:0] data_o,
  output logic             valid_o,
  input  logic             ready_i
);
  logic [WIDTH-1:0] skid_data;
  logic             skid_valid;

  assign ready_o = !skid_valid;

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      data_o     <= '0;
      valid_o    <= 1'b0;
      skid_data  <= '0;
      skid_valid <= 1'b0;
    end else if (clr_i) begin
      valid_o    <= 1'b0;
      skid_valid <= 1'b0;
    end else if (skid_valid) begin
      // Full: only drain the skid slot into the main slot.
      if (ready_i) begin
        data_o     <= skid_data;
        valid_o    <= 1'b1;
        skid_valid <= 1'b0;
      end
    end else if (valid_o && !ready_i) begin
      // Main slot stalled: an arriving token goes into the skid slot.
      if (valid_i) begin
        skid_data  <= data_i;
        skid_valid <= 1'b1;
      end
    end else begin
      // Main slot empty or leaving this cycle.
      valid_o <= valid_i;
      if (valid_i) data_o <= data_i;
    end
  end

  // A token offered to the output stays offered with the same data.
  a_hold: assert property (@(posedge clk_i) disable iff (!rst_ni || clr_i)
    valid_o && !ready_i |=> valid_o && $stable(data_o));
endmodule
