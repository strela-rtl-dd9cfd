// fu_data_input: one of the two data (operand) inputs of the FU.
//
// A data multiplexer picks the operand from one of the four PE input ports
// (N, E, S, W), from the FU's own output (a non-immediate feedback loop) or
// from the configured constant. A separate valid multiplexer picks the valid
// from the four PE inputs, vout_FU, a constant '1' (for constant operands),
// vout_B1 or vout_B2. An Elastic Buffer stores the operand, so the loop
// FU output -> FU input has a register on every signal, ready included.
// Structure and source lists follow the paper; the select codes are this
// design's (data 0..3 = N,E,S,W, 4 = dout_FU, 5..7 = constant; valid 0..3 =
// N,E,S,W, 4 = vout_FU, 5 = '1', 6 = vout_B1, 7 = vout_B2).
//
// Timing: one cycle through the Elastic Buffer; ready_o (rout_FU1 or
// rout_FU2 for the sources' Fork Senders) is a register.
module fu_data_input #(
  parameter int unsigned W = 32
) (
  input  logic             clk_i,
  input  logic             rst_ni,
  input  logic             clr_i,
  input  logic [3:0][W-1:0] din_i,
  input  logic [3:0]       vin_i,
  input  logic [W-1:0]     dout_fu_i,
  input  logic [W-1:0]     const_i,
  input  logic             vout_fu_i,
  input  logic             vout_b1_i,
  input  logic             vout_b2_i,
  input  logic [2:0]       dsel_i,
  input  logic [2:0]       vsel_i,
  output logic [W-1:0]     data_o,
  output logic             valid_o,
  input  logic             ready_i,
  output logic             ready_o
);
  logic [W-1:0] d_mux;
  logic         v_mux;

  always_comb begin
    unique case (dsel_i)
      3'd0, 3'd1, 3'd2, 3'd3: d_mux = din_i[dsel_i[1:0]];
      3'd4:                   d_mux = dout_fu_i;
      default:                d_mux = const_i;
    endcase
    unique case (vsel_i)
      3'd0, 3'd1, 3'd2, 3'd3: v_mux = vin_i[vsel_i[1:0]];
      3'd4:                   v_mux = vout_fu_i;
      3'd5:                   v_mux = 1'b1;
      3'd6:                   v_mux = vout_b1_i;
      default:                v_mux = vout_b2_i;
    endcase
  end

  elastic_buffer #(.WIDTH(W)) u_eb (
    .clk_i   (clk_i),
    .rst_ni  (rst_ni),
    .clr_i   (clr_i),
    .data_i  (d_mux),
    .valid_i (v_mux),
    .ready_o (ready_o),
    .data_o  (data_o),
    .valid_o (valid_o),
    .ready_i (ready_i)
  );
endmodule
