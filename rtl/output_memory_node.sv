// output_memory_node: stores a stream leaving a south PE output to memory.
//
// Tokens from the CGRA enter a FIFO (ready to the CGRA = FIFO not full). The
// memory unit writes the FIFO head to addr, addr+stride, ... (stride in
// bytes) on its own system-bus master port until size words have been
// granted. done_o rises when all size writes have been acknowledged and stays
// high until the next start_i; tokens beyond size stay in the FIFO and are
// dropped at the next start. The node role, the three stream parameters and
// the FIFO follow the paper; the protocol, units and end condition are this
// design's.
//
// Bus: request held until gnt (the FIFO head cannot change before it);
// every granted write gets one rvalid later. Throughput: one word per cycle.
module output_memory_node
  import strela_pkg::*;
#(
  parameter int unsigned FIFO_DEPTH = 4
) (
  input  logic        clk_i,
  input  logic        rst_ni,
  input  logic        start_i,
  input  logic [31:0] addr_i,
  input  logic [31:0] size_i,
  input  logic [31:0] stride_i,
  output logic        done_o,
  // stream from the CGRA
  input  logic [31:0] din_i,
  input  logic        vin_i,
  output logic        rout_o,
  // system bus master
  output obi_req_t    bus_req_o,
  input  obi_rsp_t    bus_rsp_i
);
  localparam int unsigned CntW = $clog2(FIFO_DEPTH + 1);

  logic        active;
  logic [31:0] addr_q, stride_q, size_q, issued, outstanding;
  logic [31:0] head;
  logic [CntW-1:0] fifo_count;
  logic        fifo_empty, fifo_full, gnt, rsp;

  node_fifo #(.WIDTH(32), .DEPTH(FIFO_DEPTH)) u_fifo (
    .clk_i   (clk_i),
    .rst_ni  (rst_ni),
    .clr_i   (start_i),
    .push_i  (vin_i && !fifo_full),
    .data_i  (din_i),
    .full_o  (fifo_full),
    .pop_i   (gnt),
    .data_o  (head),
    .empty_o (fifo_empty),
    .count_o (fifo_count)
  );

  assign rout_o = !fifo_full;

  always_comb begin
    bus_req_o       = '0;
    bus_req_o.req   = active && (issued != size_q) && !fifo_empty;
    bus_req_o.we    = 1'b1;
    bus_req_o.be    = 4'hF;
    bus_req_o.addr  = addr_q;
    bus_req_o.wdata = head;
  end

  assign gnt = bus_req_o.req && bus_rsp_i.gnt;
  assign rsp = bus_rsp_i.rvalid && (outstanding != '0);

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      active      <= 1'b0;
      addr_q      <= '0;
      stride_q    <= '0;
      size_q      <= '0;
      issued      <= '0;
      outstanding <= '0;
      done_o      <= 1'b0;
    end else if (start_i) begin
      active      <= 1'b1;
      addr_q      <= addr_i;
      stride_q    <= stride_i;
      size_q      <= size_i;
      issued      <= '0;
      outstanding <= '0;
      done_o      <= 1'b0;
    end else if (active) begin
      if (gnt) begin
        addr_q <= addr_q + stride_q;
        issued <= issued + 1'b1;
      end
      outstanding <= outstanding + 32'(gnt) - 32'(rsp);
      if (issued == size_q && outstanding == '0) begin
        active <= 1'b0;
        done_o <= 1'b1;
      end
    end
  end

  a_req_stable: assert property (@(posedge clk_i) disable iff (!rst_ni || start_i)
    bus_req_o.req && !bus_rsp_i.gnt |=> bus_req_o.req && $stable(bus_req_o.addr) && $stable(bus_req_o.wdata));
endmodule
