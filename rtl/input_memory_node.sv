// input_memory_node: streams a vector from memory into a north PE input.
//
// The memory unit walks addr, addr+stride, addr+2*stride, ... for size words
// (stride in bytes, size in 32-bit words; a scalar is a stream of size 1),
// issuing reads on its own system-bus master port. Read data go into a FIFO
// whose head is offered to the CGRA with valid/ready. A read is only issued
// when the FIFO is sure to have room for it once every outstanding read has
// returned, so a slow CGRA throttles the node and a busy bus (more active
// nodes than interleaved banks) only delays it; the FIFO absorbs both.
// In configuration mode (node 0 only) the read data bypass the FIFO and go to
// the configuration deserializer, one word per cycle.
// The three stream parameters, the FIFO and the configuration role follow the
// paper; the bus protocol, units and credit scheme are this design's.
//
// Bus: request held until gnt; one rvalid with rdata per granted read, one
// or more cycles later. Throughput: one word per cycle when the bus grants
// every cycle and read latency is below FIFO_DEPTH cycles.
// done_o: level, high from when the last word has left the node (or at once
// for size 0) until the next start_i.
module input_memory_node
  import strela_pkg::*;
#(
  parameter int unsigned FIFO_DEPTH = 4
) (
  input  logic        clk_i,
  input  logic        rst_ni,
  input  logic        start_i,
  input  logic        cfg_mode_i,
  input  logic [31:0] addr_i,
  input  logic [31:0] size_i,
  input  logic [31:0] stride_i,
  output logic        done_o,
  // system bus master
  output obi_req_t    bus_req_o,
  input  obi_rsp_t    bus_rsp_i,
  // stream into the CGRA
  output logic [31:0] dout_o,
  output logic        vout_o,
  input  logic        rin_i,
  // configuration words
  output logic [31:0] cfg_word_o,
  output logic        cfg_valid_o
);
  localparam int unsigned CntW = $clog2(FIFO_DEPTH + 1);

  logic        active, cfg_mode;
  logic [31:0] addr_q, stride_q, size_q, issued, received;
  logic [CntW-1:0] outstanding, fifo_count;
  logic        fifo_empty, fifo_full, push, pop, room, gnt, rsp;

  assign room = ({1'b0, fifo_count} + {1'b0, outstanding}) < (CntW+1)'(FIFO_DEPTH);

  always_comb begin
    bus_req_o       = '0;
    bus_req_o.req   = active && (issued != size_q) && room;
    bus_req_o.we    = 1'b0;
    bus_req_o.be    = 4'hF;
    bus_req_o.addr  = addr_q;
  end

  assign gnt  = bus_req_o.req && bus_rsp_i.gnt;
  assign rsp  = active && bus_rsp_i.rvalid && (outstanding != '0);
  assign push = rsp && !cfg_mode;
  assign cfg_valid_o = rsp && cfg_mode;
  assign cfg_word_o  = bus_rsp_i.rdata;

  node_fifo #(.WIDTH(32), .DEPTH(FIFO_DEPTH)) u_fifo (
    .clk_i   (clk_i),
    .rst_ni  (rst_ni),
    .clr_i   (start_i),
    .push_i  (push),
    .data_i  (bus_rsp_i.rdata),
    .full_o  (fifo_full),
    .pop_i   (pop),
    .data_o  (dout_o),
    .empty_o (fifo_empty),
    .count_o (fifo_count)
  );

  assign vout_o = !fifo_empty;
  assign pop    = vout_o && rin_i;

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      active      <= 1'b0;
      cfg_mode    <= 1'b0;
      addr_q      <= '0;
      stride_q    <= '0;
      size_q      <= '0;
      issued      <= '0;
      received    <= '0;
      outstanding <= '0;
      done_o      <= 1'b0;
    end else if (start_i) begin
      active      <= 1'b1;
      cfg_mode    <= cfg_mode_i;
      addr_q      <= addr_i;
      stride_q    <= stride_i;
      size_q      <= size_i;
      issued      <= '0;
      received    <= '0;
      outstanding <= '0;
      done_o      <= 1'b0;
    end else if (active) begin
      if (gnt) begin
        addr_q <= addr_q + stride_q;
        issued <= issued + 1'b1;
      end
      outstanding <= outstanding + CntW'(gnt) - CntW'(rsp);
      if (rsp) received <= received + 1'b1;
      if (received == size_q && outstanding == '0 && fifo_empty) begin
        active <= 1'b0;
        done_o <= 1'b1;
      end
    end
  end

  a_no_fifo_overflow: assert property (@(posedge clk_i) disable iff (!rst_ni) !(push && fifo_full));
  a_req_stable: assert property (@(posedge clk_i) disable iff (!rst_ni || start_i)
    bus_req_o.req && !bus_rsp_i.gnt |=> bus_req_o.req && $stable(bus_req_o.addr));
endmodule
