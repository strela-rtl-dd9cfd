// node_fifo: small synchronous FIFO placed in every memory node between the
// memory unit and the CGRA, to absorb stalls on either side (the paper: when
// more memory nodes are active than there are interleaved banks).
//
// Circular buffer of DEPTH entries with read and write pointers and a fill
// counter. data_o shows the head whenever empty_o is low; pop_i removes it.
// push_i while full_o is high (even with a pop), or pop_i when empty_o is high, is ignored (and
// flagged by an assertion). clr_i empties the FIFO. Push and pop in the same
// cycle are allowed. DEPTH is this design's choice (the paper gives none).
module node_fifo #(
  parameter int unsigned WIDTH = 32,
  parameter int unsigned DEPTH = 4
) (
  input  logic                       clk_i,
  input  logic                       rst_ni,
  input  logic                       clr_i,
  input  logic                       push_i,
  input  logic [WIDTH-1:0]           data_i,
  output logic                       full_o,
  input  logic                       pop_i,
  output logic [WIDTH-1:0]           data_o,
  output logic                       empty_o,
  output logic [$clog2(DEPTH+1)-1:0] count_o
);
  localparam int unsigned PtrW = (DEPTH > 1) ? $clog2(DEPTH) : 1;
  localparam int unsigned CntW = $clog2(DEPTH+1);

  logic [WIDTH-1:0] mem [DEPTH];
  logic [PtrW-1:0]  wr_ptr, rd_ptr;
  logic             do_push, do_pop;

  assign full_o  = (count_o == CntW'(DEPTH));
  assign empty_o = (count_o == '0);
  assign do_push = push_i && !full_o;
  assign do_pop  = pop_i && !empty_o;
  assign data_o  = mem[rd_ptr];

  function automatic logic [PtrW-1:0] next_ptr(logic [PtrW-1:0] p);
    return (p == PtrW'(DEPTH - 1)) ? '0 : p + 1'b1;
  endfunction

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      wr_ptr  <= '0;
      rd_ptr  <= '0;
      count_o <= '0;
    end else if (clr_i) begin
      wr_ptr  <= '0;
      rd_ptr  <= '0;
      count_o <= '0;
    end else begin
      if (do_push) wr_ptr <= next_ptr(wr_ptr);
      if (do_pop)  rd_ptr <= next_ptr(rd_ptr);
      count_o <= count_o + CntW'(do_push) - CntW'(do_pop);
    end
  end

  always_ff @(posedge clk_i) begin
    if (do_push) mem[wr_ptr] <= data_i;
  end

  a_no_overflow:  assert property (@(posedge clk_i) disable iff (!rst_ni) !(push_i && full_o));
  a_no_underflow: assert property (@(posedge clk_i) disable iff (!rst_ni) !(pop_i && empty_o));
endmodule
