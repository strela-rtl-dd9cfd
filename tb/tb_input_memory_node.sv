// tb_input_memory_node: the node against a bus model that grants at random
// and answers each granted read in order after 1-4 cycles, with the CGRA side
// taking tokens at random. Checks the address sequence (addr + k*stride, only
// word reads), the stream contents and order, that exactly size words are
// read, done_o, a zero-size stream, that the FIFO never overflows under a
// stalled consumer, and configuration mode (data go to the configuration
// port one per cycle, never to the CGRA port).
module tb_input_memory_node;
  import strela_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = !clk;
  logic start = 0, cfg_mode = 0; logic [31:0] addr, size, stride;
  logic done; obi_req_t req; obi_rsp_t rsp;
  logic [31:0] dout, cword; logic vout, rin = 0, cvalid;
  int checks = 0, failures = 0;
  int cyc = 0, reads = 0, got = 0, cgot = 0, max_out = 0;
  int ready_pct = 75;

  input_memory_node #(.FIFO_DEPTH(4)) dut (.clk_i(clk), .rst_ni(rst_n), .start_i(start), .cfg_mode_i(cfg_mode),
    .addr_i(addr), .size_i(size), .stride_i(stride), .done_o(done), .bus_req_o(req), .bus_rsp_i(rsp),
    .dout_o(dout), .vout_o(vout), .rin_i(rin), .cfg_word_o(cword), .cfg_valid_o(cvalid));

  task automatic chk(bit ok, string s); checks++; if (!ok) begin failures++; $display("FAIL %s", s); end endtask
  function automatic logic [31:0] memv(logic [31:0] a); return a * 3 + 7; endfunction

  // bus model
  int due [$]; logic [31:0] dat [$];
  always @(negedge clk) begin
    rsp.gnt = req.req && ($urandom_range(0, 2) != 0);
    rsp.rvalid = due.size() > 0 && due[0] <= cyc;
    rsp.rdata = rsp.rvalid ? dat[0] : $urandom;
    rin = ($urandom_range(0, 99) < ready_pct);
  end
  always @(posedge clk) begin
    cyc++;
    if (rsp.rvalid) begin void'(due.pop_front()); void'(dat.pop_front()); end
    if (req.req && rsp.gnt) begin
      chk(!req.we && req.be == 4'hF, "word read");
      chk(req.addr == addr + reads * stride, $sformatf("read %0d address %h", reads, req.addr));
      reads++;
      due.push_back(cyc + $urandom_range(1, 4)); dat.push_back(memv(req.addr));
    end
    if (due.size() > max_out) max_out = due.size();
    if (vout && rin) begin
      chk(!cfg_mode, "no CGRA token in configuration mode");
      chk(dout == memv(addr + got * stride), $sformatf("token %0d", got));
      got++;
    end
    if (cvalid) begin
      chk(cfg_mode, "configuration words only in configuration mode");
      chk(cword == memv(addr + cgot * stride), $sformatf("configuration word %0d", cgot));
      cgot++;
    end
  end

  task automatic run_stream(int unsigned a, int unsigned n, int unsigned s, bit cm);
    addr = a; size = n; stride = s; cfg_mode = cm; reads = 0; got = 0; cgot = 0;
    @(negedge clk); start = 1; @(negedge clk); start = 0;
    for (int t = 0; t < 20 * n + 50 && !done; t++) @(negedge clk);
    chk(done, $sformatf("done for size %0d", n));
    repeat (5) @(negedge clk);
    chk(reads == n, $sformatf("reads %0d expected %0d", reads, n));
    chk((cm ? cgot : got) == n, $sformatf("delivered %0d expected %0d", cm ? cgot : got, n));
  endtask

  initial begin
    addr = 0; size = 0; stride = 4;
    repeat (2) @(negedge clk); rst_n = 1;
    run_stream(32'h1000, 50, 4, 0);
    run_stream(32'h2000, 37, 12, 0);
    ready_pct = 10;
    run_stream(32'h3000, 40, 8, 0);
    chk(max_out <= 4, "outstanding reads never exceed the FIFO depth");
    ready_pct = 100;
    run_stream(32'h4000, 1, 4, 0);
    run_stream(32'h5000, 0, 4, 0);
    run_stream(32'h6000, 25, 4, 1);
    run_stream(32'h7000, 20, 4, 0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin repeat (50000) @(posedge clk); failures++; $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
