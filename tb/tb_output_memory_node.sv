// tb_output_memory_node: a random-gap token source on the CGRA side and a
// bus model that grants at random and acknowledges each write after 1-4
// cycles. Checks every write (address addr + k*stride, full byte enables,
// data in stream order), that exactly size writes are made even when the
// source offers more tokens, that done_o only rises once every write is
// acknowledged, back-pressure to the CGRA while the bus is slow, and a
// zero-size stream.
module tb_output_memory_node;
  import strela_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = !clk;
  logic start = 0; logic [31:0] addr, size, stride;
  logic done; obi_req_t req; obi_rsp_t rsp;
  logic [31:0] din; logic vin = 0, rout;
  int checks = 0, failures = 0;
  int cyc = 0, writes = 0, sent = 0, offer = 0, stalls = 0;
  int gnt_pct = 66;

  output_memory_node #(.FIFO_DEPTH(4)) dut (.clk_i(clk), .rst_ni(rst_n), .start_i(start), .addr_i(addr),
    .size_i(size), .stride_i(stride), .done_o(done), .din_i(din), .vin_i(vin), .rout_o(rout),
    .bus_req_o(req), .bus_rsp_i(rsp));

  task automatic chk(bit ok, string s); checks++; if (!ok) begin failures++; $display("FAIL %s", s); end endtask
  function automatic logic [31:0] tok(int k); return 32'(k * 7 + 100); endfunction

  int due [$];
  always @(negedge clk) begin
    rsp.gnt = req.req && ($urandom_range(0, 99) < gnt_pct);
    rsp.rvalid = due.size() > 0 && due[0] <= cyc;
    rsp.rdata = $urandom;
    if (!(vin && !rout)) begin
      vin = (sent < offer) && ($urandom_range(0, 3) != 0);
      din = tok(sent);
    end
  end
  always @(posedge clk) begin
    cyc++;
    if (rsp.rvalid) void'(due.pop_front());
    if (req.req && rsp.gnt) begin
      chk(req.we && req.be == 4'hF, "word write");
      chk(req.addr == addr + writes * stride, $sformatf("write %0d address %h", writes, req.addr));
      chk(req.wdata == tok(writes), $sformatf("write %0d data %0d", writes, req.wdata));
      writes++;
      due.push_back(cyc + $urandom_range(1, 4));
    end
    if (vin && rout) sent++;
    if (vin && !rout) stalls++;
    if (done) chk(due.size() == 0, "done only after every write is acknowledged");
  end

  task automatic run_stream(int unsigned a, int unsigned n, int unsigned s, int unsigned extra);
    addr = a; size = n; stride = s; writes = 0; sent = 0;
    @(negedge clk); start = 1; @(negedge clk); start = 0;
    offer = n + extra;
    for (int t = 0; t < 20 * n + 50 && !done; t++) @(negedge clk);
    chk(done, $sformatf("done for size %0d", n));
    repeat (8) @(negedge clk);
    chk(writes == n, $sformatf("writes %0d expected %0d", writes, n));
    // the source gives up on any tokens the node no longer wants
    offer = 0; vin = 0;
    @(negedge clk);
  endtask

  initial begin
    addr = 0; size = 0; stride = 4;
    repeat (2) @(negedge clk); rst_n = 1;
    run_stream(32'h1000, 50, 4, 0);
    gnt_pct = 10;
    run_stream(32'h2000, 30, 16, 0);
    chk(stalls > 0, "slow bus back-pressures the CGRA");
    gnt_pct = 100;
    run_stream(32'h3000, 20, 4, 3);
    run_stream(32'h4000, 0, 4, 0);
    run_stream(32'h5000, 1, 4, 0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin repeat (50000) @(posedge clk); failures++; $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
