// tb_node_fifo: random pushes and pops against a reference queue: order,
// data, count, full and empty flags, and clear.
module tb_node_fifo;
  logic clk = 0, rst_n = 0, clr = 0;
  always #5 clk = !clk;
  logic push, pop, full, empty;
  logic [31:0] din, dout;
  logic [2:0] cnt;
  logic [31:0] q[$];
  int checks = 0, failures = 0;
  node_fifo #(.WIDTH(32), .DEPTH(4)) dut (.clk_i(clk), .rst_ni(rst_n), .clr_i(clr), .push_i(push), .data_i(din),
    .full_o(full), .pop_i(pop), .data_o(dout), .empty_o(empty), .count_o(cnt));
  task automatic chk(bit ok, string s); checks++; if (!ok) begin failures++; $display("FAIL %s", s); end endtask
  initial begin
    push = 0; pop = 0; din = 0;
    repeat (2) @(negedge clk); rst_n = 1; @(negedge clk);
    for (int t = 0; t < 4000; t++) begin
      din = $urandom;
      push = $urandom_range(0, 1) && (q.size() < 4);
      pop  = $urandom_range(0, 1) && (q.size() > 0);
      #1;
      chk(cnt == q.size(), "count");
      chk(full == (q.size() == 4) && empty == (q.size() == 0), "flags");
      if (q.size() > 0) chk(dout == q[0], "head data and order");
      @(posedge clk);
      if (pop) void'(q.pop_front());
      if (push) q.push_back(din);
      @(negedge clk);
    end
    push = 1; pop = 0; repeat (4 - q.size()) @(negedge clk); push = 0;
    chk(full && cnt == 4, "fills to DEPTH");
    clr = 1; @(negedge clk); clr = 0;
    chk(empty && cnt == 0, "clear");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin repeat (20000) @(posedge clk); failures++; $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
