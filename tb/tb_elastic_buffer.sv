// tb_elastic_buffer: drives random valid/ready patterns through the two-slot
// Elastic Buffer and checks, against a reference queue, that every token
// comes out once, in order, unchanged; that ready_o is low exactly when two
// tokens are held; that a token with a ready sink passes in one cycle; that a
// full-rate stream keeps one token per cycle; and that clr_i empties it.
module tb_elastic_buffer;
  logic clk = 0, rst_n = 0, clr = 0;
  always #5 clk = !clk;
  logic [31:0] din, dout;
  logic vin, rdy_o, vout, rdy_i;
  int checks = 0, failures = 0;
  logic [31:0] q[$];

  elastic_buffer #(.WIDTH(32)) dut (.clk_i(clk), .rst_ni(rst_n), .clr_i(clr),
    .data_i(din), .valid_i(vin), .ready_o(rdy_o), .data_o(dout), .valid_o(vout), .ready_i(rdy_i));

  task automatic chk(bit ok, string s); checks++; if (!ok) begin failures++; $display("FAIL %s", s); end endtask

  int sent = 0, got = 0;
  initial begin
    vin = 0; rdy_i = 0; din = 0;
    repeat (2) @(posedge clk); rst_n = 1;
    // latency: one cycle with a ready sink
    @(negedge clk); vin = 1; din = 32'hA5; rdy_i = 1;
    @(negedge clk); vin = 0;
    chk(vout && dout == 32'hA5, "one-cycle latency");
    @(negedge clk);
    chk(!vout, "token leaves once");
    // full rate
    for (int i = 0; i < 20; i++) begin
      vin = 1; din = i; @(negedge clk);
      chk(vout && dout == i, "full-rate stream, one token per cycle");
    end
    vin = 0; @(negedge clk);
    // random traffic
    for (int t = 0; t < 3000; t++) begin
      vin = $urandom_range(0, 1); din = $urandom; rdy_i = ($urandom_range(0, 3) != 0);
      #1;
      chk(rdy_o == (q.size() < 2), "ready_o low exactly when two tokens held");
      chk(vout == (q.size() > 0), "valid_o high exactly when a token is held");
      if (vout && q.size() > 0) chk(dout == q[0], "order and data");
      @(posedge clk);
      if (vout && rdy_i) begin void'(q.pop_front()); got++; end
      if (vin && rdy_o) begin q.push_back(din); sent++; end
      @(negedge clk);
    end
    // fill, then clear
    rdy_i = 0; vin = 1; repeat (3) @(negedge clk); vin = 0;
    chk(!rdy_o && vout, "two tokens held");
    clr = 1; @(negedge clk); clr = 0;
    chk(!vout && rdy_o, "clr empties the buffer");
    chk(got > 1000, "enough traffic");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin repeat (20000) @(posedge clk); failures++; $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
