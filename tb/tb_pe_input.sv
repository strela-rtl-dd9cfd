// tb_pe_input: streams tokens into a PE input port with random destination
// masks and readies; checks that every token is delivered once, in order, to
// all enabled destinations together, and never while one of them is busy.
module tb_pe_input;
  logic clk = 0, rst_n = 0;
  always #5 clk = !clk;
  logic [31:0] din, dout; logic vin, rin, vout; logic [5:0] mask, rout;
  logic [31:0] q[$];
  int checks = 0, failures = 0, delivered = 0;
  pe_input #(.W(32)) dut (.clk_i(clk), .rst_ni(rst_n), .clr_i(1'b0), .din_i(din), .vin_i(vin), .rin_o(rin),
    .mask_i(mask), .dout_o(dout), .vout_o(vout), .rout_i(rout));
  task automatic chk(bit ok, string s); checks++; if (!ok) begin failures++; $display("FAIL %s", s); end endtask
  initial begin
    vin = 0; din = 0; mask = 6'b101011; rout = 0;
    repeat (2) @(negedge clk); rst_n = 1;
    for (int t = 0; t < 3000; t++) begin
      vin = $urandom_range(0, 1); din = $urandom;
      rout = 6'($urandom) | (($urandom_range(0, 1)) ? 6'h3F : 6'h0);
      if (t % 500 == 0) mask = 6'($urandom) | 6'b1;
      #1;
      chk(vout == (q.size() > 0 && ((rout & mask) == mask)), "valid only when all enabled destinations ready");
      if (vout) chk(dout == q[0], "order and data");
      @(posedge clk);
      if (vout) begin void'(q.pop_front()); delivered++; end
      if (vin && rin) q.push_back(din);
      @(negedge clk);
    end
    chk(delivered > 500, "enough tokens delivered");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin repeat (10000) @(posedge clk); failures++; $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
