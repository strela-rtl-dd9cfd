// tb_clock_gate: counts rising edges of the gated clock for random enable
// patterns (enable changed while the clock is low or high) and checks that an
// edge passes exactly when the enable was high before it, and that the gated
// clock never pulses while the input clock is low.
module tb_clock_gate;
  logic clk = 0, en = 0, gclk;
  int checks = 0, failures = 0, edges = 0, expected = 0;
  clock_gate dut (.clk_i(clk), .en_i(en), .clk_o(gclk));
  always @(posedge gclk) edges++;
  always @(gclk) if (gclk && !clk) begin failures++; $display("FAIL glitch"); end
  initial begin
    for (int t = 0; t < 500; t++) begin
      bit e;
      e = $urandom_range(0, 1);
      #2 en = e;             // clock low: takes effect on the next edge
      #3 clk = 1;
      if (e) expected++;
      #2 en = $urandom_range(0, 1);   // clock high: must not cut the pulse
      #3 clk = 0;
      #1;
      checks++;
      if (edges != expected) begin failures++; $display("FAIL edges %0d expected %0d", edges, expected); end
      #0 en = e;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin #100000; failures++; $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
