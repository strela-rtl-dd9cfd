// tb_fu_data_input: for every data and valid select, checks that the right
// source reaches the Elastic Buffer output one cycle later, that constants
// with the '1' valid stream continuously, and that ready_o falls when the
// buffer holds two tokens.
module tb_fu_data_input;
  logic clk = 0, rst_n = 0;
  always #5 clk = !clk;
  logic [3:0][31:0] din; logic [3:0] vin;
  logic [31:0] dfu, cst, dout; logic vfu, vb1, vb2, vout, rdy_i, rdy_o;
  logic [2:0] dsel, vsel;
  int checks = 0, failures = 0;
  fu_data_input #(.W(32)) dut (.clk_i(clk), .rst_ni(rst_n), .clr_i(1'b0), .din_i(din), .vin_i(vin),
    .dout_fu_i(dfu), .const_i(cst), .vout_fu_i(vfu), .vout_b1_i(vb1), .vout_b2_i(vb2),
    .dsel_i(dsel), .vsel_i(vsel), .data_o(dout), .valid_o(vout), .ready_i(rdy_i), .ready_o(rdy_o));
  task automatic chk(bit ok, string s); checks++; if (!ok) begin failures++; $display("FAIL %s", s); end endtask
  initial begin
    din = {32'd40, 32'd30, 32'd20, 32'd10}; dfu = 32'd50; cst = 32'd60;
    vin = 0; vfu = 0; vb1 = 0; vb2 = 0; rdy_i = 1; dsel = 0; vsel = 0;
    repeat (2) @(negedge clk); rst_n = 1;
    for (int d = 0; d < 8; d++) begin
      dsel = 3'(d); vsel = 3'(d);
      {vb2, vb1, vfu, vin} = '0;
      case (d)
        0, 1, 2, 3: vin[d] = 1;  4: vfu = 1;  5: ;  6: vb1 = 1;  default: vb2 = 1;
      endcase
      @(negedge clk);
      chk(vout, $sformatf("valid source %0d selected", d));
      chk(dout == (d < 4 ? 32'(10*(d+1)) : d == 4 ? 32'd50 : 32'd60), $sformatf("data source %0d selected", d));
      // with every valid low, only the '1' source keeps streaming
      {vb2, vb1, vfu, vin} = '0;
      @(negedge clk); @(negedge clk);
      chk(vout == (d == 5), $sformatf("valid select %0d follows only its source", d));
    end
    // back-pressure: '1' source, sink stalled
    dsel = 5; vsel = 5; rdy_i = 0;
    repeat (3) @(negedge clk);
    chk(!rdy_o, "ready_o low with two tokens held");
    rdy_i = 1; @(negedge clk);
    chk(rdy_o, "ready_o back after a token leaves");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin repeat (2000) @(posedge clk); failures++; $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
