// tb_fu_control_input: for every data and valid select, checks the control
// bit (bit 0 of the selected word), the selected valid and the ready
// pass-back.
module tb_fu_control_input;
  logic [3:0][31:0] din; logic [3:0] vin; logic [1:0] dsel, vsel;
  logic ctrl, v, ri, ro;
  int checks = 0, failures = 0;
  fu_control_input #(.W(32)) dut (.din_i(din), .vin_i(vin), .dsel_i(dsel), .vsel_i(vsel),
    .ctrl_o(ctrl), .valid_o(v), .ready_i(ri), .ready_o(ro));
  initial begin
    for (int t = 0; t < 512; t++) begin
      for (int k = 0; k < 4; k++) din[k] = $urandom;
      vin = 4'($urandom); dsel = 2'($urandom); vsel = 2'($urandom); ri = 1'($urandom);
      #1;
      checks++; if (ctrl !== din[dsel][0]) begin failures++; $display("FAIL ctrl"); end
      checks++; if (v !== vin[vsel]) begin failures++; $display("FAIL valid"); end
      checks++; if (ro !== ri) begin failures++; $display("FAIL ready"); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin #100000; failures++; $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
