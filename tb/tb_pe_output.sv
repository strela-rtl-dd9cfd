// tb_pe_output: for every data and valid select, checks that the selected
// source drives the output, that select 7 is never valid and that the
// neighbour's ready goes back unchanged.
module tb_pe_output;
  logic [31:0] dfu, dout; logic [2:0][31:0] din; logic [3:0] vfu; logic [2:0] vin;
  logic [1:0] dsel; logic [2:0] vsel; logic vout, ri, ro;
  int checks = 0, failures = 0;
  pe_output #(.W(32)) dut (.dout_fu_i(dfu), .din_i(din), .vfu_i(vfu), .vin_i(vin), .dsel_i(dsel),
    .vsel_i(vsel), .dout_o(dout), .vout_o(vout), .rin_i(ri), .rout_o(ro));
  initial begin
    for (int t = 0; t < 1024; t++) begin
      logic [31:0] ed; logic ev;
      dfu = $urandom; for (int k = 0; k < 3; k++) din[k] = $urandom;
      vfu = 4'($urandom); vin = 3'($urandom); dsel = 2'($urandom); vsel = 3'($urandom); ri = 1'($urandom);
      ed = (dsel == 0) ? dfu : din[dsel - 1];
      ev = (vsel < 4) ? vfu[vsel] : (vsel < 7) ? vin[vsel - 4] : 1'b0;
      #1;
      checks++; if (dout !== ed) begin failures++; $display("FAIL data sel %0d", dsel); end
      checks++; if (vout !== ev) begin failures++; $display("FAIL valid sel %0d", vsel); end
      checks++; if (ro !== ri) begin failures++; $display("FAIL ready"); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin #100000; failures++; $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
