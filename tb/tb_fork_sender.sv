// tb_fork_sender: exhaustive check of the Fork Sender for every mask, ready
// and valid combination: the token goes only when all enabled destinations
// are ready, and then to all of them in the same cycle.
module tb_fork_sender;
  logic v, r, vo;
  logic [5:0] m, rd;
  int checks = 0, failures = 0;
  fork_sender #(.N_DEST(6)) dut (.valid_i(v), .ready_o(r), .mask_i(m), .ready_i(rd), .valid_o(vo));
  initial begin
    for (int i = 0; i < 2**13; i++) begin
      {v, m, rd} = 13'(i);
      #1;
      begin
        bit all;
        all = 1;
        for (int k = 0; k < 6; k++) if (m[k] && !rd[k]) all = 0;
        checks++; if (r !== all) begin failures++; $display("FAIL ready m=%b r=%b", m, rd); end
        checks++; if (vo !== (v && all)) begin failures++; $display("FAIL valid"); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin #100000; failures++; $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
