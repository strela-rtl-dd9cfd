// tb_join_merge: exhaustive check of the three Join/Merge modes for every
// combination of input valids and output ready, against the rules: Join needs
// both operands, Join with control also the control, Merge takes operand 1
// first and else operand 2; an input is acknowledged only when the token is
// formed and taken.
module tb_join_merge;
  import strela_pkg::*;
  jm_mode_e mode;
  logic v1, v2, vc, r1, r2, rc, vo, ri, ms;
  int checks = 0, failures = 0;
  join_merge dut (.mode_i(mode), .v1_i(v1), .v2_i(v2), .vc_i(vc), .r1_o(r1), .r2_o(r2), .rc_o(rc),
                  .valid_o(vo), .ready_i(ri), .merge_sel_o(ms));
  task automatic chk(bit ok, string s); checks++; if (!ok) begin failures++; $display("FAIL %s m=%0d v=%b%b%b r=%b", s, mode, v1, v2, vc, ri); end endtask
  initial begin
    for (int m = 0; m < 3; m++)
      for (int i = 0; i < 16; i++) begin
        mode = jm_mode_e'(m); {v1, v2, vc, ri} = 4'(i);
        #1;
        case (m)
          0: begin chk(vo == (v1 && v2), "join valid");
                   chk((v1 && r1) == (v1 && v2 && ri), "join ack1"); chk((v2 && r2) == (v1 && v2 && ri), "join ack2");
                   chk(!rc, "join control unused"); end
          1: begin chk(vo == (v1 && v2 && vc), "jc valid");
                   chk((v1 && r1) == (vo && ri), "jc ack1"); chk((v2 && r2) == (vo && ri), "jc ack2");
                   chk((vc && rc) == (vo && ri), "jc ackc"); end
          2: begin chk(vo == (v1 || v2), "merge valid");
                   chk((v1 && r1) == (v1 && ri), "merge ack1"); chk((v2 && r2) == (!v1 && v2 && ri), "merge ack2");
                   if (vo) chk(ms == v1, "merge select"); chk(!rc, "merge control unused"); end
        endcase
      end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin #10000; failures++; $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
