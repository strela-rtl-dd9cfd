// join_merge: synchronises the inputs of the functional unit (FU).
//
// It has two operand inputs and one control input and three modes:
//   JM_JOIN      - a token is formed when both operands are valid;
//   JM_JOIN_CTRL - a token is formed when both operands and the control are
//                  valid (used for Branch and for the if/else multiplexer);
//   JM_MERGE     - a token is formed from whichever operand is valid
//                  (operand 1 first if both are), and merge_sel_o tells the
//                  datapath multiplexer which one it was.
// The modes follow the paper. Each input's ready is built from the output
// ready and the valids of the other inputs only, never from its own valid, so
// the unbuffered control input cannot close a combinational loop through a
// Fork Sender; this gate-level form is this design's choice.
// Purely combinational; a token moves when valid_o && ready_i.
module join_merge
  import strela_pkg::*;
(
  input  jm_mode_e mode_i,
  input  logic     v1_i,
  input  logic     v2_i,
  input  logic     vc_i,
  output logic     r1_o,
  output logic     r2_o,
  output logic     rc_o,
  output logic     valid_o,
  input  logic     ready_i,
  output logic     merge_sel_o
);
  always_comb begin
    r1_o        = 1'b0;
    r2_o        = 1'b0;
    rc_o        = 1'b0;
    valid_o     = 1'b0;
    merge_sel_o = v1_i;
    unique case (mode_i)
      JM_JOIN: begin
        valid_o = v1_i & v2_i;
        r1_o    = ready_i & v2_i;
        r2_o    = ready_i & v1_i;
      end
      JM_JOIN_CTRL: begin
        valid_o = v1_i & v2_i & vc_i;
        r1_o    = ready_i & v2_i & vc_i;
        r2_o    = ready_i & v1_i & vc_i;
        rc_o    = ready_i & v1_i & v2_i;
      end
      JM_MERGE: begin
        valid_o = v1_i | v2_i;
        r1_o    = ready_i;
        r2_o    = ready_i & !v1_i;
      end
      default: ;
    endcase
  end
endmodule
