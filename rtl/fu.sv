// fu: functional unit of a PE together with its output stage.
//
// Operation. The Join/Merge block combines the two operand inputs (and the
// control input, in Join-with-control mode) into one token. The datapath then
// computes, in one cycle, three results in parallel:
//   ALU        add, sub, mult, shift left/right, AND, OR, XOR; operand 1 can
//              be replaced by the FU's own data register (immediate feedback,
//              for reductions and counters);
//   comparator op1 - op2 equal to zero, or greater than zero (signed);
//   multiplexer op1 or op2, selected by the control bit (if/else) or, in
//              Merge mode, by whichever operand arrived.
// The configured result is written to the data register dout_o together with
// three valid registers: v_FU (a token is present) and v_B1/v_B2 (the token
// belongs to the "true"/"false" side of a Branch; only set in
// Join-with-control mode). A Fork Sender shows the token to the enabled
// destinations (FU1, FU2, N, E, S, W) and releases it when all are ready.
// vout_FU_d is vout_FU raised only on every (delay+1)-th token, for
// committing a reduction or ending a loop.
//
// All of this structure follows the paper; the ALU opcode set, the operand
// taken by the feedback multiplexer, the comparator's use of op1 - op2, which
// control value selects which side and the counter form of the delay are this
// design's choices.
//
// Timing: a token that arrives with the output stage free is at the output
// one cycle later; the stage accepts a new token in the cycle its previous
// token leaves, so one token per cycle is sustained. clr_i loads the
// configured initial data and valid values (start of a kernel).
module fu
  import strela_pkg::*;
#(
  parameter int unsigned W = 32
) (
  input  logic              clk_i,
  input  logic              rst_ni,
  input  logic              clr_i,
  // configuration
  input  alu_op_e           alu_op_i,
  input  logic              fb_sel_i,
  input  cmp_op_e           cmp_op_i,
  input  jm_mode_e          jm_mode_i,
  input  out_sel_e          out_sel_i,
  input  logic [W-1:0]      init_data_i,
  input  logic [2:0]        init_valid_i,   // {B2, B1, FU}
  input  logic [5:0]        mask_i,         // {W,S,E,N,FU2,FU1}
  input  logic [DelayW-1:0] delay_i,
  // operand and control inputs
  input  logic [W-1:0]      din_fu1_i,
  input  logic              vin_fu1_i,
  output logic              rin_fu1_o,
  input  logic [W-1:0]      din_fu2_i,
  input  logic              vin_fu2_i,
  output logic              rin_fu2_o,
  input  logic              din_fuc_i,
  input  logic              vin_fuc_i,
  output logic              rin_fuc_o,
  // output
  output logic [W-1:0]      dout_o,
  output logic              vout_fu_o,
  output logic              vout_fu_d_o,
  output logic              vout_b1_o,
  output logic              vout_b2_o,
  input  logic [5:0]        rout_i          // {W,S,E,N,FU2,FU1}
);
  logic          j_valid, j_ready, merge_sel;
  logic          v_fu, v_b1, v_b2;
  logic          fork_ready, fork_valid;
  logic [W-1:0]  alu_a, alu_res, cmp_res, mux_res, result;
  logic          cmp_bit, mux_sel, fire;
  logic [DelayW-1:0] cnt;

  join_merge u_join (
    .mode_i      (jm_mode_i),
    .v1_i        (vin_fu1_i),
    .v2_i        (vin_fu2_i),
    .vc_i        (vin_fuc_i),
    .r1_o        (rin_fu1_o),
    .r2_o        (rin_fu2_o),
    .rc_o        (rin_fuc_o),
    .valid_o     (j_valid),
    .ready_i     (j_ready),
    .merge_sel_o (merge_sel)
  );

  // ---- datapath ----
  assign alu_a = fb_sel_i ? dout_o : din_fu1_i;

  always_comb begin
    unique case (alu_op_i)
      ALU_ADD: alu_res = alu_a + din_fu2_i;
      ALU_SUB: alu_res = alu_a - din_fu2_i;
      ALU_MUL: alu_res = alu_a * din_fu2_i;
      ALU_SLL: alu_res = alu_a << din_fu2_i[4:0];
      ALU_SRL: alu_res = alu_a >> din_fu2_i[4:0];
      ALU_AND: alu_res = alu_a & din_fu2_i;
      ALU_OR:  alu_res = alu_a | din_fu2_i;
      ALU_XOR: alu_res = alu_a ^ din_fu2_i;
      default: alu_res = '0;
    endcase
  end

  assign cmp_bit = (cmp_op_i == CMP_EQZ) ? (din_fu1_i == din_fu2_i)
                                         : ($signed(din_fu1_i) > $signed(din_fu2_i));
  assign cmp_res = {{(W-1){1'b0}}, cmp_bit};

  assign mux_sel = (jm_mode_i == JM_MERGE) ? merge_sel : din_fuc_i;
  assign mux_res = mux_sel ? din_fu1_i : din_fu2_i;

  always_comb begin
    unique case (out_sel_i)
      OUT_ALU: result = alu_res;
      OUT_CMP: result = cmp_res;
      OUT_MUX: result = mux_res;
      default: result = alu_res;
    endcase
  end

  // ---- output stage ----
  fork_sender #(.N_DEST(6)) u_fork (
    .valid_i (v_fu),
    .ready_o (fork_ready),
    .mask_i  (mask_i),
    .ready_i (rout_i),
    .valid_o (fork_valid)
  );

  assign j_ready = !v_fu || fork_ready;
  assign fire    = j_valid && j_ready;

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      dout_o <= '0;
      v_fu   <= 1'b0;
      v_b1   <= 1'b0;
      v_b2   <= 1'b0;
      cnt    <= '0;
    end else if (clr_i) begin
      dout_o <= init_data_i;
      v_fu   <= init_valid_i[0];
      v_b1   <= init_valid_i[1];
      v_b2   <= init_valid_i[2];
      cnt    <= '0;
    end else begin
      if (fire) begin
        dout_o <= result;
        v_fu   <= 1'b1;
        v_b1   <= (jm_mode_i == JM_JOIN_CTRL) &&  din_fuc_i;
        v_b2   <= (jm_mode_i == JM_JOIN_CTRL) && !din_fuc_i;
      end else if (fork_valid) begin
        v_fu   <= 1'b0;
        v_b1   <= 1'b0;
        v_b2   <= 1'b0;
      end
      if (fork_valid) cnt <= (cnt == delay_i) ? '0 : cnt + 1'b1;
    end
  end

  assign vout_fu_o   = fork_valid;
  assign vout_b1_o   = v_b1 & fork_ready;
  assign vout_b2_o   = v_b2 & fork_ready;
  assign vout_fu_d_o = fork_valid && (cnt == delay_i);

  a_join_ready_when_empty: assert property (@(posedge clk_i) disable iff (!rst_ni || clr_i)
    !v_fu |-> j_ready);
endmodule
