// pe: processing element of the STRELA elastic CGRA.
//
// A PE has an input and an output port on each side (N, E, S, W) and a
// functional unit (FU) in the middle:
//   * four pe_input ports (Elastic Buffer + Fork Sender);
//   * two fu_data_input operand inputs (multiplexers + Elastic Buffer) and
//     one fu_control_input (multiplexers only);
//   * the fu (Join/Merge, ALU, comparator, multiplexer, output register,
//     Fork Sender, delayed valid);
//   * four pe_output ports (data and valid multiplexers only).
// Routes allowed: PE input -> FU inputs, PE input -> PE output on another
// side, FU output -> PE outputs and FU output -> own FU data inputs.
//
// Configuration. The deserializer broadcasts {ID, clock-gate bits, 148-bit
// configuration}; the PE whose PE_ID matches keeps it and marks itself
// configured. cfg_clear_i forgets the configuration of every PE (done before a
// new kernel configuration is loaded). The configuration registers run on the
// always-on clock clk_i. Until it is configured a PE shows valid 0 on its
// outputs and ready 0 on its inputs (this design's choice), so a neighbour
// can never lose a token into an idle PE.
//
// Clock gating (following the paper's hierarchy): the datapath runs on
// array_clk_i (already gated by the control unit while no kernel runs), gated
// again unless this PE is configured; each of the six Elastic Buffers (four PE
// inputs, two FU data inputs) is further gated by its configuration bit. All
// gates are opened during clr_i, the one-cycle kernel initialisation, so that
// every register is emptied or loaded with its initial value.
//
// Timing: one cycle per Elastic Buffer crossed and one cycle through the FU
// output register; a route straight through the PE costs one cycle (the
// input buffer).
module pe
  import strela_pkg::*;
#(
  parameter int unsigned W     = 32,
  parameter int unsigned PE_ID = 0
) (
  input  logic                 clk_i,        // always-on clock (configuration)
  input  logic                 array_clk_i,  // gated array clock (datapath)
  input  logic                 rst_ni,
  input  logic                 clr_i,        // kernel-start initialisation
  // configuration broadcast
  input  logic                 cfg_clear_i,
  input  logic                 cfg_valid_i,
  input  logic [IdW-1:0]       cfg_id_i,
  input  logic [CgW-1:0]       cfg_cg_i,
  input  pe_cfg_t              cfg_word_i,
  output logic                 configured_o,
  // N, E, S, W ports
  input  logic [3:0][W-1:0]    din_i,
  input  logic [3:0]           vin_i,
  output logic [3:0]           rin_o,
  output logic [3:0][W-1:0]    dout_o,
  output logic [3:0]           vout_o,
  input  logic [3:0]           rout_i
);
  pe_cfg_t        cfg;
  logic [CgW-1:0] cg;

  // ---- configuration registers (always-on clock) ----
  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      cfg          <= '0;
      cg           <= '0;
      configured_o <= 1'b0;
    end else if (cfg_clear_i) begin
      cfg          <= '0;
      cg           <= '0;
      configured_o <= 1'b0;
    end else if (cfg_valid_i && cfg_id_i == IdW'(PE_ID)) begin
      cfg          <= cfg_word_i;
      cg           <= cfg_cg_i;
      configured_o <= 1'b1;
    end
  end

  // ---- clock gates ----
  logic           pe_clk;
  logic [CgW-1:0] eb_clk;

  clock_gate u_cg_pe (.clk_i(array_clk_i), .en_i(configured_o | clr_i), .clk_o(pe_clk));
  for (genvar g = 0; g < CgW; g++) begin : g_cg_eb
    clock_gate u_cg_eb (.clk_i(pe_clk), .en_i(cg[g] | clr_i), .clk_o(eb_clk[g]));
  end

  // ---- internal nets ----
  logic [3:0][W-1:0] in_d;
  logic [3:0]        in_v;
  logic [3:0]        out_r;     // ready of each output port (from the neighbour)
  logic [W-1:0]      fu1_d, fu2_d, fu_dout;
  logic              fu1_v, fu2_v, fuc_v, fuc_bit;
  logic              fu1_rdy_eb, fu2_rdy_eb, fuc_rdy_out;   // readies seen by sources
  logic              fu1_rdy_fu, fu2_rdy_fu, fuc_rdy_fu;    // readies from the FU
  logic              v_fu, v_fu_d, v_b1, v_b2;

  // An unconfigured PE neither offers nor accepts tokens on its ports.
  logic [3:0] in_rdy, out_v;
  assign rin_o  = in_rdy & {4{configured_o}};
  assign vout_o = out_v & {4{configured_o}};

  // Index of the k-th side other than side p (N,E,S,W order).
  function automatic int unsigned other(int unsigned p, int unsigned k);
    return (k < p) ? k : k + 1;
  endfunction

  // ---- PE input ports ----
  for (genvar p = 0; p < 4; p++) begin : g_in
    logic [5:0] dest_rdy;
    assign dest_rdy[InDestFu1] = fu1_rdy_eb;
    assign dest_rdy[InDestFu2] = fu2_rdy_eb;
    assign dest_rdy[InDestFuc] = fuc_rdy_out;
    for (genvar k = 0; k < 3; k++) begin : g_o
      assign dest_rdy[InDestO0 + k] = out_r[other(p, k)];
    end
    pe_input #(.W(W)) u_in (
      .clk_i  (eb_clk[p]),
      .rst_ni (rst_ni),
      .clr_i  (clr_i),
      .din_i  (din_i[p]),
      .vin_i  (vin_i[p]),
      .rin_o  (in_rdy[p]),
      .mask_i (cfg.in_mask[p]),
      .dout_o (in_d[p]),
      .vout_o (in_v[p]),
      .rout_i (dest_rdy)
    );
  end

  // ---- FU inputs ----
  fu_data_input #(.W(W)) u_fu1 (
    .clk_i (eb_clk[4]), .rst_ni (rst_ni), .clr_i (clr_i),
    .din_i (in_d), .vin_i (in_v), .dout_fu_i (fu_dout), .const_i (cfg.const_val),
    .vout_fu_i (v_fu), .vout_b1_i (v_b1), .vout_b2_i (v_b2),
    .dsel_i (cfg.fu1_dsel), .vsel_i (cfg.fu1_vsel),
    .data_o (fu1_d), .valid_o (fu1_v), .ready_i (fu1_rdy_fu), .ready_o (fu1_rdy_eb)
  );

  fu_data_input #(.W(W)) u_fu2 (
    .clk_i (eb_clk[5]), .rst_ni (rst_ni), .clr_i (clr_i),
    .din_i (in_d), .vin_i (in_v), .dout_fu_i (fu_dout), .const_i (cfg.const_val),
    .vout_fu_i (v_fu), .vout_b1_i (v_b1), .vout_b2_i (v_b2),
    .dsel_i (cfg.fu2_dsel), .vsel_i (cfg.fu2_vsel),
    .data_o (fu2_d), .valid_o (fu2_v), .ready_i (fu2_rdy_fu), .ready_o (fu2_rdy_eb)
  );

  fu_control_input #(.W(W)) u_fuc (
    .din_i (in_d), .vin_i (in_v), .dsel_i (cfg.fuc_dsel), .vsel_i (cfg.fuc_vsel),
    .ctrl_o (fuc_bit), .valid_o (fuc_v), .ready_i (fuc_rdy_fu), .ready_o (fuc_rdy_out)
  );

  // ---- FU ----
  fu #(.W(W)) u_fu (
    .clk_i (pe_clk), .rst_ni (rst_ni), .clr_i (clr_i),
    .alu_op_i (cfg.alu_op), .fb_sel_i (cfg.fb_sel), .cmp_op_i (cfg.cmp_op),
    .jm_mode_i (cfg.jm_mode), .out_sel_i (cfg.out_sel),
    .init_data_i (cfg.init_data), .init_valid_i (cfg.init_valid),
    .mask_i (cfg.fu_mask), .delay_i (cfg.delay),
    .din_fu1_i (fu1_d), .vin_fu1_i (fu1_v), .rin_fu1_o (fu1_rdy_fu),
    .din_fu2_i (fu2_d), .vin_fu2_i (fu2_v), .rin_fu2_o (fu2_rdy_fu),
    .din_fuc_i (fuc_bit), .vin_fuc_i (fuc_v), .rin_fuc_o (fuc_rdy_fu),
    .dout_o (fu_dout), .vout_fu_o (v_fu), .vout_fu_d_o (v_fu_d),
    .vout_b1_o (v_b1), .vout_b2_o (v_b2),
    .rout_i ({out_r[DirW], out_r[DirS], out_r[DirE], out_r[DirN], fu2_rdy_eb, fu1_rdy_eb})
  );

  // ---- PE output ports ----
  for (genvar q = 0; q < 4; q++) begin : g_out
    logic [2:0][W-1:0] od;
    logic [2:0]        ov;
    for (genvar k = 0; k < 3; k++) begin : g_o
      assign od[k] = in_d[other(q, k)];
      assign ov[k] = in_v[other(q, k)];
    end
    pe_output #(.W(W)) u_out (
      .dout_fu_i (fu_dout),
      .din_i     (od),
      .vfu_i     ({v_b2, v_b1, v_fu_d, v_fu}),
      .vin_i     (ov),
      .dsel_i    (cfg.out_dsel[q]),
      .vsel_i    (cfg.out_vsel[q]),
      .dout_o    (dout_o[q]),
      .vout_o    (out_v[q]),
      .rin_i     (rout_i[q]),
      .rout_o    (out_r[q])
    );
  end
endmodule
