// tb_strela_top: end-to-end test of the accelerator at its default size
// (4x4 PEs, four input and four output memory nodes, 32-bit datapath).
//
// A behavioural memory with four word-interleaved banks (one access per bank
// per cycle) stands for the host platform. The testbench plays the CPU: it
// writes kernel configurations and input vectors into memory, programs the
// control unit over MMIO, waits for the interrupt and checks the results
// against values computed here. Kernels:
//   1. stream  - every column computes y = x*(c+2) + 5 (16 PEs configured,
//                eight memory nodes active on four banks, so the bus stalls);
//   2. relu    - y = x > 0 ? x : 0 with a comparator PE and an if/else PE;
//   3. mac     - dot product with an immediate-feedback accumulator whose
//                result leaves on the delayed valid;
//   4. br/mg   - Branch on x > 0 into y = 3x or y = x ^ 7, then Merge.
// It also checks the configuration time (five words per PE), the stream
// rate, the interrupt, and counts every mechanism: configuration loads,
// bus stalls, CGRA back-pressure, Elastic Buffer skid use, Join with control,
// Branch on both sides, Merge, feedback, delayed valid and the clock gates.
module tb_strela_top;
  import strela_pkg::*;
  import strela_tb_pkg::*;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = !clk;

  obi_req_t reg_req;
  obi_rsp_t reg_rsp;
  logic     irq;
  obi_req_t [3:0] imn_req, omn_req;
  obi_rsp_t [3:0] imn_rsp, omn_rsp;
  obi_req_t [7:0] bus_req;
  obi_rsp_t [7:0] bus_rsp;

  strela_top dut (
    .clk_i (clk), .rst_ni (rst_n),
    .reg_req_i (reg_req), .reg_rsp_o (reg_rsp), .irq_o (irq),
    .imn_req_o (imn_req), .imn_rsp_i (imn_rsp),
    .omn_req_o (omn_req), .omn_rsp_i (omn_rsp)
  );

  assign bus_req = {omn_req, imn_req};
  assign {omn_rsp, imn_rsp} = bus_rsp;

  mem_model #(.N_PORTS(8), .N_BANKS(4), .WORDS(16384)) u_mem (
    .clk_i (clk), .req_i (bus_req), .rsp_o (bus_rsp)
  );

  int checks = 0, failures = 0;
  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  // ---- mechanism counters ----
  int n_cfg_words = 0, n_stall = 0, n_backpressure = 0, n_skid = 0;
  int n_join_ctrl = 0, n_b1 = 0, n_b2 = 0, n_merge = 0, n_fb = 0, n_delayed = 0;
  int n_array_off = 0, n_pe_gated = 0, n_eb_gated = 0, n_irq = 0;

  always @(posedge clk) if (rst_n) begin
    if (dut.cfg_valid) n_cfg_words++;
    for (int i = 0; i < 8; i++) if (bus_req[i].req && !bus_rsp[i].gnt) n_stall++;
    for (int i = 0; i < 4; i++) if (dut.north_v[i] && !dut.north_r[i]) n_backpressure++;
    if (!dut.array_en) n_array_off++;
    if (dut.array_en && !dut.u_cgra.g_row[3].g_col[3].u_pe.configured_o) n_pe_gated++;
    if (dut.array_en && dut.u_cgra.g_row[0].g_col[0].u_pe.configured_o
        && !dut.u_cgra.g_row[0].g_col[0].u_pe.cg[DirW]) n_eb_gated++;
    if (dut.u_cgra.g_row[0].g_col[1].u_pe.g_in[DirN].u_in.u_eb.skid_valid) n_skid++;
    if (dut.u_cgra.g_row[1].g_col[0].u_pe.u_fu.fire &&
        dut.u_cgra.g_row[1].g_col[0].u_pe.cfg.jm_mode == JM_JOIN_CTRL) n_join_ctrl++;
    if (dut.u_cgra.g_row[1].g_col[1].u_pe.v_b1) n_b1++;
    if (dut.u_cgra.g_row[1].g_col[1].u_pe.v_b2) n_b2++;
    if (dut.u_cgra.g_row[3].g_col[1].u_pe.u_fu.fire &&
        dut.u_cgra.g_row[3].g_col[1].u_pe.cfg.jm_mode == JM_MERGE) n_merge++;
    if (dut.u_cgra.g_row[1].g_col[0].u_pe.u_fu.fire &&
        dut.u_cgra.g_row[1].g_col[0].u_pe.cfg.fb_sel) n_fb++;
    if (dut.u_cgra.g_row[1].g_col[0].u_pe.v_fu_d &&
        dut.u_cgra.g_row[1].g_col[0].u_pe.cfg.out_vsel[DirS] == 3'd1) n_delayed++;
  end
  always @(posedge irq) n_irq++;

  // ---- CPU side ----
  task automatic mmio_write(logic [7:0] a, logic [31:0] d);
    @(negedge clk);
    reg_req = '{req: 1'b1, we: 1'b1, be: 4'hF, addr: {24'd0, a}, wdata: d};
    @(negedge clk);
    reg_req = '0;
  endtask
  task automatic mmio_read(logic [7:0] a, output logic [31:0] d);
    @(negedge clk);
    reg_req = '{req: 1'b1, we: 1'b0, be: 4'hF, addr: {24'd0, a}, wdata: 32'd0};
    @(negedge clk);
    reg_req = '0;
    d = reg_rsp.rdata;
  endtask

  // configuration image, built per kernel
  pe_cfg_t cfgs [16];
  bit      used [16];
  bit      fu_on [16];
  localparam int unsigned CfgBase = 0;      // word address
  int unsigned cfg_words;

  task automatic clear_cfgs();
    for (int i = 0; i < 16; i++) begin cfgs[i] = cfg_idle(); used[i] = 0; fu_on[i] = 0; end
  endtask
  task automatic write_cfg_image();
    logic [4:0][31:0] w;
    cfg_words = 0;
    for (int i = 0; i < 16; i++) if (used[i]) begin
      w = pack(i, cg_of(cfgs[i], fu_on[i]), cfgs[i]);
      for (int k = 0; k < 5; k++) u_mem.mem[CfgBase + cfg_words + k] = w[k];
      cfg_words += 5;
    end
  endtask

  task automatic set_imn(int i, int unsigned waddr, int unsigned n);
    mmio_write(REG_IMN_BASE + 8'(16*i),     waddr * 4);
    mmio_write(REG_IMN_BASE + 8'(16*i + 4), n);
    mmio_write(REG_IMN_BASE + 8'(16*i + 8), 4);
  endtask
  task automatic set_omn(int i, int unsigned waddr, int unsigned n);
    mmio_write(REG_OMN_BASE + 8'(16*i),     waddr * 4);
    mmio_write(REG_OMN_BASE + 8'(16*i + 4), n);
    mmio_write(REG_OMN_BASE + 8'(16*i + 8), 4);
  endtask
  task automatic clear_nodes();
    for (int i = 0; i < 4; i++) begin set_imn(i, 0, 0); set_omn(i, 0, 0); end
  endtask

  // load configuration only, return cycles from command to idle
  task automatic load_config(output int cycles);
    logic [31:0] st;
    write_cfg_image();
    mmio_write(REG_CFG_ADDR, CfgBase * 4);
    mmio_write(REG_CFG_SIZE, cfg_words);
    cycles = 0;
    fork
      mmio_write(REG_CTRL, 32'h2);
      begin @(posedge clk); while (!irq) begin @(posedge clk); cycles++; end end
    join
    mmio_write(REG_STATUS, 32'h2);   // clear done / interrupt
    check(!irq, "interrupt cleared by STATUS write");
  endtask

  task automatic run_kernel(output int cycles);
    logic [31:0] st;
    cycles = 0;
    fork
      mmio_write(REG_CTRL, 32'h1);
      begin @(posedge clk); while (!irq) begin @(posedge clk); cycles++; end end
    join
    mmio_read(REG_STATUS, st);
    check(st[1] && !st[0], "STATUS shows done and not busy");
    mmio_write(REG_STATUS, 32'h2);
  endtask

  localparam int unsigned InBase  = 4096;  // word addresses
  localparam int unsigned OutBase = 8192;

  int cyc, ccyc;
  int unsigned exp_q[$];

  initial begin : main
    reg_req = '0;
    for (int i = 0; i < 16384; i++) u_mem.mem[i] = 32'd0;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;

    // ================= kernel 1: four parallel streams =================
    begin
      localparam int unsigned L = 128;
      clear_cfgs();
      for (int c = 0; c < 4; c++) begin
        // row 0: x * (c+2)
        in_to_fu1(cfgs[c], DirN);  const_fu2(cfgs[c], c + 2);
        cfgs[c].alu_op = ALU_MUL;  fu_to_out(cfgs[c], DirS, 0);
        used[c] = 1; fu_on[c] = 1;
        // row 1: + 5
        in_to_fu1(cfgs[4+c], DirN); const_fu2(cfgs[4+c], 5);
        cfgs[4+c].alu_op = ALU_ADD; fu_to_out(cfgs[4+c], DirS, 0);
        used[4+c] = 1; fu_on[4+c] = 1;
        // rows 2, 3: straight through
        pass(cfgs[8+c], DirN, DirS);  used[8+c] = 1;
        pass(cfgs[12+c], DirN, DirS); used[12+c] = 1;
      end
      load_config(ccyc);
      $display("stream: configuration of 16 PEs took %0d cycles", ccyc);
      check(n_cfg_words == 16, "16 PE configuration words broadcast");
      check(ccyc >= 80 && ccyc <= 80 + 8, "configuration time is five cycles per PE plus a small overhead");
      for (int c = 0; c < 4; c++) begin
        for (int k = 0; k < L; k++) u_mem.mem[InBase + c*L + k] = 32'(k * 7 + c - 100);
        set_imn(c, InBase + c*L, L);
        set_omn(c, OutBase + c*L, L);
      end
      run_kernel(cyc);
      $display("stream: %0d outputs in %0d cycles (%0.2f outputs/cycle)", 4*L, cyc, real'(4*L)/cyc);
      check(real'(4*L)/cyc > 1.5, "stream rate above 1.5 outputs per cycle with 4 banks");
      check(real'(4*L)/cyc <= 2.05, "stream rate limited by 4 banks for 8 nodes");
      for (int c = 0; c < 4; c++)
        for (int k = 0; k < L; k++)
          check(u_mem.mem[OutBase + c*L + k] == 32'((k*7 + c - 100) * (c+2) + 5),
                $sformatf("stream col %0d elem %0d", c, k));
    end

    // ================= kernel 2: ReLU =================
    begin
      localparam int unsigned L = 48;
      clear_cfgs();
      // PE0: compare x > 0, result down; x also east
      in_to_fu1(cfgs[0], DirN); const_fu2(cfgs[0], 0);
      cfgs[0].cmp_op = CMP_GTZ; cfgs[0].out_sel = OUT_CMP;
      pass(cfgs[0], DirN, DirE); fu_to_out(cfgs[0], DirS, 0);
      used[0] = 1; fu_on[0] = 1;
      // PE1: x from west, down
      pass(cfgs[1], DirW, DirS); used[1] = 1;
      // PE5: x from north, to the west
      pass(cfgs[5], DirN, DirW); used[5] = 1;
      // PE4: if/else multiplexer: ctrl ? x : 0
      in_to_fuc(cfgs[4], DirN); in_to_fu1(cfgs[4], DirE); const_fu2(cfgs[4], 0);
      cfgs[4].jm_mode = JM_JOIN_CTRL; cfgs[4].out_sel = OUT_MUX;
      fu_to_out(cfgs[4], DirS, 0); used[4] = 1; fu_on[4] = 1;
      pass(cfgs[8], DirN, DirS);  used[8] = 1;
      pass(cfgs[12], DirN, DirS); used[12] = 1;
      load_config(ccyc);
      check(ccyc >= 30 && ccyc <= 38, "relu: six PEs configured in about 30 cycles");
      clear_nodes();
      for (int k = 0; k < L; k++) u_mem.mem[InBase + k] = 32'(k * 37 % 101 - 50);
      set_imn(0, InBase, L);
      set_omn(0, OutBase, L);
      run_kernel(cyc);
      for (int k = 0; k < L; k++) begin
        int x;
        x = k * 37 % 101 - 50;
        check(u_mem.mem[OutBase + k] == 32'(x > 0 ? x : 0), $sformatf("relu elem %0d", k));
      end
    end

    // ================= kernel 3: MAC (dot product) =================
    begin
      localparam int unsigned L = 16;
      int acc = 0;
      clear_cfgs();
      in_to_fu1(cfgs[0], DirN); in_to_fu2(cfgs[0], DirE);
      cfgs[0].alu_op = ALU_MUL; fu_to_out(cfgs[0], DirS, 0); used[0] = 1; fu_on[0] = 1;
      pass(cfgs[1], DirN, DirW); used[1] = 1;
      in_to_fu2(cfgs[4], DirN); const_fu1(cfgs[4], 0);
      cfgs[4].fb_sel = 1'b1; cfgs[4].alu_op = ALU_ADD; cfgs[4].init_data = 0;
      cfgs[4].delay = 6'(L - 1);
      fu_to_out(cfgs[4], DirS, 1); used[4] = 1; fu_on[4] = 1;
      pass(cfgs[8], DirN, DirS);  used[8] = 1;
      pass(cfgs[12], DirN, DirS); used[12] = 1;
      load_config(ccyc);
      clear_nodes();
      for (int k = 0; k < L; k++) begin
        u_mem.mem[InBase + k]      = 32'(k + 1);
        u_mem.mem[InBase + 64 + k] = 32'(3 * k - 7);
        acc += (k + 1) * (3 * k - 7);
      end
      u_mem.mem[OutBase] = 32'hDEAD_BEEF;
      u_mem.mem[OutBase + 1] = 32'hDEAD_BEEF;
      set_imn(0, InBase, L);
      set_imn(1, InBase + 64, L);
      set_omn(0, OutBase, 1);
      run_kernel(cyc);
      check(u_mem.mem[OutBase] == 32'(acc), $sformatf("mac result %0d, expected %0d", $signed(u_mem.mem[OutBase]), acc));
      check(u_mem.mem[OutBase + 1] == 32'hDEAD_BEEF, "mac wrote exactly one word");
      // run again without reconfiguring: the accumulator restarts from its initial value
      run_kernel(cyc);
      check(u_mem.mem[OutBase] == 32'(acc), "mac result again after re-initialisation");
    end

    // ================= kernel 4: Branch / Merge =================
    begin
      localparam int unsigned L = 40;
      int unsigned got [int unsigned];
      clear_cfgs();
      // PE1: x > 0 -> east; x down
      in_to_fu1(cfgs[1], DirN); const_fu2(cfgs[1], 0);
      cfgs[1].cmp_op = CMP_GTZ; cfgs[1].out_sel = OUT_CMP;
      pass(cfgs[1], DirN, DirS); fu_to_out(cfgs[1], DirE, 0); used[1] = 1; fu_on[1] = 1;
      pass(cfgs[2], DirW, DirS); used[2] = 1;                       // ctrl down
      // PE5: Branch
      in_to_fu1(cfgs[5], DirN); const_fu2(cfgs[5], 0); in_to_fuc(cfgs[5], DirE);
      cfgs[5].jm_mode = JM_JOIN_CTRL; cfgs[5].alu_op = ALU_ADD;
      fu_to_out(cfgs[5], DirS, 2); fu_to_out(cfgs[5], DirE, 3); used[5] = 1; fu_on[5] = 1;
      // PE6: ctrl to the west; false path x ^ 7 down
      pass(cfgs[6], DirN, DirW);
      in_to_fu1(cfgs[6], DirW); const_fu2(cfgs[6], 7); cfgs[6].alu_op = ALU_XOR;
      fu_to_out(cfgs[6], DirS, 0); used[6] = 1; fu_on[6] = 1;
      // PE9: true path 3x
      in_to_fu1(cfgs[9], DirN); const_fu2(cfgs[9], 3); cfgs[9].alu_op = ALU_MUL;
      fu_to_out(cfgs[9], DirS, 0); used[9] = 1; fu_on[9] = 1;
      pass(cfgs[10], DirN, DirS); used[10] = 1;
      pass(cfgs[14], DirN, DirW); used[14] = 1;
      // PE13: Merge
      in_to_fu1(cfgs[13], DirN); in_to_fu2(cfgs[13], DirE);
      cfgs[13].jm_mode = JM_MERGE; cfgs[13].out_sel = OUT_MUX;
      fu_to_out(cfgs[13], DirS, 0); used[13] = 1; fu_on[13] = 1;
      load_config(ccyc);
      clear_nodes();
      for (int k = 0; k < L; k++) begin
        int x;
        x = (k * 53) % 97 - 48;
        u_mem.mem[InBase + k] = 32'(x);
        exp_q.push_back(x > 0 ? 32'(3 * x) : 32'(x) ^ 32'd7);
      end
      set_imn(1, InBase, L);
      set_omn(1, OutBase, L);
      run_kernel(cyc);
      for (int k = 0; k < L; k++) begin
        if (got.exists(u_mem.mem[OutBase + k])) got[u_mem.mem[OutBase + k]]++;
        else got[u_mem.mem[OutBase + k]] = 1;
      end
      foreach (exp_q[k]) begin
        bit ok;
        ok = got.exists(exp_q[k]) && got[exp_q[k]] > 0;
        if (ok) got[exp_q[k]]--;
        check(ok, $sformatf("br/mg result %0d present", $signed(exp_q[k])));
      end
    end

    // ================= mechanism coverage =================
    $display("mechanisms: cfg_words=%0d bus_stalls=%0d backpressure=%0d skid=%0d join_ctrl=%0d branch_b1=%0d branch_b2=%0d merge=%0d feedback=%0d delayed=%0d array_off=%0d pe_gated=%0d eb_gated=%0d irq=%0d",
             n_cfg_words, n_stall, n_backpressure, n_skid, n_join_ctrl, n_b1, n_b2, n_merge, n_fb, n_delayed,
             n_array_off, n_pe_gated, n_eb_gated, n_irq);
    check(n_cfg_words > 0,    "configuration loads happened");
    check(n_stall > 0,        "bus stalls happened");
    check(n_backpressure > 0, "CGRA back-pressure on a memory node happened");
    check(n_skid > 0,         "an Elastic Buffer used its second slot");
    check(n_join_ctrl > 0,    "Join with control (if/else) happened");
    check(n_b1 > 0 && n_b2 > 0, "Branch took both sides");
    check(n_merge > 0,        "Merge happened");
    check(n_fb > 0,           "immediate feedback happened");
    check(n_delayed > 0,      "delayed valid happened");
    check(n_array_off > 0,    "array clock gated while idle");
    check(n_pe_gated > 0,     "unconfigured PE clock gated during a kernel");
    check(n_eb_gated > 0,     "unused Elastic Buffer clock gated during a kernel");
    check(n_irq >= 8,         "interrupt raised for every command");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin : watchdog
    repeat (200000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
