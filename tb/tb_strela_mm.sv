// tb_strela_mm: dense matrix multiplication on the whole accelerator, as a
// sequence of partial kernels. One configuration computes three dot products
// at a time (a row of A against three columns of B, Fig.-10-style mapping:
// multipliers in row 0, feedback accumulators committing on the delayed
// valid in row 1); the CPU then only rewrites node addresses and restarts
// the kernel, ceil(n/3) times per row of C. Runs a full 16x16 product, the
// first rows of a 64x64 product (the longest dot product one delay period
// covers) and an 80-long dot product committed in two periods with the
// output node's stride 0 keeping the final sum. Every element of C is
// checked against a reference product; the cycle counts are printed.
module tb_strela_mm;
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

  mem_model #(.N_PORTS(8), .N_BANKS(4), .WORDS(32768)) u_mem (
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

  task automatic set_node(bit out, int i, int unsigned waddr, int unsigned n, int unsigned stride_bytes);
    logic [7:0] b;
    b = (out ? REG_OMN_BASE : REG_IMN_BASE) + 8'(16*i);
    mmio_write(b,      waddr * 4);
    mmio_write(b + 4,  n);
    mmio_write(b + 8,  stride_bytes);
  endtask
  task automatic set_addr(bit out, int i, int unsigned waddr);
    mmio_write((out ? REG_OMN_BASE : REG_IMN_BASE) + 8'(16*i), waddr * 4);
  endtask

  // Three dot products at a time: row 0 multiplies the A row (input node 0,
  // forwarded west to east) with three B columns (input nodes 1..3); row 1
  // accumulates with immediate feedback and commits on the delayed valid;
  // rows 2 and 3 route the sums to output nodes 1..3.
  task automatic map_mm(int unsigned period);
    clear_cfgs();
    pass(cfgs[0], DirN, DirE); used[0] = 1;
    for (int c = 1; c < 4; c++) begin
      in_to_fu1(cfgs[c], DirW); in_to_fu2(cfgs[c], DirN);
      cfgs[c].alu_op = ALU_MUL; fu_to_out(cfgs[c], DirS, 0);
      if (c < 3) pass(cfgs[c], DirW, DirE);
      used[c] = 1; fu_on[c] = 1;
      in_to_fu2(cfgs[4+c], DirN); const_fu1(cfgs[4+c], 0);
      cfgs[4+c].fb_sel = 1'b1; cfgs[4+c].alu_op = ALU_ADD; cfgs[4+c].init_data = 0;
      cfgs[4+c].delay = 6'(period - 1);
      fu_to_out(cfgs[4+c], DirS, 1); used[4+c] = 1; fu_on[4+c] = 1;
      pass(cfgs[8+c], DirN, DirS);  used[8+c] = 1;
      pass(cfgs[12+c], DirN, DirS); used[12+c] = 1;
    end
  endtask

  int unsigned cycle_cnt = 0;
  always @(posedge clk) cycle_cnt++;

  localparam int unsigned ABase = 1024, BBase = 8192, CBase = 16384;   // word addresses

  // C = A x B for n x n matrices (row-major), rows [0, rows) of C, with the
  // whole reduction committed in `parts` delay periods of n/parts tokens;
  // parts > 1 relies on the output node's stride 0 to keep the last commit.
  task automatic run_mm(int unsigned n, int unsigned rows, int unsigned parts, output int unsigned total);
    int ccyc, cyc, runs;
    int unsigned t0;
    int unsigned groups [$];
    for (int i = 0; i < n * n; i++) begin
      u_mem.mem[ABase + i] = 32'($urandom_range(0, 40)) - 20;
      u_mem.mem[BBase + i] = 32'($urandom_range(0, 40)) - 20;
      u_mem.mem[CBase + i] = 32'hDEAD_BEEF;
    end
    t0 = cycle_cnt;
    map_mm(n / parts);
    load_config(ccyc);
    runs = 0;
    clear_nodes();
    set_node(0, 0, ABase, n, 4);
    for (int c = 1; c < 4; c++) begin
      set_node(0, c, BBase, n, 4 * n);
      set_node(1, c, CBase, parts, (parts > 1) ? 0 : 4);
    end
    for (int j = 0; j + 3 <= n; j += 3) groups.push_back(j);
    if (n % 3 != 0) groups.push_back(n - 3);
    for (int i = 0; i < rows; i++) begin
      set_addr(0, 0, ABase + i * n);
      foreach (groups[g]) begin
        for (int c = 1; c < 4; c++) begin
          set_addr(0, c, BBase + groups[g] + c - 1);
          set_addr(1, c, CBase + i * n + groups[g] + c - 1);
        end
        run_kernel(cyc);
        runs++;
      end
    end
    total = cycle_cnt - t0;   // configuration, register writes and runs
    for (int i = 0; i < rows; i++)
      for (int j = 0; j < n; j++) begin
        int acc;
        acc = 0;
        for (int k = 0; k < n; k++) acc += $signed(u_mem.mem[ABase + i * n + k]) * $signed(u_mem.mem[BBase + k * n + j]);
        check(u_mem.mem[CBase + i * n + j] == 32'(acc), $sformatf("C[%0d][%0d] = %0d, expected %0d (n=%0d)",
              i, j, $signed(u_mem.mem[CBase + i * n + j]), acc, n));
      end
    $display("mm %0dx%0d: %0d rows in %0d partial-kernel runs, about %0d cycles (configuration %0d)", n, n, rows, runs, total, ccyc);
  endtask

  initial begin : main
    int unsigned t16, t64, t80;
    reg_req = '0;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    run_mm(16, 16, 1, t16);
    // 64x64: the longest reduction one delay period can commit; first rows only
    run_mm(64, 2, 1, t64);
    // a reduction longer than one period (gemm-like k = 80) in two periods of 40
    run_mm(80, 1, 2, t80);
    // Reference totals including configuration, CPU reloads and
    // synchronisation: 12,105 cycles for mm 16x16 and 297,050 for mm 64x64
    // (4,641 per row of C). The register writes here cost 2 cycles each, less
    // than firmware needs, so these are upper bounds.
    check(t16 < 12105, $sformatf("mm 16x16 within the reference total (%0d cycles)", t16));
    check(t64 / 2 < 4641, $sformatf("mm 64x64 per row within the reference total (%0d cycles)", t64 / 2));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
