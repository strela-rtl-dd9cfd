// tb_strela_conv2d: a 3x3 convolution of a 64x64 image on the whole
// accelerator, run as three kernels, one per filter row. In each run three
// input nodes stream the image shifted by 0, 1 and 2 pixels, three PEs
// multiply by the filter weights (configured constants), a chain of adders
// sums the products, and a fourth input/output node pair reads and rewrites
// the partial sums of the earlier rows in place. Every valid output pixel is
// checked against a reference convolution and the cycle counts are printed.
module tb_strela_conv2d;
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

  task automatic set_node(bit out, int i, int unsigned waddr, int unsigned n);
    logic [7:0] b;
    b = (out ? REG_OMN_BASE : REG_IMN_BASE) + 8'(16*i);
    mmio_write(b,      waddr * 4);
    mmio_write(b + 4,  n);
    mmio_write(b + 8,  4);
  endtask

  int unsigned cycle_cnt = 0;
  always @(posedge clk) cycle_cnt++;

  localparam int unsigned N = 64;                 // image side
  localparam int unsigned M = N - 2;              // output rows (valid 3x3 positions)
  localparam int unsigned ImgBase = 2048, OutBase = 8192;
  int w [3][3];

  // One filter row r: input nodes 0..2 read the image from row r, shifted by
  // 0, 1 and 2 pixels; row 0 multiplies each by w[r][k]; row 1 adds the three
  // products west to east and then the partial sums of the earlier rows
  // (input node 3, routed down column 3); output node 3 writes the new
  // partial sums in place.
  task automatic map_row(int r);
    clear_cfgs();
    for (int k = 0; k < 3; k++) begin
      in_to_fu1(cfgs[k], DirN); const_fu2(cfgs[k], w[r][k]);
      cfgs[k].alu_op = ALU_MUL; fu_to_out(cfgs[k], DirS, 0); used[k] = 1; fu_on[k] = 1;
    end
    pass(cfgs[3], DirN, DirS); used[3] = 1;
    // row 1: p0 passes east, p0+p1, +p2, +partial
    pass(cfgs[4], DirN, DirE); used[4] = 1;
    for (int c = 1; c < 4; c++) begin
      in_to_fu1(cfgs[4+c], DirW); in_to_fu2(cfgs[4+c], DirN);
      cfgs[4+c].alu_op = ALU_ADD; fu_to_out(cfgs[4+c], c < 3 ? DirE : DirS, 0);
      used[4+c] = 1; fu_on[4+c] = 1;
    end
    pass(cfgs[11], DirN, DirS); used[11] = 1;
    pass(cfgs[15], DirN, DirS); used[15] = 1;
  endtask

  initial begin : main
    int ccyc, cyc, t0, total;
    int img [N*N];
    reg_req = '0;
    for (int i = 0; i < 3; i++) for (int j = 0; j < 3; j++) w[i][j] = $urandom_range(0, 10) - 5;
    for (int i = 0; i < N * N; i++) begin
      img[i] = $urandom_range(0, 255);
      u_mem.mem[ImgBase + i] = 32'(img[i]);
    end
    for (int i = 0; i < M * N; i++) u_mem.mem[OutBase + i] = 32'd0;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    t0 = cycle_cnt;
    // flat streams of M*N words: output f = i*N + j uses pixels f + r*N + k;
    // the last two columns of each output row are wrap-around values and are
    // not checked
    for (int r = 0; r < 3; r++) begin
      map_row(r);
      load_config(ccyc);
      if (r == 0) begin
        for (int i = 0; i < 4; i++) begin set_node(0, i, 0, 0); set_node(1, i, 0, 0); end
      end
      for (int k = 0; k < 3; k++) set_node(0, k, ImgBase + r * N + k, M * N);
      set_node(0, 3, OutBase, M * N);
      set_node(1, 3, OutBase, M * N);
      run_kernel(cyc);
      $display("conv2d filter row %0d: %0d outputs in %0d cycles", r, M * N, cyc);
    end
    total = cycle_cnt - t0;
    for (int i = 0; i < M; i++)
      for (int j = 0; j < M; j++) begin
        int acc;
        acc = 0;
        for (int r = 0; r < 3; r++) for (int k = 0; k < 3; k++) acc += w[r][k] * img[(i + r) * N + j + k];
        check(u_mem.mem[OutBase + i * N + j] == 32'(acc), $sformatf("out[%0d][%0d] = %0d, expected %0d",
              i, j, $signed(u_mem.mem[OutBase + i * N + j]), acc));
      end
    $display("conv2d %0dx%0d: %0d cycles in total", N, N, total);
    // reference total for conv2d 64x64 with firmware: 13,931 cycles
    check(total < 2 * 13931, $sformatf("conv2d total %0d cycles within twice the reference", total));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
