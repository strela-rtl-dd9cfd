// tb_control_unit: drives the MMIO port like the CPU and models the memory
// nodes' done flags (a node is done a random number of cycles after its
// start). Checks register write/read-back, STATUS busy/done and its
// write-1-to-clear, the configuration command (clear pulse, node 0 started in
// configuration mode on CFG_ADDR/CFG_SIZE with stride 4, array clock off),
// the run command (one INIT cycle with the array clock on, starts only for
// nodes with a non-zero size, array clock on until every active output node
// is done), irq, and that a command written while busy is ignored.
module tb_control_unit;
  import strela_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = !clk;
  obi_req_t req; obi_rsp_t rsp; logic irq;
  logic [3:0] imn_start, omn_start, imn_done, omn_done; logic cfg_mode, cfg_clear, en, init;
  logic [3:0][31:0] ia, is, ist, oa, os, ost;
  int checks = 0, failures = 0;

  control_unit #(.N_IMN(4), .N_OMN(4)) dut (.clk_i(clk), .rst_ni(rst_n), .reg_req_i(req), .reg_rsp_o(rsp),
    .irq_o(irq), .imn_start_o(imn_start), .imn0_cfg_mode_o(cfg_mode), .imn_addr_o(ia), .imn_size_o(is),
    .imn_stride_o(ist), .imn_done_i(imn_done), .omn_start_o(omn_start), .omn_addr_o(oa), .omn_size_o(os),
    .omn_stride_o(ost), .omn_done_i(omn_done), .cfg_clear_o(cfg_clear), .array_en_o(en), .init_o(init));

  task automatic chk(bit ok, string s); checks++; if (!ok) begin failures++; $display("FAIL %s", s); end endtask

  // node models: done rises 'lat' cycles after start
  int ilat [4], olat [4], icnt [4], ocnt [4];
  int starts_i [4], starts_o [4], en_cycles, init_cycles, clears;
  always @(posedge clk) begin
    for (int i = 0; i < 4; i++) begin
      if (imn_start[i]) begin icnt[i] <= ilat[i]; imn_done[i] <= 1'b0; starts_i[i]++; end
      else if (icnt[i] > 0) icnt[i] <= icnt[i] - 1;
      else imn_done[i] <= 1'b1;
      if (omn_start[i]) begin ocnt[i] <= olat[i]; omn_done[i] <= 1'b0; starts_o[i]++; end
      else if (ocnt[i] > 0) ocnt[i] <= ocnt[i] - 1;
      else omn_done[i] <= 1'b1;
    end
    if (en) en_cycles++;
    if (init) init_cycles++;
    if (cfg_clear) clears++;
  end

  task automatic wr(logic [7:0] a, logic [31:0] d);
    req = '{req: 1, we: 1, be: 4'hF, addr: 32'(a), wdata: d};
    #1 chk(rsp.gnt, "write granted at once");
    @(negedge clk); req.req = 0;
  endtask
  task automatic rd(logic [7:0] a, output logic [31:0] d);
    req = '{req: 1, we: 0, be: 4'hF, addr: 32'(a), wdata: 0};
    #1 chk(rsp.gnt, "read granted at once");
    @(negedge clk); req.req = 0;
    chk(rsp.rvalid, "read response the next cycle");
    d = rsp.rdata;
  endtask

  logic [31:0] regs [logic [7:0]];
  initial begin
    logic [31:0] d;
    int en0;
    req = '0; imn_done = '1; omn_done = '1;
    for (int i = 0; i < 4; i++) begin ilat[i] = 5 + 3 * i; olat[i] = 10 + 7 * i; icnt[i] = 0; ocnt[i] = 0;
      starts_i[i] = 0; starts_o[i] = 0; end
    en_cycles = 0; init_cycles = 0; clears = 0;
    repeat (2) @(negedge clk); rst_n = 1; @(negedge clk);
    // register file
    regs[REG_CFG_ADDR] = 32'h0010_0000; regs[REG_CFG_SIZE] = 80;
    for (int i = 0; i < 4; i++) begin
      regs[8'(REG_IMN_BASE + 16*i)]     = $urandom & 32'hFFFF_FFFC;
      regs[8'(REG_IMN_BASE + 16*i + 4)] = (i == 2) ? 0 : 32'($urandom_range(1, 100));
      regs[8'(REG_IMN_BASE + 16*i + 8)] = 32'(4 * $urandom_range(1, 4));
      regs[8'(REG_OMN_BASE + 16*i)]     = $urandom & 32'hFFFF_FFFC;
      regs[8'(REG_OMN_BASE + 16*i + 4)] = (i == 3) ? 0 : 32'($urandom_range(1, 100));
      regs[8'(REG_OMN_BASE + 16*i + 8)] = 32'(4 * $urandom_range(1, 4));
    end
    foreach (regs[a]) wr(a, regs[a]);
    foreach (regs[a]) begin rd(a, d); chk(d == regs[a], $sformatf("read-back of register %h", a)); end
    for (int i = 0; i < 4; i++) begin
      chk(ia[i] == regs[8'(REG_IMN_BASE + 16*i)] && os[i] == regs[8'(REG_OMN_BASE + 16*i + 4)], "node parameter outputs");
    end
    rd(REG_STATUS, d); chk(d[1:0] == 2'b00, "idle status");

    // configuration only
    req = '{req: 1, we: 1, be: 4'hF, addr: 32'(REG_CTRL), wdata: 32'h2};
    #1 chk(cfg_clear && imn_start == 4'b0001 && cfg_mode, "configuration command: clear and node 0 start");
    chk(ia[0] == regs[REG_CFG_ADDR] && is[0] == regs[REG_CFG_SIZE] && ist[0] == 4, "node 0 reads the configuration");
    @(negedge clk); req.req = 0;
    rd(REG_STATUS, d); chk(d[0] == 1, "busy while configuring");
    // a command while busy is ignored
    wr(REG_CTRL, 32'h1);
    for (int t = 0; t < 100 && !irq; t++) @(negedge clk);
    chk(irq, "irq after configuration");
    chk(en_cycles == 0 && init_cycles == 0, "array clock stays off for configuration only");
    chk(starts_i[0] == 1 && starts_o[0] == 0, "command while busy ignored");
    rd(REG_STATUS, d); chk(d[1:0] == 2'b10, "done status");
    wr(REG_STATUS, 32'h2); rd(REG_STATUS, d); chk(d[1:0] == 2'b00 && !irq, "done cleared by writing 1");

    // configuration then run
    wr(REG_CTRL, 32'h3);
    for (int t = 0; t < 500 && !irq; t++) @(negedge clk);
    chk(irq, "irq after configure and run");
    chk(init_cycles == 1, "one initialisation cycle");
    chk(starts_i[0] == 3 && starts_i[1] == 1 && starts_i[2] == 0 && starts_i[3] == 1, "input starts only for non-zero size");
    chk(starts_o[0] == 1 && starts_o[1] == 1 && starts_o[2] == 1 && starts_o[3] == 0, "output starts only for non-zero size");
    chk(en_cycles >= olat[2] && en_cycles <= olat[2] + 3, $sformatf("array clock on until the slowest output is done (%0d)", en_cycles));
    chk(clears == 2, "one clear per configuration command");
    wr(REG_STATUS, 32'h2);

    // run only, with the slowest output node changed
    olat[0] = 40; en0 = en_cycles;
    wr(REG_CTRL, 32'h1);
    rd(REG_STATUS, d); chk(d[0] == 1, "busy while running");
    for (int t = 0; t < 500 && !irq; t++) @(negedge clk);
    chk(irq && init_cycles == 2, "run without configuration");
    chk(en_cycles - en0 >= 40 && en_cycles - en0 <= 43, "array clock follows the slowest output node");
    chk(starts_i[0] == 4, "node 0 started in data mode");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin repeat (20000) @(posedge clk); failures++; $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
