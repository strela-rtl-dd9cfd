// tb_pe: one PE with ID 5 on the configuration broadcast. A packet for
// another ID must be ignored (no output ever valid). The PE is then
// configured to add its N and W inputs and fork the sum to its E and S
// outputs, while a second route takes the E input straight to the W output.
// Three random-gap sources and three random-ready sinks run at once; every
// output is checked in order, the fork must deliver each sum to both
// outputs, and a configuration clear must leave the PE unconfigured again.
module tb_pe;
  import strela_pkg::*;
  import strela_tb_pkg::*;
  logic clk = 0, rst_n = 0, clr = 0;
  always #5 clk = !clk;
  logic cfg_clear = 0, cfg_valid = 0; logic [5:0] cfg_id = 0, cfg_cg = 0; pe_cfg_t cfg_w;
  logic configured;
  logic [3:0][31:0] din, dout; logic [3:0] vin, rin, vout, rout;
  int checks = 0, failures = 0;

  pe #(.W(32), .PE_ID(5)) dut (.clk_i(clk), .array_clk_i(clk), .rst_ni(rst_n), .clr_i(clr),
    .cfg_clear_i(cfg_clear), .cfg_valid_i(cfg_valid), .cfg_id_i(cfg_id), .cfg_cg_i(cfg_cg), .cfg_word_i(cfg_w),
    .configured_o(configured), .din_i(din), .vin_i(vin), .rin_o(rin), .dout_o(dout), .vout_o(vout), .rout_i(rout));

  task automatic chk(bit ok, string s); checks++; if (!ok) begin failures++; $display("FAIL %s", s); end endtask

  localparam int L = 100;
  int sent [4], got [4];
  bit run = 0;
  int any_valid = 0;
  function automatic logic [31:0] x(int p, int k); return 32'(k * (p + 3) + 1000 * p); endfunction

  always @(negedge clk) if (run) begin
    for (int p = 0; p < 4; p++) begin
      if (p == DirS) begin vin[p] = 0; end
      else if (!(vin[p] && !rin[p])) begin
        vin[p] = (sent[p] < L) && ($urandom_range(0, 2) != 0);
        din[p] = x(p, sent[p]);
      end
      rout[p] = ($urandom_range(0, 2) != 0);
    end
  end
  always @(posedge clk) begin
    if (vout != 0) any_valid++;
    if (run) for (int p = 0; p < 4; p++) begin
      if (vin[p] && rin[p]) sent[p]++;
      if (vout[p] && rout[p]) begin
        logic [31:0] e;
        e = (p == DirW) ? x(DirE, got[p]) : x(DirN, got[p]) + x(DirW, got[p]);
        chk(p != DirN, "nothing on the unused N output");
        chk(dout[p] == e, $sformatf("output %0d token %0d: %0d expected %0d", p, got[p], dout[p], e));
        got[p]++;
      end
    end
  end

  initial begin
    pe_cfg_t c;
    vin = 0; din = 0; rout = 0;
    for (int p = 0; p < 4; p++) begin sent[p] = 0; got[p] = 0; end
    c = cfg_idle();
    in_to_fu1(c, DirN); in_to_fu2(c, DirW); c.alu_op = ALU_ADD;
    fu_to_out(c, DirE, 0); fu_to_out(c, DirS, 0);
    pass(c, DirE, DirW);
    repeat (2) @(negedge clk); rst_n = 1; @(negedge clk);
    // packet for PE 6: ignored
    cfg_valid = 1; cfg_id = 6; cfg_cg = cg_of(c, 1); cfg_w = c; @(negedge clk); cfg_valid = 0;
    chk(!configured, "packet for another ID ignored");
    clr = 1; @(negedge clk); clr = 0;
    run = 1;
    repeat (50) @(negedge clk);
    chk(any_valid == 0 && got[DirE] == 0, "unconfigured PE produces nothing");
    run = 0; vin = 0; @(negedge clk);
    for (int p = 0; p < 4; p++) sent[p] = 0;
    // own packet
    cfg_valid = 1; cfg_id = 5; @(negedge clk); cfg_valid = 0;
    chk(configured, "own packet taken");
    clr = 1; @(negedge clk); clr = 0;
    run = 1;
    for (int t = 0; t < 3000 && !(got[DirE] == L && got[DirS] == L && got[DirW] == L); t++) @(negedge clk);
    run = 0;
    chk(got[DirE] == L && got[DirS] == L && got[DirW] == L,
        $sformatf("all tokens delivered E %0d S %0d W %0d", got[DirE], got[DirS], got[DirW]));
    cfg_clear = 1; @(negedge clk); cfg_clear = 0;
    chk(!configured, "configuration clear");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin repeat (20000) @(posedge clk); failures++; $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
