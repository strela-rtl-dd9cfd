// tb_cgra_array: the 4x4 mesh on its own. PE configurations are broadcast
// directly (as the deserializer would). Kernel: columns 0, 2 and 3 compute
// y = x*(c+2) + 5 in rows 0 and 1 and pass rows 2 and 3; column 0's stream is
// instead sent down to row 3, back up one row over the west border
// (south-to-north path), east into column 1 and down to the south edge of
// column 1. Streams are driven with random valid gaps and drained with random
// ready, and every output is checked in order. Also checks that the array
// clock enable stops all movement and that a PE left unconfigured passes
// nothing.
module tb_cgra_array;
  import strela_pkg::*;
  import strela_tb_pkg::*;
  logic clk = 0, rst_n = 0, en = 0, clr = 0;
  always #5 clk = !clk;
  logic cfg_clear = 0, cfg_valid = 0; logic [5:0] cfg_id, cfg_cg; pe_cfg_t cfg_w;
  logic [15:0] configured;
  logic [3:0][31:0] nd, sd; logic [3:0] nv, nr, sv, sr;
  int checks = 0, failures = 0;

  cgra_array #(.ROWS(4), .COLS(4), .W(32)) dut (.clk_i(clk), .rst_ni(rst_n), .array_en_i(en), .clr_i(clr),
    .cfg_clear_i(cfg_clear), .cfg_valid_i(cfg_valid), .cfg_id_i(cfg_id), .cfg_cg_i(cfg_cg), .cfg_word_i(cfg_w),
    .configured_o(configured), .north_din_i(nd), .north_vin_i(nv), .north_rin_o(nr),
    .south_dout_o(sd), .south_vout_o(sv), .south_rout_i(sr));

  task automatic chk(bit ok, string s); checks++; if (!ok) begin failures++; $display("FAIL %s", s); end endtask

  pe_cfg_t c [16]; bit fu [16]; bit used [16];
  localparam int L = 60;
  int sent [4], got [4];
  bit run = 0;

  function automatic logic [31:0] xin(int col, int k); return 32'(k * 13 + col * 1000 - 300); endfunction
  function automatic logic [31:0] yout(int col, int k);
    // output column 1 carries column 0's stream unchanged
    if (col == 1) return xin(0, k);
    return xin(col, k) * (col + 2) + 5;
  endfunction

  // stream sources and sinks; tokens only move while the array clock runs,
  // so the handshake is sampled only when en is high
  always @(negedge clk) if (run) begin : src
    for (int i = 0; i < 4; i++) begin
      sr[i] = ($urandom_range(0, 3) != 0);
      if (i == 1) begin nv[i] = 0; continue; end
      if (!(nv[i] && !nr[i])) begin
        nv[i] = (sent[i] < L) && ($urandom_range(0, 3) != 0);
        nd[i] = xin(i, sent[i]);
      end
    end
  end
  always @(posedge clk) if (run && en) for (int i = 0; i < 4; i++) begin
    if (nv[i] && nr[i]) sent[i]++;
    if (sv[i] && sr[i]) begin : sink
      chk(sd[i] == yout(i, got[i]), $sformatf("column %0d output %0d: %0d expected %0d", i, got[i], $signed(sd[i]), $signed(yout(i, got[i]))));
      got[i]++;
    end
  end

  initial begin
    nv = 0; nd = 0; sr = 0; cfg_id = 0; cfg_cg = 0; cfg_w = '0;
    for (int i = 0; i < 16; i++) begin c[i] = cfg_idle(); fu[i] = 0; used[i] = 0; end
    for (int col = 2; col < 4; col++) begin
      in_to_fu1(c[col], DirN); const_fu2(c[col], col + 2); c[col].alu_op = ALU_MUL; fu_to_out(c[col], DirS, 0);
      in_to_fu1(c[4+col], DirN); const_fu2(c[4+col], 5); c[4+col].alu_op = ALU_ADD; fu_to_out(c[4+col], DirS, 0);
      pass(c[8+col], DirN, DirS); pass(c[12+col], DirN, DirS);
      fu[col] = 1; fu[4+col] = 1; used[col] = 1; used[4+col] = 1; used[8+col] = 1; used[12+col] = 1;
    end
    // column 0 down to row 3, then up the west border to row 2, east, down column 1
    pass(c[0], DirN, DirS); pass(c[4], DirN, DirS); pass(c[8], DirN, DirS);
    pass(c[12], DirN, DirW);
    pass(c[8], DirW, DirE);
    pass(c[9], DirW, DirS); pass(c[13], DirN, DirS);
    used[0] = 1; used[4] = 1; used[8] = 1; used[12] = 1; used[9] = 1; used[13] = 1;
    repeat (2) @(negedge clk); rst_n = 1;
    for (int i = 0; i < 16; i++) if (used[i]) begin
      cfg_valid = 1; cfg_id = 6'(i); cfg_cg = cg_of(c[i], fu[i]); cfg_w = c[i];
      @(negedge clk);
    end
    cfg_valid = 0;
    chk(configured == 16'hFFDD, "configured flags follow the IDs broadcast");
    en = 1; clr = 1; @(negedge clk); clr = 0;
    run = 1;
    // stop the array clock for a while mid-stream
    repeat (40) @(negedge clk);
    en = 0; @(negedge clk);
    begin
      int g0 [4];
      g0 = got;
      repeat (20) @(negedge clk);
      chk(got == g0, "no output while the array clock is off");
    end
    @(posedge clk); #1 en = 1;
    for (int t = 0; t < 2000 && !(got[1] == L && got[2] == L && got[3] == L); t++) @(negedge clk);
    run = 0;
    chk(got[1] == L && got[2] == L && got[3] == L && sent[0] == L, $sformatf("all streams complete %0d %0d %0d sent %0d",
        got[1], got[2], got[3], sent[0]));
    chk(got[0] == 0, "nothing leaves the unconfigured south port of column 0");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin repeat (20000) @(posedge clk); failures++; $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
