// tb_config_deserializer: sends random 5-word PE configuration packets with
// random gaps between words and checks that each packet produces exactly one
// cfg_valid pulse, one cycle after its last word, with the ID, clock-gate
// bits and configuration word sliced from the right bits (word k holds bits
// [32k+31:32k] of the 160-bit packet). A clear in the middle of a packet must
// drop the partial packet.
module tb_config_deserializer;
  import strela_pkg::*;
  logic clk = 0, rst_n = 0, clr = 0;
  always #5 clk = !clk;
  logic [31:0] word = 0; logic wv = 0;
  logic cv; logic [IdW-1:0] cid; logic [CgW-1:0] ccg; pe_cfg_t cw;
  int checks = 0, failures = 0, pulses = 0;

  config_deserializer #(.N_WORDS(CfgWords)) dut (.clk_i(clk), .rst_ni(rst_n), .clr_i(clr), .word_i(word),
    .word_valid_i(wv), .cfg_valid_o(cv), .cfg_id_o(cid), .cfg_cg_o(ccg), .cfg_word_o(cw));

  task automatic chk(bit ok, string s); checks++; if (!ok) begin failures++; $display("FAIL %s", s); end endtask

  logic [159:0] expq [$];
  always @(posedge clk) if (rst_n) begin
    if (cv) begin
      pulses++;
      chk(expq.size() > 0, "no unexpected packet");
      if (expq.size() > 0) begin
        logic [159:0] e;
        e = expq.pop_front();
        chk(cid == e[159:154] && ccg == e[153:148] && cw == pe_cfg_t'(e[147:0]), $sformatf("packet fields %h %h %h vs %h", cid, ccg, cw, e));
      end
    end
  end

  task automatic send(logic [159:0] p, int nwords, bit expect_it);
    for (int k = 0; k < nwords; k++) begin
      int gap = $urandom_range(0, 2);
      repeat (gap) @(negedge clk);
      wv = 1; word = p[32*k +: 32];
      @(negedge clk); wv = 0;
      if (k == nwords - 1 && expect_it) begin
        expq.push_back(p);
        // the pulse arrives at the next edge
      end
    end
  endtask

  initial begin
    int expected = 0;
    repeat (2) @(negedge clk); rst_n = 1; @(negedge clk);
    for (int n = 0; n < 200; n++) begin
      logic [159:0] p;
      for (int k = 0; k < 5; k++) p[32*k +: 32] = $urandom;
      if (n % 17 == 5) begin
        // partial packet, then clear
        send(p, $urandom_range(1, 4), 0);
        clr = 1; @(negedge clk); clr = 0;
      end else begin
        send(p, 5, 1); expected++;
      end
    end
    repeat (3) @(negedge clk);
    chk(pulses == expected, $sformatf("pulse count %0d expected %0d", pulses, expected));
    chk(expq.size() == 0, "every packet delivered");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin repeat (100000) @(posedge clk); failures++; $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
