// tb_fu: functional unit and output stage. Sends single tokens through the
// FU in every mode and checks the registered result and the output valids
// against values computed here: all ALU operations on random operands,
// both comparator operations, the if/else multiplexer (Join with control),
// Branch (vout_B1 / vout_B2 by control value), Merge from either operand,
// immediate feedback accumulation with the delayed valid on every
// (delay+1)-th token, initial register values loaded by clr_i, output
// back-pressure (the token waits until all enabled destinations are ready),
// and one token per cycle at full rate.
module tb_fu;
  import strela_pkg::*;
  logic clk = 0, rst_n = 0, clr = 0;
  always #5 clk = !clk;

  alu_op_e alu_op; logic fb_sel; cmp_op_e cmp_op; jm_mode_e mode; out_sel_e osel;
  logic [31:0] init_data; logic [2:0] init_valid; logic [5:0] mask; logic [5:0] delay;
  logic [31:0] a, b; logic c, v1, v2, vc, r1, r2, rc;
  logic [31:0] dout; logic vfu, vfud, vb1, vb2; logic [5:0] rout;
  int checks = 0, failures = 0;

  fu #(.W(32)) dut (.clk_i(clk), .rst_ni(rst_n), .clr_i(clr),
    .alu_op_i(alu_op), .fb_sel_i(fb_sel), .cmp_op_i(cmp_op), .jm_mode_i(mode), .out_sel_i(osel),
    .init_data_i(init_data), .init_valid_i(init_valid), .mask_i(mask), .delay_i(delay),
    .din_fu1_i(a), .vin_fu1_i(v1), .rin_fu1_o(r1), .din_fu2_i(b), .vin_fu2_i(v2), .rin_fu2_o(r2),
    .din_fuc_i(c), .vin_fuc_i(vc), .rin_fuc_o(rc),
    .dout_o(dout), .vout_fu_o(vfu), .vout_fu_d_o(vfud), .vout_b1_o(vb1), .vout_b2_o(vb2), .rout_i(rout));

  task automatic chk(bit ok, string s); checks++; if (!ok) begin failures++; $display("FAIL %s", s); end endtask

  // one token: offered with destinations busy, then released
  task automatic token(logic [31:0] x, logic [31:0] y, logic cc, bit en1, bit en2, bit enc,
                       logic [31:0] exp, bit exp_b1, bit exp_b2, string s);
    rout = 6'b0; a = x; b = y; c = cc; v1 = en1; v2 = en2; vc = enc;
    @(negedge clk);
    v1 = 0; v2 = 0; vc = 0;
    chk(dut.v_fu && dout == exp, $sformatf("%s: result %h expected %h", s, dout, exp));
    chk(!vfu, {s, ": held while destination busy"});
    @(negedge clk);
    chk(dut.v_fu && dout == exp, {s, ": still held"});
    rout = 6'b111111; #1;
    chk(vfu && vb1 == exp_b1 && vb2 == exp_b2, {s, ": output valids"});
    @(negedge clk);
    chk(!dut.v_fu, {s, ": token gone"});
  endtask

  function automatic logic [31:0] alu(alu_op_e o, logic [31:0] x, logic [31:0] y);
    case (o)
      ALU_ADD: return x + y;     ALU_SUB: return x - y;     ALU_MUL: return x * y;
      ALU_SLL: return x << y[4:0]; ALU_SRL: return x >> y[4:0];
      ALU_AND: return x & y;     ALU_OR:  return x | y;     default: return x ^ y;
    endcase
  endfunction

  initial begin
    alu_op = ALU_ADD; fb_sel = 0; cmp_op = CMP_EQZ; mode = JM_JOIN; osel = OUT_ALU;
    init_data = 0; init_valid = 0; mask = 6'b000100; delay = 0;
    a = 0; b = 0; c = 0; v1 = 0; v2 = 0; vc = 0; rout = 0;
    repeat (2) @(negedge clk); rst_n = 1; @(negedge clk);

    // ALU
    for (int i = 0; i < 80; i++) begin
      logic [31:0] x, y;
      x = $urandom; y = (i % 3 == 0) ? $urandom_range(0, 40) : $urandom;
      alu_op = alu_op_e'(i % 8);
      token(x, y, 0, 1, 1, 0, alu(alu_op, x, y), 0, 0, $sformatf("alu op %0d", i % 8));
    end
    // Join waits for both operands
    rout = 6'b111111; a = 5; v1 = 1; v2 = 0; @(negedge clk);
    chk(!dut.v_fu && !r1, "join waits for operand 2"); v1 = 0;
    // comparator
    osel = OUT_CMP;
    cmp_op = CMP_EQZ; token(7, 7, 0, 1, 1, 0, 1, 0, 0, "eq true");  token(7, 8, 0, 1, 1, 0, 0, 0, 0, "eq false");
    cmp_op = CMP_GTZ; token(3, 0, 0, 1, 1, 0, 1, 0, 0, "gt true");  token(-3, 0, 0, 1, 1, 0, 0, 0, 0, "gt neg");
    token(0, 5, 0, 1, 1, 0, 0, 0, 0, "0 > 5 false"); token(0, -5, 0, 1, 1, 0, 1, 0, 0, "0 > -5 true");
    // if/else multiplexer with control
    mode = JM_JOIN_CTRL; osel = OUT_MUX;
    token(11, 22, 1, 1, 1, 1, 11, 1, 0, "mux ctrl 1");
    token(11, 22, 0, 1, 1, 1, 22, 0, 1, "mux ctrl 0");
    rout = 6'b111111; a = 1; b = 2; v1 = 1; v2 = 1; vc = 0; @(negedge clk);
    chk(!dut.v_fu, "join with control waits for the control"); v1 = 0; v2 = 0;
    // Branch: ALU pass-through of operand 1, valid to B1 or B2
    osel = OUT_ALU; alu_op = ALU_ADD;
    token(40, 0, 1, 1, 1, 1, 40, 1, 0, "branch true -> B1");
    token(41, 0, 0, 1, 1, 1, 41, 0, 1, "branch false -> B2");
    // Merge
    mode = JM_MERGE; osel = OUT_MUX;
    token(5, 6, 0, 1, 0, 0, 5, 0, 0, "merge from operand 1");
    token(5, 6, 0, 0, 1, 0, 6, 0, 0, "merge from operand 2");
    // feedback accumulation with delayed valid every 4th token
    mode = JM_JOIN; osel = OUT_ALU; alu_op = ALU_ADD; fb_sel = 1; init_data = 100; delay = 3;
    clr = 1; @(negedge clk); clr = 0;
    chk(dout == 100 && !dut.v_fu, "clr loads initial data");
    begin
      int acc = 100, nd = 0;
      rout = 6'b111111;
      for (int k = 1; k <= 12; k++) begin
        a = 0; b = k; v1 = 1; v2 = 1;
        @(negedge clk);      // fires, result registered
        acc += k;
        chk(dout == acc, $sformatf("accumulate %0d", k));
        #1 if (vfud) nd++;
        chk(vfud == (k % 4 == 0), $sformatf("delayed valid on token %0d", k));
        chk(vfu, "full rate: token out each cycle");
      end
      v1 = 0; v2 = 0; @(negedge clk);
      chk(nd == 3, "three delayed valids for twelve tokens");
    end
    // initial valid values
    fb_sel = 0; init_valid = 3'b011; init_data = 32'h1234; rout = 0;
    clr = 1; @(negedge clk); clr = 0;
    rout = 6'b111111; #1;
    chk(vfu && vb1 && !vb2 && dout == 32'h1234, "initial valid registers start a flow");
    // mask: destinations outside the mask do not block
    @(negedge clk); init_valid = 0; mode = JM_JOIN; mask = 6'b000001; rout = 6'b111110;
    a = 1; b = 2; v1 = 1; v2 = 1; @(negedge clk); v1 = 0; v2 = 0; #1;
    chk(!vfu && dut.v_fu, "blocked by enabled destination FU1");
    rout = 6'b000001; #1;
    chk(vfu, "other destinations ignored");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin repeat (5000) @(posedge clk); failures++; $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
