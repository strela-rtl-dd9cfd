// cgra_array: ROWS x COLS mesh of elastic PEs (4x4 by default).
//
// Each PE talks to its four nearest neighbours: the N output of a PE feeds
// the S input of the PE above, its E output the W input of the PE on the
// right, and so on. Streams enter on the north border (one input memory node
// per column) and leave on the south border (one output memory node per
// column), as in the paper's mapping rules. On the east and west borders the
// outer output of row r is wired to the outer input of row r-1, giving two
// extra south-to-north routes besides the COLS columns; the first row's border
// output and the last row's border input have no partner. Ports with no
// partner see valid 0 and ready 0. PE ID = row*COLS + col.
//
// Clock gating: the array clock is stopped unless array_en_i is high (kernel
// running or initialising); below that, each PE gates itself (see pe).
// Timing: no registers of its own; one cycle per PE crossed on a straight
// route.
module cgra_array
  import strela_pkg::*;
#(
  parameter int unsigned ROWS = 4,
  parameter int unsigned COLS = 4,
  parameter int unsigned W    = 32
) (
  input  logic                  clk_i,
  input  logic                  rst_ni,
  input  logic                  array_en_i,
  input  logic                  clr_i,
  // configuration broadcast
  input  logic                  cfg_clear_i,
  input  logic                  cfg_valid_i,
  input  logic [IdW-1:0]        cfg_id_i,
  input  logic [CgW-1:0]        cfg_cg_i,
  input  pe_cfg_t               cfg_word_i,
  output logic [ROWS*COLS-1:0]  configured_o,
  // north border: streams in
  input  logic [COLS-1:0][W-1:0] north_din_i,
  input  logic [COLS-1:0]        north_vin_i,
  output logic [COLS-1:0]        north_rin_o,
  // south border: streams out
  output logic [COLS-1:0][W-1:0] south_dout_o,
  output logic [COLS-1:0]        south_vout_o,
  input  logic [COLS-1:0]        south_rout_i
);
  logic array_clk;
  clock_gate u_cg_array (.clk_i(clk_i), .en_i(array_en_i), .clk_o(array_clk));

  // Per-PE port bundles, indexed [row][col][side]
  logic [W-1:0] din  [ROWS][COLS][4];
  logic         vin  [ROWS][COLS][4];
  logic         rin  [ROWS][COLS][4];   // ready of each input port (to its source)
  logic [W-1:0] dout [ROWS][COLS][4];
  logic         vout [ROWS][COLS][4];
  logic         rout [ROWS][COLS][4];   // ready seen by each output port

  for (genvar r = 0; r < ROWS; r++) begin : g_row
    for (genvar c = 0; c < COLS; c++) begin : g_col
      logic [3:0][W-1:0] pdin, pdout;
      logic [3:0]        pvin, prin, pvout, prout;

      for (genvar s = 0; s < 4; s++) begin : g_side
        assign pdin[s]     = din[r][c][s];
        assign pvin[s]     = vin[r][c][s];
        assign rin[r][c][s] = prin[s];
        assign dout[r][c][s] = pdout[s];
        assign vout[r][c][s] = pvout[s];
        assign prout[s]    = rout[r][c][s];
      end

      // ---- north input / south output of the PE above ----
      if (r == 0) begin : g_n_border
        assign din[r][c][DirN]  = north_din_i[c];
        assign vin[r][c][DirN]  = north_vin_i[c];
        assign north_rin_o[c]   = rin[r][c][DirN];
        assign rout[r][c][DirN] = 1'b0;          // no partner
      end else begin : g_n_link
        assign din[r][c][DirN]  = dout[r-1][c][DirS];
        assign vin[r][c][DirN]  = vout[r-1][c][DirS];
        assign rout[r][c][DirN] = rin[r-1][c][DirS];
      end

      // ---- south input / south output ----
      if (r == ROWS-1) begin : g_s_border
        assign din[r][c][DirS]  = '0;
        assign vin[r][c][DirS]  = 1'b0;          // no partner
        assign south_dout_o[c]  = dout[r][c][DirS];
        assign south_vout_o[c]  = vout[r][c][DirS];
        assign rout[r][c][DirS] = south_rout_i[c];
      end else begin : g_s_link
        assign din[r][c][DirS]  = dout[r+1][c][DirN];
        assign vin[r][c][DirS]  = vout[r+1][c][DirN];
        assign rout[r][c][DirS] = rin[r+1][c][DirN];
      end

      // ---- east side ----
      if (c < COLS-1) begin : g_e_link
        assign din[r][c][DirE]  = dout[r][c+1][DirW];
        assign vin[r][c][DirE]  = vout[r][c+1][DirW];
        assign rout[r][c][DirE] = rin[r][c+1][DirW];
      end else begin : g_e_border
        // border input of row r comes from the border output of row r+1
        if (r < ROWS-1) begin : g_in
          assign din[r][c][DirE] = dout[r+1][c][DirE];
          assign vin[r][c][DirE] = vout[r+1][c][DirE];
        end else begin : g_in_none
          assign din[r][c][DirE] = '0;
          assign vin[r][c][DirE] = 1'b0;
        end
        if (r > 0) begin : g_out
          assign rout[r][c][DirE] = rin[r-1][c][DirE];
        end else begin : g_out_none
          assign rout[r][c][DirE] = 1'b0;
        end
      end

      // ---- west side ----
      if (c > 0) begin : g_w_link
        assign din[r][c][DirW]  = dout[r][c-1][DirE];
        assign vin[r][c][DirW]  = vout[r][c-1][DirE];
        assign rout[r][c][DirW] = rin[r][c-1][DirE];
      end else begin : g_w_border
        if (r < ROWS-1) begin : g_in
          assign din[r][c][DirW] = dout[r+1][c][DirW];
          assign vin[r][c][DirW] = vout[r+1][c][DirW];
        end else begin : g_in_none
          assign din[r][c][DirW] = '0;
          assign vin[r][c][DirW] = 1'b0;
        end
        if (r > 0) begin : g_out
          assign rout[r][c][DirW] = rin[r-1][c][DirW];
        end else begin : g_out_none
          assign rout[r][c][DirW] = 1'b0;
        end
      end

      pe #(.W(W), .PE_ID(r*COLS + c)) u_pe (
        .clk_i        (clk_i),
        .array_clk_i  (array_clk),
        .rst_ni       (rst_ni),
        .clr_i        (clr_i),
        .cfg_clear_i  (cfg_clear_i),
        .cfg_valid_i  (cfg_valid_i),
        .cfg_id_i     (cfg_id_i),
        .cfg_cg_i     (cfg_cg_i),
        .cfg_word_i   (cfg_word_i),
        .configured_o (configured_o[r*COLS + c]),
        .din_i        (pdin),
        .vin_i        (pvin),
        .rin_o        (prin),
        .dout_o       (pdout),
        .vout_o       (pvout),
        .rout_i       (prout)
      );
    end
  end
endmodule
