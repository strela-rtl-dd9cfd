// pe_output: one output port of a PE (there are four: N, E, S, W).
//
// Only multiplexers, with no register (the baseline's output flip-flop is
// removed, as in the paper): the data multiplexer picks dout_FU or one of the
// three PE inputs on the other sides; the valid multiplexer picks vout_FU,
// vout_FU_d, vout_B1, vout_B2 or one of those three inputs' valids. The
// neighbour's ready is passed back unchanged to every possible source.
// Select codes (this design's): data 0 = dout_FU, 1..3 = other inputs in
// N,E,S,W order; valid 0..3 = vout_FU, vout_FU_d, vout_B1, vout_B2, 4..6 =
// other inputs, 7 = never valid. Purely combinational.
module pe_output #(
  parameter int unsigned W = 32
) (
  input  logic [W-1:0]      dout_fu_i,
  input  logic [2:0][W-1:0] din_i,
  input  logic [3:0]        vfu_i,    // {B2, B1, FU_d, FU}
  input  logic [2:0]        vin_i,
  input  logic [1:0]        dsel_i,
  input  logic [2:0]        vsel_i,
  output logic [W-1:0]      dout_o,
  output logic              vout_o,
  input  logic              rin_i,
  output logic              rout_o
);
  always_comb begin
    unique case (dsel_i)
      2'd0:    dout_o = dout_fu_i;
      default: dout_o = din_i[2'(dsel_i - 2'd1)];
    endcase
    unique case (vsel_i)
      3'd0, 3'd1, 3'd2, 3'd3: vout_o = vfu_i[vsel_i[1:0]];
      3'd4, 3'd5, 3'd6:       vout_o = vin_i[2'(vsel_i - 3'd4)];
      default:                vout_o = 1'b0;
    endcase
  end
  assign rout_o = rin_i;
endmodule
