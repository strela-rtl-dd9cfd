// config_deserializer: turns the configuration stream into PE configuration
// words.
//
// The first input memory node fetches the kernel configuration as a stream
// of 32-bit words, N_WORDS (five) per PE. This block collects them; when the
// fifth word of a group arrives it broadcasts, in the next cycle, a one-cycle
// strobe cfg_valid_o with the PE ID, the six Elastic Buffer clock-gate bits
// and the 148-bit configuration. Every PE compares the ID with its own, so a
// kernel configuration only needs words for the PEs it uses. The five-word
// grouping and the 6-bit ID follow the paper. Word order is this design's:
// word k of a group fills bits [32k+31:32k] of the 160-bit group; the ID is
// bits [159:154] and the clock-gate bits [153:148] (top of the fifth word).
// clr_i restarts the count at word 0. Accepts one word per cycle.
module config_deserializer
  import strela_pkg::*;
#(
  parameter int unsigned N_WORDS = 5
) (
  input  logic           clk_i,
  input  logic           rst_ni,
  input  logic           clr_i,
  input  logic [31:0]    word_i,
  input  logic           word_valid_i,
  output logic           cfg_valid_o,
  output logic [IdW-1:0] cfg_id_o,
  output logic [CgW-1:0] cfg_cg_o,
  output pe_cfg_t        cfg_word_o
);
  localparam int unsigned RawW = 32 * N_WORDS;
  localparam int unsigned CntW = $clog2(N_WORDS);

  logic [N_WORDS-1:0][31:0] words;
  logic [CntW-1:0]          cnt;
  logic [RawW-1:0]          raw;

  assign raw        = words;
  assign cfg_id_o   = raw[RawW-1 -: IdW];
  assign cfg_cg_o   = raw[RawW-IdW-1 -: CgW];
  assign cfg_word_o = pe_cfg_t'(raw[CfgW-1:0]);

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      words       <= '0;
      cnt         <= '0;
      cfg_valid_o <= 1'b0;
    end else if (clr_i) begin
      cnt         <= '0;
      cfg_valid_o <= 1'b0;
    end else begin
      cfg_valid_o <= 1'b0;
      if (word_valid_i) begin
        words[cnt] <= word_i;
        if (cnt == CntW'(N_WORDS - 1)) begin
          cnt         <= '0;
          cfg_valid_o <= 1'b1;
        end else begin
          cnt <= cnt + 1'b1;
        end
      end
    end
  end
endmodule
