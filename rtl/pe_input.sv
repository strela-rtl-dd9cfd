// pe_input: one input port of a PE (there are four: N, E, S, W).
//
// The token from the neighbour (or from an input memory node) is stored in an
// Elastic Buffer and handed to a Fork Sender, which delivers it at once to all
// destinations enabled in the configured mask: FU data input 1, FU data
// input 2, the FU control input and the three PE output ports on the other
// sides. Mask bit order: FU1, FU2, FUc, then the other three sides in N, E,
// S, W order (the order is this design's; the structure follows the paper).
//
// Timing: one cycle of latency through the buffer; rin_o to the neighbour is
// a register; vout_o is combinational from the buffer and rout_i.
module pe_input #(
  parameter int unsigned W = 32
) (
  input  logic         clk_i,
  input  logic         rst_ni,
  input  logic         clr_i,
  input  logic [W-1:0] din_i,
  input  logic         vin_i,
  output logic         rin_o,
  input  logic [5:0]   mask_i,
  output logic [W-1:0] dout_o,
  output logic         vout_o,
  input  logic [5:0]   rout_i
);
  logic eb_valid, eb_ready;

  elastic_buffer #(.WIDTH(W)) u_eb (
    .clk_i   (clk_i),
    .rst_ni  (rst_ni),
    .clr_i   (clr_i),
    .data_i  (din_i),
    .valid_i (vin_i),
    .ready_o (rin_o),
    .data_o  (dout_o),
    .valid_o (eb_valid),
    .ready_i (eb_ready)
  );

  fork_sender #(.N_DEST(6)) u_fork (
    .valid_i (eb_valid),
    .ready_o (eb_ready),
    .mask_i  (mask_i),
    .ready_i (rout_i),
    .valid_o (vout_o)
  );
endmodule
