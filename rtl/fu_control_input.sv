// fu_control_input: the control input of the FU.
//
// Data and valid multiplexers pick the control token from one of the four PE
// input ports (N, E, S, W = select 0..3). There is no buffer: the control
// token always comes from outside the PE, so its ready (rout_FUc, driven by
// the Join/Merge) cannot close a combinational loop. Both points follow the
// paper. The control bit handed to the FU is bit 0 of the selected word (a
// comparator writes 0 or 1); that choice is this design's.
// Purely combinational.
module fu_control_input #(
  parameter int unsigned W = 32
) (
  input  logic [3:0][W-1:0] din_i,
  input  logic [3:0]        vin_i,
  input  logic [1:0]        dsel_i,
  input  logic [1:0]        vsel_i,
  output logic              ctrl_o,
  output logic              valid_o,
  input  logic              ready_i,
  output logic              ready_o
);
  assign ctrl_o  = din_i[dsel_i][0];
  assign valid_o = vin_i[vsel_i];
  assign ready_o = ready_i;
endmodule
