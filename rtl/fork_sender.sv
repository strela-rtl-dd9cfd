// fork_sender: sends one elastic token to several destinations at once.
//
// The destinations taking part are chosen by mask_i (a configuration field).
// The token leaves only when every enabled destination is ready: valid_o is
// valid_i ANDed with all enabled readies and is shown to all destinations, so
// they all accept in the same cycle and no per-destination bookkeeping is
// needed. This is the modified Fork Sender of the paper, which replaces the
// baseline's Fork Receivers. ready_o tells the source that the token has gone.
// An empty mask lets the token go at once (it is dropped); that is this
// design's choice. Purely combinational.
module fork_sender #(
  parameter int unsigned N_DEST = 6
) (
  input  logic              valid_i,
  output logic              ready_o,
  input  logic [N_DEST-1:0] mask_i,
  input  logic [N_DEST-1:0] ready_i,
  output logic              valid_o
);
  assign ready_o = &(ready_i | ~mask_i);
  assign valid_o = valid_i & ready_o;
endmodule
