// classifier: step 1 of the forwarding path.
//
// Every received descriptor is sorted by its iscopy flag. A copy goes to the
// best-effort (BE) path. A TT frame goes to the TT path, and a clone of it,
// with iscopy set, goes to the BE path, so every switch on a flow's route
// starts a new copy. This follows the classifier step of the architecture.
//
// This design's choices: the block is combinational with valid/ready
// handshakes. The TT path must accept a TT frame (in_ready follows
// tt_ready for TT frames); the BE path never stalls the input: a copy or
// clone that finds the BE path not ready is dropped and counted, as a
// congested BE path drops copies. With swa_en low the switch behaves as a
// plain TT switch: no clone is made and received copies are dropped.
module classifier
  import swa_pkg::*;
(
  input  logic   clk,
  input  logic   rst_n,
  input  logic   swa_en,
  // received frames
  input  logic   in_valid,
  output logic   in_ready,
  input  frame_t in_frame,
  // TT path (to TT process)
  output logic   tt_valid,
  input  logic   tt_ready,
  output frame_t tt_frame,
  // BE path (to BE process)
  output logic   cp_valid,
  input  logic   cp_ready,
  output frame_t cp_frame,
  // statistics
  output logic [31:0] clone_count,
  output logic [31:0] drop_count
);
  logic accept, want_cp;

  assign in_ready = in_frame.iscopy ? 1'b1 : tt_ready;
  assign accept   = in_valid && in_ready;

  assign tt_valid = in_valid && !in_frame.iscopy;
  assign tt_frame = in_frame;

  // The BE path receives the copy itself, or a clone of the TT frame.
  assign want_cp  = in_valid && swa_en;
  assign cp_valid = want_cp && (in_frame.iscopy || tt_ready);
  always_comb begin
    cp_frame        = in_frame;
    cp_frame.iscopy = 1'b1;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      clone_count <= '0;
      drop_count  <= '0;
    end else if (accept) begin
      if (swa_en && !in_frame.iscopy && cp_ready) clone_count <= clone_count + 1;
      if (in_frame.iscopy ? (!swa_en || !cp_ready) : (swa_en && !cp_ready))
        drop_count <= drop_count + 1;
    end
  end
endmodule
