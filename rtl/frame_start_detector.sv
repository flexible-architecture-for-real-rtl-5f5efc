// frame_start_detector (FSD): finds the start of each frame of a BT.656 video.
//
// The chain is the one the paper draws: an SAV/EAV byte detector finds the
// XY status bytes, the sync signals extractor keeps the V_sync bit of the
// SAV codes, and a falling-edge detector turns V_sync's 1-to-0 transition
// (end of vertical blanking) into a one-clock start pulse. The pulse is high
// in the cycle in which the first byte after the SAV of the first active
// line (the first Cb sample) is on din, so a buffer that starts writing on
// it puts the first pixel at its first location. With interlaced video V
// falls once per field, and each fall is reported as a start, as the paper
// describes it.
//
// Ports: clk (the video's own sample clock c_i), rst_n, din, start; also
// the extracted V/F/H levels for observation. W >= 8; for wider streams
// (10-bit BT.656) the status bits are the top eight of the word.
module frame_start_detector #(
  parameter int unsigned W = 8
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic [W-1:0] din,
  output logic         start,
  output logic         v_sync,
  output logic         f_id,
  output logic         h_sync
);
  logic         xy_valid;
  logic [W-1:0] xy;

  trs_detector #(.W(W)) u_trs (
    .clk, .rst_n, .din, .xy_valid, .xy
  );

  sync_extractor u_ext (
    .clk, .rst_n, .xy_valid, .xy(xy[W-1 -: 8]), .v_sync, .f_id, .h_sync
  );

  falling_edge_detector u_fed (
    .clk, .rst_n, .level(v_sync), .fall(start)
  );
endmodule
