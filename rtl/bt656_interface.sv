// bt656_interface: interface module of the video processor (BT.656 to YCbCr).
//
// Decodes a BT.656 byte stream into raw 4:2:2 YCbCr samples together with
// the horizontal and vertical sync information embedded in the stream. The
// stream is delayed by three registers so that, when the status byte of a
// timing reference (FF 00 00 XY) arrives, its F/V/H bits can be applied from
// the first byte (FF) of that reference on. Each output slot is one
// raw_video_t: the byte, whether it is part of a timing reference, the F/V/H
// levels in force, whether it is an active-video sample, and whether the slot
// is Y, Cb or Cr (the slots after each timing reference run Cb Y Cr Y ...).
//
// The paper gives this block's function only; the tagged byte-rate output
// format is this design's choice. It keeps the line timing intact through
// the processing module so that the output formatter can rebuild BT.656.
//
// Ports: clk (c_o), rst_n, din in; vout out. Latency: a byte on din appears
// on vout four clocks later. F/V/H reset to field 0, blanking.
module bt656_interface
  import mvp_pkg::*;
(
  input  logic       clk,
  input  logic       rst_n,
  input  logic [7:0] din,
  output raw_video_t vout
);
  logic [7:0] d1, d2, d3;
  logic       f_q, v_q, h_q;   // timing state after the last reference
  logic [1:0] trs_left;        // reference bytes still to come out after d3
  logic [1:0] ph;              // 4:2:2 slot phase of the byte in d3
  logic       match, in_trs, f_n, v_n, h_n;
  raw_video_t slot;

  always_comb begin
    match  = (d3 == TRS_PRE0) && (d2 == TRS_PRE1) && (d1 == TRS_PRE1);
    in_trs = match || (trs_left != 2'd0);
    f_n    = match ? din[XY_F] : f_q;
    v_n    = match ? din[XY_V] : v_q;
    h_n    = match ? din[XY_H] : h_q;

    slot.trs    = in_trs;
    slot.f      = f_n;
    slot.v      = v_n;
    slot.h      = h_n;
    slot.active = !in_trs && !h_n && !v_n;
    slot.luma   = !in_trs && ph[0];
    slot.cr     = !in_trs && (ph == 2'd2);
    slot.sample = d3;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      d1       <= '0;
      d2       <= '0;
      d3       <= '0;
      f_q      <= 1'b0;
      v_q      <= 1'b1;
      h_q      <= 1'b1;
      trs_left <= '0;
      ph       <= '0;
      vout     <= '0;
    end else begin
      d1       <= din;
      d2       <= d1;
      d3       <= d2;
      f_q      <= f_n;
      v_q      <= v_n;
      h_q      <= h_n;
      trs_left <= match ? 2'd3 : (trs_left != 2'd0 ? trs_left - 2'd1 : 2'd0);
      ph       <= in_trs ? 2'd0 : ph + 2'd1;
      vout     <= slot;
    end
  end

  // BT.656 rule: the status byte of a timing reference has its top bit set
  // and carries the protection bits P3..P0 = V^H, F^H, F^V, F^V^H. Errors are
  // not corrected here, so a stream that breaks the rule is flagged.
  a_xy_protect: assert property (@(posedge clk) disable iff (!rst_n)
    match |-> din[7] && din[3:0] == {din[XY_V] ^ din[XY_H], din[XY_F] ^ din[XY_H],
                                     din[XY_F] ^ din[XY_V], din[XY_F] ^ din[XY_V] ^ din[XY_H]})
    else $error("bt656_interface: bad timing reference status byte %h", din);
endmodule
