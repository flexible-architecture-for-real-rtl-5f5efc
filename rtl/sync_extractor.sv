// sync_extractor: sync signals extractor of the frame start detector.
//
// Takes the XY status bytes found by trs_detector and keeps the field (F),
// vertical (V) and horizontal (H) indicator bits as levels. As in the paper,
// V_sync is taken from SAV codes only (H = 0): it is 1 while the lines that
// follow are vertical blanking and 0 while they carry active pixels. H is
// updated by both SAV and EAV. V_sync resets to 1 (blanking), a choice of
// this design, so that the first active line after reset gives a start.
//
// Ports: xy_valid/xy in, v_sync/f_id/h_sync out. Latency: the levels change
// one clock after the XY byte.
module sync_extractor
  import mvp_pkg::*;
(
  input  logic       clk,
  input  logic       rst_n,
  input  logic       xy_valid,
  input  logic [7:0] xy,
  output logic       v_sync,
  output logic       f_id,
  output logic       h_sync
);
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      v_sync <= 1'b1;
      f_id   <= 1'b0;
      h_sync <= 1'b1;
    end else if (xy_valid) begin
      h_sync <= xy[XY_H];
      if (!xy[XY_H]) begin  // SAV
        v_sync <= xy[XY_V];
        f_id   <= xy[XY_F];
      end
    end
  end
endmodule
