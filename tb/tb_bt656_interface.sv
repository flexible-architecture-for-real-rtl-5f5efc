// tb_bt656_interface: decodes a BT.656 raster from the decoder model and
// checks every output slot, four clocks after its byte entered, against tags
// worked out from the raster position: timing-reference membership, F/V/H,
// active, luma/Cr slot type and the byte value.
module tb_bt656_interface;
  import tb_video_pkg::*;
  import mvp_pkg::*;
  localparam raster_t R = SMALL;
  localparam int LAT = 4;
  logic clk = 0, rst_n = 0, en = 0;
  logic [7:0] din;
  raw_video_t vout;
  int line, x, frame;
  bit running;
  int checks = 0, failures = 0, n_active = 0, n_trs = 0;
  int hl[LAT+1], hx[LAT+1];
  bit hr[LAT+1];

  bt656_source #(.R(R), .SRC(3)) src (.clk, .en, .dout(din), .line, .x, .frame, .running);
  bt656_interface dut (.clk, .rst_n, .din, .vout);

  always #5 clk = ~clk;

  initial begin
    #1ms;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic raw_video_t expect_slot(int l, int xx);
    raw_video_t e;
    int ph;
    e.trs    = is_trs(R, l, xx);
    e.f      = f_of(R, l);
    e.v      = v_of(R, l);
    e.h      = (xx < 4 + R.hblank);
    e.active = is_active(R, l, xx);
    ph       = (xx < sav_end(R)) ? (xx - 4) % 4 : (xx - sav_end(R)) % 4;
    e.luma   = !e.trs && (ph % 2 == 1);
    e.cr     = !e.trs && (ph == 2);
    e.sample = byte_at(R, 3, l, xx);
    return e;
  endfunction

  initial begin
    for (int i = 0; i <= LAT; i++) hr[i] = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    en = 1;
    while (frame < 3) begin
      @(negedge clk);
      for (int i = LAT; i > 0; i--) begin hl[i] = hl[i-1]; hx[i] = hx[i-1]; hr[i] = hr[i-1]; end
      hl[0] = line; hx[0] = x; hr[0] = running;
      // skip the first line: the decoder learns F/V/H from its first reference
      if (hr[LAT] && !(frame == 0 && hl[LAT] == 1)) begin
        raw_video_t e;
        e = expect_slot(hl[LAT], hx[LAT]);
        checks++;
        if (vout !== e) begin
          failures++;
          if (failures < 10) $display("line %0d x %0d: got %h exp %h", hl[LAT], hx[LAT], vout, e);
        end
        if (vout.active) n_active++;
        if (vout.trs) n_trs++;
      end
    end
    checks++;
    if (n_active == 0 || n_trs == 0) failures++;
    $display("active=%0d trs=%0d", n_active, n_trs);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
