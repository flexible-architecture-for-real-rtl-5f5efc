// tb_output_formatter: feeds tagged raw slots describing a raster, with the
// active samples of a few lines forced to 00h/FFh and the bytes of timing
// references and blanking scrambled, and checks that the output is the
// BT.656 stream of that raster (codes and protection bits rebuilt,
// blanking levels restored, 00h/FFh clipped to 01h/FEh), one clock later.
module tb_output_formatter;
  import tb_video_pkg::*;
  import mvp_pkg::*;
  localparam raster_t R = SMALL;
  logic clk = 0, rst_n = 0;
  raw_video_t vin;
  logic [7:0] dout;
  int checks = 0, failures = 0, clipped = 0, codes = 0;

  output_formatter dut (.clk, .rst_n, .vin, .dout);

  always #5 clk = ~clk;

  initial begin
    #1ms;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [7:0] exp_q;
    bit have;
    have = 0;
    vin = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int fr = 0; fr < 3; fr++)
      for (int l = 1; l <= R.lines; l++)
        for (int xx = 0; xx < line_len(R); xx++) begin
          int ph;
          logic [7:0] e;
          @(negedge clk);
          if (have) begin
            checks++;
            if (dout !== exp_q) begin
              failures++;
              if (failures < 10) $display("got %h exp %h", dout, exp_q);
            end
          end
          ph = (xx < sav_end(R)) ? (xx - 4) % 4 : (xx - sav_end(R)) % 4;
          vin.trs    = is_trs(R, l, xx);
          vin.f      = f_of(R, l);
          vin.v      = v_of(R, l);
          vin.h      = (xx < 4 + R.hblank);
          vin.active = is_active(R, l, xx);
          vin.luma   = !vin.trs && (ph % 2 == 1);
          vin.cr     = !vin.trs && (ph == 2);
          e = byte_at(R, 5, l, xx);
          vin.sample = e;
          if (!vin.active) vin.sample = 8'($urandom);    // formatter must not pass these
          else if (l == 3 && fr == 1) begin                // out-of-range samples
            vin.sample = (xx % 2) ? 8'hFF : 8'h00;
            e = (xx % 2) ? 8'hFE : 8'h01;
            clipped++;
          end
          if (vin.trs && e != 8'h00 && e != 8'hFF) codes++;
          exp_q = e;
          have = 1;
        end
    checks++;
    if (clipped == 0 || codes == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
