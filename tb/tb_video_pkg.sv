// tb_video_pkg: reference description of a BT.656 video raster for testbenches.
//
// A raster is given by its active bytes per line, the blanking bytes between
// EAV and SAV, the number of lines, and the line numbers at which the field
// bit and the vertical blanking bit change (NTSC: the 525-line values,
// 1716 bytes per line, 900900 bytes per frame; PAL: the 625-line values). Each
// line is laid out as EAV (4 bytes), horizontal blanking, SAV (4 bytes),
// active bytes. byte_at() gives the byte any decoder following this raster
// puts out at (line, x); active-video content is a fixed function of source,
// line and position, kept within 01h..FEh, so that a checker can predict any
// byte from its position alone.
package tb_video_pkg;

  typedef struct packed {
    int active;   // active bytes per line (multiple of 4)
    int hblank;   // blanking bytes between EAV and SAV
    int lines;    // lines per frame
    int f2_first; // first line with F = 1
    int f1_first; // first line with F = 0
    int v1_last;  // last vertical blanking line of field 1 (V = 1 from line 1)
    int v2_first; // first vertical blanking line of field 2
    int v2_last;  // last vertical blanking line of field 2
  } raster_t;

  localparam raster_t NTSC = '{active: 1440, hblank: 268, lines: 525, f2_first: 266,
                               f1_first: 4, v1_last: 19, v2_first: 264, v2_last: 282};

  // 625-line raster (1728 bytes per line, 1080000 bytes per frame). Lines are
  // numbered from the standard's line 624, so that line 1 begins the first
  // field's vertical blanking: standard lines 624..22 and 311..335 have V = 1,
  // and standard lines 313..625 (here 315..625 and 1..2) have F = 1.
  localparam raster_t PAL = '{active: 1440, hblank: 280, lines: 625, f2_first: 315,
                              f1_first: 3, v1_last: 24, v2_first: 313, v2_last: 337};

  // 12-line raster for short simulations: 32 bytes per line, fields of six lines.
  localparam raster_t SMALL = '{active: 16, hblank: 8, lines: 12, f2_first: 8,
                                f1_first: 2, v1_last: 2, v2_first: 6, v2_last: 8};

  function automatic int line_len(raster_t r);
    return 8 + r.hblank + r.active;
  endfunction

  function automatic bit f_of(raster_t r, int line);
    return (line >= r.f2_first) || (line < r.f1_first);
  endfunction

  function automatic bit v_of(raster_t r, int line);
    return (line <= r.v1_last) || (line >= r.v2_first && line <= r.v2_last);
  endfunction

  function automatic logic [7:0] xy_of(bit f, bit v, bit h);
    return {1'b1, f, v, h, v ^ h, f ^ h, f ^ v, f ^ v ^ h};
  endfunction

  // Active pixel value of source src; never 00h or FFh.
  function automatic logic [7:0] pix(int src, int line, int x);
    return 8'(((line * 7 + x * 13 + src * 61) % 254) + 1);
  endfunction

  // First active byte of a line is at x = sav_end(r).
  function automatic int sav_end(raster_t r);
    return 8 + r.hblank;
  endfunction

  // Is (line, x) an active video sample?
  function automatic bit is_active(raster_t r, int line, int x);
    return !v_of(r, line) && x >= sav_end(r);
  endfunction

  // Is (line, x) inside a timing reference?
  function automatic bit is_trs(raster_t r, int line, int x);
    return x < 4 || (x >= 4 + r.hblank && x < sav_end(r));
  endfunction

  // Byte at (line, x), lines numbered from 1.
  function automatic logic [7:0] byte_at(raster_t r, int src, int line, int x);
    bit f, v, h;
    int k, ph;
    f = f_of(r, line);
    v = v_of(r, line);
    if (x < 4)                    begin h = 1'b1; k = x;                end
    else if (x < 4 + r.hblank)    begin h = 1'b1; k = -1;               end
    else if (x < sav_end(r))      begin h = 1'b0; k = x - 4 - r.hblank; end
    else                          begin h = 1'b0; k = -1;               end
    if (k == 0) return 8'hFF;
    if (k == 1 || k == 2) return 8'h00;
    if (k == 3) return xy_of(f, v, h);
    if (is_active(r, line, x)) return pix(src, line, x);
    ph = (x < sav_end(r)) ? (x - 4) % 4 : (x - sav_end(r)) % 4;
    return (ph % 2 == 1) ? 8'h10 : 8'h80;
  endfunction

endpackage
