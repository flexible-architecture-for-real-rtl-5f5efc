// mvp_pkg: types and constants shared by the multi-video processing blocks.
//
// BT.656 carries 8-bit 4:2:2 YCbCr (Cb Y Cr Y ...) at one byte per sample
// clock. Each line holds two timing references, EAV and SAV, each the four
// bytes FF 00 00 XY. The status byte XY is 1 F V H P3 P2 P1 P0: F is the
// field, V is 1 during vertical blanking, H is 1 for EAV and 0 for SAV, and
// P3..P0 are protection bits. These codes and the blanking levels come from
// the BT.656 standard; the architecture itself only relies on the V bit of
// the SAV byte for frame-start detection.
//
// raw_video_t is the byte-rate "raw video" bus between the interface module,
// the (external) video processing module and the output formatter. Every
// clock carries one tagged byte slot of the line, so that the timing of the
// stream survives processing and the formatter can rebuild BT.656 from it.
package mvp_pkg;

  localparam logic [7:0] TRS_PRE0 = 8'hFF;  // first byte of a timing reference
  localparam logic [7:0] TRS_PRE1 = 8'h00;
  localparam logic [7:0] BLANK_C  = 8'h80;  // chroma blanking level
  localparam logic [7:0] BLANK_Y  = 8'h10;  // luma blanking level

  // Bit positions inside the XY status byte.
  localparam int XY_F = 6;
  localparam int XY_V = 5;
  localparam int XY_H = 4;

  typedef struct packed {
    logic       trs;     // byte belongs to a timing reference (EAV or SAV)
    logic       f;       // field bit in force for this byte
    logic       v;       // vertical blanking in force for this byte
    logic       h;       // 1 from EAV to SAV (horizontal blanking)
    logic       active;  // active video sample (h = 0, v = 0, not trs)
    logic       luma;    // sample slot is Y (else Cb or Cr)
    logic       cr;      // chroma slot is Cr (else Cb); 0 for luma
    logic [7:0] sample;  // byte value
  } raw_video_t;

  // XY status byte with BT.656 protection bits.
  function automatic logic [7:0] xy_code(input logic f, input logic v, input logic h);
    return {1'b1, f, v, h, v ^ h, f ^ h, f ^ v, f ^ v ^ h};
  endfunction

  // One register write of the device configuration table.
  typedef struct packed {
    logic [3:0] bus;       // which I2C bus (one per decoder / encoder)
    logic [6:0] dev;       // 7-bit device address
    logic [7:0] reg_addr;  // register index
    logic [7:0] data;      // value written
  } cfg_entry_t;

endpackage
