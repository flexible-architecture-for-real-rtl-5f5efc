// Body shared by the end-to-end testbenches of mvp_top (reduced and full
// size, other K/H). Expects K, H, R, LEAD, FRAMES, LAT and TIMEOUT, and
// instantiates the top through the MVP_TOP_INST macro of the including file.
// Video i+1 starts i x LEAD reference clocks before video 1, so the videos
// further down the list start earlier; output h is the mean of video 1 and
// video h+2 (video K when h+2 > K).
// Output 0 is also timed on its own: the c_o cycles between successive
// output frame starts (first SAV of field 1's active lines) must be one
// frame of bytes, so the output frame rate is the reference's (29.97 fps at
// 27 MHz for 525-line video).
  localparam int NB = K + H;
  // the top's default configuration writes each bus once: decoders at 5Ch
  // and 5Dh alternating, encoders at 2Ah
  function automatic logic [6:0] addr_of(int b);
    return (b >= K) ? 7'h2A : (b % 2 == 0) ? 7'h5C : 7'h5D;
  endfunction
  function automatic int other_of(int h);
    return (h + 1 < K) ? h + 1 : K - 1;
  endfunction
  logic [K-1:0] clk_in = '0;
  logic clk_sys = 0, rst_n = 0, clk_o;
  logic [K-1:0] en = '0;
  logic [K-1:0][7:0] vin;
  logic [K-1:0] frame_start, buf_wrap;
  raw_video_t [K-1:0] proc_in;
  raw_video_t [H-1:0] proc_out;
  logic [H-1:0][7:0] vout;
  logic cfg_done, cfg_error;
  logic [NB-1:0] scl_o, sda_o, sda_i, drv;
  int writes[NB], starts_i2c[NB];
  logic [7:0] lreg[NB], ldat[NB];
  int vline[K], vx[K], vframe[K];
  bit vrun[K];
  int line1, x1, frame1, line2, x2;
  realtime half[K];
  // output frame period, measured on vout[0] alone
  bit o_on = 0, o_prev_v = 0;
  logic [7:0] o1 = '0, o2 = '0, o3 = '0;
  longint o_cyc = 0, o_last = -1;
  int o_len = 0, n_period = 0;
  always @(posedge clk_o) if (o_on) begin
    o_cyc++;
    if (o3 == 8'hFF && o2 == 8'h00 && o1 == 8'h00 && !vout[0][4]) begin
      if (!vout[0][6] && !vout[0][5] && o_prev_v) begin
        if (o_last >= 0) begin
          o_len = int'(o_cyc - o_last);
          n_period++;
          checks++;
          if (o_len != R.lines * line_len(R)) begin
            failures++;
            $display("output frame period %0d c_o cycles, expected %0d", o_len, R.lines * line_len(R));
          end
        end
        o_last = o_cyc;
      end
      o_prev_v = !vout[0][6] && vout[0][5];
    end
    o3 = o2; o2 = o1; o1 = vout[0];
  end
  int checks = 0, failures = 0;
  int n_start1 = 0, n_start2 = 0, n_wrap = 0, n_codes = 0, n_fused = 0, n_lead = 0, n_dev = 0;

  for (genvar i = 0; i < K; i++) begin : g_src
    bt656_source #(.R(R), .SRC(i + 1)) s (.clk(clk_in[i]), .en(en[i]), .dout(vin[i]), .line(vline[i]),
                                          .x(vx[i]), .frame(vframe[i]), .running(vrun[i]));
    if (i > 0) begin : g_clk
      always #(half[i]) clk_in[i] = ~clk_in[i];
      always @(posedge clk_in[i]) if (rst_n) begin
        if (frame_start[i]) n_start2++;
        if (buf_wrap[i]) n_wrap++;
      end
    end
  end
  assign line1 = vline[0];
  assign x1 = vx[0];
  assign frame1 = vframe[0];
  assign line2 = vline[1];
  assign x2 = vx[1];

  `MVP_TOP_INST

  for (genvar b = 0; b < NB; b++) begin : g_s
    assign sda_i[b] = sda_o[b] & drv[b];
    i2c_slave_model #(.ADDR(addr_of(b))) s (
      .scl(scl_o[b]), .sda(sda_i[b]), .sda_drive(drv[b]), .writes(writes[b]),
      .last_reg(lreg[b]), .last_data(ldat[b]), .starts(starts_i2c[b])
    );
  end

  // processing model: output h is the mean of video 1 and another video on
  // active samples, with video 1's timing tags
  always_ff @(posedge clk_o) begin
    for (int h = 0; h < H; h++) begin
      proc_out[h] <= proc_in[0];
      if (proc_in[0].active)
        proc_out[h].sample <= 8'((9'(proc_in[0].sample) + 9'(proc_in[other_of(h)].sample) + 9'd1) >> 1);
    end
  end

  always #18.5 clk_in[0] = ~clk_in[0];         // 27 MHz reference
  always #10 clk_sys = ~clk_sys;               // 50 MHz control clock

  always @(posedge clk_in[0]) if (rst_n && frame_start[0]) n_start1++;

  initial begin
    int hl[LAT+1], hx[LAT+1];
    bit hv[LAT+1];
    bit synced;
    synced = 0;
    for (int i = 0; i <= LAT; i++) hv[i] = 0;
    for (int i = 1; i < K; i++) half[i] = 18.5;
    repeat (2) @(posedge clk_in[0]);
    rst_n = 1;
    for (int i = K - 1; i > 0; i--) begin       // the other videos power up first
      en[i] = 1;
      repeat (LEAD) @(posedge clk_in[0]);
    end
    @(negedge clk_in[0]);
    en[0] = 1;
    n_lead = x2 + line_len(R) * (line2 - 1);    // start-up delay in bytes
    o_on = 1;
    while (frame1 < FRAMES) begin
      @(posedge clk_o);
      #1;
      // time-varying deviation of the other videos' rates, +-0.05 %
      for (int i = 1; i < K; i++) begin
        realtime nh;
        nh = 18.5 * (1.0 + 0.0005 * real'((frame1 + line1 / 64 + i) % 3 - 1));
        if (nh != half[i]) n_dev++;
        half[i] = nh;
      end
      if (hv[LAT - 1]) begin
        int l, xx;
        logic [7:0] e;
        l = hl[LAT - 1]; xx = hx[LAT - 1];
        for (int h = 0; h < H; h++) begin
          e = byte_at(R, 1, l, xx);
          if (is_active(R, l, xx)) begin
            e = 8'((9'(pix(1, l, xx)) + 9'(pix(other_of(h) + 1, l, xx)) + 9'd1) >> 1);
            n_fused++;
          end
          if (is_trs(R, l, xx) && e[7] && e != 8'hFF) n_codes++;
          checks++;
          if (vout[h] !== e) begin
            failures++;
            if (failures < 10) $display("out %0d line %0d x %0d: got %h exp %h", h, l, xx, vout[h], e);
          end
        end
      end
      for (int i = LAT; i > 0; i--) begin hl[i] = hl[i-1]; hx[i] = hx[i-1]; hv[i] = hv[i-1]; end
      if (n_start1 > 0) synced = 1;
      hl[0] = line1; hx[0] = x1; hv[0] = synced;
    end
    wait (cfg_done);
    checks++;
    if (cfg_error) failures++;
    for (int b = 0; b < NB; b++) begin
      checks++;
      if (writes[b] != 1) failures++;
    end
    $display("frame starts v1=%0d v2=%0d, start-up lead=%0d bytes, rate changes=%0d, buffer wraps=%0d",
             n_start1, n_start2, n_lead, n_dev, n_wrap);
    $display("timing codes rebuilt=%0d, fused pixels=%0d, config writes=%0d %0d %0d",
             n_codes, n_fused, writes[0], writes[1], writes[2]);
    $display("output frame periods measured=%0d, last=%0d c_o cycles (%0.2f frames/s at 27 MHz)",
             n_period, o_len, 27.0e6 / real'(o_len));
    checks += 8;
    if (n_period == 0) failures++;
    if (n_start1 == 0) failures++;
    if (n_start2 == 0) failures++;
    if (n_lead == 0) failures++;
    if (n_dev == 0) failures++;
    if (n_wrap == 0) failures++;
    if (n_codes == 0) failures++;
    if (n_fused == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
