// fine_ddc: fine channelization of the coarse PFB output by CORDIC digital
// down-conversion, with per-tone cosmic-ray removal and co-add.
//
// Each tone t is described by a tone-table entry (mkid_pkg::tone_cfg_t):
// the coarse bin b that holds it and its fine index k (0..NFINE-1). A tone
// at frequency (b + k/NFINE) channel widths advances its phase in bin b by
// 2*pi*k/NFINE per PFB frame, so rotating the frame-m sample of bin b by
// -2*pi*k*m/NFINE brings the tone to DC. Summing NFINE such samples is one
// bin of an NFINE-point DFT over the bin's frame sequence: a 2^10-channel
// PFB followed by this 2^9-point step resolves 2^19 points in all.
//
// Data flow: the FFT writes each frame (in bit-reversed order, addressed by
// in_bin) into one half of a ping-pong frame buffer. When a frame is
// complete the halves swap and a sweep over the tone table starts on the
// finished half. The tones are spread over LANES parallel lanes (tone t is
// slot t/LANES of lane t%LANES); each lane reads its tone's bin from the
// frame buffer, rotates it in a cordic_rotator, cleans it in a
// cosmic_ray_filter and adds it in a coadd_accum. A sweep takes
// ceil(NUM_TONES/LANES) clocks and must end before the next frame is
// complete; 'overrun' is set (sticky) if it does not. Frame counter m runs
// modulo NFINE; frame 0 starts and frame NFINE-1 ends a co-add window, when
// each enabled tone emits one res_* record (the 2^19-sample window).
//
// Following the readout concept: 2^9-point CORDIC DDC per coarse bin,
// cosmic-ray removal before the co-add. This design's own: the lane split,
// the ping-pong buffer, the tone-table format and the word widths.
// The amplitude field of the tone table only matters to the transmit side;
// this block reads the bin, fine index and enable bits and ignores it.
module fine_ddc #(
  parameter int LOG2C     = mkid_pkg::LOG2_NCHAN,
  parameter int LOG2F     = mkid_pkg::LOG2_NFINE,
  parameter int NUM_TONES = mkid_pkg::NUM_TONES,
  parameter int LANES     = mkid_pkg::TONE_LANES,
  parameter int DW        = 16 + mkid_pkg::LOG2_NCHAN + 1,
  parameter int PW        = mkid_pkg::PHASE_W,
  localparam int TAW      = mkid_pkg::TONE_AW,
  localparam int SW       = DW + 1,              // sample width after CORDIC
  localparam int AW       = SW + LOG2F,          // co-add width
  localparam int GW       = mkid_pkg::GCOUNT_W
) (
  input  logic                         clk,
  input  logic                         rst_n,
  // coarse channelizer output
  input  logic                         in_valid,
  input  logic [LOG2C-1:0]             in_bin,
  input  logic signed [DW-1:0]         in_re,
  input  logic signed [DW-1:0]         in_im,
  // tone table write port
  input  logic                         cfg_we,
  input  logic [TAW-1:0]               cfg_addr,
  input  mkid_pkg::tone_cfg_t          cfg_tone,
  // cosmic-ray matched filter settings
  input  logic signed [mkid_pkg::CR_TW-1:0] cr_tmpl [mkid_pkg::CR_TAPS],
  input  logic [mkid_pkg::CR_THR_W-1:0] cr_threshold,
  // co-add results, one record per enabled tone per window
  output logic [LANES-1:0]             res_valid,
  output logic [TAW-1:0]               res_tone     [LANES],
  output logic signed [AW-1:0]         res_re       [LANES],
  output logic signed [AW-1:0]         res_im       [LANES],
  output logic [GW-1:0]                res_glitches [LANES],
  // status
  output logic [LANES-1:0]             glitch,        // a sample was replaced
  output logic                         frame_tick,    // a frame sweep starts
  output logic                         window_tick,   // sweep of frame NFINE-1 starts
  output logic                         overrun
);
  import mkid_pkg::*;

  localparam int NCH = 1 << LOG2C;
  localparam int NF  = 1 << LOG2F;
  localparam int TPL = (NUM_TONES + LANES - 1) / LANES;   // tone slots per lane
  localparam int SLW = (TPL > 1) ? $clog2(TPL) : 1;

  // ---------------------------------------------------------------- frame buffer
  logic signed [DW-1:0] fb_re [2][NCH];
  logic signed [DW-1:0] fb_im [2][NCH];
  logic                 wr_bank;
  logic [LOG2C-1:0]     wr_cnt;
  logic                 frame_done;

  assign frame_done = in_valid && (wr_cnt == LOG2C'(NCH-1));

  always_ff @(posedge clk) begin
    if (in_valid) begin
      fb_re[wr_bank][in_bin] <= in_re;
      fb_im[wr_bank][in_bin] <= in_im;
    end
  end

  // ---------------------------------------------------------------- tone table
  tone_cfg_t tt [LANES][TPL];

  always_ff @(posedge clk) begin
    if (cfg_we && int'(cfg_addr) < NUM_TONES)
      tt[int'(cfg_addr) % LANES][int'(cfg_addr) / LANES] <= cfg_tone;
  end

  // ---------------------------------------------------------------- sweep control
  logic             sweeping;
  logic [SLW-1:0]   slot;
  logic             rd_bank;
  logic [LOG2F-1:0] m, m_cur;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wr_bank     <= 1'b0;
      wr_cnt      <= '0;
      sweeping    <= 1'b0;
      slot        <= '0;
      rd_bank     <= 1'b0;
      m           <= '0;
      m_cur       <= '0;
      frame_tick  <= 1'b0;
      window_tick <= 1'b0;
      overrun     <= 1'b0;
    end else begin
      frame_tick  <= 1'b0;
      window_tick <= 1'b0;
      if (in_valid) wr_cnt <= wr_cnt + 1'b1;
      if (sweeping) begin
        if (slot == SLW'(TPL-1)) sweeping <= 1'b0;
        else                     slot <= slot + 1'b1;
      end
      if (frame_done) begin
        if (sweeping) overrun <= 1'b1;
        wr_bank     <= ~wr_bank;
        rd_bank     <= wr_bank;
        sweeping    <= 1'b1;
        slot        <= '0;
        m_cur       <= m;
        m           <= m + 1'b1;
        frame_tick  <= 1'b1;
        window_tick <= (m == LOG2F'(NF-1));
      end
    end
  end

  // ---------------------------------------------------------------- lanes
  for (genvar l = 0; l < LANES; l++) begin : g_lane
    tone_cfg_t        tone;
    logic             issue;
    logic [LOG2F-1:0] ph;
    logic [PW-1:0]    phase;
    logic signed [DW-1:0] s_re, s_im;

    always_comb begin
      tone  = tt[l][slot];
      issue = sweeping && tone.en && (int'(slot) * LANES + l < NUM_TONES);
      s_re  = fb_re[rd_bank][tone.bin[LOG2C-1:0]];
      s_im  = fb_im[rd_bank][tone.bin[LOG2C-1:0]];
      ph    = LOG2F'(tone.fine * m_cur);              // k*m mod NFINE
      phase = PW'(-(PW'(ph) << (PW - LOG2F)));         // rotate by -2*pi*k*m/NFINE
    end

    localparam int TGW = SLW + 2;
    logic                 c_v;
    logic signed [SW-1:0] c_re, c_im;
    logic [TGW-1:0]       c_tag;

    cordic_rotator #(.W(DW), .PW(PW), .TAGW(TGW)) u_cordic (
      .clk, .rst_n,
      .in_valid (issue),
      .in_x     (s_re),
      .in_y     (s_im),
      .in_phase (phase),
      .in_tag   ({slot, (m_cur == '0), (m_cur == LOG2F'(NF-1))}),
      .out_valid(c_v),
      .out_x    (c_re),
      .out_y    (c_im),
      .out_tag  (c_tag)
    );

    logic                 f_v, f_first, f_last, f_g;
    logic [SLW-1:0]       f_slot;
    logic signed [SW-1:0] f_re, f_im;

    cosmic_ray_filter #(.DEPTH(TPL), .W(SW)) u_cr (
      .clk, .rst_n,
      .tmpl      (cr_tmpl),
      .threshold (cr_threshold),
      .in_valid  (c_v),
      .in_slot   (c_tag[TGW-1:2]),
      .in_first  (c_tag[1]),
      .in_last   (c_tag[0]),
      .in_re     (c_re),
      .in_im     (c_im),
      .out_valid (f_v),
      .out_slot  (f_slot),
      .out_first (f_first),
      .out_last  (f_last),
      .out_re    (f_re),
      .out_im    (f_im),
      .out_glitch(f_g)
    );
    assign glitch[l] = f_g;

    logic [SLW-1:0] r_slot;
    coadd_accum #(.DEPTH(TPL), .W(SW), .AW(AW), .GW(GW)) u_coadd (
      .clk, .rst_n,
      .in_valid    (f_v),
      .in_slot     (f_slot),
      .in_first    (f_first),
      .in_last     (f_last),
      .in_glitch   (f_g),
      .in_re       (f_re),
      .in_im       (f_im),
      .out_valid   (res_valid[l]),
      .out_slot    (r_slot),
      .out_re      (res_re[l]),
      .out_im      (res_im[l]),
      .out_glitches(res_glitches[l])
    );
    assign res_tone[l] = TAW'(int'(r_slot) * LANES + l);
  end

endmodule
