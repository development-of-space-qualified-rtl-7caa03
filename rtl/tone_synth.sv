// tone_synth: generates the drive-tone comb in the channel (bin) domain,
// one PFB frame of NCHAN complex bin values per NCHAN clocks, for the
// synthesis filterbank.
//
// For frame m, bin b receives sum over enabled tones t with bin(t) = b of
//     amp(t) * exp(+i*2*pi*fine(t)*m/NFINE),
// i.e. each tone is a complex exponential at its fine offset inside its bin,
// generated by rotating (amp, 0) in a cordic_rotator. After the inverse FFT
// and the synthesis polyphase filter this places the tone at
// (bin + fine/NFINE) channel widths, on the same grid the fine DDC reads.
//
// Two banks of per-lane bin buffers alternate: while bank A is read out in
// bin order (one bin per clock, lanes summed, each word cleared as it is
// read), the tones of the next frame are swept (LANES tones per clock) and
// added into bank B. The two frames after reset only clear the buffers and
// output zeros. Timing: out_valid is high every clock after reset; out_bin
// counts 0..NCHAN-1. The sweep plus the CORDIC latency must fit in NCHAN
// clocks (checked by an assertion).
// CORDIC tone generation follows the readout concept; the bank scheme and
// widths are this design's own.
module tone_synth #(
  parameter int LOG2C     = mkid_pkg::LOG2_NCHAN,
  parameter int LOG2F     = mkid_pkg::LOG2_NFINE,
  parameter int NUM_TONES = mkid_pkg::NUM_TONES,
  parameter int LANES     = mkid_pkg::TONE_LANES,
  parameter int PW        = mkid_pkg::PHASE_W,
  parameter int BW        = mkid_pkg::AMP_W + 4,   // bin word: up to 8 tones per bin
  localparam int TAW      = mkid_pkg::TONE_AW
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 cfg_we,
  input  logic [TAW-1:0]       cfg_addr,
  input  mkid_pkg::tone_cfg_t  cfg_tone,
  output logic                 out_valid,
  output logic [LOG2C-1:0]     out_bin,
  output logic signed [BW-1:0] out_re,
  output logic signed [BW-1:0] out_im
);
  import mkid_pkg::*;

  localparam int NCH = 1 << LOG2C;
  localparam int TPL = (NUM_TONES + LANES - 1) / LANES;
  localparam int SLW = (TPL > 1) ? $clog2(TPL) : 1;
  localparam int CNIT = 18;
  localparam int CW  = AMP_W + 1;

  tone_cfg_t tt [LANES][TPL];
  always_ff @(posedge clk) begin
    if (cfg_we && int'(cfg_addr) < NUM_TONES)
      tt[int'(cfg_addr) % LANES][int'(cfg_addr) / LANES] <= cfg_tone;
  end

  logic signed [BW-1:0] buf_re [LANES][2][NCH];
  logic signed [BW-1:0] buf_im [LANES][2][NCH];

  logic [LOG2C-1:0] rd_bin;
  logic             rd_bank;          // bank being read; the other is written
  logic [1:0]       warm;             // frames left before output is live
  logic             sweeping;
  logic [SLW-1:0]   slot;
  logic [LOG2F-1:0] m;                // frame being generated

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rd_bin   <= '0;
      rd_bank  <= 1'b0;
      warm     <= 2'd2;
      sweeping <= 1'b0;
      slot     <= '0;
      m        <= '0;
    end else begin
      rd_bin <= rd_bin + 1'b1;
      if (sweeping) begin
        if (slot == SLW'(TPL-1)) sweeping <= 1'b0;
        else                     slot <= slot + 1'b1;
      end
      if (rd_bin == LOG2C'(NCH-1)) begin
        rd_bank <= ~rd_bank;
        if (warm != 2'd0) warm <= warm - 1'b1;
        // generation of a frame starts once both banks have been cleared
        if (warm <= 2'd1) begin
          sweeping <= 1'b1;
          slot     <= '0;
          if (warm == 2'd0) m <= m + 1'b1;
        end
      end
    end
  end

  logic [LANES-1:0]     c_v;
  logic signed [CW-1:0] c_re [LANES];
  logic signed [CW-1:0] c_im [LANES];
  logic [LOG2C-1:0]     c_bin [LANES];

  for (genvar l = 0; l < LANES; l++) begin : g_lane
    tone_cfg_t        tone;
    logic             issue;
    logic [LOG2F-1:0] ph;
    always_comb begin
      tone  = tt[l][slot];
      issue = sweeping && tone.en && (int'(slot) * LANES + l < NUM_TONES);
      ph    = LOG2F'(tone.fine * m);
    end
    cordic_rotator #(.W(AMP_W), .PW(PW), .NIT(CNIT), .TAGW(LOG2C)) u_cordic (
      .clk, .rst_n,
      .in_valid (issue),
      .in_x     (tone.amp),
      .in_y     ('0),
      .in_phase (PW'(ph) << (PW - LOG2F)),
      .in_tag   (tone.bin[LOG2C-1:0]),
      .out_valid(c_v[l]),
      .out_x    (c_re[l]),
      .out_y    (c_im[l]),
      .out_tag  (c_bin[l])
    );
  end

  // Buffer update: each lane adds its rotated tone into the write bank;
  // the read port clears the word it reads.
  always_ff @(posedge clk) begin
    for (int l = 0; l < LANES; l++) begin
      buf_re[l][rd_bank][rd_bin] <= '0;
      buf_im[l][rd_bank][rd_bin] <= '0;
      if (c_v[l]) begin
        buf_re[l][~rd_bank][c_bin[l]] <= buf_re[l][~rd_bank][c_bin[l]] + BW'(c_re[l]);
        buf_im[l][~rd_bank][c_bin[l]] <= buf_im[l][~rd_bank][c_bin[l]] + BW'(c_im[l]);
      end
    end
  end

  logic signed [BW-1:0] sum_re, sum_im;
  always_comb begin
    sum_re = '0;
    sum_im = '0;
    for (int l = 0; l < LANES; l++) begin
      sum_re += buf_re[l][rd_bank][rd_bin];
      sum_im += buf_im[l][rd_bank][rd_bin];
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      out_bin   <= '0;
      out_re    <= '0;
      out_im    <= '0;
    end else begin
      out_valid <= 1'b1;
      out_bin   <= rd_bin;
      out_re    <= (warm == 2'd0) ? sum_re : '0;
      out_im    <= (warm == 2'd0) ? sum_im : '0;
    end
  end

  // The sweep and the CORDIC pipeline must finish within one frame.
  initial assert (TPL + CNIT + 3 <= NCH)
    else $error("tone_synth: %0d tone slots per lane do not fit a %0d-bin frame", TPL, NCH);

endmodule
