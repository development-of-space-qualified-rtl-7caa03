// mkid_readout_top: digital core of a frequency-multiplexed MKID readout.
//
// Transmit side: tone_synth builds each PFB frame of drive tones in the
// channel domain from the tone table (coarse bin, fine index, amplitude per
// tone) and synthesis_pfb (inverse FFT + polyphase filter) turns it into the
// complex I/Q sample stream for the two DACs (dac_i, dac_q).
// Receive side: the complex I/Q stream of the two ADCs (adc_i, adc_q) goes
// through coarse_channelizer (polyphase filter + 1024-point FFT) and then
// fine_ddc, which down-converts every tone in its coarse bin with a CORDIC
// over 2^9 frames, removes cosmic-ray glitches with a matched filter and
// co-adds, giving one complex result per tone per 2^19-sample window
// (res_*), the stream that a SpaceWire link would carry.
// The coarse channel stream (chan_*) is also brought out: it is the I/Q
// data that pulse detection and tone tracking would use; those blocks and
// the SpaceWire link are outside this core.
// Timing: one complex sample per clock on both the ADC and the DAC side
// (the converters' 5 GS/s maps onto clk one sample per cycle). The tone
// table is written through cfg_* and feeds both sides, so the receive side
// reads each tone where the transmit side placed it.
// This design merges the figure's separate I and Q columns into one complex
// datapath (I = real part, Q = imaginary part).
// tone_synth's bin-number output is left open: the synthesis filterbank
// only needs the bins in natural order, one per clock, which they are.
module mkid_readout_top
  import mkid_pkg::*;
#(
  parameter int LOG2C     = LOG2_NCHAN,
  parameter int LOG2F     = LOG2_NFINE,
  parameter int NTONES    = NUM_TONES,
  parameter int LANES     = TONE_LANES,
  localparam int CHW      = 16 + LOG2C + 1,             // coarse channel word
  localparam int RW       = CHW + 1 + LOG2F         // co-add result word
) (
  input  logic                      clk,
  input  logic                      rst_n,
  // ADC side
  input  logic                      adc_valid,
  input  logic signed [ADC_W-1:0]   adc_i,
  input  logic signed [ADC_W-1:0]   adc_q,
  // DAC side
  output logic                      dac_valid,
  output logic signed [DAC_W-1:0]   dac_i,
  output logic signed [DAC_W-1:0]   dac_q,
  // tone table and cosmic-ray settings
  input  logic                      cfg_we,
  input  logic [TONE_AW-1:0]        cfg_addr,
  input  tone_cfg_t                 cfg_tone,
  input  logic signed [CR_TW-1:0]   cr_tmpl [CR_TAPS],
  input  logic [CR_THR_W-1:0]       cr_threshold,
  // coarse channel stream (for pulse detection / tone tracking)
  output logic                      chan_valid,
  output logic [LOG2C-1:0]          chan_bin,
  output logic signed [CHW-1:0]     chan_re,
  output logic signed [CHW-1:0]     chan_im,
  // co-add results (for the SpaceWire link)
  output logic [LANES-1:0]          res_valid,
  output logic [TONE_AW-1:0]        res_tone     [LANES],
  output logic signed [RW-1:0]      res_i        [LANES],
  output logic signed [RW-1:0]      res_q        [LANES],
  output logic [GCOUNT_W-1:0]       res_glitches [LANES],
  // status
  output logic [LANES-1:0]          glitch,
  output logic                      frame_tick,
  output logic                      window_tick,
  output logic                      overrun
);
  localparam int BW = AMP_W + 4;

  // ---------------------------------------------------------------- transmit
  logic                 s_v;
  logic signed [BW-1:0] s_re, s_im;

  tone_synth #(.LOG2C(LOG2C), .LOG2F(LOG2F), .NUM_TONES(NTONES), .LANES(LANES), .BW(BW)) u_synth (
    .clk, .rst_n,
    .cfg_we, .cfg_addr, .cfg_tone,
    .out_valid(s_v),
    .out_bin  (),
    .out_re   (s_re),
    .out_im   (s_im)
  );

  synthesis_pfb #(.LOG2C(LOG2C), .BW(BW), .OW(DAC_W)) u_ipfb (
    .clk, .rst_n,
    .in_valid (s_v),
    .in_re    (s_re),
    .in_im    (s_im),
    .out_valid(dac_valid),
    .out_i    (dac_i),
    .out_q    (dac_q)
  );

  // ---------------------------------------------------------------- receive
  coarse_channelizer #(.LOG2C(LOG2C), .IW(ADC_W), .FIRW(16)) u_coarse (
    .clk, .rst_n,
    .in_valid (adc_valid),
    .in_i     (adc_i),
    .in_q     (adc_q),
    .out_valid(chan_valid),
    .out_bin  (chan_bin),
    .out_re   (chan_re),
    .out_im   (chan_im)
  );

  fine_ddc #(.LOG2C(LOG2C), .LOG2F(LOG2F), .NUM_TONES(NTONES), .LANES(LANES), .DW(CHW)) u_fine (
    .clk, .rst_n,
    .in_valid    (chan_valid),
    .in_bin      (chan_bin),
    .in_re       (chan_re),
    .in_im       (chan_im),
    .cfg_we, .cfg_addr, .cfg_tone,
    .cr_tmpl, .cr_threshold,
    .res_valid,
    .res_tone,
    .res_re      (res_i),
    .res_im      (res_q),
    .res_glitches,
    .glitch,
    .frame_tick,
    .window_tick,
    .overrun
  );

endmodule
