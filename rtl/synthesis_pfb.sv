// synthesis_pfb: inverse (synthesis) 2^LOG2C-channel polyphase filterbank
// that turns per-channel tone values into the time-domain DAC waveform.
//
// Frames of NCHAN bin values (natural bin order, one per valid cycle) go
// through an unscaled inverse FFT (fft_r2sdf, INVERSE=1), whose bit-reversed
// output is put back in time order by bitrev_reorder, and then through the
// same polyphase FIR section as the analysis side (pfb_fir, K = NCHAN,
// 4 taps per branch): output sample n = sum_j h[j*K + r] * v[n - j*K],
// r = n mod K. The filter output is rounded and saturated to DAC_W bits for
// the I (real) and Q (imaginary) DACs.
// Timing: one complex sample per clock; latency is about two frames
// (FFT fill plus reorder) plus a few clocks.
// Inverse FFT followed by the polyphase filter follows the readout concept;
// the critically sampled form (no oversampling) and the word widths are
// this design's own.
module synthesis_pfb #(
  parameter int LOG2C = mkid_pkg::LOG2_NCHAN,
  parameter int BW    = mkid_pkg::AMP_W + 4,
  parameter int OW    = mkid_pkg::DAC_W
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 in_valid,
  input  logic signed [BW-1:0] in_re,
  input  logic signed [BW-1:0] in_im,
  output logic                 out_valid,
  output logic signed [OW-1:0] out_i,
  output logic signed [OW-1:0] out_q
);
  localparam int FW = BW + LOG2C + 1;

  logic                 f_v;
  logic [LOG2C-1:0]     f_idx;
  logic signed [FW-1:0] f_re, f_im;

  fft_r2sdf #(.LOG2N(LOG2C), .IW(BW), .INVERSE(1'b1)) u_ifft (
    .clk, .rst_n,
    .in_valid (in_valid),
    .in_re    (in_re),
    .in_im    (in_im),
    .out_valid(f_v),
    .out_bin  (f_idx),
    .out_re   (f_re),
    .out_im   (f_im)
  );

  logic                 r_v;
  logic signed [FW-1:0] r_re, r_im;

  bitrev_reorder #(.LOG2N(LOG2C), .W(FW)) u_reorder (
    .clk, .rst_n,
    .in_valid (f_v),
    .in_idx   (f_idx),
    .in_re    (f_re),
    .in_im    (f_im),
    .out_valid(r_v),
    .out_re   (r_re),
    .out_im   (r_im)
  );

  pfb_fir #(.K(1 << LOG2C), .IW(FW), .OW(OW), .ANALYSIS(1'b0)) u_fir (
    .clk, .rst_n,
    .in_valid (r_v),
    .in_re    (r_re),
    .in_im    (r_im),
    .out_valid(out_valid),
    .out_re   (out_i),
    .out_im   (out_q)
  );

endmodule
