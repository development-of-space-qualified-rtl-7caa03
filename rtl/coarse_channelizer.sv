// coarse_channelizer: 2^LOG2C-channel critically sampled polyphase
// filterbank (analysis): polyphase FIR section followed by a K-point FFT.
//
// Complex ADC samples (I = real, Q = imaginary) enter one per valid cycle.
// pfb_fir forms the K branch outputs of each block of K samples; fft_r2sdf
// turns them into K channel values. Channel c covers frequencies around
// c * Fs/K (at Fs = 5 GS/s and K = 1024, 4.88 MHz per channel); a tone at
// (c + d) channel widths, |d| < 1/2, appears in channel c and rotates by
// 2*pi*d per frame, which the fine DDC then resolves.
// Output: one channel value per valid cycle, in bit-reversed channel order
// with its channel number in out_bin, OW = FIRW + LOG2C + 1 bits wide.
// Latency: K-1 samples of FFT fill plus a few clocks.
// The filter-then-FFT structure is the published critically sampled PFB;
// the final readout is meant to use an oversampled PFB, whose oversampling
// factor is not given, so this block is critically sampled.
module coarse_channelizer #(
  parameter int LOG2C = mkid_pkg::LOG2_NCHAN,
  parameter int IW    = mkid_pkg::ADC_W,
  parameter int FIRW  = 16,
  localparam int OW   = FIRW + LOG2C + 1
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 in_valid,
  input  logic signed [IW-1:0] in_i,
  input  logic signed [IW-1:0] in_q,
  output logic                 out_valid,
  output logic [LOG2C-1:0]     out_bin,
  output logic signed [OW-1:0] out_re,
  output logic signed [OW-1:0] out_im
);
  logic                   p_v;
  logic signed [FIRW-1:0] p_re, p_im;

  pfb_fir #(.K(1 << LOG2C), .IW(IW), .OW(FIRW)) u_fir (
    .clk, .rst_n,
    .in_valid (in_valid),
    .in_re    (in_i),
    .in_im    (in_q),
    .out_valid(p_v),
    .out_re   (p_re),
    .out_im   (p_im)
  );

  fft_r2sdf #(.LOG2N(LOG2C), .IW(FIRW), .INVERSE(1'b0)) u_fft (
    .clk, .rst_n,
    .in_valid (p_v),
    .in_re    (p_re),
    .in_im    (p_im),
    .out_valid(out_valid),
    .out_bin  (out_bin),
    .out_re   (out_re),
    .out_im   (out_im)
  );

endmodule
