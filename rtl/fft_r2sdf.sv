// fft_r2sdf: streaming N-point FFT (or inverse FFT), radix-2 single-path
// delay feedback, one complex sample per valid cycle.
//
// LOG2N fft_sdf_stage instances with feedback memories of N/2, N/4, ... 1
// are chained. Input is in natural order; output comes out in bit-reversed
// order, and out_bin gives the bin (or, for the inverse, time) index of each
// output sample. One guard bit is added at the input (a twiddle rotation can
// grow a component by sqrt(2)) and each stage adds one bit, so the output is
// IW+LOG2N+1 bits wide and unscaled: a tone of amplitude A in one bin gives
// N*A. Twiddles are TW-bit with TW-2 fractional bits.
// INVERSE selects exp(+i...) twiddles (unscaled inverse DFT).
// The pipeline fills in N-1 valid samples; the module suppresses out_valid
// until then, so the first out_valid is bin 0 of the first input block.
// Stalling in_valid stalls the whole pipeline (data advance only on valid).
// The FFT's inner architecture is this design's choice; the readout only
// asks for a K-point FFT after the polyphase filter.
module fft_r2sdf #(
  parameter int LOG2N   = mkid_pkg::LOG2_NCHAN,
  parameter int IW      = 16,
  parameter int TW      = 18,
  parameter bit INVERSE = 1'b0,
  localparam int OW     = IW + LOG2N + 1
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 in_valid,
  input  logic signed [IW-1:0] in_re,
  input  logic signed [IW-1:0] in_im,
  output logic                 out_valid,
  output logic [LOG2N-1:0]     out_bin,
  output logic signed [OW-1:0] out_re,
  output logic signed [OW-1:0] out_im
);
  localparam int N = 1 << LOG2N;

  logic                 sv  [LOG2N+1];
  logic signed [OW-1:0] sre [LOG2N+1];
  logic signed [OW-1:0] sim [LOG2N+1];

  assign sv[0]  = in_valid;
  assign sre[0] = OW'(in_re);
  assign sim[0] = OW'(in_im);

  for (genvar s = 0; s < LOG2N; s++) begin : g_stage
    logic signed [IW+s+1:0] o_re, o_im;
    fft_sdf_stage #(.D(N >> (s+1)), .W(IW+s+1), .TW(TW), .INVERSE(INVERSE)) u_stage (
      .clk, .rst_n,
      .in_valid (sv[s]),
      .in_re    ((IW+s+1)'(sre[s])),
      .in_im    ((IW+s+1)'(sim[s])),
      .out_valid(sv[s+1]),
      .out_re   (o_re),
      .out_im   (o_im)
    );
    assign sre[s+1] = OW'(o_re);
    assign sim[s+1] = OW'(o_im);
  end

  // Discard the N-1 fill samples, then number the outputs.
  logic [LOG2N:0]   fill;
  logic [LOG2N-1:0] idx;
  logic             primed;
  assign primed = (fill == (LOG2N+1)'(N-1));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      fill <= '0;
      idx  <= '0;
    end else if (sv[LOG2N]) begin
      if (!primed) fill <= fill + 1'b1;
      else         idx  <= idx + 1'b1;
    end
  end

  assign out_valid = sv[LOG2N] && primed;
  assign out_bin   = LOG2N'(mkid_pkg::bitrev(32'(idx), LOG2N));
  assign out_re    = sre[LOG2N];
  assign out_im    = sim[LOG2N];

endmodule
