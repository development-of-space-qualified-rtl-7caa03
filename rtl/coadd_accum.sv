// coadd_accum: per-tone vector accumulate (co-add) over one measurement
// window.
//
// Samples of up to DEPTH tones arrive interleaved, tagged with their slot.
// The complex sample is added to the slot's accumulator; the window's first
// sample (in_first) restarts the sum instead, and on the window's last
// sample (in_last) the completed sum is sent out with the number of samples
// that the cosmic-ray filter replaced (in_glitch). In the readout the window
// is NFINE = 2^9 PFB frames, i.e. 2^19 input samples, so each tone yields
// one complex result per window (the ~10 kHz frame rate).
// Timing: one sample per clock; out_valid one clock after the last sample.
// The accumulator is AW bits, wide enough for 2^LOG2_NFINE full-scale
// samples. The co-add follows the readout concept; the record format is
// this design's own.
module coadd_accum #(
  parameter int DEPTH = 700,
  parameter int W     = 28,
  parameter int AW    = W + mkid_pkg::LOG2_NFINE,
  parameter int GW    = mkid_pkg::GCOUNT_W,
  localparam int SLW  = (DEPTH > 1) ? $clog2(DEPTH) : 1
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 in_valid,
  input  logic [SLW-1:0]       in_slot,
  input  logic                 in_first,
  input  logic                 in_last,
  input  logic                 in_glitch,
  input  logic signed [W-1:0]  in_re,
  input  logic signed [W-1:0]  in_im,
  output logic                 out_valid,
  output logic [SLW-1:0]       out_slot,
  output logic signed [AW-1:0] out_re,
  output logic signed [AW-1:0] out_im,
  output logic [GW-1:0]        out_glitches
);
  logic signed [AW-1:0] acc_re [DEPTH];
  logic signed [AW-1:0] acc_im [DEPTH];
  logic [GW-1:0]        gcnt   [DEPTH];

  logic signed [AW-1:0] n_re, n_im;
  logic [GW-1:0]        n_g;

  always_comb begin
    n_re = (in_first ? '0 : acc_re[in_slot]) + AW'(in_re);
    n_im = (in_first ? '0 : acc_im[in_slot]) + AW'(in_im);
    n_g  = (in_first ? '0 : gcnt[in_slot])   + GW'(in_glitch);
  end

  always_ff @(posedge clk) begin
    if (in_valid) begin
      acc_re[in_slot] <= n_re;
      acc_im[in_slot] <= n_im;
      gcnt[in_slot]   <= n_g;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid    <= 1'b0;
      out_slot     <= '0;
      out_re       <= '0;
      out_im       <= '0;
      out_glitches <= '0;
    end else begin
      out_valid <= in_valid && in_last;
      if (in_valid && in_last) begin
        out_slot     <= in_slot;
        out_re       <= n_re;
        out_im       <= n_im;
        out_glitches <= n_g;
      end
    end
  end

endmodule
