// cosmic_ray_filter: per-tone matched-filter glitch detection and removal,
// applied to each down-converted sample before it is co-added.
//
// The filter works on the first difference of each tone's complex stream,
// d[n] = x[n] - x[n-1], so that a steady (down-converted, hence constant)
// tone contributes nothing. It cross-correlates the last TAPS differences
// with a glitch template:
//     c[n] = sum_{j=0}^{TAPS-1} tmpl[j] * d[n-j]      (I and Q separately)
// and flags sample n as a glitch when |Re c| + |Im c| > threshold. A flagged
// sample is replaced by the tone's last unflagged sample, so the co-add
// still sums the same number of samples. History is restarted at the first
// sample of every co-add window (in_first), which also sets the replacement
// value; nothing needs to be cleared at reset.
// Samples of up to DEPTH tones arrive interleaved, each tagged with its
// slot; per-slot state (previous sample, TAPS-1 past differences, last good
// sample) is a DEPTH-entry memory read and written in the same clock.
// Timing: one sample per clock, latency one clock.
// Matched filtering against a glitch template follows the readout concept;
// the template length, the difference pre-filter, the magnitude measure and
// the hold-last-good replacement are this design's own choices.
module cosmic_ray_filter #(
  parameter int DEPTH = 700,
  parameter int W     = 28,
  parameter int TAPS  = mkid_pkg::CR_TAPS,
  parameter int TW    = mkid_pkg::CR_TW,
  parameter int THW   = mkid_pkg::CR_THR_W,
  localparam int SLW  = (DEPTH > 1) ? $clog2(DEPTH) : 1
) (
  input  logic                        clk,
  input  logic                        rst_n,
  input  logic signed [TW-1:0]        tmpl [TAPS],
  input  logic [THW-1:0]              threshold,
  input  logic                        in_valid,
  input  logic [SLW-1:0]              in_slot,
  input  logic                        in_first,
  input  logic                        in_last,
  input  logic signed [W-1:0]         in_re,
  input  logic signed [W-1:0]         in_im,
  output logic                        out_valid,
  output logic [SLW-1:0]              out_slot,
  output logic                        out_first,
  output logic                        out_last,
  output logic signed [W-1:0]         out_re,
  output logic signed [W-1:0]         out_im,
  output logic                        out_glitch
);
  localparam int DW = W + 1;                       // difference width
  localparam int CWD = DW + TW + $clog2(TAPS) + 1; // correlation width

  typedef struct packed {
    logic signed [W-1:0]  prev_re, prev_im;
    logic signed [W-1:0]  good_re, good_im;
  } slot_state_t;

  slot_state_t          st   [DEPTH];
  logic signed [DW-1:0] hist_re [TAPS-1][DEPTH];   // d[n-1] .. d[n-TAPS+1]
  logic signed [DW-1:0] hist_im [TAPS-1][DEPTH];

  slot_state_t          cur;
  logic signed [DW-1:0] d_re [TAPS];
  logic signed [DW-1:0] d_im [TAPS];
  logic signed [CWD-1:0] c_re, c_im, a_re, a_im;
  logic [CWD:0]         score;
  logic                 glitch;

  always_comb begin
    cur = st[in_slot];
    if (in_first) begin
      d_re[0] = '0;
      d_im[0] = '0;
    end else begin
      d_re[0] = DW'(in_re) - DW'(cur.prev_re);
      d_im[0] = DW'(in_im) - DW'(cur.prev_im);
    end
    for (int j = 1; j < TAPS; j++) begin
      d_re[j] = in_first ? '0 : hist_re[j-1][in_slot];
      d_im[j] = in_first ? '0 : hist_im[j-1][in_slot];
    end
    c_re = '0;
    c_im = '0;
    for (int j = 0; j < TAPS; j++) begin
      c_re += CWD'(tmpl[j]) * CWD'(d_re[j]);
      c_im += CWD'(tmpl[j]) * CWD'(d_im[j]);
    end
    a_re   = (c_re < 0) ? -c_re : c_re;
    a_im   = (c_im < 0) ? -c_im : c_im;
    score  = (CWD+1)'(unsigned'(a_re)) + (CWD+1)'(unsigned'(a_im));
    glitch = !in_first && (score > (CWD+1)'(threshold));
  end

  always_ff @(posedge clk) begin
    if (in_valid) begin
      st[in_slot].prev_re <= in_re;
      st[in_slot].prev_im <= in_im;
      if (!glitch) begin
        st[in_slot].good_re <= in_re;
        st[in_slot].good_im <= in_im;
      end
      for (int j = 0; j < TAPS-1; j++) begin
        hist_re[j][in_slot] <= d_re[j];
        hist_im[j][in_slot] <= d_im[j];
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid  <= 1'b0;
      out_slot   <= '0;
      out_first  <= 1'b0;
      out_last   <= 1'b0;
      out_re     <= '0;
      out_im     <= '0;
      out_glitch <= 1'b0;
    end else begin
      out_valid  <= in_valid;
      out_slot   <= in_slot;
      out_first  <= in_first;
      out_last   <= in_last;
      out_glitch <= in_valid && glitch;
      out_re     <= glitch ? cur.good_re : in_re;
      out_im     <= glitch ? cur.good_im : in_im;
    end
  end

endmodule
