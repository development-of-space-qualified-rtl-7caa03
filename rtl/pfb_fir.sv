// pfb_fir: polyphase FIR section of a critically sampled polyphase filterbank.
//
// A prototype low-pass filter of TAPS*K coefficients is split into K branches
// of TAPS coefficients. The input stream is one complex sample per valid
// cycle; sample n belongs to branch r = n mod K. The structure is the
// transposed chain of the published hardware diagram: the sample is broadcast
// to TAPS multipliers, multiplier j takes one coefficient of its own ROM
// column j (h[j*K] .. h[j*K+K-1]), and the products are chained through z^-M
// delays (M = K) and adders: the product of column j passes through j delays.
// Because M = K, each z^-M delay is a K-entry memory addressed by r itself.
// The direction in which a column is read matters:
//   ANALYSIS = 1 (filterbank input side): row K-1-r, so that
//       y[n] = sum_j h[j*K + K-1-r] * x[n - j*K]
//     is a true convolution with the prototype (window index plus time index
//     is the same for all terms).  Reading row r instead would apply the
//     window's segments in reversed order but each segment forwards, a
//     broken window with -13 dB sidelobes for tones off a channel centre.
//   ANALYSIS = 0 (synthesis side, fed with inverse-FFT frames): row r, so
//       y[n] = sum_j h[j*K + r] * v_{m-j}[r],  n = m*K + r,
//     which is the up-sampling interpolator x[n] = sum_m v_m[n mod K] h[n-m*K].
// Output y[n] is registered: out_valid follows in_valid by one clock. The
// K outputs of each block are the branch outputs that feed a K-point FFT.
// The same section serves the synthesis (inverse) filterbank, where it runs
// on the inverse-FFT output.
//
// Following the published structure: four multipliers/adders, ROM in
// polyphase order, z^-M delays, full rate (one sample per clock). Own choices:
// the prototype (Hamming-windowed sinc with cutoff at half a channel width,
// scaled so each branch has unit DC gain, quantised to COEF_W bits with
// COEF_FRAC fractional bits), the output rounding/saturation, and zero
// history during the first block after reset (the delay memories need no
// clearing: what they hold before their first write is masked).
module pfb_fir #(
  parameter int K         = mkid_pkg::NCHAN,
  parameter int TAPS      = mkid_pkg::PFB_TAPS,
  parameter int IW        = mkid_pkg::ADC_W,
  parameter int OW        = 16,
  parameter int CW        = mkid_pkg::COEF_W,
  parameter int CFRAC     = mkid_pkg::COEF_FRAC,
  parameter bit ANALYSIS  = 1'b1
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 in_valid,
  input  logic signed [IW-1:0] in_re,
  input  logic signed [IW-1:0] in_im,
  output logic                 out_valid,
  output logic signed [OW-1:0] out_re,
  output logic signed [OW-1:0] out_im
);
  localparam int LOGK = $clog2(K);
  localparam int PW   = IW + CW;                 // product width
  localparam int SW   = PW + $clog2(TAPS) + 1;   // chained sum width

  typedef logic signed [CW-1:0] coef_t;
  typedef coef_t coef_tab_t [TAPS*K];

  // Windowed-sinc prototype, unnormalised, coefficient i of TAPS*K.
  function automatic real proto(input int i);
    real t, pi, w;
    pi = 3.14159265358979323846;
    t  = (real'(i) - real'(TAPS*K - 1) / 2.0) / real'(K);
    w  = 0.54 - 0.46 * $cos(2.0 * pi * real'(i) / real'(TAPS*K - 1));
    return (t == 0.0) ? w : w * $sin(pi * t) / (pi * t);
  endfunction

  // Quantised prototype; ROM column j holds h[j*K .. j*K+K-1].
  function automatic coef_tab_t make_coefs();
    coef_tab_t tab;
    real sum;
    sum = 0.0;
    for (int i = 0; i < TAPS*K; i++) sum += proto(i);
    for (int i = 0; i < TAPS*K; i++)
      tab[i] = coef_t'($rtoi($floor(proto(i) * real'(K) / sum
                                    * real'(2**CFRAC) + 0.5)));
    return tab;
  endfunction

  localparam coef_tab_t COEF = make_coefs();

  logic [LOGK-1:0]  r;          // branch index of the current sample
  logic             primed;     // first block after reset has passed
  logic signed [PW-1:0] p_re [TAPS];
  logic signed [PW-1:0] p_im [TAPS];
  logic signed [SW-1:0] d_re [TAPS];       // delayed partial sums, d[TAPS-1] unused
  logic signed [SW-1:0] d_im [TAPS];
  logic signed [SW-1:0] y_re, y_im;
  int unsigned          row;         // ROM row used for branch r

  assign row = ANALYSIS ? (K - 1 - int'(r)) : int'(r);


  always_comb begin
    for (int j = 0; j < TAPS; j++) begin
      p_re[j] = PW'(in_re) * PW'(COEF[j*K + row]);
      p_im[j] = PW'(in_im) * PW'(COEF[j*K + row]);
    end
  end

  assign d_re[TAPS-1] = '0;
  assign d_im[TAPS-1] = '0;
  assign y_re = d_re[0] + SW'(p_re[0]);
  assign y_im = d_im[0] + SW'(p_im[0]);

  // z^-M delay memories: delay j carries the partial sum from tap j+1 to tap j.
  for (genvar j = 0; j < TAPS-1; j++) begin : g_dly
    logic signed [SW-1:0] mem_re [K];
    logic signed [SW-1:0] mem_im [K];
    assign d_re[j] = primed ? mem_re[r] : '0;
    assign d_im[j] = primed ? mem_im[r] : '0;
    always_ff @(posedge clk) begin
      if (in_valid) begin
        mem_re[r] <= d_re[j+1] + SW'(p_re[j+1]);
        mem_im[r] <= d_im[j+1] + SW'(p_im[j+1]);
      end
    end
  end

  function automatic logic signed [OW-1:0] round_sat(input logic signed [SW-1:0] v);
    logic signed [SW:0] s;
    s = (SW+1)'(v) + (SW+1)'(1 <<< (CFRAC-1));
    s = s >>> CFRAC;
    if (s > (SW+1)'((1 <<< (OW-1)) - 1))      return {1'b0, {(OW-1){1'b1}}};
    else if (s < -(SW+1)'(1 <<< (OW-1)))      return {1'b1, {(OW-1){1'b0}}};
    else                                      return OW'(s);
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      r           <= '0;
      primed      <= 1'b0;
      out_valid   <= 1'b0;
      out_re      <= '0;
      out_im      <= '0;
    end else begin
      out_valid <= in_valid;
      if (in_valid) begin
        r      <= (r == LOGK'(K-1)) ? '0 : r + 1'b1;
        if (r == LOGK'(K-1)) primed <= 1'b1;
        out_re <= round_sat(y_re);
        out_im <= round_sat(y_im);
      end
    end
  end

endmodule
