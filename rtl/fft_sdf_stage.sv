// fft_sdf_stage: one radix-2 single-path delay-feedback (SDF) stage of a
// decimation-in-frequency FFT.
//
// The stage sees a stream of complex samples, one per valid cycle, in blocks
// of 2*D. During the first half of a block each sample is parked in a D-entry
// feedback memory while the memory's previous content (the twiddled
// differences of the block before) is sent on. During the second half the
// parked sample a and the new sample b form the butterfly: a+b goes out at
// once and (a-b)*W^j (W = exp(-+i*pi/D), j = position in the half) goes
// into the memory. Outputs are one bit wider than inputs; the twiddled
// difference is rounded and saturated to that width. The output register
// adds one clock; the data delay is D valid samples.
module fft_sdf_stage #(
  parameter int D       = 512,
  parameter int W       = 16,
  parameter int TW      = 18,
  parameter bit INVERSE = 1'b0
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                in_valid,
  input  logic signed [W-1:0] in_re,
  input  logic signed [W-1:0] in_im,
  output logic                out_valid,
  output logic signed [W:0]   out_re,
  output logic signed [W:0]   out_im
);
  localparam int LOGD = (D > 1) ? $clog2(D) : 1;
  localparam int TFRAC = TW - 2;                 // twiddle fractional bits

  typedef logic signed [TW-1:0] tw_t;
  typedef tw_t tw_tab_t [D];

  function automatic tw_tab_t make_tw(input bit sin_part);
    tw_tab_t tab;
    real a;
    for (int j = 0; j < D; j++) begin
      a = 3.14159265358979323846 * real'(j) / real'(D);
      tab[j] = sin_part ? tw_t'($rtoi($floor(((INVERSE ? 1.0 : -1.0) * $sin(a))
                                             * real'(2**TFRAC) + 0.5)))
                        : tw_t'($rtoi($floor($cos(a) * real'(2**TFRAC) + 0.5)));
    end
    return tab;
  endfunction

  localparam tw_tab_t TW_RE = make_tw(1'b0);
  localparam tw_tab_t TW_IM = make_tw(1'b1);

  logic [LOGD-1:0]     j;       // position inside the half block
  logic                half;    // 0: first half (fill), 1: second half (butterfly)
  logic signed [W:0]   fb_re [D];
  logic signed [W:0]   fb_im [D];
  logic signed [W:0]   a_re, a_im, b_re, b_im;
  logic signed [W:0]   sum_re, sum_im, dif_re, dif_im;
  logic signed [W+TW:0] m_re, m_im;
  logic signed [W:0]   tdif_re, tdif_im;
  logic [LOGD-1:0]     jj;

  function automatic logic signed [W:0] rnd_sat(input logic signed [W+TW:0] v);
    logic signed [W+TW:0] s;
    s = (v + (W+TW+1)'(1 <<< (TFRAC-1))) >>> TFRAC;
    if (s > (W+TW+1)'((1 <<< W) - 1))  return {1'b0, {W{1'b1}}};
    else if (s < -(W+TW+1)'(1 <<< W))  return {1'b1, {W{1'b0}}};
    else                               return (W+1)'(s);
  endfunction

  always_comb begin
    jj     = (D > 1) ? j : '0;
    a_re   = fb_re[jj];
    a_im   = fb_im[jj];
    b_re   = (W+1)'(in_re);
    b_im   = (W+1)'(in_im);
    sum_re = a_re + b_re;
    sum_im = a_im + b_im;
    dif_re = a_re - b_re;
    dif_im = a_im - b_im;
    m_re   = (W+TW+1)'(dif_re) * (W+TW+1)'(TW_RE[jj]) - (W+TW+1)'(dif_im) * (W+TW+1)'(TW_IM[jj]);
    m_im   = (W+TW+1)'(dif_re) * (W+TW+1)'(TW_IM[jj]) + (W+TW+1)'(dif_im) * (W+TW+1)'(TW_RE[jj]);
    tdif_re = rnd_sat(m_re);
    tdif_im = rnd_sat(m_im);
  end

  always_ff @(posedge clk) begin
    if (in_valid) begin
      fb_re[jj] <= half ? tdif_re : b_re;
      fb_im[jj] <= half ? tdif_im : b_im;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      j         <= '0;
      half      <= 1'b0;
      out_valid <= 1'b0;
      out_re    <= '0;
      out_im    <= '0;
    end else begin
      out_valid <= in_valid;
      if (in_valid) begin
        if (D == 1 || j == LOGD'(D-1)) begin
          j    <= '0;
          half <= ~half;
        end else begin
          j <= j + 1'b1;
        end
        out_re <= half ? sum_re : a_re;
        out_im <= half ? sum_im : a_im;
      end
    end
  end

endmodule
