// tb_synthesis_pfb: feeds frames of random channel values into the
// synthesis filterbank and checks every DAC sample against a floating-point
// model written here: unscaled inverse DFT of each frame,
//     v_m[n] = sum_b X_m[b] * exp(+i*2*pi*b*n/K),
// then y[m*K + r] = sum_j h[j*K + r] * v_{m-j}[r], rounded to the DAC word
// (tolerance 4 LSB: the fixed-point inverse FFT adds a few LSB of error).
// The first DAC sample must be time sample 0 of frame 0. Also checks that a
// frame with one non-zero channel gives the expected steady DAC tone.
module tb_synthesis_pfb;
  localparam int LOG2C = 5, K = 1 << LOG2C, BW = 20, OW = 12;
  localparam int TAPS = 4, CFRAC = 16, NFR = 10;
  localparam real PI = 3.14159265358979323846;

  logic clk = 0, rst_n = 0;
  logic in_valid;
  logic signed [BW-1:0] in_re, in_im;
  logic out_valid;
  logic signed [OW-1:0] out_i, out_q;

  synthesis_pfb #(.LOG2C(LOG2C), .BW(BW), .OW(OW)) dut (.*);

  always #5 clk = ~clk;

  int checks = 0, failures = 0, nout = 0;
  real h [TAPS*K];
  int xr [NFR][K], xi [NFR][K];
  real vr [NFR][K], vi [NFR][K];

  function automatic real fabs(real v); return (v < 0.0) ? -v : v; endfunction
  function automatic real proto(int i);
    real t, w;
    t = (real'(i) - real'(TAPS*K-1)/2.0) / real'(K);
    w = 0.54 - 0.46*$cos(2.0*PI*real'(i)/real'(TAPS*K-1));
    return (t == 0.0) ? w : w*$sin(PI*t)/(PI*t);
  endfunction

  initial begin
    repeat ((NFR + 6) * K * 2 + 300) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) if (rst_n && out_valid && nout < NFR*K) begin
    int m, r;
    real er, ei;
    m = nout / K; r = nout % K;
    er = 0; ei = 0;
    for (int j = 0; j < TAPS; j++) if (m - j >= 0) begin
      er += h[j*K+r] * vr[m-j][r];
      ei += h[j*K+r] * vi[m-j][r];
    end
    checks++;
    if (fabs(real'(out_i) - er) > 4.0 || fabs(real'(out_q) - ei) > 4.0) begin
      failures++;
      if (failures < 10) $display("frame %0d n %0d got %0d,%0d exp %f,%f", m, r, out_i, out_q, er, ei);
    end
    nout++;
  end

  initial begin
    real s, a;
    s = 0;
    for (int i = 0; i < TAPS*K; i++) s += proto(i);
    for (int i = 0; i < TAPS*K; i++)
      h[i] = real'($rtoi($floor(proto(i)*real'(K)/s*real'(2**CFRAC) + 0.5))) / real'(2**CFRAC);
    for (int m = 0; m < NFR; m++)
      for (int b = 0; b < K; b++) begin
        xr[m][b] = int'($urandom_range(80)) - 40;
        xi[m][b] = int'($urandom_range(80)) - 40;
      end
    // frames 6..9: a single channel (4) at amplitude 1500 -> steady DAC tone
    for (int m = 6; m < NFR; m++)
      for (int b = 0; b < K; b++) begin
        xr[m][b] = (b == 4) ? 1500 : 0;
        xi[m][b] = 0;
      end
    for (int m = 0; m < NFR; m++)
      for (int n = 0; n < K; n++) begin
        vr[m][n] = 0; vi[m][n] = 0;
        for (int b = 0; b < K; b++) begin
          a = 2.0 * PI * real'(b * n) / real'(K);
          vr[m][n] += real'(xr[m][b]) * $cos(a) - real'(xi[m][b]) * $sin(a);
          vi[m][n] += real'(xr[m][b]) * $sin(a) + real'(xi[m][b]) * $cos(a);
        end
      end
    in_valid = 0; in_re = 0; in_im = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int m = 0; m < NFR + 3; m++)
      for (int b = 0; b < K; b++) begin
        @(negedge clk);
        in_valid = 1;
        in_re = BW'(m < NFR ? xr[m][b] : 0);
        in_im = BW'(m < NFR ? xi[m][b] : 0);
      end
    @(negedge clk); in_valid = 0;
    repeat (40) @(posedge clk);
    checks++;
    if (nout != NFR*K) begin failures++; $display("%0d outputs", nout); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
