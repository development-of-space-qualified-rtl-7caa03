// tb_coarse_channelizer: streams random complex ADC samples plus a strong
// tone into the coarse polyphase filterbank and checks every channel output
// against a floating-point model written here: branch sums
//     v_m[r] = sum_j h[j*K + K-1-r] * x[(m-j)*K + r]
// (prototype recomputed from its formula) followed by the DFT
//     X_m[c] = sum_r v_m[r] * exp(-i*2*pi*r*c/K).
// It also checks the channel order and that a tone at the centre of one
// channel leaves the channels two or more away at least 40 dB down.
module tb_coarse_channelizer;
  localparam int LOG2C = 5, K = 1 << LOG2C, IW = 12, FIRW = 16, OW = FIRW + LOG2C + 1;
  localparam int TAPS = 4, CFRAC = 16, NFR = 12, TONE_CH = 9;
  localparam real PI = 3.14159265358979323846;

  logic clk = 0, rst_n = 0;
  logic in_valid;
  logic signed [IW-1:0] in_i, in_q;
  logic out_valid;
  logic [LOG2C-1:0] out_bin;
  logic signed [OW-1:0] out_re, out_im;

  coarse_channelizer #(.LOG2C(LOG2C), .IW(IW), .FIRW(FIRW)) dut (.*);

  always #5 clk = ~clk;

  int checks = 0, failures = 0, nout = 0;
  real h [TAPS*K];
  int xr [NFR*K], xi [NFR*K];
  real pw [NFR][K];

  function automatic real fabs(real v); return (v < 0.0) ? -v : v; endfunction
  function automatic real proto(int i);
    real t, w;
    t = (real'(i) - real'(TAPS*K-1)/2.0) / real'(K);
    w = 0.54 - 0.46*$cos(2.0*PI*real'(i)/real'(TAPS*K-1));
    return (t == 0.0) ? w : w*$sin(PI*t)/(PI*t);
  endfunction

  initial begin
    repeat (NFR * K * 2 + 300) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) if (rst_n && out_valid && nout < NFR*K) begin
    int m, c;
    real vr [K], vi [K], er, ei, a;
    m = nout / K;
    c = int'(out_bin);
    for (int r = 0; r < K; r++) begin
      vr[r] = 0; vi[r] = 0;
      for (int j = 0; j < TAPS; j++) if (m - j >= 0) begin
        vr[r] += h[j*K+K-1-r] * real'(xr[(m-j)*K + r]);
        vi[r] += h[j*K+K-1-r] * real'(xi[(m-j)*K + r]);
      end
    end
    er = 0; ei = 0;
    for (int r = 0; r < K; r++) begin
      a = -2.0 * PI * real'(r * c) / real'(K);
      er += vr[r] * $cos(a) - vi[r] * $sin(a);
      ei += vr[r] * $sin(a) + vi[r] * $cos(a);
    end
    checks++;
    if (c != int'(mkid_pkg::bitrev(32'(nout % K), LOG2C)) ||
        fabs(real'(out_re) - er) > 24.0 || fabs(real'(out_im) - ei) > 24.0) begin
      failures++;
      if (failures < 10) $display("frame %0d ch %0d got %0d,%0d exp %f,%f", m, c, out_re, out_im, er, ei);
    end
    pw[m][c] = real'(out_re)*real'(out_re) + real'(out_im)*real'(out_im);
    nout++;
  end

  initial begin
    real s;
    s = 0;
    for (int i = 0; i < TAPS*K; i++) s += proto(i);
    for (int i = 0; i < TAPS*K; i++)
      h[i] = real'($rtoi($floor(proto(i)*real'(K)/s*real'(2**CFRAC) + 0.5))) / real'(2**CFRAC);
    // frames 0-5: random noise; frames 6-11: a tone at the centre of TONE_CH
    for (int n = 0; n < NFR*K; n++) begin
      if (n < 6*K) begin
        xr[n] = int'($urandom_range(4095)) - 2048;
        xi[n] = int'($urandom_range(4095)) - 2048;
      end else begin
        xr[n] = $rtoi(1800.0 * $cos(2.0*PI*real'(TONE_CH*n)/real'(K)));
        xi[n] = $rtoi(1800.0 * $sin(2.0*PI*real'(TONE_CH*n)/real'(K)));
      end
    end
    in_valid = 0; in_i = 0; in_q = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int n = 0; n < NFR*K + K; n++) begin
      @(negedge clk);
      in_valid = 1;
      in_i = IW'(n < NFR*K ? xr[n] : 0);
      in_q = IW'(n < NFR*K ? xi[n] : 0);
    end
    @(negedge clk); in_valid = 0;
    repeat (40) @(posedge clk);
    checks++;
    if (nout != NFR*K) begin failures++; $display("%0d outputs", nout); end
    // isolation: frames 10 and 11 are fully inside the tone segment
    for (int m = 10; m < 12; m++)
      for (int c = 0; c < K; c++)
        if (c < TONE_CH - 1 || c > TONE_CH + 1) begin
          checks++;
          if (10.0 * $log10((pw[m][c] + 1.0) / pw[m][TONE_CH]) > -40.0) begin
            failures++; $display("channel %0d only %f dB below the tone", c, 10.0*$log10((pw[m][c]+1.0)/pw[m][TONE_CH]));
          end
        end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
