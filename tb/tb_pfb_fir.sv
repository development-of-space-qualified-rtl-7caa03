// tb_pfb_fir: checks the polyphase FIR section in both column directions
// against a direct evaluation of
//     analysis  (ANALYSIS=1): y[n] = sum_j h[j*K + K-1-(n mod K)] * x[n - j*K]
//     synthesis (ANALYSIS=0): y[n] = sum_j h[j*K + (n mod K)]     * x[n - j*K]
// Both instances see the same input.  The prototype is
// recomputed here from its defining formula (Hamming-windowed sinc,
// unit DC gain per branch) and the same rounding/saturation rule.
// Random complex input, one sample per clock with random idle cycles.
// Also checks the one-clock latency.
module tb_pfb_fir;
  localparam int K = 16, TAPS = 4, IW = 12, OW = 16, CW = 18, CFRAC = 16;
  localparam int NS = 40 * K;

  logic clk = 0, rst_n = 0;
  logic in_valid;
  logic signed [IW-1:0] in_re, in_im;
  logic out_valid;
  logic signed [OW-1:0] out_re, out_im;

  logic out_valid_s;
  logic signed [OW-1:0] out_re_s, out_im_s;

  pfb_fir #(.K(K), .TAPS(TAPS), .IW(IW), .OW(OW), .CW(CW), .CFRAC(CFRAC)) dut (.*);
  pfb_fir #(.K(K), .TAPS(TAPS), .IW(IW), .OW(OW), .CW(CW), .CFRAC(CFRAC), .ANALYSIS(1'b0)) dut_s (
    .clk, .rst_n, .in_valid, .in_re, .in_im,
    .out_valid(out_valid_s), .out_re(out_re_s), .out_im(out_im_s));

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  longint h [TAPS*K];
  int xr [NS], xi [NS];

  function automatic real proto(int i);
    real t, w, pi;
    pi = 3.14159265358979323846;
    t = (real'(i) - real'(TAPS*K-1)/2.0) / real'(K);
    w = 0.54 - 0.46*$cos(2.0*pi*real'(i)/real'(TAPS*K-1));
    return (t == 0.0) ? w : w*$sin(pi*t)/(pi*t);
  endfunction

  function automatic longint rs(longint v);
    longint s;
    s = (v + (64'sd1 <<< (CFRAC-1))) >>> CFRAC;
    if (s >  (2**(OW-1))-1) s = (2**(OW-1))-1;
    if (s < -(2**(OW-1)))   s = -(2**(OW-1));
    return s;
  endfunction

  initial begin
    real sum;
    sum = 0;
    for (int i = 0; i < TAPS*K; i++) sum += proto(i);
    for (int i = 0; i < TAPS*K; i++) h[i] = $rtoi($floor(proto(i)*real'(K)/sum*real'(2**CFRAC)+0.5));
    for (int n = 0; n < NS; n++) begin
      xr[n] = int'($urandom_range(4095)) - 2048;
      xi[n] = int'($urandom_range(4095)) - 2048;
    end
    // a few full-scale values to exercise saturation-free extremes
    xr[5*K] = -2048; xi[5*K] = 2047;
  end

  // watchdog
  initial begin
    repeat (NS*3 + 100) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int n_out = 0;
  always @(posedge clk) begin
    if (rst_n && out_valid) begin
      longint er, ei, sr, si;
      er = 0; ei = 0; sr = 0; si = 0;
      for (int j = 0; j < TAPS; j++)
        if (n_out - j*K >= 0) begin
          er += h[j*K + K-1 - n_out % K] * xr[n_out - j*K];
          ei += h[j*K + K-1 - n_out % K] * xi[n_out - j*K];
          sr += h[j*K + n_out % K] * xr[n_out - j*K];
          si += h[j*K + n_out % K] * xi[n_out - j*K];
        end
      checks += 2;
      if (longint'(out_re) != rs(er) || longint'(out_im) != rs(ei)) begin
        failures++;
        if (failures < 10) $display("analysis n=%0d got %0d,%0d exp %0d,%0d", n_out, out_re, out_im, rs(er), rs(ei));
      end
      if (!out_valid_s || longint'(out_re_s) != rs(sr) || longint'(out_im_s) != rs(si)) begin
        failures++;
        if (failures < 10) $display("synthesis n=%0d got %0d,%0d exp %0d,%0d", n_out, out_re_s, out_im_s, rs(sr), rs(si));
      end
      n_out++;
    end
  end

  initial begin
    int n, lat_fail;
    in_valid = 0; in_re = 0; in_im = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    n = 0;
    lat_fail = 0;
    while (n < NS) begin
      @(negedge clk);
      if ($urandom_range(3) != 0) begin
        in_valid = 1; in_re = IW'(xr[n]); in_im = IW'(xi[n]); n++;
      end else in_valid = 0;
      // latency: out_valid must follow in_valid by exactly one clock
      @(posedge clk); #1;
      checks++;
      if (out_valid !== in_valid) lat_fail++;
    end
    @(negedge clk); in_valid = 0;
    repeat (3) @(posedge clk);
    failures += lat_fail;
    if (n_out != NS) begin failures++; $display("outputs %0d != %0d", n_out, NS); end
    checks++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
