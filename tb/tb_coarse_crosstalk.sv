// tb_coarse_crosstalk: adjacent-channel cross-talk of the full-size coarse
// channelizer (1024 channels, default parameters, no overrides).
// A complex tone of amplitude 1800 (12-bit ADC) is stepped across channels
// 326 and 327 in quarter-channel steps, from 326-0.5 to 327+0.5 channels.
// Each step lasts 8 frames; the last frame of a step, by which time the
// four-frame filter memory holds only the new tone, is measured.  For each
// step the testbench prints the power in channels 326 and 327 and the
// strongest channel two or more channels away from the tone, all relative
// to the strongest channel, and checks:
//   - a tone at the centre of one of the pair appears at least 45 dB down
//     in the other (the target is the -48 dBc cross-talk level reported for
//     the critically sampled filterbank),
//   - at the midpoint between the two centres both channels are within 1 dB
//     of each other and within 8 dB of the centred response,
//   - every channel two or more channels from the tone is 60 dB down,
//   - the centred response of every step varies by less than 0.5 dB.
module tb_coarse_crosstalk;
  localparam int K = 1024, NSTEP = 9, SEGF = 8, CH_A = 326;
  localparam real PI = 3.14159265358979323846;

  logic clk = 0, rst_n = 0;
  logic in_valid;
  logic signed [11:0] in_i, in_q;
  logic out_valid;
  logic [9:0] out_bin;
  logic signed [26:0] out_re, out_im;

  coarse_channelizer dut (.*);

  always #5 clk = ~clk;

  int checks = 0, failures = 0, nout = 0;
  real pw [NSTEP][K];
  real centre_db [2];

  initial begin
    repeat (NSTEP * SEGF * K + 4 * K) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // keep the last frame of every step
  always @(posedge clk) if (rst_n && out_valid) begin
    int fr;
    fr = nout / K;
    if (fr % SEGF == SEGF - 1 && fr / SEGF < NSTEP)
      pw[fr / SEGF][int'(out_bin)] = real'(out_re) * real'(out_re) + real'(out_im) * real'(out_im);
    nout++;
  end

  function automatic real db(real a, real b); return 10.0 * $log10((a + 1.0) / (b + 1.0)); endfunction

  initial begin
    real f, ph, peak, far;
    in_valid = 0; in_i = 0; in_q = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    ph = 0.0;
    for (int s = 0; s < NSTEP; s++) begin
      f = real'(CH_A) - 0.5 + 0.25 * real'(s);
      for (int n = 0; n < SEGF * K; n++) begin
        @(negedge clk);
        in_valid = 1;
        in_i = 12'($rtoi(1800.0 * $cos(ph)));
        in_q = 12'($rtoi(1800.0 * $sin(ph)));
        ph += 2.0 * PI * f / real'(K);
        if (ph > 2.0 * PI) ph -= 2.0 * PI;
      end
    end
    repeat (K + 40) begin @(negedge clk); in_i = 0; in_q = 0; end
    in_valid = 0;
    repeat (40) @(posedge clk);

    $display(" tone (ch)   P326 dB  P327 dB  far dB");
    for (int s = 0; s < NSTEP; s++) begin
      f = real'(CH_A) - 0.5 + 0.25 * real'(s);
      peak = 0.0; far = 0.0;
      for (int c = 0; c < K; c++) if (pw[s][c] > peak) peak = pw[s][c];
      for (int c = 0; c < K; c++)
        if (real'(c) < f - 1.99 || real'(c) > f + 1.99) if (pw[s][c] > far) far = pw[s][c];
      $display(" %8.2f  %8.2f %8.2f %8.2f", f, db(pw[s][CH_A], peak), db(pw[s][CH_A+1], peak), db(far, peak));
      checks++;
      if (db(far, peak) > -60.0) begin failures++; $display("  distant channel only %f dB down", db(far, peak)); end
    end
    // step 2: tone at the centre of 326; step 6: at the centre of 327
    checks++;
    if (db(pw[2][CH_A+1], pw[2][CH_A]) > -45.0) begin failures++; $display("327 leak %f dB", db(pw[2][CH_A+1], pw[2][CH_A])); end
    checks++;
    if (db(pw[6][CH_A], pw[6][CH_A+1]) > -45.0) begin failures++; $display("326 leak %f dB", db(pw[6][CH_A], pw[6][CH_A+1])); end
    // step 4: midpoint
    checks++;
    if (db(pw[4][CH_A], pw[4][CH_A+1]) > 1.0 || db(pw[4][CH_A], pw[4][CH_A+1]) < -1.0 ||
        db(pw[4][CH_A], pw[2][CH_A]) < -8.0) begin
      failures++; $display("crossover wrong: %f %f", db(pw[4][CH_A], pw[4][CH_A+1]), db(pw[4][CH_A], pw[2][CH_A]));
    end
    checks++;
    if (db(pw[2][CH_A], pw[6][CH_A+1]) > 0.5 || db(pw[2][CH_A], pw[6][CH_A+1]) < -0.5) begin
      failures++; $display("centre gains differ");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
