// tb_fine_ddc: feeds the fine channelizer with coarse-channel frames (in the
// FFT's bit-reversed bin order) that contain several tones: two sharing one
// coarse bin at different fine offsets, others alone, one tone-table entry
// disabled, plus a constant offset in every bin. For every enabled tone and
// every window the co-add record must equal
//     sum_{m=0}^{NF-1} X_m[bin] * exp(-i*2*pi*fine*m/NF)
// computed here in floating point, to within the CORDIC rounding. Also
// checks the number of records, frame and window ticks and no overrun.
module tb_fine_ddc;
  import mkid_pkg::*;
  localparam int LOG2C = 4, LOG2F = 4, NT = 6, LANES = 2, DW = 20;
  localparam int NCH = 1 << LOG2C, NF = 1 << LOG2F, NWIN = 3;
  localparam int AW = DW + 1 + LOG2F;
  localparam real PI = 3.14159265358979323846;

  logic clk = 0, rst_n = 0;
  logic in_valid;
  logic [LOG2C-1:0] in_bin;
  logic signed [DW-1:0] in_re, in_im;
  logic cfg_we;
  logic [TONE_AW-1:0] cfg_addr;
  tone_cfg_t cfg_tone;
  logic signed [CR_TW-1:0] cr_tmpl [CR_TAPS];
  logic [CR_THR_W-1:0] cr_threshold;
  logic [LANES-1:0] res_valid, glitch;
  logic [TONE_AW-1:0] res_tone [LANES];
  logic signed [AW-1:0] res_re [LANES], res_im [LANES];
  logic [GCOUNT_W-1:0] res_glitches [LANES];
  logic frame_tick, window_tick, overrun;

  fine_ddc #(.LOG2C(LOG2C), .LOG2F(LOG2F), .NUM_TONES(NT), .LANES(LANES), .DW(DW)) dut (.*);

  always #5 clk = ~clk;

  int checks = 0, failures = 0, nres = 0, nframes = 0, nwin = 0;
  int t_bin [NT] = '{3, 3, 7, 0, 12, 15};
  int t_fine [NT] = '{2, 9, 5, 0, 15, 4};
  int t_en [NT] = '{1, 1, 1, 1, 0, 1};
  real t_amp [NT] = '{40000.0, 25000.0, 60000.0, 30000.0, 50000.0, 10000.0};
  real xr [NWIN*NF][NCH], xi [NWIN*NF][NCH];

  function automatic real fabs(real v); return (v < 0.0) ? -v : v; endfunction

  initial begin
    repeat (NWIN * NF * NCH * 3 + 500) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int wcount [NT];
  always @(posedge clk) if (rst_n) begin
    if (frame_tick) nframes++;
    if (window_tick) nwin++;
    for (int l = 0; l < LANES; l++) if (res_valid[l]) begin
      int t, w;
      real er, ei, a;
      t = int'(res_tone[l]);
      w = wcount[t]++;
      er = 0; ei = 0;
      for (int m = 0; m < NF; m++) begin
        a = -2.0 * PI * real'(t_fine[t] * m) / real'(NF);
        er += xr[w*NF+m][t_bin[t]] * $cos(a) - xi[w*NF+m][t_bin[t]] * $sin(a);
        ei += xr[w*NF+m][t_bin[t]] * $sin(a) + xi[w*NF+m][t_bin[t]] * $cos(a);
      end
      checks++;
      nres++;
      if (t_en[t] == 0 || fabs(real'(res_re[l]) - er) > 3.0*NF || fabs(real'(res_im[l]) - ei) > 3.0*NF ||
          res_glitches[l] != 0) begin
        failures++;
        if (failures < 10) $display("tone %0d win %0d got %0d,%0d exp %f,%f", t, w, res_re[l], res_im[l], er, ei);
      end
    end
  end

  initial begin
    for (int t = 0; t < NT; t++) wcount[t] = 0;
    // frame contents: tones plus per-bin constant offsets
    for (int f = 0; f < NWIN*NF; f++)
      for (int b = 0; b < NCH; b++) begin
        xr[f][b] = 1000.0 * b; xi[f][b] = -500.0 * b;
        for (int t = 0; t < NT; t++) if (t_bin[t] == b) begin
          xr[f][b] += t_amp[t] * $cos(2.0*PI*real'(t_fine[t]*f)/real'(NF) + 0.3*t);
          xi[f][b] += t_amp[t] * $sin(2.0*PI*real'(t_fine[t]*f)/real'(NF) + 0.3*t);
        end
      end
    for (int j = 0; j < CR_TAPS; j++) cr_tmpl[j] = (j == 0) ? 8'sd1 : 8'sd0;
    cr_threshold = '1;                       // no glitch can exceed this
    in_valid = 0; in_bin = 0; in_re = 0; in_im = 0;
    cfg_we = 0; cfg_addr = 0; cfg_tone = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < NT; t++) begin
      @(negedge clk);
      cfg_we = 1; cfg_addr = TONE_AW'(t);
      cfg_tone.en = t_en[t][0]; cfg_tone.bin = 10'(t_bin[t]); cfg_tone.fine = 9'(t_fine[t]);
      cfg_tone.amp = 16'sd1000;
    end
    @(negedge clk); cfg_we = 0;
    for (int f = 0; f < NWIN*NF; f++)
      for (int i = 0; i < NCH; i++) begin
        int b;
        @(negedge clk);
        b = int'(bitrev(32'(i), LOG2C));
        in_valid = 1; in_bin = LOG2C'(b);
        in_re = DW'($rtoi(xr[f][b])); in_im = DW'($rtoi(xi[f][b]));
      end
    @(negedge clk); in_valid = 0;
    repeat (NCH + 40) @(posedge clk);
    checks += 4;
    if (nres != 5 * NWIN) begin failures++; $display("%0d records, expected %0d", nres, 5*NWIN); end
    if (nframes != NWIN*NF) begin failures++; $display("%0d frames", nframes); end
    if (nwin != NWIN) begin failures++; $display("%0d windows", nwin); end
    if (overrun) begin failures++; $display("overrun"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
