// tb_mkid_readout_full: one complete measurement at full size: 1024 coarse
// channels, 512 fine channels (2^19-sample windows) and 1400 tones, the
// core's default parameters. The DAC output is looped back into the ADC.
// Tone t sits in coarse bin t mod 1024 (so 376 bins hold two tones, always
// at different fine offsets; neighbouring bins also differ) at a fine
// offset within a quarter channel of the bin centre, with amplitude
// +-3 (pseudo-random sign, which keeps the summed waveform inside the DAC
// range). After the first window (start-up transient) the second window
// must deliver one record per tone whose magnitude is NF*K*|amp| times the
// end-to-end filter gain (checked within 0.7..1.3), with no overrun and no
// glitch (detection threshold at maximum).
module tb_mkid_readout_full;
  import mkid_pkg::*;
  localparam int K = NCHAN, NF = NFINE, NT = NUM_TONES, LANES = TONE_LANES;
  localparam int CHW = 16 + LOG2_NCHAN + 1, RW = CHW + 1 + LOG2_NFINE;

  logic clk = 0, rst_n = 0;
  logic adc_valid;
  logic signed [ADC_W-1:0] adc_i, adc_q;
  logic dac_valid;
  logic signed [DAC_W-1:0] dac_i, dac_q;
  logic cfg_we;
  logic [TONE_AW-1:0] cfg_addr;
  tone_cfg_t cfg_tone;
  logic signed [CR_TW-1:0] cr_tmpl [CR_TAPS];
  logic [CR_THR_W-1:0] cr_threshold;
  logic chan_valid;
  logic [LOG2_NCHAN-1:0] chan_bin;
  logic signed [CHW-1:0] chan_re, chan_im;
  logic [LANES-1:0] res_valid, glitch;
  logic [TONE_AW-1:0] res_tone [LANES];
  logic signed [RW-1:0] res_i [LANES], res_q [LANES];
  logic [GCOUNT_W-1:0] res_glitches [LANES];
  logic frame_tick, window_tick, overrun;

  mkid_readout_top dut (.*);

  always #5 clk = ~clk;

  assign adc_valid = dac_valid;
  assign adc_i = dac_i;
  assign adc_q = dac_q;

  int checks = 0, failures = 0, n_windows = 0, n_rec = 0, n_sat = 0;
  int amp [NT];
  bit seen [NT];
  real gmin = 1e9, gmax = 0;

  function automatic int fine_of(int t);
    return ((t * 37 + (t / K) * 101) % (NF / 2) - NF / 4 + NF) % NF;
  endfunction

  initial begin
    repeat (3 * NF * K + 20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) if (rst_n) begin
    if (window_tick) n_windows++;
    if (dac_valid && (dac_i == 12'sd2047 || dac_i == -12'sd2048)) n_sat++;
    for (int l = 0; l < LANES; l++) if (res_valid[l] && n_windows == 2) begin
      int t;
      real mag, g;
      t = int'(res_tone[l]);
      mag = $sqrt(real'(res_i[l]) * real'(res_i[l]) + real'(res_q[l]) * real'(res_q[l]));
      g = mag / real'(NF * K * (amp[t] < 0 ? -amp[t] : amp[t]));
      if (g < gmin) gmin = g;
      if (g > gmax) gmax = g;
      checks++;
      n_rec++;
      if (seen[t] || g < 0.7 || g > 1.3 || res_glitches[l] != 0) begin
        failures++;
        if (failures < 10) $display("tone %0d gain %f glitches %0d", t, g, res_glitches[l]);
      end
      seen[t] = 1;
    end
  end

  initial begin
    for (int j = 0; j < CR_TAPS; j++) cr_tmpl[j] = (j == 0) ? 8'sd1 : 8'sd0;
    cr_threshold = '1;
    cfg_we = 0; cfg_addr = 0; cfg_tone = '0;
    for (int t = 0; t < NT; t++) begin
      amp[t] = (((t * 7919) >> 3) % 2 == 0) ? 3 : -3;
      seen[t] = 0;
    end
    repeat (3) @(posedge clk);
    for (int t = 0; t < NT; t++) begin
      @(negedge clk);
      cfg_we = 1; cfg_addr = TONE_AW'(t);
      cfg_tone.en = 1'b1; cfg_tone.bin = 10'(t % K); cfg_tone.fine = 9'(fine_of(t));
      cfg_tone.amp = 16'(amp[t]);
    end
    @(negedge clk); cfg_we = 0;
    rst_n = 1;
    wait (n_windows == 3);
    checks += 3;
    if (n_rec != NT) begin failures++; $display("%0d records, expected %0d", n_rec, NT); end
    if (overrun) begin failures++; $display("overrun"); end
    if (n_sat != 0) begin failures++; $display("DAC saturated %0d times", n_sat); end
    $display("window 2: %0d records, gain %f .. %f", n_rec, gmin, gmax);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
