// tb_mkid_readout_top: end-to-end test of the readout core with its DAC
// output looped back into its ADC input (as if the feedline and the RF
// front end were a perfect wire), at reduced sizes: 32 coarse channels,
// 16 fine channels, 8 tones.
//
// Phase 1 (windows 2-4, glitch detection off): every driven tone's co-add
// must have the magnitude NF*K*amp times the end-to-end filter gain at its
// offset (checked within bounds), an enabled tone with no drive must stay
// near zero, two tones sharing one coarse bin must both be recovered, and a
// disabled tone must produce no record.
// Phase 2 (after window 5): the threshold is set, the shared-bin partner is
// disabled and a one-sample full-scale impulse is added to the ADC stream
// inside window 9. The tones (now one per bin) must report glitches in
// window 9 and none in window 7. Window w is the one whose records follow
// the w-th window tick.
// Counted mechanisms: frames, windows, results, shared-bin recovery,
// glitch replacement and tone-table reconfiguration; each must occur.
module tb_mkid_readout_top;
  import mkid_pkg::*;
  localparam int LOG2C = 5, LOG2F = 4, NT = 8, LANES = 2;
  localparam int K = 1 << LOG2C, NF = 1 << LOG2F;
  localparam int CHW = 16 + LOG2C + 1, RW = CHW + 1 + LOG2F;
  localparam int NWIN = 10;

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
  logic [LOG2C-1:0] chan_bin;
  logic signed [CHW-1:0] chan_re, chan_im;
  logic [LANES-1:0] res_valid, glitch;
  logic [TONE_AW-1:0] res_tone [LANES];
  logic signed [RW-1:0] res_i [LANES], res_q [LANES];
  logic [GCOUNT_W-1:0] res_glitches [LANES];
  logic frame_tick, window_tick, overrun;

  mkid_readout_top #(.LOG2C(LOG2C), .LOG2F(LOG2F), .NTONES(NT), .LANES(LANES)) dut (.*);

  always #5 clk = ~clk;

  // tone plan: bin, fine index, amplitude, enable
  int t_bin [NT]  = '{3, 3, 7, 12, 20, 26, 29, 15};
  int t_fine [NT] = '{0, 3, 2, 14, 1, 0, 13, 4};
  int t_amp [NT]  = '{80, 80, 60, 50, 80, 0, 40, 80};
  int t_en [NT]   = '{1, 1, 1, 1, 1, 1, 1, 0};

  int checks = 0, failures = 0;
  int n_frames = 0, n_windows = 0, n_results = 0, n_glitch_samples = 0;
  int n_shared_ok = 0, n_glitch_windows = 0, n_reconfig = 0;
  real mag [NWIN+2][NT];
  int  gl  [NWIN+2][NT];
  bit  got [NWIN+2][NT];
  bit  inject = 0;

  // perfect feedline: DAC samples return on the ADC inputs; an impulse can be added
  always_comb begin
    adc_valid = dac_valid;
    adc_i = inject ? 12'sd2047 : dac_i;
    adc_q = inject ? -12'sd2048 : dac_q;
  end

  initial begin
    repeat ((NWIN + 4) * NF * K + 2000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) if (rst_n) begin
    if (frame_tick) n_frames++;
    if (window_tick) n_windows++;
    if (glitch != 0) n_glitch_samples++;
    for (int l = 0; l < LANES; l++) if (res_valid[l]) begin
      int t, w;
      t = int'(res_tone[l]);
      w = n_windows;              // records follow the window's tick
      n_results++;
      if (w <= NWIN + 1) begin
        mag[w][t] = $sqrt(real'(res_i[l]) * real'(res_i[l]) + real'(res_q[l]) * real'(res_q[l]));
        gl[w][t]  = int'(res_glitches[l]);
        got[w][t] = 1;
      end
    end
  end

  task automatic write_tone(int t, bit en);
    @(negedge clk);
    cfg_we = 1; cfg_addr = TONE_AW'(t);
    cfg_tone.en = en; cfg_tone.bin = 10'(t_bin[t]); cfg_tone.fine = 9'(t_fine[t]);
    cfg_tone.amp = 16'(t_amp[t]);
    @(negedge clk); cfg_we = 0;
  endtask

  initial begin
    for (int j = 0; j < CR_TAPS; j++) cr_tmpl[j] = (j == 0) ? 8'sd1 : 8'sd0;
    cr_threshold = '1;
    cfg_we = 0; cfg_addr = 0; cfg_tone = '0;
    for (int w = 0; w < NWIN+2; w++) for (int t = 0; t < NT; t++) begin got[w][t] = 0; gl[w][t] = 0; mag[w][t] = 0; end
    repeat (3) @(posedge clk);
    for (int t = 0; t < NT; t++) write_tone(t, t_en[t][0]);
    rst_n = 1;
    // phase 1
    wait (n_windows == 5);
    cr_threshold = 32'd600;
    write_tone(1, 1'b0);            // remove the shared-bin partner
    n_reconfig++;
    // phase 2: impulse in the middle of window 8
    wait (n_windows == 8);
    repeat (NF * K / 2 + K / 2) @(posedge clk);
    @(negedge clk); inject = 1;
    @(negedge clk); inject = 0;
    wait (n_windows == NWIN);
    repeat (200) @(posedge clk);

    for (int w = 2; w <= 4; w++) begin
      for (int t = 0; t < NT; t++) begin
        real full;
        full = real'(NF * K * t_amp[t]);
        checks++;
        if (t_en[t] == 0) begin
          if (got[w][t]) begin failures++; $display("w%0d: disabled tone %0d reported", w, t); end
        end else if (!got[w][t]) begin
          failures++; $display("w%0d: tone %0d missing", w, t);
        end else if (t_amp[t] == 0) begin
          if (mag[w][t] > 0.02 * real'(NF * K * 80)) begin
            failures++; $display("w%0d: undriven tone %0d magnitude %f", w, t, mag[w][t]);
          end
        end else if (mag[w][t] < 0.5 * full || mag[w][t] > 1.25 * full) begin
          failures++; $display("w%0d: tone %0d magnitude %f, driven %f", w, t, mag[w][t], full);
        end else if (t_bin[t] == 3) n_shared_ok++;
        $display("w%0d tone %0d mag/full %f", w, t, (t_amp[t] == 0) ? mag[w][t] : mag[w][t] / full);
      end
    end
    for (int t = 0; t < NT; t++) if (t != 1 && t_en[t] != 0) begin
      checks += 2;
      if (gl[7][t] != 0) begin failures++; $display("w7: tone %0d false glitches %0d", t, gl[7][t]); end
      if (gl[9][t] == 0) begin failures++; $display("w9: tone %0d glitch missed", t); end
      else n_glitch_windows++;
      $display("tone %0d glitches w7=%0d w9=%0d", t, gl[7][t], gl[9][t]);
    end
    checks++;
    if (got[7][1] || got[9][1]) begin failures++; $display("disabled partner still reported"); end
    // every mechanism must have happened
    checks += 7;
    if (n_frames < NWIN * NF) begin failures++; $display("frames %0d", n_frames); end
    if (n_windows < NWIN) begin failures++; $display("windows %0d", n_windows); end
    if (n_results == 0) begin failures++; $display("no results"); end
    if (n_shared_ok == 0) begin failures++; $display("shared bin never resolved"); end
    if (n_glitch_windows == 0 || n_glitch_samples == 0) begin failures++; $display("no glitch replaced"); end
    if (n_reconfig == 0) begin failures++; $display("no reconfiguration"); end
    if (overrun) begin failures++; $display("overrun"); end
    $display("frames=%0d windows=%0d results=%0d shared_ok=%0d glitch_windows=%0d glitch_samples=%0d reconfig=%0d",
             n_frames, n_windows, n_results, n_shared_ok, n_glitch_windows, n_glitch_samples, n_reconfig);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
