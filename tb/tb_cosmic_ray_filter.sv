// tb_cosmic_ray_filter: drives interleaved samples of several tones (steady
// levels with small noise, plus injected spikes) through the cosmic-ray
// filter and compares every output sample and glitch flag with a reference
// model written here from the filter's definition: difference stream,
// correlation with the template, |Re|+|Im| against the threshold, and
// replacement by the last unflagged sample. Checks the one-clock latency.
module tb_cosmic_ray_filter;
  localparam int DEPTH = 5, W = 20, TAPS = 4, TW = 8, THW = 32;
  localparam int SLW = $clog2(DEPTH);
  localparam int NS = 4000, WIN = 64;

  logic clk = 0, rst_n = 0;
  logic signed [TW-1:0] tmpl [TAPS];
  logic [THW-1:0] threshold;
  logic in_valid, in_first, in_last;
  logic [SLW-1:0] in_slot;
  logic signed [W-1:0] in_re, in_im;
  logic out_valid, out_first, out_last, out_glitch;
  logic [SLW-1:0] out_slot;
  logic signed [W-1:0] out_re, out_im;

  cosmic_ray_filter #(.DEPTH(DEPTH), .W(W), .TAPS(TAPS), .TW(TW), .THW(THW)) dut (.*);

  always #5 clk = ~clk;

  int checks = 0, failures = 0, nglitch = 0;

  // reference state
  longint prev_r [DEPTH], prev_i [DEPTH], good_r [DEPTH], good_i [DEPTH];
  longint hr [DEPTH][TAPS], hi [DEPTH][TAPS];   // hr[s][j] = d[n-j], j>=1 used
  longint exp_r, exp_i;
  bit exp_g, exp_v;
  int exp_slot;

  function automatic longint iabs(longint v); return v < 0 ? -v : v; endfunction

  task automatic model(int s, bit first, longint xr, longint xi);
    longint d_r [TAPS], d_i [TAPS], cr, ci;
    bit g;
    for (int j = 0; j < TAPS; j++) begin d_r[j] = 0; d_i[j] = 0; end
    if (!first) begin
      d_r[0] = xr - prev_r[s]; d_i[0] = xi - prev_i[s];
      for (int j = 1; j < TAPS; j++) begin d_r[j] = hr[s][j]; d_i[j] = hi[s][j]; end
    end
    cr = 0; ci = 0;
    for (int j = 0; j < TAPS; j++) begin cr += tmpl[j] * d_r[j]; ci += tmpl[j] * d_i[j]; end
    g = !first && (iabs(cr) + iabs(ci) > longint'(threshold));
    exp_g = g;
    exp_r = g ? good_r[s] : xr;
    exp_i = g ? good_i[s] : xi;
    for (int j = TAPS-1; j >= 1; j--) begin hr[s][j] = d_r[j-1]; hi[s][j] = d_i[j-1]; end
    prev_r[s] = xr; prev_i[s] = xi;
    if (!g) begin good_r[s] = xr; good_i[s] = xi; end
  endtask

  initial begin
    repeat (NS + 100) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) begin
    if (rst_n) begin
      // outputs registered one clock after the inputs the model saw
      if (exp_v) begin
        checks++;
        if (!out_valid || int'(out_slot) != exp_slot || out_glitch != exp_g ||
            longint'(out_re) != exp_r || longint'(out_im) != exp_i) begin
          failures++;
          if (failures < 10) $display("slot %0d got v%0d g%0d %0d,%0d exp g%0d %0d,%0d", exp_slot,
                                      out_valid, out_glitch, out_re, out_im, exp_g, exp_r, exp_i);
        end
        if (exp_g) nglitch++;
      end
      exp_v = in_valid;
      if (in_valid) begin
        exp_slot = int'(in_slot);
        model(int'(in_slot), in_first, longint'(in_re), longint'(in_im));
      end
    end
  end

  initial begin
    int lvl_r [DEPTH], lvl_i [DEPTH];
    exp_v = 0;
    tmpl[0] = 8'sd4; tmpl[1] = -8'sd2; tmpl[2] = -8'sd1; tmpl[3] = -8'sd1;
    threshold = 32'd20000;
    for (int s = 0; s < DEPTH; s++) begin
      lvl_r[s] = int'($urandom_range(200000)) - 100000;
      lvl_i[s] = int'($urandom_range(200000)) - 100000;
    end
    in_valid = 0; in_first = 0; in_last = 0; in_slot = 0; in_re = 0; in_im = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int n = 0; n < NS / DEPTH; n++) begin
      for (int s = 0; s < DEPTH; s++) begin
        @(negedge clk);
        in_valid = 1;
        in_slot  = SLW'(s);
        in_first = (n % WIN == 0);
        in_last  = (n % WIN == WIN - 1);
        in_re = W'(lvl_r[s] + int'($urandom_range(200)) - 100);
        in_im = W'(lvl_i[s] + int'($urandom_range(200)) - 100);
        if ($urandom_range(40) == 0) begin
          in_re = W'(lvl_r[s] + 30000);   // injected glitch
          in_im = W'(lvl_i[s] - 20000);
        end
      end
    end
    @(negedge clk); in_valid = 0;
    repeat (4) @(posedge clk);
    checks++;
    if (nglitch == 0) begin failures++; $display("no glitch was detected"); end
    $display("glitches detected: %0d", nglitch);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
