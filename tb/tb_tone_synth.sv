// tb_tone_synth: configures a handful of tones (two in one bin, one
// disabled, one at full negative amplitude) and checks every bin of every
// frame the synthesizer emits against
//     X_m[b] = sum over enabled tones in bin b of amp * exp(+i*2*pi*fine*m/NF)
// computed here in floating point. The first three frames after reset carry
// no tones (two buffer-clearing frames and the frame during which the first
// tone frame is generated); frame 3 holds m = 0. Also checks that a frame is
// exactly NCH clocks and bins come in natural order.
module tb_tone_synth;
  import mkid_pkg::*;
  localparam int LOG2C = 5, LOG2F = 4, NT = 7, LANES = 2, BW = AMP_W + 4;
  localparam int NCH = 1 << LOG2C, NF = 1 << LOG2F, NFR = 40;
  localparam real PI = 3.14159265358979323846;

  logic clk = 0, rst_n = 0;
  logic cfg_we;
  logic [TONE_AW-1:0] cfg_addr;
  tone_cfg_t cfg_tone;
  logic out_valid;
  logic [LOG2C-1:0] out_bin;
  logic signed [BW-1:0] out_re, out_im;

  tone_synth #(.LOG2C(LOG2C), .LOG2F(LOG2F), .NUM_TONES(NT), .LANES(LANES), .BW(BW)) dut (.*);

  always #5 clk = ~clk;

  int checks = 0, failures = 0, nout = 0, nonzero = 0;
  int t_bin [NT]  = '{2, 2, 9, 0, 5, 31, 17};
  int t_fine [NT] = '{1, 7, 3, 0, 12, 8, 15};
  int t_en [NT]   = '{1, 1, 1, 1, 0, 1, 1};
  int t_amp [NT]  = '{20000, 9000, 32767, 1000, 30000, -32768, 500};

  function automatic real fabs(real v); return (v < 0.0) ? -v : v; endfunction

  initial begin
    repeat ((NFR + 4) * NCH + 200) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  bit started = 0;
  always @(posedge clk) if (rst_n && started && out_valid && nout < NFR * NCH) begin
    int f, b;
    real er, ei, a;
    f = nout / NCH;
    b = nout % NCH;
    er = 0; ei = 0;
    if (f >= 3)
      for (int t = 0; t < NT; t++) if (t_en[t] != 0 && t_bin[t] == b) begin
        a = 2.0 * PI * real'((t_fine[t] * (f - 3)) % NF) / real'(NF);
        er += real'(t_amp[t]) * $cos(a);
        ei += real'(t_amp[t]) * $sin(a);
      end
    checks++;
    if (int'(out_bin) != b || fabs(real'(out_re) - er) > 4.0 || fabs(real'(out_im) - ei) > 4.0) begin
      failures++;
      if (failures < 10) $display("frame %0d bin %0d(%0d) got %0d,%0d exp %f,%f", f, b, out_bin, out_re, out_im, er, ei);
    end
    if (out_re != 0) nonzero++;
    nout++;
  end

  initial begin
    cfg_we = 0; cfg_addr = 0; cfg_tone = '0;
    repeat (3) @(posedge clk);
    // the table is written while the core is held in reset
    for (int t = 0; t < NT; t++) begin
      @(negedge clk);
      cfg_we = 1; cfg_addr = TONE_AW'(t);
      cfg_tone.en = t_en[t][0]; cfg_tone.bin = 10'(t_bin[t]); cfg_tone.fine = 9'(t_fine[t]);
      cfg_tone.amp = 16'(t_amp[t]);
    end
    @(negedge clk); cfg_we = 0;
    rst_n = 1;
    @(posedge clk); #1 started = 1;
    repeat ((NFR + 1) * NCH) @(posedge clk);
    checks++;
    if (nout != NFR * NCH || nonzero == 0) begin failures++; $display("outputs %0d nonzero %0d", nout, nonzero); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
