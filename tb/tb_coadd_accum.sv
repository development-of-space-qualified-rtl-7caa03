// tb_coadd_accum: streams interleaved samples of several tones over a few
// windows (with idle cycles and an irregular slot order) and checks that
// each window's last sample produces exactly one record per tone holding the
// sum of that tone's samples in the window and its glitch count, one clock
// after the last sample.
module tb_coadd_accum;
  localparam int DEPTH = 6, W = 20, AW = W + 6, GW = 8, WIN = 50, NWIN = 4;
  localparam int SLW = $clog2(DEPTH);

  logic clk = 0, rst_n = 0;
  logic in_valid, in_first, in_last, in_glitch;
  logic [SLW-1:0] in_slot;
  logic signed [W-1:0] in_re, in_im;
  logic out_valid;
  logic [SLW-1:0] out_slot;
  logic signed [AW-1:0] out_re, out_im;
  logic [GW-1:0] out_glitches;

  coadd_accum #(.DEPTH(DEPTH), .W(W), .AW(AW), .GW(GW)) dut (.*);

  always #5 clk = ~clk;

  int checks = 0, failures = 0, nres = 0;
  longint sr [DEPTH], si [DEPTH];
  int sg [DEPTH];
  bit pend;
  int pend_slot;
  longint pr, pi;
  int pg;

  initial begin
    repeat (DEPTH * WIN * NWIN * 3 + 100) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) if (rst_n) begin
    checks++;
    if (out_valid != pend) begin
      failures++; $display("out_valid %0d expected %0d", out_valid, pend);
    end else if (pend) begin
      nres++;
      if (int'(out_slot) != pend_slot || longint'(out_re) != pr || longint'(out_im) != pi ||
          int'(out_glitches) != pg) begin
        failures++;
        if (failures < 10) $display("slot %0d got %0d,%0d g%0d exp %0d,%0d g%0d", pend_slot, out_re, out_im,
                                    out_glitches, pr, pi, pg);
      end
    end
    pend = 0;
    if (in_valid) begin
      int s;
      s = int'(in_slot);
      if (in_first) begin sr[s] = 0; si[s] = 0; sg[s] = 0; end
      sr[s] += longint'(in_re); si[s] += longint'(in_im); sg[s] += int'(in_glitch);
      if (in_last) begin pend = 1; pend_slot = s; pr = sr[s]; pi = si[s]; pg = sg[s]; end
    end
  end

  initial begin
    pend = 0;
    in_valid = 0; in_first = 0; in_last = 0; in_glitch = 0; in_slot = 0; in_re = 0; in_im = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int n = 0; n < WIN * NWIN; n++) begin
      for (int k = 0; k < DEPTH; k++) begin
        @(negedge clk);
        in_valid = 0;
        if ($urandom_range(5) == 0) begin
          @(negedge clk);
        end
        in_valid  = 1;
        in_slot   = SLW'((k * 5 + n) % DEPTH);     // permuted order each frame
        in_first  = (n % WIN == 0);
        in_last   = (n % WIN == WIN - 1);
        in_glitch = ($urandom_range(9) == 0);
        in_re = W'(int'($urandom_range(2**W - 1)) - 2**(W-1));
        in_im = W'(int'($urandom_range(2**W - 1)) - 2**(W-1));
      end
    end
    @(negedge clk); in_valid = 0;
    repeat (4) @(posedge clk);
    checks++;
    if (nres != DEPTH * NWIN) begin failures++; $display("%0d results, expected %0d", nres, DEPTH*NWIN); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
