// tb_fft_r2sdf: checks the streaming FFT, forward and inverse, against a
// direct DFT computed here in floating point. Random complex frames are
// streamed back to back (with random idle cycles); each output must match
// the DFT bin named by out_bin to within a small rounding tolerance. The
// latency of a gap-free first frame must be N-1 samples plus one clock per stage.
module tb_fft_r2sdf;
  localparam int LOG2N = 5, N = 1 << LOG2N, IW = 14, OW = IW + LOG2N + 1;
  localparam int NFR = 12;
  localparam real TOL = 4.0 * LOG2N;

  logic clk = 0, rst_n = 0;
  logic in_valid;
  logic signed [IW-1:0] in_re, in_im;
  logic f_valid, i_valid;
  logic [LOG2N-1:0] f_bin, i_bin;
  logic signed [OW-1:0] f_re, f_im, i_re, i_im;

  fft_r2sdf #(.LOG2N(LOG2N), .IW(IW), .INVERSE(1'b0)) dut_f (.clk, .rst_n, .in_valid, .in_re, .in_im,
    .out_valid(f_valid), .out_bin(f_bin), .out_re(f_re), .out_im(f_im));
  fft_r2sdf #(.LOG2N(LOG2N), .IW(IW), .INVERSE(1'b1)) dut_i (.clk, .rst_n, .in_valid, .in_re, .in_im,
    .out_valid(i_valid), .out_bin(i_bin), .out_re(i_re), .out_im(i_im));

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  int xr [NFR*N], xi [NFR*N];
  int nin = 0, nf = 0, ni = 0;
  int cyc = 0, first_in_cyc = -1, first_out_cyc = -1;
  bit seen [2][NFR][N];

  function automatic void dft(int fr, int k, bit inv, output real yr, output real yi);
    real a, pi;
    pi = 3.14159265358979323846;
    yr = 0; yi = 0;
    for (int n = 0; n < N; n++) begin
      a = (inv ? 2.0 : -2.0) * pi * real'(n * k) / real'(N);
      yr += real'(xr[fr*N+n]) * $cos(a) - real'(xi[fr*N+n]) * $sin(a);
      yi += real'(xr[fr*N+n]) * $sin(a) + real'(xi[fr*N+n]) * $cos(a);
    end
  endfunction

  function automatic real fabs(real v); return (v < 0.0) ? -v : v; endfunction

  task automatic check(bit inv, int idx, logic [LOG2N-1:0] bin, longint gr, longint gi);
    real yr, yi;
    int fr;
    fr = idx / N;
    dft(fr, int'(bin), inv, yr, yi);
    checks++;
    if ((idx % N) != mkid_pkg::bitrev(32'(bin), LOG2N)) begin
      failures++; $display("order: idx %0d bin %0d", idx, bin);
    end
    if (fabs(real'(gr) - yr) > TOL || fabs(real'(gi) - yi) > TOL) begin
      failures++;
      if (failures < 10) $display("inv=%0d frame %0d bin %0d got %0d,%0d exp %f,%f", inv, fr, bin, gr, gi, yr, yi);
    end
  endtask

  always @(posedge clk) if (rst_n) begin
    if (f_valid) begin
      if (first_out_cyc < 0) first_out_cyc = cyc;
      if (nf < NFR*N) check(1'b0, nf, f_bin, f_re, f_im);
      nf++;
    end
    if (i_valid) begin
      if (ni < NFR*N) check(1'b1, ni, i_bin, i_re, i_im);
      ni++;
    end
    if (in_valid) begin
      if (first_in_cyc < 0) first_in_cyc = cyc;
      nin++;
    end
    cyc++;
  end

  initial begin
    repeat (NFR*N*3 + 200) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int n = 0; n < NFR*N; n++) begin
      xr[n] = int'($urandom_range(2**IW-1)) - 2**(IW-1);
      xi[n] = int'($urandom_range(2**IW-1)) - 2**(IW-1);
    end
    // frame 1: a single tone in bin 3; frame 2: DC full scale
    for (int n = 0; n < N; n++) begin
      xr[N+n] = $rtoi(6000.0 * $cos(2.0*3.14159265358979*3*n/N));
      xi[N+n] = $rtoi(6000.0 * $sin(2.0*3.14159265358979*3*n/N));
      xr[2*N+n] = 2**(IW-1)-1; xi[2*N+n] = -(2**(IW-1));
    end
    in_valid = 0; in_re = 0; in_im = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int n = 0; n < NFR*N + N; ) begin
      @(negedge clk);
      if (n < N || $urandom_range(4) != 0) begin
        in_valid = 1;
        in_re = IW'(n < NFR*N ? xr[n] : 0);
        in_im = IW'(n < NFR*N ? xi[n] : 0);
        n++;
      end else in_valid = 0;
    end
    @(negedge clk); in_valid = 0;
    repeat (20) @(posedge clk);
    checks++;
    // first frame is sent without gaps: latency = N-1 sample delays plus one
    // register per stage, seen one clock later by this sampler
    if (first_out_cyc - first_in_cyc != N + LOG2N - 1) begin
      failures++; $display("latency %0d, expected %0d", first_out_cyc - first_in_cyc, N + LOG2N - 1);
    end
    checks++;
    if (nf < NFR*N || ni < NFR*N) begin failures++; $display("outputs %0d %0d", nf, ni); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
