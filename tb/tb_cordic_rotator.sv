// tb_cordic_rotator: checks the CORDIC rotator against floating-point
// rotation (x + iy) * exp(i*2*pi*phase/2^PW) for random inputs and phases
// in all four quadrants, to within 2 LSB, with a back-to-back stream of
// samples. Also checks the NIT+2 clock latency and that the tag follows.
module tb_cordic_rotator;
  localparam int W = 16, PW = 16, NIT = 18, TAGW = 12, OW = W + 1, NS = 3000;
  localparam int LAT = NIT + 2;

  logic clk = 0, rst_n = 0;
  logic in_valid;
  logic signed [W-1:0] in_x, in_y;
  logic [PW-1:0] in_phase;
  logic [TAGW-1:0] in_tag;
  logic out_valid;
  logic signed [OW-1:0] out_x, out_y;
  logic [TAGW-1:0] out_tag;

  cordic_rotator #(.W(W), .PW(PW), .NIT(NIT), .TAGW(TAGW)) dut (.*);

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  int xs [NS], ys [NS], ps [NS];
  int cyc = 0, in_cyc [NS];

  function automatic real fabs(real v); return (v < 0.0) ? -v : v; endfunction

  initial begin
    repeat (NS + 200) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) begin
    cyc++;
    if (rst_n && out_valid) begin
      int k;
      real a, ex, ey;
      k  = int'(out_tag);
      a  = 2.0 * 3.14159265358979323846 * real'(ps[k]) / real'(2**PW);
      ex = real'(xs[k]) * $cos(a) - real'(ys[k]) * $sin(a);
      ey = real'(xs[k]) * $sin(a) + real'(ys[k]) * $cos(a);
      checks++;
      if (fabs(real'(out_x) - ex) > 2.0 || fabs(real'(out_y) - ey) > 2.0) begin
        failures++;
        if (failures < 10) $display("k=%0d ph=%0d got %0d,%0d exp %f,%f", k, ps[k], out_x, out_y, ex, ey);
      end
      checks++;
      if (cyc - in_cyc[k] != LAT) begin
        failures++;
        if (failures < 10) $display("latency %0d", cyc - in_cyc[k]);
      end
    end
  end

  initial begin
    for (int i = 0; i < NS; i++) begin
      xs[i] = int'($urandom_range(2**W-1)) - 2**(W-1);
      ys[i] = int'($urandom_range(2**W-1)) - 2**(W-1);
      ps[i] = int'($urandom_range(2**PW-1));
    end
    // corner cases: quadrant boundaries and full-scale corner rotated by 45 degrees
    ps[0] = 0; ps[1] = 2**(PW-2); ps[2] = 2**(PW-1); ps[3] = 3*2**(PW-2);
    xs[4] = 2**(W-1)-1; ys[4] = 2**(W-1)-1; ps[4] = 2**(PW-3);
    xs[5] = -(2**(W-1)); ys[5] = -(2**(W-1)); ps[5] = 2**(PW-3);
    in_valid = 0; in_x = 0; in_y = 0; in_phase = 0; in_tag = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int i = 0; i < NS; i++) begin
      @(negedge clk);
      in_valid = 1; in_x = W'(xs[i]); in_y = W'(ys[i]); in_phase = PW'(ps[i]); in_tag = TAGW'(i);
      in_cyc[i] = cyc + 1;
    end
    @(negedge clk); in_valid = 0;
    repeat (LAT + 5) @(posedge clk);
    checks++;
    if (checks != 2*NS + 1) begin failures++; $display("only %0d checks", checks); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
