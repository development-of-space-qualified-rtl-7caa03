// cordic_rotator: pipelined CORDIC in rotation mode.
//
// Rotates the complex input (x + iy) by the angle phase * 2*pi / 2^PW.
// The top two phase bits first rotate by a multiple of 90 degrees (exact);
// the remaining angle, below 90 degrees, is removed by NIT shift-and-add
// micro-rotations with arctan(2^-i) constants. The CORDIC gain (about 1.647)
// is then cancelled by one constant multiply, so |out| = |in| to within
// rounding. Three guard bits are carried on the data and four on the
// angle. The output is one bit wider
// than the input because a rotation can move a full-scale corner sample
// beyond the input range.
// Timing: one sample per clock, latency NIT+2 clocks; tag travels alongside.
// The readout uses the rotator for drive-tone generation and for the fine
// down-conversion; the pipeline organisation and word widths are this
// design's own.
module cordic_rotator #(
  parameter int W    = 16,
  parameter int PW   = mkid_pkg::PHASE_W,
  parameter int NIT  = 18,
  parameter int TAGW = 1,
  localparam int OW  = W + 1
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 in_valid,
  input  logic signed [W-1:0]  in_x,
  input  logic signed [W-1:0]  in_y,
  input  logic [PW-1:0]        in_phase,
  input  logic [TAGW-1:0]      in_tag,
  output logic                 out_valid,
  output logic signed [OW-1:0] out_x,
  output logic signed [OW-1:0] out_y,
  output logic [TAGW-1:0]      out_tag
);
  localparam int G  = 3;             // guard bits
  localparam int IW = W + 2 + G;     // internal width: rotation + gain + guard
  localparam int ZG = 4;             // angle guard bits
  localparam int ZW = PW + ZG;       // signed residual angle width
  localparam int KFRAC = 17;
  // 1 / prod(sqrt(1 + 2^-2i)) in Q.17
  localparam int unsigned KINV = 32'd79594;

  typedef logic signed [ZW-1:0] ang_t;
  typedef ang_t atan_tab_t [NIT];

  function automatic atan_tab_t make_atan();
    atan_tab_t t;
    for (int i = 0; i < NIT; i++)
      t[i] = ang_t'($rtoi($floor($atan(2.0 ** (-i)) / (2.0 * 3.14159265358979323846)
                                 * real'(2.0 ** ZW) + 0.5)));
    return t;
  endfunction
  localparam atan_tab_t ATAN = make_atan();

  logic signed [IW-1:0] x [NIT+1];
  logic signed [IW-1:0] y [NIT+1];
  ang_t                 z [NIT+1];
  logic                 v [NIT+2];
  logic [TAGW-1:0]      tg [NIT+2];

  // Stage 0: quadrant rotation.
  logic signed [IW-1:0] ex, ey;
  assign ex = IW'(in_x) <<< G;
  assign ey = IW'(in_y) <<< G;

  always_ff @(posedge clk) begin
    unique case (in_phase[PW-1 -: 2])
      2'd0: begin x[0] <=  ex; y[0] <=  ey; end
      2'd1: begin x[0] <= -ey; y[0] <=  ex; end
      2'd2: begin x[0] <= -ex; y[0] <= -ey; end
      default: begin x[0] <=  ey; y[0] <= -ex; end
    endcase
    z[0]  <= ang_t'({2'b00, in_phase[PW-3:0], {ZG{1'b0}}});
    tg[0] <= in_tag;
  end

  for (genvar i = 0; i < NIT; i++) begin : g_it
    always_ff @(posedge clk) begin
      if (z[i] >= 0) begin
        x[i+1] <= x[i] - (y[i] >>> i);
        y[i+1] <= y[i] + (x[i] >>> i);
        z[i+1] <= z[i] - ATAN[i];
      end else begin
        x[i+1] <= x[i] + (y[i] >>> i);
        y[i+1] <= y[i] - (x[i] >>> i);
        z[i+1] <= z[i] + ATAN[i];
      end
      tg[i+1] <= tg[i];
    end
  end

  // Gain correction and rounding.
  logic signed [IW+KFRAC+1:0] gx, gy;
  assign gx = (IW+KFRAC+2)'(x[NIT]) * (IW+KFRAC+2)'(KINV) + (IW+KFRAC+2)'(1 <<< (KFRAC+G-1));
  assign gy = (IW+KFRAC+2)'(y[NIT]) * (IW+KFRAC+2)'(KINV) + (IW+KFRAC+2)'(1 <<< (KFRAC+G-1));

  always_ff @(posedge clk) begin
    out_x        <= OW'(gx >>> (KFRAC+G));
    out_y        <= OW'(gy >>> (KFRAC+G));
    tg[NIT+1]    <= tg[NIT];
  end
  assign out_tag = tg[NIT+1];

  // Valid pipeline with reset.
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < NIT+2; i++) v[i] <= 1'b0;
    end else begin
      v[0] <= in_valid;
      for (int i = 1; i < NIT+2; i++) v[i] <= v[i-1];
    end
  end
  assign out_valid = v[NIT+1];

endmodule
