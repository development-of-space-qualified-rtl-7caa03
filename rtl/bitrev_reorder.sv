// bitrev_reorder: ping-pong frame buffer that turns an FFT's bit-reversed
// output into natural order.
//
// Each input sample is written at the address in_idx (the natural index the
// FFT reports for it) into the write half. After N writes the halves swap
// and the finished half is read out in address order, one sample per clock,
// while the next frame fills the other half. Input must not arrive faster
// than one sample per clock, so the read-out always finishes in time.
// Latency: N writes plus one clock. A helper of the synthesis filterbank.
module bitrev_reorder #(
  parameter int LOG2N = mkid_pkg::LOG2_NCHAN,
  parameter int W     = 31
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 in_valid,
  input  logic [LOG2N-1:0]     in_idx,
  input  logic signed [W-1:0]  in_re,
  input  logic signed [W-1:0]  in_im,
  output logic                 out_valid,
  output logic signed [W-1:0]  out_re,
  output logic signed [W-1:0]  out_im
);
  localparam int N = 1 << LOG2N;

  logic signed [W-1:0] mem_re [2][N];
  logic signed [W-1:0] mem_im [2][N];
  logic                wbank;
  logic [LOG2N-1:0]    wcnt, rptr;
  logic                reading;

  always_ff @(posedge clk) begin
    if (in_valid) begin
      mem_re[wbank][in_idx] <= in_re;
      mem_im[wbank][in_idx] <= in_im;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wbank     <= 1'b0;
      wcnt      <= '0;
      rptr      <= '0;
      reading   <= 1'b0;
      out_valid <= 1'b0;
      out_re    <= '0;
      out_im    <= '0;
    end else begin
      out_valid <= reading;
      if (reading) begin
        out_re <= mem_re[~wbank][rptr];
        out_im <= mem_im[~wbank][rptr];
        rptr   <= rptr + 1'b1;
        if (rptr == LOG2N'(N-1)) reading <= 1'b0;
      end
      if (in_valid) begin
        wcnt <= wcnt + 1'b1;
        if (wcnt == LOG2N'(N-1)) begin
          wbank   <= ~wbank;
          reading <= 1'b1;
          rptr    <= '0;
        end
      end
    end
  end

endmodule
