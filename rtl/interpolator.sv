// interpolator: DAC-side channelizer, raises the drive IQ rate by R.
//
// Linear interpolation: each new input sample x[n] (in_valid) starts a
// segment from the previous input x[n-1] to x[n]; on every out_ce strobe the
// output steps along it, out = x[n-1] + k*(x[n]-x[n-1])/R for k = 0..R-1.
// After R strobes without a new input the output holds x[n].  R must be a
// power of two.  The inputs are expected once every R out_ce strobes.
//
// Timing: the output register updates on out_ce; a new input is first seen
// on the strobe after it arrives, so the segment lags the input by one
// input period (the interpolation delay).  The factor 8 is the narrow-band
// configuration's interpolation; linear interpolation is this design's
// choice (the filter is not specified).
module interpolator
  import llrf_pkg::*;
#(
  parameter int R = 8,
  parameter int W = 18
) (
  input  logic                clk,
  input  logic                rst,
  input  logic                in_valid,
  input  logic signed [W-1:0] in_i,
  input  logic signed [W-1:0] in_q,
  input  logic                out_ce,
  output logic signed [W-1:0] out_i,
  output logic signed [W-1:0] out_q
);
  localparam int LR = $clog2(R);

  logic signed [W-1:0] prev_i, prev_q, cur_i, cur_q;
  logic [LR:0]         k;

  function automatic logic signed [W-1:0] lerp(input logic signed [W-1:0] a,
                                               input logic signed [W-1:0] b,
                                               input logic [LR:0] kk);
    logic signed [W+LR+1:0] d;
    d = (W+LR+2)'(b) - (W+LR+2)'(a);
    d = d * $signed({1'b0, kk});
    return W'((W+LR+2)'(a) + (d >>> LR));
  endfunction

  always_ff @(posedge clk) begin
    if (rst) begin
      prev_i <= '0; prev_q <= '0;
      cur_i  <= '0; cur_q  <= '0;
      k      <= (LR+1)'(R);
      out_i  <= '0; out_q  <= '0;
    end else begin
      if (in_valid) begin
        prev_i <= cur_i;
        prev_q <= cur_q;
        cur_i  <= in_i;
        cur_q  <= in_q;
        k      <= '0;
      end else if (out_ce) begin
        if (k < (LR+1)'(R)) k <= k + 1'b1;
      end
      if (out_ce) begin
        out_i <= lerp(prev_i, cur_i, k);
        out_q <= lerp(prev_q, cur_q, k);
      end
    end
  end

endmodule
