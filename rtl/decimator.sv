// decimator: ADC-side channelizer, reduces the base-band IQ rate by R.
//
// Integrate-and-dump (boxcar, first-order CIC): the I and Q inputs of R
// consecutive in_valid samples are summed and the sum is output once, as
// the top OW bits of the IW+log2(R)-bit sum (for IW=16, R=16, OW=18 that is
// the mean with two fraction bits).  R must be a power of two.
//
// Timing: out_valid pulses one cycle after the R-th input of each block;
// the first block starts with the first sample after reset.  The factor 16
// is the narrow-band configuration's decimation; the boxcar filter is this
// design's choice (the filter is not specified).
module decimator
  import llrf_pkg::*;
#(
  parameter int R  = 16,
  parameter int IW = 16,
  parameter int OW = 18
) (
  input  logic                 clk,
  input  logic                 rst,
  input  logic                 in_valid,
  input  logic signed [IW-1:0] in_i,
  input  logic signed [IW-1:0] in_q,
  output logic                 out_valid,
  output logic signed [OW-1:0] out_i,
  output logic signed [OW-1:0] out_q
);
  localparam int LR = $clog2(R);
  localparam int SW = IW + LR;
  localparam int SH = (SW > OW) ? SW - OW : 0;

  logic [LR-1:0]         cnt;
  logic signed [SW-1:0]  acc_i, acc_q;
  logic signed [SW-1:0]  sum_i, sum_q;

  assign sum_i = acc_i + SW'(in_i);
  assign sum_q = acc_q + SW'(in_q);

  always_ff @(posedge clk) begin
    if (rst) begin
      cnt       <= '0;
      acc_i     <= '0;
      acc_q     <= '0;
      out_valid <= 1'b0;
      out_i     <= '0;
      out_q     <= '0;
    end else begin
      out_valid <= 1'b0;
      if (in_valid) begin
        cnt <= cnt + 1'b1;
        if (cnt == LR'(R-1)) begin
          acc_i     <= '0;
          acc_q     <= '0;
          out_valid <= 1'b1;
          out_i     <= OW'(sum_i >>> SH);
          out_q     <= OW'(sum_q >>> SH);
        end else begin
          acc_i <= sum_i;
          acc_q <= sum_q;
        end
      end
    end
  end

endmodule
