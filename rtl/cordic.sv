// cordic: pipelined CORDIC for the LLRF loop, in either of its two uses.
//
// VECTORING=1 (rectangular to polar): x_in/y_in carry I and Q, z_in the rx
// phase offset.  Outputs: x_out = sqrt(I^2+Q^2) (gain-corrected, saturated to
// IW-1 bits), y_out = residual (about 0), z_out = atan2(Q,I) + z_in.
// VECTORING=0 (polar to rectangular): x_in carries the amplitude, y_in 0 and
// z_in the phase (drive phase plus tx phase offset, added by the caller).
// Outputs: x_out = A*cos(z), y_out = A*sin(z).
//
// Phase is a fraction of a full turn, 2^PW counts = 360 degrees, handled
// internally with 32 bits.  A first stage folds the vector into the right
// half plane (rotation by 180 degrees), then STAGES micro-rotations follow,
// one pipeline register each, and a last stage multiplies by 1/1.64676 to
// remove the CORDIC gain.  Latency is STAGES+2 cycles; one sample per cycle.
//
// The use of a CORDIC for both conversions, and the rx/tx phase offsets, are
// the loop structure of the reference LLRF design; pipelining, stage count,
// and the phase scaling are this design's choices.
module cordic
  import llrf_pkg::*;
#(
  parameter int IW        = 18,
  parameter int PW        = 19,
  parameter int STAGES    = 20,
  parameter bit VECTORING = 1'b1
) (
  input  logic                 clk,
  input  logic                 rst,
  input  logic                 in_valid,
  input  logic signed [IW-1:0] x_in,
  input  logic signed [IW-1:0] y_in,
  input  logic [PW-1:0]        z_in,
  output logic                 out_valid,
  output logic signed [IW-1:0] x_out,
  output logic signed [IW-1:0] y_out,
  output logic [PW-1:0]        z_out
);
  localparam int FB = 6;               // fraction bits against truncation bias
  localparam int XW = IW + 3 + FB;     // guard bits for gain growth and folding
  localparam int NS = (STAGES > 24) ? 24 : STAGES;

  logic signed [XW-1:0] xs [0:NS];
  logic signed [XW-1:0] ys [0:NS];
  logic        [31:0]   zs [0:NS];
  logic                 vs [0:NS];

  // Stage 0: fold into the right half plane.
  always_ff @(posedge clk) begin
    logic signed [XW-1:0] xe, ye;
    logic [31:0] ze;
    logic fold;
    xe = XW'(x_in) <<< FB;
    ye = XW'(y_in) <<< FB;
    ze = {z_in, {(32-PW){1'b0}}};
    if (VECTORING) fold = x_in < 0;
    else           fold = ze[31] ^ ze[30];   // |angle| > 90 degrees
    if (fold) begin
      xs[0] <= -xe;
      ys[0] <= -ye;
      zs[0] <= ze + 32'h8000_0000;
    end else begin
      xs[0] <= xe;
      ys[0] <= ye;
      zs[0] <= ze;
    end
    vs[0] <= in_valid & ~rst;
  end

  for (genvar s = 0; s < NS; s++) begin : g_stage
    always_ff @(posedge clk) begin
      logic dir;  // 1: rotate counter-clockwise
      if (VECTORING) dir = ys[s] < 0;
      else           dir = ~zs[s][31];
      if (dir) begin
        xs[s+1] <= xs[s] - (ys[s] >>> s);
        ys[s+1] <= ys[s] + (xs[s] >>> s);
        zs[s+1] <= zs[s] - cordic_atan(s);
      end else begin
        xs[s+1] <= xs[s] + (ys[s] >>> s);
        ys[s+1] <= ys[s] - (xs[s] >>> s);
        zs[s+1] <= zs[s] + cordic_atan(s);
      end
      vs[s+1] <= vs[s] & ~rst;
    end
  end

  // Gain correction and output saturation.
  localparam logic signed [IW-1:0] MAXV = {1'b0, {(IW-1){1'b1}}};
  localparam logic signed [IW-1:0] MINV = {1'b1, {(IW-1){1'b0}}};

  function automatic logic signed [IW-1:0] scale_sat(input logic signed [XW-1:0] v);
    logic signed [XW+18:0] p;
    p = (XW+19)'(v) * (XW+19)'(CORDIC_INV_GAIN);
    p = (p + ((XW+19)'(1) <<< (16 + FB))) >>> (17 + FB);
    if (p > (XW+19)'(MAXV)) return MAXV;
    if (p < (XW+19)'(MINV)) return MINV;
    return p[IW-1:0];
  endfunction

  always_ff @(posedge clk) begin
    x_out     <= scale_sat(xs[NS]);
    y_out     <= scale_sat(ys[NS]);
    z_out     <= zs[NS][31:32-PW] + PW'(zs[NS][31-PW]);  // round to PW bits
    out_valid <= vs[NS] & ~rst;
  end

endmodule
