// pi_ctrl: proportional-integral regulator for one LLRF loop variable
// (amplitude or phase).
//
// On each in_valid sample:  err = setpoint - meas
//                           acc = acc + ki*err            (when enable)
//                           out = setpoint + (kp*err >>> KP_SHIFT)
//                                          + (acc >>> KI_SHIFT)
// With enable low the loop is open: out = setpoint and the integrator holds
// its value.  While int_reset is high the integrator is held at zero (the
// reset travels with the sample, so a sample taken with int_reset high sees
// a zero integral).  Gains are signed GW-bit
// numbers, so kp = 2^KP_SHIFT is a proportional gain of one.
//
// WRAP=0 (amplitude): the error is formed with one extra bit and the output
// saturates to [0, 2^(W-1)-1].  WRAP=1 (phase): err and out wrap modulo a
// full turn, so the shortest way round is always taken.  The amplitude
// integrator saturates at +-2^(W+KI_SHIFT) (twice the output range after
// the KI_SHIFT); the phase integrator wraps modulo 2^(W+KI_SHIFT), which is one
// full turn at the output, so a large phase correction never freezes.
//
// Timing: two register stages, out_valid follows in_valid by 2 cycles.
// Setpoint, Kp, Ki, enable and reset come from the loop's register interface
// as in the reference loop controller; the PI form with the setpoint fed
// forward, the scaling shifts and the saturation are this design's choices.
module pi_ctrl #(
  parameter int W        = 18,
  parameter int GW       = 18,
  parameter int KP_SHIFT = 12,
  parameter int KI_SHIFT = 16,
  parameter bit WRAP     = 1'b0
) (
  input  logic                 clk,
  input  logic                 rst,
  input  logic                 in_valid,
  input  logic signed [W-1:0]  meas,
  input  logic signed [W-1:0]  setpoint,
  input  logic signed [GW-1:0] kp,
  input  logic signed [GW-1:0] ki,
  input  logic                 enable,
  input  logic                 int_reset,
  output logic                 out_valid,
  output logic signed [W-1:0]  out
);
  localparam int EW = W + 1;                  // error width
  localparam int PRW = EW + GW;               // product width
  localparam int AW = W + KI_SHIFT + 2;       // integrator width
  localparam logic signed [AW-1:0] ACC_MAX = AW'(1) <<< (W + KI_SHIFT);
  localparam logic signed [W-1:0]  OUT_MAX = {1'b0, {(W-1){1'b1}}};

  logic signed [EW-1:0]  err;
  logic signed [PRW-1:0] p_term, i_inc;
  logic signed [AW-1:0]  acc;
  logic signed [W-1:0]   sp_d;
  logic                  v1, en_d, ir_d;

  always_comb begin
    if (WRAP) err = EW'(W'(setpoint - meas));  // modulo a full turn
    else      err = EW'(setpoint) - EW'(meas);
  end

  // Stage 1: products.
  always_ff @(posedge clk) begin
    if (rst) begin
      v1 <= 1'b0;
    end else begin
      v1 <= in_valid;
    end
    p_term <= PRW'(err) * PRW'(kp);
    i_inc  <= PRW'(err) * PRW'(ki);
    sp_d   <= setpoint;
    en_d   <= enable;
    ir_d   <= int_reset;
  end

  // Stage 2: integrate and sum.
  logic signed [AW+1:0] acc_next;
  logic signed [AW+1:0] sum;
  logic signed [W+KI_SHIFT-1:0] acc_wrap;
  always_comb begin
    acc_next = (AW+2)'(acc) + (AW+2)'(i_inc);
    if (WRAP) begin
      // the integral of a phase is a phase: wrap it modulo a full turn
      acc_wrap = acc_next[W+KI_SHIFT-1:0];
      acc_next = (AW+2)'(acc_wrap);
    end else begin
      if (acc_next > (AW+2)'(ACC_MAX))  acc_next = (AW+2)'(ACC_MAX);
      if (acc_next < -(AW+2)'(ACC_MAX)) acc_next = -(AW+2)'(ACC_MAX);
    end
    sum = (AW+2)'(sp_d) + (AW+2)'(p_term >>> KP_SHIFT) +
          (ir_d ? '0 : (AW+2)'(acc >>> KI_SHIFT));
  end

  always_ff @(posedge clk) begin
    if (rst || ir_d) begin
      acc <= '0;
    end else if (v1 && en_d) begin
      acc <= AW'(acc_next);
    end
    if (rst) begin
      out_valid <= 1'b0;
      out       <= '0;
    end else begin
      out_valid <= v1;
      if (v1) begin
        if (!en_d)     out <= sp_d;
        else if (WRAP) out <= W'(sum);
        else if (sum > (AW+2)'(OUT_MAX)) out <= OUT_MAX;
        else if (sum < 0) out <= '0;
        else           out <= W'(sum);
      end
    end
  end

endmodule
