// dsp_core: one LLRF loop controller (amplitude and phase feedback).
//
// Measured base-band IQ -> CORDIC rectangular-to-polar, which adds the rx
// phase offset -> amplitude and phase, each regulated by its own PI
// controller (setpoint, Kp, Ki, enable, integrator reset) -> CORDIC
// polar-to-rectangular, with the tx phase offset added to the drive phase ->
// drive IQ.  This is the loop structure of the reference LLRF design.
//
// The 19-bit CORDIC phase is reported and regulated as an 18-bit word (its
// top bits), matching the 18-bit measured-phase signal of the reference
// simulation; the drive phase is widened back to 19 bits before the tx
// offset is added.  Amplitude is an 18-bit non-negative word.
//
// Timing: one sample per in_valid; out_valid follows in_valid by
// 2*(STAGES+2) + 2 + 1 cycles (two CORDICs, the PI stages, and the tx offset
// adder).  amp_meas/phs_meas hold the last measurement for read-back.
module dsp_core
  import llrf_pkg::*;
#(
  parameter int STAGES = 20
) (
  input  logic      clk,
  input  logic      rst,
  input  logic      in_valid,
  input  iq_t       in_iq,
  input  loop_cfg_t cfg,
  output logic      out_valid,
  output iq_t       out_iq,
  output logic signed [IQ_W-1:0] amp_meas,
  output logic signed [IQ_W-1:0] phs_meas
);
  logic                   rp_valid;
  logic signed [IQ_W-1:0] rp_amp, rp_res;
  logic [PH_W-1:0]        rp_phs;

  cordic #(.IW(IQ_W), .PW(PH_W), .STAGES(STAGES), .VECTORING(1'b1)) u_r2p (
    .clk, .rst,
    .in_valid (in_valid),
    .x_in     (in_iq.i),
    .y_in     (in_iq.q),
    .z_in     (cfg.rx_phase_offset),
    .out_valid(rp_valid),
    .x_out    (rp_amp),
    .y_out    (rp_res),
    .z_out    (rp_phs)
  );

  logic signed [IQ_W-1:0] phs18;
  assign phs18 = rp_phs[PH_W-1 -: IQ_W];

  logic                   amp_valid, phs_valid;
  logic signed [IQ_W-1:0] amp_drive, phs_drive;

  pi_ctrl #(.W(IQ_W), .GW(GAIN_W), .WRAP(1'b0)) u_pi_amp (
    .clk, .rst,
    .in_valid (rp_valid),
    .meas     (rp_amp),
    .setpoint (cfg.amp_setpoint),
    .kp       (cfg.kp_amp),
    .ki       (cfg.ki_amp),
    .enable   (cfg.amp_enable),
    .int_reset(cfg.amp_reset),
    .out_valid(amp_valid),
    .out      (amp_drive)
  );

  pi_ctrl #(.W(IQ_W), .GW(GAIN_W), .WRAP(1'b1)) u_pi_phs (
    .clk, .rst,
    .in_valid (rp_valid),
    .meas     (phs18),
    .setpoint (cfg.phs_setpoint),
    .kp       (cfg.kp_phs),
    .ki       (cfg.ki_phs),
    .enable   (cfg.phs_enable),
    .int_reset(cfg.phs_reset),
    .out_valid(phs_valid),
    .out      (phs_drive)
  );

  // Add the tx phase offset.
  logic                   tx_valid;
  logic signed [IQ_W-1:0] tx_amp;
  logic [PH_W-1:0]        tx_phs;
  always_ff @(posedge clk) begin
    tx_valid <= amp_valid & phs_valid & ~rst;
    tx_amp   <= amp_drive;
    tx_phs   <= {phs_drive, {(PH_W-IQ_W){1'b0}}} + cfg.tx_phase_offset;
  end

  logic [PH_W-1:0] res_unused;
  cordic #(.IW(IQ_W), .PW(PH_W), .STAGES(STAGES), .VECTORING(1'b0)) u_p2r (
    .clk, .rst,
    .in_valid (tx_valid),
    .x_in     (tx_amp),
    .y_in     ('0),
    .z_in     (tx_phs),
    .out_valid(out_valid),
    .x_out    (out_iq.i),
    .y_out    (out_iq.q),
    .z_out    (res_unused)
  );

  always_ff @(posedge clk) begin
    if (rst) begin
      amp_meas <= '0;
      phs_meas <= '0;
    end else if (rp_valid) begin
      amp_meas <= rp_amp;
      phs_meas <= phs18;
    end
  end

  // The residual of the vectoring CORDIC is not used.
  logic unused_ok;
  assign unused_ok = ^rp_res;

endmodule
