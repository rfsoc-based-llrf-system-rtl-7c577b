// tb_dsp_core: one LLRF loop around a simulated cavity.
//
// Open loop: a fixed probe IQ must be measured as its magnitude and
// atan2 + rx offset, and the drive must equal setpoint amplitude at setpoint
// phase + tx offset (floating-point references, small tolerances); the
// input-to-output latency must be 2*(STAGES+2)+3 cycles.
// Closed loop: the cavity model returns the drive scaled by 0.7 and rotated
// by 50 degrees, one sample later.  With both PI loops enabled the measured
// amplitude and phase must settle on their setpoints; then the loops are
// opened and the integrators reset.
module tb_dsp_core;
  import llrf_pkg::*;
  localparam int STAGES = 20;
  localparam real PI = 3.14159265358979;
  logic clk = 0, rst = 1;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic      in_valid, out_valid;
  iq_t       in_iq, out_iq;
  loop_cfg_t cfg;
  logic signed [IQ_W-1:0] amp_meas, phs_meas;

  dsp_core #(.STAGES(STAGES)) dut (.*);

  function automatic real rabs(real v);
    return (v < 0.0) ? -v : v;
  endfunction
  function automatic real wrapd(real d, real m);
    while (d >  m/2) d -= m;
    while (d < -m/2) d += m;
    return d;
  endfunction

  initial begin
    #4000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic sample(iq_t v);
    in_valid <= 1; in_iq <= v;
    @(posedge clk);
    in_valid <= 0;
    while (!out_valid) @(posedge clk);
    @(posedge clk);
  endtask

  initial begin
    iq_t p;
    int lat;
    real th, ei, eq, ea, ep;
    in_valid = 0; in_iq = '0; cfg = '0;
    repeat (3) @(posedge clk);
    rst <= 0;
    @(posedge clk);
    // Open loop
    cfg.amp_setpoint    <= 18'sd50000;
    cfg.phs_setpoint    <= 18'sd40000;     // 40000/2^18 of a turn
    cfg.rx_phase_offset <= 19'd30000;
    cfg.tx_phase_offset <= 19'd100000;
    @(posedge clk);
    p.i = 18'sd30000; p.q = -18'sd40000;
    in_valid <= 1; in_iq <= p;
    @(posedge clk);
    in_valid <= 0;
    lat = 0;
    do begin @(posedge clk); lat++; end while (!out_valid);
    checks++;
    if (lat != 2 * (STAGES + 2) + 3) begin failures++; $display("latency %0d", lat); end
    th = 2 * PI * (real'(40000 * 2 + 100000) / real'(1 << 19));
    ei = 50000 * $cos(th); eq = 50000 * $sin(th);
    checks++;
    if (rabs(real'(out_iq.i) - ei) > 6 || rabs(real'(out_iq.q) - eq) > 6) begin
      failures++; $display("drive %0d %0d exp %f %f", out_iq.i, out_iq.q, ei, eq);
    end
    ea = 50000.0;
    ep = ($atan2(-40000.0, 30000.0) / (2 * PI) * (1 << 19) + 30000) / 2;
    checks++;
    if (rabs(real'(amp_meas) - ea) > 4 || rabs(wrapd(real'(phs_meas) - ep, real'(1 << 18))) > 4) begin
      failures++; $display("meas %0d %0d exp %f %f", amp_meas, phs_meas, ea, ep);
    end
    // Closed loop around the cavity model
    cfg.kp_amp <= 18'sd1024; cfg.ki_amp <= 18'sd4000;
    cfg.kp_phs <= 18'sd1024; cfg.ki_phs <= 18'sd4000;
    cfg.amp_setpoint <= 18'sd40000;
    cfg.phs_setpoint <= -18'sd20000;
    cfg.amp_enable <= 1; cfg.phs_enable <= 1;
    p = '0;
    for (int n = 0; n < 600; n++) begin
      real ci, cq, rot;
      sample(p);
      rot = 50.0 / 360.0 * 2 * PI;
      ci = 0.7 * (out_iq.i * $cos(rot) - out_iq.q * $sin(rot));
      cq = 0.7 * (out_iq.i * $sin(rot) + out_iq.q * $cos(rot));
      p.i = IQ_W'(int'(ci)); p.q = IQ_W'(int'(cq));
    end
    checks++;
    if (rabs(real'(amp_meas) - 40000) > 20 || rabs(wrapd(real'(phs_meas) + 20000, real'(1 << 18))) > 20) begin
      failures++; $display("closed loop: amp %0d phs %0d", amp_meas, phs_meas);
    end
    // Open the loop: the drive returns to the setpoint
    cfg.amp_enable <= 0; cfg.phs_enable <= 0; cfg.amp_reset <= 1; cfg.phs_reset <= 1;
    sample(p);
    th = 2 * PI * (real'(-20000 * 2 + 100000) / real'(1 << 19));
    checks++;
    if (rabs(real'(out_iq.i) - 40000 * $cos(th)) > 6 || rabs(real'(out_iq.q) - 40000 * $sin(th)) > 6) begin
      failures++; $display("open drive %0d %0d", out_iq.i, out_iq.q);
    end
    checks++;
    if (dut.u_pi_amp.acc != 0 || dut.u_pi_phs.acc != 0) begin failures++; $display("integrators not reset"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
