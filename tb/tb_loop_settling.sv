// tb_loop_settling: loop-closing experiment on the full gateware at its
// default size.
//
// Four RF pulses in a row, each with new random amplitude and phase
// setpoints and a new pair of rx/tx phase offsets (the four pairs used in
// the reference loop simulation: rx 191879, 95602, 115720, 114633 and tx
// -47662, 250746, 187245, 190650, in 2^19 counts per turn).  Before each
// pulse both integrators are reset; during the pulse both loops are
// closed.  Loop 0 drives a cavity model, which is a first-order low-pass
// with a 1 us time constant (250 DSP cycles at the 4 ns clock used here),
// gain 0.7 and a 50 degree rotation.  Its output is fed back through ADC
// channel 0.  Loop 1 is left open.
//
// For each pulse the settling time is measured, from the start of the gate
// to the last sample at which the measured amplitude is more than 1% of
// setpoint, or the measured phase more than 1 degree, off.  It must be
// within 10 us (2500 cycles), the settling time the reference simulation
// reaches.  The measurement must then stay within 0.1% and 0.1 degree for
// the rest of the pulse.  The cavity time constant, the gains and the
// 4 ns clock are this testbench's choices; the reference does not give
// them.
module tb_loop_settling;
  import llrf_pkg::*;
  localparam int N_ADC = 8, N_DAC = 2, AW = 16;
  localparam real PI = 3.14159265358979;
  localparam int GATE = 6000, SETTLE_MAX = 2500;

  logic clk = 0, rst = 1, clk_evr = 0, rst_evr = 1;
  always #2 clk = ~clk;
  always #4 clk_evr = ~clk_evr;
  int checks = 0, failures = 0;

  logic                    adc_valid, dac_ce, rf_gate, trig_out;
  logic signed [ADC_W-1:0] adc_i [N_ADC];
  logic signed [ADC_W-1:0] adc_q [N_ADC];
  logic signed [ADC_W-1:0] dac_i [N_DAC];
  logic signed [ADC_W-1:0] dac_q [N_DAC];
  logic [15:0] evr_rx_data;
  logic [1:0]  evr_rx_charisk;
  logic        evr_rx_err, evr_gt_rx_reset, evr_link_up;
  logic        reg_wr, reg_rd, reg_rvalid;
  logic [11:0] reg_addr;
  logic [31:0] reg_wdata, reg_rdata;
  logic [3:0]  wf_sel;
  logic [AW-1:0] wf_addr, awg_addr;
  logic [2*IQ_W-1:0] wf_data, awg_wdata;
  logic        awg_wr;
  logic [0:0]  awg_sel;

  llrf_top dut (.*);

  initial begin
    #2000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // Idle timing stream: a comma every eighth word.
  int evr_cnt;
  always @(posedge clk_evr) begin
    evr_cnt <= evr_cnt + 1;
    evr_rx_data    <= (evr_cnt % 8 == 0) ? 16'h00BC : 16'h0000;
    evr_rx_charisk <= (evr_cnt % 8 == 0) ? 2'b01 : 2'b00;
  end

  // Cavity model on loop 0, noise on the other ADC channels.
  real cav_i, cav_q;
  int  cyc;
  always @(posedge clk) begin
    real r, ti, tq;
    cyc <= cyc + 1;
    dac_ce <= (cyc % 2 == 0);
    r  = 50.0 / 180.0 * PI;
    ti = 0.7 * (dac_i[0] * $cos(r) - dac_q[0] * $sin(r));
    tq = 0.7 * (dac_i[0] * $sin(r) + dac_q[0] * $cos(r));
    cav_i = cav_i + (ti - cav_i) / 250.0;
    cav_q = cav_q + (tq - cav_q) / 250.0;
    for (int c = 0; c < N_ADC; c++) begin
      adc_i[c] <= (c == 0) ? ADC_W'(int'(cav_i)) : ADC_W'(int'($urandom_range(200)) - 100);
      adc_q[c] <= (c == 0) ? ADC_W'(int'(cav_q)) : ADC_W'(int'($urandom_range(200)) - 100);
    end
    adc_valid <= !rst;
  end

  task automatic wr(logic [11:0] a, logic [31:0] d);
    @(negedge clk);
    reg_wr = 1; reg_addr = a; reg_wdata = d;
    @(negedge clk);
    reg_wr = 0;
  endtask

  function automatic real rabs(real v);
    return (v < 0.0) ? -v : v;
  endfunction

  // Phase difference in degrees, 2^18 counts per turn, wrapped to +-180.
  function automatic real dphs(logic signed [IQ_W-1:0] a, logic signed [IQ_W-1:0] b);
    logic signed [IQ_W-1:0] d;
    d = a - b;
    return real'(d) * 360.0 / 262144.0;
  endfunction

  int rx_off [4] = '{191879, 95602, 115720, 114633};
  int tx_off [4] = '{-47662, 250746, 187245, 190650};

  initial begin
    int n_settled;
    cyc = 0; evr_cnt = 0; cav_i = 0; cav_q = 0; n_settled = 0;
    adc_valid = 0; dac_ce = 0; evr_rx_err = 0; evr_rx_data = 0; evr_rx_charisk = 0;
    reg_wr = 0; reg_rd = 0; reg_addr = 0; reg_wdata = 0; wf_sel = 0; wf_addr = 0;
    awg_wr = 0; awg_sel = 0; awg_addr = 0; awg_wdata = 0;
    for (int c = 0; c < N_ADC; c++) begin adc_i[c] = 0; adc_q[c] = 0; end
    repeat (4) @(posedge clk_evr);
    rst_evr = 0;
    repeat (4) @(negedge clk);
    rst = 0;

    wr(12'h004, 32'h2);              // software trigger
    wr(12'h008, 32'd10);
    wr(12'h00C, GATE);
    wr(12'h10C, 32'd6144);           // Kp amp = 1.5
    wr(12'h110, 32'd8000);           // Ki amp
    wr(12'h114, 32'd6144);           // Kp phase = 1.5
    wr(12'h118, 32'd8000);           // Ki phase
    wr(12'h124, 32'd0);              // loop 0 reads ADC 0

    for (int p = 0; p < 4; p++) begin
      int amp_sp, phs_sp, settle, t_gate, bad_after;
      real amp_tol_s, amp_tol_f, ph_err, amp_err;
      amp_sp = 20000 + int'($urandom_range(40000));
      phs_sp = int'($urandom_range(262143)) - 131072;
      wr(12'h104, 32'(amp_sp));
      wr(12'h108, 32'(phs_sp));
      wr(12'h11C, 32'(rx_off[p]));
      wr(12'h120, 32'(tx_off[p]));
      wr(12'h100, 32'hA);            // integrators in reset, loops open
      repeat (50) @(negedge clk);
      wr(12'h100, 32'h5);            // loops closed (act inside the gate)
      wr(12'h000, 32'h1);
      while (!rf_gate) @(posedge clk);
      t_gate = cyc;
      settle = -1;
      bad_after = 0;
      amp_tol_s = 0.01 * amp_sp;
      amp_tol_f = 0.001 * amp_sp;
      while (rf_gate) begin
        @(posedge clk);
        amp_err = rabs(real'(dut.amp_meas[0]) - real'(amp_sp));
        ph_err  = rabs(dphs(dut.phs_meas[0], IQ_W'(phs_sp)));
        if (amp_err > amp_tol_s || ph_err > 1.0) settle = cyc - t_gate;
        if (cyc - t_gate > GATE - 1500 && rf_gate && (amp_err > amp_tol_f || ph_err > 0.1))
          bad_after++;
      end
      $display("pulse %0d: amp sp %0d, phase sp %0d, rx %0d, tx %0d: settled after %0d cycles (%0.2f us at 4 ns)",
               p, amp_sp, phs_sp, rx_off[p], tx_off[p], settle, settle * 0.004);
      checks++;
      if (settle < 0 || settle > SETTLE_MAX) begin
        failures++;
        $display("FAIL: pulse %0d settling %0d cycles", p, settle);
      end else n_settled++;
      checks++;
      if (bad_after != 0) begin
        failures++;
        $display("FAIL: pulse %0d not within 0.1%%/0.1 deg late in the pulse (%0d samples)", p, bad_after);
      end
      repeat (500) @(negedge clk);
    end
    checks++;
    if (n_settled != 4) begin failures++; $display("FAIL: %0d of 4 pulses settled", n_settled); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
