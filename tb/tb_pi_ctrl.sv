// tb_pi_ctrl: checks the amplitude (saturating) and phase (wrapping) PI
// regulators against a behavioural model of the control law, sample by
// sample, with random measurements, setpoints, gains, enables and integrator
// resets, then with a held error that saturates the amplitude integrator
// and winds the phase integrator round several turns.  Also checks the
// 2-cycle latency, and that a closed loop around a
// plant with a gain of 0.5 drives the measurement onto the setpoint.
module tb_pi_ctrl;
  localparam int W = 18, GW = 18, KPS = 12, KIS = 16, N = 3000;

  logic clk = 0, rst = 1;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  bit closed = 0;

  logic                 in_valid;
  logic signed [W-1:0]  meas, sp;
  logic signed [GW-1:0] kp, ki;
  logic                 en, ir;
  logic                 ov [2];
  logic signed [W-1:0]  out [2];

  pi_ctrl #(.W(W), .GW(GW), .KP_SHIFT(KPS), .KI_SHIFT(KIS), .WRAP(1'b0)) dut_a (
    .clk, .rst, .in_valid, .meas, .setpoint(sp), .kp, .ki, .enable(en), .int_reset(ir),
    .out_valid(ov[0]), .out(out[0]));
  pi_ctrl #(.W(W), .GW(GW), .KP_SHIFT(KPS), .KI_SHIFT(KIS), .WRAP(1'b1)) dut_p (
    .clk, .rst, .in_valid, .meas, .setpoint(sp), .kp, .ki, .enable(en), .int_reset(ir),
    .out_valid(ov[1]), .out(out[1]));

  // Reference model (64-bit integers).
  longint acc_m [2];
  longint exp_q [2][$];
  localparam longint AMAX = 64'sd1 <<< (W + KIS);

  function automatic longint wrapw(longint v);
    longint m = 64'sd1 <<< W;
    v = v % m;
    if (v < 0) v += m;
    if (v >= m / 2) v -= m;
    return v;
  endfunction

  task automatic model(int m, longint me, longint s, longint p, longint i, bit e, bit r);
    longint err, pt, sum, o, an;
    err = (m == 1) ? wrapw(s - me) : s - me;
    pt  = (err * p) >>> KPS;
    if (r) acc_m[m] = 0;
    sum = s + pt + (acc_m[m] >>> KIS);
    if (!e) o = s;
    else if (m == 1) o = wrapw(sum);
    else o = (sum > (1 << (W - 1)) - 1) ? (1 << (W - 1)) - 1 : (sum < 0) ? 0 : sum;
    exp_q[m].push_back(o);
    an = acc_m[m] + err * i;
    if (m == 1) begin
      // phase: integral wraps modulo 2^(W+KIS), one full turn of output
      an = an % AMAX;
      if (an < 0) an += AMAX;
      if (an >= AMAX / 2) an -= AMAX;
    end else begin
      if (an > AMAX) an = AMAX;
      if (an < -AMAX) an = -AMAX;
    end
    if (!r && e) acc_m[m] = an;
  endtask

  initial begin
    #1000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) begin
    for (int m = 0; m < 2; m++) if (ov[m] && !closed) begin
      longint e;
      checks++;
      if (exp_q[m].size() == 0) begin
        failures++;
        $display("unexpected output %0d", m);
      end else begin
        e = exp_q[m].pop_front();
        if (longint'(out[m]) != e) begin
          failures++;
          if (failures < 10) $display("pi %0d: got %0d exp %0d", m, out[m], e);
        end
      end
    end
  end

  initial begin
    int lat;
    in_valid = 0; meas = 0; sp = 0; kp = 0; ki = 0; en = 0; ir = 0;
    acc_m[0] = 0; acc_m[1] = 0;
    repeat (3) @(posedge clk);
    rst <= 0;
    @(posedge clk);
    // Latency
    in_valid <= 1; sp <= 100; meas <= 50; en <= 0;
    model(0, 50, 100, 0, 0, 0, 0); model(1, 50, 100, 0, 0, 0, 0);
    @(posedge clk);
    in_valid <= 0;
    lat = 0;
    do begin @(posedge clk); lat++; end while (!ov[0]);
    checks++;
    if (lat != 2) begin failures++; $display("latency %0d", lat); end
    @(posedge clk);
    // Random
    for (int n = 0; n < N; n++) begin
      longint me, s, p, i;
      bit e, r;
      me = longint'($urandom_range(1 << W) ) - (1 << (W - 1));
      s  = longint'($urandom_range(1 << W) ) - (1 << (W - 1));
      if (me >= (1 << (W - 1))) me = (1 << (W - 1)) - 1;
      if (s >= (1 << (W - 1))) s = (1 << (W - 1)) - 1;
      p  = longint'($urandom_range(16384)) - 8192;
      i  = longint'($urandom_range(4096)) - 2048;
      e  = ($urandom_range(9) != 0);
      r  = ($urandom_range(49) == 0);
      in_valid <= 1; meas <= W'(me); sp <= W'(s); kp <= GW'(p); ki <= GW'(i); en <= e; ir <= r;
      model(0, me, s, p, i, e, r);
      model(1, me, s, p, i, e, r);
      @(posedge clk);
      in_valid <= 0; ir <= 0;
      @(posedge clk);
    end
    // Wind-up: a held error with no reset drives the amplitude integrator
    // into saturation and the phase integrator round several full turns.
    for (int n = 0; n < 300; n++) begin
      longint me, s, p, i;
      me = 0; s = 100000; p = 1024; i = 2047;
      in_valid <= 1; meas <= W'(me); sp <= W'(s); kp <= GW'(p); ki <= GW'(i); en <= 1; ir <= (n == 0);
      model(0, me, s, p, i, 1, n == 0);
      model(1, me, s, p, i, 1, n == 0);
      @(posedge clk);
      in_valid <= 0; ir <= 0;
      @(posedge clk);
    end
    repeat (5) @(posedge clk);
    // Closed loop: plant meas = out/2, integral action must remove the error.
    checks++;
    if (exp_q[0].size() != 0 || exp_q[1].size() != 0) begin
      failures++;
      $display("missing outputs");
    end
    closed = 1;
    ir <= 1; @(posedge clk); ir <= 0;
    sp <= 60000; kp <= 2048; ki <= 3000; en <= 1; meas <= 0;
    for (int n = 0; n < 2000; n++) begin
      in_valid <= 1;
      @(posedge clk);
      in_valid <= 0;
      @(posedge clk);
      @(posedge clk);
      meas <= out[0] >>> 1;
    end
    checks++;
    if (meas < 59980 || meas > 60020) begin
      failures++;
      $display("closed loop did not settle: meas %0d", meas);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
