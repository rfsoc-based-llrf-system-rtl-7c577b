// tb_cordic: checks both CORDIC modes against floating-point references.
//
// Rectangular to polar: random IQ vectors (and the four axes) with a random
// rx phase offset; amplitude must match sqrt(I^2+Q^2) within 4 LSB and phase
// atan2(Q,I)+offset within 8 counts of 2^19 per turn.  Polar to rectangular:
// random amplitude and phase; I and Q must match A*cos, A*sin within 4 LSB.
// Latency (STAGES+2 cycles) is checked on the first sample.
module tb_cordic;
  import llrf_pkg::*;
  localparam int IW = 18, PW = 19, STAGES = 20, N = 400;
  localparam real PI = 3.14159265358979;

  logic clk = 0, rst = 1;
  always #5 clk = ~clk;

  int checks = 0, failures = 0;

  logic                 v_in [2];
  logic signed [IW-1:0] x_in [2], y_in [2], x_o [2], y_o [2];
  logic [PW-1:0]        z_in [2], z_o [2];
  logic                 v_o [2];

  cordic #(.IW(IW), .PW(PW), .STAGES(STAGES), .VECTORING(1'b1)) dut_v (
    .clk, .rst, .in_valid(v_in[0]), .x_in(x_in[0]), .y_in(y_in[0]), .z_in(z_in[0]),
    .out_valid(v_o[0]), .x_out(x_o[0]), .y_out(y_o[0]), .z_out(z_o[0]));
  cordic #(.IW(IW), .PW(PW), .STAGES(STAGES), .VECTORING(1'b0)) dut_r (
    .clk, .rst, .in_valid(v_in[1]), .x_in(x_in[1]), .y_in(y_in[1]), .z_in(z_in[1]),
    .out_valid(v_o[1]), .x_out(x_o[1]), .y_out(y_o[1]), .z_out(z_o[1]));

  real exp_a [$], exp_p [$], exp_i [$], exp_q [$];

  function automatic real rabs(real v);
    return (v < 0.0) ? -v : v;
  endfunction

  function automatic real wrapd(real d, real m);
    while (d >  m/2) d -= m;
    while (d < -m/2) d += m;
    return d;
  endfunction

  initial begin
    #200000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // Stimulus
  initial begin
    int lat;
    v_in[0] = 0; v_in[1] = 0;
    x_in[0] = 0; y_in[0] = 0; z_in[0] = 0; x_in[1] = 0; y_in[1] = 0; z_in[1] = 0;
    repeat (3) @(posedge clk);
    rst <= 0;
    @(posedge clk);
    // latency check
    v_in[0] <= 1; x_in[0] <= 1000; y_in[0] <= 0; z_in[0] <= 0;
    exp_a.push_back(1000.0); exp_p.push_back(0.0);
    @(posedge clk);
    v_in[0] <= 0;
    lat = 0;
    do begin @(posedge clk); lat++; end while (!v_o[0]);
    checks++;
    if (lat != STAGES + 2) begin failures++; $display("latency %0d", lat); end
    repeat (4) @(posedge clk);
    for (int n = 0; n < N; n++) begin
      int xi, yi, a, zr, zp;
      real th;
      if (n < 4) begin
        xi = (n == 0) ? 90000 : (n == 2) ? -90000 : 0;
        yi = (n == 1) ? 90000 : (n == 3) ? -90000 : 0;
      end else begin
        xi = int'($urandom_range(180000)) - 90000;
        yi = int'($urandom_range(180000)) - 90000;
      end
      zr = int'($urandom_range((1 << PW) - 1));
      a  = int'($urandom_range(130000));
      zp = int'($urandom_range((1 << PW) - 1));
      v_in[0] <= 1; x_in[0] <= IW'(xi); y_in[0] <= IW'(yi); z_in[0] <= PW'(zr);
      v_in[1] <= 1; x_in[1] <= IW'(a);  y_in[1] <= '0;      z_in[1] <= PW'(zp);
      exp_a.push_back($sqrt(real'(xi) * xi + real'(yi) * yi));
      exp_p.push_back($atan2(real'(yi), real'(xi)) / (2 * PI) * (1 << PW) + zr);
      th = 2 * PI * zp / (1 << PW);
      exp_i.push_back(a * $cos(th));
      exp_q.push_back(a * $sin(th));
      @(posedge clk);
    end
    v_in[0] <= 0; v_in[1] <= 0;
    repeat (40) @(posedge clk);
    checks++;
    if (exp_a.size() != 0 || exp_i.size() != 0) begin
      failures++;
      $display("missing outputs %0d %0d", exp_a.size(), exp_i.size());
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // Checkers
  always @(posedge clk) begin
    if (v_o[0]) begin
      real ea, ep, dp;
      ea = exp_a.pop_front();
      ep = exp_p.pop_front();
      dp = wrapd(real'(z_o[0]) - ep, real'(1 << PW));
      checks++;
      if (rabs(real'(x_o[0]) - ea) > 4.0 || rabs(dp) > 8.0) begin
        failures++;
        $display("R2P: amp %0d exp %f phase err %f", x_o[0], ea, dp);
      end
    end
    if (v_o[1]) begin
      real ei, eq;
      ei = exp_i.pop_front();
      eq = exp_q.pop_front();
      checks++;
      if (rabs(real'(x_o[1]) - ei) > 4.0 || rabs(real'(y_o[1]) - eq) > 4.0) begin
        failures++;
        $display("P2R: %0d %0d exp %f %f", x_o[1], y_o[1], ei, eq);
      end
    end
  end
endmodule
