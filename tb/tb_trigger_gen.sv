// tb_trigger_gen: checks that an enabled event or software trigger gives one
// trig pulse exactly cfg_delay+2 cycles after the source pulse, an rf_gate
// of exactly cfg_gate_len cycles starting with it, that disabled sources and
// triggers during the gate are ignored, and the trigger counter.
module tb_trigger_gen;
  logic clk = 0, rst = 1;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic        ev_trig, sw_trig, cfg_ev_en, cfg_sw_en, trig, rf_gate;
  logic [31:0] cfg_delay, cfg_gate_len;
  logic [15:0] n_trig;

  trigger_gen #(.CW(32)) dut (.*);

  int cyc, trig_cyc, gate_first, gate_n, n_trig_seen, src_cyc;
  always @(posedge clk) begin
    cyc++;
    if (((ev_trig && cfg_ev_en) || (sw_trig && cfg_sw_en)) && src_cyc < 0) src_cyc = cyc;
    if (trig && !rst) begin trig_cyc = cyc; n_trig_seen++; end
    if (rf_gate && !rst) begin
      if (gate_n == 0) gate_first = cyc;
      gate_n++;
    end
  end

  initial begin
    #400000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic shot(bit ev, int d, int g, bit expect_fire);
    cfg_delay <= d; cfg_gate_len <= g;
    @(posedge clk);
    gate_n = 0; trig_cyc = -1; src_cyc = -1;
    if (ev) ev_trig <= 1; else sw_trig <= 1;
    @(posedge clk);
    ev_trig <= 0; sw_trig <= 0;
    repeat (d + 3) @(posedge clk);
    // a second source pulse inside the gate must be ignored
    if (g > 2) begin
      if (ev) ev_trig <= 1; else sw_trig <= 1;
      @(posedge clk);
      ev_trig <= 0; sw_trig <= 0;
    end
    repeat (g + d + 10) @(posedge clk);
    checks++;
    if (expect_fire) begin
      if (trig_cyc != src_cyc + d + 2 || gate_first != trig_cyc || gate_n != g) begin
        failures++;
        $display("d=%0d g=%0d: trig at %0d exp %0d, gate from %0d for %0d", d, g, trig_cyc, src_cyc + d + 2, gate_first, gate_n);
      end
    end else if (trig_cyc != -1 || gate_n != 0) begin
      failures++;
      $display("disabled source fired");
    end
  endtask

  initial begin
    ev_trig = 0; sw_trig = 0; cfg_ev_en = 0; cfg_sw_en = 0; cfg_delay = 0; cfg_gate_len = 0;
    cyc = 0; gate_n = 0; n_trig_seen = 0; src_cyc = 0; trig_cyc = -1; gate_first = -1;
    repeat (3) @(posedge clk);
    rst <= 0;
    shot(1, 5, 10, 0);
    cfg_ev_en <= 1;
    shot(1, 5, 10, 1);
    shot(0, 3, 4, 0);
    cfg_sw_en <= 1;
    shot(0, 0, 1, 1);
    shot(0, 17, 33, 1);
    shot(1, 1, 7, 1);
    checks++;
    if (n_trig != 16'(n_trig_seen) || n_trig_seen != 4) begin failures++; $display("count %0d %0d", n_trig, n_trig_seen); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
