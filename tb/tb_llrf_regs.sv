// tb_llrf_regs: writes random values to every read-write register, checks
// the matching configuration outputs and the read-back one cycle after
// reg_rd, checks the self-clearing trigger/arm pulses, and reads the status
// words from random status inputs.
module tb_llrf_regs;
  import llrf_pkg::*;
  localparam int N_ADC = 8, N_LOOP = 2, LW = 17;
  logic clk = 0, rst = 1;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic        reg_wr, reg_rd, reg_rvalid;
  logic [11:0] reg_addr;
  logic [31:0] reg_wdata, reg_rdata;
  logic sw_trig, circ_arm, cfg_ev_en, cfg_sw_en;
  logic [31:0] cfg_delay, cfg_gate_len;
  logic [7:0]  cfg_event_code;
  logic [LW-1:0] cfg_cap_len, cfg_awg_len, cfg_circ_post;
  logic [N_ADC-1:0] cfg_adc_src, st_cap_done;
  logic [N_LOOP-1:0] cfg_dac_awg, cfg_dac_ff, st_circ_frozen, st_awg_playing;
  loop_cfg_t loop_cfg [N_LOOP];
  logic [2:0] loop_adc_sel [N_LOOP];
  logic [15:0] st_n_trig, st_evr_resets;
  logic st_link_up;
  logic signed [IQ_W-1:0] st_amp [N_LOOP];
  logic signed [IQ_W-1:0] st_phs [N_LOOP];

  llrf_regs #(.N_ADC(N_ADC), .N_LOOP(N_LOOP), .LW(LW)) dut (.*);

  initial begin
    #400000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // Stimulus changes on the falling edge, away from the sampling edge.
  task automatic wr(logic [11:0] a, logic [31:0] d);
    @(negedge clk);
    reg_wr = 1; reg_addr = a; reg_wdata = d;
    @(negedge clk);
    reg_wr = 0;
  endtask

  task automatic rd_check(logic [11:0] a, logic [31:0] e);
    @(negedge clk);
    reg_rd = 1; reg_addr = a;
    @(negedge clk);
    reg_rd = 0;
    checks++;
    if (!reg_rvalid || reg_rdata !== e) begin
      failures++;
      $display("read %h got %h exp %h (rvalid %0d)", a, reg_rdata, e, reg_rvalid);
    end
  endtask

  function automatic logic [31:0] sx(logic [31:0] v, int w);
    return 32'($signed(v << (32 - w)) >>> (32 - w));
  endfunction

  initial begin
    logic [31:0] v [16];
    reg_wr = 0; reg_rd = 0; reg_addr = 0; reg_wdata = 0;
    st_cap_done = 0; st_circ_frozen = 0; st_awg_playing = 0; st_n_trig = 0; st_evr_resets = 0; st_link_up = 0;
    for (int l = 0; l < N_LOOP; l++) begin st_amp[l] = 0; st_phs[l] = 0; end
    repeat (3) @(posedge clk);
    rst <= 0;
    @(posedge clk);
    for (int k = 0; k < 16; k++) v[k] = $urandom;
    wr(12'h004, v[0]); wr(12'h008, v[1]); wr(12'h00C, v[2]); wr(12'h010, v[3]);
    wr(12'h014, v[4]); wr(12'h018, v[5]); wr(12'h01C, v[6]); wr(12'h020, v[7]); wr(12'h024, v[8]); wr(12'h028, v[9]);
    checks++;
    if (cfg_ev_en != v[0][0] || cfg_sw_en != v[0][1] || cfg_delay != v[1] || cfg_gate_len != v[2] ||
        cfg_event_code != v[3][7:0] || cfg_cap_len != v[4][LW-1:0] || cfg_adc_src != v[5][7:0] ||
        cfg_dac_awg != v[6][1:0] || cfg_awg_len != v[7][LW-1:0] || cfg_circ_post != v[8][LW-1:0] ||
        cfg_dac_ff != v[9][1:0]) begin
      failures++; $display("global config outputs wrong");
    end
    rd_check(12'h004, {30'd0, v[0][1:0]});
    rd_check(12'h008, v[1]);
    rd_check(12'h00C, v[2]);
    rd_check(12'h010, {24'd0, v[3][7:0]});
    rd_check(12'h014, {15'd0, v[4][LW-1:0]});
    rd_check(12'h018, {24'd0, v[5][7:0]});
    rd_check(12'h01C, {30'd0, v[6][1:0]});
    rd_check(12'h020, {15'd0, v[7][LW-1:0]});
    rd_check(12'h024, {15'd0, v[8][LW-1:0]});
    rd_check(12'h028, {30'd0, v[9][1:0]});
    // pulses
    wr(12'h000, 32'h3);
    checks++;
    if (!sw_trig || !circ_arm) begin failures++; $display("pulse missing"); end
    @(negedge clk);
    checks++;
    if (sw_trig || circ_arm) begin failures++; $display("pulse not cleared"); end
    // loops
    for (int l = 0; l < N_LOOP; l++) begin
      logic [11:0] b;
      b = 12'h100 + 12'(l * 64);
      for (int k = 0; k < 11; k++) v[k] = $urandom;
      for (int k = 0; k < 10; k++) wr(b + 12'(4 * k), v[k]);
      checks++;
      if (loop_cfg[l].amp_enable != v[0][0] || loop_cfg[l].amp_reset != v[0][1] ||
          loop_cfg[l].phs_enable != v[0][2] || loop_cfg[l].phs_reset != v[0][3] ||
          loop_cfg[l].amp_setpoint != v[1][17:0] || loop_cfg[l].phs_setpoint != v[2][17:0] ||
          loop_cfg[l].kp_amp != v[3][17:0] || loop_cfg[l].ki_amp != v[4][17:0] ||
          loop_cfg[l].kp_phs != v[5][17:0] || loop_cfg[l].ki_phs != v[6][17:0] ||
          loop_cfg[l].rx_phase_offset != v[7][18:0] || loop_cfg[l].tx_phase_offset != v[8][18:0] ||
          loop_adc_sel[l] != v[9][2:0]) begin
        failures++; $display("loop %0d config outputs wrong", l);
      end
      rd_check(b, {28'd0, v[0][3:0]});
      for (int k = 1; k < 7; k++) rd_check(b + 12'(4 * k), sx(v[k], 18));
      rd_check(b + 12'h1C, {13'd0, v[7][18:0]});
      rd_check(b + 12'h20, {13'd0, v[8][18:0]});
      rd_check(b + 12'h24, {29'd0, v[9][2:0]});
      st_amp[l] = 18'($urandom); st_phs[l] = 18'($urandom);
      rd_check(b + 12'h28, sx(32'(st_amp[l]), 18));
      rd_check(b + 12'h2C, sx(32'(st_phs[l]), 18));
    end
    // status
    st_n_trig = 16'($urandom); st_link_up = 1; st_evr_resets = 16'($urandom);
    st_cap_done = 8'($urandom); st_circ_frozen = 2'b10; st_awg_playing = 2'b01;
    rd_check(12'h040, {15'd0, 1'b1, st_n_trig});
    rd_check(12'h044, {16'd0, st_evr_resets});
    rd_check(12'h048, {8'd0, 8'h01, 8'h02, st_cap_done});
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
