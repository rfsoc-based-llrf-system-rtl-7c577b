// llrf_regs: control and status registers of the LLRF gateware.
//
// A simple synchronous bus, as an AXI4-Lite bridge from the processor would
// present it: reg_wr with reg_addr/reg_wdata writes a register in that
// cycle; reg_rd returns the addressed word on reg_rdata one cycle later
// (reg_rvalid).  Addresses are byte addresses of 32-bit words.
//
//   0x000  W   bit0: software trigger pulse, bit1: re-arm circular buffers
//   0x004  RW  trigger sources: bit0 timing event, bit1 software
//   0x008  RW  trigger delay (DSP cycles)
//   0x00C  RW  RF gate length (DSP cycles)
//   0x010  RW  subscribed event code [7:0]
//   0x014  RW  ADC capture length (samples)
//   0x018  RW  ADC capture source, one bit per channel: 0 raw, 1 base-band
//   0x01C  RW  DAC source, one bit per channel: 0 loop, 1 waveform generator
//   0x020  RW  waveform generator length (samples)
//   0x024  RW  circular buffer post-trigger samples
//   0x028  RW  feed-forward, one bit per DAC channel: add the waveform
//              generator output to the loop drive
//   0x040  R   [15:0] trigger count, [16] timing link up
//   0x044  R   timing receiver watchdog resets
//   0x048  R   [7:0] capture done per ADC, [15:8] circular buffer frozen,
//              [23:16] generator playing
//   0x100 + 0x40*l, loop l:
//     +0x00 RW [0] amp enable [1] amp integrator reset [2] phase enable
//              [3] phase integrator reset
//     +0x04 amp setpoint   +0x08 phase setpoint
//     +0x0C Kp amp  +0x10 Ki amp  +0x14 Kp phase  +0x18 Ki phase
//     +0x1C rx phase offset  +0x20 tx phase offset
//     +0x24 ADC channel feeding the loop
//     +0x28 R measured amplitude  +0x2C R measured phase
//
// The loop registers (gains, setpoints, enables, resets, rx/tx phase
// offsets) are the reference loop controller's register set; the bus, the
// map and everything else are this design's choices.  All registers reset
// to zero.
module llrf_regs
  import llrf_pkg::*;
#(
  parameter int N_ADC  = 8,
  parameter int N_LOOP = 2,
  parameter int LW     = 17
) (
  input  logic        clk,
  input  logic        rst,
  input  logic        reg_wr,
  input  logic        reg_rd,
  input  logic [11:0] reg_addr,
  input  logic [31:0] reg_wdata,
  output logic [31:0] reg_rdata,
  output logic        reg_rvalid,
  // configuration
  output logic              sw_trig,
  output logic              circ_arm,
  output logic              cfg_ev_en,
  output logic              cfg_sw_en,
  output logic [31:0]       cfg_delay,
  output logic [31:0]       cfg_gate_len,
  output logic [7:0]        cfg_event_code,
  output logic [LW-1:0]     cfg_cap_len,
  output logic [N_ADC-1:0]  cfg_adc_src,
  output logic [N_LOOP-1:0] cfg_dac_awg,
  output logic [N_LOOP-1:0] cfg_dac_ff,
  output logic [LW-1:0]     cfg_awg_len,
  output logic [LW-1:0]     cfg_circ_post,
  output loop_cfg_t         loop_cfg [N_LOOP],
  output logic [$clog2(N_ADC)-1:0] loop_adc_sel [N_LOOP],
  // status
  input  logic [15:0]       st_n_trig,
  input  logic              st_link_up,
  input  logic [15:0]       st_evr_resets,
  input  logic [N_ADC-1:0]  st_cap_done,
  input  logic [N_LOOP-1:0] st_circ_frozen,
  input  logic [N_LOOP-1:0] st_awg_playing,
  input  logic signed [IQ_W-1:0] st_amp [N_LOOP],
  input  logic signed [IQ_W-1:0] st_phs [N_LOOP]
);
  localparam int SW = $clog2(N_ADC);

  logic [31:0] rd_word;
  logic        is_loop;
  int unsigned lidx;

  // Loop registers are kept as words and decoded into loop_cfg_t.
  logic [31:0] loop_reg [N_LOOP][10];

  for (genvar l = 0; l < N_LOOP; l++) begin : g_cfg
    assign loop_cfg[l].amp_enable      = loop_reg[l][0][0];
    assign loop_cfg[l].amp_reset       = loop_reg[l][0][1];
    assign loop_cfg[l].phs_enable      = loop_reg[l][0][2];
    assign loop_cfg[l].phs_reset       = loop_reg[l][0][3];
    assign loop_cfg[l].amp_setpoint    = loop_reg[l][1][IQ_W-1:0];
    assign loop_cfg[l].phs_setpoint    = loop_reg[l][2][IQ_W-1:0];
    assign loop_cfg[l].kp_amp          = loop_reg[l][3][GAIN_W-1:0];
    assign loop_cfg[l].ki_amp          = loop_reg[l][4][GAIN_W-1:0];
    assign loop_cfg[l].kp_phs          = loop_reg[l][5][GAIN_W-1:0];
    assign loop_cfg[l].ki_phs          = loop_reg[l][6][GAIN_W-1:0];
    assign loop_cfg[l].rx_phase_offset = loop_reg[l][7][PH_W-1:0];
    assign loop_cfg[l].tx_phase_offset = loop_reg[l][8][PH_W-1:0];
    assign loop_adc_sel[l]             = loop_reg[l][9][SW-1:0];
  end

  assign is_loop = reg_addr[11:8] == 4'h1;
  always_comb lidx = 32'(reg_addr[7:6]);

  always_ff @(posedge clk) begin
    if (rst) begin
      sw_trig        <= 1'b0;
      circ_arm       <= 1'b0;
      cfg_ev_en      <= 1'b0;
      cfg_sw_en      <= 1'b0;
      cfg_delay      <= '0;
      cfg_gate_len   <= '0;
      cfg_event_code <= '0;
      cfg_cap_len    <= '0;
      cfg_adc_src    <= '0;
      cfg_dac_awg    <= '0;
      cfg_dac_ff     <= '0;
      cfg_awg_len    <= '0;
      cfg_circ_post  <= '0;
      for (int l = 0; l < N_LOOP; l++) begin
        for (int k = 0; k < 10; k++) loop_reg[l][k] <= '0;
      end
    end else begin
      sw_trig  <= 1'b0;
      circ_arm <= 1'b0;
      if (reg_wr && !is_loop) begin
        unique case (reg_addr)
          12'h000: begin sw_trig <= reg_wdata[0]; circ_arm <= reg_wdata[1]; end
          12'h004: begin cfg_ev_en <= reg_wdata[0]; cfg_sw_en <= reg_wdata[1]; end
          12'h008: cfg_delay      <= reg_wdata;
          12'h00C: cfg_gate_len   <= reg_wdata;
          12'h010: cfg_event_code <= reg_wdata[7:0];
          12'h014: cfg_cap_len    <= reg_wdata[LW-1:0];
          12'h018: cfg_adc_src    <= reg_wdata[N_ADC-1:0];
          12'h01C: cfg_dac_awg    <= reg_wdata[N_LOOP-1:0];
          12'h020: cfg_awg_len    <= reg_wdata[LW-1:0];
          12'h024: cfg_circ_post  <= reg_wdata[LW-1:0];
          12'h028: cfg_dac_ff     <= reg_wdata[N_LOOP-1:0];
          default: ;
        endcase
      end
      if (reg_wr && is_loop && lidx < N_LOOP && reg_addr[5:2] < 4'd10) begin
        loop_reg[lidx][reg_addr[5:2]] <= reg_wdata;
      end
    end
  end

  // Read mux.  Signed fields are sign-extended.
  always_comb begin
    rd_word = '0;
    if (!is_loop) begin
      unique case (reg_addr)
        12'h004: rd_word = {30'd0, cfg_sw_en, cfg_ev_en};
        12'h008: rd_word = cfg_delay;
        12'h00C: rd_word = cfg_gate_len;
        12'h010: rd_word = 32'(cfg_event_code);
        12'h014: rd_word = 32'(cfg_cap_len);
        12'h018: rd_word = 32'(cfg_adc_src);
        12'h01C: rd_word = 32'(cfg_dac_awg);
        12'h020: rd_word = 32'(cfg_awg_len);
        12'h024: rd_word = 32'(cfg_circ_post);
        12'h028: rd_word = 32'(cfg_dac_ff);
        12'h040: rd_word = {15'd0, st_link_up, st_n_trig};
        12'h044: rd_word = 32'(st_evr_resets);
        12'h048: rd_word = {8'd0, 8'(st_awg_playing), 8'(st_circ_frozen), 8'(st_cap_done)};
        default: rd_word = '0;
      endcase
    end else if (lidx < N_LOOP) begin
      unique case (reg_addr[5:0])
        6'h00: rd_word = {28'd0, loop_cfg[lidx].phs_reset, loop_cfg[lidx].phs_enable,
                          loop_cfg[lidx].amp_reset, loop_cfg[lidx].amp_enable};
        6'h04: rd_word = 32'(loop_cfg[lidx].amp_setpoint);
        6'h08: rd_word = 32'(loop_cfg[lidx].phs_setpoint);
        6'h0C: rd_word = 32'(loop_cfg[lidx].kp_amp);
        6'h10: rd_word = 32'(loop_cfg[lidx].ki_amp);
        6'h14: rd_word = 32'(loop_cfg[lidx].kp_phs);
        6'h18: rd_word = 32'(loop_cfg[lidx].ki_phs);
        6'h1C: rd_word = 32'(loop_cfg[lidx].rx_phase_offset);
        6'h20: rd_word = 32'(loop_cfg[lidx].tx_phase_offset);
        6'h24: rd_word = 32'(loop_adc_sel[lidx]);
        6'h28: rd_word = 32'(st_amp[lidx]);
        6'h2C: rd_word = 32'(st_phs[lidx]);
        default: rd_word = '0;
      endcase
    end
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      reg_rdata  <= '0;
      reg_rvalid <= 1'b0;
    end else begin
      reg_rvalid <= reg_rd;
      if (reg_rd) reg_rdata <= rd_word;
    end
  end

endmodule
