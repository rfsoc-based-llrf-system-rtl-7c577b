// llrf_top: LLRF gateware between the RF data converter and the processor.
//
// Signal flow, per the reference firmware: the converter's ADC mixers
// deliver base-band IQ for N_ADC channels (adc_valid, 16-bit I and Q).  Each
// channel is decimated by DEC and can be captured, raw or decimated, into a
// DEPTH-sample waveform memory.  Each of N_DAC loops takes the decimated IQ
// of a register-selected ADC channel (its cavity probe) through dsp_core:
// CORDIC to amplitude and phase, one PI loop each, CORDIC back to IQ.  The
// drive is interpolated by INTERP to the DAC sample rate (dac_ce strobes)
// and goes to the converter's DAC mixers as 16-bit I and Q, unless the
// channel is switched to its arbitrary waveform generator, or the generator
// output is added to the loop drive as feed-forward.  A circular
// buffer records each DAC channel.  The MRF timing stream (EVR clock domain)
// gives trigger events; a subscribed event, or a software trigger, starts a
// delay, then one trigger for every capture, generator and circular buffer,
// and an RF gate window.  Everything is set and read through llrf_regs.
//
// This design's choices: one DSP clock with sample strobes for the ADC and
// DAC streams; the loop drive is zero and both PI loops are held open
// outside the RF gate, so feedback acts within the pulse; the raw capture
// word is the ADC sample scaled by 4 to match the decimated 18-bit scale;
// the DAC word is the top 16 bits of the 18-bit drive; feed-forward is
// the generator sample added, with saturation, to the interpolated drive
// (the reference system asks for feed-forward but does not say where it
// enters).
//
// Waveform read-back: wf_sel 0..N_ADC-1 selects an ADC capture memory,
// N_ADC..N_ADC+N_DAC-1 a circular buffer; wf_data = {I, Q} two cycles after
// wf_addr/wf_sel.  Generator memories are loaded through awg_*.
module llrf_top
  import llrf_pkg::*;
#(
  parameter int N_ADC  = 8,
  parameter int N_DAC  = 2,
  parameter int DEC    = 16,
  parameter int INTERP = 8,
  parameter int DEPTH  = 65536,
  parameter int STAGES = 20,
  localparam int AW    = $clog2(DEPTH),
  localparam int SELW  = $clog2(N_ADC + N_DAC)
) (
  input  logic clk,
  input  logic rst,
  // RF data converter, ADC side (base-band IQ after the fine mixers)
  input  logic                    adc_valid,
  input  logic signed [ADC_W-1:0] adc_i [N_ADC],
  input  logic signed [ADC_W-1:0] adc_q [N_ADC],
  // RF data converter, DAC side (IQ to the fine mixers)
  input  logic                    dac_ce,
  output logic signed [ADC_W-1:0] dac_i [N_DAC],
  output logic signed [ADC_W-1:0] dac_q [N_DAC],
  output logic                    rf_gate,
  output logic                    trig_out,
  // timing transceiver (EVR clock domain)
  input  logic        clk_evr,
  input  logic        rst_evr,
  input  logic [15:0] evr_rx_data,
  input  logic [1:0]  evr_rx_charisk,
  input  logic        evr_rx_err,
  output logic        evr_gt_rx_reset,
  output logic        evr_link_up,
  // registers
  input  logic        reg_wr,
  input  logic        reg_rd,
  input  logic [11:0] reg_addr,
  input  logic [31:0] reg_wdata,
  output logic [31:0] reg_rdata,
  output logic        reg_rvalid,
  // waveform memories
  input  logic [SELW-1:0]  wf_sel,
  input  logic [AW-1:0]    wf_addr,
  output logic [2*IQ_W-1:0] wf_data,
  input  logic             awg_wr,
  input  logic [$clog2(N_DAC)-1:0] awg_sel,
  input  logic [AW-1:0]    awg_addr,
  input  logic [2*IQ_W-1:0] awg_wdata
);
  localparam int LW = AW + 1;

  // ---------------------------------------------------------------- registers
  logic              sw_trig, circ_arm, cfg_ev_en, cfg_sw_en;
  logic [31:0]       cfg_delay, cfg_gate_len;
  logic [7:0]        cfg_event_code;
  logic [LW-1:0]     cfg_cap_len, cfg_awg_len, cfg_circ_post;
  logic [N_ADC-1:0]  cfg_adc_src, st_cap_done;
  logic [N_DAC-1:0]  cfg_dac_awg, cfg_dac_ff, st_circ_frozen, st_awg_playing;
  loop_cfg_t         loop_cfg [N_DAC];
  logic [$clog2(N_ADC)-1:0] loop_adc_sel [N_DAC];
  logic [15:0]       n_trig, evr_resets;
  logic signed [IQ_W-1:0] amp_meas [N_DAC];
  logic signed [IQ_W-1:0] phs_meas [N_DAC];
  logic              link_up_dsp;

  llrf_regs #(.N_ADC(N_ADC), .N_LOOP(N_DAC), .LW(LW)) u_regs (
    .clk, .rst,
    .reg_wr, .reg_rd, .reg_addr, .reg_wdata, .reg_rdata, .reg_rvalid,
    .sw_trig, .circ_arm, .cfg_ev_en, .cfg_sw_en, .cfg_delay, .cfg_gate_len,
    .cfg_event_code, .cfg_cap_len, .cfg_adc_src, .cfg_dac_awg, .cfg_dac_ff, .cfg_awg_len,
    .cfg_circ_post, .loop_cfg, .loop_adc_sel,
    .st_n_trig(n_trig), .st_link_up(link_up_dsp), .st_evr_resets(evr_resets),
    .st_cap_done, .st_circ_frozen, .st_awg_playing,
    .st_amp(amp_meas), .st_phs(phs_meas)
  );

  // ------------------------------------------------------------------ timing
  logic       evr_event, ev_trig;
  logic [7:0] event_code_evr;
  logic [1:0] link_sync;

  // The event code is static while triggers are in use; it is sampled into
  // the EVR clock through a plain register.
  always_ff @(posedge clk_evr) event_code_evr <= cfg_event_code;

  evr_rx u_evr (
    .clk(clk_evr), .rst(rst_evr),
    .rx_data(evr_rx_data), .rx_charisk(evr_rx_charisk), .rx_err(evr_rx_err),
    .event_code(event_code_evr),
    .event_pulse(evr_event), .gt_rx_reset(evr_gt_rx_reset),
    .link_up(evr_link_up), .resets(evr_resets)
  );

  pulse_sync u_ev_sync (
    .src_clk(clk_evr), .src_rst(rst_evr), .src_pulse(evr_event),
    .dst_clk(clk), .dst_rst(rst), .dst_pulse(ev_trig)
  );

  always_ff @(posedge clk) begin
    if (rst) link_sync <= '0;
    else     link_sync <= {link_sync[0], evr_link_up};
  end
  assign link_up_dsp = link_sync[1];

  logic trig;
  trigger_gen u_trig (
    .clk, .rst,
    .ev_trig, .sw_trig, .cfg_ev_en, .cfg_sw_en, .cfg_delay, .cfg_gate_len,
    .trig, .rf_gate, .n_trig
  );
  assign trig_out = trig;

  // --------------------------------------------------------------- ADC side
  logic             dec_valid [N_ADC];
  iq_t              dec_iq    [N_ADC];
  logic [2*IQ_W-1:0] cap_rd   [N_ADC];

  for (genvar c = 0; c < N_ADC; c++) begin : g_adc
    decimator #(.R(DEC), .IW(ADC_W), .OW(IQ_W)) u_dec (
      .clk, .rst,
      .in_valid(adc_valid), .in_i(adc_i[c]), .in_q(adc_q[c]),
      .out_valid(dec_valid[c]), .out_i(dec_iq[c].i), .out_q(dec_iq[c].q)
    );

    iq_t  raw_iq, cap_iq;
    logic cap_valid;
    assign raw_iq.i  = IQ_W'(adc_i[c]) <<< (IQ_W - ADC_W);
    assign raw_iq.q  = IQ_W'(adc_q[c]) <<< (IQ_W - ADC_W);
    assign cap_iq    = cfg_adc_src[c] ? dec_iq[c] : raw_iq;
    assign cap_valid = cfg_adc_src[c] ? dec_valid[c] : adc_valid;

    wave_capture #(.DEPTH(DEPTH), .W(2*IQ_W)) u_cap (
      .clk, .rst, .trig,
      .in_valid(cap_valid), .in_data(cap_iq), .cfg_len(cfg_cap_len),
      .rd_addr(wf_addr), .rd_data(cap_rd[c]),
      .busy(), .done(st_cap_done[c])
    );
  end

  // ---------------------------------------------------------------- loops
  logic [2*IQ_W-1:0] circ_rd [N_DAC];

  // Feed-forward sum of loop drive and generator sample, saturated.
  function automatic logic signed [IQ_W-1:0] sat_add(logic signed [IQ_W-1:0] a,
                                                      logic signed [IQ_W-1:0] b);
    logic signed [IQ_W:0] s;
    s = (IQ_W+1)'(a) + (IQ_W+1)'(b);
    if (s[IQ_W] != s[IQ_W-1]) return s[IQ_W] ? {1'b1, {(IQ_W-1){1'b0}}} : {1'b0, {(IQ_W-1){1'b1}}};
    return s[IQ_W-1:0];
  endfunction

  for (genvar d = 0; d < N_DAC; d++) begin : g_loop
    loop_cfg_t cfg_g;
    always_comb begin
      cfg_g = loop_cfg[d];
      cfg_g.amp_enable = loop_cfg[d].amp_enable & rf_gate;
      cfg_g.phs_enable = loop_cfg[d].phs_enable & rf_gate;
    end

    logic core_valid;
    iq_t  core_iq, drive_iq, interp_iq, awg_iq, ff_iq, dac_iq;

    dsp_core #(.STAGES(STAGES)) u_core (
      .clk, .rst,
      .in_valid(dec_valid[loop_adc_sel[d]]), .in_iq(dec_iq[loop_adc_sel[d]]),
      .cfg(cfg_g),
      .out_valid(core_valid), .out_iq(core_iq),
      .amp_meas(amp_meas[d]), .phs_meas(phs_meas[d])
    );

    assign drive_iq = rf_gate ? core_iq : '0;

    interpolator #(.R(INTERP), .W(IQ_W)) u_interp (
      .clk, .rst,
      .in_valid(core_valid), .in_i(drive_iq.i), .in_q(drive_iq.q),
      .out_ce(dac_ce), .out_i(interp_iq.i), .out_q(interp_iq.q)
    );

    awg #(.DEPTH(DEPTH), .W(2*IQ_W)) u_awg (
      .clk, .rst,
      .wr_en(awg_wr && awg_sel == d), .wr_addr(awg_addr), .wr_data(awg_wdata),
      .trig, .out_ce(dac_ce), .cfg_len(cfg_awg_len),
      .out_data(awg_iq), .playing(st_awg_playing[d])
    );

    assign ff_iq.i = sat_add(interp_iq.i, awg_iq.i);
    assign ff_iq.q = sat_add(interp_iq.q, awg_iq.q);
    assign dac_iq  = cfg_dac_awg[d] ? awg_iq : (cfg_dac_ff[d] ? ff_iq : interp_iq);
    assign dac_i[d] = dac_iq.i[IQ_W-1 -: ADC_W];
    assign dac_q[d] = dac_iq.q[IQ_W-1 -: ADC_W];

    circ_buffer #(.DEPTH(DEPTH), .W(2*IQ_W)) u_circ (
      .clk, .rst, .arm(circ_arm), .trig,
      .in_valid(dac_ce), .in_data(dac_iq), .cfg_post(cfg_circ_post),
      .rd_addr(wf_addr), .rd_data(circ_rd[d]),
      .frozen(st_circ_frozen[d]), .triggered(), .filled()
    );
  end

  // ------------------------------------------------------ waveform read-back
  logic [SELW-1:0]   wf_sel_q;
  logic [2*IQ_W-1:0] wf_all [N_ADC + N_DAC];
  always_comb begin
    for (int c = 0; c < N_ADC; c++) wf_all[c] = cap_rd[c];
    for (int d = 0; d < N_DAC; d++) wf_all[N_ADC + d] = circ_rd[d];
  end
  always_ff @(posedge clk) begin
    wf_sel_q <= wf_sel;
    if (32'(wf_sel_q) < N_ADC + N_DAC) wf_data <= wf_all[wf_sel_q];
    else                               wf_data <= '0;
  end

endmodule
