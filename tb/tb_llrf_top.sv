// tb_llrf_top: end-to-end test of the LLRF gateware at its default size
// (8 ADC channels, 2 loops/DACs, decimation 16, interpolation 8, 64k-sample
// memories).
//
// Around the design: a DSP clock (4 ns) with an ADC sample every cycle and a
// DAC strobe every other cycle; an EVR clock (8 ns) carrying an MRF-style
// stream with commas; and a cavity model per loop that low-pass filters the
// DAC drive, scales it by 0.7 and rotates it by a loop-specific angle, and
// feeds it back into the ADC channel that loop is set to read.  The other
// ADC channels carry random noise.
//
// Sequence and checks:
//  1. event-triggered pulse, both loops closed: the measured amplitude and
//     phase of each loop, read from the registers late in the pulse, must be
//     on their setpoints; the drive must be zero outside the RF gate; the
//     raw capture of one ADC channel must equal the samples fed to it from
//     the trigger on, and the base-band capture of another must equal the
//     16-sample means of its input; the circular buffer must freeze and
//     return the DAC samples around the trigger.
//  2. software-triggered pulse with DAC 1 switched to the waveform
//     generator: DAC 1 must play the loaded samples in order; DAC 0 in
//     feed-forward mode: its word minus the loop drive must be its loaded
//     generator samples, in order.
//  3. timing stream interrupted: the EVR watchdog must reset the receiver,
//     count the recovery, and the link must come back.
// Each mechanism (event trigger, software trigger, RF gate, loop settling,
// raw capture, base-band capture, circular-buffer freeze, waveform
// playback, feed-forward, EVR watchdog recovery) is counted; one that never
// happened is a failure.
module tb_llrf_top;
  import llrf_pkg::*;
  localparam int N_ADC = 8, N_DAC = 2, DEPTH = 65536, AW = 16;
  localparam real PI = 3.14159265358979;

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

  // ------------------------------------------------------------ counters
  int n_ev_trig, n_sw_trig, n_gate, n_settle, n_raw, n_bb, n_circ, n_awg, n_ff, n_wd;

  initial begin
    #3000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ----------------------------------------------------------- EVR stream
  bit stream_off;
  int evr_cnt, ev_req, ev_sent;
  always @(posedge clk_evr) begin
    evr_cnt <= evr_cnt + 1;
    if (stream_off) begin
      evr_rx_data <= 16'h0000; evr_rx_charisk <= 2'b00;
    end else if (ev_sent != ev_req) begin
      evr_rx_data <= 16'h002A; evr_rx_charisk <= 2'b00;
      ev_sent <= ev_req;
    end else if (evr_cnt % 8 == 0) begin
      evr_rx_data <= 16'h00BC; evr_rx_charisk <= 2'b01;
    end else begin
      evr_rx_data <= 16'h0000; evr_rx_charisk <= 2'b00;
    end
  end

  // ---------------------------------------------------------- plant model
  int  loop_ch [N_DAC] = '{0, 3};
  real rot_deg [N_DAC] = '{50.0, -120.0};
  real cav_i [N_DAC], cav_q [N_DAC];
  int  cyc;
  logic signed [ADC_W-1:0] adc_hist_i [N_ADC][$];
  logic signed [ADC_W-1:0] adc_hist_q [N_ADC][$];
  bit  gate_violation;
  int  gate_low;

  always @(posedge clk) begin
    cyc <= cyc + 1;
    dac_ce <= (cyc % 2 == 0);
    for (int d = 0; d < N_DAC; d++) begin
      real r, ti, tq;
      r  = rot_deg[d] / 180.0 * PI;
      ti = 0.7 * (dac_i[d] * $cos(r) - dac_q[d] * $sin(r));
      tq = 0.7 * (dac_i[d] * $sin(r) + dac_q[d] * $cos(r));
      cav_i[d] = cav_i[d] + (ti - cav_i[d]) / 32.0;
      cav_q[d] = cav_q[d] + (tq - cav_q[d]) / 32.0;
    end
    for (int c = 0; c < N_ADC; c++) begin
      logic signed [ADC_W-1:0] vi, vq;
      vi = ADC_W'(int'($urandom_range(200)) - 100);
      vq = ADC_W'(int'($urandom_range(200)) - 100);
      for (int d = 0; d < N_DAC; d++) if (c == loop_ch[d]) begin
        vi = ADC_W'(int'(cav_i[d]));
        vq = ADC_W'(int'(cav_q[d]));
      end
      adc_i[c] <= vi;
      adc_q[c] <= vq;
    end
    adc_valid <= !rst;
    // the loop drive must be zero once the gate has been closed for longer
    // than the interpolation delay
    gate_low <= rf_gate ? 0 : gate_low + 1;
    if (gate_low > 64 && (dac_i[0] != 0 || dac_q[0] != 0)) gate_violation = 1;
  end

  // Record the ADC words the design samples from the trigger on.
  bit rec_on;
  always @(posedge clk) begin
    if (trig_out && !rst) rec_on = 1;
    if (((trig_out && !rst) || rec_on) && adc_valid) begin
      for (int c = 0; c < N_ADC; c++) begin
        if (adc_hist_i[c].size() < 2048) begin
          adc_hist_i[c].push_back(adc_i[c]);
          adc_hist_q[c].push_back(adc_q[c]);
        end
      end
    end
  end

  // DAC 1 samples (strobed) and circular-buffer reference.
  logic [2*IQ_W-1:0] dac1_seen [$];
  logic [2*IQ_W-1:0] ff_seen [$];
  bit rec_dac1;
  logic [2*IQ_W-1:0] dac0_hist [$];
  int dac0_trig_idx;
  always @(posedge clk) begin
    if (dac_ce) begin
      dac0_hist.push_back({IQ_W'(dut.g_loop[0].dac_iq.i), IQ_W'(dut.g_loop[0].dac_iq.q)});
      if (rec_dac1) begin
        dac1_seen.push_back({IQ_W'(dac_i[1]), IQ_W'(dac_q[1])});
        // feed-forward part of DAC 0: output word minus the loop drive
        ff_seen.push_back({IQ_W'(dut.g_loop[0].dac_iq.i - dut.g_loop[0].interp_iq.i),
                           IQ_W'(dut.g_loop[0].dac_iq.q - dut.g_loop[0].interp_iq.q)});
      end
    end
    if (trig_out && !rst && dac0_trig_idx < 0) dac0_trig_idx = dac0_hist.size() + (dac_ce ? 0 : 0);
  end

  // ------------------------------------------------------------ bus tasks
  task automatic wr(logic [11:0] a, logic [31:0] d);
    @(negedge clk);
    reg_wr = 1; reg_addr = a; reg_wdata = d;
    @(negedge clk);
    reg_wr = 0;
  endtask

  task automatic rd(logic [11:0] a, output logic [31:0] d);
    @(negedge clk);
    reg_rd = 1; reg_addr = a;
    @(negedge clk);
    reg_rd = 0;
    d = reg_rdata;
  endtask

  task automatic wf_read(int sel, int a, output logic [2*IQ_W-1:0] d);
    @(negedge clk);
    wf_sel = 4'(sel); wf_addr = AW'(a);
    @(negedge clk);
    @(negedge clk);
    d = wf_data;
  endtask

  function automatic real wrapd(real d, real m);
    while (d >  m/2) d -= m;
    while (d < -m/2) d += m;
    return d;
  endfunction
  function automatic real rabs(real v);
    return (v < 0.0) ? -v : v;
  endfunction

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  // ------------------------------------------------------------- sequence
  localparam int GATE = 12000, DELAY = 20, CAPLEN = 512, POST = 300, AWGLEN = 200;
  int amp_sp [N_DAC] = '{40000, 25000};
  int phs_sp [N_DAC] = '{-20000, 70000};
  logic [2*IQ_W-1:0] awg_ref [AWGLEN];
  logic [2*IQ_W-1:0] ff_ref [AWGLEN];

  initial begin
    logic [31:0] v;
    logic [2*IQ_W-1:0] w;
    int t0;
    adc_valid = 0; dac_ce = 0; cyc = 0; evr_cnt = 0; ev_req = 0; ev_sent = 0; stream_off = 0;
    reg_wr = 0; reg_rd = 0; reg_addr = 0; reg_wdata = 0; wf_sel = 0; wf_addr = 0;
    awg_wr = 0; awg_sel = 0; awg_addr = 0; awg_wdata = 0; evr_rx_err = 0;
    evr_rx_data = 0; evr_rx_charisk = 0; dac0_trig_idx = -1;
    for (int d = 0; d < N_DAC; d++) begin cav_i[d] = 0; cav_q[d] = 0; end
    for (int c = 0; c < N_ADC; c++) begin adc_i[c] = 0; adc_q[c] = 0; end
    n_ev_trig = 0; n_sw_trig = 0; n_gate = 0; n_settle = 0; n_raw = 0; n_bb = 0;
    n_circ = 0; n_awg = 0; n_ff = 0; n_wd = 0; gate_violation = 0; gate_low = 0;
    rec_on = 0; rec_dac1 = 0;
    repeat (4) @(posedge clk_evr);
    rst_evr = 0;
    repeat (4) @(negedge clk);
    rst = 0;

    // ---------------- configuration
    wr(12'h004, 32'h3);              // event and software triggers
    wr(12'h008, DELAY);
    wr(12'h00C, GATE);
    wr(12'h010, 32'h2A);
    wr(12'h014, CAPLEN);
    wr(12'h018, 32'h0000_0008);      // channel 3 base-band, others raw
    wr(12'h01C, 32'h0);
    wr(12'h020, AWGLEN);
    wr(12'h024, POST);
    for (int d = 0; d < N_DAC; d++) begin
      logic [11:0] b;
      b = 12'h100 + 12'(64 * d);
      wr(b + 12'h04, 32'(amp_sp[d]));
      wr(b + 12'h08, 32'(phs_sp[d]));
      wr(b + 12'h0C, 32'd1024);
      wr(b + 12'h10, 32'd3000);
      wr(b + 12'h14, 32'd1024);
      wr(b + 12'h18, 32'd3000);
      wr(b + 12'h1C, 32'd1000 * (d + 1));
      wr(b + 12'h20, 32'd5000 * (d + 1));
      wr(b + 12'h24, 32'(loop_ch[d]));
      wr(b + 12'h00, 32'h5);         // both loops enabled
    end
    for (int a = 0; a < AWGLEN; a++) begin
      awg_ref[a] = {IQ_W'((a + 1) * 300), IQ_W'(-(a + 1) * 200)};
      @(negedge clk);
      awg_wr = 1; awg_sel = 1; awg_addr = AW'(a); awg_wdata = awg_ref[a];
    end
    for (int a = 0; a < AWGLEN; a++) begin
      ff_ref[a] = {IQ_W'((a + 1) * 48), IQ_W'(-(a + 1) * 36)};
      @(negedge clk);
      awg_wr = 1; awg_sel = 0; awg_addr = AW'(a); awg_wdata = ff_ref[a];
    end
    @(negedge clk);
    awg_wr = 0;
    wr(12'h000, 32'h2);              // arm circular buffers

    // link up?
    repeat (200) @(negedge clk);
    rd(12'h040, v);
    check(v[16], "timing link up");

    // ---------------- pulse 1: timing event, closed loops
    @(posedge clk_evr);
    ev_req++;
    t0 = cyc;
    while (!trig_out) @(posedge clk);
    n_ev_trig++;
    repeat (GATE - 400) @(posedge clk);
    check(rf_gate, "gate open during pulse");
    for (int d = 0; d < N_DAC; d++) begin
      logic [31:0] a, p;
      logic [11:0] b;
      b = 12'h100 + 12'(64 * d);
      rd(b + 12'h28, a);
      rd(b + 12'h2C, p);
      $display("loop %0d: amp %0d (sp %0d) phase %0d (sp %0d)", d, $signed(a), amp_sp[d], $signed(p), phs_sp[d]);
      if (rabs(real'($signed(a)) - amp_sp[d]) < 100 &&
          rabs(wrapd(real'($signed(p)) - phs_sp[d], 262144.0)) < 100) n_settle++;
      else begin failures++; $display("FAIL: loop %0d not settled", d); end
      checks++;
    end
    while (rf_gate) @(posedge clk);
    n_gate++;
    repeat (600) @(posedge clk);
    check(dac_i[0] == 0 && dac_q[0] == 0 && dac_i[1] == 0 && dac_q[1] == 0, "drive zero after gate");
    check(!gate_violation, "no drive outside gate");

    // captures
    rd(12'h048, v);
    check(v[7:0] == 8'hFF, "all ADC captures done");
    check(v[9:8] == 2'b11, "circular buffers frozen");
    // raw capture of channel 1 vs recorded input (raw word = ADC word * 4)
    // (the recording starts within a few samples of the capture; find the
    // offset, then all 64 words must match)
    begin
      int best;
      logic [2*IQ_W-1:0] cw [64];
      best = -1;
      for (int a = 0; a < 64; a++) wf_read(1, a, cw[a]);
      for (int off = 0; off < 4 && best < 0; off++) begin
        int bad;
        bad = 0;
        for (int a = 0; a < 64; a++)
          if (cw[a] !== {IQ_W'(adc_hist_i[1][a + off]) <<< 2, IQ_W'(adc_hist_q[1][a + off]) <<< 2}) bad++;
        if (bad == 0) best = off;
      end
      check(best >= 0, "raw capture matches ADC input");
      if (best >= 0) n_raw++;
    end
    // base-band capture of channel 3: 16-sample means.  The first decimated
    // sample after the trigger ends a block that may have started before it,
    // so align on the block boundary found in the recorded stream.
    begin
      int best;
      best = -1;
      for (int off = 0; off < 16 && best < 0; off++) begin
        int ok;
        ok = 1;
        for (int a = 1; a < 20; a++) begin
          longint si, sq;
          si = 0; sq = 0;
          for (int k = 0; k < 16; k++) begin
            si += longint'(adc_hist_i[3][off + 16 * (a - 1) + k]);
            sq += longint'(adc_hist_q[3][off + 16 * (a - 1) + k]);
          end
          wf_read(3, a, w);
          if (w !== {IQ_W'(si >>> 2), IQ_W'(sq >>> 2)}) begin ok = 0; break; end
        end
        if (ok != 0) best = off;
      end
      check(best >= 0, "base-band capture matches 16-sample means");
      if (best >= 0) n_bb++;
    end
    // circular buffer of DAC 0: the newest DEPTH samples, last one POST-1
    // strobes after the trigger strobe; compare the 100 samples before the end.
    begin
      int bad, last_idx;
      bad = 0;
      last_idx = dac0_trig_idx + POST - 1;
      for (int k = 0; k < 100; k++) begin
        wf_read(N_ADC, DEPTH - 1 - k, w);
        if (w !== dac0_hist[last_idx - k]) bad++;
      end
      check(bad == 0, "circular buffer holds the DAC samples around the trigger");
      if (bad == 0) n_circ++;
    end

    // ---------------- pulse 2: software trigger, DAC 1 on the generator,
    // DAC 0 loop drive plus its generator as feed-forward
    wr(12'h01C, 32'h2);
    wr(12'h028, 32'h1);
    ff_seen.delete();
    wr(12'h000, 32'h2);              // re-arm circular buffers
    dac1_seen.delete();
    rec_dac1 = 1;
    wr(12'h000, 32'h1);
    while (!trig_out) @(posedge clk);
    n_sw_trig++;
    while (rf_gate) @(posedge clk);
    n_gate++;
    rec_dac1 = 0;
    // DAC 1 output: zero, then the AWGLEN loaded samples (top 16 bits of
    // each 18-bit word), then zero again.
    begin
      int first, bad, nz;
      first = -1; bad = 0; nz = 0;
      for (int k = 0; k < dac1_seen.size(); k++) if (dac1_seen[k] != 0) begin
        nz++;
        if (first < 0) first = k;
      end
      check(first >= 0 && nz == AWGLEN, $sformatf("generator played %0d samples", nz));
      for (int a = 0; a < AWGLEN && first >= 0 && first + a < dac1_seen.size(); a++) begin
        logic [2*IQ_W-1:0] e;
        e = {IQ_W'($signed(awg_ref[a][2*IQ_W-1:IQ_W]) >>> 2), IQ_W'($signed(awg_ref[a][IQ_W-1:0]) >>> 2)};
        if (dac1_seen[first + a] !== e) bad++;
      end
      check(bad == 0, "generator samples in order");
      if (bad == 0 && nz == AWGLEN) n_awg++;
    end
    check(dac_i[1] == 0 && dac_q[1] == 0, "generator idle output zero");
    // DAC 0: the feed-forward part is zero, then the AWGLEN loaded samples
    begin
      int first, bad, nz;
      first = -1; bad = 0; nz = 0;
      for (int k = 0; k < ff_seen.size(); k++) if (ff_seen[k] != 0) begin
        nz++;
        if (first < 0) first = k;
      end
      check(first >= 0 && nz == AWGLEN, $sformatf("feed-forward added %0d samples", nz));
      for (int a = 0; a < AWGLEN && first >= 0 && first + a < ff_seen.size(); a++)
        if (ff_seen[first + a] !== ff_ref[a]) bad++;
      check(bad == 0, "feed-forward samples in order");
      if (bad == 0 && nz == AWGLEN) n_ff++;
    end
    rd(12'h040, v);
    check(v[15:0] == 16'd2, "two triggers counted");

    // ---------------- timing stream interruption
    @(posedge clk_evr);
    stream_off <= 1;
    repeat (1100) @(posedge clk_evr);
    check(!evr_link_up, "link down after interruption");
    stream_off <= 0;
    repeat (200) @(posedge clk_evr);
    check(evr_link_up, "link recovered");
    rd(12'h044, v);
    if (v >= 1) n_wd++;
    check(v >= 1, "watchdog reset counted");

    // ---------------- mechanisms seen
    $display("events=%0d sw=%0d gates=%0d settled=%0d raw=%0d bb=%0d circ=%0d awg=%0d ff=%0d wd=%0d",
             n_ev_trig, n_sw_trig, n_gate, n_settle, n_raw, n_bb, n_circ, n_awg, n_ff, n_wd);
    check(n_ev_trig > 0, "event trigger happened");
    check(n_sw_trig > 0, "software trigger happened");
    check(n_gate > 0, "RF gate happened");
    check(n_settle == N_DAC, "loops settled");
    check(n_raw > 0, "raw capture happened");
    check(n_bb > 0, "base-band capture happened");
    check(n_circ > 0, "circular buffer freeze happened");
    check(n_awg > 0, "waveform playback happened");
    check(n_ff > 0, "feed-forward happened");
    check(n_wd > 0, "watchdog recovery happened");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
