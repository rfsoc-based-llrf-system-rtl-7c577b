// trigger_gen: common trigger and RF gate for one pulse.
//
// An enabled trigger source (timing event ev_trig or software sw_trig)
// starts a delay of cfg_delay DSP cycles; then trig pulses for one cycle
// (it starts all waveform captures and waveform playback together) and
// rf_gate goes high for cfg_gate_len cycles, the window in which the RF
// drive, and the amplifier gate, are on.  Triggers arriving before the gate
// has closed are ignored.  n_trig counts issued triggers.
//
// Timing: with cfg_delay = D, trig is raised by the (D+1)-th clock edge
// after the edge that samples the source pulse; rf_gate rises with it and
// stays high for cfg_gate_len cycles.
// Simultaneous triggering of all captures and the generator, and a gated
// drive, follow the reference system; the delay and gate-length registers
// are this design's choices.
module trigger_gen #(
  parameter int CW = 32
) (
  input  logic          clk,
  input  logic          rst,
  input  logic          ev_trig,
  input  logic          sw_trig,
  input  logic          cfg_ev_en,
  input  logic          cfg_sw_en,
  input  logic [CW-1:0] cfg_delay,
  input  logic [CW-1:0] cfg_gate_len,
  output logic          trig,
  output logic          rf_gate,
  output logic [15:0]   n_trig
);
  typedef enum logic [1:0] {IDLE, DELAY, GATE} state_t;
  state_t        state;
  logic [CW-1:0] cnt;
  logic          start;

  assign start = (ev_trig && cfg_ev_en) || (sw_trig && cfg_sw_en);

  always_ff @(posedge clk) begin
    if (rst) begin
      state   <= IDLE;
      cnt     <= '0;
      trig    <= 1'b0;
      rf_gate <= 1'b0;
      n_trig  <= '0;
    end else begin
      trig <= 1'b0;
      unique case (state)
        IDLE: if (start) begin
          state <= DELAY;
          cnt   <= cfg_delay;
        end
        DELAY: if (cnt == 0) begin
          trig    <= 1'b1;
          n_trig  <= n_trig + 1'b1;
          rf_gate <= (cfg_gate_len != 0);
          cnt     <= cfg_gate_len;
          state   <= (cfg_gate_len != 0) ? GATE : IDLE;
        end else begin
          cnt <= cnt - 1'b1;
        end
        GATE: if (cnt == CW'(1)) begin
          rf_gate <= 1'b0;
          state   <= IDLE;
        end else begin
          cnt <= cnt - 1'b1;
        end
        default: state <= IDLE;
      endcase
    end
  end

endmodule
