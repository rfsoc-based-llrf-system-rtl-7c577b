// pulse_sync: carries single-cycle pulses from one clock domain to another.
//
// Each source pulse toggles a flag; the flag is passed through a two-flop
// synchroniser into the destination clock, and every change seen there
// becomes a one-cycle pulse.  Source pulses must be at least three
// destination cycles apart.  Latency: two to three destination cycles.
// Used to bring timing events from the EVR clock to the DSP clock.
module pulse_sync (
  input  logic src_clk,
  input  logic src_rst,
  input  logic src_pulse,
  input  logic dst_clk,
  input  logic dst_rst,
  output logic dst_pulse
);
  logic tog;
  logic [2:0] sync;

  always_ff @(posedge src_clk) begin
    if (src_rst)        tog <= 1'b0;
    else if (src_pulse) tog <= ~tog;
  end

  always_ff @(posedge dst_clk) begin
    if (dst_rst) begin
      sync      <= '0;
      dst_pulse <= 1'b0;
    end else begin
      sync      <= {sync[1:0], tog};
      dst_pulse <= sync[2] ^ sync[1];
    end
  end

endmodule
