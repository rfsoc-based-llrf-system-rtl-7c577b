// awg: arbitrary waveform generator for one DAC channel.
//
// Software loads up to DEPTH samples through the write port.  On trig (while
// idle) playback starts: on each out_ce strobe the next sample, from address
// 0 up to cfg_len-1, is presented on out_data; after the last one the output
// returns to zero and playing drops.  A trigger during playback is ignored.
//
// Timing: the memory read is synchronous; out_data takes sample n two clock
// edges after the out_ce strobe that selects it (the first strobe after the
// trigger selects sample 0).  Depth follows the 64k-sample
// waveforms of the reference system; zero output when idle is this design's
// choice.
module awg #(
  parameter int DEPTH = 65536,
  parameter int W     = 36,
  localparam int AW   = $clog2(DEPTH)
) (
  input  logic          clk,
  input  logic          rst,
  input  logic          wr_en,
  input  logic [AW-1:0] wr_addr,
  input  logic [W-1:0]  wr_data,
  input  logic          trig,
  input  logic          out_ce,
  input  logic [AW:0]   cfg_len,
  output logic [W-1:0]  out_data,
  output logic          playing
);
  logic [W-1:0] mem [DEPTH];
  logic [AW:0]  rptr;
  logic [AW:0]  len;
  logic [W-1:0] rd_q;
  logic         emit;

  always_comb begin
    len = (cfg_len > (AW+1)'(DEPTH)) ? (AW+1)'(DEPTH) : cfg_len;
  end

  always_ff @(posedge clk) begin
    if (wr_en) mem[wr_addr] <= wr_data;
    rd_q <= mem[rptr[AW-1:0]];
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      playing <= 1'b0;
      rptr    <= '0;
      emit    <= 1'b0;
    end else begin
      emit <= 1'b0;
      if (!playing) begin
        if (trig && len != 0) begin
          playing <= 1'b1;
          rptr    <= '0;
        end
      end else if (out_ce) begin
        emit <= 1'b1;
        rptr <= rptr + 1'b1;
        if (rptr + 1'b1 >= len) playing <= 1'b0;
      end
    end
  end

  // Output register: a new sample on each emitted strobe, zero when idle.
  always_ff @(posedge clk) begin
    if (rst) begin
      out_data <= '0;
    end else if (emit) begin
      out_data <= rd_q;
    end else if (!playing && out_ce) begin
      out_data <= '0;
    end
  end

endmodule
