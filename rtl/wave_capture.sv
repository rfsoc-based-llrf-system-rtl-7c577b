// wave_capture: triggered waveform capture memory for one ADC channel.
//
// On trig (while idle) the buffer starts recording: each in_valid sample is
// written at addresses 0, 1, 2, ... until cfg_len samples (at most DEPTH)
// are stored; then done is raised and stays high until the next trigger.
// A trigger during a capture is ignored.  The memory is a plain array with
// one write port (capture) and one synchronous read port (read-back by
// software: rd_data is mem[rd_addr] one cycle later), so it maps onto block
// or ultra RAM.  The sample word is W bits (an IQ pair by default); the
// caller chooses whether it is the raw or the decimated base-band stream.
//
// Depth follows the 64k-sample IQ waveforms of the reference system; the
// trigger/length/done protocol is this design's choice.
module wave_capture #(
  parameter int DEPTH = 65536,
  parameter int W     = 36,
  localparam int AW   = $clog2(DEPTH)
) (
  input  logic          clk,
  input  logic          rst,
  input  logic          trig,
  input  logic          in_valid,
  input  logic [W-1:0]  in_data,
  input  logic [AW:0]   cfg_len,
  input  logic [AW-1:0] rd_addr,
  output logic [W-1:0]  rd_data,
  output logic          busy,
  output logic          done
);
  logic [W-1:0] mem [DEPTH];
  logic [AW:0]  wptr;
  logic [AW:0]  len;

  always_comb begin
    len = (cfg_len > (AW+1)'(DEPTH)) ? (AW+1)'(DEPTH) : cfg_len;
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      busy <= 1'b0;
      done <= 1'b0;
      wptr <= '0;
    end else if (!busy) begin
      if (trig) begin
        busy <= (len != 0);
        done <= (len == 0);
        wptr <= '0;
      end
    end else if (in_valid) begin
      wptr <= wptr + 1'b1;
      if (wptr + 1'b1 >= len) begin
        busy <= 1'b0;
        done <= 1'b1;
      end
    end
  end

  always_ff @(posedge clk) begin
    if (busy && in_valid) mem[wptr[AW-1:0]] <= in_data;
    rd_data <= mem[rd_addr];
  end

endmodule
