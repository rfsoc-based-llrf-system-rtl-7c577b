// evr_rx: event receiver back end for an MRF-compatible timing stream.
//
// Input is the 8b10b-decoded word of the transceiver, two bytes per EVR
// clock (about 8 ns): byte 0 carries the event code, byte 1 the distributed
// bus / data, and a K28.5 comma (0xBC with its K flag) appears in the byte-0
// slot of idle frames.  When byte 0 is a data byte equal to the subscribed,
// non-zero event_code, event_pulse is high for one cycle (code 0 is the
// null event).
//
// Watchdog: the stream counts as interrupted when no comma has been seen for
// WD_LIMIT cycles or the decoder flags an error (disparity or code not in
// table), e.g. after a fibre is re-plugged.  link_up then drops, events are
// suppressed, and gt_rx_reset is pulsed for RST_LEN cycles to restart the
// transceiver's receive path; link_up returns on the next comma, and the
// reset is repeated if none comes within WD_LIMIT cycles.  resets counts the
// recoveries.
//
// Event subscription and a watchdog that resets and recovers the receiver
// are the reference design's; the comma criterion, limits and counter are
// this design's choices.
module evr_rx #(
  parameter int WD_LIMIT = 1024,
  parameter int RST_LEN  = 64
) (
  input  logic        clk,
  input  logic        rst,
  input  logic [15:0] rx_data,
  input  logic [1:0]  rx_charisk,
  input  logic        rx_err,
  input  logic [7:0]  event_code,
  output logic        event_pulse,
  output logic        gt_rx_reset,
  output logic        link_up,
  output logic [15:0] resets
);
  localparam logic [7:0] K28_5 = 8'hBC;
  localparam int WW = $clog2(WD_LIMIT + 1);
  localparam int RW = $clog2(RST_LEN + 1);

  logic          comma;
  logic [WW-1:0] wd_cnt;
  logic [RW-1:0] rst_cnt;

  assign comma = rx_charisk[0] && rx_data[7:0] == K28_5 && !rx_err;

  always_ff @(posedge clk) begin
    if (rst) begin
      wd_cnt      <= '0;
      rst_cnt     <= '0;
      gt_rx_reset <= 1'b0;
      link_up     <= 1'b0;
      event_pulse <= 1'b0;
      resets      <= '0;
    end else begin
      event_pulse <= link_up && !rx_err && !rx_charisk[0] &&
                     event_code != 8'h00 && rx_data[7:0] == event_code;
      if (rst_cnt != 0) begin
        // Holding the transceiver in reset.
        rst_cnt <= rst_cnt - 1'b1;
        if (rst_cnt == RW'(1)) gt_rx_reset <= 1'b0;
        wd_cnt  <= '0;
      end else if (rx_err || wd_cnt == WW'(WD_LIMIT)) begin
        link_up     <= 1'b0;
        gt_rx_reset <= 1'b1;
        rst_cnt     <= RW'(RST_LEN);
        wd_cnt      <= '0;
        resets      <= resets + 1'b1;
      end else if (comma) begin
        link_up <= 1'b1;
        wd_cnt  <= '0;
      end else begin
        wd_cnt <= wd_cnt + 1'b1;
      end
    end
  end

endmodule
