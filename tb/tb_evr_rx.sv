// tb_evr_rx: drives an MRF-style stream (K28.5 commas, null events, random
// event codes) and checks that exactly the subscribed code produces one
// event_pulse each, one cycle after the word; then interrupts the stream
// (no commas, and separately a decode error) and checks that the watchdog
// drops link_up, pulses gt_rx_reset for RST_LEN cycles, suppresses events,
// counts the recovery and comes back on the next comma.
module tb_evr_rx;
  localparam int WD = 40, RL = 8;
  logic clk = 0, rst = 1;
  always #4 clk = ~clk;
  int checks = 0, failures = 0;

  logic [15:0] rx_data;
  logic [1:0]  rx_charisk;
  logic        rx_err, event_pulse, gt_rx_reset, link_up;
  logic [7:0]  event_code;
  logic [15:0] resets;

  evr_rx #(.WD_LIMIT(WD), .RST_LEN(RL)) dut (.*);

  int exp_events, got_events, rst_cycles;
  always @(posedge clk) begin
    if (event_pulse && !rst) got_events++;
    if (gt_rx_reset && !rst) rst_cycles++;
  end

  initial begin
    #400000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic send(logic [7:0] b0, bit k0, bit err);
    rx_data <= {8'($urandom), b0};
    rx_charisk <= {1'b0, k0};
    rx_err <= err;
    @(posedge clk);
  endtask

  initial begin
    rx_data = 0; rx_charisk = 0; rx_err = 0; event_code = 8'h2A;
    exp_events = 0; got_events = 0; rst_cycles = 0;
    repeat (3) @(posedge clk);
    rst <= 0;
    send(8'hBC, 1, 0);
    send(8'h00, 0, 0);
    @(posedge clk);
    checks++;
    if (!link_up) begin failures++; $display("link not up"); end
    for (int n = 0; n < 2000; n++) begin
      int r;
      r = int'($urandom_range(9));
      if (r == 0)      send(8'hBC, 1, 0);
      else if (r < 3) begin send(8'h2A, 0, 0); exp_events++; end
      else if (r == 3) send(8'h2A, 1, 0);          // K character, not an event
      else begin
        logic [7:0] b;
        b = 8'($urandom_range(255));
        send((b == 8'h2A) ? 8'h2B : b, 0, 0);
      end
      if (n % 20 == 19) send(8'hBC, 1, 0);
    end
    send(8'h00, 0, 0);
    send(8'h00, 0, 0);
    checks++;
    if (got_events != exp_events) begin failures++; $display("events %0d exp %0d", got_events, exp_events); end
    checks++;
    if (resets != 0 || rst_cycles != 0) begin failures++; $display("spurious watchdog"); end
    // Interruption: no commas.
    for (int n = 0; n < WD + 5; n++) send(8'h00, 0, 0);
    checks++;
    if (link_up || !gt_rx_reset || resets != 1) begin failures++; $display("watchdog did not fire"); end
    got_events = 0;
    send(8'h2A, 0, 0);   // event during reset must be ignored
    for (int n = 0; n < RL + 3; n++) send(8'h00, 0, 0);
    checks++;
    if (got_events != 0) begin failures++; $display("event while link down"); end
    checks++;
    if (rst_cycles != RL) begin failures++; $display("reset length %0d", rst_cycles); end
    send(8'hBC, 1, 0);
    send(8'h00, 0, 0);
    checks++;
    if (!link_up) begin failures++; $display("no recovery"); end
    // Decode error.
    send(8'h00, 0, 1);
    send(8'h00, 0, 0);
    checks++;
    if (link_up || resets != 2) begin failures++; $display("error not handled"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
