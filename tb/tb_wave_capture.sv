// tb_wave_capture: a 256-deep capture memory records cfg_len samples of a
// counting stream with random gaps after a trigger; busy/done, the ignored
// trigger during a capture, the sample count and every stored word are
// checked by reading the memory back.  A second capture with a length above
// DEPTH must stop at DEPTH.
module tb_wave_capture;
  localparam int DEPTH = 256, W = 36, AW = 8;
  logic clk = 0, rst = 1;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic          trig, in_valid, busy, done;
  logic [W-1:0]  in_data, rd_data;
  logic [AW:0]   cfg_len;
  logic [AW-1:0] rd_addr;

  wave_capture #(.DEPTH(DEPTH), .W(W)) dut (.*);

  logic [W-1:0] ref_mem [DEPTH];
  int nwr;

  initial begin
    #2000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic run(int len, int expect_n);
    logic [W-1:0] val;
    int t0;
    trig <= 1; @(posedge clk); trig <= 0;
    @(posedge clk);
    checks++;
    if (!busy || done) begin failures++; $display("busy not raised"); end
    nwr = 0;
    val = W'($urandom);
    t0 = 0;
    while (busy) begin
      bit v;
      v = ($urandom_range(2) != 0);
      in_valid <= v;
      in_data  <= val;
      trig     <= (t0 == 5);  // ignored: a capture is in progress
      if (v) begin
        if (nwr < DEPTH) ref_mem[nwr] = val;
        nwr++;
        val = val * 3 + 1;
      end
      t0++;
      @(posedge clk);
    end
    in_valid <= 0;
    trig     <= 0;
    checks++;
    if (!done) begin failures++; $display("done not set"); end
    // read back
    for (int a = 0; a < expect_n; a++) begin
      rd_addr <= AW'(a);
      @(posedge clk); @(posedge clk);
      checks++;
      if (rd_data !== ref_mem[a]) begin
        failures++;
        if (failures < 10) $display("addr %0d got %h exp %h", a, rd_data, ref_mem[a]);
      end
    end
  endtask

  initial begin
    trig = 0; in_valid = 0; in_data = 0; cfg_len = 100; rd_addr = 0;
    repeat (3) @(posedge clk);
    rst <= 0;
    @(posedge clk);
    checks++;
    if (busy || done) begin failures++; $display("not idle after reset"); end
    run(100, 100);
    cfg_len <= 9'd300;
    @(posedge clk);
    run(300, DEPTH);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
