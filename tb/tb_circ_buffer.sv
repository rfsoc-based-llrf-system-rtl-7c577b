// tb_circ_buffer: a 64-deep ring records a counting stream; a trigger after
// many wraps with cfg_post = 20 must freeze it 20 samples later, so reading
// addresses 0..63 returns the 64 most recent samples in time order, 44 from
// before the trigger.  Re-arming must restart recording; cfg_post = 0 must
// freeze at the trigger.
module tb_circ_buffer;
  localparam int DEPTH = 64, W = 36, AW = 6;
  logic clk = 0, rst = 1;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic          arm, trig, in_valid, frozen, triggered, filled;
  logic [W-1:0]  in_data, rd_data;
  logic [AW:0]   cfg_post;
  logic [AW-1:0] rd_addr;

  circ_buffer #(.DEPTH(DEPTH), .W(W)) dut (.*);

  initial begin
    #2000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic case_run(int post, int pre_n);
    int v, trig_val, last;
    arm <= 1; @(posedge clk); arm <= 0;
    v = 1000;
    for (int n = 0; n < pre_n; n++) begin
      bit gap;
      gap = ($urandom_range(3) == 0);
      in_valid <= !gap;
      in_data  <= W'(v);
      if (!gap) v++;
      else n--;
      @(posedge clk);
    end
    // trigger on a cycle with a sample
    trig <= 1; in_valid <= 1; in_data <= W'(v); trig_val = v; v++;
    @(posedge clk);
    trig <= 0;
    in_valid <= 0;
    @(posedge clk);
    while (!frozen) begin
      in_valid <= 1; in_data <= W'(v); v++;
      @(posedge clk);
    end
    in_valid <= 0;
    // more samples after freeze must be ignored
    for (int n = 0; n < 10; n++) begin
      in_valid <= 1; in_data <= W'(v); v++; @(posedge clk);
    end
    in_valid <= 0;
    // the last written sample is trig_val + post - 1 (the trigger sample counts
    // as the first post-trigger sample) or trig_val - 1 for post = 0
    last = (post == 0) ? trig_val - 1 : trig_val + post - 1;
    checks++;
    if (!triggered) begin failures++; $display("triggered not set"); end
    for (int a = 0; a < DEPTH; a++) begin
      rd_addr <= AW'(a);
      @(posedge clk); @(posedge clk);
      checks++;
      if (int'(rd_data) != last - (DEPTH - 1) + a) begin
        failures++;
        if (failures < 10) $display("post %0d addr %0d got %0d exp %0d", post, a, rd_data, last - (DEPTH - 1) + a);
      end
    end
    checks++;
    if (!filled) begin failures++; $display("filled not set"); end
  endtask

  initial begin
    arm = 0; trig = 0; in_valid = 0; in_data = 0; cfg_post = 20; rd_addr = 0;
    repeat (3) @(posedge clk);
    rst <= 0;
    @(posedge clk);
    case_run(20, 150);
    cfg_post <= 0;
    case_run(0, 100);
    cfg_post <= 7'd63;
    case_run(63, 70);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
