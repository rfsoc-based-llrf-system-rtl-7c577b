// tb_awg: loads a 128-deep generator with random IQ words, plays cfg_len = 50
// of them with an output strobe every other cycle, and checks the sequence
// of words seen at each strobe (sample n two edges after its strobe), the
// playing flag, a trigger ignored during playback, and zero output after
// the end.
module tb_awg;
  localparam int DEPTH = 128, W = 36, AW = 7, LEN = 50;
  logic clk = 0, rst = 1;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic          wr_en, trig, out_ce, playing;
  logic [AW-1:0] wr_addr;
  logic [W-1:0]  wr_data, out_data;
  logic [AW:0]   cfg_len;

  awg #(.DEPTH(DEPTH), .W(W)) dut (.*);

  logic [W-1:0] ref_mem [DEPTH];
  logic [W-1:0] seen [$];

  initial begin
    #2000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // Strobe every other cycle; record out_data two edges after each strobe.
  int ce_hist;
  always @(posedge clk) begin
    if (ce_hist[1]) seen.push_back(out_data);
  end
  always @(posedge clk) ce_hist <= {ce_hist[30:0], out_ce};

  initial begin
    wr_en = 0; trig = 0; out_ce = 0; wr_addr = 0; wr_data = 0; cfg_len = LEN; ce_hist = 0;
    repeat (3) @(posedge clk);
    rst <= 0;
    for (int a = 0; a < DEPTH; a++) begin
      ref_mem[a] = {$urandom, 4'($urandom)};
      wr_en <= 1; wr_addr <= AW'(a); wr_data <= ref_mem[a];
      @(posedge clk);
    end
    wr_en <= 0;
    @(posedge clk);
    checks++;
    if (playing || out_data != 0) begin failures++; $display("not idle"); end
    trig <= 1; @(posedge clk); trig <= 0;
    checks++;
    @(posedge clk);
    if (!playing) begin failures++; $display("not playing"); end
    seen.delete();
    for (int n = 0; n < 2 * (LEN + 10); n++) begin
      out_ce <= (n % 2 == 0);
      trig <= (n == 20);
      @(posedge clk);
    end
    out_ce <= 0; trig <= 0;
    repeat (3) @(posedge clk);
    checks++;
    if (seen.size() != LEN + 10) begin failures++; $display("seen %0d", seen.size()); end
    for (int n = 0; n < seen.size(); n++) begin
      logic [W-1:0] e;
      e = (n < LEN) ? ref_mem[n] : '0;
      checks++;
      if (seen[n] !== e) begin
        failures++;
        if (failures < 10) $display("strobe %0d got %h exp %h", n, seen[n], e);
      end
    end
    checks++;
    if (playing) begin failures++; $display("still playing"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
