// tb_decimator: feeds random 16-bit IQ samples with random gaps in in_valid
// and checks each output against the sum of the last R inputs shifted to 18
// bits, and that exactly one output comes per R inputs, one cycle after the
// R-th input.
module tb_decimator;
  localparam int R = 16, IW = 16, OW = 18, NBLK = 200;
  logic clk = 0, rst = 1;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic                 in_valid, out_valid;
  logic signed [IW-1:0] in_i, in_q;
  logic signed [OW-1:0] out_i, out_q;

  decimator #(.R(R), .IW(IW), .OW(OW)) dut (.*);

  longint si, sq;
  int cnt_in, n_out;
  longint ei [$], eq [$];
  int last_in_cycle, cyc;

  initial begin
    #10000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) begin
    cyc++;
    if (out_valid && !rst) begin
      checks++;
      n_out++;
      if (ei.size() == 0) begin
        failures++;
      end else begin
        longint a, b;
        a = ei.pop_front(); b = eq.pop_front();
        if (longint'(out_i) != a || longint'(out_q) != b || cyc != last_in_cycle + 2) begin
          failures++;
          if (failures < 10) $display("got %0d %0d exp %0d %0d (cycle %0d/%0d)", out_i, out_q, a, b, cyc, last_in_cycle);
        end
      end
    end
  end

  initial begin
    in_valid = 0; in_i = 0; in_q = 0; si = 0; sq = 0; cnt_in = 0; n_out = 0; cyc = 0;
    repeat (3) @(posedge clk);
    rst <= 0;
    for (int n = 0; n < NBLK * R; n++) begin
      int a, b;
      while ($urandom_range(3) == 0) begin in_valid <= 0; @(posedge clk); end
      a = int'($urandom_range(65535)) - 32768;
      b = (n < R) ? 32767 : int'($urandom_range(65535)) - 32768;
      in_valid <= 1; in_i <= IW'(a); in_q <= IW'(b);
      si += a; sq += b; cnt_in++;
      if (cnt_in == R) begin
        ei.push_back(si >>> 2); eq.push_back(sq >>> 2);
        si = 0; sq = 0; cnt_in = 0;
        last_in_cycle = cyc + 1;  // edge that samples the R-th input
      end
      @(posedge clk);
    end
    in_valid <= 0;
    repeat (5) @(posedge clk);
    checks++;
    if (n_out != NBLK) begin failures++; $display("outputs %0d", n_out); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
