// tb_interpolator: drives one input sample every R output strobes (strobe
// every other cycle, as from a DAC at twice the DSP rate) and checks every
// output against x[n-1] + k*(x[n]-x[n-1])/R computed independently, then
// checks that the last input is held when inputs stop.
module tb_interpolator;
  localparam int R = 8, W = 18, NIN = 300;
  logic clk = 0, rst = 1;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic                in_valid, out_ce;
  logic signed [W-1:0] in_i, in_q, out_i, out_q;
  interpolator #(.R(R), .W(W)) dut (.*);

  int xi [$], xq [$];

  initial begin
    #10000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    in_valid = 0; out_ce = 0; in_i = 0; in_q = 0;
    xi.push_back(0); xq.push_back(0);
    repeat (3) @(posedge clk);
    rst <= 0;
    @(posedge clk);
    for (int n = 0; n < NIN; n++) begin
      int a, b;
      a = int'($urandom_range(200000)) - 100000;
      b = int'($urandom_range(200000)) - 100000;
      // new input, then R strobes on alternate cycles
      in_valid <= 1; in_i <= W'(a); in_q <= W'(b);
      @(posedge clk);
      in_valid <= 0;
      xi.push_back(a); xq.push_back(b);
      for (int k = 0; k < R; k++) begin
        out_ce <= 1; @(posedge clk); out_ce <= 0; @(posedge clk);
        // output now reflects this strobe
        begin
          int p, c, ep, eq2;
          p = xi[xi.size() - 2]; c = xi[xi.size() - 1];
          ep = p + ((c - p) * k >>> 3);
          p = xq[xq.size() - 2]; c = xq[xq.size() - 1];
          eq2 = p + ((c - p) * k >>> 3);
          checks++;
          if (int'(out_i) != ep || int'(out_q) != eq2) begin
            failures++;
            if (failures < 10) $display("n=%0d k=%0d got %0d %0d exp %0d %0d", n, k, out_i, out_q, ep, eq2);
          end
        end
      end
    end
    // Hold: strobes without input.
    for (int k = 0; k < 3 * R; k++) begin
      out_ce <= 1; @(posedge clk); out_ce <= 0; @(posedge clk);
    end
    checks++;
    if (int'(out_i) != xi[xi.size() - 1] || int'(out_q) != xq[xq.size() - 1]) begin
      failures++;
      $display("hold: got %0d exp %0d", out_i, xi[xi.size() - 1]);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
