// tb_threshold_detector -- self-checking test of the amplitude-mode
// detector: for random errors over the whole 17-bit range and for values
// around the threshold 26 it checks |eps| and the decision |eps| >= 26 one
// clock after the sample, the valid flag, and that the outputs hold while
// no sample is presented.
module tb_threshold_detector;
  logic clk = 0, rst_n = 0, in_valid = 0;
  logic signed [16:0] eps;
  logic out_valid, r;
  logic [16:0] istar;
  int checks = 0, failures = 0;

  threshold_detector dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(string what, longint got, longint exp);
    checks++;
    if (got != exp) begin
      failures++;
      $display("FAIL %s: got %0d expected %0d", what, got, exp);
    end
  endtask

  int v, m;

  initial begin
    eps = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    check("valid after reset", out_valid, 0);
    for (int n = 0; n < 1000; n++) begin
      if (n < 120) v = n - 60;
      else if (n % 2 == 0) v = int'($urandom_range(0, 131071)) - 65536;
      else v = int'($urandom_range(0, 120)) - 60;
      eps = 17'(v); in_valid = 1;
      @(negedge clk);
      m = v < 0 ? -v : v;
      check("valid", out_valid, 1);
      check("magnitude", istar, m);
      check("decision", r, m >= 26);
    end
    in_valid = 0; eps = 17'sd5;
    @(negedge clk);
    check("valid drops", out_valid, 0);
    check("held magnitude", istar, m);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
