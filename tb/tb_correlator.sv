// tb_correlator -- self-checking test of the descrambler and correlation
// summation. Random received words and states are fed one per clock; for
// each the testbench counts the ones of (z ^ y) in every 4-bit group itself
// and checks counts, whole-value flags and decided bits one clock later.
// Also feeds exactly scrambled words (z = y ^ spread(info)) and checks that
// the information word comes back, and that in_valid low holds the output.
module tb_correlator;
  logic clk = 0, rst_n = 0, in_valid = 0;
  logic [15:0] z, y, rs;
  logic [3:0][2:0] s_cnt;
  logic [3:0] exact, bits;
  logic out_valid;
  int checks = 0, failures = 0;

  correlator dut (.clk, .rst_n, .in_valid, .z, .y, .out_valid, .rs, .s_cnt, .exact, .bits);

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

  logic [15:0] d;
  logic [3:0]  info;
  int c;

  initial begin
    z = '0; y = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    check("valid low after reset", out_valid, 0);
    for (int n = 0; n < 1000; n++) begin
      y = 16'($urandom);
      if (n % 2 == 0) z = 16'($urandom);
      else begin
        info = 4'($urandom);
        z = y ^ {{4{info[3]}}, {4{info[2]}}, {4{info[1]}}, {4{info[0]}}};
      end
      in_valid = 1;
      @(negedge clk);
      d = z ^ y;
      check("valid", out_valid, 1);
      check("rs", rs, d);
      for (int p = 0; p < 4; p++) begin
        c = d[4*p] + d[4*p+1] + d[4*p+2] + d[4*p+3];
        check("count", s_cnt[p], c);
        check("exact", exact[p], (c == 0 || c == 4));
        check("bit", bits[p], (c == 4));
      end
      if (n % 2 == 1) check("recovered word", bits, info);
    end
    in_valid = 0; z = ~z;
    @(negedge clk);
    check("valid drops", out_valid, 0);
    check("held rs", rs, d);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
