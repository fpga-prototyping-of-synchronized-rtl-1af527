// tb_channel_select -- self-checking test of the channel selector. Checks
// the four rows of the frequency table that are spelled out (channels 1, 2,
// 99 and 100), then random states over the whole 16-bit range against the
// index rule j = floor(clamp(s, 0, 1023) * 100 / 1024) + 1 and the band rule
// 60.0 MHz + 1.4 MHz * (j - 1), and that without a trigger the channel holds.
module tb_channel_select;
  logic clk = 0, rst_n = 0, trigger = 0;
  logic signed [15:0] state;
  logic [6:0]  chan_idx;
  logic [17:0] f_lo_khz, f_center_khz, f_hi_khz;
  int checks = 0, failures = 0;

  channel_select dut (.*);

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

  task automatic pick(input int s);
    state = 16'(s); trigger = 1;
    @(negedge clk);
    trigger = 0;
  endtask

  int s, sc, j;

  initial begin
    state = '0;
    repeat (2) @(negedge clk);
    check("reset channel", chan_idx, 1);
    rst_n = 1;
    // table rows printed in the table: j, range, centre (kHz)
    pick(0);    check("j1", chan_idx, 1);
    check("j1 lo", f_lo_khz, 60000); check("j1 c", f_center_khz, 60700); check("j1 hi", f_hi_khz, 61400);
    pick(11);   check("j2", chan_idx, 2);
    check("j2 lo", f_lo_khz, 61400); check("j2 c", f_center_khz, 62100); check("j2 hi", f_hi_khz, 62800);
    pick(1004); check("j99", chan_idx, 99);
    check("j99 lo", f_lo_khz, 197200); check("j99 c", f_center_khz, 197900); check("j99 hi", f_hi_khz, 198600);
    pick(1023); check("j100", chan_idx, 100);
    check("j100 lo", f_lo_khz, 198600); check("j100 c", f_center_khz, 199300); check("j100 hi", f_hi_khz, 200000);
    for (int n = 0; n < 1000; n++) begin
      s = int'($urandom_range(0, 65535)) - 32768;
      if (n % 3 != 0) s = int'($urandom_range(0, 1023));
      pick(s);
      sc = s < 0 ? 0 : (s > 1023 ? 1023 : s);
      j = sc * 100 / 1024 + 1;
      check("index", chan_idx, j);
      check("centre", f_center_khz, 60000 + 1400 * (j - 1) + 700);
      check("low", f_lo_khz, 60000 + 1400 * (j - 1));
      check("high", f_hi_khz, 60000 + 1400 * j);
    end
    state = 16'sd500;
    repeat (3) @(negedge clk);
    check("hold", chan_idx, j);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
