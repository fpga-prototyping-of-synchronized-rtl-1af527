// tb_sync_workload -- the synchronization experiment with the information
// source off, run on the full link: transmitter from 0.1 of the scale
// factor (102 of k = 1024), receiver from -1.0 of it (-1024, outside the
// transmitter's range), gain 1/2, 50 samples. Checks at every sample that
// the transmitter stays in (0,k), that the error obeys e_{n+1} = e_n / 2 up
// to one unit of rounding, that it reaches exactly zero within 20 samples
// and stays there, and that with no information the data word equals the
// broadcast state. Prints the error trace.
module tb_sync_workload;
  import chaos_pkg::*;

  logic clk = 0, rst_n = 0, load = 0, step = 0, dir = 0, info_on = 0, chan_trigger = 0;
  logic [15:0] x0_sw, y0_sw, link_z, rx_rs;
  logic [3:0]  info, rx_exact, rx_bits;
  logic [3:0][2:0] rx_cnt;
  state_t x_n, y_n, link_state;
  logic signed [16:0] sync_err;
  logic rx_valid;
  comp_e comp_mode = COMP_XOR;
  logic det_valid, det_r;
  logic [16:0] det_istar;
  logic [6:0] gbs_chan, abs_chan;
  logic [17:0] gbs_f_lo_khz, gbs_f_center_khz, gbs_f_hi_khz;
  logic [17:0] abs_f_lo_khz, abs_f_center_khz, abs_f_hi_khz;
  logic signed [18:0] chan_err_khz;
  int checks = 0, failures = 0;

  uas_link_top dut (.*);

  always #12.5 clk = ~clk;

  initial begin
    repeat (1000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int e_prev, e_now, synced_at;

  initial begin
    x0_sw = 16'd102;                 // 0.1 * 1024
    y0_sw = 16'h8000 | 16'd1024;     // -1.0 * 1024, sign-magnitude
    info = 4'hf;
    repeat (2) @(negedge clk);
    rst_n = 1;
    synced_at = -1;
    checks++;
    if (x_n != 102 || y_n != -1024) begin
      failures++; $display("FAIL initial conditions %0d %0d", x_n, y_n);
    end
    for (int n = 0; n < 50; n++) begin
      e_now = int'(sync_err);
      $display("n=%0d x=%0d y=%0d e=%0d", n, x_n, y_n, e_now);
      checks++;
      if (e_now != int'(y_n) - int'(x_n)) begin failures++; $display("FAIL error output"); end
      checks++;
      if (!(x_n > 0 && x_n < 1024)) begin failures++; $display("FAIL x out of (0,k)"); end
      checks++;
      if (link_z != 16'(link_state)) begin failures++; $display("FAIL data word with source off"); end
      if (n > 0) begin
        checks++;
        if (2 * e_now - e_prev > 2 || 2 * e_now - e_prev < -2) begin
          failures++; $display("FAIL error law %0d -> %0d", e_prev, e_now);
        end
      end
      if (synced_at >= 0) begin
        checks++;
        if (e_now != 0) begin failures++; $display("FAIL lost synchronization"); end
      end else if (e_now == 0) synced_at = n;
      e_prev = e_now;
      step = 1;
      @(negedge clk);
    end
    step = 0;
    checks++;
    if (synced_at < 0 || synced_at > 20) begin
      failures++; $display("FAIL synchronization at %0d", synced_at);
    end
    $display("synchronized at sample %0d", synced_at);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
