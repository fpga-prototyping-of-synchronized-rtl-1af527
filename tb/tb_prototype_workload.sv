// tb_prototype_workload -- the hardware prototype experiment on the full
// link: 16-bit switch words 0000000001111010 (122) for the transmitter and
// 1000010000000000 (-1024, sign-magnitude) for the receiver, k = 2^10, one
// sample per clock, information source off. The first 64 samples (the
// capture depth of the logic analyser) are printed. The run then continues
// for LONG_RUN samples as a scaled-down stand-in for the hours-long run:
// at every sample the transmitter is compared with a 64-bit reference of the
// fixed-point map, kept inside (0,k), and once the error has reached zero
// the receiver must equal the transmitter on every later sample. The
// number of distinct transmitter states seen is reported.
module tb_prototype_workload;
  import chaos_pkg::*;

  localparam int LONG_RUN = 1_000_000;

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
    repeat (LONG_RUN + 2000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // Free-running map, x' = clamp(mu x (k - x) / k), rounding toward minus
  // infinity, with mu in Q.FRAC.
  function automatic longint ref_step(longint x);
    longint v = (longint'(MU_Q) * x * ((longint'(1) << KLOG2) - x)) >>> (FRAC + KLOG2);
    if (v > 32767) v = 32767;
    if (v < -32768) v = -32768;
    return v;
  endfunction

  longint xr;
  int synced_at, n_bad;
  bit seen [int];

  initial begin
    x0_sw = 16'b0000000001111010;
    y0_sw = 16'b1000010000000000;
    info = 4'h0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    xr = 122;
    synced_at = -1;
    n_bad = 0;
    checks++;
    if (x_n != 122 || y_n != -1024) begin
      failures++; $display("FAIL initial conditions %0d %0d", x_n, y_n);
    end
    for (int n = 0; n < LONG_RUN; n++) begin
      if (n < 64) $display("n=%0d x=%0d y=%0d e=%0d", n, x_n, y_n, sync_err);
      checks++;
      if (longint'(x_n) != xr) begin
        failures++;
        if (n_bad++ < 10) $display("FAIL transmitter %0d: %0d, model %0d", n, x_n, xr);
      end
      checks++;
      if (!(x_n > 0 && x_n < 1024)) begin
        failures++;
        if (n_bad++ < 10) $display("FAIL x out of (0,k) at %0d: %0d", n, x_n);
      end
      if (synced_at >= 0) begin
        checks++;
        if (y_n != x_n || sync_err != 0) begin
          failures++;
          if (n_bad++ < 10) $display("FAIL lost synchronization at %0d", n);
        end
      end else if (y_n == x_n) synced_at = n;
      seen[int'(x_n)] = 1;
      xr = ref_step(xr);
      step = 1;
      @(negedge clk);
    end
    step = 0;
    checks++;
    if (synced_at < 0 || synced_at > 20) begin
      failures++; $display("FAIL synchronization at %0d", synced_at);
    end
    $display("synchronized at sample %0d, held for %0d samples", synced_at, LONG_RUN - synced_at);
    $display("distinct transmitter states: %0d", seen.num());
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
