// tb_additive_workload -- the information-on experiment of the amplitude
// scheme on the full link: transmitter from 0.1 k (102), receiver from
// -1.0 k (-1024), gain 1/2, a fixed binary pattern (0110101, each bit
// held for eight samples) added with amplitude 0.05 k (51), 50 samples. The
// receiver is driven by the perturbed word itself. Every sample the states,
// the error and the detector output are compared with a model computed here;
// the trace of bit, |eps| and decision is printed. From sample 10 on, when
// the start-up transient has died, at least 70 percent of the decisions must
// match the bit that was sent.
module tb_additive_workload;
  import chaos_pkg::*;
  localparam longint MU = 15155, RHO = 2048, KK = 1024;

  logic clk = 0, rst_n = 0, load = 0, step = 0, dir = 0, info_on = 0, chan_trigger = 0;
  logic [15:0] x0_sw, y0_sw, link_z, rx_rs;
  logic [3:0]  info, rx_exact, rx_bits;
  logic [3:0][2:0] rx_cnt;
  state_t x_n, y_n, link_state;
  logic signed [16:0] sync_err;
  logic rx_valid;
  comp_e comp_mode;
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

  function automatic longint fmap(longint s);
    return (MU * s * (KK - s)) >>> 22;
  endfunction

  function automatic longint rx_next(longint y, longint x);
    longint e, v;
    e = y - x;
    v = (MU * y * (KK - y) + (MU * (e + 2 * x - KK) + RHO * KK) * e) >>> 22;
    if (v > 32767) v = 32767;
    if (v < -32768) v = -32768;
    return v;
  endfunction

  task automatic check(string what, longint got, longint exp);
    checks++;
    if (got != exp) begin
      failures++;
      $display("FAIL %s: got %0d expected %0d", what, got, exp);
    end
  endtask

  localparam logic [6:0] PATTERN = 7'b0110101;   // sent MSB first
  longint x, y, z, e;
  int agree, counted;

  initial begin
    comp_mode = COMP_ADD; info_on = 1; info = '0;
    x0_sw = 16'd102;
    y0_sw = 16'h8000 | 16'd1024;
    repeat (2) @(negedge clk);
    rst_n = 1;
    x = 102; y = -1024; agree = 0; counted = 0;
    for (int n = 0; n < 50; n++) begin
      if (n % 8 == 0) info = {3'b000, PATTERN[6 - n / 8]};
      z = x + (info[0] ? 51 : 0);
      step = 1;
      #1;
      e = y - z;
      check("x_n", x_n, x);
      check("y_n", y_n, y);
      check("link word", link_z, z);
      check("error", sync_err, e);
      @(negedge clk);
      check("detector valid", det_valid, 1);
      check("i*", det_istar, e < 0 ? -e : e);
      check("r", det_r, (e >= 26 || e <= -26));
      $display("n=%0d i=%0d i*=%0d r=%0d", n, info[0], det_istar, det_r);
      if (n >= 10) begin
        counted++;
        if (det_r == info[0]) agree++;
      end
      y = rx_next(y, z);
      x = fmap(x);
    end
    step = 0;
    $display("decisions matching the sent bit from sample 10: %0d of %0d", agree, counted);
    checks++;
    if (agree * 10 < counted * 7) begin
      failures++; $display("FAIL detection below 70 percent");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
