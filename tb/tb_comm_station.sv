// tb_comm_station -- self-checking test of one station, with the far end
// modelled in the testbench.
//
// Receive phase: the station starts from the switch word 1000010000000000
// (sign-magnitude -1024) while the modelled transmitter starts from 122 and
// sends random 4-bit information words from the first sample. Every sample
// the station's state is compared with a reference receiver computed here,
// the error must shrink by the gain 1/2 (up to one unit of rounding), the
// error must reach zero and stay there, the correlator must show fractional
// values before that and return the information word exactly after it.
// Transmit phase: the station runs freely, its broadcast words must match
// the free map and the XOR-scrambled word, and the correlator must be idle.
// Amplitude phase: the station receives again, now driven by the data word
// z = x + 51*i; its state, error and detector output (|y - z| and the
// decision |y - z| >= 26) are compared with the model every sample.
// Channel selection is checked against the index rule.
module tb_comm_station;
  import chaos_pkg::*;
  localparam longint MU = 15155, RHO = 2048, KK = 1024;

  logic clk = 0, rst_n = 0, load = 0, step = 0, info_on = 0, chan_trigger = 0;
  role_e role;
  comp_e comp_mode;
  logic det_valid, det_r;
  logic [16:0] det_istar;
  logic [15:0] ic_sm, bcast_z, partner_z, rx_rs;
  logic [3:0]  info, rx_exact, rx_bits;
  logic [3:0][2:0] rx_cnt;
  state_t bcast_state, partner_state, state;
  logic signed [16:0] sync_err;
  logic rx_valid;
  logic [6:0] chan_idx;
  logic [17:0] f_lo_khz, f_center_khz, f_hi_khz;
  int checks = 0, failures = 0;

  comm_station dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (3000) @(posedge clk);
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

  function automatic logic [15:0] spread(logic [3:0] i);
    return {{4{i[3]}}, {4{i[2]}}, {4{i[1]}}, {4{i[0]}}};
  endfunction

  function automatic longint chan_of(longint s);
    longint c;
    c = s < 0 ? 0 : (s > 1023 ? 1023 : s);
    return c * 100 / 1024 + 1;
  endfunction

  task automatic check(string what, longint got, longint exp);
    checks++;
    if (got != exp) begin
      failures++;
      $display("FAIL %s: got %0d expected %0d", what, got, exp);
    end
  endtask

  longint x, y, e_prev, e_now;
  logic [15:0] zq;
  logic [3:0]  info_prev;
  int synced_at, fringes, recovered;

  initial begin
    role = ROLE_RX; comp_mode = COMP_XOR; ic_sm = 16'h8400; info = '0;
    partner_state = '0; partner_z = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    check("sign-magnitude initial condition", state, -1024);
    x = 122; y = -1024; synced_at = -1; fringes = 0; recovered = 0;
    info_on = 1;
    for (int n = 0; n < 200; n++) begin
      if (n % 8 == 0) info = 4'($urandom);
      partner_state = 16'(x);
      zq = 16'(x) ^ spread(info);
      partner_z = zq;
      step = 1;
      #1;
      e_now = y - x;
      check("sync error", sync_err, e_now);
      if (n > 0) begin
        checks++;
        if (2 * e_now - e_prev > 2 || 2 * e_now - e_prev < -2) begin
          failures++;
          $display("FAIL error law: e=%0d after %0d", e_now, e_prev);
        end
      end
      if (e_now == 0 && synced_at < 0) synced_at = n;
      if (synced_at >= 0) check("stays synchronized", e_now, 0);
      @(negedge clk);
      // correlator result for sample n
      check("rx valid", rx_valid, 1);
      check("rx word", rx_rs, zq ^ 16'(y));
      for (int p = 0; p < 4; p++)
        check("rx count", rx_cnt[p], $countones(rx_rs[4*p +: 4]));
      if (rx_exact != 4'hf) fringes++;
      if (e_now == 0) begin
        check("recovered information", rx_bits, info);
        check("whole values", rx_exact, 4'hf);
        recovered++;
      end
      e_prev = e_now;
      y = rx_next(y, x);
      x = fmap(x);
      check("receiver state", state, y);
    end
    checks++;
    if (synced_at < 0 || synced_at > 20) begin
      failures++;
      $display("FAIL synchronization at sample %0d", synced_at);
    end
    checks++;
    if (fringes == 0) begin
      failures++;
      $display("FAIL no fractional correlator output before synchronization");
    end
    $display("synchronized at sample %0d, %0d fractional outputs, %0d words recovered",
             synced_at, fringes, recovered);
    // channel pick from the synchronized state
    step = 0; chan_trigger = 1;
    @(negedge clk);
    chan_trigger = 0;
    check("channel index", chan_idx, chan_of(y));
    check("channel centre", f_center_khz, 60700 + 1400 * (chan_of(y) - 1));
    // transmit phase
    role = ROLE_TX;
    for (int n = 0; n < 100; n++) begin
      info = 4'($urandom); info_on = 1'($urandom);
      step = 1;
      #1;
      check("broadcast state", bcast_state, y);
      check("broadcast word", bcast_z, 16'(y) ^ (info_on ? spread(info) : 16'h0));
      @(negedge clk);
      check("correlator idle", rx_valid, 0);
      y = fmap(y);
      check("free-running state", state, y);
    end
    // amplitude phase
    role = ROLE_RX; comp_mode = COMP_ADD; info_on = 1;
    x = y;
    for (int n = 0; n < 200; n++) begin
      if (n % 5 == 0) info = 4'($urandom);
      partner_state = 16'(x);
      partner_z = 16'(x + (info[0] ? 51 : 0));
      step = 1;
      #1;
      e_now = y - (x + (info[0] ? 51 : 0));
      check("amplitude error", sync_err, e_now);
      @(negedge clk);
      check("detector valid", det_valid, 1);
      check("correlator idle in amplitude mode", rx_valid, 0);
      check("detector magnitude", det_istar, e_now < 0 ? -e_now : e_now);
      check("detector decision", det_r, (e_now >= 26 || e_now <= -26));
      y = rx_next(y, x + (info[0] ? 51 : 0));
      x = fmap(x);
      check("amplitude-mode state", state, y);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
