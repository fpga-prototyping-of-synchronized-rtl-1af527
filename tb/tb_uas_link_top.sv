// tb_uas_link_top -- end-to-end test of the two-station link at its default
// size (16-bit states, k = 2**10, 4-bit information words, 100 channels).
//
// Both stations are modelled in the testbench with 64-bit integer arithmetic
// and every sample of both states, the link words, the synchronization error
// and the receiver's correlator output is compared with the model. The run:
//   1. GBS starts at 122, ABS at sign-magnitude 1000010000000000 (-1024);
//      a channel is picked at once (the stations disagree), then the GBS
//      sends information words from the first sample, so the ABS correlator
//      shows fractional values until synchronization and the exact words
//      afterwards;
//   2. information off: the data word equals the broadcast state, and a
//      channel pick now gives the same channel at both ends;
//   3. the roles swap: the ABS sends, the GBS receives and recovers;
//   4. new initial conditions are loaded and the link synchronizes again;
//   5. amplitude mode: the GBS adds 51 * info[0] to its broadcast word, the
//      ABS follows that word and its threshold detector reads the bit.
// Each mechanism is counted and a mechanism that never happened is a failure.
module tb_uas_link_top;
  import chaos_pkg::*;
  localparam longint MU = 15155, RHO = 2048, KK = 1024;

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

  always #12.5 clk = ~clk;   // 40 MHz

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic longint fmap(longint s);
    longint v;
    v = (MU * s * (KK - s)) >>> 22;
    if (v > 32767) v = 32767;
    if (v < -32768) v = -32768;
    return v;
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

  longint gx, ay;            // model states of GBS and ABS
  int n_amp, n_amp_ok, n_sync, n_fringe, n_recovered, n_chan_differ, n_chan_same, n_swap, n_reload, n_clear;

  // One sample with the current dir / info settings; returns nothing, checks all.
  task automatic sample(input int hold_info);
    longint snd, rcv, e;
    logic [15:0] zq;
    if (hold_info == 0) info = 4'($urandom);
    snd = dir ? ay : gx;
    rcv = dir ? gx : ay;
    zq  = 16'(snd) ^ (info_on ? spread(info) : 16'h0);
    step = 1;
    #1;
    e = rcv - snd;
    check("x_n", x_n, gx);
    check("y_n", y_n, ay);
    check("link state", link_state, snd);
    check("link word", link_z, zq);
    check("sync error", sync_err, e);
    if (!info_on && e == 0 && link_z == 16'(link_state)) n_clear++;
    @(negedge clk);
    check("rx valid", rx_valid, 1);
    check("rx word", rx_rs, zq ^ 16'(rcv));
    for (int p = 0; p < 4; p++)
      check("rx count", rx_cnt[p], $countones(rx_rs[4*p +: 4]));
    if (info_on && rx_exact != 4'hf) n_fringe++;
    if (info_on && e == 0) begin
      check("recovered information", rx_bits, info);
      check("whole values", rx_exact, 4'hf);
      n_recovered++;
    end
    if (dir) begin gx = rx_next(gx, ay); ay = fmap(ay); end
    else     begin ay = rx_next(ay, gx); gx = fmap(gx); end
  endtask

  task automatic pick_channel(input bit expect_same);
    step = 0; chan_trigger = 1;
    @(negedge clk);
    chan_trigger = 0;
    check("GBS channel", gbs_chan, chan_of(gx));
    check("ABS channel", abs_chan, chan_of(ay));
    check("GBS centre", gbs_f_center_khz, 60700 + 1400 * (chan_of(gx) - 1));
    check("ABS centre", abs_f_center_khz, 60700 + 1400 * (chan_of(ay) - 1));
    check("channel error", chan_err_khz, 1400 * (chan_of(gx) - chan_of(ay)));
    if (expect_same) begin
      check("same channel", chan_err_khz, 0);
      if (chan_err_khz == 0) n_chan_same++;
    end else if (chan_err_khz != 0) n_chan_differ++;
  endtask

  task automatic run_until_sync(input int limit, output int at);
    at = -1;
    for (int n = 0; n < limit; n++) begin
      if (at < 0 && (dir ? gx - ay : ay - gx) == 0) at = n;
      sample(n % 6);
    end
  endtask

  int at;
  longint prev_rx;

  initial begin
    x0_sw = 16'b0000000001111010;   // 122
    y0_sw = 16'b1000010000000000;   // -1024, sign-magnitude
    info = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    gx = 122; ay = -1024;
    check("GBS initial condition", x_n, 122);
    check("ABS initial condition", y_n, -1024);
    // 1. channel pick before synchronization, then data from the start
    pick_channel(0);
    info_on = 1; dir = 0;
    run_until_sync(64, at);
    $display("phase 1: synchronized at sample %0d", at);
    checks++;
    if (at < 0 || at > 20) begin failures++; $display("FAIL no synchronization"); end
    else n_sync++;
    // 2. information off, channel pick in synchronization
    info_on = 0;
    for (int n = 0; n < 16; n++) sample(0);
    pick_channel(1);
    for (int n = 0; n < 7; n++) begin sample(0); pick_channel(1); end
    // 3. roles swapped: ABS sends to GBS
    dir = 1; info_on = 1; n_swap = 0;
    prev_rx = n_recovered;
    for (int n = 0; n < 64; n++) sample(n % 6);
    if (n_recovered - prev_rx == 64) n_swap++;
    // 4. reload new initial conditions (GBS 700, ABS +2000) and resynchronize
    dir = 0; info_on = 1;
    x0_sw = 16'd700; y0_sw = 16'd2000;
    step = 0; load = 1;
    @(negedge clk);
    load = 0;
    gx = 700; ay = 2000;
    check("reloaded GBS", x_n, 700);
    check("reloaded ABS", y_n, 2000);
    run_until_sync(64, at);
    $display("phase 4: synchronized at sample %0d", at);
    if (at > 0 && at <= 20) n_reload++;
    // 5. amplitude mode from the synchronized state, GBS sends
    comp_mode = COMP_ADD; dir = 0; info_on = 1;
    for (int n = 0; n < 400; n++) begin
      longint zz, e;
      if (n % 8 == 0) info = 4'($urandom);
      zz = gx + (info[0] ? 51 : 0);
      step = 1;
      #1;
      e = ay - zz;
      check("amplitude link word", link_z, zz);
      check("amplitude error", sync_err, e);
      @(negedge clk);
      check("detector valid", det_valid, 1);
      check("detector magnitude", det_istar, e < 0 ? -e : e);
      check("detector decision", det_r, (e >= 26 || e <= -26));
      n_amp++;
      if (det_r == info[0]) n_amp_ok++;
      ay = rx_next(ay, zz); gx = fmap(gx);
      check("amplitude x_n", x_n, gx);
      check("amplitude y_n", y_n, ay);
    end
    $display("amplitude mode: %0d of %0d bits read correctly", n_amp_ok, n_amp);
    checks++;
    if (n_amp == 0 || n_amp_ok * 10 < n_amp * 8) begin
      failures++; $display("FAIL amplitude-mode detection below 80 percent");
    end
    step = 0;
    $display("mechanisms: sync=%0d fringes=%0d recovered=%0d chan_differ=%0d chan_same=%0d swap=%0d reload=%0d clear=%0d",
             n_sync, n_fringe, n_recovered, n_chan_differ, n_chan_same, n_swap, n_reload, n_clear);
    checks++; if (n_sync == 0)        begin failures++; $display("FAIL never synchronized"); end
    checks++; if (n_fringe == 0)      begin failures++; $display("FAIL no fringes before sync"); end
    checks++; if (n_recovered == 0)   begin failures++; $display("FAIL nothing recovered"); end
    checks++; if (n_chan_differ == 0) begin failures++; $display("FAIL channels never differed"); end
    checks++; if (n_chan_same == 0)   begin failures++; $display("FAIL channels never agreed"); end
    checks++; if (n_swap == 0)        begin failures++; $display("FAIL role swap not exercised"); end
    checks++; if (n_reload == 0)      begin failures++; $display("FAIL reload not exercised"); end
    checks++; if (n_clear == 0)       begin failures++; $display("FAIL information-off samples not seen"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
