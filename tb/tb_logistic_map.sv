// tb_logistic_map -- self-checking test of the map register and datapath.
// Runs the free map (u = 0) from the prototype's initial condition 122 and
// compares every iterate with a reference computed here in 64-bit integer
// arithmetic; checks that the free orbit stays inside (0,k); checks that
// step low holds the state, that load takes a new initial condition, that a
// control input is added before the rounding shift, and that an out-of-range
// result clamps to the 16-bit limits.
module tb_logistic_map;
  localparam longint MU = 15155;   // 3.7 * 2**12
  localparam int     SH = 22;      // 12 fraction bits + log2(k)
  localparam longint KK = 1024;

  logic clk = 0, rst_n = 0, load = 0, step = 0;
  logic signed [15:0] ic, state;
  logic signed [63:0] u_acc;
  int checks = 0, failures = 0;

  logistic_map dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (2000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic longint ref_next(longint s, longint u);
    longint v;
    v = (MU * s * (KK - s) + u) >>> SH;
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

  longint x;

  initial begin
    ic = 16'sd122; u_acc = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    check("reset loads ic", state, 122);
    x = 122;
    // free orbit
    for (int n = 0; n < 200; n++) begin
      step = 1;
      @(negedge clk);
      x = ref_next(x, 0);
      check($sformatf("iterate %0d", n + 1), state, x);
      checks++;
      if (!(state > 0 && state < 1024)) begin
        failures++;
        $display("FAIL state %0d left (0,k)", state);
      end
    end
    // hold
    step = 0;
    repeat (3) @(negedge clk);
    check("hold with step low", state, x);
    // load
    ic = -16'sd1024; load = 1;
    @(negedge clk);
    load = 0;
    check("load", state, -1024);
    // controlled step with random control inputs
    // controlled steps from random starting states
    for (int n = 0; n < 50; n++) begin
      x = longint'($urandom_range(0, 5000)) - 2000;
      ic = 16'(x); load = 1; step = 0;
      @(negedge clk);
      load = 0;
      u_acc = 64'(signed'($urandom_range(0, 2000000000))) * 64'sd37 - 64'sd37000000000;
      step = 1;
      @(negedge clk);
      step = 0;
      x = ref_next(x, u_acc);
      check($sformatf("controlled iterate %0d", n), state, x);
    end
    // clamping
    step = 0; u_acc = '0;
    ic = -16'sd32768; load = 1;
    @(negedge clk);
    load = 0; step = 1;
    @(negedge clk);
    check("clamp low", state, -32768);
    u_acc = 64'sd1 <<< 50;
    @(negedge clk);
    check("clamp high", state, 32767);
    step = 0;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
