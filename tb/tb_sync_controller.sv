// tb_sync_controller -- self-checking test of the variable feedback
// controller. For random drive states x in (0,k) and receiver states y over
// the whole 16-bit range it checks the output against the formula
// [mu(e + 2x - k) + rho k] e, evaluated here in 64-bit integers, and checks
// the property the controller exists for: map(y) + u equals
// map(x) + rho k e exactly, so the next error is rho times the present one
// up to a single rounding. With enable low the output must be zero.
module tb_sync_controller;
  localparam longint MU = 15155, RHO = 2048, KK = 1024;

  logic enable;
  logic signed [15:0] x, y;
  logic signed [16:0] e;
  logic signed [63:0] u_acc;
  int checks = 0, failures = 0;

  sync_controller dut (.*);

  initial begin
    #100000;
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

  longint xl, yl, el, uexp;

  initial begin
    for (int n = 0; n < 2000; n++) begin
      xl = longint'($urandom_range(1, 1023));
      yl = longint'($urandom_range(0, 65535)) - 32768;
      if (n == 0) begin xl = 122; yl = -1024; end
      x = 16'(xl); y = 16'(yl); enable = 1;
      #1;
      el = yl - xl;
      uexp = (MU * (el + 2 * xl - KK) + RHO * KK) * el;
      check("error", e, el);
      check("control", u_acc, uexp);
      check("error law", MU * yl * (KK - yl) + u_acc, MU * xl * (KK - xl) + RHO * KK * el);
      enable = 0;
      #1;
      check("disabled", u_acc, 0);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
