// sync_controller -- the variable feedback controller that makes a receiving
// map follow a transmitting one,
//
//     e_n = y_n - x_n
//     u_n = [ mu * (e_n + 2 x_n - k) + rho * k ] * e_n / k ,
//
// where x_n is the state broadcast by the transmitter and y_n the receiver's
// own state. Added to the receiver's map this cancels the map's nonlinearity
// in the error, leaving e_{n+1} = rho * e_n, which decays to zero for
// |rho| < 1 whatever the initial conditions.
//
// The output u_acc is u_n scaled by 2**(FRAC+KLOG2), that is
// (MU_Q * (e + 2x - k) + RHO_Q * k) * e, formed exactly; the receiving
// logistic_map adds it to its own exactly formed map term before its single
// rounding shift. Because of this the fixed-point error obeys
// e_{n+1} = floor(a + rho*e_n) - floor(a) for some a, so it shrinks to
// exactly zero and then stays there. When enable is low u_acc is zero (the
// station is transmitting and its map runs freely).
//
// Purely combinational; e is also output for monitoring. The formula is the
// paper's; the scaled output format and the enable are this design's.
module sync_controller #(
  parameter int unsigned W     = chaos_pkg::W,
  parameter int unsigned KLOG2 = chaos_pkg::KLOG2,
  parameter int unsigned MU_Q  = chaos_pkg::MU_Q,
  parameter int unsigned RHO_Q = chaos_pkg::RHO_Q,
  parameter int unsigned ACC_W = chaos_pkg::ACC_W
) (
  input  logic                    enable,
  input  logic signed [W-1:0]     x,      // drive (transmitter) state
  input  logic signed [W-1:0]     y,      // own (receiver) state
  output logic signed [W:0]       e,      // y - x, one bit wider
  output logic signed [ACC_W-1:0] u_acc   // u * 2**(FRAC+KLOG2)
);

  localparam logic signed [ACC_W-1:0] KA   = ACC_W'(1) <<< KLOG2;
  localparam logic signed [ACC_W-1:0] MUA  = ACC_W'(MU_Q);
  localparam logic signed [ACC_W-1:0] RHOA = ACC_W'(RHO_Q);

  logic signed [ACC_W-1:0] ea, xa, gain;

  always_comb begin
    e    = (W+1)'(y) - (W+1)'(x);
    ea   = ACC_W'(e);
    xa   = ACC_W'(x);
    gain = MUA * (ea + 2 * xa - KA) + RHOA * KA;
    u_acc = enable ? gain * ea : '0;
  end

endmodule
