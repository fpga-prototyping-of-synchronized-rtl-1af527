// logistic_map -- one communication unit: a register holding the state s_n of
// the logistic map and the datapath that advances it,
//
//     s_{n+1} = mu * s_n * (1 - s_n / k) + u_n ,
//
// in fixed point. With k = 2**KLOG2 and mu = MU_Q / 2**FRAC the map term is
// formed exactly as MU_Q * s * (k - s), a number whose unit is
// 2**-(FRAC+KLOG2) of a state unit. The control input u_acc arrives in that
// same unit (see sync_controller), is added before any rounding, and the sum
// is shifted right arithmetically by FRAC+KLOG2 (rounding toward minus
// infinity). A free-running transmitter simply drives u_acc = 0.
//
// The result is clamped to the W-bit signed range: the error dynamics are
// globally stable in theory, but hardware needs a confined dynamic range, as
// the paper remarks. The transmitter's state stays inside (0,k) on its own;
// the receiver's state may start anywhere in the W-bit range.
//
// Interface and timing: on a clock edge with rst_n low (synchronous reset)
// or load high the state takes the initial condition ic; otherwise, on every
// clock with step high, it takes the next iterate. One iteration per enabled clock, the new
// state is visible the clock after step. state is the register output.
// Everything is the paper's except the number format, the clamp limits and
// the load/step controls.
module logistic_map #(
  parameter int unsigned W     = chaos_pkg::W,
  parameter int unsigned KLOG2 = chaos_pkg::KLOG2,
  parameter int unsigned FRAC  = chaos_pkg::FRAC,
  parameter int unsigned MU_Q  = chaos_pkg::MU_Q,
  parameter int unsigned ACC_W = chaos_pkg::ACC_W
) (
  input  logic                    clk,
  input  logic                    rst_n,  // synchronous, active low
  input  logic                    load,   // take ic now
  input  logic signed [W-1:0]     ic,     // initial condition, two's complement
  input  logic                    step,   // advance one iteration
  input  logic signed [ACC_W-1:0] u_acc,  // control input, unit 2**-(FRAC+KLOG2)
  output logic signed [W-1:0]     state
);

  localparam logic signed [ACC_W-1:0] KA   = ACC_W'(1) <<< KLOG2;
  localparam logic signed [ACC_W-1:0] MUA  = ACC_W'(MU_Q);
  localparam logic signed [ACC_W-1:0] SMAX = (ACC_W'(1) <<< (W-1)) - 1;
  localparam logic signed [ACC_W-1:0] SMIN = -(ACC_W'(1) <<< (W-1));

  logic signed [ACC_W-1:0] s_ext, map_acc, sum_acc, shifted;
  logic signed [W-1:0]     next_state;

  always_comb begin
    s_ext   = ACC_W'(state);
    map_acc = MUA * s_ext * (KA - s_ext);
    sum_acc = map_acc + u_acc;
    shifted = sum_acc >>> (FRAC + KLOG2);
    if (shifted > SMAX)      next_state = SMAX[W-1:0];
    else if (shifted < SMIN) next_state = SMIN[W-1:0];
    else                     next_state = shifted[W-1:0];
  end

  always_ff @(posedge clk) begin
    if (!rst_n || load) state <= ic;
    else if (step)      state <= next_state;
  end

endmodule
