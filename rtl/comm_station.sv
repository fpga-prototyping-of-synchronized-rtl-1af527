// comm_station -- one end of the link (the ground base station or the aerial
// base station). Both ends are built alike so that either can send: the role
// input decides, sample by sample, which way the station works.
//
//   ROLE_TX  The map runs freely (controller disabled). The station
//            broadcasts its state (bcast_state) and its data word (bcast_z).
//   ROLE_RX  The controller pulls the own map (y_n) onto the partner's
//            orbit, using as x_n either the partner's broadcast state or its
//            data word (see comp_mode), and the received data is decoded.
//
// comp_mode chooses how information rides on the state:
//
//   COMP_XOR  (bitstream) bcast_z = state ^ spread(info), N bits per sample;
//             the receiver's controller follows bcast_state and the
//             correlator XORs the data word with the own state and sums the
//             result into N values.
//   COMP_ADD  (amplitude) bcast_z = state + INFO_AMP * info[0]; the
//             receiver's controller follows bcast_z itself, so information
//             perturbs the synchronization, and the threshold detector reads
//             the bit from the size of the error y - z.
//
// The channel selector runs in both roles from the own state; once the two
// stations are synchronized both pick the same channel on a common trigger.
//
// Interface and timing: one map iteration per clock with step high. The
// controller, the scrambler and the descrambler all see the states of the
// same index n; the correlator's (or detector's) result for sample n
// appears one clock later with rx_valid (det_valid). The initial condition
// arrives as a W-bit sign-magnitude switch word (bit W-1 the sign) and is
// loaded on reset and on load. The datapath is the paper's; the separate
// drive and data words of the bitstream mode, the role and mode inputs and
// the sign-magnitude conversion point are this design's choices.
module comm_station
  import chaos_pkg::*;
#(
  parameter int unsigned N = chaos_pkg::N_INFO,
  localparam int unsigned R  = W / N,
  localparam int unsigned CW = $clog2(R + 1),
  localparam int unsigned JW = $clog2(NCH + 1),
  localparam int unsigned FW = $clog2(F0_KHZ + NCH * DF_KHZ + 1)
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  role_e                role,
  input  comp_e                comp_mode,
  input  logic [W-1:0]         ic_sm,          // initial condition, sign-magnitude
  input  logic                 load,
  input  logic                 step,
  // information source (used when transmitting)
  input  logic [N-1:0]         info,
  input  logic                 info_on,
  // what this station sends
  output state_t               bcast_state,
  output logic [W-1:0]         bcast_z,
  // what it hears from the partner
  input  state_t               partner_state,
  input  logic [W-1:0]         partner_z,
  // receiver results
  output logic signed [W:0]    sync_err,       // own state minus partner state
  output logic                 rx_valid,
  output logic [W-1:0]         rx_rs,
  output logic [N-1:0][CW-1:0] rx_cnt,
  output logic [N-1:0]         rx_exact,
  output logic [N-1:0]         rx_bits,
  output logic                 det_valid,
  output logic [W:0]           det_istar,      // |y - z|, additive mode
  output logic                 det_r,          // recovered bit, additive mode
  // channel selection
  input  logic                 chan_trigger,
  output logic [JW-1:0]        chan_idx,
  output logic [FW-1:0]        f_lo_khz,
  output logic [FW-1:0]        f_center_khz,
  output logic [FW-1:0]        f_hi_khz,
  output state_t               state
);

  acc_t         u_acc;
  logic         ctrl_en;
  state_t       drive;
  logic [W-1:0] z_xor;
  state_t       z_add;

  assign ctrl_en = (role == ROLE_RX);
  assign drive   = (comp_mode == COMP_ADD) ? state_t'(partner_z) : partner_state;

  logistic_map u_map (
    .clk, .rst_n, .load, .step,
    .ic    (sm_to_twos(ic_sm)),
    .u_acc (u_acc),
    .state (state)
  );

  sync_controller u_ctrl (
    .enable (ctrl_en),
    .x      (drive),
    .y      (state),
    .e      (sync_err),
    .u_acc  (u_acc)
  );

  scrambler #(.N(N)) u_scr (
    .state   (state),
    .info    (info),
    .info_on (info_on),
    .z       (z_xor)
  );

  assign z_add   = state + ((info_on && info[0]) ? state_t'(INFO_AMP) : '0);
  assign bcast_z = (comp_mode == COMP_ADD) ? z_add : z_xor;

  assign bcast_state = state;

  correlator #(.N(N)) u_cor (
    .clk, .rst_n,
    .in_valid  (step && ctrl_en && comp_mode == COMP_XOR),
    .z         (partner_z),
    .y         (state),
    .out_valid (rx_valid),
    .rs        (rx_rs),
    .s_cnt     (rx_cnt),
    .exact     (rx_exact),
    .bits      (rx_bits)
  );

  threshold_detector u_det (
    .clk, .rst_n,
    .in_valid  (step && ctrl_en && comp_mode == COMP_ADD),
    .eps       (sync_err),
    .out_valid (det_valid),
    .istar     (det_istar),
    .r         (det_r)
  );

  channel_select u_chan (
    .clk, .rst_n,
    .trigger      (chan_trigger),
    .state        (state),
    .chan_idx     (chan_idx),
    .f_lo_khz     (f_lo_khz),
    .f_center_khz (f_center_khz),
    .f_hi_khz     (f_hi_khz)
  );

endmodule
