// uas_link_top -- the complete chaos-secured link: a ground base station
// (GBS) and an aerial base station (ABS), each a comm_station, joined by an
// ideal channel.
//
// dir selects the sender. With dir = 0 the GBS transmits and the ABS
// receives, with dir = 1 the other way round; the roles may be swapped at any
// sample, and because the receiver has by then been pulled onto the
// sender's orbit the swap does not disturb synchronization. The channel
// carries two W-bit words per sample from the sender: its map state and its
// data word. Both are brought out as ports (link_state, link_z), since the
// RF path itself is not modelled: here it is a wire with no delay, noise or
// loss.
//
// comp_mode selects the bitstream scheme (COMP_XOR: 4-bit words XOR-ed over
// the state, recovered by the correlator, rx_*) or the amplitude scheme
// (COMP_ADD: info[0] added as an amplitude, receiver driven by the data word
// itself, recovered by the threshold detector, det_*); see comm_station.
//
// Ports: x_n and y_n are the GBS and ABS map states; sync_err is the
// receiver's state minus the sender's; rx_* are the receiver's correlator
// outputs and det_* its detector outputs, valid one clock after the sample
// (rx_valid, det_valid). On chan_trigger both stations pick a channel from
// their own state and report its band; chan_err_khz is the GBS centre
// frequency minus the ABS one, zero once the two are synchronized.
// Initial conditions come in as sign-magnitude switch words and are loaded
// on reset and on load. One sample per clock with step high.
module uas_link_top
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
  input  logic [W-1:0]         x0_sw,     // GBS initial condition, sign-magnitude
  input  logic [W-1:0]         y0_sw,     // ABS initial condition, sign-magnitude
  input  logic                 load,
  input  logic                 step,
  input  logic                 dir,       // 0: GBS -> ABS, 1: ABS -> GBS
  input  comp_e                comp_mode, // bitstream (XOR) or amplitude (ADD)
  input  logic [N-1:0]         info,      // sender's information word
  input  logic                 info_on,
  input  logic                 chan_trigger,
  output state_t               x_n,
  output state_t               y_n,
  output state_t               link_state,
  output logic [W-1:0]         link_z,
  output logic signed [W:0]    sync_err,
  output logic                 rx_valid,
  output logic [W-1:0]         rx_rs,
  output logic [N-1:0][CW-1:0] rx_cnt,
  output logic [N-1:0]         rx_exact,
  output logic [N-1:0]         rx_bits,
  output logic                 det_valid,
  output logic [W:0]           det_istar,
  output logic                 det_r,
  output logic [JW-1:0]        gbs_chan,
  output logic [JW-1:0]        abs_chan,
  output logic [FW-1:0]        gbs_f_lo_khz,
  output logic [FW-1:0]        gbs_f_center_khz,
  output logic [FW-1:0]        gbs_f_hi_khz,
  output logic [FW-1:0]        abs_f_lo_khz,
  output logic [FW-1:0]        abs_f_center_khz,
  output logic [FW-1:0]        abs_f_hi_khz,
  output logic signed [FW:0]   chan_err_khz
);

  role_e  gbs_role, abs_role;
  state_t gbs_bstate, abs_bstate;
  logic [W-1:0] gbs_bz, abs_bz;

  logic signed [W:0]    gbs_err, abs_err;
  logic                 gbs_v, abs_v;
  logic [W-1:0]         gbs_rs, abs_rs;
  logic [N-1:0][CW-1:0] gbs_cnt, abs_cnt;
  logic [N-1:0]         gbs_ex, abs_ex, gbs_bits, abs_bits;
  logic                 gbs_dv, abs_dv, gbs_r, abs_r;
  logic [W:0]           gbs_is, abs_is;

  assign gbs_role = dir ? ROLE_RX : ROLE_TX;
  assign abs_role = dir ? ROLE_TX : ROLE_RX;

  comm_station #(.N(N)) u_gbs (
    .clk, .rst_n, .load, .step, .chan_trigger,
    .role          (gbs_role),
    .comp_mode     (comp_mode),
    .ic_sm         (x0_sw),
    .info          (info),
    .info_on       (info_on && !dir),
    .bcast_state   (gbs_bstate),
    .bcast_z       (gbs_bz),
    .partner_state (abs_bstate),
    .partner_z     (abs_bz),
    .sync_err      (gbs_err),
    .rx_valid      (gbs_v),
    .rx_rs         (gbs_rs),
    .rx_cnt        (gbs_cnt),
    .rx_exact      (gbs_ex),
    .rx_bits       (gbs_bits),
    .det_valid     (gbs_dv),
    .det_istar     (gbs_is),
    .det_r         (gbs_r),
    .chan_idx      (gbs_chan),
    .f_lo_khz      (gbs_f_lo_khz),
    .f_center_khz  (gbs_f_center_khz),
    .f_hi_khz      (gbs_f_hi_khz),
    .state         (x_n)
  );

  comm_station #(.N(N)) u_abs (
    .clk, .rst_n, .load, .step, .chan_trigger,
    .role          (abs_role),
    .comp_mode     (comp_mode),
    .ic_sm         (y0_sw),
    .info          (info),
    .info_on       (info_on && dir),
    .bcast_state   (abs_bstate),
    .bcast_z       (abs_bz),
    .partner_state (gbs_bstate),
    .partner_z     (gbs_bz),
    .sync_err      (abs_err),
    .rx_valid      (abs_v),
    .rx_rs         (abs_rs),
    .rx_cnt        (abs_cnt),
    .rx_exact      (abs_ex),
    .rx_bits       (abs_bits),
    .det_valid     (abs_dv),
    .det_istar     (abs_is),
    .det_r         (abs_r),
    .chan_idx      (abs_chan),
    .f_lo_khz      (abs_f_lo_khz),
    .f_center_khz  (abs_f_center_khz),
    .f_hi_khz      (abs_f_hi_khz),
    .state         (y_n)
  );

  // Ideal channel: the sender's two words.
  assign link_state = dir ? abs_bstate : gbs_bstate;
  assign link_z     = dir ? abs_bz     : gbs_bz;

  // Receiver-side results. The correlators register their output, so the
  // selection uses their own valid flags rather than the current dir.
  always_comb begin
    sync_err = dir ? gbs_err : abs_err;
    rx_valid = gbs_v | abs_v;
    if (gbs_v) begin
      rx_rs = gbs_rs; rx_cnt = gbs_cnt; rx_exact = gbs_ex; rx_bits = gbs_bits;
    end else begin
      rx_rs = abs_rs; rx_cnt = abs_cnt; rx_exact = abs_ex; rx_bits = abs_bits;
    end
    det_valid = gbs_dv | abs_dv;
    if (gbs_dv) begin det_istar = gbs_is; det_r = gbs_r; end
    else        begin det_istar = abs_is; det_r = abs_r; end
  end

  // Synchronization, once reached, is never lost: equal states stay equal on
  // the next sample, also across a role swap, unless new initial conditions
  // are loaded or an amplitude-mode one is being sent (which by design
  // perturbs the receiver).
  assert property (@(posedge clk) disable iff (!rst_n)
                   (step && !load && x_n == y_n &&
                    !(comp_mode == COMP_ADD && info_on && info[0])) |=> (x_n == y_n))
    else $error("uas_link_top: synchronization lost");

  assign chan_err_khz = (FW+1)'(gbs_f_center_khz) - (FW+1)'(abs_f_center_khz);

endmodule
