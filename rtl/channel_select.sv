// channel_select -- chaos-driven RF channel selection with the frequency
// lookup table.
//
// On a trigger the current map state picks a channel index j in 1..NCH, and
// the table gives that channel's band. Two synchronized stations hold the
// same state, so they pick the same channel with no message exchanged, while
// the sequence of picks follows the chaotic orbit and has no visible pattern.
//
// Index rule: the state is clamped to 0..k-1 and scaled onto the channels,
//     j = floor(clamp(s) * NCH / k) + 1 .
// Table rule: channel j covers [F0 + (j-1)*DF, F0 + j*DF] with centre
// F0 + (j-1)*DF + DF/2; with F0 = 60.0 MHz, DF = 1.4 MHz and NCH = 100 this is
// 60.0-61.4 MHz (centre 60.7) for j = 1 up to 198.6-200.0 MHz (centre 199.3)
// for j = 100. The table is held as a ROM array filled at elaboration.
//
// Timing: chan_idx is a register loaded on the clock where trigger is high;
// the frequencies follow it through the ROM combinationally. Reset
// (synchronous, active low) selects channel 1. From the paper: a channel chosen from the map state on a trigger
// while transmission is off, the 100-channel table. Own choices: the
// scaling rule, the clamp, kHz units and the reset channel.
module channel_select #(
  parameter int unsigned W      = chaos_pkg::W,
  parameter int unsigned KLOG2  = chaos_pkg::KLOG2,
  parameter int unsigned NCH    = chaos_pkg::NCH,
  parameter int unsigned F0_KHZ = chaos_pkg::F0_KHZ,
  parameter int unsigned DF_KHZ = chaos_pkg::DF_KHZ,
  localparam int unsigned JW = $clog2(NCH + 1),
  localparam int unsigned FW = $clog2(F0_KHZ + NCH * DF_KHZ + 1)
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                trigger,
  input  logic signed [W-1:0] state,
  output logic [JW-1:0]       chan_idx,     // 1..NCH
  output logic [FW-1:0]       f_lo_khz,
  output logic [FW-1:0]       f_center_khz,
  output logic [FW-1:0]       f_hi_khz
);

  typedef logic [FW-1:0] freq_t;
  typedef freq_t rom_t [NCH];

  function automatic rom_t make_lo();
    rom_t t;
    for (int unsigned j = 0; j < NCH; j++) t[j] = FW'(F0_KHZ + j * DF_KHZ);
    return t;
  endfunction

  localparam rom_t LUT_LO = make_lo();

  localparam int signed KMAX = (1 << KLOG2) - 1;

  logic [KLOG2-1:0] s_clamped;
  logic [JW-1:0]    j_next;

  always_comb begin
    if (state < 0)                      s_clamped = '0;
    else if (state > (W)'(KMAX))        s_clamped = KLOG2'(KMAX);
    else                                s_clamped = state[KLOG2-1:0];
    j_next = JW'(((KLOG2 + JW + 1)'(s_clamped) * (KLOG2 + JW + 1)'(NCH)) >> KLOG2) + JW'(1);
  end

  always_ff @(posedge clk) begin
    if (!rst_n)       chan_idx <= JW'(1);
    else if (trigger) chan_idx <= j_next;
  end

  always_comb begin
    f_lo_khz     = LUT_LO[chan_idx - JW'(1)];
    f_hi_khz     = f_lo_khz + FW'(DF_KHZ);
    f_center_khz = f_lo_khz + FW'(DF_KHZ / 2);
  end

endmodule
