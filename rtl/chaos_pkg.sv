// chaos_pkg -- fixed-point constants and types shared by the synchronized
// logistic-map link.
//
// Number format. A map state is a W-bit two's-complement integer. The map's
// scale factor k is a power of two, k = 2**KLOG2, so the canonical state range
// (0,1) becomes the integer range (0,k). The control parameter mu and the
// feedback gain rho are unsigned fixed-point numbers with FRAC fraction bits.
// Every product that feeds the next state is kept exact in an ACC_W-bit
// accumulator whose weight is 2**-(FRAC+KLOG2) of a state unit; the only
// rounding in an iteration is the final arithmetic right shift.
//
// From the paper: 16-bit states, k = 2**10, mu = 3.7 built in as a constant,
// rho = 0.5 (the gain of the paper's simulations), m = 16 state bits scrambling
// an n = 4 bit information word, an information amplitude of 0.05 (in units
// of k) for the additive scheme, and a 100-entry channel table running from
// 60.0 MHz in 1.4 MHz steps. This design's own choices: 12 fraction bits for
// mu and rho, the 64-bit accumulator, the detector threshold and frequencies
// expressed in kHz.
package chaos_pkg;

  // State word (paper: 16-bit resolution).
  localparam int unsigned W      = 16;
  // Scale factor k = 2**KLOG2 (paper: k = 2**10).
  localparam int unsigned KLOG2  = 10;
  // Fraction bits of mu and rho (own choice).
  localparam int unsigned FRAC   = 12;
  // mu = 3.7 -> round(3.7 * 4096) = 15155.
  localparam int unsigned MU_Q   = 15155;
  // rho = 0.5 -> 2048.
  localparam int unsigned RHO_Q  = 2048;
  // Accumulator width for the exact products (own choice, ample for W = 16).
  localparam int unsigned ACC_W  = 64;

  // Scrambling geometry: the m = W state bits carry N_INFO information bits,
  // r = W / N_INFO state bits per information bit.
  localparam int unsigned N_INFO = 4;

  // Channel table: NCH channels, channel j (1-based) spans
  // [F0_KHZ + (j-1)*DF_KHZ, F0_KHZ + j*DF_KHZ].
  localparam int unsigned NCH    = 100;
  localparam int unsigned F0_KHZ = 60000;
  localparam int unsigned DF_KHZ = 1400;

  // Additive composition (information source as an amplitude): a one adds
  // INFO_AMP = round(0.05 * k) to the broadcast state; the receiver's
  // detector decides "one" when |y - z| >= DET_TH, the midpoint between the
  // two levels 0 and INFO_AMP (own choice).
  localparam int unsigned INFO_AMP = 51;
  localparam int unsigned DET_TH   = 26;

  typedef logic signed [W-1:0]     state_t;
  typedef logic signed [ACC_W-1:0] acc_t;

  // How information is composed with the sender's state.
  typedef enum logic {
    COMP_XOR = 1'b0,  // bitstream: XOR over bit groups, separate drive word
    COMP_ADD = 1'b1   // amplitude: z = x + a*i, receiver driven by z itself
  } comp_e;

  // Which way a station works on the link.
  typedef enum logic {
    ROLE_RX = 1'b0,   // follow the partner's broadcast states, descramble
    ROLE_TX = 1'b1    // run the map freely, broadcast states, scramble
  } role_e;

  // Sign-magnitude switch word (bit W-1 = sign) to two's complement. The
  // paper's example "1000010000000000" stands for -1024.
  function automatic state_t sm_to_twos(input logic [W-1:0] sm);
    state_t mag;
    mag = state_t'({1'b0, sm[W-2:0]});
    return sm[W-1] ? -mag : mag;
  endfunction

endpackage
