// scrambler -- the invertible composition f that hides an N-bit information
// word in the transmitter's W-bit map state before it is broadcast.
//
// The W state bits are split into N groups of R = W/N adjacent bits; group p
// (bits R*p .. R*p+R-1, p = 0 is the least significant group) is combined
// with information bit p. The combination is bitwise exclusive-or, i.e.
// addition modulo 2, which is its own inverse: a receiver holding the same
// state recovers R copies of each information bit by XOR-ing again. With
// info_on low the information word is taken as zero and the broadcast word
// equals the state, which is what lets the receiver synchronize.
//
// Combinational. From the paper: m state bits scramble an n-bit word, with
// r = m/n state bits per information bit. Own choices: XOR as the invertible
// function and the least-significant-first grouping.
module scrambler #(
  parameter int unsigned W = chaos_pkg::W,
  parameter int unsigned N = chaos_pkg::N_INFO
) (
  input  logic [W-1:0] state,
  input  logic [N-1:0] info,
  input  logic         info_on,
  output logic [W-1:0] z
);

  localparam int unsigned R = W / N;

  initial assert (N >= 1 && N <= W && (W % N) == 0)
    else $error("scrambler: N must divide W");

  always_comb begin
    for (int unsigned b = 0; b < W; b++)
      z[b] = state[b] ^ (info_on & info[b / R]);
  end

endmodule
