// correlator -- descrambler f^-1 plus the correlation summation that turns a
// received W-bit word back into N information values.
//
// The received word z is XOR-ed with the receiver's own map state y, giving
// R_s = z ^ y. When the receiver is synchronized (y equals the transmitter's
// state) every bit of group p of R_s equals information bit p. The summation
// then counts the ones in each group of R = W/N bits:
//
//     s_p = (1/R) * sum of the R bits of group p
//
// s_p is 1 when all R bits are one, 0 when all are zero and a fraction in
// between otherwise; fractions are the "fringes" seen while the receiver is
// still out of step. The output is the numerator, s_cnt[p] = R * s_p, with
// exact[p] flagging the two whole values and bits[p] = (s_p == 1).
//
// Timing: one word per clock with in_valid, outputs registered, out_valid
// one clock later. Reset (synchronous, active low) clears the outputs. The
// summation is the paper's; the XOR descrambler, bit grouping and output
// encoding are this design's.
module correlator #(
  parameter int unsigned W = chaos_pkg::W,
  parameter int unsigned N = chaos_pkg::N_INFO,
  localparam int unsigned R  = W / N,
  localparam int unsigned CW = $clog2(R + 1)
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 in_valid,
  input  logic [W-1:0]         z,       // received scrambled word
  input  logic [W-1:0]         y,       // own synchronized state
  output logic                 out_valid,
  output logic [W-1:0]         rs,      // descrambled word R_s
  output logic [N-1:0][CW-1:0] s_cnt,   // R * s_p
  output logic [N-1:0]         exact,   // s_p is 0 or 1
  output logic [N-1:0]         bits     // s_p == 1
);

  logic [W-1:0]         rs_c;
  logic [N-1:0][CW-1:0] cnt_c;

  always_comb begin
    rs_c = z ^ y;
    for (int unsigned p = 0; p < N; p++) begin
      cnt_c[p] = '0;
      for (int unsigned k = 0; k < R; k++)
        cnt_c[p] = cnt_c[p] + CW'(rs_c[p*R + k]);
    end
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      rs        <= '0;
      s_cnt     <= '0;
      exact     <= '0;
      bits      <= '0;
    end else begin
      out_valid <= in_valid;
      if (in_valid) begin
        rs    <= rs_c;
        s_cnt <= cnt_c;
        for (int unsigned p = 0; p < N; p++) begin
          exact[p] <= (cnt_c[p] == 0) || (cnt_c[p] == CW'(R));
          bits[p]  <= (cnt_c[p] == CW'(R));
        end
      end
    end
  end

  // A result is present exactly one clock after a word was accepted.
  assert property (@(posedge clk) disable iff (!rst_n) in_valid |=> out_valid)
    else $error("correlator: result missing after an accepted word");

endmodule
