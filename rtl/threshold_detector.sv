// threshold_detector -- the detector of the additive scheme. There the
// sender adds an amplitude a * i_n (i_n in {0,1}) to its broadcast state and
// the receiver's controller is driven by that broadcast word z_n itself.
// Without information the controller drives eps = y - z to zero; with it
// the controller cannot, and |eps| carries the imprint of i_n. This block
// forms that imprint, i*_n = |eps_n|, and decides r_n = (i*_n >= TH).
//
// TH defaults to the midpoint between the two levels 0 and a of the
// information signal. Decisions are approximate: after a one-to-zero change
// the error decays by the gain rho per sample, so a few samples after each
// falling edge still read as one.
//
// Timing: one error sample per clock with in_valid; istar, r and out_valid
// are registered, one clock later. Reset (synchronous, active low) clears
// them. The structure (error, magnitude, threshold) follows the paper's
// description of a simple threshold detection; the magnitude and the
// threshold value are this design's choices.
module threshold_detector #(
  parameter int unsigned W  = chaos_pkg::W,
  parameter int unsigned TH = chaos_pkg::DET_TH
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                in_valid,
  input  logic signed [W:0]   eps,        // y - z
  output logic                out_valid,
  output logic [W:0]          istar,      // |eps|
  output logic                r           // recovered bit
);

  logic [W:0] mag;

  always_comb mag = eps[W] ? (W+1)'(-eps) : (W+1)'(eps);

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      istar     <= '0;
      r         <= 1'b0;
    end else begin
      out_valid <= in_valid;
      if (in_valid) begin
        istar <= mag;
        r     <= (mag >= (W+1)'(TH));
      end
    end
  end

endmodule
