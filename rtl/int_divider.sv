// Pipelined integer divider for moduli of the form q = 2^W - 2^u +/- 1.
//
// Computes quotient = floor(lambda / q) for a 2W-bit dividend lambda < q^2,
// such as the product of two residues mod q in homomorphic-encryption
// arithmetic, using only shifts, additions and one comparison instead of a
// multiplication by 1/q. The quotient estimate b* comes from T iteration
// units (b_0 = floor(lambda / 2^W), each step b_{i+1} = c +
// floor(b_i (2^u -/+ 1) / 2^W) + 1); a correction stage then evaluates the
// low W+2 bits of lambda - b*q and moves b* by -1, 0 or +1.
//
// Structure and sizes follow the design: W = 32 and T = 3, which covers
// 1 <= u < 24 for W = 32, with a latency of T+1 = 4 clocks and one new
// dividend per clock. This design's own choices: a valid-in/valid-out
// stream with no back-pressure, q formed here from u and s, a synchronous
// active-low reset of the valid bits, and u and s held as static
// configuration while operations are in flight (checked by an assertion).
//
// Ports: u (exponent), s (1: q = 2^W-2^u+1, 0: q = 2^W-2^u-1), in_valid and
// lambda in; out_valid and quotient T+1 clocks later.
module int_divider
  import intdiv_pkg::*;
#(
  parameter int unsigned W  = 32,
  parameter int unsigned T  = 3,
  localparam int unsigned UW = $clog2(W)
) (
  input  logic           clk,
  input  logic           rst_n,
  input  logic [UW-1:0]  u,
  input  logic           s,
  input  logic           in_valid,
  input  logic [2*W-1:0] lambda,
  output logic           out_valid,
  output logic [W-1:0]   quotient
);

  logic [W-1:0] q;
  logic         bs_valid;
  logic [W-1:0] b_star;
  logic [W+1:0] lambda_lo;

  // q = 2^W - 2^u + 1 (s = 1) or 2^W - 2^u - 1 (s = 0), modulo 2^W
  always_comb begin
    q = W'(0) - (W'(1) << u);
    q = (qsign_e'(s) == QSIGN_PLUS1) ? q + W'(1) : q - W'(1);
  end

  bstar_pipeline #(.W(W), .T(T)) u_bstar (
    .clk      (clk),
    .rst_n    (rst_n),
    .u        (u),
    .s        (s),
    .in_valid (in_valid),
    .lambda   (lambda),
    .out_valid(bs_valid),
    .b_star   (b_star),
    .lambda_lo(lambda_lo)
  );

  quotient_correction #(.W(W)) u_corr (
    .clk      (clk),
    .rst_n    (rst_n),
    .u        (u),
    .s        (s),
    .q        (q),
    .in_valid (bs_valid),
    .b_star   (b_star),
    .lambda_lo(lambda_lo),
    .out_valid(out_valid),
    .quotient (quotient)
  );

  // Operations in flight: u and s must stay constant until they have left.
  logic [T:0] busy_sr;
  always_ff @(posedge clk) begin
    if (!rst_n) busy_sr <= '0;
    else        busy_sr <= {busy_sr[T-1:0], in_valid};
  end

  a_cfg_stable: assert property (@(posedge clk) disable iff (!rst_n)
    (|busy_sr) |-> ($stable(u) && $stable(s)))
    else $error("u or s changed while an operation was in flight");

  a_u_range: assert property (@(posedge clk) disable iff (!rst_n)
    in_valid |-> (u != '0 && 32'(u) <= W - 2))
    else $error("u out of range");

  a_lambda_range: assert property (@(posedge clk) disable iff (!rst_n)
    in_valid |-> ((2*W)'(lambda) < (2*W)'(q) * (2*W)'(q)))
    else $error("lambda must be below q*q");

endmodule
