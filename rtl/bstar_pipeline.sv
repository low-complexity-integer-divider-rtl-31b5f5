// Pipeline of T iteration units computing the quotient estimate b*.
//
// Starting from b_0 = c = floor(lambda / 2^W), stage i computes b_i from
// b_{i-1}; after T stages b_T = b* lies within one of floor(lambda / q),
// provided T is at least the iteration count t that the exponent u needs
// (t = 1 for u < W/2, t = 2 and 3 for larger u; for W = 32: t = 1 for
// u < 16, t = 2 for 16 <= u < 22, t = 3 for 22 <= u < 24). Once the
// iteration has converged (f(b_i) = c) a further stage returns b_i
// unchanged, so a pipeline built for T stages also serves smaller t.
//
// The T iteration units follow the architecture of the design. The delay
// registers that carry c, the low W+2 bits of lambda and a valid bit along
// with each operation are this design's own: the units need the c of their
// own operation, and the correction step after the pipeline needs
// lambda[W+1:0].
//
// Interface: one operation may enter per clock (in_valid, lambda); it leaves
// T clocks later on out_valid, b_star and lambda_lo. u and s are static
// while operations are in flight. rst_n is active low and synchronous and
// clears the valid bits only.
module bstar_pipeline #(
  parameter int unsigned W  = 32,
  parameter int unsigned T  = 3,
  localparam int unsigned UW = $clog2(W)
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic [UW-1:0] u,
  input  logic          s,
  input  logic          in_valid,
  input  logic [2*W-1:0] lambda,
  output logic          out_valid,
  output logic [W-1:0]  b_star,
  output logic [W+1:0]  lambda_lo
);

  // index k holds the values entering stage k (k = 0 is the pipeline input)
  logic [W-1:0] b   [T+1];
  logic [W-1:0] c   [T+1];
  logic [W+1:0] lo  [T+1];
  logic         vld [T+1];

  assign c[0]   = lambda[2*W-1:W];
  assign b[0]   = lambda[2*W-1:W];
  assign lo[0]  = lambda[W+1:0];
  assign vld[0] = in_valid;

  for (genvar k = 0; k < T; k++) begin : g_stage
    iteration_unit #(.W(W)) u_iter (
      .clk  (clk),
      .u    (u),
      .s    (s),
      .c    (c[k]),
      .b_in (b[k]),
      .b_out(b[k+1])
    );

    always_ff @(posedge clk) begin
      c[k+1]  <= c[k];
      lo[k+1] <= lo[k];
    end

    always_ff @(posedge clk) begin
      if (!rst_n) vld[k+1] <= 1'b0;
      else        vld[k+1] <= vld[k];
    end
  end

  assign out_valid = vld[T];
  assign b_star    = b[T];
  assign lambda_lo = lo[T];

endmodule
