// One iteration unit of the quotient-estimate pipeline.
//
// Computes one step of the fixed-point iteration that solves f(x) = c, with
// f(x) = x + floor(-x(2^u -/+ 1) / 2^W) and c = floor(lambda / 2^W):
//     b_out = c + floor(b_in * (2^u -/+ 1) / 2^W) + 1          (registered)
// The "+1" replaces a data-dependent correction term: b_in * (2^u -/+ 1) is
// never a multiple of 2^W for a nonzero W-bit b_in, so the ceiling that the
// iteration needs is always the floor plus one.
//
// How it works (this follows the architecture of the design):
//   * shifter 1 shifts b_in right by u, so that b_in is aligned with
//     b_in * 2^u viewed from bit u upwards;
//   * s = 1 (q = 2^W-2^u+1) selects the inverted shifter output, giving the
//     term -b_in; s = 0 selects it unchanged, giving +b_in;
//   * the adder adds b_in to the selected term; its carry-in cin stands for
//     the u low bits that are not added: it is 1 exactly when s = 1 and the
//     low u bits of b_in are all zero (then ~b_in + 1 carries out of them);
//   * shifter 2 shifts the sum right by W-u, completing the division by 2^W;
//   * the last adder adds c and the constant 1, and register D holds b_out.
// The first adder is W+2 bits wide and works in two's complement, so the
// inverted operand is sign-extended; that width is this design's choice.
//
// Interface: u and s are static configuration; c and b_in belong to the same
// operation and are sampled at the rising clock edge. Latency 1 clock.
// D has no reset: its content only matters with the valid bit that the
// enclosing pipeline carries.
module iteration_unit #(
  parameter int unsigned W  = 32,
  localparam int unsigned UW = $clog2(W)
) (
  input  logic          clk,
  input  logic [UW-1:0] u,
  input  logic          s,
  input  logic [W-1:0]  c,
  input  logic [W-1:0]  b_in,
  output logic [W-1:0]  b_out
);

  logic [W+1:0] b_ext;     // b_in zero-extended to W+2 bits
  logic [W+1:0] sh1;       // b_in >> u
  logic [W+1:0] mux_out;   // +/- aligned term
  logic [W-1:0] low_mask;  // ones in the u low bit positions
  logic         cin;
  logic [W+1:0] sum1;      // floor(b_in * (2^u -/+ 1) / 2^u)
  logic [W-1:0] sh2;       // floor(b_in * (2^u -/+ 1) / 2^W)
  logic [UW:0]  w_minus_u;
  logic [W-1:0] b_next;

  always_comb begin
    b_ext     = {2'b00, b_in};
    sh1       = b_ext >> u;
    mux_out   = s ? ~sh1 : sh1;
    low_mask  = ~({W{1'b1}} << u);
    cin       = s & ((b_in & low_mask) == '0);
    sum1      = b_ext + mux_out + {{(W+1){1'b0}}, cin};
    w_minus_u = (UW+1)'(W) - {1'b0, u};
    sh2       = W'(sum1 >> w_minus_u);
    b_next    = c + sh2 + W'(1);
  end

  always_ff @(posedge clk) begin
    b_out <= b_next;
  end

endmodule
