// Final correction: quotient b = floor(lambda / q) from the estimate b*.
//
// b* is b-1, b or b+1, so lambda - b*q is r+q, r or r-q with 0 <= r < q.
// Its exact value is not needed, only where it lies, and for that the low
// W+2 bits suffice: with q = 2^W - 2^u +/- 1,
//     lambda - b*q = lambda - b*2^W + b*2^u -/+ b*
// and only these W+2-bit terms are summed:
//     lambda[W+1:0]
//     the two LSBs of -b*, followed by W zeros          (-b* 2^W)
//     the W+2-u low bits of b*, followed by u zeros       (b* 2^u)
//     -b* (s = 1) or +b* (s = 0), as a W+2-bit number
// Bit W+1 of the sum is the sign: set means lambda - b*q < 0, b = b*-1.
// Otherwise the low W+1 bits are compared with q: >= q gives b = b*+1,
// else b = b*. This is the architecture of the design. The four terms are
// reduced by two rows of 3:2 carry-save compressors to a sum and a carry
// word, and one carry-propagate adder completes the sum; the design names a
// carry-save adder without its arrangement, so this arrangement is this
// design's choice. The result register is the extra clock cycle of the
// design.
//
// Interface: in_valid, b_star and lambda_lo belong to one operation; out_valid
// and quotient follow one clock later. u, s and q are static configuration.
// rst_n is active low and synchronous and clears out_valid only.
module quotient_correction
  import intdiv_pkg::*;
#(
  parameter int unsigned W  = 32,
  localparam int unsigned UW = $clog2(W)
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic [UW-1:0] u,
  input  logic          s,
  input  logic [W-1:0]  q,
  input  logic          in_valid,
  input  logic [W-1:0]  b_star,
  input  logic [W+1:0]  lambda_lo,
  output logic          out_valid,
  output logic [W-1:0]  quotient
);

  logic [W+1:0] b_ext;     // '00' & b*
  logic [W+1:0] b_neg;     // two's complement of b_ext
  logic [W+1:0] term_hi;   // -b* * 2^W, mod 2^(W+2)
  logic [W+1:0] term_mid;  // b* * 2^u, mod 2^(W+2)
  logic [W+1:0] term_lo;   // -/+ b*
  logic [W+1:0] cs1_s, cs1_c;  // first 3:2 row
  logic [W+1:0] cs2_s, cs2_c;  // second 3:2 row
  logic [W+1:0] rsum;      // lambda - b* q, mod 2^(W+2)
  logic         ge_q;
  corr_e        sel;
  logic [W-1:0] b_next;

  always_comb begin
    b_ext    = {2'b00, b_star};
    b_neg    = ~b_ext + (W+2)'(1);
    term_hi  = {b_neg[1:0], {W{1'b0}}};
    term_mid = b_ext << u;
    term_lo  = (qsign_e'(s) == QSIGN_PLUS1) ? b_neg : b_ext;
    // carry-save reduction of four terms, all modulo 2^(W+2)
    cs1_s    = lambda_lo ^ term_hi ^ term_mid;
    cs1_c    = ((lambda_lo & term_hi) | (lambda_lo & term_mid) | (term_hi & term_mid)) << 1;
    cs2_s    = cs1_s ^ cs1_c ^ term_lo;
    cs2_c    = ((cs1_s & cs1_c) | (cs1_s & term_lo) | (cs1_c & term_lo)) << 1;
    rsum     = cs2_s + cs2_c;
    ge_q     = rsum[W:0] >= {1'b0, q};
    if (rsum[W+1])  sel = CORR_DEC;
    else if (ge_q)  sel = CORR_INC;
    else            sel = CORR_KEEP;
    unique case (sel)
      CORR_DEC: b_next = b_star - W'(1);
      CORR_INC: b_next = b_star + W'(1);
      default:  b_next = b_star;
    endcase
  end

  always_ff @(posedge clk) begin
    quotient <= b_next;
  end

  always_ff @(posedge clk) begin
    if (!rst_n) out_valid <= 1'b0;
    else        out_valid <= in_valid;
  end

endmodule
