// Self-checking testbench of quotient_correction.
//
// For random moduli q = 2^W - 2^u +/- 1 and dividends lambda < q^2, feeds the
// stage an estimate b* equal to b-1, b or b+1 (b = floor(lambda/q) computed
// with a wide division) and checks that the quotient is b one clock later,
// with out_valid following in_valid. Each of the three correction outcomes
// is counted and must occur.
module quotient_correction_tb;
  localparam int unsigned W  = 32;
  localparam int unsigned UW = $clog2(W);

  logic          clk = 1'b0, rst_n = 1'b0;
  logic [UW-1:0] u = '0;
  logic          s = 1'b0;
  logic [W-1:0]  q = '0;
  logic          in_valid = 1'b0;
  logic [W-1:0]  b_star = '0;
  logic [W+1:0]  lambda_lo = '0;
  logic          out_valid;
  logic [W-1:0]  quotient;
  int checks = 0, failures = 0;
  int n_dec = 0, n_keep = 0, n_inc = 0;

  quotient_correction dut (
    .clk(clk), .rst_n(rst_n), .u(u), .s(s), .q(q), .in_valid(in_valid),
    .b_star(b_star), .lambda_lo(lambda_lo), .out_valid(out_valid), .quotient(quotient));

  always #5 clk = ~clk;

  initial begin
    #2000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int unsigned uu;
    logic ss;
    int d;
    logic [2*W-1:0] qq, lam, b;
    repeat (2) @(posedge clk);
    @(negedge clk) rst_n = 1'b1;
    for (int k = 0; k < 6000; k++) begin
      uu = 1 + ($urandom % (W - 2));
      ss = 1'($urandom);
      q  = ss ? W'((64'd1 << W) - (64'd1 << uu) + 1) : W'((64'd1 << W) - (64'd1 << uu) - 1);
      qq = (2*W)'(q) * (2*W)'(q);
      lam = {$urandom, $urandom} % qq;
      if (k % 7 == 0) lam = (2*W)'(q) * (2*W)'($urandom % q);   // exact multiple
      b = lam / (2*W)'(q);
      d = int'($urandom % 3) - 1;
      if (b == 0 && d < 0) d = 0;
      if (b == (2*W)'(q) - 1 && d > 0) d = 0;
      u = UW'(uu); s = ss;
      b_star = W'(b) + W'(d);
      lambda_lo = lam[W+1:0];
      in_valid = 1'b1;
      @(posedge clk); #1;
      checks++;
      if (!out_valid) begin failures++; $display("out_valid missing"); end
      checks++;
      if (quotient !== W'(b)) begin
        failures++;
        if (failures < 10) $display("u=%0d s=%0d lam=%h b*=%h got %h exp %h", uu, ss, lam, b_star, quotient, b);
      end
      if (d < 0)       n_inc++;    // b* = b - 1 must be incremented
      else if (d == 0) n_keep++;
      else             n_dec++;
      @(negedge clk);
      in_valid = 1'b0;
      @(posedge clk); #1;
      checks++;
      if (out_valid) begin failures++; $display("out_valid without input"); end
      @(negedge clk);
    end
    $display("corrections: dec=%0d keep=%0d inc=%0d", n_dec, n_keep, n_inc);
    checks++; if (n_dec == 0) failures++;
    checks++; if (n_keep == 0) failures++;
    checks++; if (n_inc == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
