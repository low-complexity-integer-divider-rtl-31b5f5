// Self-checking testbench of iteration_unit.
//
// Drives random and corner-case (u, s, c, b_in) and checks, one clock after
// each input, that b_out = c + floor(b_in * (2^u -/+ 1) / 2^W) + 1 mod 2^W,
// evaluated with wide integer multiplication. Corner cases include b_in
// whose low u bits are zero (the unit's carry-in is then set), b_in = 0
// (where that carry-in is what keeps the truncated sum exact) and the
// extreme exponents u = 1 and u = W-2. A watchdog ends the run if it
// stalls.
module iteration_unit_tb;
  localparam int unsigned W  = 32;
  localparam int unsigned UW = $clog2(W);

  logic          clk = 1'b0;
  logic [UW-1:0] u;
  logic          s;
  logic [W-1:0]  c, b_in, b_out;
  int checks = 0, failures = 0;

  iteration_unit dut (.clk(clk), .u(u), .s(s), .c(c), .b_in(b_in), .b_out(b_out));

  always #5 clk = ~clk;

  function automatic logic [W-1:0] ref_step(int unsigned uu, logic ss,
                                            logic [W-1:0] cc, logic [W-1:0] bb);
    logic [127:0] m, p;
    m = ss ? ((128'd1 << uu) - 1) : ((128'd1 << uu) + 1);
    p = 128'(bb) * m;
    return W'(128'(cc) + (p >> W) + 1);
  endfunction

  task automatic apply(int unsigned uu, logic ss, logic [W-1:0] cc, logic [W-1:0] bb);
    logic [W-1:0] exp_v;
    @(negedge clk);
    u = UW'(uu); s = ss; c = cc; b_in = bb;
    exp_v = ref_step(uu, ss, cc, bb);
    @(posedge clk); #1;
    checks++;
    if (b_out !== exp_v) begin
      failures++;
      if (failures < 10)
        $display("MISMATCH u=%0d s=%0d c=%h b=%h got %h exp %h", uu, ss, cc, bb, b_out, exp_v);
    end
  endtask

  initial begin
    #2000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int unsigned uu;
    logic [W-1:0] bb;
    u = '0; s = 1'b0; c = '0; b_in = '0;
    for (int k = 0; k < 4000; k++) begin
      uu = 1 + ($urandom % (W - 2));
      bb = $urandom;
      if (bb == '0) bb = 1;
      if (k % 4 == 0) bb = (bb >> uu) << uu;       // low u bits zero
      if (bb == '0) bb = W'(1) << uu;
      apply(uu, 1'(k % 2), $urandom, bb);
    end
    for (int unsigned e = 1; e <= W - 2; e++) begin
      apply(e, 1'b1, '1, '1);
      apply(e, 1'b0, 32'h1234_5678, W'(1) << e);
      apply(e, 1'b1, 32'h1234_5678, W'(1) << e);
      apply(e, 1'b1, '0, 1);
      apply(e, 1'b1, '0, '0);
      apply(e, 1'b0, 32'h0000_0100, '0);
      apply(e, 1'b1, 32'hffff_0000, '0);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
