// Self-checking testbench of bstar_pipeline.
//
// Streams one dividend per clock for several exponents u and both signs s
// (configuration changes only after the pipeline has drained). For each
// dividend it checks, T clocks after it entered, that
//   * out_valid is set exactly then (latency T, one result per clock),
//   * b_star equals the value of the fixed-point iteration run in software
//     for T steps, b_{i+1} = c + floor(b_i (2^u -/+ 1) / 2^W) + 1 (the
//     step as the hardware defines it; it differs from the exact ceiling
//     only for b_i = 0, i.e. lambda < 2^W),
//   * b_star is floor(lambda/q) - 1, + 0 or + 1,
//   * lambda_lo is lambda[W+1:0].
module bstar_pipeline_tb;
  localparam int unsigned W  = 32;
  localparam int unsigned T  = 3;
  localparam int unsigned UW = $clog2(W);
  localparam int unsigned N_PER_CFG = 300;

  logic           clk = 1'b0, rst_n = 1'b0;
  logic [UW-1:0]  u = '0;
  logic           s = 1'b0;
  logic           in_valid = 1'b0;
  logic [2*W-1:0] lambda = '0;
  logic           out_valid;
  logic [W-1:0]   b_star;
  logic [W+1:0]   lambda_lo;
  int checks = 0, failures = 0;
  int cycle = 0;

  bstar_pipeline dut (
    .clk(clk), .rst_n(rst_n), .u(u), .s(s), .in_valid(in_valid), .lambda(lambda),
    .out_valid(out_valid), .b_star(b_star), .lambda_lo(lambda_lo));

  always #5 clk = ~clk;
  always @(posedge clk) cycle++;

  // expected outputs, queued in issue order
  logic [2*W-1:0] q_lambda[$];
  int             q_cycle[$];
  logic [W-1:0]   q_bstar[$];
  logic [W-1:0]   q_b[$];

  function automatic logic [W-1:0] sw_bstar(int unsigned uu, logic ss, logic [2*W-1:0] lam);
    logic [127:0] m, bi, c;
    m  = ss ? ((128'd1 << uu) - 1) : ((128'd1 << uu) + 1);
    c  = 128'(lam >> W);
    bi = c;
    for (int i = 0; i < T; i++)
      bi = (c + ((bi * m) >> W) + 1) & ((128'd1 << W) - 1);
    return W'(bi);
  endfunction

  function automatic logic [W-1:0] modulus(int unsigned uu, logic ss);
    return ss ? W'((64'd1 << W) - (64'd1 << uu) + 1) : W'((64'd1 << W) - (64'd1 << uu) - 1);
  endfunction

  // check outputs
  always @(posedge clk) begin
    #1;
    if (rst_n) begin
      if (out_valid) begin
        checks++;
        if (q_cycle.size() == 0) begin
          failures++; $display("unexpected out_valid");
        end else begin
          logic [2*W-1:0] lam; int cy; logic [W-1:0] eb, bq;
          lam = q_lambda.pop_front(); cy = q_cycle.pop_front();
          eb = q_bstar.pop_front(); bq = q_b.pop_front();
          if (cycle - cy != T) begin failures++; $display("latency %0d", cycle - cy); end
          checks++;
          if (b_star !== eb) begin
            failures++;
            if (failures < 10) $display("b* mismatch lam=%h got %h exp %h", lam, b_star, eb);
          end
          checks++;
          if (!(b_star == bq || b_star == bq - 1 || b_star == bq + 1)) begin
            failures++; if (failures < 10) $display("b* not within 1 of b");
          end
          checks++;
          if (lambda_lo !== lam[W+1:0]) begin failures++; $display("lambda_lo mismatch"); end
        end
      end
    end
  end

  initial begin
    #5000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int unsigned us[6] = '{1, 9, 15, 17, 21, 23};
    logic [W-1:0] q;
    logic [2*W-1:0] qq, lam;
    repeat (3) @(posedge clk);
    @(negedge clk) rst_n = 1'b1;
    foreach (us[i]) begin
      for (int sv = 0; sv < 2; sv++) begin
        @(negedge clk);
        u = UW'(us[i]); s = 1'(sv);
        q = modulus(us[i], 1'(sv));
        qq = (2*W)'(q) * (2*W)'(q);
        for (int k = 0; k < N_PER_CFG; k++) begin
          lam = {$urandom, $urandom} % qq;
          if (k == 0) lam = qq - 1;
          if (k == 1) lam = 0;
          if (k == 2) lam = (2*W)'(q) * (2*W)'(q - 1);
          in_valid = ($urandom % 4) != 0 || k < 10;
          lambda = lam;
          if (in_valid) begin
            q_lambda.push_back(lam); q_cycle.push_back(cycle);
            q_bstar.push_back(sw_bstar(us[i], 1'(sv), lam));
            q_b.push_back(W'(lam / (2*W)'(q)));
          end
          @(negedge clk);
        end
        in_valid = 1'b0;
        repeat (T + 2) @(negedge clk);
      end
    end
    checks++;
    if (q_cycle.size() != 0) begin failures++; $display("%0d results missing", q_cycle.size()); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
