// End-to-end testbench of int_divider at its default size (W = 32, T = 3).
//
// For every exponent u from 1 to 23 (the range that three iteration stages
// cover at W = 32) and both signs s, streams dividends lambda < q^2 into
// the divider, mostly back to back, and checks each quotient against
// floor(lambda / q) from a wide division, together with the latency of T+1
// clocks. u and s change only when the pipeline is empty.
//
// It counts the mechanisms of the design and fails if one never occurs:
//   * each correction outcome (b* - 1, b*, b* + 1), classified by a
//     software model of the estimate b*,
//   * dividends needing 1, 2 and 3 iterations of the exact fixed-point loop,
//   * both forms of q (s = 0 and s = 1) and configuration changes,
//   * exact multiples of q and back-to-back issue in consecutive clocks.
module int_divider_tb;
  localparam int unsigned W   = 32;
  localparam int unsigned T   = 3;
  localparam int unsigned UW  = $clog2(W);
  localparam int unsigned MAXU = 23;
  localparam int unsigned N_PER_CFG = 200;

  logic           clk = 1'b0, rst_n = 1'b0;
  logic [UW-1:0]  u = UW'(1);
  logic           s = 1'b0;
  logic           in_valid = 1'b0;
  logic [2*W-1:0] lambda = '0;
  logic           out_valid;
  logic [W-1:0]   quotient;
  int checks = 0, failures = 0, cycle = 0;
  int n_corr[3] = '{0, 0, 0};
  int n_iter[4] = '{0, 0, 0, 0};
  int n_s[2] = '{0, 0};
  int n_cfg = 0, n_exact = 0, n_b2b = 0;

  int_divider dut (
    .clk(clk), .rst_n(rst_n), .u(u), .s(s), .in_valid(in_valid), .lambda(lambda),
    .out_valid(out_valid), .quotient(quotient));

  always #5 clk = ~clk;
  always @(posedge clk) cycle++;

  logic [W-1:0] q_b[$];
  int           q_cycle[$];
  logic [2*W-1:0] q_lam[$];

  // b* as the hardware forms it: T steps of b_{i+1} = c + floor(b_i m / 2^W) + 1
  function automatic logic [W-1:0] sw_bstar(int unsigned uu, logic ss, logic [2*W-1:0] lam);
    logic [127:0] m, bi, c;
    m  = ss ? ((128'd1 << uu) - 1) : ((128'd1 << uu) + 1);
    c  = 128'(lam >> W);
    bi = c;
    for (int i = 0; i < T; i++)
      bi = (c + ((bi * m) >> W) + 1) & ((128'd1 << W) - 1);
    return W'(bi);
  endfunction

  // iterations the exact loop of the algorithm needs: b_0 = c,
  // b_{i+1} = c + ceil(b_i (2^u -/+ 1) / 2^W), until b stops changing
  function automatic int exact_iters(int unsigned uu, logic ss, logic [2*W-1:0] lam);
    logic [127:0] m, bi, bn, c;
    int n = 0;
    m  = ss ? ((128'd1 << uu) - 1) : ((128'd1 << uu) + 1);
    c  = 128'(lam >> W);
    bi = c;
    for (int i = 0; i < 40; i++) begin
      bn = c + ((bi * m + (128'd1 << W) - 1) >> W);
      if (bn == bi) break;
      bi = bn; n++;
    end
    return n;
  endfunction

  always @(posedge clk) begin
    #1;
    if (rst_n && out_valid) begin
      checks++;
      if (q_b.size() == 0) begin
        failures++; $display("unexpected out_valid");
      end else begin
        logic [W-1:0] eb; int cy; logic [2*W-1:0] lam;
        eb = q_b.pop_front(); cy = q_cycle.pop_front(); lam = q_lam.pop_front();
        if (quotient !== eb) begin
          failures++;
          if (failures < 10) $display("u=%0d s=%0d lambda=%h got %h exp %h", u, s, lam, quotient, eb);
        end
        checks++;
        if (cycle - cy != T + 1) begin
          failures++; if (failures < 10) $display("latency %0d", cycle - cy);
        end
      end
    end
  end

  initial begin
    #20000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [W-1:0] q;
    logic [2*W-1:0] qq, lam;
    int it;
    logic prev_v;
    repeat (3) @(posedge clk);
    @(negedge clk) rst_n = 1'b1;
    for (int unsigned uu = 1; uu <= MAXU; uu++) begin
      for (int sv = 0; sv < 2; sv++) begin
        @(negedge clk);
        u = UW'(uu); s = 1'(sv); n_cfg++;
        q  = (sv != 0) ? W'((64'd1 << W) - (64'd1 << uu) + 1) : W'((64'd1 << W) - (64'd1 << uu) - 1);
        qq = (2*W)'(q) * (2*W)'(q);
        prev_v = 1'b0;
        for (int k = 0; k < N_PER_CFG; k++) begin
          case (k)
            0: lam = qq - 1;
            1: lam = 0;
            2: lam = (2*W)'(q) - 1;
            3: lam = (2*W)'(q);
            4: lam = (2*W)'(q) * (2*W)'(q - 1);
            5: lam = (64'd1 << W) - 1;
            default: lam = {$urandom, $urandom} % qq;
          endcase
          if (k % 5 == 1 && k > 5) lam = (2*W)'(q) * (2*W)'($urandom % q);
          in_valid = ($urandom % 8) != 0;
          lambda   = lam;
          if (in_valid) begin
            q_b.push_back(W'(lam / (2*W)'(q)));
            q_cycle.push_back(cycle);
            q_lam.push_back(lam);
            it = exact_iters(uu, 1'(sv), lam);
            n_iter[it > 3 ? 0 : it]++;
            begin
              logic [W-1:0] bs, bq;
              bs = sw_bstar(uu, 1'(sv), lam);
              bq = W'(lam / (2*W)'(q));
              if (bs == bq - 1)      n_corr[2]++;   // needs b* + 1
              else if (bs == bq)     n_corr[1]++;
              else if (bs == bq + 1) n_corr[0]++;   // needs b* - 1
            end
            n_s[sv]++;
            if (lam % (2*W)'(q) == 0) n_exact++;
            if (prev_v) n_b2b++;
          end
          prev_v = in_valid;
          @(negedge clk);
        end
        in_valid = 1'b0;
        repeat (T + 3) @(negedge clk);
      end
    end
    checks++;
    if (q_b.size() != 0) begin failures++; $display("%0d results missing", q_b.size()); end
    $display("corrections dec=%0d keep=%0d inc=%0d", n_corr[0], n_corr[1], n_corr[2]);
    $display("exact loop iterations: 0=%0d 1=%0d 2=%0d 3=%0d", n_iter[0], n_iter[1], n_iter[2], n_iter[3]);
    $display("s=0: %0d  s=1: %0d  config changes: %0d  exact multiples: %0d  back-to-back: %0d",
             n_s[0], n_s[1], n_cfg, n_exact, n_b2b);
    for (int i = 0; i < 3; i++) begin checks++; if (n_corr[i] == 0) failures++; end
    for (int i = 1; i < 4; i++) begin checks++; if (n_iter[i] == 0) failures++; end
    checks++; if (n_s[0] == 0 || n_s[1] == 0) failures++;
    checks++; if (n_cfg < 2) failures++;
    checks++; if (n_exact == 0) failures++;
    checks++; if (n_b2b == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
