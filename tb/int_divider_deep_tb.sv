// Testbench of int_divider with a deeper estimate pipeline, W = 32, T = 15.
//
// Exponents u >= 24 need more than three iteration stages; the number
// needed is the integer t with t*u > (t-1)*W and (t+1)*u <= t*W, which
// reaches 15 at u = 30. With T = 15 stages, this testbench streams random
// dividends lambda < q^2 (plus corner values) for u = 24 to 30 and both
// signs s, and compares every quotient with floor(lambda / q) and the
// latency with T+1 clocks.
module int_divider_deep_tb;
  localparam int unsigned W  = 32;
  localparam int unsigned T  = 15;
  localparam int unsigned UW = $clog2(W);
  localparam int unsigned N_PER_CFG = 400;

  logic           clk = 1'b0, rst_n = 1'b0;
  logic [UW-1:0]  u = UW'(1);
  logic           s = 1'b0;
  logic           in_valid = 1'b0;
  logic [2*W-1:0] lambda = '0;
  logic           out_valid;
  logic [W-1:0]   quotient;
  int checks = 0, failures = 0, cycle = 0;

  int_divider #(.W(W), .T(T)) dut (
    .clk(clk), .rst_n(rst_n), .u(u), .s(s), .in_valid(in_valid), .lambda(lambda),
    .out_valid(out_valid), .quotient(quotient));

  always #5 clk = ~clk;
  always @(posedge clk) cycle++;

  logic [W-1:0] q_b[$];
  int           q_cycle[$];

  always @(posedge clk) begin
    #1;
    if (rst_n && out_valid) begin
      checks++;
      if (q_b.size() == 0) begin
        failures++; $display("unexpected out_valid");
      end else begin
        logic [W-1:0] eb; int cy;
        eb = q_b.pop_front(); cy = q_cycle.pop_front();
        if (quotient !== eb || cycle - cy != T + 1) begin
          failures++;
          if (failures < 10) $display("u=%0d s=%0d got %h exp %h latency %0d", u, s, quotient, eb, cycle - cy);
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
    repeat (3) @(posedge clk);
    @(negedge clk) rst_n = 1'b1;
    for (int unsigned uu = 24; uu <= 30; uu++) begin
      for (int sv = 0; sv < 2; sv++) begin
        @(negedge clk);
        u = UW'(uu); s = 1'(sv);
        q  = (sv != 0) ? W'((64'd1 << W) - (64'd1 << uu) + 1) : W'((64'd1 << W) - (64'd1 << uu) - 1);
        qq = (2*W)'(q) * (2*W)'(q);
        for (int k = 0; k < N_PER_CFG; k++) begin
          case (k)
            0: lam = qq - 1;
            1: lam = 0;
            2: lam = (2*W)'(q) * (2*W)'(q - 1);
            default: lam = {$urandom, $urandom} % qq;
          endcase
          in_valid = 1'b1;
          lambda   = lam;
          q_b.push_back(W'(lam / (2*W)'(q)));
          q_cycle.push_back(cycle);
          @(negedge clk);
        end
        in_valid = 1'b0;
        repeat (T + 3) @(negedge clk);
      end
    end
    checks++;
    if (q_b.size() != 0) begin failures++; $display("%0d results missing", q_b.size()); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
