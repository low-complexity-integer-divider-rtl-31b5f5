// Exhaustive testbench of int_divider at a reduced word size, W = 8, T = 3.
//
// For every exponent u from 1 to 6 (= 3W/4, the largest u that three
// iteration stages cover) and both signs s, every dividend 0 <= lambda < q^2
// is streamed through the divider, one per clock, and every quotient is
// compared with floor(lambda / q) together with the latency of T+1 clocks.
// This covers, among others, the u = W/2, s = 0 case, which needs two
// iterations although the iteration-count formula gives one.
module int_divider_exhaustive_tb;
  localparam int unsigned W  = 8;
  localparam int unsigned T  = 3;
  localparam int unsigned UW = $clog2(W);

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
          if (failures < 10) $display("u=%0d s=%0d got %0d exp %0d latency %0d", u, s, quotient, eb, cycle - cy);
        end
      end
    end
  end

  initial begin
    #100000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int unsigned q;
    repeat (3) @(posedge clk);
    @(negedge clk) rst_n = 1'b1;
    for (int unsigned uu = 1; uu <= 6; uu++) begin
      for (int sv = 0; sv < 2; sv++) begin
        @(negedge clk);
        u = UW'(uu); s = 1'(sv);
        q = (sv != 0) ? (256 - (1 << uu) + 1) : (256 - (1 << uu) - 1);
        for (int unsigned lam = 0; lam < q * q; lam++) begin
          in_valid = 1'b1;
          lambda   = (2*W)'(lam);
          q_b.push_back(W'(lam / q));
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
