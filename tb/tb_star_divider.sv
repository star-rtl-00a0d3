// tb_star_divider: self-checking test of the pipelined divider.
//
// Issues one operand pair per cycle (random, with num <= den, plus the edge
// cases num == den, num == 0 and den == 1) and checks each result against
// min(floor(num * 2^16 / den), 2^16 - 1), its tag, and the fixed latency of
// 17 cycles.
module tb_star_divider;
  logic clk = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic rst_n, in_valid, out_valid;
  logic [17:0] num;
  logic [27:0] den;
  logic [9:0] in_tag, out_tag;
  logic [15:0] quot;

  star_divider #(.NUM_W(18), .DEN_W(28), .Q_W(16), .TAG_W(10)) dut (.*);

  longint exp_q [$];
  int     exp_t [$];
  int     exp_c [$];
  int     cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  task automatic check(bit ok, string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // checker
  always @(negedge clk) begin
    if (rst_n && out_valid) begin
      if (exp_q.size() == 0) begin
        check(0, "unexpected output");
      end else begin
        longint q; int t, c;
        q = exp_q.pop_front(); t = exp_t.pop_front(); c = exp_c.pop_front();
        check(quot == 16'(q), $sformatf("quot %0d exp %0d", quot, q));
        check(out_tag == 10'(t), "tag");
        check(cyc - c == 17, $sformatf("latency %0d", cyc - c));
      end
    end
  end

  initial begin
    rst_n = 0; in_valid = 0; num = 0; den = 1; in_tag = 0;
    #12 rst_n = 1;
    for (int i = 0; i < 2000; i++) begin
      longint n, d, q;
      @(negedge clk);
      d = (i % 50 == 1) ? 1 : longint'($urandom_range(1, 1 << 27) ) ;
      if (d > (1 << 28) - 1) d = (1 << 28) - 1;
      n = (i % 50 == 0 || i % 50 == 1) ? d : longint'($urandom_range(0, 262143));
      if (i % 50 == 2) n = 0;
      if (n > d) n = d;
      if (n > 262143) begin n = 262143; end
      in_valid = (i % 7 != 3);
      num = 18'(n); den = 28'(d); in_tag = 10'(i);
      if (in_valid) begin
        q = (n << 16) / d;
        if (q > 65535) q = 65535;
        exp_q.push_back(q); exp_t.push_back(i % 1024); exp_c.push_back(cyc);
      end
    end
    @(negedge clk); in_valid = 0;
    repeat (30) @(negedge clk);
    check(exp_q.size() == 0, "results missing");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
