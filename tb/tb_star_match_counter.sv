// tb_star_match_counter: self-checking test of the per-row match counters.
//
// Applies random one-hot (and occasionally all-zero) match vectors with
// random enables, keeps reference counts, and checks all 256 counters after
// each burst and after clear.
module tb_star_match_counter;
  localparam int ROWS = 256;
  logic clk = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic rst_n, clear, inc_en;
  logic [ROWS-1:0] match;
  logic [9:0] count [ROWS];
  int ref_cnt [ROWS];

  star_match_counter #(.ROWS(ROWS), .CNT_W(10)) dut (.*);

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

  initial begin
    rst_n = 0; clear = 0; inc_en = 0; match = '0;
    #12 rst_n = 1;
    for (int b = 0; b < 8; b++) begin
      @(negedge clk); clear = 1; @(negedge clk); clear = 0;
      foreach (ref_cnt[i]) ref_cnt[i] = 0;
      for (int i = 0; i < 512; i++) begin
        int r;
        r = (b % 2) ? int'($urandom_range(0, 15)) : int'($urandom_range(0, ROWS-1));
        match = '0;
        if (i % 17 != 5) match[r] = 1'b1;
        inc_en = (i % 13 != 0);
        if (inc_en && match[r]) ref_cnt[r]++;
        @(negedge clk);
      end
      inc_en = 0;
      @(negedge clk);
      for (int r = 0; r < ROWS; r++)
        check(count[r] == 10'(ref_cnt[r]), $sformatf("burst %0d row %0d: %0d vs %0d", b, r, count[r], ref_cnt[r]));
    end
    @(negedge clk); clear = 1; @(negedge clk); clear = 0;
    for (int r = 0; r < ROWS; r++) check(count[r] == 0, "after clear");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
