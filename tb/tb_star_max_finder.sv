// tb_star_max_finder: self-checking test of the OR merge and first-one search.
//
// Feeds random sets of one-hot match vectors (and the published 4-row
// example: matches at rows 3, 2, 4, 4 of WL1..WL4 give OR = 0111 and x_max
// at WL2), then checks the merged vector, the first set row and that clear
// empties it. Expected results are computed by a separate scan.
module tb_star_max_finder;
  localparam int ROWS = 512;
  logic clk = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic rst_n, clear, acc_en;
  logic [ROWS-1:0] match_in, or_vec;
  logic [8:0] max_row;
  logic max_valid;

  star_max_finder #(.ROWS(ROWS)) dut (.*);

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
    rst_n = 0; clear = 0; acc_en = 0; match_in = '0;
    #12 rst_n = 1;
    @(negedge clk);
    check(!max_valid && or_vec == '0, "not empty after reset");
    // published example, rows are 0-based here (WL3 -> row 2)
    begin
      int rows_ex [4] = '{2, 1, 3, 3};
      for (int i = 0; i < 4; i++) begin
        match_in = '0; match_in[rows_ex[i]] = 1'b1; acc_en = 1;
        @(negedge clk);
      end
      acc_en = 0;
      check(or_vec[3:0] == 4'b1110 && or_vec[ROWS-1:4] == '0, "example OR vector");
      check(max_valid && max_row == 9'd1, "example max row (WL2)");
    end
    for (int t = 0; t < 60; t++) begin
      int n, mn;
      logic [ROWS-1:0] ref_or;
      clear = 1; @(negedge clk); clear = 0;
      check(!max_valid, "clear");
      n = $urandom_range(1, 40);
      mn = ROWS; ref_or = '0;
      for (int i = 0; i < n; i++) begin
        int r;
        r = (t % 3 == 0) ? int'($urandom_range(0, 7)) : int'($urandom_range(0, ROWS-1));
        match_in = '0; match_in[r] = 1'b1; acc_en = 1;
        ref_or[r] = 1'b1;
        if (r < mn) mn = r;
        @(negedge clk);
      end
      acc_en = 0; match_in = '1;
      @(negedge clk);
      check(or_vec == ref_or, "OR vector");
      check(max_valid && max_row == 9'(mn), $sformatf("max row got %0d exp %0d", max_row, mn));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
