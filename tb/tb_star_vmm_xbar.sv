// tb_star_vmm_xbar: self-checking test of the VMM crossbar.
//
// Loads the 256 x 18 exponential table, applies random count vectors (sparse
// and dense, totals up to 512) and checks the output against
// sum_k count[k] * word[k] computed directly.
module tb_star_vmm_xbar;
  localparam int ROWS = 256;
  localparam int W = 18;
  logic clk = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic prog_en;
  logic [7:0] prog_row;
  logic [W-1:0] prog_data;
  logic [9:0] count [ROWS];
  logic [27:0] sum;
  int words [ROWS];

  star_vmm_xbar #(.ROWS(ROWS), .W(W), .CNT_W(10)) dut (.*);

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
    prog_en = 0; prog_row = 0; prog_data = 0;
    foreach (count[i]) count[i] = '0;
    for (int r = 0; r < ROWS; r++) begin
      int q;
      q = int'($floor($exp(-real'(r) / 8.0) * real'(1 << W) + 0.5));
      if (q > (1 << W) - 1) q = (1 << W) - 1;
      words[r] = q;
      @(negedge clk); prog_en = 1; prog_row = 8'(r); prog_data = W'(q);
    end
    @(negedge clk); prog_en = 0;
    #1 check(sum == 0, "zero counts");
    for (int t = 0; t < 100; t++) begin
      longint expv;
      int total, n;
      foreach (count[i]) count[i] = '0;
      total = 0;
      n = (t == 0) ? 512 : int'($urandom_range(1, 512));
      for (int i = 0; i < n; i++) begin
        int r;
        r = (t % 2) ? int'($urandom_range(0, 40)) : int'($urandom_range(0, ROWS-1));
        if (t == 0) r = 0;
        count[r] = count[r] + 1'b1;
      end
      expv = 0;
      for (int r = 0; r < ROWS; r++) expv += longint'(count[r]) * longint'(words[r]);
      #1;
      check(sum == 28'(expv), $sformatf("trial %0d: %0d vs %0d", t, sum, expv));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
