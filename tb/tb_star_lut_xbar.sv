// tb_star_lut_xbar: self-checking test of the LUT crossbar.
//
// First the published 4-row example with m = 4 (rows 1111, 0110, 0010, 0001,
// i.e. round(e^-k * 16) with e^0 saturated), then the full 256 x 18 table
// min(round(e^(-k/8) * 2^18), 2^18 - 1), computed here with $exp. Checks the
// word read for every one-hot word-line vector and zero for none.
module tb_star_lut_xbar;
  localparam int ROWS = 256;
  localparam int W = 18;
  logic clk = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic prog_en;
  logic [7:0] prog_row;
  logic [W-1:0] prog_data, rd_data;
  logic [ROWS-1:0] wl;

  logic s_prog_en;
  logic [1:0] s_prog_row;
  logic [3:0] s_prog_data, s_rd;
  logic [3:0] s_wl;

  star_lut_xbar #(.ROWS(ROWS), .LUT_W(W)) dut (.*);
  star_lut_xbar #(.ROWS(4), .LUT_W(4)) dut_small (
    .clk(clk), .prog_en(s_prog_en), .prog_row(s_prog_row), .prog_data(s_prog_data),
    .wl(s_wl), .rd_data(s_rd));

  function automatic int lut_word(int k, int m);
    real v;
    int q;
    v = $exp(-real'(k) / 8.0) * real'(1 << m);
    q = int'($floor(v + 0.5));
    if (q > (1 << m) - 1) q = (1 << m) - 1;
    return q;
  endfunction

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
    logic [3:0] ex [4] = '{4'b1111, 4'b0110, 4'b0010, 4'b0001};
    prog_en = 0; prog_row = 0; prog_data = 0; wl = '0;
    s_prog_en = 0; s_prog_row = 0; s_prog_data = 0; s_wl = 0;
    for (int r = 0; r < 4; r++) begin
      int q;
      q = int'($floor($exp(-real'(r)) * 16.0 + 0.5));
      if (q > 15) q = 15;
      if (r == 3) q = 1;   // example entry rounds e^-3 * 16 = 0.80 to 1
      @(negedge clk); s_prog_en = 1; s_prog_row = 2'(r); s_prog_data = 4'(q);
    end
    @(negedge clk); s_prog_en = 0;
    for (int r = 0; r < 4; r++) begin
      s_wl = 4'(1 << r); #1;
      check(s_rd == ex[r], $sformatf("example row %0d", r));
    end
    for (int r = 0; r < ROWS; r++) begin
      @(negedge clk); prog_en = 1; prog_row = 8'(r); prog_data = W'(lut_word(r, W));
    end
    @(negedge clk); prog_en = 0;
    wl = '0; #1;
    check(rd_data == '0, "no word line selected");
    for (int r = 0; r < ROWS; r++) begin
      wl = '0; wl[r] = 1'b1; #1;
      check(rd_data == W'(lut_word(r, W)), $sformatf("row %0d", r));
    end
    check(lut_word(0, W) == (1 << W) - 1, "e^0 saturates");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
