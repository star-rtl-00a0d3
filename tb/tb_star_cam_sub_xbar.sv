// tb_star_cam_sub_xbar: self-checking test of the CAM/SUB crossbar.
//
// Loads all 512 Q6.3 score values in descending order (row r holds 255 - r),
// then checks in CAM mode that a search returns exactly the one-hot vector of
// the expected row, and in SUB mode that +1 on row a and -1 on row b give
// value(a) - value(b), including a == b and single-sided drives. Also checks
// that each output is zero in the other mode. Expected values come from the
// row-to-value formula, not from the crossbar. A second, 4-row x 4-bit
// instance holds the words of the published four-row example (1001, 1010,
// 1011, 1100 on WL1..WL4, read as signed) and checks +1 on WL3 with -1 on
// WL2 (-5 - -6 = 1) and a search that matches WL3.
module tb_star_cam_sub_xbar;
  import star_pkg::*;
  localparam int ROWS = 512;
  logic clk = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic           prog_en;
  logic [8:0]     prog_row;
  logic [8:0]     prog_data;
  xb_mode_e       mode;
  logic [8:0]     search_key;
  logic [ROWS-1:0] match, drive_pos, drive_neg;
  logic signed [9:0] sub_out;

  star_cam_sub_xbar #(.ROWS(ROWS), .DATA_W(9)) dut (.*);

  logic        s_prog_en;
  logic [1:0]  s_prog_row;
  logic [3:0]  s_prog_data, s_key;
  logic [3:0]  s_match, s_pos, s_neg;
  logic signed [4:0] s_sub;
  xb_mode_e    s_mode;
  star_cam_sub_xbar #(.ROWS(4), .DATA_W(4)) dut_small (
    .clk(clk), .prog_en(s_prog_en), .prog_row(s_prog_row), .prog_data(s_prog_data),
    .mode(s_mode), .search_key(s_key), .match(s_match),
    .drive_pos(s_pos), .drive_neg(s_neg), .sub_out(s_sub));

  function automatic int row_val(int r);
    return 255 - r;
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
    prog_en = 0; mode = XB_CAM; search_key = 0; drive_pos = 0; drive_neg = 0;
    prog_row = 0; prog_data = 0;
    s_prog_en = 0; s_prog_row = 0; s_prog_data = 0; s_key = 0; s_pos = 0; s_neg = 0;
    s_mode = XB_CAM;
    begin
      logic [3:0] ex [4] = '{4'b1001, 4'b1010, 4'b1011, 4'b1100};
      for (int r = 0; r < 4; r++) begin
        @(negedge clk); s_prog_en = 1; s_prog_row = 2'(r); s_prog_data = ex[r];
      end
      @(negedge clk); s_prog_en = 0;
      s_key = 4'b1011; #1;
      check(s_match == 4'b0100, "example: search matches WL3");
      s_mode = XB_SUB; s_pos = 4'b0100; s_neg = 4'b0010; #1;
      check(s_sub == 5'sd1, $sformatf("example: WL3 - WL2 = %0d", s_sub));
      check(s_match == 4'b0000, "example: no match in SUB mode");
    end
    for (int r = 0; r < ROWS; r++) begin
      @(negedge clk);
      prog_en = 1; prog_row = 9'(r); prog_data = 9'(row_val(r));
    end
    @(negedge clk); prog_en = 0;
    @(negedge clk);
    // CAM mode
    for (int k = 0; k < 300; k++) begin
      int v, er;
      logic [ROWS-1:0] exp_m;
      v = (k < 4) ? (k == 0 ? 255 : k == 1 ? -256 : k == 2 ? 0 : -1) : int'($urandom_range(0, 511)) - 256;
      search_key = 9'(v);
      mode = XB_CAM;
      #1;
      er = 255 - v;
      exp_m = '0; exp_m[er] = 1'b1;
      check(match == exp_m, $sformatf("search %0d: match row wrong", v));
      check(sub_out == 0, "sub_out not zero in CAM mode");
    end
    // SUB mode
    for (int k = 0; k < 300; k++) begin
      int a, b, expd;
      a = $urandom_range(0, ROWS-1);
      b = (k % 5 == 0) ? a : int'($urandom_range(0, ROWS-1));
      mode = XB_SUB; drive_pos = '0; drive_neg = '0;
      drive_pos[a] = 1'b1; drive_neg[b] = 1'b1;
      #1;
      expd = row_val(a) - row_val(b);
      check(sub_out == 10'(expd), $sformatf("sub rows %0d-%0d: got %0d exp %0d", a, b, sub_out, expd));
      check(match == '0, "match not zero in SUB mode");
    end
    // single-sided drives
    drive_pos = '0; drive_neg = '0; drive_neg[3] = 1'b1; #1;
    check(sub_out == 10'(-row_val(3)), "negative-only drive");
    drive_pos = '0; drive_neg = '0; drive_pos[400] = 1'b1; #1;
    check(sub_out == 10'(row_val(400)), "positive-only drive");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
