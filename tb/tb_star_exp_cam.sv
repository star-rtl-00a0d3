// tb_star_exp_cam: self-checking test of the exponential-stage CAM.
//
// Loads row k with magnitude k (the published 4-row example: rows 00, 01,
// 10, 11 and key 01 matching ML2), then checks every in-range key returns
// the one-hot vector of its own row and out-of-range keys return nothing.
module tb_star_exp_cam;
  localparam int ROWS = 256;
  logic clk = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic prog_en;
  logic [7:0] prog_row;
  logic [8:0] prog_data, key;
  logic [ROWS-1:0] match;

  star_exp_cam #(.ROWS(ROWS), .KEY_W(9)) dut (.*);

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
    prog_en = 0; prog_row = 0; prog_data = 0; key = 0;
    for (int r = 0; r < ROWS; r++) begin
      @(negedge clk); prog_en = 1; prog_row = 8'(r); prog_data = 9'(r);
    end
    @(negedge clk); prog_en = 0;
    key = 9'd1; #1;
    check(match[3:0] == 4'b0010 && match[ROWS-1:4] == '0, "example: key 01 matches ML2");
    for (int k = 0; k < 512; k++) begin
      logic [ROWS-1:0] e;
      key = 9'(k); #1;
      e = '0; if (k < ROWS) e[k] = 1'b1;
      check(match == e, $sformatf("key %0d", k));
    end
    // reprogram one row and check it moves
    @(negedge clk); prog_en = 1; prog_row = 8'd7; prog_data = 9'd300;
    @(negedge clk); prog_en = 0;
    key = 9'd300; #1;
    check(match == (ROWS'(1) << 7), "reprogrammed row");
    key = 9'd7; #1;
    check(match == '0, "old word gone");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
