// tb_star_workloads: the engine on the softmax workload of whole BERT-base
// attention heads, at the engine's default size.
//
// One head's score matrix has L rows of L scores; softmax runs once per row.
// This test streams every row of one head back to back, with no idle input
// cycles, for:
//   * L = 128 with CNEWS-format scores (Q6.2),
//   * L = 128 with MRPC-format scores (Q6.3),
//   * L = 128 with CoLA-format scores (Q5.2),
//   * L = 512 with Q6.3 scores (the longest sequence).
// Scores are pseudo-random and roughly bell-shaped. Every output is compared
// bit-exactly with a fixed-point reference model of the engine's arithmetic,
// and with double-precision softmax (absolute error below 0.01). It also
// checks the rate: with the input always valid, a head of L rows must finish
// within L * (2L + 3) + L + 40 cycles. That is the front end's 2L + 3 cycles
// per row plus the last row's division.
module tb_star_workloads;
  import star_pkg::*;
  logic clk = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic rst_n;
  logic prog_en;
  prog_sel_e prog_sel;
  logic [8:0] prog_row;
  logic [LUT_W-1:0] prog_data;
  logic in_valid, in_ready, in_last;
  score_t in_data;
  logic out_valid, out_last, front_stall;
  logic [OUT_W-1:0] out_data;
  logic [8:0] out_idx;

  star_softmax_engine dut (.*);

  int lut [EXP_ROWS];
  int  exp_p   [$];
  real exp_real[$];
  int cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;
  real max_err = 0.0;
  int n_out = 0;

  task automatic check(bit ok, string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  initial begin
    repeat (1000000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(negedge clk) begin
    if (rst_n && out_valid) begin
      n_out++;
      if (exp_p.size() == 0) check(0, "unexpected output");
      else begin
        int p; real pr, err;
        p = exp_p.pop_front(); pr = exp_real.pop_front();
        check(out_data == 16'(p), $sformatf("got %0d exp %0d", out_data, p));
        err = real'(out_data) / 65536.0 - pr;
        if (err < 0) err = -err;
        if (err > max_err) max_err = err;
        if (err >= 0.01) check(0, $sformatf("accuracy %f", err));
      end
    end
  end

  function automatic int rnd_score(int ib, int fb, int spread);
    int v, lim;
    v = (int'($urandom_range(0, spread)) + int'($urandom_range(0, spread))) - spread;
    lim = 1 << (ib + fb - 1);
    if (v > lim - 1) v = lim - 1;
    if (v < -lim) v = -lim;
    return v << (3 - fb);
  endfunction

  task automatic model(input int xs [$]);
    int mx;
    longint s;
    real rs;
    mx = -1000;
    foreach (xs[i]) if (xs[i] > mx) mx = xs[i];
    s = 0; rs = 0.0;
    foreach (xs[i]) begin
      s += (mx - xs[i] > 255) ? 0 : lut[mx - xs[i]];
      rs += $exp(real'(xs[i] - mx) / 8.0);
    end
    foreach (xs[i]) begin
      longint q;
      q = (longint'((mx - xs[i] > 255) ? 0 : lut[mx - xs[i]]) << 16) / s;
      if (q > 65535) q = 65535;
      exp_p.push_back(int'(q));
      exp_real.push_back($exp(real'(xs[i] - mx) / 8.0) / rs);
    end
  endtask

  task automatic prog(input prog_sel_e sel, input int row, input int data);
    @(negedge clk);
    prog_en = 1; prog_sel = sel; prog_row = 9'(row); prog_data = LUT_W'(data);
  endtask

  // Stream one head: L rows of L scores, input always valid.
  task automatic run_head(input string name, input int len, input int ib, input int fb, input int spread);
    int t0, t1, xs [$];
    bit acc;
    t0 = cyc;
    for (int row = 0; row < len; row++) begin
      xs.delete();
      for (int i = 0; i < len; i++) xs.push_back(rnd_score(ib, fb, spread));
      model(xs);
      for (int i = 0; i < len; i++) begin
        in_valid = 1; in_data = score_t'(xs[i]); in_last = (i == len - 1);
        // in_ready is sampled half a cycle before the edge that uses it
        do begin
          acc = in_ready;
          @(posedge clk);
          @(negedge clk);
        end while (!acc);
      end
      in_valid = 0; in_last = 0;
    end
    wait (exp_p.size() == 0);
    t1 = cyc;
    $display("%s: %0d rows of %0d in %0d cycles (%0d per row), max abs error %f",
             name, len, len, t1 - t0, (t1 - t0) / len, max_err);
    check(t1 - t0 <= len * (2 * len + 3) + len + 40, $sformatf("%s too slow", name));
  endtask

  initial begin
    rst_n = 0; prog_en = 0; prog_sel = PROG_CAMSUB; prog_row = 0; prog_data = 0;
    in_valid = 0; in_data = 0; in_last = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int k = 0; k < EXP_ROWS; k++) begin
      int q;
      q = int'($floor($exp(-real'(k) / 8.0) * real'(1 << LUT_W) + 0.5));
      if (q > (1 << LUT_W) - 1) q = (1 << LUT_W) - 1;
      lut[k] = q;
    end
    for (int r = 0; r < SUB_ROWS; r++) prog(PROG_CAMSUB, r, (255 - r) & 9'h1FF);
    for (int k = 0; k < EXP_ROWS; k++) begin
      prog(PROG_EXPCAM, k, k);
      prog(PROG_LUT, k, lut[k]);
      prog(PROG_VMM, k, lut[k]);
    end
    @(negedge clk); prog_en = 0;
    repeat (2) @(negedge clk);

    run_head("CNEWS L=128 Q6.2", 128, 6, 2, 40);
    run_head("MRPC  L=128 Q6.3", 128, 6, 3, 80);
    run_head("CoLA  L=128 Q5.2", 128, 5, 2, 40);
    run_head("L=512 Q6.3",       512, 6, 3, 100);
    check(n_out == 3 * 128 * 128 + 512 * 512, "output count");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
