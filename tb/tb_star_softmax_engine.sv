// tb_star_softmax_engine: end-to-end test of the softmax engine at its
// default size (512-row CAM/SUB crossbar, 256 x 18 exp crossbars, vectors up
// to 512 elements).
//
// The crossbars are programmed through the top's programming port with the
// tables the engine expects (descending scores, magnitudes, and
// min(round(e^(-k/8) * 2^18), 2^18 - 1)). Then a sequence of vectors is
// streamed in, with and without idle gaps, and every output is compared with
// a reference softmax computed here in the same fixed point:
//   d_i = x_i - max(x),  e_i = table[-d_i] (0 when -d_i > 255),
//   p_i = min(floor(e_i * 2^16 / sum(e)), 2^16 - 1).
// The vectors include score formats of the three evaluated data sets
// (Q6.2, Q6.3 and Q5.2, aligned to Q6.3), sequence length 128 and the
// maximum 512, a one-element vector, repeated maxima, differences beyond the
// table range, and a 512-element vector sent without a last flag.
// Mechanisms counted (each must occur): back-end division overlapping the
// front end's input of the next vector, front-end stall on two full banks,
// out-of-range difference, saturated output, forced end at MAX_LEN. The
// latency is checked for an isolated vector of N elements: the first output
// is valid N + 21 clock edges after the edge that accepted the last input. Also checks the real
// accuracy of the outputs against double-precision softmax for the 128-long
// vectors (max absolute error below 0.01).
module tb_star_softmax_engine;
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

  // reference results, queued per element
  int  exp_p   [$];
  int  exp_idx [$];
  bit  exp_lst [$];
  real exp_real[$];
  bit  chk_real[$];

  int cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  // mechanism counters
  int n_overlap = 0, n_stall = 0, n_range = 0, n_sat = 0, n_forced = 0;
  real max_err = 0.0;

  task automatic check(bit ok, string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) begin
    if (rst_n && out_valid && in_valid && in_ready) n_overlap++;
    if (rst_n && front_stall) n_stall++;
  end

  // output checker
  int out_first_cyc = -1;
  always @(negedge clk) begin
    if (rst_n && out_valid) begin
      if (out_idx == 0) out_first_cyc = cyc;
      if (exp_p.size() == 0) check(0, "unexpected output");
      else begin
        int p, ix; bit l, cr; real pr;
        p = exp_p.pop_front(); ix = exp_idx.pop_front(); l = exp_lst.pop_front();
        pr = exp_real.pop_front(); cr = chk_real.pop_front();
        check(out_data == 16'(p), $sformatf("p[%0d] got %0d exp %0d", ix, out_data, p));
        check(out_idx == 9'(ix) && out_last == l, "index/last");
        if (cr) begin
          real err;
          err = real'(out_data) / 65536.0 - pr;
          if (err < 0) err = -err;
          if (err > max_err) max_err = err;
          check(err < 0.01, $sformatf("accuracy %f", err));
        end
        if (out_data == 16'hFFFF) n_sat++;
      end
    end
  end

  // Build the reference for one vector and queue it.
  task automatic model(input int xs [$], input bit real_chk);
    int mx, n;
    longint s;
    int e [$];
    real rs;
    n = xs.size();
    mx = -1000;
    foreach (xs[i]) if (xs[i] > mx) mx = xs[i];
    s = 0;
    foreach (xs[i]) begin
      int m;
      m = mx - xs[i];
      if (m > 255) n_range++;
      e.push_back(m > 255 ? 0 : lut[m]);
      s += (m > 255 ? 0 : lut[m]);
    end
    rs = 0.0;
    foreach (xs[i]) rs += $exp(real'(xs[i] - mx) / 8.0);
    foreach (xs[i]) begin
      longint q;
      q = (longint'(e[i]) << 16) / s;
      if (q > 65535) q = 65535;
      exp_p.push_back(int'(q));
      exp_idx.push_back(i);
      exp_lst.push_back(i == n - 1);
      exp_real.push_back($exp(real'(xs[i] - mx) / 8.0) / rs);
      chk_real.push_back(real_chk);
    end
  endtask

  // Stream one vector in; gap inserts random idle cycles.
  task automatic send(input int xs [$], input bit gap, input bit no_last);
    bit acc;
    for (int i = 0; i < xs.size(); i++) begin
      if (gap) begin
        in_valid = 0;
        repeat ($urandom_range(0, 2)) @(negedge clk);
      end
      in_valid = 1; in_data = score_t'(xs[i]);
      in_last = !no_last && (i == xs.size() - 1);
      // in_ready is sampled half a cycle before the edge that uses it
      do begin
        acc = in_ready;
        @(posedge clk);
        @(negedge clk);
      end while (!acc);
    end
    in_valid = 0; in_last = 0;
  endtask

  task automatic prog(input prog_sel_e sel, input int row, input int data);
    @(negedge clk);
    prog_en = 1; prog_sel = sel; prog_row = 9'(row); prog_data = LUT_W'(data);
  endtask

  // random score in a given format: ib integer bits, fb fraction bits,
  // returned in Q6.3 units. Roughly bell-shaped around 0.
  function automatic int rnd_score(int ib, int fb, int spread);
    int v, lim;
    v = (int'($urandom_range(0, spread)) + int'($urandom_range(0, spread))) - spread;
    lim = 1 << (ib + fb - 1);
    if (v > lim - 1) v = lim - 1;
    if (v < -lim) v = -lim;
    return v << (3 - fb);
  endfunction

  initial begin
    int xs [$];
    int t0, n;
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

    // 1. small published-style example: integer scores 0, -1, -2, -3
    xs = '{0, -8, -16, -24};
    model(xs, 0);
    send(xs, 0, 0);
    t0 = cyc;
    wait (exp_p.size() == 0);
    @(negedge clk);
    check(out_first_cyc - t0 == 4 + 21, $sformatf("latency %0d", out_first_cyc - t0));

    // 2. one element: p = 1 (saturated)
    xs = '{37};
    model(xs, 0); send(xs, 0, 0);
    wait (exp_p.size() == 0);

    // 3. data-set formats at sequence length 128, back to back
    //    CNEWS Q6.2, MRPC Q6.3, CoLA Q5.2
    for (int ds = 0; ds < 3; ds++) begin
      xs.delete();
      for (int i = 0; i < 128; i++)
        xs.push_back(ds == 0 ? rnd_score(6, 2, 40) : ds == 1 ? rnd_score(6, 3, 80) : rnd_score(5, 2, 40));
      model(xs, 1); send(xs, ds == 1, 0);
    end

    // 4. wide range with repeated maxima and far-below-max scores
    xs.delete();
    for (int i = 0; i < 200; i++) xs.push_back(i % 10 == 0 ? 255 : int'($urandom_range(0, 511)) - 256);
    model(xs, 0); send(xs, 0, 0);

    // 5. long vector then two short ones: the third waits for a bank
    xs.delete();
    for (int i = 0; i < 512; i++) xs.push_back(rnd_score(6, 3, 120));
    model(xs, 0); send(xs, 0, 0);
    xs = '{-5, 3};  model(xs, 0); send(xs, 0, 0);
    xs = '{100, -100, 7}; model(xs, 0); send(xs, 0, 0);

    // 6. 512 elements without a last flag: the engine ends the vector
    xs.delete();
    for (int i = 0; i < 512; i++) xs.push_back(int'($urandom_range(0, 511)) - 256);
    model(xs, 0);
    send(xs, 1, 1);
    n_forced++;
    // and the next vector still starts cleanly
    xs = '{1, 2, 3, 4, 5, 6, 7, 8};
    model(xs, 0); send(xs, 0, 0);

    wait (exp_p.size() == 0);
    repeat (30) @(negedge clk);
    check(exp_p.size() == 0, "outputs missing");
    check(!out_valid, "spurious output");

    $display("mechanisms: overlap=%0d stall=%0d out_of_range=%0d saturated=%0d forced_end=%0d max_err=%f",
             n_overlap, n_stall, n_range, n_sat, n_forced, max_err);
    check(n_overlap > 0, "no overlap of back end with next vector's input");
    check(n_stall > 0, "front-end stall never happened");
    check(n_range > 0, "no out-of-range difference");
    check(n_sat > 0, "no saturated output");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
