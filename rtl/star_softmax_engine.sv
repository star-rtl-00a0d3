// star_softmax_engine: RRAM-crossbar softmax engine, top level.
//
// Computes p_i = e^(x_i - x_max) / sum_j e^(x_j - x_max) for a vector of
// 1..MAX_LEN signed Q6.3 scores, entirely by table look-up and crossbar
// arithmetic, with no exponential or max circuit:
//
//  1. FIND   Each score arriving on the input stream is searched in the
//            CAM/SUB crossbar (every score value stored once, descending).
//            Its matchline vector is ORed into the max finder and its matched
//            row number is kept in the row buffer. One score per cycle.
//  2. SUB    For each element the crossbar is switched to compute mode and
//            driven with +1 on the element's row and -1 on x_max's row; the
//            shift-added column sums give d_i = x_i - x_max <= 0.
//  3. EXP    One cycle later |d_i| is searched in the exp CAM; its match
//            vector selects e^(d_i) in the LUT crossbar (written into an
//            exponential bank) and increments that row's counter.
//  4. SUM    After the last element, the counters drive the VMM crossbar,
//            which holds the same words as the LUT, giving sum_j e^(d_j).
//  5. DIV    The back end streams the bank through a pipelined divider,
//            emitting p_i as unsigned Q0.16, one per cycle, in input order.
//
// Vector-grained pipelining: the front end (steps 1-4, which share the
// CAM/SUB crossbar) and the back end (step 5) work on different vectors. Two
// exponential banks, each with its sum and length, decouple them: while the
// back end divides vector k the front end accepts and processes vector k+1.
// The front end stalls before SUB only if both banks are still waiting to be
// divided.
//
// Interface. Programming: while the engine is idle, write the crossbars with
// prog_en/prog_sel/prog_row/prog_data (CAM/SUB row r <- 255 - r as Q6.3 bits,
// exp CAM row k <- k, LUT and VMM row k <- min(round(e^(-k/8)*2^18), 2^18-1)).
// Input: valid/ready stream of scores, in_last marks the last of a vector; a
// vector reaching MAX_LEN elements ends there. Output: valid-only stream
// (no backpressure) of out_data with out_idx (element index) and out_last.
//
// Timing for a vector of N elements: FIND takes one cycle per element as
// offered; after the edge that accepts the last one, 1 cycle claims a bank,
// N cycles run SUB, 1 drains EXP and 1 runs SUM; the back end starts 1 cycle
// later and issues one division per cycle into the 17-stage divider. The
// first p_i is therefore valid N + 21 edges after the last input was
// accepted, and the rest follow one per cycle. in_ready is low from the last
// input until SUM is done (N + 3 cycles).
//
// The crossbar roles, the descending CAM/SUB storage, the OR merge and
// first-one rule, the +1/-1 subtraction, the sign-free exp CAM, the counters
// feeding a VMM copy of the LUT, and the final divider follow the published
// design. The row buffer, the two banks, the stream handshakes, the output
// format and all cycle timing are this design's choices.
module star_softmax_engine #(
  parameter int unsigned MAX_LEN = star_pkg::MAX_LEN,
  localparam int unsigned IDX_W  = $clog2(MAX_LEN),
  localparam int unsigned LEN_W  = $clog2(MAX_LEN + 1)
) (
  input  logic                        clk,
  input  logic                        rst_n,
  // crossbar programming
  input  logic                        prog_en,
  input  star_pkg::prog_sel_e         prog_sel,
  input  logic [8:0]                  prog_row,
  input  logic [star_pkg::LUT_W-1:0]  prog_data,
  // score input stream (from the matrix-multiply engine)
  input  logic                        in_valid,
  output logic                        in_ready,
  input  star_pkg::score_t            in_data,
  input  logic                        in_last,
  // probability output stream (to the matrix-multiply engine)
  output logic                        out_valid,
  output logic [star_pkg::OUT_W-1:0]  out_data,
  output logic [IDX_W-1:0]            out_idx,
  output logic                        out_last,
  // status
  output logic                        front_stall
);
  import star_pkg::*;

  localparam int unsigned SRW = $clog2(SUB_ROWS);
  localparam int unsigned ERW = $clog2(EXP_ROWS);

  initial begin
    assert (SUB_ROWS == 2**DATA_W) else $error("CAM/SUB crossbar needs one row per score value");
    assert (MAX_LEN < 2**CNT_W) else $error("counters too narrow for MAX_LEN");
  end

  // ---------------------------------------------------------------- front end
  typedef enum logic [2:0] {F_FIND, F_WAIT, F_SUB, F_DRAIN, F_SUM} front_e;
  front_e            fstate;
  logic [LEN_W-1:0]  n_cnt;        // elements taken in FIND / issued in SUB
  logic [LEN_W-1:0]  vec_len;
  logic              wr_bank, rd_bank;
  logic [1:0]        bank_full;

  // Row buffer: matched CAM/SUB row of each element (+ found flag).
  logic [SRW-1:0]    row_buf   [MAX_LEN];
  logic              found_buf [MAX_LEN];

  // CAM/SUB crossbar
  xb_mode_e          xb_mode;
  logic [SUB_ROWS-1:0] xb_match, drive_pos, drive_neg;
  logic signed [DATA_W:0] xb_sub;

  assign xb_mode = (fstate == F_SUB) ? XB_SUB : XB_CAM;

  star_cam_sub_xbar #(.ROWS(SUB_ROWS), .DATA_W(DATA_W)) u_camsub (
    .clk        (clk),
    .prog_en    (prog_en && prog_sel == PROG_CAMSUB),
    .prog_row   (prog_row[SRW-1:0]),
    .prog_data  (prog_data[DATA_W-1:0]),
    .mode       (xb_mode),
    .search_key (in_data),
    .match      (xb_match),
    .drive_pos  (drive_pos),
    .drive_neg  (drive_neg),
    .sub_out    (xb_sub)
  );

  // Max finder
  logic              in_fire, mf_clear;
  logic [SRW-1:0]    max_row;
  logic              max_valid;

  assign in_ready = (fstate == F_FIND);
  assign in_fire  = in_valid && in_ready;

  star_max_finder #(.ROWS(SUB_ROWS)) u_maxf (
    .clk       (clk),
    .rst_n     (rst_n),
    .clear     (mf_clear),
    .acc_en    (in_fire),
    .match_in  (xb_match),
    .or_vec    (),
    .max_row   (max_row),
    .max_valid (max_valid)
  );

  // Encode the one-hot match of the incoming score.
  logic [SRW-1:0] in_row;
  logic           in_found;
  always_comb begin
    in_row   = '0;
    in_found = |xb_match;
    for (int r = 0; r < SUB_ROWS; r++) begin
      if (xb_match[r]) in_row = in_row | SRW'(r);
    end
  end

  // SUB drives: +1 on the element's row, -1 on x_max's row.
  logic [IDX_W-1:0] sub_idx;
  assign sub_idx = n_cnt[IDX_W-1:0];
  always_comb begin
    drive_pos = '0;
    drive_neg = '0;
    if (fstate == F_SUB) begin
      if (found_buf[sub_idx]) drive_pos[row_buf[sub_idx]] = 1'b1;
      if (max_valid)          drive_neg[max_row]          = 1'b1;
    end
  end

  // SUB -> EXP pipeline register
  logic                   d_valid;
  logic signed [DATA_W:0] d_val;
  logic [IDX_W-1:0]       d_idx;

  // Exponential stage
  logic [DATA_W-1:0]   d_mag;
  logic [EXP_ROWS-1:0] exp_match;
  logic [LUT_W-1:0]    exp_val;
  logic [CNT_W-1:0]    counts [EXP_ROWS];
  logic [SUM_W-1:0]    vmm_sum;
  logic                cnt_clear;

  // Sign removed: d is never positive, so |d| = -d.
  assign d_mag = DATA_W'(-d_val);

  star_exp_cam #(.ROWS(EXP_ROWS), .KEY_W(DATA_W)) u_expcam (
    .clk       (clk),
    .prog_en   (prog_en && prog_sel == PROG_EXPCAM),
    .prog_row  (prog_row[ERW-1:0]),
    .prog_data (prog_data[DATA_W-1:0]),
    .key       (d_mag),
    .match     (exp_match)
  );

  star_lut_xbar #(.ROWS(EXP_ROWS), .LUT_W(LUT_W)) u_lut (
    .clk       (clk),
    .prog_en   (prog_en && prog_sel == PROG_LUT),
    .prog_row  (prog_row[ERW-1:0]),
    .prog_data (prog_data),
    .wl        (exp_match),
    .rd_data   (exp_val)
  );

  star_match_counter #(.ROWS(EXP_ROWS), .CNT_W(CNT_W)) u_cnt (
    .clk    (clk),
    .rst_n  (rst_n),
    .clear  (cnt_clear),
    .inc_en (d_valid),
    .match  (exp_match),
    .count  (counts)
  );

  star_vmm_xbar #(.ROWS(EXP_ROWS), .W(LUT_W), .CNT_W(CNT_W)) u_vmm (
    .clk       (clk),
    .prog_en   (prog_en && prog_sel == PROG_VMM),
    .prog_row  (prog_row[ERW-1:0]),
    .prog_data (prog_data),
    .count     (counts),
    .sum       (vmm_sum)
  );

  // Exponential banks
  logic [LUT_W-1:0] ebank    [2][MAX_LEN];
  logic [SUM_W-1:0] bank_sum [2];
  logic [LEN_W-1:0] bank_len [2];
  logic             bank_set, bank_clr;

  assign mf_clear    = (fstate == F_SUM);
  assign cnt_clear   = (fstate == F_SUM);
  assign bank_set    = (fstate == F_SUM);
  assign front_stall = (fstate == F_WAIT) && bank_full[wr_bank];

  always_ff @(posedge clk) begin
    if (in_fire) begin
      row_buf[n_cnt[IDX_W-1:0]]   <= in_row;
      found_buf[n_cnt[IDX_W-1:0]] <= in_found;
    end
    if (d_valid) ebank[wr_bank][d_idx] <= exp_val;
    if (bank_set) begin
      bank_sum[wr_bank] <= vmm_sum;
      bank_len[wr_bank] <= vec_len;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      fstate  <= F_FIND;
      n_cnt   <= '0;
      vec_len <= '0;
      wr_bank <= 1'b0;
      d_valid <= 1'b0;
      d_val   <= '0;
      d_idx   <= '0;
    end else begin
      d_valid <= 1'b0;
      unique case (fstate)
        F_FIND: if (in_fire) begin
          if (in_last || n_cnt == LEN_W'(MAX_LEN - 1)) begin
            vec_len <= n_cnt + 1'b1;
            n_cnt   <= '0;
            fstate  <= F_WAIT;
          end else begin
            n_cnt <= n_cnt + 1'b1;
          end
        end
        F_WAIT: if (!bank_full[wr_bank]) fstate <= F_SUB;
        F_SUB: begin
          d_valid <= 1'b1;
          d_val   <= xb_sub;
          d_idx   <= sub_idx;
          if (n_cnt == vec_len - 1'b1) begin
            n_cnt  <= '0;
            fstate <= F_DRAIN;
          end else begin
            n_cnt <= n_cnt + 1'b1;
          end
        end
        F_DRAIN: fstate <= F_SUM;
        F_SUM: begin
          wr_bank <= ~wr_bank;
          fstate  <= F_FIND;
        end
        default: fstate <= F_FIND;
      endcase
    end
  end

  // ----------------------------------------------------------------- back end
  logic             b_run;
  logic [LEN_W-1:0] b_cnt;
  logic             div_last;

  assign bank_clr = b_run && (b_cnt == bank_len[rd_bank] - 1'b1);
  assign div_last = bank_clr;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      bank_full <= '0;
      rd_bank   <= 1'b0;
      b_run     <= 1'b0;
      b_cnt     <= '0;
    end else begin
      if (bank_set) bank_full[wr_bank] <= 1'b1;
      if (bank_clr) bank_full[rd_bank] <= 1'b0;
      if (!b_run) begin
        if (bank_full[rd_bank]) begin
          b_run <= 1'b1;
          b_cnt <= '0;
        end
      end else if (bank_clr) begin
        b_run   <= 1'b0;
        rd_bank <= ~rd_bank;
      end else begin
        b_cnt <= b_cnt + 1'b1;
      end
    end
  end

  logic [IDX_W:0] div_tag_out;

  star_divider #(.NUM_W(LUT_W), .DEN_W(SUM_W), .Q_W(OUT_W), .TAG_W(IDX_W + 1)) u_div (
    .clk       (clk),
    .rst_n     (rst_n),
    .in_valid  (b_run),
    .num       (ebank[rd_bank][b_cnt[IDX_W-1:0]]),
    .den       (bank_sum[rd_bank]),
    .in_tag    ({div_last, b_cnt[IDX_W-1:0]}),
    .out_valid (out_valid),
    .quot      (out_data),
    .out_tag   (div_tag_out)
  );

  assign out_last = div_tag_out[IDX_W];
  assign out_idx  = div_tag_out[IDX_W-1:0];

  // ------------------------------------------------------------ assertions
  // Input scores must all be present in the CAM/SUB crossbar.
  a_found: assert property (@(posedge clk) disable iff (!rst_n) in_fire |-> in_found)
    else $error("score %0d not found in CAM/SUB crossbar", in_data);
  // The differences are never positive.
  a_nonpos: assert property (@(posedge clk) disable iff (!rst_n) d_valid |-> d_val <= 0)
    else $error("positive x_i - x_max");
  // A bank is only filled when free.
  a_bank: assert property (@(posedge clk) disable iff (!rst_n) bank_set |-> !bank_full[wr_bank]);

endmodule
