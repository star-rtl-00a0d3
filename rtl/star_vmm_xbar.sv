// star_vmm_xbar: the VMM crossbar that forms the softmax denominator.
//
// It holds the same words as the LUT crossbar, one W-bit word per row, one
// cell per bit. The per-row counts are applied as word-line inputs; bit
// column c then carries sum_k count[k] * bit_c(word k), which is digitised
// and weighted by 2**c. The result `sum` equals sum_k count[k] * word[k],
// i.e. sum_j e^(x_j - x_max) in units of 2**-W. `sum` has W+CNT_W bits,
// enough while the counts add up to at most 2**CNT_W, which the engine's
// vector length limit guarantees. Combinational from the counts,
// clocked write. The column-wise evaluation follows the published design; the
// exact digitisation of each column and the write port are this design's.
module star_vmm_xbar #(
  parameter int unsigned ROWS  = 256,
  parameter int unsigned W     = 18,
  parameter int unsigned CNT_W = 10,
  localparam int unsigned RW   = $clog2(ROWS),
  localparam int unsigned COL_W = CNT_W + RW,
  localparam int unsigned SUM_W = W + CNT_W
) (
  input  logic             clk,
  input  logic             prog_en,
  input  logic [RW-1:0]    prog_row,
  input  logic [W-1:0]     prog_data,
  input  logic [CNT_W-1:0] count [ROWS],
  output logic [SUM_W-1:0] sum
);

  logic [W-1:0] cells [ROWS];

  always_ff @(posedge clk) begin
    if (prog_en) cells[prog_row] <= prog_data;
  end

  logic [COL_W-1:0] col_sum [W];
  logic [SUM_W+RW-1:0] total;

  // One bit column per generate block: sum of the counts of rows whose
  // word has that bit set.
  for (genvar c = 0; c < W; c++) begin : g_col
    always_comb begin
      col_sum[c] = '0;
      for (int r = 0; r < ROWS; r++) begin
        if (cells[r][c]) col_sum[c] = col_sum[c] + COL_W'(count[r]);
      end
    end
  end

  // Digitised columns, shift-and-add.
  always_comb begin
    total = '0;
    for (int c = 0; c < W; c++) total = total + ((SUM_W+RW)'(col_sum[c]) << c);
    sum = total[SUM_W-1:0];
  end

endmodule
