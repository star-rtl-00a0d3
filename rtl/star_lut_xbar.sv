// star_lut_xbar: the LUT crossbar holding the exponentials.
//
// Row k holds an LUT_W-bit fraction, loaded for softmax with
// min(round(e^(-k/8) * 2**LUT_W), 2**LUT_W - 1), the exponential of the
// difference whose magnitude the exp CAM stores in row k. The exp CAM's match
// vector drives the word lines (`wl`) and the sense amplifiers read the
// selected row: `rd_data` is the OR of all selected rows, i.e. the word of a
// one-hot row and zero when no row is selected. Combinational read, clocked
// write. The table formula, with e^0 saturating to all ones, follows the
// published example (m = 4 there, m = LUT_W here); the write port is this
// design's.
module star_lut_xbar #(
  parameter int unsigned ROWS  = 256,
  parameter int unsigned LUT_W = 18,
  localparam int unsigned RW   = $clog2(ROWS)
) (
  input  logic             clk,
  input  logic             prog_en,
  input  logic [RW-1:0]    prog_row,
  input  logic [LUT_W-1:0] prog_data,
  input  logic [ROWS-1:0]  wl,
  output logic [LUT_W-1:0] rd_data
);

  logic [LUT_W-1:0] cells [ROWS];

  always_ff @(posedge clk) begin
    if (prog_en) cells[prog_row] <= prog_data;
  end

  always_comb begin
    rd_data = '0;
    for (int r = 0; r < ROWS; r++) begin
      if (wl[r]) rd_data = rd_data | cells[r];
    end
  end

endmodule
