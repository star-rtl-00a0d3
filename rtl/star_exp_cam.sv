// star_exp_cam: the CAM crossbar of the exponential stage.
//
// Each of ROWS rows stores a KEY_W-bit word (two complementary cells per bit).
// For softmax, row k is loaded with the magnitude k of a difference
// x_i - x_max (in Q6.3 units); the sign is not stored because the difference
// is never positive. `key` is compared with every row in parallel and
// `match` is the matchline vector, combinational. A magnitude that no row
// holds (above ROWS-1) gives an all-zero vector, which downstream reads as an
// exponential of zero. Rows are written through the programming port at the
// clock edge. Storing magnitudes with the sign removed follows the published
// design; the write port and the handling of out-of-range keys are this
// design's choices.
module star_exp_cam #(
  parameter int unsigned ROWS  = 256,
  parameter int unsigned KEY_W = 9,
  localparam int unsigned RW   = $clog2(ROWS)
) (
  input  logic             clk,
  input  logic             prog_en,
  input  logic [RW-1:0]    prog_row,
  input  logic [KEY_W-1:0] prog_data,
  input  logic [KEY_W-1:0] key,
  output logic [ROWS-1:0]  match
);

  logic [KEY_W-1:0] cells [ROWS];

  always_ff @(posedge clk) begin
    if (prog_en) cells[prog_row] <= prog_data;
  end

  always_comb begin
    for (int r = 0; r < ROWS; r++) match[r] = (cells[r] == key);
  end

endmodule
