// star_cam_sub_xbar: the CAM/SUB crossbar that finds x_max and forms x_i - x_max.
//
// Every row holds one DATA_W-bit word as a pair of complementary cells per bit
// (hence 2*DATA_W columns). For softmax the rows are loaded with every
// representable score in descending order, row 0 holding the largest. The
// same array is used in two modes, selected by `mode`:
//
//  * XB_CAM: `search_key` is applied to the search lines and every row whose
//    word equals the key raises its matchline; `match` is that vector.
//  * XB_SUB: each word line is driven with +1 (`drive_pos`), -1 (`drive_neg`),
//    both (net 0) or neither. Column c then carries sum_r drive_r * bit_c(r),
//    which is -1, 0 or +1 for a one-hot +1 row and a one-hot -1 row. Each
//    column sum is digitised and the columns are shift-added with the sign
//    column weighted -2**(DATA_W-1), so `sub_out` is word(+row) - word(-row)
//    as a DATA_W+1 bit signed number.
//
// Outputs are combinational and zero in the mode that does not produce them.
// Writes through the programming port take effect on the next clock edge.
// The two modes, the descending storage and the +1/-1 drive follow the
// published design; the ideal (exact) column digitisation and the write port
// are choices of this model, which stands in for the analog array.
module star_cam_sub_xbar #(
  parameter int unsigned ROWS   = 512,
  parameter int unsigned DATA_W = 9,
  localparam int unsigned RW    = $clog2(ROWS)
) (
  input  logic                      clk,
  // programming port
  input  logic                      prog_en,
  input  logic [RW-1:0]             prog_row,
  input  logic [DATA_W-1:0]         prog_data,
  // mode
  input  star_pkg::xb_mode_e        mode,
  // CAM mode
  input  logic [DATA_W-1:0]         search_key,
  output logic [ROWS-1:0]           match,
  // SUB mode
  input  logic [ROWS-1:0]           drive_pos,
  input  logic [ROWS-1:0]           drive_neg,
  output logic signed [DATA_W:0]    sub_out
);


  logic [DATA_W-1:0] cells [ROWS];

  always_ff @(posedge clk) begin
    if (prog_en) cells[prog_row] <= prog_data;
  end

  // CAM search: matchline r stays high only if every bit agrees.
  always_comb begin
    for (int r = 0; r < ROWS; r++) begin
      match[r] = (mode == star_pkg::XB_CAM) && (cells[r] == search_key);
    end
  end

  // SUB: signed column currents, then shift-and-add.
  localparam int unsigned ACC_W = RW + 2;
  logic signed [ACC_W-1:0]  col_sum [DATA_W];
  logic signed [DATA_W+ACC_W:0] total;

  // One bit column per generate block: its signed current.
  for (genvar c = 0; c < DATA_W; c++) begin : g_col
    always_comb begin
      col_sum[c] = '0;
      for (int r = 0; r < ROWS; r++) begin
        if (cells[r][c]) begin
          col_sum[c] = col_sum[c] + ACC_W'(signed'({1'b0, drive_pos[r]}))
                                  - ACC_W'(signed'({1'b0, drive_neg[r]}));
        end
      end
    end
  end

  // Digitised columns, shift-and-add; the sign column weighs -2**(DATA_W-1).
  always_comb begin
    total = '0;
    for (int c = 0; c < DATA_W; c++) begin
      if (c == DATA_W - 1) total = total - ((DATA_W+ACC_W+1)'(col_sum[c]) <<< c);
      else                 total = total + ((DATA_W+ACC_W+1)'(col_sum[c]) <<< c);
    end
    sub_out = (mode == star_pkg::XB_SUB) ? total[DATA_W:0] : '0;
  end

endmodule
