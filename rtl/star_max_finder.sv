// star_max_finder: OR-merges matchline vectors and locates x_max.
//
// While a vector is searched in the CAM/SUB crossbar, the one-hot match vector
// of every x_i is ORed into a ROWS-bit register (`acc_en`). Because the
// crossbar holds its words in descending order, the first set bit of that
// register (lowest row index) is the row holding the largest x_i. `max_row`
// and `max_valid` are combinational from the register, so they are valid the
// cycle after the last vector is accumulated. `clear` empties the register
// for the next softmax vector (clear wins over acc_en in the same cycle).
// The OR merge and the first-one rule follow the published design; the
// register and the priority encoder built as a plain loop are this design's.
module star_max_finder #(
  parameter int unsigned ROWS = 512,
  localparam int unsigned RW  = $clog2(ROWS)
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic            clear,
  input  logic            acc_en,
  input  logic [ROWS-1:0] match_in,
  output logic [ROWS-1:0] or_vec,
  output logic [RW-1:0]   max_row,
  output logic            max_valid
);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)      or_vec <= '0;
    else if (clear)  or_vec <= '0;
    else if (acc_en) or_vec <= or_vec | match_in;
  end

  // First-one search from row 0 (the largest stored word).
  always_comb begin
    max_row   = '0;
    max_valid = 1'b0;
    for (int r = ROWS - 1; r >= 0; r--) begin
      if (or_vec[r]) begin
        max_row   = RW'(r);
        max_valid = 1'b1;
      end
    end
  end

endmodule
