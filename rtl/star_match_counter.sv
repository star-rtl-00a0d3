// star_match_counter: one counter per exp-CAM row.
//
// Every cycle with `inc_en`, each counter whose matchline is set in `match`
// increments by one, so after a vector has passed, count[k] is the number of
// elements whose difference x_i - x_max had magnitude k. These counts are the
// inputs of the VMM crossbar. Counters wrap at 2**CNT_W (CNT_W is sized so a
// vector of the maximum length cannot reach that). `clear` zeroes all
// counters and takes priority. Counting the matchlines follows the published
// design; the counter width is this design's choice.
module star_match_counter #(
  parameter int unsigned ROWS  = 256,
  parameter int unsigned CNT_W = 10
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             clear,
  input  logic             inc_en,
  input  logic [ROWS-1:0]  match,
  output logic [CNT_W-1:0] count [ROWS]
);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int r = 0; r < ROWS; r++) count[r] <= '0;
    end else if (clear) begin
      for (int r = 0; r < ROWS; r++) count[r] <= '0;
    end else if (inc_en) begin
      for (int r = 0; r < ROWS; r++) begin
        if (match[r]) count[r] <= count[r] + 1'b1;
      end
    end
  end

endmodule
