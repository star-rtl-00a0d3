// star_divider: pipelined restoring divider for the final softmax division.
//
// Computes quot = min(floor(num * 2**Q_W / den), 2**Q_W - 1), the quotient of
// an exponential and the sum of exponentials as an unsigned Q0.Q_W fraction.
// It expects num <= den (true for softmax, where num is one term of den) and
// den > 0. The long division runs one quotient bit per pipeline stage: stage 0
// decides the integer bit (num >= den), stages 1..Q_W each double the partial
// remainder and subtract den when it fits. A new operand pair can enter every
// cycle; each result leaves LATENCY = Q_W + 1 cycles after it entered, with
// its `in_tag` (index and last flag) carried alongside. There is no
// backpressure. The quotient saturates at all ones when num == den (p = 1).
// Only the existence of a divider is given by the published design; this
// circuit is the simplest full-rate one.
module star_divider #(
  parameter int unsigned NUM_W = 18,
  parameter int unsigned DEN_W = 28,
  parameter int unsigned Q_W   = 16,
  parameter int unsigned TAG_W = 10,
  localparam int unsigned LATENCY = Q_W + 1
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             in_valid,
  input  logic [NUM_W-1:0] num,
  input  logic [DEN_W-1:0] den,
  input  logic [TAG_W-1:0] in_tag,
  output logic             out_valid,
  output logic [Q_W-1:0]   quot,
  output logic [TAG_W-1:0] out_tag
);

  typedef struct packed {
    logic             valid;
    logic [DEN_W:0]   rem;     // partial remainder, < den
    logic [DEN_W-1:0] den;
    logic [Q_W:0]     q;       // quotient bits decided so far
    logic [TAG_W-1:0] tag;
  } stage_t;

  stage_t st [LATENCY];

  // Stage 0: integer bit.
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st[0] <= '0;
    end else begin
      st[0].valid <= in_valid;
      st[0].den   <= den;
      st[0].tag   <= in_tag;
      if ((DEN_W+1)'(num) >= (DEN_W+1)'(den)) begin
        st[0].q   <= (Q_W+1)'(1);
        st[0].rem <= (DEN_W+1)'(num) - (DEN_W+1)'(den);
      end else begin
        st[0].q   <= '0;
        st[0].rem <= (DEN_W+1)'(num);
      end
    end
  end

  // Stages 1..Q_W: one fraction bit each.
  for (genvar s = 1; s < LATENCY; s++) begin : g_stage
    logic [DEN_W+1:0] dbl;
    assign dbl = {st[s-1].rem, 1'b0};
    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) begin
        st[s] <= '0;
      end else begin
        st[s].valid <= st[s-1].valid;
        st[s].den   <= st[s-1].den;
        st[s].tag   <= st[s-1].tag;
        if (dbl >= (DEN_W+2)'(st[s-1].den)) begin
          st[s].rem <= (DEN_W+1)'(dbl - (DEN_W+2)'(st[s-1].den));
          st[s].q   <= {st[s-1].q[Q_W-1:0], 1'b1};
        end else begin
          st[s].rem <= (DEN_W+1)'(dbl);
          st[s].q   <= {st[s-1].q[Q_W-1:0], 1'b0};
        end
      end
    end
  end

  assign out_valid = st[LATENCY-1].valid;
  assign out_tag   = st[LATENCY-1].tag;
  assign quot      = st[LATENCY-1].q[Q_W] ? '1 : st[LATENCY-1].q[Q_W-1:0];

endmodule
