// avg_filter: post-softmax time-average filter and argmax that produce the sleep stage.
//
// Each new vector of class probabilities (`in_valid`, `prob`) is averaged with the two
// previous ones, element by element, and the index of the largest average is the sleep stage
// (0 wake, 1 light, 2 deep, 3 REM; on a tie the lower index wins). Averaging the last three
// softmax outputs before the argmax is the paper's (output averaging depth 3); the class
// order, the tie rule and starting from zero history after reset (so the first two outputs
// average over fewer real epochs) are this design's choices. The division by three is a
// multiplication by the Q18.21 constant round(2^21/3). Outputs are registered: `stage`,
// `avg` and the `out_valid` pulse appear the cycle after `in_valid`.
module avg_filter
  import sleepvit_pkg::*;
#(
  parameter int NC    = NCLASS,
  parameter int DEPTH = 3
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  in_valid,
  input  fx_t                   prob  [NC],
  output logic                  out_valid,
  output logic [$clog2(NC)-1:0] stage,
  output fx_t                   avg   [NC]
);
  localparam fx_t INV_DEPTH = fx_t'(int'(((1 << Q) + DEPTH / 2) / DEPTH));   // round(2^Q / DEPTH)

  fx_t hist [DEPTH-1][NC];                   // previous DEPTH-1 probability vectors
  fx_t avg_c [NC];
  logic [$clog2(NC)-1:0] best;

  always_comb begin
    for (int c = 0; c < NC; c++) begin
      logic signed [95:0] s;
      s = 96'(prob[c]);
      for (int d = 0; d < DEPTH - 1; d++) s = s + 96'(hist[d][c]);
      s = (s * 96'(INV_DEPTH)) >>> Q;
      avg_c[c] = s[N-1:0];
    end
    best = '0;
    for (int c = 1; c < NC; c++)
      if (avg_c[c] > avg_c[best]) best = ($clog2(NC))'(c);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int d = 0; d < DEPTH - 1; d++)
        for (int c = 0; c < NC; c++) hist[d][c] <= '0;
      for (int c = 0; c < NC; c++) avg[c] <= '0;
      stage     <= '0;
      out_valid <= 1'b0;
    end else begin
      out_valid <= in_valid;
      if (in_valid) begin
        for (int c = 0; c < NC; c++) begin
          hist[0][c] <= prob[c];
          for (int d = 1; d < DEPTH - 1; d++) hist[d][c] <= hist[d-1][c];
          avg[c] <= avg_c[c];
        end
        stage <= best;
      end
    end
  end
endmodule
