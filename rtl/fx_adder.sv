// fx_adder: the accelerator's single shared fixed-point adder.
//
// Adds two signed Q18.21 operands with an explicit ripple-carry chain. The sum is saturated
// symmetrically to +/-FX_MAX and the overflow flag is raised when saturation happens. As in the
// paper, the output register only loads when `req.refresh` is high, so the result stays still
// (no toggling) while other modules own the adder, and the latency is one cycle: a request
// presented in cycle t is on `out` in cycle t+1. The ripple-carry structure, the refresh gating,
// symmetric saturation and the overflow flag follow the paper; the reset value 0 is this design's.
module fx_adder
  import sleepvit_pkg::*;
(
  input  logic       clk,
  input  logic       rst_n,
  input  arith_req_t req,
  output fx_t        out,
  output logic       ovfl
);
  logic [N:0]   carry;
  logic [N-1:0] sum;
  logic         ovf_c, neg_full;
  fx_t          res;

  // ripple-carry chain: one full adder per bit
  assign carry[0] = 1'b0;
  for (genvar i = 0; i < N; i++) begin : g_fa
    assign sum[i]     = req.in1[i] ^ req.in2[i] ^ carry[i];
    assign carry[i+1] = (req.in1[i] & req.in2[i]) | (carry[i] & (req.in1[i] ^ req.in2[i]));
  end

  always_comb begin
    // two's-complement overflow: equal operand signs, different result sign
    ovf_c    = (req.in1[N-1] == req.in2[N-1]) && (sum[N-1] != req.in1[N-1]);
    // the most negative code has no positive twin: clamp it for symmetry
    neg_full = (sum == {1'b1, {(N-1){1'b0}}});
    if (ovf_c)         res = req.in1[N-1] ? FX_MIN : FX_MAX;
    else if (neg_full) res = FX_MIN;
    else               res = fx_t'(sum);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out  <= '0;
      ovfl <= 1'b0;
    end else if (req.refresh) begin
      out  <= res;
      ovfl <= ovf_c | neg_full;
    end
  end
endmodule
