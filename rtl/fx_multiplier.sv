// fx_multiplier: the accelerator's single shared fixed-point multiplier.
//
// Multiplies two signed Q18.21 operands. The 78-bit product is shifted right by Q with an
// arithmetic shift, which truncates toward minus infinity, then saturated symmetrically to
// +/-FX_MAX with the overflow flag raised on saturation. The output register loads only while
// `req.refresh` is high; latency is one cycle. Truncation toward -inf, symmetric saturation,
// the overflow flag and refresh gating follow the paper; the reset value 0 is this design's.
module fx_multiplier
  import sleepvit_pkg::*;
(
  input  logic       clk,
  input  logic       rst_n,
  input  arith_req_t req,
  output fx_t        out,
  output logic       ovfl
);
  logic signed [2*N-1:0] prod;
  logic signed [95:0]    shifted;
  logic [N:0]            sat;

  always_comb begin
    prod    = req.in1 * req.in2;
    shifted = 96'(prod) >>> Q;
    sat     = sat_wide(shifted);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out  <= '0;
      ovfl <= 1'b0;
    end else if (req.refresh) begin
      out  <= sat[N-1:0];
      ovfl <= sat[N];
    end
  end
endmodule
