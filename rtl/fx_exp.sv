// fx_exp: natural exponential e^x of a signed Q18.21 value, built on the shared adder and
// multiplier.
//
// Method (as in the paper): e^x = 2^z with z = x*log2(e); 2^z = 2^floor(z) * 2^frac(z). The
// integer part becomes a shift and the fractional part f in [0,1) is approximated by the Taylor
// series of 2^f around zero up to order 3, 1 + ln2*f + (ln2)^2/2*f^2 + (ln2)^3/6*f^3, evaluated
// in Horner form (((C3*f + C2)*f + C1)*f + 1). The paper keeps "the first 3 terms"; its error
// plot has the fixed-point and float errors part at order 3, so the three terms after the
// constant are kept (relative error below about 1%). (The paper's formula writes the exponent as x/ln(e); the identity needs
// x/ln(2) = x*log2(e), which is what is computed.)
//
// Sequence: four multiplies and three adds go out through `add_req`/`mul_req` (each answer is
// on `add_out`/`mul_out` the next cycle); the final shift is done here. A result above FX_MAX
// saturates and raises `ovfl`; small results flush toward zero.
//
// Timing: starts on a rising edge of `req.start` while idle; `done` pulses 9 edges after the
// edge that samples start (counting that edge). The paper reports 24 cycles for its version but does not describe
// its sequence; this unit issues its operations back to back, so it is shorter.
module fx_exp
  import sleepvit_pkg::*;
(
  input  logic       clk,
  input  logic       rst_n,
  input  unit_req_t  req,
  output unit_rsp_t  rsp,
  output arith_req_t add_req,
  input  fx_t        add_out,
  output arith_req_t mul_req,
  input  fx_t        mul_out
);
  // Taylor coefficients and log2(e) in Q18.21 (round(c * 2^21))
  localparam fx_t LOG2E = fx_t'(3025551);    // 1.4426950
  localparam fx_t C1    = fx_t'(1453635);    // ln 2       = 0.6931472
  localparam fx_t C2    = fx_t'(503791);     // (ln 2)^2/2 = 0.2402265
  localparam fx_t C3    = fx_t'(116399);     // (ln 2)^3/6 = 0.0555041

  typedef enum logic [3:0] {S_IDLE, S_MZ, S_M1, S_A1, S_M2, S_A2, S_M3, S_A3, S_SH} state_e;
  state_e state;
  logic   start_q;
  fx_t    x_q, f_q;
  logic signed [N-Q-1:0] k_q;                // floor(z)
  logic signed [95:0]    wide;
  logic [N:0]            sat;

  assign rsp.busy = (state != S_IDLE);

  // operation issued in each state
  always_comb begin
    add_req = '0;
    mul_req = '0;
    unique case (state)
      S_MZ: mul_req = '{refresh: 1'b1, in1: x_q, in2: LOG2E};
      S_M1: mul_req = '{refresh: 1'b1, in1: fx_t'({1'b0, mul_out[Q-1:0]}), in2: C3};
      S_A1: add_req = '{refresh: 1'b1, in1: mul_out, in2: C2};
      S_M2: mul_req = '{refresh: 1'b1, in1: add_out, in2: f_q};
      S_A2: add_req = '{refresh: 1'b1, in1: mul_out, in2: C1};
      S_M3: mul_req = '{refresh: 1'b1, in1: add_out, in2: f_q};
      S_A3: add_req = '{refresh: 1'b1, in1: mul_out, in2: FX_ONE};
      default: ;
    endcase
  end

  // 2^k * t with saturation; t = add_out is in [1, 2)
  always_comb begin
    wide = 96'(add_out);
    if (k_q >= 0) begin
      if (k_q > 40) wide = 96'(FX_MAX) + 96'sd1;
      else          wide = wide <<< k_q;
    end else begin
      if (k_q < -40) wide = '0;
      else           wide = wide >>> (-k_q);
    end
    sat = sat_wide(wide);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state    <= S_IDLE;
      start_q  <= 1'b0;
      x_q      <= '0;
      f_q      <= '0;
      k_q      <= '0;
      rsp.done <= 1'b0;
      rsp.ovfl <= 1'b0;
      rsp.flag <= 1'b0;
      rsp.out  <= '0;
    end else begin
      start_q  <= req.start;
      rsp.done <= 1'b0;
      unique case (state)
        S_IDLE: if (req.start && !start_q) begin
          x_q   <= req.in1;
          state <= S_MZ;
        end
        S_MZ: state <= S_M1;
        S_M1: begin
          k_q   <= mul_out[N-1:Q];           // arithmetic floor of z
          f_q   <= fx_t'({1'b0, mul_out[Q-1:0]});
          state <= S_A1;
        end
        S_A1: state <= S_M2;
        S_M2: state <= S_A2;
        S_A2: state <= S_M3;
        S_M3: state <= S_A3;
        S_A3: state <= S_SH;
        S_SH: begin
          rsp.out  <= sat[N-1:0];
          rsp.ovfl <= sat[N];
          rsp.done <= 1'b1;
          state    <= S_IDLE;
        end
        default: state <= S_IDLE;
      endcase
    end
  end
endmodule
