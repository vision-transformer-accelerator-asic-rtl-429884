// mac_unit: multiply-and-accumulate module: one dot product plus an activation.
//
// Computes sum_k A[a_base + k*a_stride] * B[b_base + k*b_stride] for k < len, where A is in
// the intermediate-result memory and B comes from the weight memory (b_src = 0) or the
// intermediate-result memory (b_src = 1). The activation is then applied:
//   ACT_NONE   : y = dot
//   ACT_LINEAR : y = dot + bias, bias read from weight address bias_addr
//   ACT_SWISH  : x = dot + bias, y = x * (1 / (1 + e^-x))  (swish, i.e. x*sigmoid(x))
// The swish divides once and multiplies by the reciprocal, as the paper describes.
//
// Pipeline: one operand pair is read per cycle (two memory ports), multiplied on the shared
// multiplier the next cycle and accumulated on the shared adder the cycle after; the
// adder's own output register is the accumulator. The activation uses the shared adder and
// multiplier and the shared exponential and divider units.
//
// Timing: start on a rising edge of `start` while idle; `done` pulses with `result` valid.
// For len = 64 the latency is 68 (none), 70 (linear) and 147 (swish) cycles; the paper
// reports 72, 76 and 170 for its implementation, whose sequencing it does not detail.
module mac_unit
  import sleepvit_pkg::*;
(
  input  logic       clk,
  input  logic       rst_n,
  input  logic       start,
  input  act_e       act,
  input  logic [7:0] len,
  input  addr_t      a_base,
  input  addr_t      a_stride,
  input  logic       a_dw,
  input  frac_t      a_frac,
  input  logic       b_src,
  input  addr_t      b_base,
  input  addr_t      b_stride,
  input  frac_t      b_frac,
  input  addr_t      bias_addr,
  input  frac_t      bias_frac,
  output logic       busy,
  output logic       done,
  output fx_t        result,
  // memory
  output mem_rd_t    ires_rd0,
  input  fx_t        ires_rdata0,
  output mem_rd_t    ires_rd1,
  input  fx_t        ires_rdata1,
  output mem_rd_t    wgt_rd,
  input  fx_t        wgt_rdata,
  // shared arithmetic
  output arith_req_t add_req,
  input  fx_t        add_out,
  output arith_req_t mul_req,
  input  fx_t        mul_out,
  output unit_req_t  exp_req,
  input  unit_rsp_t  exp_rsp,
  output unit_req_t  div_req,
  input  unit_rsp_t  div_rsp
);
  typedef enum logic [3:0] {
    S_IDLE, S_RUN, S_DRAIN, S_BADD, S_BRES, S_EXP, S_EXPW, S_ONE, S_DIV, S_DIVW, S_MUL, S_MULW
  } state_e;

  state_e     state;
  logic       start_q;
  act_e       act_q;
  logic [7:0] len_q, idx;
  addr_t      a_ptr, b_ptr, a_str, b_str, bias_q;
  logic       a_dw_q, b_src_q;
  frac_t      a_frac_q, b_frac_q, bias_frac_q;
  logic       v1, v2, f1, f2;                // pipeline valid / first-element flags
  fx_t        x_q;
  logic       issue;

  assign busy  = (state != S_IDLE);
  assign issue = (state == S_RUN);

  always_comb begin
    ires_rd0 = '0;
    ires_rd1 = '0;
    wgt_rd   = '0;
    add_req  = '0;
    mul_req  = '0;
    exp_req  = '0;
    div_req  = '0;
    if (issue) begin
      ires_rd0 = '{en: 1'b1, dw: a_dw_q, frac: a_frac_q, addr: a_ptr};
      if (b_src_q) ires_rd1 = '{en: 1'b1, dw: 1'b0, frac: b_frac_q, addr: b_ptr};
      else         wgt_rd   = '{en: 1'b1, dw: 1'b0, frac: b_frac_q, addr: b_ptr};
    end
    if (v1) mul_req = '{refresh: 1'b1, in1: ires_rdata0, in2: b_src_q ? ires_rdata1 : wgt_rdata};
    if (v2) add_req = '{refresh: 1'b1, in1: f2 ? FX_ZERO : add_out, in2: mul_out};
    unique case (state)
      S_DRAIN: if (!v1 && !v2 && act_q != ACT_NONE)
                 wgt_rd = '{en: 1'b1, dw: 1'b0, frac: bias_frac_q, addr: bias_q};
      S_BADD:  add_req = '{refresh: 1'b1, in1: x_q, in2: wgt_rdata};
      S_EXP:   exp_req = '{start: 1'b1, in1: -x_q, in2: FX_ZERO};
      S_ONE:   add_req = '{refresh: 1'b1, in1: exp_rsp.out, in2: FX_ONE};
      S_DIV:   div_req = '{start: 1'b1, in1: FX_ONE, in2: add_out};
      S_MUL:   mul_req = '{refresh: 1'b1, in1: x_q, in2: div_rsp.out};
      default: ;
    endcase
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE; start_q <= 1'b0; act_q <= ACT_NONE;
      len_q <= '0; idx <= '0; a_ptr <= '0; b_ptr <= '0; a_str <= '0; b_str <= '0;
      bias_q <= '0; a_dw_q <= 1'b0; b_src_q <= 1'b0;
      a_frac_q <= '0; b_frac_q <= '0; bias_frac_q <= '0;
      v1 <= 1'b0; v2 <= 1'b0; f1 <= 1'b0; f2 <= 1'b0;
      x_q <= '0; done <= 1'b0; result <= '0;
    end else begin
      start_q <= start;
      done    <= 1'b0;
      v1 <= issue;
      f1 <= issue && (idx == 8'd0);
      v2 <= v1;
      f2 <= f1;
      unique case (state)
        S_IDLE: if (start && !start_q) begin
          act_q <= act; len_q <= len; idx <= '0;
          a_ptr <= a_base; b_ptr <= b_base; a_str <= a_stride; b_str <= b_stride;
          bias_q <= bias_addr; a_dw_q <= a_dw; b_src_q <= b_src;
          a_frac_q <= a_frac; b_frac_q <= b_frac; bias_frac_q <= bias_frac;
          state <= (len == 8'd0) ? S_IDLE : S_RUN;
          if (len == 8'd0) begin result <= '0; done <= 1'b1; end
        end
        S_RUN: begin
          a_ptr <= a_ptr + a_str;
          b_ptr <= b_ptr + b_str;
          idx   <= idx + 1'b1;
          if (idx == len_q - 1'b1) state <= S_DRAIN;
        end
        S_DRAIN: if (!v1 && !v2) begin
          x_q <= add_out;
          if (act_q == ACT_NONE) begin
            result <= add_out; done <= 1'b1; state <= S_IDLE;
          end else state <= S_BADD;
        end
        S_BADD: state <= S_BRES;
        S_BRES: begin
          x_q <= add_out;
          if (act_q == ACT_LINEAR) begin
            result <= add_out; done <= 1'b1; state <= S_IDLE;
          end else state <= S_EXP;
        end
        S_EXP:  state <= S_EXPW;
        S_EXPW: if (exp_rsp.done) state <= S_ONE;
        S_ONE:  state <= S_DIV;
        S_DIV:  state <= S_DIVW;
        S_DIVW: if (div_rsp.done) state <= S_MUL;
        S_MUL:  state <= S_MULW;
        S_MULW: begin result <= mul_out; done <= 1'b1; state <= S_IDLE; end
        default: state <= S_IDLE;
      endcase
    end
  end
endmodule
