// layernorm_unit: layer normalisation of one row of the intermediate-result memory.
//
// For x = src[0..len-1] (format frac_in) it computes
//   mean = S1/len, var = S2/len - mean^2, inv = 1/sqrt(var + EPS),  S1 = sum x, S2 = sum x^2
//   dst[i] = gamma[i] * (x[i] - mean) * inv + beta[i]         (format frac_out)
// i.e. normalisation along the row, then scaling and shifting by the learned per-column
// parameters gamma/beta read from the weight memory (format w_frac). The row is read three
// times, so no local buffer is needed and src and dst may coincide. Additions and
// multiplications use the shared adder and multiplier, the three divisions the shared divider,
// and the square root is this module's own fx_sqrt instance (the paper's block diagram draws
// the square-root unit inside the LayerNorm module).
//
// The passes are pipelined on a cycle counter c:
//   pass 1: read x[c]; add S1 += x[c-1]                         -> one element per cycle
//   pass 2: read x[c]; multiply x[c-1]^2; add S2 += x[c-2]^2      -> one element per cycle
//   pass 3: element k starts at c = 2k: read x, gamma (2k); x-mean, read beta (2k+1);
//           *inv (2k+2); *gamma (2k+3); +beta (2k+4); write (2k+5) -> one element per 2 cycles
// Pass 3 needs two additions and two multiplications per element, so with one shared adder
// and multiplier two cycles per element is the limit; the schedule interleaves elements so
// that each unit is used by one element per cycle.
//
// Timing: start on a rising edge of `start` while idle; `done` pulses after the last write:
// 4*len + about 240 cycles (493 for 64 elements; the paper reports 1943 for its fully
// pipelined implementation, whose schedule it does not give). The variance as S2/len - mean^2
// (exact here, since the sums of 8-bit inputs are exact in Q18.21; S2 must stay below 2^18,
// i.e. |x| < 64 for 64 elements), EPS = 2^-9 and the pass order are this design's choices.
module layernorm_unit
  import sleepvit_pkg::*;
(
  input  logic       clk,
  input  logic       rst_n,
  input  logic       start,
  input  addr_t      src,
  input  addr_t      dst,
  input  logic [7:0] len,
  input  frac_t      frac_in,
  input  frac_t      frac_out,
  input  addr_t      gamma_addr,
  input  addr_t      beta_addr,
  input  frac_t      w_frac,
  output logic       busy,
  output logic       done,
  output logic       neg_radicand,
  output mem_rd_t    ires_rd,
  input  fx_t        ires_rdata,
  output mem_wr_t    ires_wr,
  output mem_rd_t    wgt_rd,
  input  fx_t        wgt_rdata,
  output arith_req_t add_req,
  input  fx_t        add_out,
  output arith_req_t mul_req,
  input  fx_t        mul_out,
  output unit_req_t  div_req,
  input  unit_rsp_t  div_rsp
);
  localparam fx_t EPS = fx_t'(1) <<< (Q - 9);

  typedef enum logic [3:0] {
    S_IDLE, S_P1, S_P2, S_MEAN, S_MEANW, S_M2, S_M2W, S_MSQ, S_VSUB, S_EPS, S_SQRT, S_SQRTW,
    S_INV, S_INVW, S_P3
  } state_e;

  state_e     state;
  logic       start_q;
  addr_t      src_q, dst_q, g_q, b_q;
  logic [7:0] len_q;
  logic [9:0] c;                             // pipeline cycle counter of the current pass
  logic [8:0] k_rd, k_c1, k_c2, k_c3, k_c4, k_c5;   // element index of each pass-3 stage
  logic       ev;                            // pass 3: even cycle
  frac_t      fin_q, fout_q, fw_q;
  fx_t        s1_q, m2_q, mean_q, inv_q, gam_q, bet_q;
  unit_req_t  sqrt_req;
  unit_rsp_t  sqrt_rsp;
  fx_t        len_fx;
  logic [9:0] len2;

  assign busy   = (state != S_IDLE);
  assign len_fx = fx_t'(len_q) <<< Q;
  assign len2   = {1'b0, len_q, 1'b0};
  assign ev     = ~c[0];
  // pass-3 element index for each stage (valid when 0 <= index < len)
  assign k_rd = c[9:1];                      // c = 2k     (even)
  assign k_c1 = 9'((c - 10'd1) >> 1);        // c = 2k+1   (odd)
  assign k_c2 = 9'((c - 10'd2) >> 1);        // c = 2k+2   (even)
  assign k_c3 = 9'((c - 10'd3) >> 1);        // c = 2k+3   (odd)
  assign k_c4 = 9'((c - 10'd4) >> 1);        // c = 2k+4   (even)
  assign k_c5 = 9'((c - 10'd5) >> 1);        // c = 2k+5   (odd)

  fx_sqrt u_sqrt (.clk(clk), .rst_n(rst_n), .req(sqrt_req), .rsp(sqrt_rsp));

  always_comb begin
    ires_rd  = '0;
    ires_wr  = '0;
    wgt_rd   = '0;
    add_req  = '0;
    mul_req  = '0;
    div_req  = '0;
    sqrt_req = '0;
    unique case (state)
      S_P1: begin
        if (c < {2'b0, len_q})
          ires_rd = '{en: 1'b1, dw: 1'b0, frac: fin_q, addr: src_q + addr_t'(c)};
        if (c >= 10'd1 && c <= {2'b0, len_q})
          add_req = '{refresh: 1'b1, in1: (c == 10'd1) ? FX_ZERO : add_out, in2: ires_rdata};
      end
      S_P2: begin
        if (c < {2'b0, len_q})
          ires_rd = '{en: 1'b1, dw: 1'b0, frac: fin_q, addr: src_q + addr_t'(c)};
        if (c >= 10'd1 && c <= {2'b0, len_q})
          mul_req = '{refresh: 1'b1, in1: ires_rdata, in2: ires_rdata};
        if (c >= 10'd2 && c <= {2'b0, len_q} + 10'd1)
          add_req = '{refresh: 1'b1, in1: (c == 10'd2) ? FX_ZERO : add_out, in2: mul_out};
      end
      S_MEAN:  div_req  = '{start: 1'b1, in1: s1_q, in2: len_fx};
      S_M2:    div_req  = '{start: 1'b1, in1: add_out, in2: len_fx};
      S_MSQ:   mul_req  = '{refresh: 1'b1, in1: mean_q, in2: mean_q};
      S_VSUB:  add_req  = '{refresh: 1'b1, in1: m2_q, in2: -mul_out};
      S_EPS:   add_req  = '{refresh: 1'b1, in1: add_out, in2: EPS};
      S_SQRT:  sqrt_req = '{start: 1'b1, in1: add_out, in2: FX_ZERO};
      S_INV:   div_req  = '{start: 1'b1, in1: FX_ONE, in2: sqrt_rsp.out};
      S_P3: begin
        if (ev) begin
          if (k_rd < {1'b0, len_q}) begin
            ires_rd = '{en: 1'b1, dw: 1'b0, frac: fin_q, addr: src_q + addr_t'(k_rd)};
            wgt_rd  = '{en: 1'b1, dw: 1'b0, frac: fw_q, addr: g_q + addr_t'(k_rd)};
          end
          if (c >= 10'd2 && k_c2 < {1'b0, len_q})
            mul_req = '{refresh: 1'b1, in1: add_out, in2: inv_q};
          if (c >= 10'd4 && k_c4 < {1'b0, len_q})
            add_req = '{refresh: 1'b1, in1: mul_out, in2: bet_q};
        end else begin
          if (k_c1 < {1'b0, len_q}) begin
            add_req = '{refresh: 1'b1, in1: ires_rdata, in2: -mean_q};
            wgt_rd  = '{en: 1'b1, dw: 1'b0, frac: fw_q, addr: b_q + addr_t'(k_c1)};
          end
          if (c >= 10'd3 && k_c3 < {1'b0, len_q})
            mul_req = '{refresh: 1'b1, in1: mul_out, in2: gam_q};
          if (c >= 10'd5 && k_c5 < {1'b0, len_q})
            ires_wr = '{en: 1'b1, dw: 1'b0, frac: fout_q, addr: dst_q + addr_t'(k_c5),
                        data: add_out};
        end
      end
      default: ;
    endcase
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE; start_q <= 1'b0; src_q <= '0; dst_q <= '0; g_q <= '0; b_q <= '0;
      len_q <= '0; c <= '0; fin_q <= '0; fout_q <= '0; fw_q <= '0;
      s1_q <= '0; m2_q <= '0; mean_q <= '0; inv_q <= '0; gam_q <= '0; bet_q <= '0;
      done <= 1'b0; neg_radicand <= 1'b0;
    end else begin
      start_q <= start;
      done    <= 1'b0;
      c       <= c + 1'b1;
      unique case (state)
        S_IDLE: begin
          c <= '0;
          if (start && !start_q) begin
            src_q <= src; dst_q <= dst; g_q <= gamma_addr; b_q <= beta_addr; len_q <= len;
            fin_q <= frac_in; fout_q <= frac_out; fw_q <= w_frac;
            neg_radicand <= 1'b0;
            state <= S_P1;
          end
        end
        S_P1: if (c == {2'b0, len_q} + 10'd1) begin
          s1_q <= add_out; c <= '0; state <= S_P2;
        end
        S_P2: if (c == {2'b0, len_q} + 10'd2) state <= S_MEAN;   // S2 stays in add_out
        S_MEAN:  state <= S_MEANW;
        S_MEANW: if (div_rsp.done) begin mean_q <= div_rsp.out; state <= S_M2; end
        S_M2:    state <= S_M2W;
        S_M2W:   if (div_rsp.done) begin m2_q <= div_rsp.out; state <= S_MSQ; end
        S_MSQ:   state <= S_VSUB;
        S_VSUB:  state <= S_EPS;
        S_EPS:   state <= S_SQRT;
        S_SQRT:  state <= S_SQRTW;
        S_SQRTW: if (sqrt_rsp.done) begin
          neg_radicand <= sqrt_rsp.flag;
          state <= S_INV;
        end
        S_INV:   state <= S_INVW;
        S_INVW:  if (div_rsp.done) begin
          inv_q <= div_rsp.out; c <= '0; state <= S_P3;
        end
        S_P3: begin
          if (!ev && k_c1 < {1'b0, len_q}) gam_q <= wgt_rdata;   // gamma[k] at c = 2k+1
          if (ev && c >= 10'd2 && k_c2 < {1'b0, len_q}) bet_q <= wgt_rdata;  // beta[k] at 2k+2
          if (c == len2 + 10'd3) begin
            done  <= 1'b1;
            state <= S_IDLE;
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end
endmodule
