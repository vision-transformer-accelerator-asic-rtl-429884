// softmax_unit: in-place softmax of a vector in the intermediate-result memory.
//
// y_i = e^{x_i} / sum_j e^{x_j} for i < len, read from base..base+len-1 in format frac_in and
// written back to the same addresses in format frac_out. Pass 1 reads each element,
// exponentiates it on the shared exponential unit, keeps e^{x_i} in a local buffer and
// accumulates the sum on the shared adder. The reciprocal of the sum is then computed once on
// the shared divider, and pass 2 multiplies each buffered exponential by it on the shared
// multiplier and writes the result. The maximum is not subtracted first, matching the formula
// the paper gives; large inputs saturate the exponential.
//
// Timing: start on a rising edge of `start` while idle; `done` pulses after the last write.
// About 15 cycles per element plus 65 for the division (1025 cycles for 64 elements; the
// paper reports 1926 for its implementation). Using the exponential unit, one division and
// the start/done protocol is the paper's; the local buffer of MAX_LEN values (which avoids
// re-reading and re-exponentiating) and the two-pass order are this design's.
module softmax_unit
  import sleepvit_pkg::*;
#(
  parameter int MAX_LEN = 64
) (
  input  logic       clk,
  input  logic       rst_n,
  input  logic       start,
  input  addr_t      base,
  input  logic [7:0] len,
  input  frac_t      frac_in,
  input  frac_t      frac_out,
  output logic       busy,
  output logic       done,
  output mem_rd_t    ires_rd,
  input  fx_t        ires_rdata,
  output mem_wr_t    ires_wr,
  output arith_req_t add_req,
  input  fx_t        add_out,
  output arith_req_t mul_req,
  input  fx_t        mul_out,
  output unit_req_t  exp_req,
  input  unit_rsp_t  exp_rsp,
  output unit_req_t  div_req,
  input  unit_rsp_t  div_rsp
);
  localparam int IW = $clog2(MAX_LEN);

  typedef enum logic [3:0] {S_IDLE, S_RD, S_EXP, S_EXPW, S_ACC, S_ACCW, S_DIV, S_DIVW, S_MUL, S_WR}
    state_e;
  state_e     state;
  logic       start_q;
  addr_t      base_q;
  logic [7:0] len_q, idx;
  frac_t      fin_q, fout_q;
  fx_t        sum_q, inv_q;
  fx_t        ebuf [MAX_LEN];

  assign busy = (state != S_IDLE);

  always_comb begin
    ires_rd = '0;
    ires_wr = '0;
    add_req = '0;
    mul_req = '0;
    exp_req = '0;
    div_req = '0;
    unique case (state)
      S_RD:  ires_rd = '{en: 1'b1, dw: 1'b0, frac: fin_q, addr: base_q + addr_t'(idx)};
      S_EXP: exp_req = '{start: 1'b1, in1: ires_rdata, in2: FX_ZERO};
      S_ACC: add_req = '{refresh: 1'b1, in1: sum_q, in2: exp_rsp.out};
      S_DIV: div_req = '{start: 1'b1, in1: FX_ONE, in2: sum_q};
      S_MUL: mul_req = '{refresh: 1'b1, in1: ebuf[IW'(idx)], in2: inv_q};
      S_WR:  ires_wr = '{en: 1'b1, dw: 1'b0, frac: fout_q, addr: base_q + addr_t'(idx),
                         data: mul_out};
      default: ;
    endcase
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE; start_q <= 1'b0; base_q <= '0; len_q <= '0; idx <= '0;
      fin_q <= '0; fout_q <= '0; sum_q <= '0; inv_q <= '0; done <= 1'b0;
    end else begin
      start_q <= start;
      done    <= 1'b0;
      unique case (state)
        S_IDLE: if (start && !start_q) begin
          base_q <= base; len_q <= len; fin_q <= frac_in; fout_q <= frac_out;
          idx <= '0; sum_q <= '0;
          state <= S_RD;
        end
        S_RD:   state <= S_EXP;
        S_EXP:  state <= S_EXPW;
        S_EXPW: if (exp_rsp.done) begin
          ebuf[IW'(idx)] <= exp_rsp.out;
          state <= S_ACC;
        end
        S_ACC:  state <= S_ACCW;
        S_ACCW: begin
          sum_q <= add_out;
          idx   <= idx + 1'b1;
          state <= (idx == len_q - 1'b1) ? S_DIV : S_RD;
        end
        S_DIV:  state <= S_DIVW;
        S_DIVW: if (div_rsp.done) begin
          inv_q <= div_rsp.out;
          idx   <= '0;
          state <= S_MUL;
        end
        S_MUL:  state <= S_WR;
        S_WR: begin
          idx <= idx + 1'b1;
          if (idx == len_q - 1'b1) begin
            done  <= 1'b1;
            state <= S_IDLE;
          end else state <= S_MUL;
        end
        default: state <= S_IDLE;
      endcase
    end
  end
endmodule
