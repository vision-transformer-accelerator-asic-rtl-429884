// vit_fsm: the instruction-less controller that runs one SleepViT inference.
//
// The inference is a fixed sequence of operations (see get_op below); each operation is a
// loop over `rows` x `cols` output elements, and each element is one call of a compute module
// (MAC, softmax, LayerNorm) or an element-wise addition done here on the shared adder.
// Operand addresses follow from per-operation base addresses and row/column strides, updated
// incrementally, so no instructions are fetched or decoded. The sequence is:
//   patch projection (MAC, linear) -> class token -> + position embedding -> LayerNorm ->
//   Q, K, V projections -> for each of 8 heads: scores Q.K (MAC), softmax per row,
//   scores.V (MAC) -> output projection -> residual add -> LayerNorm -> MLP (swish, then
//   linear) -> residual add -> LayerNorm of the class token -> MLP head (swish, linear) ->
//   softmax -> the 4 probabilities are handed to the time-average filter.
// The 1/sqrt(d_head) attention scaling is assumed folded into the query weights.
//
// SoC side: `strt_ld` rewinds the EEG write pointer, each `new_eeg` stores the 16-bit
// unsigned sample `eeg` (as offset binary, i.e. (eeg-32768)/256 in Q8.8, double width), and
// `new_eph` starts an inference when idle. An EEG sample that arrives while another module
// writes the intermediate-result memory is held one or more cycles (`eeg_defer` pulses).
//
// The op list, the memory map, the formats and the SoC handshake details are this design's;
// the model structure, the FSM-without-instructions idea and the SoC signal names are the
// paper's.
module vit_fsm
  import sleepvit_pkg::*;
(
  input  logic       clk,
  input  logic       rst_n,
  // SoC
  input  logic       new_eph,
  input  logic       new_eeg,
  input  logic       strt_ld,
  input  logic [15:0] eeg,
  output logic       busy,
  output logic       eeg_defer,
  // class probabilities to the time-average filter
  output logic       prob_valid,
  output fx_t        prob [NCLASS],
  // own memory and adder use
  output mem_rd_t    ires_rd0,
  output mem_rd_t    ires_rd1,
  input  fx_t        ires_rdata0,
  input  fx_t        ires_rdata1,
  output mem_wr_t    ires_wr,
  input  logic       ext_wr_active,        // a compute module writes this cycle
  output mem_rd_t    wgt_rd,
  input  fx_t        wgt_rdata,
  output arith_req_t add_req,
  input  fx_t        add_out,
  // MAC
  output logic       mac_start,
  output act_e       mac_act,
  output logic [7:0] mac_len,
  output addr_t      mac_a_base,
  output addr_t      mac_a_stride,
  output logic       mac_a_dw,
  output frac_t      mac_a_frac,
  output logic       mac_b_src,
  output addr_t      mac_b_base,
  output addr_t      mac_b_stride,
  output frac_t      mac_b_frac,
  output addr_t      mac_bias_addr,
  output frac_t      mac_bias_frac,
  input  logic       mac_done,
  input  fx_t        mac_result,
  // softmax
  output logic       sm_start,
  output addr_t      sm_base,
  output logic [7:0] sm_len,
  output frac_t      sm_frac_in,
  output frac_t      sm_frac_out,
  input  logic       sm_done,
  // LayerNorm
  output logic       ln_start,
  output addr_t      ln_src,
  output addr_t      ln_dst,
  output logic [7:0] ln_len,
  output frac_t      ln_frac_in,
  output frac_t      ln_frac_out,
  output addr_t      ln_gamma,
  output addr_t      ln_beta,
  output frac_t      ln_w_frac,
  input  logic       ln_done
);
  typedef enum logic [2:0] {K_MAC, K_SMX, K_LN, K_VADD, K_OUT, K_END} kind_e;

  typedef struct packed {
    kind_e      kind;
    logic [7:0] rows, cols, len;
    act_e       act;
    addr_t      a_base, a_rs, a_cs, a_stride;
    logic       a_dw, a_zero;
    frac_t      a_frac;
    logic       b_src;                       // 0 weights, 1 intermediate results
    addr_t      b_base, b_rs, b_cs, b_stride;
    frac_t      b_frac;
    addr_t      bias;                        // MAC bias / LayerNorm gamma (beta follows)
    addr_t      d_base, d_rs, d_cs;
    frac_t      d_frac;
  } op_t;

  localparam int PC_HEAD0 = 7;               // first op of the per-head loop
  localparam int PC_HEADN = 9;               // last op of the per-head loop

  // The operation table. h is the attention head for ops 7..9.
  function automatic op_t get_op(input logic [4:0] pc, input logic [2:0] h);
    op_t o;
    o = '0;
    o.kind = K_END;
    o.a_stride = 16'd1;
    o.b_stride = 16'd1;
    o.d_cs     = 16'd1;
    case (pc)
      5'd0: begin // patch projection: X[p+1][o] = EEG[p][:] . Wp[o][:] + bp[o]
        o.kind = K_MAC; o.rows = 8'(NPATCH); o.cols = 8'(DMODEL); o.len = 8'(PATCH); o.act = ACT_LINEAR;
        o.a_base = addr_t'(A_EEG); o.a_rs = addr_t'(PATCH); o.a_dw = 1'b1; o.a_frac = F_EEG;
        o.b_base = addr_t'(W_PATCH); o.b_cs = addr_t'(DMODEL); o.b_frac = F_W; o.bias = addr_t'(B_PATCH);
        o.d_base = addr_t'(A_X + DMODEL); o.d_rs = addr_t'(DMODEL); o.d_frac = F_ACT;
      end
      5'd1: begin // class token: X[0][:] = cls
        o.kind = K_VADD; o.rows = 8'(1); o.cols = 8'(DMODEL); o.a_zero = 1'b1;
        o.b_base = addr_t'(W_CLS); o.b_cs = addr_t'(1); o.b_frac = F_EMB;
        o.d_base = addr_t'(A_X); o.d_frac = F_ACT;
      end
      5'd2: begin // position embedding: X += POS
        o.kind = K_VADD; o.rows = 8'(NTOK); o.cols = 8'(DMODEL);
        o.a_base = addr_t'(A_X); o.a_rs = addr_t'(DMODEL); o.a_cs = addr_t'(1); o.a_frac = F_ACT;
        o.b_base = addr_t'(W_POS); o.b_rs = addr_t'(DMODEL); o.b_cs = addr_t'(1); o.b_frac = F_EMB;
        o.d_base = addr_t'(A_X); o.d_rs = addr_t'(DMODEL); o.d_frac = F_ACT;
      end
      5'd3, 5'd12, 5'd16: begin // LayerNorm 1, 2 and of the class token
        o.kind = K_LN; o.rows = 8'((pc == 5'd16) ? 8'd1 : 8'(NTOK)); o.cols = 8'(1); o.len = 8'(DMODEL);
        o.a_base = addr_t'(A_X); o.a_rs = addr_t'(DMODEL); o.a_frac = F_ACT; o.b_frac = F_W;
        o.bias = addr_t'((pc == 5'd3) ? G_LN1 : (pc == 5'd12) ? G_LN2 : G_LN3);
        o.d_base = addr_t'(A_LN); o.d_rs = addr_t'(DMODEL); o.d_frac = F_LN;
      end
      5'd4, 5'd5, 5'd6: begin // Q, K, V projections
        o.kind = K_MAC; o.rows = 8'(NTOK); o.cols = 8'(DMODEL); o.len = 8'(DMODEL); o.act = ACT_LINEAR;
        o.a_base = addr_t'(A_LN); o.a_rs = addr_t'(DMODEL); o.a_frac = F_LN;
        o.b_base = addr_t'(W_QKV + (int'(pc) - 4) * (DMODEL * DMODEL + DMODEL));
        o.b_cs = addr_t'(DMODEL); o.b_frac = F_W; o.bias = addr_t'(o.b_base + addr_t'(DMODEL * DMODEL));
        o.d_base = addr_t'((pc == 5'd4) ? A_Q : (pc == 5'd5) ? A_K : A_V);
        o.d_rs = addr_t'(DMODEL); o.d_frac = F_ACT;
      end
      5'd7: begin // scores S[i][j] = Q[i][h] . K[j][h]
        o.kind = K_MAC; o.rows = 8'(NTOK); o.cols = 8'(NTOK); o.len = 8'(DHEAD); o.act = ACT_NONE;
        o.a_base = addr_t'(A_Q + h * DHEAD); o.a_rs = addr_t'(DMODEL); o.a_frac = F_ACT;
        o.b_src = 1'b1; o.b_base = addr_t'(A_K + h * DHEAD); o.b_cs = addr_t'(DMODEL); o.b_frac = F_ACT;
        o.d_base = addr_t'(A_S); o.d_rs = addr_t'(NTOK); o.d_frac = F_ACT;
      end
      5'd8: begin // softmax of each score row, in place
        o.kind = K_SMX; o.rows = 8'(NTOK); o.cols = 8'(1); o.len = 8'(NTOK);
        o.a_base = addr_t'(A_S); o.a_rs = addr_t'(NTOK); o.a_frac = F_ACT; o.d_frac = F_PRB;
      end
      5'd9: begin // head output O[i][h*8+d] = S[i][:] . V[:][h*8+d]
        o.kind = K_MAC; o.rows = 8'(NTOK); o.cols = 8'(DHEAD); o.len = 8'(NTOK); o.act = ACT_NONE;
        o.a_base = addr_t'(A_S); o.a_rs = addr_t'(NTOK); o.a_frac = F_PRB;
        o.b_src = 1'b1; o.b_base = addr_t'(A_V + h * DHEAD); o.b_cs = addr_t'(1); o.b_stride = addr_t'(DMODEL);
        o.b_frac = F_ACT;
        o.d_base = addr_t'(A_LN + h * DHEAD); o.d_rs = addr_t'(DMODEL); o.d_frac = F_ACT;
      end
      5'd10: begin // output projection of the concatenated heads
        o.kind = K_MAC; o.rows = 8'(NTOK); o.cols = 8'(DMODEL); o.len = 8'(DMODEL); o.act = ACT_LINEAR;
        o.a_base = addr_t'(A_LN); o.a_rs = addr_t'(DMODEL); o.a_frac = F_ACT;
        o.b_base = addr_t'(W_O); o.b_cs = addr_t'(DMODEL); o.b_frac = F_W; o.bias = addr_t'(W_O + DMODEL * DMODEL);
        o.d_base = addr_t'(A_Q); o.d_rs = addr_t'(DMODEL); o.d_frac = F_ACT;
      end
      5'd11, 5'd15: begin // residual: X += A_Q
        o.kind = K_VADD; o.rows = 8'(NTOK); o.cols = 8'(DMODEL);
        o.a_base = addr_t'(A_X); o.a_rs = addr_t'(DMODEL); o.a_cs = addr_t'(1); o.a_frac = F_ACT;
        o.b_src = 1'b1; o.b_base = addr_t'(A_Q); o.b_rs = addr_t'(DMODEL); o.b_cs = addr_t'(1); o.b_frac = F_ACT;
        o.d_base = addr_t'(A_X); o.d_rs = addr_t'(DMODEL); o.d_frac = F_ACT;
      end
      5'd13: begin // MLP hidden layer, swish
        o.kind = K_MAC; o.rows = 8'(NTOK); o.cols = 8'(DMLP); o.len = 8'(DMODEL); o.act = ACT_SWISH;
        o.a_base = addr_t'(A_LN); o.a_rs = addr_t'(DMODEL); o.a_frac = F_LN;
        o.b_base = addr_t'(W_M1); o.b_cs = addr_t'(DMODEL); o.b_frac = F_W; o.bias = addr_t'(W_M1 + DMLP * DMODEL);
        o.d_base = addr_t'(A_K); o.d_rs = addr_t'(DMLP); o.d_frac = F_ACT;
      end
      5'd14: begin // MLP output layer
        o.kind = K_MAC; o.rows = 8'(NTOK); o.cols = 8'(DMODEL); o.len = 8'(DMLP); o.act = ACT_LINEAR;
        o.a_base = addr_t'(A_K); o.a_rs = addr_t'(DMLP); o.a_frac = F_ACT;
        o.b_base = addr_t'(W_M2); o.b_cs = addr_t'(DMLP); o.b_frac = F_W; o.bias = addr_t'(W_M2 + DMODEL * DMLP);
        o.d_base = addr_t'(A_Q); o.d_rs = addr_t'(DMODEL); o.d_frac = F_ACT;
      end
      5'd17: begin // MLP head hidden layer (class token), swish
        o.kind = K_MAC; o.rows = 8'(1); o.cols = 8'(DMLP); o.len = 8'(DMODEL); o.act = ACT_SWISH;
        o.a_base = addr_t'(A_LN); o.a_frac = F_LN;
        o.b_base = addr_t'(W_H1); o.b_cs = addr_t'(DMODEL); o.b_frac = F_W; o.bias = addr_t'(W_H1 + DMLP * DMODEL);
        o.d_base = addr_t'(A_HH); o.d_frac = F_ACT;
      end
      5'd18: begin // MLP head output: class logits
        o.kind = K_MAC; o.rows = 8'(1); o.cols = 8'(NCLASS); o.len = 8'(DMLP); o.act = ACT_LINEAR;
        o.a_base = addr_t'(A_HH); o.a_frac = F_ACT;
        o.b_base = addr_t'(W_H2); o.b_cs = addr_t'(DMLP); o.b_frac = F_W; o.bias = addr_t'(W_H2 + NCLASS * DMLP);
        o.d_base = addr_t'(A_LOG); o.d_frac = F_ACT;
      end
      5'd19: begin // softmax of the logits
        o.kind = K_SMX; o.rows = 8'(1); o.cols = 8'(1); o.len = 8'(NCLASS);
        o.a_base = addr_t'(A_LOG); o.a_frac = F_ACT; o.d_frac = F_PRB;
      end
      5'd20: begin // hand the probabilities to the filter
        o.kind = K_OUT; o.rows = 8'(1); o.cols = 8'(NCLASS);
        o.a_base = addr_t'(A_LOG); o.a_cs = addr_t'(1); o.a_frac = F_PRB;
      end
      default: o.kind = K_END;
    endcase
    return o;
  endfunction

  typedef enum logic [3:0] {
    S_IDLE, S_DECODE, S_MAC_GO, S_MAC_WAIT, S_SMX_GO, S_LN_GO, S_UNIT_WAIT,
    S_VADD_RD, S_VADD_ADD, S_VADD_WR, S_OUT_RD, S_OUT_LAT, S_NEXT
  } state_e;

  state_e     state;
  logic [4:0] pc;
  logic [2:0] head;
  op_t        op;
  logic [7:0] r, c;
  addr_t      a_row, a_off, b_row, b_off, d_row, d_off;
  addr_t      a_addr, b_addr, d_addr;
  logic       last_col, last_row;
  // EEG loader
  logic [11:0] eeg_ptr;
  logic        eeg_pend;
  logic [15:0] eeg_q;
  logic [11:0] eeg_addr_q;
  logic        fsm_wr;

  assign op       = get_op(pc, head);
  assign a_addr   = a_row + a_off;
  assign b_addr   = b_row + b_off;
  assign d_addr   = d_row + d_off;
  assign last_col = (c == op.cols - 1'b1);
  assign last_row = (r == op.rows - 1'b1);
  assign busy     = (state != S_IDLE);

  // compute-module control
  always_comb begin
    mac_start     = (state == S_MAC_GO);
    mac_act       = op.act;
    mac_len       = op.len;
    mac_a_base    = a_addr;
    mac_a_stride  = op.a_stride;
    mac_a_dw      = op.a_dw;
    mac_a_frac    = op.a_frac;
    mac_b_src     = op.b_src;
    mac_b_base    = b_addr;
    mac_b_stride  = op.b_stride;
    mac_b_frac    = op.b_frac;
    mac_bias_addr = op.bias + addr_t'(c);
    mac_bias_frac = op.b_frac;
    sm_start      = (state == S_SMX_GO);
    sm_base       = a_addr;
    sm_len        = op.len;
    sm_frac_in    = op.a_frac;
    sm_frac_out   = op.d_frac;
    ln_start      = (state == S_LN_GO);
    ln_src        = a_addr;
    ln_dst        = d_addr;
    ln_len        = op.len;
    ln_frac_in    = op.a_frac;
    ln_frac_out   = op.d_frac;
    ln_gamma      = op.bias;
    ln_beta       = op.bias + addr_t'(DMODEL);
    ln_w_frac     = op.b_frac;
  end

  // own memory / adder traffic
  always_comb begin
    ires_rd0 = '0;
    ires_rd1 = '0;
    wgt_rd   = '0;
    ires_wr  = '0;
    add_req  = '0;
    fsm_wr   = 1'b0;
    unique case (state)
      S_VADD_RD: begin
        if (!op.a_zero) ires_rd0 = '{en: 1'b1, dw: 1'b0, frac: op.a_frac, addr: a_addr};
        if (op.b_src) ires_rd1 = '{en: 1'b1, dw: 1'b0, frac: op.b_frac, addr: b_addr};
        else          wgt_rd   = '{en: 1'b1, dw: 1'b0, frac: op.b_frac, addr: b_addr};
      end
      S_VADD_ADD: add_req = '{refresh: 1'b1, in1: op.a_zero ? FX_ZERO : ires_rdata0,
                              in2: op.b_src ? ires_rdata1 : wgt_rdata};
      S_VADD_WR: begin
        ires_wr = '{en: 1'b1, dw: 1'b0, frac: op.d_frac, addr: d_addr, data: add_out};
        fsm_wr  = 1'b1;
      end
      S_MAC_WAIT: if (mac_done) begin
        ires_wr = '{en: 1'b1, dw: 1'b0, frac: op.d_frac, addr: d_addr, data: mac_result};
        fsm_wr  = 1'b1;
      end
      S_OUT_RD: ires_rd0 = '{en: 1'b1, dw: 1'b0, frac: op.a_frac, addr: a_addr};
      default: ;
    endcase
    // a pending EEG sample takes the write port when nobody else uses it
    if (eeg_pend && !fsm_wr && !ext_wr_active)
      ires_wr = '{en: 1'b1, dw: 1'b1, frac: F_EEG, addr: addr_t'(A_EEG) + addr_t'(eeg_addr_q),
                  data: fx_t'(signed'(eeg_q ^ 16'h8000)) <<< (Q - int'(F_EEG))};
  end

  assign eeg_defer = eeg_pend && (fsm_wr || ext_wr_active);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE; pc <= '0; head <= '0; r <= '0; c <= '0;
      a_row <= '0; a_off <= '0; b_row <= '0; b_off <= '0; d_row <= '0; d_off <= '0;
      prob_valid <= 1'b0;
      for (int k = 0; k < NCLASS; k++) prob[k] <= '0;
      eeg_ptr <= '0; eeg_pend <= 1'b0; eeg_q <= '0; eeg_addr_q <= '0;
    end else begin
      prob_valid <= 1'b0;

      // EEG loader
      if (eeg_pend && !fsm_wr && !ext_wr_active) eeg_pend <= 1'b0;
      if (strt_ld) eeg_ptr <= '0;
      else if (new_eeg) begin
        eeg_q      <= eeg;
        eeg_addr_q <= eeg_ptr;
        eeg_pend   <= 1'b1;
        eeg_ptr    <= (eeg_ptr == 12'(NSAMPLE - 1)) ? '0 : eeg_ptr + 1'b1;
      end

      unique case (state)
        S_IDLE: if (new_eph) begin
          pc <= '0; head <= '0; state <= S_DECODE;
        end
        S_DECODE: begin
          r <= '0; c <= '0;
          a_row <= op.a_base; b_row <= op.b_base; d_row <= op.d_base;
          a_off <= '0; b_off <= '0; d_off <= '0;
          unique case (op.kind)
            K_MAC:  state <= S_MAC_GO;
            K_SMX:  state <= S_SMX_GO;
            K_LN:   state <= S_LN_GO;
            K_VADD: state <= S_VADD_RD;
            K_OUT:  state <= S_OUT_RD;
            default: state <= S_IDLE;
          endcase
        end
        S_MAC_GO:    state <= S_MAC_WAIT;
        S_MAC_WAIT:  if (mac_done) state <= S_NEXT;
        S_SMX_GO, S_LN_GO: state <= S_UNIT_WAIT;
        S_UNIT_WAIT: if (sm_done || ln_done) state <= S_NEXT;
        S_VADD_RD:   state <= S_VADD_ADD;
        S_VADD_ADD:  state <= S_VADD_WR;
        S_VADD_WR:   state <= S_NEXT;
        S_OUT_RD:    state <= S_OUT_LAT;
        S_OUT_LAT: begin
          prob[c[1:0]] <= ires_rdata0;
          if (last_col) prob_valid <= 1'b1;
          state <= S_NEXT;
        end
        S_NEXT: begin
          // advance over the element grid, then to the next operation
          if (!last_col) begin
            c <= c + 1'b1;
            a_off <= a_off + op.a_cs; b_off <= b_off + op.b_cs; d_off <= d_off + op.d_cs;
            state <= (op.kind == K_MAC) ? S_MAC_GO : (op.kind == K_VADD) ? S_VADD_RD : S_OUT_RD;
          end else if (!last_row) begin
            r <= r + 1'b1; c <= '0;
            a_row <= a_row + op.a_rs; b_row <= b_row + op.b_rs; d_row <= d_row + op.d_rs;
            a_off <= '0; b_off <= '0; d_off <= '0;
            unique case (op.kind)
              K_MAC:  state <= S_MAC_GO;
              K_SMX:  state <= S_SMX_GO;
              K_LN:   state <= S_LN_GO;
              K_VADD: state <= S_VADD_RD;
              default: state <= S_OUT_RD;
            endcase
          end else begin
            if (pc == 5'(PC_HEADN) && head != 3'(NHEAD - 1)) begin
              head <= head + 1'b1;
              pc   <= 5'(PC_HEAD0);
            end else pc <= pc + 1'b1;
            state <= S_DECODE;
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end
endmodule
