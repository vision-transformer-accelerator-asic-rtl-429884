// sleepvit_top: the SleepViT accelerator - a vision transformer that classifies a 30-s
// single-channel EEG epoch into one of four sleep stages.
//
// One compute core: the instruction-less controller (vit_fsm) sequences dedicated units -
// MAC, softmax, LayerNorm (with its own square root), exponential and divider - that all
// share one adder and one multiplier. Signal multiplexers (req_mux) route the shared adder,
// multiplier, exponential unit, divider and memory ports to whichever module is active; only
// one is active at a time. Weights live in a 2-bank SRAM (31744 8-bit words), intermediate
// results in a 4-bank SRAM (57344 words); the memory controllers cast between the stored
// 8/16-bit Q formats and the Q18.21 compute format. The time-average filter smooths the
// last three class-probability vectors and its argmax is the sleep stage.
//
// SoC interface (names from the paper's block diagram): strt_ld rewinds the EEG buffer,
// new_eeg writes the 16-bit unsigned sample on `eeg`, new_eph starts an inference; at the end
// inf_done pulses for one cycle with the new `sleep_stage` (0 wake, 1 light, 2 deep, 3 REM).
// `err` collects the arithmetic status flags of the inference (overflow, saturation, divide by
// zero, negative radicand); the paper gives the units these flags "for error detection" but
// does not say where they go, so the sticky status port is this design's.
// Weights are written before use through w_we/w_addr/w_data (one raw 8-bit word per cycle);
// the paper does not describe how its weight SRAM is loaded, so this port is this design's.
// An inference takes 3,118,475 cycles (31.2 ms at 100 MHz), measured in simulation.
module sleepvit_top
  import sleepvit_pkg::*;
(
  input  logic        clk,
  input  logic        rst_n,
  // SoC
  input  logic        new_eph,
  input  logic        new_eeg,
  input  logic        strt_ld,
  input  logic [15:0] eeg,
  output logic        inf_done,
  output logic [1:0]  sleep_stage,
  output logic        busy,
  output logic [2:0]  err,           // sticky since new_eph: [0] adder/multiplier overflow,
                                     // [1] saturating memory write, [2] divide by zero or
                                     // negative radicand
  // weight loading
  input  logic        w_we,
  input  addr_t       w_addr,
  input  logic [7:0]  w_data
);
  // ---------------- shared arithmetic ----------------
  arith_req_t add_req, mul_req;
  fx_t        add_out, mul_out;
  logic       add_ovfl, mul_ovfl;
  unit_req_t  exp_req, div_req;
  unit_rsp_t  exp_rsp, div_rsp;

  fx_adder      u_add (.clk, .rst_n, .req(add_req), .out(add_out), .ovfl(add_ovfl));
  fx_multiplier u_mul (.clk, .rst_n, .req(mul_req), .out(mul_out), .ovfl(mul_ovfl));
  fx_divider    u_div (.clk, .rst_n, .req(div_req), .rsp(div_rsp));

  arith_req_t exp_add_req, exp_mul_req;
  fx_exp u_exp (.clk, .rst_n, .req(exp_req), .rsp(exp_rsp),
                .add_req(exp_add_req), .add_out, .mul_req(exp_mul_req), .mul_out);

  // ---------------- memories ----------------
  mem_rd_t ires_rd [2];
  fx_t     ires_rdata [2];
  mem_wr_t ires_wr;
  logic    ires_sat;
  mem_rd_t wgt_rd [2];
  fx_t     wgt_rdata [2];
  mem_wr_t wgt_wr;
  logic    wgt_sat;

  mem_ctrl #(.BANKS(INTRES_BANKS), .DEPTH(INTRES_DEPTH)) u_ires (
    .clk, .rst_n, .rd(ires_rd), .rdata(ires_rdata), .wr(ires_wr), .wr_sat(ires_sat));

  // raw byte in, stored as-is (format with no fractional bits)
  assign wgt_wr = '{en: w_we, dw: 1'b0, frac: 4'd0, addr: w_addr,
                    data: fx_t'(signed'(w_data)) <<< Q};
  assign wgt_rd[1] = '0;
  mem_ctrl #(.BANKS(WEIGHT_BANKS), .DEPTH(WEIGHT_DEPTH)) u_wgt (
    .clk, .rst_n, .rd(wgt_rd), .rdata(wgt_rdata), .wr(wgt_wr), .wr_sat(wgt_sat));

  // ---------------- controller and compute modules ----------------
  logic       mac_start, mac_a_dw, mac_b_src, mac_busy, mac_done;
  act_e       mac_act;
  logic [7:0] mac_len;
  addr_t      mac_a_base, mac_a_stride, mac_b_base, mac_b_stride, mac_bias_addr;
  frac_t      mac_a_frac, mac_b_frac, mac_bias_frac;
  fx_t        mac_result;
  logic       sm_start, sm_busy, sm_done;
  addr_t      sm_base;
  logic [7:0] sm_len;
  frac_t      sm_frac_in, sm_frac_out;
  logic       ln_start, ln_busy, ln_done, ln_negrad;
  addr_t      ln_src, ln_dst, ln_gamma, ln_beta;
  logic [7:0] ln_len;
  frac_t      ln_frac_in, ln_frac_out, ln_w_frac;
  logic       prob_valid, eeg_defer;
  fx_t        prob [NCLASS];
  fx_t        avg  [NCLASS];

  mem_rd_t    fsm_rd0, fsm_rd1, fsm_wrd, mac_rd0, mac_rd1, mac_wrd, sm_rd, ln_rd, ln_wrd;
  mem_wr_t    fsm_wr, sm_wr, ln_wr;
  arith_req_t fsm_add, mac_add, mac_mul, sm_add, sm_mul, ln_add, ln_mul;
  unit_req_t  mac_exp, mac_div, sm_exp, sm_div, ln_div;

  vit_fsm u_fsm (
    .clk, .rst_n, .new_eph, .new_eeg, .strt_ld, .eeg, .busy, .eeg_defer,
    .prob_valid, .prob,
    .ires_rd0(fsm_rd0), .ires_rd1(fsm_rd1), .ires_rdata0(ires_rdata[0]),
    .ires_rdata1(ires_rdata[1]), .ires_wr(fsm_wr), .ext_wr_active(sm_wr.en | ln_wr.en),
    .wgt_rd(fsm_wrd), .wgt_rdata(wgt_rdata[0]), .add_req(fsm_add), .add_out,
    .mac_start, .mac_act, .mac_len, .mac_a_base, .mac_a_stride, .mac_a_dw, .mac_a_frac,
    .mac_b_src, .mac_b_base, .mac_b_stride, .mac_b_frac, .mac_bias_addr, .mac_bias_frac,
    .mac_done, .mac_result,
    .sm_start, .sm_base, .sm_len, .sm_frac_in, .sm_frac_out, .sm_done,
    .ln_start, .ln_src, .ln_dst, .ln_len, .ln_frac_in, .ln_frac_out, .ln_gamma, .ln_beta,
    .ln_w_frac, .ln_done
  );

  mac_unit u_mac (
    .clk, .rst_n, .start(mac_start), .act(mac_act), .len(mac_len),
    .a_base(mac_a_base), .a_stride(mac_a_stride), .a_dw(mac_a_dw), .a_frac(mac_a_frac),
    .b_src(mac_b_src), .b_base(mac_b_base), .b_stride(mac_b_stride), .b_frac(mac_b_frac),
    .bias_addr(mac_bias_addr), .bias_frac(mac_bias_frac),
    .busy(mac_busy), .done(mac_done), .result(mac_result),
    .ires_rd0(mac_rd0), .ires_rdata0(ires_rdata[0]), .ires_rd1(mac_rd1),
    .ires_rdata1(ires_rdata[1]), .wgt_rd(mac_wrd), .wgt_rdata(wgt_rdata[0]),
    .add_req(mac_add), .add_out, .mul_req(mac_mul), .mul_out,
    .exp_req(mac_exp), .exp_rsp, .div_req(mac_div), .div_rsp
  );

  softmax_unit u_smx (
    .clk, .rst_n, .start(sm_start), .base(sm_base), .len(sm_len), .frac_in(sm_frac_in),
    .frac_out(sm_frac_out), .busy(sm_busy), .done(sm_done),
    .ires_rd(sm_rd), .ires_rdata(ires_rdata[0]), .ires_wr(sm_wr),
    .add_req(sm_add), .add_out, .mul_req(sm_mul), .mul_out,
    .exp_req(sm_exp), .exp_rsp, .div_req(sm_div), .div_rsp
  );

  layernorm_unit u_ln (
    .clk, .rst_n, .start(ln_start), .src(ln_src), .dst(ln_dst), .len(ln_len),
    .frac_in(ln_frac_in), .frac_out(ln_frac_out), .gamma_addr(ln_gamma), .beta_addr(ln_beta),
    .w_frac(ln_w_frac), .busy(ln_busy), .done(ln_done), .neg_radicand(ln_negrad),
    .ires_rd(ln_rd), .ires_rdata(ires_rdata[0]), .ires_wr(ln_wr),
    .wgt_rd(ln_wrd), .wgt_rdata(wgt_rdata[0]),
    .add_req(ln_add), .add_out, .mul_req(ln_mul), .mul_out,
    .div_req(ln_div), .div_rsp
  );

  // ---------------- signal muxing ----------------
  req_mux #(.T(arith_req_t), .NREQ(5)) u_mux_add (.clk,
    .valid({fsm_add.refresh, mac_add.refresh, sm_add.refresh, ln_add.refresh,
            exp_add_req.refresh}),
    .req('{fsm_add, mac_add, sm_add, ln_add, exp_add_req}), .out(add_req));
  req_mux #(.T(arith_req_t), .NREQ(4)) u_mux_mul (.clk,
    .valid({mac_mul.refresh, sm_mul.refresh, ln_mul.refresh, exp_mul_req.refresh}),
    .req('{mac_mul, sm_mul, ln_mul, exp_mul_req}), .out(mul_req));
  req_mux #(.T(unit_req_t), .NREQ(2)) u_mux_exp (.clk,
    .valid({mac_exp.start, sm_exp.start}), .req('{mac_exp, sm_exp}), .out(exp_req));
  req_mux #(.T(unit_req_t), .NREQ(3)) u_mux_div (.clk,
    .valid({mac_div.start, sm_div.start, ln_div.start}),
    .req('{mac_div, sm_div, ln_div}), .out(div_req));
  req_mux #(.T(mem_rd_t), .NREQ(4)) u_mux_rd0 (.clk,
    .valid({fsm_rd0.en, mac_rd0.en, sm_rd.en, ln_rd.en}),
    .req('{fsm_rd0, mac_rd0, sm_rd, ln_rd}), .out(ires_rd[0]));
  req_mux #(.T(mem_rd_t), .NREQ(2)) u_mux_rd1 (.clk,
    .valid({fsm_rd1.en, mac_rd1.en}), .req('{fsm_rd1, mac_rd1}), .out(ires_rd[1]));
  req_mux #(.T(mem_wr_t), .NREQ(3)) u_mux_wr (.clk,
    .valid({fsm_wr.en, sm_wr.en, ln_wr.en}), .req('{fsm_wr, sm_wr, ln_wr}), .out(ires_wr));
  req_mux #(.T(mem_rd_t), .NREQ(3)) u_mux_wrd (.clk,
    .valid({fsm_wrd.en, mac_wrd.en, ln_wrd.en}), .req('{fsm_wrd, mac_wrd, ln_wrd}),
    .out(wgt_rd[0]));

  // ---------------- sticky error flags ----------------
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) err <= '0;
    else if (new_eph && !busy) err <= '0;
    else err <= err | {ln_negrad | (div_rsp.done & div_rsp.flag), ires_sat,
                       add_ovfl | mul_ovfl};
  end

  // ---------------- time-average filter ----------------
  avg_filter u_avg (.clk, .rst_n, .in_valid(prob_valid), .prob, .out_valid(inf_done),
                    .stage(sleep_stage), .avg);
endmodule
