// tb_vit_fsm: self-checking test of the inference controller with behavioural stand-ins for
// the compute modules and the memory.
// The MAC, softmax and LayerNorm are replaced by responders that raise `done` a random 1..4
// cycles after their start; the memory returns a hash of the read address one cycle later.
// For one inference the test counts MAC starts per activation, softmax and LayerNorm starts,
// element-wise additions and MAC result writes, and compares them with the numbers that follow
// from the model (60 patches, 61 tokens, d_model 64, 8 heads of 8, MLP 32, 4 classes). It also
// checks the first and last operand/destination addresses, that the 4 probabilities handed to
// the filter are the words read at the logit addresses, and that EEG samples sent during the
// inference are all written (double width, offset binary) even when the write port is busy.
module tb_vit_fsm;
  import sleepvit_pkg::*;
  logic clk = 0, rst_n = 0;
  logic new_eph, new_eeg, strt_ld;
  logic [15:0] eeg;
  logic busy, eeg_defer, prob_valid;
  fx_t prob [NCLASS];
  mem_rd_t ires_rd0, ires_rd1, wgt_rd;
  fx_t ires_rdata0, ires_rdata1, wgt_rdata;
  mem_wr_t ires_wr;
  logic ext_wr_active;
  arith_req_t add_req;
  fx_t add_out;
  logic mac_start, mac_a_dw, mac_b_src, mac_done;
  act_e mac_act;
  logic [7:0] mac_len, sm_len, ln_len;
  addr_t mac_a_base, mac_a_stride, mac_b_base, mac_b_stride, mac_bias_addr;
  frac_t mac_a_frac, mac_b_frac, mac_bias_frac, sm_frac_in, sm_frac_out;
  fx_t mac_result;
  logic sm_start, sm_done, ln_start, ln_done;
  addr_t sm_base, ln_src, ln_dst, ln_gamma, ln_beta;
  frac_t ln_frac_in, ln_frac_out, ln_w_frac;
  int checks = 0, failures = 0;
  always #5 clk = ~clk;

  vit_fsm dut (.*);

  initial begin : watchdog
    repeat (3000000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(string what, logic ok);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  function automatic fx_t hash(addr_t a);
    return fx_t'({a, 3'b101, a}) ^ 39'h5A5A5;
  endfunction

  // behavioural memory and adder
  always_ff @(posedge clk) begin
    ires_rdata0 <= hash(ires_rd0.addr);
    ires_rdata1 <= hash(ires_rd1.addr);
    wgt_rdata   <= hash(wgt_rd.addr);
    if (add_req.refresh) add_out <= add_req.in1 + add_req.in2;
  end

  // behavioural compute modules
  int mac_cnt, sm_cnt, ln_cnt;
  initial begin
    mac_done = 0; sm_done = 0; ln_done = 0; mac_result = '0;
    forever begin
      @(posedge clk);
      if (mac_start || sm_start || ln_start) begin
        logic m, s;
        m = mac_start; s = sm_start;
        repeat (1 + $urandom % 4) @(posedge clk);
        #1;
        if (m) begin mac_done = 1; mac_result = fx_t'($urandom); end
        else if (s) sm_done = 1;
        else ln_done = 1;
        @(posedge clk); #1;
        mac_done = 0; sm_done = 0; ln_done = 0;
      end
    end
  end

  // counters
  int n_mac [3];
  int n_sm, n_ln, n_vadd, n_macwr, n_eegwr, n_defer, n_prob;
  addr_t first_a, first_b, first_bias, last_macwr, first_macwr;
  addr_t sm_last, ln_last_src;
  fx_t last_macres;
  logic [15:0] eeg_sent [$];
  always @(posedge clk) if (rst_n) begin
    if (mac_start) begin
      if (n_mac[0] + n_mac[1] + n_mac[2] == 0) begin
        first_a = mac_a_base; first_b = mac_b_base; first_bias = mac_bias_addr;
      end
      n_mac[int'(mac_act)]++;
    end
    if (sm_start) begin n_sm++; sm_last = sm_base; end
    if (ln_start) begin n_ln++; ln_last_src = ln_src; end
    if (add_req.refresh) n_vadd++;
    if (eeg_defer) n_defer++;
    if (ires_wr.en && !ires_wr.dw) begin
      if (mac_done) begin
        if (n_macwr == 0) first_macwr = ires_wr.addr;
        n_macwr++; last_macwr = ires_wr.addr;
        if (ires_wr.data != mac_result) begin failures++; $display("FAIL MAC result not written"); end
        checks++;
      end
    end
    if (ires_wr.en && ires_wr.dw) begin
      logic [15:0] exp_s;
      exp_s = eeg_sent.pop_front();
      checks++;
      if (ires_wr.addr != addr_t'(n_eegwr) || ires_wr.frac != F_EEG ||
          ires_wr.data != (fx_t'(signed'(exp_s ^ 16'h8000)) <<< (Q - 8))) begin
        failures++; $display("FAIL EEG write %0d", n_eegwr);
      end
      n_eegwr++;
    end
    if (prob_valid) begin
      n_prob++;
      for (int k = 0; k < NCLASS; k++) check($sformatf("prob %0d", k), prob[k] == hash(addr_t'(A_LOG + k)));
    end
  end

  initial begin
    int t0;
    new_eph = 0; new_eeg = 0; strt_ld = 0; eeg = 0; ext_wr_active = 0;
    for (int k = 0; k < 3; k++) n_mac[k] = 0;
    n_sm = 0; n_ln = 0; n_vadd = 0; n_macwr = 0; n_eegwr = 0; n_defer = 0; n_prob = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    @(negedge clk); strt_ld = 1; @(negedge clk); strt_ld = 0;
    @(negedge clk); new_eph = 1; @(negedge clk); new_eph = 0;
    check("busy after new_eph", busy);
    t0 = 0;
    // send 200 EEG samples during the inference, with the write port randomly busy
    fork
      for (int i = 0; i < 200; i++) begin
        repeat (5 + $urandom % 40) @(negedge clk);
        new_eeg = 1; eeg = 16'($urandom); eeg_sent.push_back(eeg);
        @(negedge clk); new_eeg = 0;
      end
      forever begin @(negedge clk); ext_wr_active = ($urandom % 3 == 0); end
    join_none
    while (busy) begin @(negedge clk); t0++; end
    disable fork;
    ext_wr_active = 0;
    new_eeg = 0;
    repeat (10) @(negedge clk);
    $display("cycles=%0d mac none=%0d linear=%0d swish=%0d sm=%0d ln=%0d vadd=%0d eeg=%0d defer=%0d",
             t0, n_mac[0], n_mac[1], n_mac[2], n_sm, n_ln, n_vadd, n_eegwr, n_defer);
    check("MAC none count",   n_mac[0] == NHEAD * (NTOK * NTOK + NTOK * DHEAD));
    check("MAC linear count", n_mac[1] == NPATCH * DMODEL + 3 * NTOK * DMODEL + 2 * NTOK * DMODEL + NCLASS);
    check("MAC swish count",  n_mac[2] == NTOK * DMLP + DMLP);
    check("MAC writes",       n_macwr == n_mac[0] + n_mac[1] + n_mac[2]);
    check("softmax count",    n_sm == NHEAD * NTOK + 1);
    check("LayerNorm count",  n_ln == 2 * NTOK + 1);
    check("vector adds",      n_vadd == DMODEL + 3 * NTOK * DMODEL);
    check("one output",       n_prob == 1);
    check("first MAC operands", first_a == A_EEG && first_b == W_PATCH && first_bias == B_PATCH);
    check("first MAC dest",   first_macwr == A_X + DMODEL);
    check("last MAC dest",    last_macwr == A_LOG + NCLASS - 1);
    check("last softmax",     sm_last == A_LOG);
    check("last LayerNorm",   ln_last_src == A_X);
    check("all EEG written",  n_eegwr == 200 && eeg_sent.size() == 0);
    check("EEG deferral seen", n_defer > 0);
    check("idle", !busy);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
