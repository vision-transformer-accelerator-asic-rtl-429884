// tb_sleepvit_top: end-to-end, self-checking test of the accelerator at its default size.
// The weight SRAM is filled with random small weights (LayerNorm gammas near 1.0) through the
// weight port, then three 30-s epochs of random EEG (3840 samples each) are classified. The
// first epoch is loaded before new_eph; the next epochs' samples are streamed in while the
// previous inference runs (after its patch projection), so EEG writes collide with compute
// writes and must be deferred.
// Checks per inference:
//   - the patch-projection result X[1][0] written to memory equals a bit-exact reference
//     (sum of 64 EEG*weight products plus bias, floored to Q4.4 and saturated);
//   - the 4 class probabilities sum to 1 within 0.06 and are each in [0, 1];
//   - the averaged vector equals the mean of the last three probability vectors (zeros
//     before the first) and sleep_stage is its argmax;
//   - the sticky err flags: saturation reported exactly when a saturating write happened,
//     no divide by zero or negative radicand;
//   - the latency new_eph -> inf_done is below 4.56 M cycles (45.6 ms at 100 MHz).
// At the end, every mechanism (MAC without activation / linear / swish, softmax, LayerNorm,
// exponential, divider, square root, double-width reads, saturating writes, EEG deferral,
// element-wise additions, time averaging over 3 epochs) must have occurred at least once.
// The share of inference cycles in which each compute module is busy is printed.
module tb_sleepvit_top;
  import sleepvit_pkg::*;
  logic clk = 0, rst_n = 0;
  logic new_eph, new_eeg, strt_ld;
  logic [15:0] eeg;
  logic inf_done, busy;
  logic [1:0] sleep_stage;
  logic [2:0] err;
  logic w_we;
  addr_t w_addr;
  logic [7:0] w_data;
  int checks = 0, failures = 0;
  always #5 clk = ~clk;

  sleepvit_top dut (.*);

  localparam int NEPOCH = 3;

  initial begin : watchdog
    repeat (NEPOCH * 4600000 + 200000) @(posedge clk);
    failures++;
    $display("WATCHDOG");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(string what, logic ok);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  byte         wmem [W_TOTAL];
  logic [15:0] smp [NEPOCH][NSAMPLE];

  // ---------------- mechanism counters ----------------
  int n_mac [3];
  longint a_inf, a_add, a_mul, a_div, a_exp, a_sqrt, a_mac, a_sm, a_ln;
  int n_sat_ep;
  int n_sm, n_ln, n_exp, n_div, n_sqrt, n_dwrd, n_sat, n_defer, n_vadd, n_done;
  always @(posedge clk) if (rst_n) begin
    if (dut.mac_start) n_mac[int'(dut.mac_act)]++;
    if (dut.sm_start) n_sm++;
    if (dut.ln_start) n_ln++;
    if (dut.exp_req.start) n_exp++;
    if (dut.div_req.start) n_div++;
    if (dut.u_ln.sqrt_req.start) n_sqrt++;
    if (dut.ires_rd[0].en && dut.ires_rd[0].dw) n_dwrd++;
    if (dut.ires_sat) begin n_sat++; n_sat_ep++; end
    if (new_eph && !busy) n_sat_ep = 0;
    if (dut.eeg_defer) n_defer++;
    if (dut.fsm_add.refresh) n_vadd++;
    // activity over the inferences (compare with the paper's active ratios)
    if (dut.u_fsm.busy) begin
      a_inf++;
      if (dut.add_req.refresh) a_add++;
      if (dut.mul_req.refresh) a_mul++;
      if (dut.div_rsp.busy) a_div++;
      if (dut.exp_rsp.busy) a_exp++;
      if (dut.u_ln.sqrt_rsp.busy) a_sqrt++;
      if (dut.mac_busy) a_mac++;
      if (dut.sm_busy) a_sm++;
      if (dut.ln_busy) a_ln++;
    end
  end

  // ---------------- snoop X[1][0] ----------------
  int   cur_epoch;
  logic got_x;
  int   x_seen;
  always @(posedge clk) if (rst_n && dut.u_fsm.busy && !got_x && dut.ires_wr.en &&
                            !dut.ires_wr.dw && dut.ires_wr.addr == addr_t'(A_X + DMODEL)) begin
    got_x  = 1;
    x_seen = int'(dut.ires_wr.data >>> (Q - int'(F_ACT)));
  end

  function automatic int ref_x10(int e);
    longint acc;
    acc = longint'(wmem[B_PATCH]) <<< 8;     // bias Q2.6 -> units of 2^-14
    for (int j = 0; j < PATCH; j++)
      acc += longint'(signed'(smp[e][j] ^ 16'h8000)) * longint'(wmem[W_PATCH + j]);
    acc = acc >>> 10;                        // 2^-14 -> Q4.4, floor
    if (acc > 127) acc = 127;
    if (acc < -127) acc = -127;
    return int'(acc);
  endfunction

  // ---------------- probabilities and averaging ----------------
  real ph [3][NCLASS];
  always @(posedge clk) if (rst_n && dut.prob_valid) begin
    real s;
    s = 0;
    for (int c = 0; c < NCLASS; c++) begin
      real p;
      p = real'(dut.prob[c]) / 2.0**21;
      s += p;
      check($sformatf("probability %0d in range (%f)", c, p), p >= 0.0 && p <= 1.0);
      ph[2][c] = ph[1][c]; ph[1][c] = ph[0][c]; ph[0][c] = p;
    end
    $display("epoch %0d probabilities %f %f %f %f (sum %f)", cur_epoch, ph[0][0], ph[0][1],
             ph[0][2], ph[0][3], s);
    check("probabilities sum to 1", s > 0.94 && s < 1.06);
  end

  always @(posedge clk) if (rst_n && inf_done) begin
    real a [NCLASS];
    real best;
    int bi;
    bit tie;
    n_done++;
    for (int c = 0; c < NCLASS; c++) begin
      real d;
      a[c] = (ph[0][c] + ph[1][c] + ph[2][c]) / 3.0;
      d = real'(dut.avg[c]) / 2.0**21 - a[c];
      check($sformatf("average %0d", c), d < 1.0 / 262144.0 && d > -1.0 / 262144.0);
    end
    best = a[0]; bi = 0; tie = 0;
    for (int c = 1; c < NCLASS; c++) if (a[c] > best) begin best = a[c]; bi = c; end
    for (int c = 0; c < NCLASS; c++) if (c != bi && best - a[c] < 1e-5) tie = 1;
    if (!tie) check($sformatf("stage %0d want %0d", sleep_stage, bi), sleep_stage == 2'(bi));
    $display("inference %0d sleep_stage %0d err %b", n_done, sleep_stage, err);
    check("err[1] reports saturating writes", err[1] == (n_sat_ep > 0));
    check("no divide by zero or negative radicand", err[2] == 1'b0);
  end

  // ---------------- stimulus ----------------
  task automatic send_eeg(int e, int gap);
    @(negedge clk); strt_ld = 1; @(negedge clk); strt_ld = 0;
    for (int i = 0; i < NSAMPLE; i++) begin
      new_eeg = 1; eeg = smp[e][i];
      @(negedge clk); new_eeg = 0;
      repeat (gap) @(negedge clk);
    end
  endtask

  initial begin
    int lat;
    new_eph = 0; new_eeg = 0; strt_ld = 0; eeg = 0; w_we = 0; w_addr = '0; w_data = '0;
    got_x = 0; x_seen = 0; cur_epoch = 0;
    n_sat_ep = 0;
    n_sm = 0; n_ln = 0; n_exp = 0; n_div = 0; n_sqrt = 0; n_dwrd = 0; n_sat = 0;
    n_defer = 0; n_vadd = 0; n_done = 0;
    for (int k = 0; k < 3; k++) n_mac[k] = 0;
    {a_inf, a_add, a_mul, a_div, a_exp, a_sqrt, a_mac, a_sm, a_ln} = '0;
    for (int d = 0; d < 3; d++) for (int c = 0; c < NCLASS; c++) ph[d][c] = 0.0;
    // random model: weights in [-12, 12] / 64, LayerNorm gamma 64 +- 8 (about 1.0)
    for (int i = 0; i < W_TOTAL; i++) begin
      wmem[i] = byte'(int'($urandom % 25) - 12);
      if ((i >= G_LN1 && i < G_LN1 + DMODEL) || (i >= G_LN2 && i < G_LN2 + DMODEL) ||
          (i >= G_LN3 && i < G_LN3 + DMODEL))
        wmem[i] = byte'(56 + int'($urandom % 17));
    end
    // random EEG around mid-scale (+-4.0 in Q8.8), a different offset per epoch
    for (int e = 0; e < NEPOCH; e++)
      for (int i = 0; i < NSAMPLE; i++)
        smp[e][i] = 16'(32768 + (e - 1) * 200 + int'($urandom % 2049) - 1024);
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int i = 0; i < W_TOTAL; i++) begin
      w_we = 1; w_addr = addr_t'(i); w_data = wmem[i];
      @(negedge clk);
    end
    w_we = 0;
    send_eeg(0, 0);
    for (int e = 0; e < NEPOCH; e++) begin
      cur_epoch = e; got_x = 0;
      @(negedge clk); new_eph = 1; @(negedge clk); new_eph = 0;
      lat = 1;
      fork
        begin
          // stream the next epoch once the patch projection has consumed this one
          if (e + 1 < NEPOCH) begin
            wait (dut.u_fsm.pc >= 5'd3);
            send_eeg(e + 1, 3);
          end
        end
        while (!inf_done) begin @(negedge clk); lat++; end
      join
      $display("epoch %0d latency %0d cycles", e, lat);
      check("latency within 4.56 M cycles", lat < 4560000);
      check($sformatf("X[1][0] = %0d want %0d", x_seen, ref_x10(e)), got_x && x_seen == ref_x10(e));
    end
    repeat (5) @(negedge clk);
    $display("mechanisms: mac none=%0d linear=%0d swish=%0d softmax=%0d layernorm=%0d exp=%0d div=%0d sqrt=%0d",
             n_mac[0], n_mac[1], n_mac[2], n_sm, n_ln, n_exp, n_div, n_sqrt);
    $display("mechanisms: dw_read=%0d sat_write=%0d eeg_defer=%0d vadd=%0d inferences=%0d",
             n_dwrd, n_sat, n_defer, n_vadd, n_done);
    $display("active ratio over inference: adder %.1f%% multiplier %.1f%% divider %.2f%% exponential %.1f%% square root %.3f%% MAC %.1f%% softmax %.1f%% LayerNorm %.2f%%",
             100.0 * a_add / a_inf, 100.0 * a_mul / a_inf, 100.0 * a_div / a_inf, 100.0 * a_exp / a_inf,
             100.0 * a_sqrt / a_inf, 100.0 * a_mac / a_inf, 100.0 * a_sm / a_inf, 100.0 * a_ln / a_inf);
    check("MAC without activation used", n_mac[0] > 0);
    check("MAC linear used", n_mac[1] > 0);
    check("MAC swish used", n_mac[2] > 0);
    check("softmax used", n_sm > 0);
    check("LayerNorm used", n_ln > 0);
    check("exponential used", n_exp > 0);
    check("divider used", n_div > 0);
    check("square root used", n_sqrt > 0);
    check("double-width read used", n_dwrd > 0);
    check("saturating write happened", n_sat > 0);
    check("EEG write deferred", n_defer > 0);
    check("element-wise add used", n_vadd > 0);
    check("three inferences averaged", n_done == NEPOCH);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
