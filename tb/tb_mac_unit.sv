// tb_mac_unit: self-checking test of the MAC module with real memories and the shared
// arithmetic units around it.
// Vectors of random 8-bit values are written to the memories as raw bytes, then dot
// products are run with every activation, both sources of the second vector, strides and a
// double-width first vector. The reference dot product and bias are computed exactly in
// integers from the stored bytes; swish is compared with x/(1+e^-x) in double precision
// (tolerance 2% + 2^-12). Latency for len 64 is checked: 68 (none) and 70 (linear) cycles; the swish latency is printed.
module tb_mac_unit;
  import sleepvit_pkg::*;
  logic clk = 0, rst_n = 0;
  int checks = 0, failures = 0;
  always #5 clk = ~clk;

  // memories
  mem_rd_t ird [2], wrd [2];
  fx_t     irdata [2], wrdata [2];
  mem_wr_t iwr, wwr, tb_iwr;
  logic    isat, wsat;
  mem_ctrl #(.BANKS(4), .DEPTH(1024)) u_ires (.clk, .rst_n, .rd(ird), .rdata(irdata), .wr(iwr), .wr_sat(isat));
  mem_ctrl #(.BANKS(2), .DEPTH(1024)) u_wgt  (.clk, .rst_n, .rd(wrd), .rdata(wrdata), .wr(wwr), .wr_sat(wsat));
  // shared arithmetic
  arith_req_t add_req, mul_req, mac_add, mac_mul, exp_add, exp_mul;
  fx_t add_out, mul_out;
  logic add_ovfl, mul_ovfl;
  unit_req_t exp_req, div_req;
  unit_rsp_t exp_rsp, div_rsp;
  fx_adder      u_add (.clk, .rst_n, .req(add_req), .out(add_out), .ovfl(add_ovfl));
  fx_multiplier u_mul (.clk, .rst_n, .req(mul_req), .out(mul_out), .ovfl(mul_ovfl));
  fx_exp        u_exp (.clk, .rst_n, .req(exp_req), .rsp(exp_rsp), .add_req(exp_add), .add_out,
                       .mul_req(exp_mul), .mul_out);
  fx_divider    u_div (.clk, .rst_n, .req(div_req), .rsp(div_rsp));
  assign add_req = mac_add | exp_add;
  assign mul_req = mac_mul | exp_mul;
  assign iwr = tb_iwr;
  assign wrd[1] = '0;

  // DUT
  logic start, a_dw, b_src, busy, done;
  act_e act;
  logic [7:0] len;
  addr_t a_base, a_stride, b_base, b_stride, bias_addr;
  frac_t a_frac, b_frac, bias_frac;
  fx_t result;
  mac_unit dut (.clk, .rst_n, .start, .act, .len, .a_base, .a_stride, .a_dw, .a_frac, .b_src,
    .b_base, .b_stride, .b_frac, .bias_addr, .bias_frac, .busy, .done, .result,
    .ires_rd0(ird[0]), .ires_rdata0(irdata[0]), .ires_rd1(ird[1]), .ires_rdata1(irdata[1]),
    .wgt_rd(wrd[0]), .wgt_rdata(wrdata[0]), .add_req(mac_add), .add_out, .mul_req(mac_mul),
    .mul_out, .exp_req, .exp_rsp, .div_req, .div_rsp);

  initial begin : watchdog
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(string what, logic ok);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  // tb images of the memories (raw stored bytes)
  byte ires_img [4096];
  byte wgt_img [2048];

  // the write path saturates symmetrically, so -128 is stored as -127
  task automatic put_i(int a, byte v);
    if (v == -128) v = -127;
    @(negedge clk);
    tb_iwr = '{en: 1'b1, dw: 1'b0, frac: 4'd0, addr: addr_t'(a), data: fx_t'(v) <<< Q};
    ires_img[a] = v;
    @(negedge clk); tb_iwr = '0;
  endtask
  task automatic put_w(int a, byte v);
    if (v == -128) v = -127;
    @(negedge clk);
    wwr = '{en: 1'b1, dw: 1'b0, frac: 4'd0, addr: addr_t'(a), data: fx_t'(v) <<< Q};
    wgt_img[a] = v;
    @(negedge clk); wwr = '0;
  endtask

  // run one dot product and compare
  task automatic run(act_e ac, int n, int ab, int as, bit adw, int fa, bit bs, int bb, int bst,
                     int fb, int bias, int fbias, int want_lat);
    logic signed [95:0] acc;
    real x, want, got;
    int cyc;
    acc = 0;
    for (int k = 0; k < n; k++) begin
      longint av, bv;
      int ai;
      ai = ab + k * as;
      av = adw ? longint'({ires_img[ai + 2048], ires_img[ai]}) : longint'(ires_img[ai]);
      if (adw) av = longint'(shortint'(av));
      bv = bs ? longint'(ires_img[bb + k * bst]) : longint'(wgt_img[bb + k * bst]);
      acc += 96'(av * bv) <<< (21 - fa - fb);            // exact product in Q21
    end
    if (ac != ACT_NONE) acc += 96'(longint'(wgt_img[bias])) <<< (21 - fbias);
    @(negedge clk);
    start = 1; act = ac; len = 8'(n); a_base = addr_t'(ab); a_stride = addr_t'(as); a_dw = adw;
    a_frac = frac_t'(fa); b_src = bs; b_base = addr_t'(bb); b_stride = addr_t'(bst);
    b_frac = frac_t'(fb); bias_addr = addr_t'(bias); bias_frac = frac_t'(fbias);
    cyc = 0;
    do begin @(posedge clk); #1; cyc++; start = 0; end while (!done && cyc < 1000);
    if (ac == ACT_SWISH && n == 64) $display("swish latency for 64 elements: %0d cycles", cyc);
    if (want_lat > 0) check($sformatf("latency %0d want %0d", cyc, want_lat), cyc == want_lat);
    if (ac != ACT_SWISH) begin
      check($sformatf("dot act %0d n %0d ab %0d as %0d bb %0d bst %0d: got %0d want %0d", ac, n, ab, as, bb, bst, result, acc), 96'(result) == acc);
    end else begin
      x = real'(acc) / 2.0**21;
      want = x / (1.0 + $exp(-x));
      got = real'(result) / 2.0**21;
      check($sformatf("swish(%f) = %f want %f", x, got, want),
            (got - want) <= 0.02 * (want < 0 ? -want : want) + 2.0**-12 &&
            (want - got) <= 0.02 * (want < 0 ? -want : want) + 2.0**-12);
    end
  endtask

  initial begin
    start = 0; tb_iwr = '0; wwr = '0; act = ACT_NONE; len = 0;
    {a_base, a_stride, a_dw, a_frac, b_src, b_base, b_stride, b_frac, bias_addr, bias_frac} = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int i = 0; i < 256; i++) put_i(i, byte'($urandom));
    for (int i = 0; i < 256; i++) put_i(2048 + i, byte'($urandom));   // high bytes (double width)
    for (int i = 0; i < 256; i++) put_i(1024 + i, byte'($urandom));   // second bank
    for (int i = 0; i < 300; i++) put_w(i, byte'($urandom));
    run(ACT_NONE,   64, 0, 1, 0, 4, 0, 0, 1, 6, 0, 6, 68);
    run(ACT_LINEAR, 64, 0, 1, 0, 4, 0, 64, 1, 6, 200, 6, 70);
    run(ACT_SWISH,  64, 0, 1, 0, 4, 0, 64, 1, 6, 201, 6, 0);
    run(ACT_NONE,   8, 5, 1, 0, 4, 1, 1024, 16, 4, 0, 6, 0);     // second vector from int. results
    run(ACT_LINEAR, 32, 0, 2, 1, 8, 0, 100, 3, 6, 250, 6, 0);    // double-width first vector
    for (int t = 0; t < 20; t++)
      run(ACT_SWISH, 1 + $urandom % 40, $urandom % 100, 1, 0, 4 + $urandom % 3, 0,
          $urandom % 200, 1, 6, 256 + $urandom % 40, 5, 0);
    for (int t = 0; t < 20; t++)
      run(act_e'($urandom % 2), 1 + $urandom % 64, $urandom % 128, 1 + $urandom % 2, 0, 4, 1,
          1024 + $urandom % 64, 1 + $urandom % 3, 5, 260, 6, 0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
