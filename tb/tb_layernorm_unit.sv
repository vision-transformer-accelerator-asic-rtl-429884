// tb_layernorm_unit: self-checking test of the LayerNorm module with real memories, the
// shared adder, multiplier and divider (the square root is inside the module).
// A random Q4.4 row and random Q2.6 gamma/beta are written; the result (Q3.5) must be within
// 2 LSB of gamma*(x-mean)/sqrt(var+2^-9)+beta computed in double precision. Also checks an
// in-place run (src = dst) and that neighbouring words stay untouched.
module tb_layernorm_unit;
  import sleepvit_pkg::*;
  logic clk = 0, rst_n = 0;
  int checks = 0, failures = 0;
  always #5 clk = ~clk;

  mem_rd_t ird [2], wrd [2];
  fx_t     irdata [2], wrdata [2];
  mem_wr_t iwr, wwr, tb_iwr, ln_wr;
  mem_rd_t tb_rd, ln_rd, ln_wrd;
  logic    isat, wsat;
  mem_ctrl #(.BANKS(4), .DEPTH(256)) u_ires (.clk, .rst_n, .rd(ird), .rdata(irdata), .wr(iwr), .wr_sat(isat));
  mem_ctrl #(.BANKS(2), .DEPTH(256)) u_wgt  (.clk, .rst_n, .rd(wrd), .rdata(wrdata), .wr(wwr), .wr_sat(wsat));
  assign ird[0] = tb_rd | ln_rd;
  assign ird[1] = '0;
  assign wrd[0] = ln_wrd;
  assign wrd[1] = '0;
  assign iwr = tb_iwr | ln_wr;

  arith_req_t add_req, mul_req;
  fx_t add_out, mul_out;
  logic add_ovfl, mul_ovfl;
  unit_req_t div_req;
  unit_rsp_t div_rsp;
  fx_adder      u_add (.clk, .rst_n, .req(add_req), .out(add_out), .ovfl(add_ovfl));
  fx_multiplier u_mul (.clk, .rst_n, .req(mul_req), .out(mul_out), .ovfl(mul_ovfl));
  fx_divider    u_div (.clk, .rst_n, .req(div_req), .rsp(div_rsp));

  logic start, busy, done, negrad;
  addr_t src, dst;
  logic [7:0] len;
  layernorm_unit dut (.clk, .rst_n, .start, .src, .dst, .len, .frac_in(4'd4), .frac_out(4'd5),
    .gamma_addr(addr_t'(0)), .beta_addr(addr_t'(64)), .w_frac(4'd6), .busy, .done,
    .neg_radicand(negrad), .ires_rd(ln_rd), .ires_rdata(irdata[0]), .ires_wr(ln_wr),
    .wgt_rd(ln_wrd), .wgt_rdata(wrdata[0]), .add_req, .add_out, .mul_req, .mul_out,
    .div_req, .div_rsp);

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

  task automatic put(int a, int v, bit w);
    @(negedge clk);
    if (w) wwr = '{en: 1'b1, dw: 1'b0, frac: 4'd0, addr: addr_t'(a), data: fx_t'(v) <<< Q};
    else tb_iwr = '{en: 1'b1, dw: 1'b0, frac: 4'd0, addr: addr_t'(a), data: fx_t'(v) <<< Q};
    @(negedge clk); tb_iwr = '0; wwr = '0;
  endtask
  task automatic get(int a, output int v);
    @(negedge clk);
    tb_rd = '{en: 1'b1, dw: 1'b0, frac: 4'd0, addr: addr_t'(a)};
    @(negedge clk); tb_rd = '0;
    v = int'(irdata[0] >>> Q);
  endtask

  int g [64], bt [64];

  task automatic run(int s, int d, int n);
    int x [64];
    real m, v, want;
    int got, guard, lat;
    m = 0; v = 0;
    put(d + n, 77, 0);
    for (int i = 0; i < n; i++) begin
      x[i] = int'($urandom % 201) - 100;
      put(s + i, x[i], 0);
      m += real'(x[i]) / 16.0;
    end
    m /= n;
    for (int i = 0; i < n; i++) v += (real'(x[i]) / 16.0 - m) ** 2;
    v /= n;
    @(negedge clk);
    start = 1; src = addr_t'(s); dst = addr_t'(d); len = 8'(n);
    @(negedge clk); start = 0;
    lat = 1;
    while (!done) begin @(negedge clk); lat++; end
    if (n == 64) $display("latency for 64 elements: %0d cycles", lat);
    if (n == 64) begin  // published latency for 64 elements is 1943 cycles: must not be slower
      checks++;
      if (lat > 1943) begin failures++; $display("FAIL latency %0d > 1943", lat); end
    end
    for (int i = 0; i < n; i++) begin
      get(d + i, got);
      want = (real'(g[i]) / 64.0 * (real'(x[i]) / 16.0 - m) / $sqrt(v + 2.0**-9)
              + real'(bt[i]) / 64.0) * 32.0;
      if (want > 127.0) want = 127.0;
      if (want < -127.0) want = -127.0;
      check($sformatf("ln[%0d] = %0d/32 want %f/32", i, got, want),
            real'(got) - want <= 2.0 && want - real'(got) <= 2.0);
    end
    get(d + n, guard); check("word after the row untouched", guard == 77);
    check("no negative radicand", !negrad);
  endtask

  initial begin
    start = 0; src = '0; dst = '0; len = '0; tb_iwr = '0; tb_rd = '0; wwr = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int i = 0; i < 64; i++) begin
      g[i] = int'($urandom % 161) - 40; put(i, g[i], 1);
      bt[i] = int'($urandom % 121) - 60; put(64 + i, bt[i], 1);
    end
    run(0, 100, 64);
    run(300, 300, 64);          // in place
    run(500, 700, 16);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
