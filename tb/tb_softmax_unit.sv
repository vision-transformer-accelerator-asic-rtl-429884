// tb_softmax_unit: self-checking test of the softmax module with a real memory and the
// shared adder, multiplier, exponential unit and divider.
// Random Q4.4 vectors of several lengths are written, the softmax runs in place with a Q1.7
// result, and each stored result must be within 2 LSB (2/128) of the double-precision
// softmax of the stored inputs. Memory outside the vector must be left untouched.
module tb_softmax_unit;
  import sleepvit_pkg::*;
  logic clk = 0, rst_n = 0;
  int checks = 0, failures = 0;
  always #5 clk = ~clk;

  mem_rd_t ird [2];
  fx_t     irdata [2];
  mem_wr_t iwr, tb_iwr, sm_wr;
  mem_rd_t tb_rd, sm_rd;
  logic    isat;
  mem_ctrl #(.BANKS(4), .DEPTH(256)) u_ires (.clk, .rst_n, .rd(ird), .rdata(irdata), .wr(iwr), .wr_sat(isat));
  assign ird[0] = tb_rd | sm_rd;
  assign ird[1] = '0;
  assign iwr = tb_iwr | sm_wr;

  arith_req_t add_req, mul_req, sm_add, sm_mul, exp_add, exp_mul;
  fx_t add_out, mul_out;
  logic add_ovfl, mul_ovfl;
  unit_req_t exp_req, div_req;
  unit_rsp_t exp_rsp, div_rsp;
  fx_adder      u_add (.clk, .rst_n, .req(add_req), .out(add_out), .ovfl(add_ovfl));
  fx_multiplier u_mul (.clk, .rst_n, .req(mul_req), .out(mul_out), .ovfl(mul_ovfl));
  fx_exp        u_exp (.clk, .rst_n, .req(exp_req), .rsp(exp_rsp), .add_req(exp_add), .add_out,
                       .mul_req(exp_mul), .mul_out);
  fx_divider    u_div (.clk, .rst_n, .req(div_req), .rsp(div_rsp));
  assign add_req = sm_add | exp_add;
  assign mul_req = sm_mul | exp_mul;

  logic start, busy, done;
  addr_t base;
  logic [7:0] len;
  softmax_unit dut (.clk, .rst_n, .start, .base, .len, .frac_in(4'd4), .frac_out(4'd7), .busy,
    .done, .ires_rd(sm_rd), .ires_rdata(irdata[0]), .ires_wr(sm_wr), .add_req(sm_add), .add_out,
    .mul_req(sm_mul), .mul_out, .exp_req, .exp_rsp, .div_req, .div_rsp);

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

  task automatic put(int a, int v);
    @(negedge clk);
    tb_iwr = '{en: 1'b1, dw: 1'b0, frac: 4'd0, addr: addr_t'(a), data: fx_t'(v) <<< Q};
    @(negedge clk); tb_iwr = '0;
  endtask
  task automatic get(int a, output int v);
    @(negedge clk);
    tb_rd = '{en: 1'b1, dw: 1'b0, frac: 4'd0, addr: addr_t'(a)};
    @(negedge clk); tb_rd = '0;
    v = int'(irdata[0] >>> Q);
  endtask

  task automatic run(int b, int n);
    int x [64];
    real e [64], s, want;
    int got, guard, lat;
    s = 0;
    put(b - 1, 55); put(b + n, 66);
    for (int i = 0; i < n; i++) begin
      x[i] = int'($urandom % 81) - 40;                    // -2.5 .. 2.5 in Q4.4
      put(b + i, x[i]);
      e[i] = $exp(real'(x[i]) / 16.0);
      s += e[i];
    end
    @(negedge clk);
    start = 1; base = addr_t'(b); len = 8'(n);
    @(negedge clk); start = 0;
    lat = 1;
    while (!done) begin @(negedge clk); lat++; end
    if (n == 64) $display("latency for 64 elements: %0d cycles", lat);
    if (n == 64) begin  // published latency for 64 elements is 1926 cycles: must not be slower
      checks++;
      if (lat > 1926) begin failures++; $display("FAIL latency %0d > 1926", lat); end
    end
    for (int i = 0; i < n; i++) begin
      get(b + i, got);
      want = e[i] / s * 128.0;
      check($sformatf("softmax[%0d] of %0d = %0d/128 want %f/128", i, n, got, want),
            real'(got) - want <= 2.0 && want - real'(got) <= 2.0);
    end
    get(b - 1, guard); check("guard below untouched", guard == 55);
    get(b + n, guard); check("guard above untouched", guard == 66);
  endtask

  initial begin
    start = 0; base = '0; len = '0; tb_iwr = '0; tb_rd = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    run(10, 4);
    run(100, 61);
    run(300, 64);
    run(500, 1);
    run(600, 17);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
