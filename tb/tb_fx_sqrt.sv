// tb_fx_sqrt: self-checking test of the square-root unit.
// Reference: the integer square root of x*2^21 found by bisection (floor), which is the Q21
// root truncated. Checks the value, the negative-radicand flag and the latency of
// floor((N+Q)/2)+1 = 31 cycles from the start edge to done.
module tb_fx_sqrt;
  import sleepvit_pkg::*;
  logic clk = 0, rst_n = 0;
  unit_req_t req;
  unit_rsp_t rsp;
  int checks = 0, failures = 0;
  always #5 clk = ~clk;

  fx_sqrt dut (.clk, .rst_n, .req, .rsp);

  initial begin : watchdog
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(string what, logic ok);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  function automatic longint isqrt(logic [127:0] v);
    logic [127:0] lo, hi, mid;
    lo = 0; hi = 128'd1 << 31;
    while (lo < hi) begin
      mid = (lo + hi + 1) >> 1;
      if (mid * mid <= v) lo = mid; else hi = mid - 1;
    end
    return longint'(lo);
  endfunction

  task automatic root(fx_t x);
    int cyc;
    fx_t exp_v;
    exp_v = (x < 0) ? fx_t'(0) : fx_t'(isqrt(128'(longint'(x)) << 21));
    @(negedge clk);
    req = '{start: 1'b1, in1: x, in2: '0};
    cyc = 0;
    do begin
      @(posedge clk); #1; cyc++;
      req.start = 1'b0;
    end while (!rsp.done && cyc < 100);
    check($sformatf("latency %0d (want 31)", cyc), cyc == 31);
    check($sformatf("sqrt(%0d) = %0d want %0d", x, rsp.out, exp_v), rsp.out == exp_v);
    check("negative radicand flag", rsp.flag == (x < 0));
  endtask

  initial begin
    req = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    root(fx_t'(4) <<< Q);
    root(fx_t'(2) <<< Q);
    root(fx_t'(0));
    root(FX_MAX);
    root(-(fx_t'(1) <<< Q));
    for (int i = 0; i < 300; i++) root(fx_t'(longint'({1'b0, $urandom, $urandom}) >>> (26 + i % 12)));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
