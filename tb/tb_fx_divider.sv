// tb_fx_divider: self-checking test of the divider.
// Reference: exact integer quotient of |a|*2^21 / |b| with round-half-to-even from the
// remainder, clamped to 2^38-1, signed. Checks the result, overflow and divide-by-zero flags,
// busy while running and the latency of N+Q+3 = 63 cycles from the start edge to done.
module tb_fx_divider;
  import sleepvit_pkg::*;
  logic clk = 0, rst_n = 0;
  unit_req_t req;
  unit_rsp_t rsp;
  int checks = 0, failures = 0;
  always #5 clk = ~clk;

  fx_divider dut (.clk, .rst_n, .req, .rsp);

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

  task automatic divide(fx_t a, fx_t b);
    logic [127:0] n, d, qt, rm;
    logic signed [127:0] s;
    fx_t  exp_v;
    logic exp_ovf, exp_dbz;
    int   cyc;
    n = 128'(a < 0 ? -longint'(a) : longint'(a)) << 21;
    d = 128'(b < 0 ? -longint'(b) : longint'(b));
    exp_dbz = (b == 0);
    if (exp_dbz) begin
      exp_ovf = 1'b1;
      exp_v   = (a < 0) ? FX_MIN : FX_MAX;
    end else begin
      qt = n / d; rm = n % d;
      if (2 * rm > d || (2 * rm == d && qt[0])) qt++;
      exp_ovf = qt > 128'(FX_MAX);
      s = exp_ovf ? 128'(FX_MAX) : 128'(qt);
      if ((a < 0) != (b < 0)) s = -s;
      exp_v = fx_t'(s);
    end
    @(negedge clk);
    req = '{start: 1'b1, in1: a, in2: b};
    cyc = 0;
    do begin
      @(posedge clk); #1; cyc++;
      if (cyc == 2) check("busy while dividing", rsp.busy);
      req.start = 1'b0;
    end while (!rsp.done && cyc < 200);
    check($sformatf("latency %0d (want 63)", cyc), cyc == 63);
    check($sformatf("%0d / %0d = %0d want %0d", a, b, rsp.out, exp_v), rsp.out == exp_v);
    check("overflow flag", rsp.ovfl == exp_ovf);
    check("divide-by-zero flag", rsp.flag == exp_dbz);
  endtask

  initial begin
    req = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    divide(fx_t'(1) <<< Q, fx_t'(3) <<< Q);
    divide(-(fx_t'(7) <<< Q), fx_t'(2) <<< Q);
    divide(fx_t'(5), fx_t'(2) <<< Q);          // 2.5 LSB: tie -> even (2)
    divide(fx_t'(7), fx_t'(2) <<< Q);          // 3.5 LSB: tie -> even (4)
    divide(fx_t'(1) <<< Q, fx_t'(0));          // divide by zero
    divide(-(fx_t'(1) <<< Q), fx_t'(0));
    divide(FX_MAX, fx_t'(1));                  // overflow
    for (int i = 0; i < 300; i++)
      divide(fx_t'(longint'({$urandom, $urandom}) >>> (25 + i % 10)),
             fx_t'(longint'({$urandom, $urandom}) >>> (26 + (i / 10) % 12)));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
