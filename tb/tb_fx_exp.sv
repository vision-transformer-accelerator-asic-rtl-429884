// tb_fx_exp: self-checking test of the exponential unit together with the shared adder and
// multiplier it drives. The reference is $exp in double precision; the approximation must be
// within 1% relative (plus 2^-18 absolute for tiny results). Saturation for large inputs, the
// overflow flag and the 9-cycle latency are checked too.
module tb_fx_exp;
  import sleepvit_pkg::*;
  logic clk = 0, rst_n = 0;
  unit_req_t req;
  unit_rsp_t rsp;
  arith_req_t add_req, mul_req;
  fx_t add_out, mul_out;
  logic add_ovfl, mul_ovfl;
  int checks = 0, failures = 0;
  always #5 clk = ~clk;

  fx_exp dut (.clk, .rst_n, .req, .rsp, .add_req, .add_out, .mul_req, .mul_out);
  fx_adder      u_add (.clk, .rst_n, .req(add_req), .out(add_out), .ovfl(add_ovfl));
  fx_multiplier u_mul (.clk, .rst_n, .req(mul_req), .out(mul_out), .ovfl(mul_ovfl));

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

  task automatic ex(real x);
    int cyc;
    real want, got;
    fx_t xf;
    xf = fx_t'(longint'(x * 2.0**21));
    want = $exp(real'(xf) / 2.0**21);
    @(negedge clk);
    req = '{start: 1'b1, in1: xf, in2: '0};
    cyc = 0;
    do begin
      @(posedge clk); #1; cyc++;
      req.start = 1'b0;
    end while (!rsp.done && cyc < 100);
    got = real'(rsp.out) / 2.0**21;
    check($sformatf("latency %0d (want 9)", cyc), cyc == 9);
    if (want > 2.0**17) begin
      check($sformatf("exp(%f) saturates, got %f", x, got), rsp.out == FX_MAX && rsp.ovfl);
    end else begin
      check($sformatf("exp(%f) = %f want %f", x, got, want),
            (got - want) <= 0.01 * want + 2.0**-18 && (want - got) <= 0.01 * want + 2.0**-18);
      check("no overflow", !rsp.ovfl);
    end
  endtask

  initial begin
    req = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    ex(0.0); ex(1.0); ex(-1.0); ex(0.5); ex(2.3); ex(-5.7); ex(10.0); ex(-14.0); ex(11.9);
    ex(20.0); ex(100.0);
    for (int i = 0; i < 300; i++) ex((real'($urandom % 20000) - 12000.0) / 1000.0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
