// tb_fx_adder: self-checking test of the shared adder.
// Random and corner operands; the reference sum is computed in 64-bit integers and clamped
// to +/-(2^38-1). Also checks the refresh gating (output holds while refresh is low), the
// overflow flag and the one-cycle latency.
module tb_fx_adder;
  import sleepvit_pkg::*;
  logic clk = 0, rst_n = 0;
  arith_req_t req;
  fx_t out;
  logic ovfl;
  int checks = 0, failures = 0;
  always #5 clk = ~clk;

  fx_adder dut (.clk, .rst_n, .req, .out, .ovfl);

  initial begin : watchdog
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic longint rnd_fx(int mode);
    longint v;
    v = longint'({$urandom, $urandom}) >>> (25 + mode);   // various magnitudes
    return v;
  endfunction

  task automatic apply(fx_t a, fx_t b);
    longint s, max;
    logic  exp_ovf;
    fx_t   exp_v;
    max = (longint'(1) << 38) - 1;
    s = longint'(a) + longint'(b);
    exp_ovf = (s > max) || (s < -max);
    exp_v = (s > max) ? fx_t'(max) : (s < -max) ? fx_t'(-max) : fx_t'(s);
    @(negedge clk);
    req = '{refresh: 1'b1, in1: a, in2: b};
    @(negedge clk);
    req.refresh = 1'b0;
    checks++;
    if (out !== exp_v || ovfl !== exp_ovf) begin
      failures++;
      $display("FAIL add %0d + %0d: got %0d ovf %0b, want %0d ovf %0b", a, b, out, ovfl, exp_v, exp_ovf);
    end
    // hold: change inputs without refresh, output must not move
    req.in1 = ~a;
    @(negedge clk);
    checks++;
    if (out !== exp_v) begin failures++; $display("FAIL refresh gating"); end
  endtask

  initial begin
    req = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    apply(fx_t'(1) <<< Q, fx_t'(2) <<< Q);
    apply(-(fx_t'(3) <<< Q), fx_t'(1));
    apply(FX_MAX, fx_t'(1));
    apply(FX_MIN, -fx_t'(1));
    apply(FX_MAX, FX_MAX);
    apply(FX_MIN, FX_MIN);
    apply(FX_MIN, FX_MAX);
    for (int i = 0; i < 2000; i++) apply(fx_t'(rnd_fx(i % 8)), fx_t'(rnd_fx((i / 8) % 8)));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
