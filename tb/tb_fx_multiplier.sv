// tb_fx_multiplier: self-checking test of the shared multiplier.
// The reference takes the exact product, divides by 2^21 rounding toward minus infinity
// (by subtracting the remainder for negative products) and clamps to +/-(2^38-1).
module tb_fx_multiplier;
  import sleepvit_pkg::*;
  logic clk = 0, rst_n = 0;
  arith_req_t req;
  fx_t out;
  logic ovfl;
  int checks = 0, failures = 0;
  always #5 clk = ~clk;

  fx_multiplier dut (.clk, .rst_n, .req, .out, .ovfl);

  initial begin : watchdog
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic apply(fx_t a, fx_t b);
    logic signed [127:0] p, qt, rm, max;
    logic exp_ovf;
    fx_t exp_v;
    max = (128'sd1 <<< 38) - 1;
    p  = 128'(a) * 128'(b);
    qt = p / (128'sd1 <<< 21);                 // truncates toward zero
    rm = p - qt * (128'sd1 <<< 21);
    if (rm < 0) qt = qt - 1;                    // floor
    exp_ovf = (qt > max) || (qt < -max);
    exp_v = (qt > max) ? fx_t'(max) : (qt < -max) ? fx_t'(-max) : fx_t'(qt);
    @(negedge clk);
    req = '{refresh: 1'b1, in1: a, in2: b};
    @(negedge clk);
    req.refresh = 1'b0;
    checks++;
    if (out !== exp_v || ovfl !== exp_ovf) begin
      failures++;
      $display("FAIL mul %0d * %0d: got %0d ovf %0b, want %0d ovf %0b", a, b, out, ovfl, exp_v, exp_ovf);
    end
  endtask

  initial begin
    req = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    apply(fx_t'(3) <<< Q, fx_t'(1) <<< (Q - 1));          // 3 * 0.5
    apply(-(fx_t'(1)), fx_t'(1));                          // tiny negative -> -1 LSB
    apply(fx_t'(1), fx_t'(1));                             // tiny positive -> 0
    apply(FX_MAX, FX_MAX);
    apply(FX_MIN, FX_MAX);
    apply(-(fx_t'(5) <<< Q), -(fx_t'(7) <<< Q));
    for (int i = 0; i < 2000; i++)
      apply(fx_t'(longint'({$urandom, $urandom}) >>> (25 + i % 14)),
            fx_t'(longint'({$urandom, $urandom}) >>> (25 + (i / 14) % 14)));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
