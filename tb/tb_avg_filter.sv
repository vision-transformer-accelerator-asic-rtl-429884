// tb_avg_filter: self-checking test of the time-average filter.
// Feeds a sequence of probability vectors; the reference keeps the last three vectors
// (zeros before the first), averages them in double precision and takes the argmax. The
// averaged values must be within 2^-18 of the reference and the stage must match (vectors
// are chosen without near-ties). Also checks the one-cycle output latency.
module tb_avg_filter;
  import sleepvit_pkg::*;
  logic clk = 0, rst_n = 0;
  logic in_valid, out_valid;
  fx_t prob [NCLASS];
  fx_t avg [NCLASS];
  logic [1:0] stage;
  int checks = 0, failures = 0;
  real h [3][NCLASS];
  always #5 clk = ~clk;

  avg_filter dut (.clk, .rst_n, .in_valid, .prob, .out_valid, .stage, .avg);

  initial begin : watchdog
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    in_valid = 0;
    for (int c = 0; c < NCLASS; c++) begin prob[c] = '0; h[0][c] = 0; h[1][c] = 0; h[2][c] = 0; end
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int e = 0; e < 200; e++) begin
      real a [NCLASS];
      real best;
      int  bi;
      // a random distribution, one class per epoch favoured
      for (int c = 0; c < NCLASS; c++) begin
        real p;
        p = real'($urandom % 1000) / 4000.0 + ((c == (e / 2) % NCLASS) ? 0.5 : 0.0);
        prob[c] = fx_t'(longint'(p * 2.0**21));
        h[2][c] = h[1][c]; h[1][c] = h[0][c]; h[0][c] = real'(prob[c]) / 2.0**21;
        a[c] = (h[0][c] + h[1][c] + h[2][c]) / 3.0;
      end
      best = a[0]; bi = 0;
      for (int c = 1; c < NCLASS; c++) if (a[c] > best) begin best = a[c]; bi = c; end
      @(negedge clk); in_valid = 1;
      @(negedge clk); in_valid = 0;
      checks++;
      if (!out_valid) begin failures++; $display("FAIL out_valid latency"); end
      for (int c = 0; c < NCLASS; c++) begin
        real d;
        d = real'(avg[c]) / 2.0**21 - a[c];
        checks++;
        if (d > 1.0 / 262144.0 || d < -1.0 / 262144.0) begin failures++; $display("FAIL avg[%0d] %f want %f", c, real'(avg[c]) / 2.0**21, a[c]); end
      end
      // skip near-ties
      begin
        bit tie;
        tie = 0;
        for (int c = 0; c < NCLASS; c++) if (c != bi && best - a[c] < 1e-4) tie = 1;
        if (!tie) begin
          checks++;
          if (stage != 2'(bi)) begin failures++; $display("FAIL stage %0d want %0d", stage, bi); end
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
