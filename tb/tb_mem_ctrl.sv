// tb_mem_ctrl: self-checking test of the memory controller at its intermediate-result size
// (4 banks x 14336 words).
// Writes values in several Q formats, single and double width, across all banks, and reads
// them back on both ports. The expected stored value is floor(v * 2^frac) clamped to
// +/-127 (single) or +/-32767 (double), computed from a real number; the read-back value in
// Q18.21 must equal that stored value times 2^(21-frac). Also checks the saturation flag and
// that a double-width write leaves its neighbours alone.
module tb_mem_ctrl;
  import sleepvit_pkg::*;
  logic clk = 0, rst_n = 0;
  mem_rd_t rd [2];
  fx_t rdata [2];
  mem_wr_t wr;
  logic wr_sat;
  int checks = 0, failures = 0;
  always #5 clk = ~clk;

  mem_ctrl #(.BANKS(INTRES_BANKS), .DEPTH(INTRES_DEPTH)) dut (.clk, .rst_n, .rd, .rdata, .wr, .wr_sat);

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

  // write real value v at address a; returns the expected stored integer
  task automatic wr_val(int a, real v, int f, bit dw, output longint stored);
    real s;
    longint lim;
    bit sat;
    s = v * 2.0**f;
    stored = longint'($floor(s));
    lim = dw ? 32767 : 127;
    sat = 0;
    if (stored > lim) begin stored = lim; sat = 1; end
    if (stored < -lim) begin stored = -lim; sat = 1; end
    @(negedge clk);
    wr = '{en: 1'b1, dw: dw, frac: frac_t'(f), addr: addr_t'(a),
           data: fx_t'(longint'($floor(v * 2.0**21)))};
    @(posedge clk); #1;
    check($sformatf("saturation flag @%0d", a), wr_sat == sat);
    @(negedge clk); wr = '0;
  endtask

  task automatic rd_chk(int p, int a, int f, bit dw, longint stored);
    @(negedge clk);
    rd[p] = '{en: 1'b1, dw: dw, frac: frac_t'(f), addr: addr_t'(a)};
    @(negedge clk);
    rd[p] = '0;
    check($sformatf("port %0d @%0d: %0d want %0d", p, a, rdata[p], stored <<< (21 - f)),
          longint'(rdata[p]) == (stored <<< (21 - f)));
  endtask

  initial begin
    longint st [64];
    int ad [64], fr [64];
    bit dws [64];
    rd[0] = '0; rd[1] = '0; wr = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int i = 0; i < 64; i++) begin
      real v;
      dws[i] = (i % 3 == 0);
      fr[i]  = dws[i] ? 8 : 2 + (i % 6);
      // spread addresses over all banks; double width only in the lower half
      ad[i]  = dws[i] ? i * 400 + 7 : i * 890 + 3;
      v = (real'($urandom % 20001) - 10000.0) / (dws[i] ? 60.0 : 500.0);
      if (i == 5) v = 1000.0;            // saturates high
      if (i == 7) v = -1000.0;           // saturates low
      wr_val(ad[i], v, fr[i], dws[i], st[i]);
    end
    for (int i = 0; i < 64; i++) rd_chk(i % 2, ad[i], fr[i], dws[i], st[i]);
    // neighbours of a double-width word
    begin
      longint s1, s2, s3;
      wr_val(1000, 1.5, 4, 0, s1);
      wr_val(1002, -2.25, 4, 0, s2);
      wr_val(1001, 77.75, 8, 1, s3);
      rd_chk(0, 1000, 4, 0, s1);
      rd_chk(1, 1002, 4, 0, s2);
      rd_chk(0, 1001, 8, 1, s3);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
