// tb_sram_bank: self-checking test of one SRAM bank.
// Writes random data to random addresses (kept in a tb copy), then reads through both ports,
// checking the one-cycle read latency, that a read without enable keeps the last data and
// that both ports can read different words in the same cycle.
module tb_sram_bank;
  localparam int DEPTH = 14336;
  logic clk = 0;
  logic re0, re1, we;
  logic [13:0] raddr0, raddr1, waddr;
  logic [7:0] rdata0, rdata1, wdata;
  logic [7:0] img [DEPTH];
  logic       valid [DEPTH];
  int checks = 0, failures = 0;
  always #5 clk = ~clk;

  sram_bank #(.DEPTH(DEPTH)) dut (.clk, .re0, .raddr0, .rdata0, .re1, .raddr1, .rdata1, .we, .waddr, .wdata);

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

  initial begin
    re0 = 0; re1 = 0; we = 0; raddr0 = 0; raddr1 = 0; waddr = 0; wdata = 0;
    for (int i = 0; i < DEPTH; i++) valid[i] = 0;
    // fill a few fixed places and random ones
    for (int i = 0; i < 3000; i++) begin
      int a;
      a = (i < 2) ? (i == 0 ? 0 : DEPTH - 1) : int'($urandom % DEPTH);
      @(negedge clk);
      we = 1; waddr = 14'(a); wdata = 8'($urandom);
      img[a] = wdata; valid[a] = 1;
    end
    @(negedge clk); we = 0;
    for (int i = 0; i < 3000; i++) begin
      int a, b;
      do a = int'($urandom % DEPTH); while (!valid[a]);
      do b = int'($urandom % DEPTH); while (!valid[b]);
      if (i < 2) begin a = 0; b = DEPTH - 1; end
      @(negedge clk);
      re0 = 1; raddr0 = 14'(a); re1 = 1; raddr1 = 14'(b);
      @(negedge clk);
      re0 = 0; re1 = 0; raddr0 = 14'(b); raddr1 = 14'(a);
      check($sformatf("port0 @%0d", a), rdata0 == img[a]);
      check($sformatf("port1 @%0d", b), rdata1 == img[b]);
      @(negedge clk);
      check("data held without read enable", rdata0 == img[a] && rdata1 == img[b]);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
