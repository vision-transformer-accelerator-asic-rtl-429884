// tb_req_mux: self-checking test of the request multiplexer with three requesters of the
// shared-adder bundle type. With exactly one active requester (the others all-zero) the
// output must equal that requester's bundle; with none active it must be all zero.
module tb_req_mux;
  import sleepvit_pkg::*;
  logic clk = 0;
  logic [2:0] valid;
  arith_req_t req [3];
  arith_req_t out;
  int checks = 0, failures = 0;
  always #5 clk = ~clk;

  req_mux #(.T(arith_req_t), .NREQ(3)) dut (.clk, .valid, .req, .out);

  initial begin : watchdog
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    valid = '0;
    for (int k = 0; k < 3; k++) req[k] = '0;
    @(negedge clk);
    checks++; if (out != '0) failures++;
    for (int i = 0; i < 300; i++) begin
      int w;
      arith_req_t r;
      w = int'($urandom % 3);
      r = '{refresh: 1'b1, in1: fx_t'({$urandom, $urandom}), in2: fx_t'({$urandom, $urandom})};
      for (int k = 0; k < 3; k++) req[k] = (k == w) ? r : '0;
      valid = 3'(1 << w);
      @(negedge clk);
      checks++;
      if (out != r) begin failures++; $display("FAIL requester %0d not routed", w); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
