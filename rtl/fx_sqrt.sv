// fx_sqrt: fixed-point square root, out = sqrt(in1), signed Q18.21 in and out.
//
// Binary digit-by-digit (restoring) method: the radicand's raw value shifted left by Q is
// consumed two bits per cycle, producing one root bit per cycle, so the root of a Q-format
// number comes out directly in Q format, truncated. A negative radicand raises `flag`
// ("negative radicand" to the controller) and returns 0.
//
// Timing: starts on a rising edge of `req.start` while idle; `busy` until `done` (one-cycle
// pulse). Counting the edge that samples start as the first, the result appears after
// floor((N+Q)/2)+1 = 31 edges: one edge loads, (N+Q)/2 edges each make a root bit. The
// algorithm class, the latency and the negative-radicand flag are the paper's; truncation and
// the zero result for negative input are this design's choice.
// `rsp.ovfl` is always 0 (a root of a Q18.21 value is below 2^9.5 and cannot overflow), so it
// and the top bits of `rsp.out` are constant; the response keeps the shared unit_rsp_t shape.
module fx_sqrt
  import sleepvit_pkg::*;
(
  input  logic      clk,
  input  logic      rst_n,
  input  unit_req_t req,
  output unit_rsp_t rsp
);
  localparam int W  = N + Q;                 // radicand width after the shift (60)
  localparam int RB = W / 2;                 // root bits (30)

  logic          start_q, running, go;
  logic [W-1:0]  rad;                        // radicand, consumed two MSBs at a time
  logic [RB-1:0] root;
  logic [RB+1:0] rem;
  logic [$clog2(RB)-1:0] cnt;
  logic [RB+1:0] rem_sh, trial;

  assign go       = req.start && !start_q && !running;
  assign rsp.busy = running;
  assign rem_sh   = {rem[RB-1:0], rad[W-1:W-2]};
  assign trial    = {root, 2'b01};

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      start_q  <= 1'b0;
      running  <= 1'b0;
      rad      <= '0;
      root     <= '0;
      rem      <= '0;
      cnt      <= '0;
      rsp.done <= 1'b0;
      rsp.ovfl <= 1'b0;
      rsp.flag <= 1'b0;
      rsp.out  <= '0;
    end else begin
      start_q  <= req.start;
      rsp.done <= 1'b0;
      if (go) begin
        // a negative radicand is flagged and computed as zero
        rad      <= req.in1[N-1] ? '0 : {req.in1, {Q{1'b0}}};
        rsp.flag <= req.in1[N-1];
        root     <= '0;
        rem      <= '0;
        cnt      <= '0;
        running  <= 1'b1;
      end else if (running) begin
        if (rem_sh >= trial) begin
          rem  <= rem_sh - trial;
          root <= {root[RB-2:0], 1'b1};
        end else begin
          rem  <= rem_sh;
          root <= {root[RB-2:0], 1'b0};
        end
        rad <= {rad[W-3:0], 2'b00};
        cnt <= cnt + 1'b1;
        if (int'(cnt) == RB - 1) begin
          running  <= 1'b0;
          rsp.done <= 1'b1;
          rsp.out  <= fx_t'({root[RB-2:0], (rem_sh >= trial)});
        end
      end
    end
  end
endmodule
