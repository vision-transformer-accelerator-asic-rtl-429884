// fx_divider: fixed-point divider, out = in1 / in2, both signed Q18.21.
//
// Restoring long division, one quotient bit per cycle, on the magnitudes: the dividend
// |in1| << Q (N+Q = 60 bits) is divided by |in2|. After the last bit the quotient is rounded
// to nearest with ties to even ("Gaussian rounding") from the remainder, saturated to FX_MAX
// (overflow) and given the sign of in1 xor in2. Dividing by zero raises `flag` and gives the
// saturated value with the dividend's sign.
//
// Timing: a computation starts on a rising edge of `req.start` while idle; `busy` is high
// until `done`, which is a one-cycle pulse. Counting the clock edge that samples start as
// the first, `done` and the result appear after N+Q+3 = 63 edges, the latency the paper
// gives. One edge loads, N+Q edges produce quotient bits, one rounds, one applies the sign.
// Long division, the latency, Gaussian rounding and the status signals are the paper's; the
// restoring form and the sign-magnitude handling are this design's choice.
module fx_divider
  import sleepvit_pkg::*;
(
  input  logic      clk,
  input  logic      rst_n,
  input  unit_req_t req,
  output unit_rsp_t rsp
);
  localparam int W = N + Q;                  // dividend / quotient width

  typedef enum logic [1:0] {S_IDLE, S_DIV, S_ROUND, S_SIGN} state_e;
  state_e        state;
  logic          start_q;
  logic [W-1:0]  dvd;                        // shifted dividend, consumed MSB first
  logic [W-1:0]  quo;
  logic [N:0]    rem;                        // partial remainder (one bit wider than divisor)
  logic [N-1:0]  dvs;                        // |divisor|
  logic          neg, dbz;
  logic [$clog2(W)-1:0] cnt;
  logic [W:0]    quo_r;                      // rounded quotient
  logic [N:0]    rem_next;
  logic          go;

  function automatic logic [N-1:0] mag(input fx_t v);
    return v[N-1] ? N'(-v) : N'(v);
  endfunction

  assign go       = req.start && !start_q && (state == S_IDLE);
  assign rem_next = {rem[N-1:0], dvd[W-1]};
  assign rsp.busy = (state != S_IDLE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state    <= S_IDLE;
      start_q  <= 1'b0;
      dvd      <= '0;
      quo      <= '0;
      rem      <= '0;
      dvs      <= '0;
      neg      <= 1'b0;
      dbz      <= 1'b0;
      cnt      <= '0;
      quo_r    <= '0;
      rsp.done <= 1'b0;
      rsp.ovfl <= 1'b0;
      rsp.flag <= 1'b0;
      rsp.out  <= '0;
    end else begin
      start_q  <= req.start;
      rsp.done <= 1'b0;
      unique case (state)
        S_IDLE: if (go) begin
          dvd   <= {mag(req.in1), {Q{1'b0}}};
          dvs   <= mag(req.in2);
          neg   <= req.in1[N-1] ^ req.in2[N-1];
          dbz   <= (req.in2 == '0);
          rem   <= '0;
          quo   <= '0;
          cnt   <= '0;
          state <= S_DIV;
        end
        S_DIV: begin
          if (rem_next >= {1'b0, dvs}) begin
            rem <= rem_next - {1'b0, dvs};
            quo <= {quo[W-2:0], 1'b1};
          end else begin
            rem <= rem_next;
            quo <= {quo[W-2:0], 1'b0};
          end
          dvd <= {dvd[W-2:0], 1'b0};
          cnt <= cnt + 1'b1;
          if (int'(cnt) == W - 1) state <= S_ROUND;
        end
        S_ROUND: begin
          // round half to even: compare twice the remainder with the divisor
          if (({rem, 1'b0} > {2'b0, dvs}) || (({rem, 1'b0} == {2'b0, dvs}) && quo[0]))
            quo_r <= {1'b0, quo} + 1'b1;
          else
            quo_r <= {1'b0, quo};
          state <= S_SIGN;
        end
        S_SIGN: begin
          if (dbz || quo_r > (W+1)'(FX_MAX)) begin
            rsp.out  <= neg ? FX_MIN : FX_MAX;
            rsp.ovfl <= 1'b1;
          end else begin
            rsp.out  <= neg ? -fx_t'(quo_r[N-1:0]) : fx_t'(quo_r[N-1:0]);
            rsp.ovfl <= 1'b0;
          end
          rsp.flag <= dbz;
          rsp.done <= 1'b1;
          state    <= S_IDLE;
        end
        default: state <= S_IDLE;
      endcase
    end
  end
endmodule
