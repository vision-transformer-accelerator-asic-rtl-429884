// req_mux: the controller's signal multiplexer for one shared resource.
//
// The shared adder, multiplier, divider, exponential unit and memory ports each have one
// request bundle; several modules can drive it, but the controller runs one operation at a
// time, so at most one requester is active in any cycle. Every requester drives an all-zero
// bundle while it is not using the resource, which makes the multiplexer an OR of the
// requests. `valid` carries each requester's enable (refresh, start or en); an assertion
// checks that no two are active together. The muxing is the paper's (Fig. 3 "signal muxing");
// the OR form is this design's choice.
module req_mux #(
  parameter type T = logic [7:0],
  parameter int  NREQ = 2
) (
  input  logic          clk,
  input  logic [NREQ-1:0] valid,
  input  T              req [NREQ],
  output T              out
);
  always_comb begin
    out = '0;
    for (int i = 0; i < NREQ; i++) out = T'(out | req[i]);
  end

  a_one_owner: assert property (@(posedge clk) $onehot0(valid))
    else $error("req_mux: more than one requester active: %b", valid);
endmodule
