// sleepvit_pkg: types, constants and the memory map shared by the SleepViT accelerator.
//
// Compute format: every compute module works on signed Q18.21 fixed point (39 bits, 21
// fractional bits). The divider latency N+Q+3 = 63 and square-root latency
// floor((N+Q)/2)+1 = 31 both follow from N=39, Q=21. (A block diagram legend of the design
// labels the compute data "Q26.13"; the latency formulas only agree with Q18.21, which is used.)
//
// Storage format: SRAM words are 8 bits. Values are stored single width (8 bits) or double
// width (16 bits, both halves in two banks at the same offset) in a Q format whose fractional
// bit count is chosen per layer. The per-layer formats, the memory map and the weight layout
// below are this design's own choices; the model sizes (64-sample patches, 60 patches plus a
// class token, d_model 64, 8 heads, MLP 32, 4 classes) are the model's.
package sleepvit_pkg;

  // ---------------- fixed point ----------------
  localparam int N = 39;                     // total bits of the compute format
  localparam int Q = 21;                     // fractional bits of the compute format
  typedef logic signed [N-1:0] fx_t;

  localparam fx_t FX_MAX  = {1'b0, {(N-1){1'b1}}};
  localparam fx_t FX_MIN  = -FX_MAX;         // symmetric saturation
  localparam fx_t FX_ONE  = fx_t'(1) <<< Q;
  localparam fx_t FX_ZERO = '0;

  // Saturate a wide signed value to the compute format. Returns {overflow, value}.
  function automatic logic [N:0] sat_wide(input logic signed [95:0] v);
    if (v > 96'(FX_MAX))      return {1'b1, FX_MAX};
    else if (v < 96'(FX_MIN)) return {1'b1, FX_MIN};
    else                      return {1'b0, v[N-1:0]};
  endfunction

  // ---------------- shared arithmetic bundles ----------------
  // Request to the shared adder / multiplier (single-cycle, registered output).
  typedef struct packed {
    logic refresh;
    fx_t  in1;
    fx_t  in2;
  } arith_req_t;

  // Request to a multi-cycle unit (divider, exponential, square root).
  typedef struct packed {
    logic start;
    fx_t  in1;
    fx_t  in2;
  } unit_req_t;

  // Response of a multi-cycle unit. flag = divide-by-zero (divider) or negative radicand (sqrt).
  typedef struct packed {
    logic busy;
    logic done;
    logic ovfl;
    logic flag;
    fx_t  out;
  } unit_rsp_t;

  // ---------------- memory interface ----------------
  localparam int AW = 16;                    // word address width of both memories
  typedef logic [AW-1:0] addr_t;
  typedef logic [3:0]    frac_t;             // fractional bits of the stored Q format

  typedef struct packed {
    logic  en;
    logic  dw;                               // 1: double width (16 bits)
    frac_t frac;
    addr_t addr;
  } mem_rd_t;

  typedef struct packed {
    logic  en;
    logic  dw;
    frac_t frac;
    addr_t addr;
    fx_t   data;
  } mem_wr_t;

  localparam int WEIGHT_BANKS = 2;
  localparam int WEIGHT_DEPTH = 15872;       // words per weight bank
  localparam int INTRES_BANKS = 4;
  localparam int INTRES_DEPTH = 14336;       // words per intermediate-result bank

  // ---------------- activation of the MAC ----------------
  typedef enum logic [1:0] {ACT_NONE = 2'd0, ACT_LINEAR = 2'd1, ACT_SWISH = 2'd2} act_e;

  // ---------------- model sizes ----------------
  localparam int PATCH   = 64;               // samples per patch
  localparam int NPATCH  = 60;               // 3840 samples / 64
  localparam int NTOK    = 61;               // patches + class token
  localparam int DMODEL  = 64;
  localparam int NHEAD   = 8;
  localparam int DHEAD   = 8;
  localparam int DMLP    = 32;
  localparam int NCLASS  = 4;
  localparam int NSAMPLE = NPATCH * PATCH;   // 3840

  // ---------------- stored formats (fractional bits) ----------------
  localparam frac_t F_EEG = 4'd8;            // Q8.8, double width
  localparam frac_t F_ACT = 4'd4;            // Q4.4 residual stream, Q/K/V, scores, hidden
  localparam frac_t F_LN  = 4'd5;            // Q3.5 LayerNorm outputs
  localparam frac_t F_PRB = 4'd7;            // Q1.7 softmax outputs
  localparam frac_t F_W   = 4'd6;            // Q2.6 weights and biases
  localparam frac_t F_EMB = 4'd5;            // Q3.5 class token and position embedding

  // ---------------- intermediate-result memory map (word addresses) ----------------
  // Double-width data at address a < INTRES_BANKS/2*INTRES_DEPTH keeps its high byte at
  // a + 2*INTRES_DEPTH, so the EEG buffer also occupies 28672..32511.
  localparam int A_EEG  = 0;
  localparam int A_X    = 3840;              // residual stream, 61x64
  localparam int A_LN   = 7744;              // LayerNorm output, 61x64 (also head outputs O)
  localparam int A_Q    = 11648;             // queries (later the projected attention / MLP out)
  localparam int A_K    = 15552;             // keys (later the MLP hidden layer, 61x32)
  localparam int A_V    = 19456;             // values
  localparam int A_S    = 23360;             // scores of one head, 61x61
  localparam int A_LOG  = 27200;             // 4 class logits / probabilities
  localparam int A_HH   = 27208;             // 32 MLP-head hidden values

  // ---------------- weight memory map (word addresses, matrices stored [out][in]) ----------
  localparam int W_PATCH = 0;                // 64x64
  localparam int B_PATCH = 4096;             // 64
  localparam int W_CLS   = 4160;             // 64
  localparam int W_POS   = 4224;             // 61x64
  localparam int G_LN1   = 8128;             // 64 gamma, then 64 beta
  localparam int W_QKV   = 8256;             // 3 x (64x64 + 64): Q, K, V
  localparam int W_O     = 20736;            // 64x64 + 64
  localparam int G_LN2   = 24896;            // 128
  localparam int W_M1    = 25024;            // 32x64 + 32
  localparam int W_M2    = 27104;            // 64x32 + 64
  localparam int G_LN3   = 29216;            // 128
  localparam int W_H1    = 29344;            // 32x64 + 32
  localparam int W_H2    = 31424;            // 4x32 + 4
  localparam int W_TOTAL = 31556;            // weights used

endpackage
