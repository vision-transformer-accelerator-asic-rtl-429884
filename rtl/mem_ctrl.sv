// mem_ctrl: memory controller for a banked SRAM (used once for weights, once for
// intermediate results).
//
// The word address space is split into BANKS consecutive blocks of DEPTH words, one block per
// bank. A single-width (8-bit) value lives in one bank. A double-width (16-bit) value at
// address a, which must lie in the lower half of the banks, keeps its low byte at a and its
// high byte in the bank BANKS/2 further on at the same offset, so both halves are read or
// written in one cycle (the paper's reason for banking). The controller also converts
// between the stored Q format, given per access by its fractional bit count `frac`, and the
// Q18.21 compute format: reads sign-extend and shift left; writes shift right arithmetically
// (truncation toward minus infinity) and saturate symmetrically to +/-127 or +/-32767,
// pulsing `wr_sat` when they do.
//
// Ports: two read ports (rd[0], rd[1]) with data one cycle later on rdata[0..1], one write
// port. Banking, double width across two banks and the casting follow the paper; the bank
// placement (block, not interleaved), the saturation on write and the two read ports are
// this design's choices.
module mem_ctrl
  import sleepvit_pkg::*;
#(
  parameter int BANKS = 4,
  parameter int DEPTH = 14336
) (
  input  logic    clk,
  input  logic    rst_n,
  input  mem_rd_t rd    [2],
  output fx_t     rdata [2],
  input  mem_wr_t wr,
  output logic    wr_sat
);
  localparam int BW = $clog2(DEPTH);
  localparam int SW = (BANKS > 1) ? $clog2(BANKS) : 1;

  typedef struct packed {
    logic [SW-1:0] bank;
    logic [BW-1:0] off;
  } loc_t;

  function automatic loc_t locate(input addr_t a);
    loc_t l;
    l.bank = '0;
    l.off  = BW'(a);
    for (int b = 1; b < BANKS; b++)
      if (32'(a) >= b * DEPTH) begin
        l.bank = SW'(b);
        l.off  = BW'(32'(a) - b * DEPTH);
      end
    return l;
  endfunction

  loc_t          rloc [2];
  loc_t          wloc;
  logic [7:0]    bank_q  [2][BANKS];
  logic [SW-1:0] bank_r  [2];
  logic          dw_r    [2];
  frac_t         frac_r  [2];
  logic [BANKS-1:0] re   [2];
  logic [BANKS-1:0] we;
  logic signed [95:0] wv;
  logic signed [15:0] wraw;
  logic               wsat;

  always_comb begin
    for (int p = 0; p < 2; p++) begin
      rloc[p] = locate(rd[p].addr);
      re[p]   = '0;
      if (rd[p].en) begin
        re[p][rloc[p].bank] = 1'b1;
        if (rd[p].dw) re[p][rloc[p].bank + SW'(BANKS/2)] = 1'b1;
      end
    end
  end

  // write: cast, saturate, pick banks
  always_comb begin
    wloc = locate(wr.addr);
    wv   = 96'(wr.data) >>> (Q - int'(wr.frac));
    wsat = 1'b0;
    if (wr.dw) begin
      if (wv > 96'sd32767)       begin wraw = 16'sd32767;  wsat = 1'b1; end
      else if (wv < -96'sd32767) begin wraw = -16'sd32767; wsat = 1'b1; end
      else                        wraw = wv[15:0];
    end else begin
      if (wv > 96'sd127)         begin wraw = 16'sd127;    wsat = 1'b1; end
      else if (wv < -96'sd127)   begin wraw = -16'sd127;   wsat = 1'b1; end
      else                        wraw = wv[15:0];
    end
    we = '0;
    if (wr.en) begin
      we[wloc.bank] = 1'b1;
      if (wr.dw) we[wloc.bank + SW'(BANKS/2)] = 1'b1;
    end
  end

  for (genvar b = 0; b < BANKS; b++) begin : g_bank
    // a bank in the upper half receives the high byte of double-width writes
    logic [7:0] wbyte;
    assign wbyte = (wr.dw && (b >= BANKS/2)) ? wraw[15:8] : wraw[7:0];
    sram_bank #(.DEPTH(DEPTH)) u_bank (
      .clk    (clk),
      .re0    (re[0][b]),
      .raddr0 (rloc[0].off),
      .rdata0 (bank_q[0][b]),
      .re1    (re[1][b]),
      .raddr1 (rloc[1].off),
      .rdata1 (bank_q[1][b]),
      .we     (we[b]),
      .waddr  (wloc.off),
      .wdata  (wbyte)
    );
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int p = 0; p < 2; p++) begin
        bank_r[p] <= '0;
        dw_r[p]   <= 1'b0;
        frac_r[p] <= '0;
      end
      wr_sat <= 1'b0;
    end else begin
      for (int p = 0; p < 2; p++)
        if (rd[p].en) begin
          bank_r[p] <= rloc[p].bank;
          dw_r[p]   <= rd[p].dw;
          frac_r[p] <= rd[p].frac;
        end
      wr_sat <= wr.en & wsat;
    end
  end

  // read: assemble and cast to Q18.21
  always_comb begin
    for (int p = 0; p < 2; p++) begin
      logic signed [15:0] raw;
      if (dw_r[p]) raw = {bank_q[p][bank_r[p] + SW'(BANKS/2)], bank_q[p][bank_r[p]]};
      else         raw = 16'(signed'(bank_q[p][bank_r[p]]));
      rdata[p] = fx_t'(raw) <<< (Q - int'(frac_r[p]));
    end
  end
endmodule
