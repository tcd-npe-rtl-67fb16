// tcd_mac: temporal-carry-deferring multiply-accumulate unit (TCD-MAC).
//
// A conventional MAC resolves every product and every partial sum through a
// carry-propagation adder. The TCD-MAC only needs the final dot product to be
// right, so in carry-deferring mode (CDM) it stops after the generate /
// propagate layer of the adder: the bitwise propagate P^c is kept in the output
// register unit (ORU) and the generate G^c in the carry buffer unit (CBU), and
// in the next cycle both are fed back into the compression layers at their bit
// positions (P_m into column m, G_m into column m+1). The carry chain is used
// once, in carry-propagation mode (CPM), when the partial carry-propagate
// adder (PCPA) turns the stored (P, G) pair into the correct sum.
//
// Datapath of one CDM cycle (all combinational between the ORU/CBU registers):
//   DRU  - partial products of a signed 16 x 16 product. As in the original
//          work, the operand that is negative becomes the multiplier (MR), the
//          other the multiplicand (MD); if both are negative both are negated
//          (MD=-B, MR=-A). Rows 0..DW-2 are MD gated by MR bits; row DW-1 is
//          the two's complement of MD shifted by DW-1 when MR is negative
//          (b*a = -2^(DW-1)*a + sum x_i 2^i * a).
//   CEL  - layers of Hamming-weight compressors (hwc) that reduce each column
//          to at most two bits. The ORU bit of column m and the CBU bit of
//          column m-1 join the first layer as two more column inputs.
//   GEN  - G = X & Y, P = X ^ Y of the two remaining rows X, Y.
// CPM cycle: PCPA ripple chain c_{m+1} = G_m | P_m & c_m, sum_m = P_m ^ c_m,
// registered in `sum`.
//
// Design choices not fixed by the original work: the CEL is built from
// CC(3:2) counters only, Wallace style (three bits of a column per counter,
// one or two left-over bits passed on), and the CBU bits enter the first CEL
// layer; the original places them in incomplete counters of any layer. All
// arithmetic is modulo 2^ACC_W. Reset is asynchronous, active low.
//
// Interface / timing (one roll of I inputs takes I+1 cycles):
//   en & clr : accumulate a*b, discarding the stored ORU/CBU (first input)
//   en & !clr: accumulate a*b onto ORU/CBU
//   prop     : PCPA cycle, sum <= ORU + 2*CBU (valid the cycle after prop)
//   none     : hold
module tcd_mac #(
  parameter int DW    = 16,
  parameter int ACC_W = 36
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    en,
  input  logic                    clr,
  input  logic                    prop,
  input  logic signed [DW-1:0]    a,
  input  logic signed [DW-1:0]    b,
  output logic        [ACC_W-1:0] sum
);

  localparam int MAXH = DW + 2;

  // ---- column heights of the compression tree (elaboration time) ----------
  function automatic int h0(int c);
    int n;
    n = 0;
    for (int r = 0; r < DW - 1; r++) if (r <= c && c <= r + DW - 1) n++;
    if (c >= DW - 1) n++;   // negative-multiplier correction row
    n++;                    // ORU (P) bit
    if (c >= 1) n++;        // CBU (G) bit from column c-1
    return n;
  endfunction

  // Height of every column after every layer, worked out once: layer l+1
  // keeps, per column, one sum per CC(3:2) counter, the bits left over, and
  // one carry per counter of the column below.
  localparam int MAXL = 16;
  typedef logic [MAXL:0][ACC_W-1:0][7:0] ht_t;

  function automatic ht_t calc_ht();
    ht_t t;
    int  hc, hp;
    t = '0;
    for (int k = 0; k < ACC_W; k++) t[0][k] = 8'(h0(k));
    for (int s = 0; s < MAXL; s++)
      for (int k = 0; k < ACC_W; k++) begin
        hc = int'(t[s][k]);
        hp = (k > 0) ? int'(t[s][k-1]) : 0;
        t[s+1][k] = 8'(hc / 3 + hc % 3 + hp / 3);
      end
    return t;
  endfunction

  function automatic int calc_nl(ht_t t);
    for (int s = 0; s <= MAXL; s++) begin
      int mx;
      mx = 0;
      for (int k = 0; k < ACC_W; k++) if (int'(t[s][k]) > mx) mx = int'(t[s][k]);
      if (mx <= 2) return s;
    end
    return MAXL;
  endfunction

  localparam ht_t HT = calc_ht();
  localparam int  NL = calc_nl(HT);

  // ---- registers: ORU (propagate), CBU (generate), result ------------------
  logic [ACC_W-1:0] oru, cbu;
  logic [ACC_W-1:0] p_inj, g_inj;       // what is injected into the CEL
  logic [ACC_W-1:0] gen_g, gen_p;       // GEN outputs
  logic [ACC_W-1:0] pcpa;

  assign p_inj = clr ? '0 : oru;
  assign g_inj = clr ? '0 : cbu;

  // ---- DRU ----------------------------------------------------------------
  logic [DW-1:0]    md, mr;
  logic             mr_neg;
  logic [DW-1:0]    pp [DW-1];          // rows 0 .. DW-2
  logic [ACC_W-1:0] corr;               // row DW-1

  always_comb begin
    logic a_neg, b_neg;
    a_neg = a[DW-1];
    b_neg = b[DW-1];
    if (a_neg && b_neg) begin
      md = DW'(-b);
      mr = DW'(-a);
    end else if (b_neg) begin
      md = a;
      mr = b;
    end else begin
      md = b;
      mr = a;
    end
    mr_neg = a_neg ^ b_neg;
    for (int r = 0; r < DW - 1; r++) pp[r] = mr[r] ? md : '0;
    // MR bit DW-1: weight -2^(DW-1) for a negative MR; +2^(DW-1) only for
    // MR = -(-2^(DW-1)) when both operands are negative.
    if (!mr[DW-1])  corr = '0;
    else if (mr_neg) corr = -(ACC_W'(md) << (DW - 1));
    else             corr =   ACC_W'(md) << (DW - 1);
  end

  // ---- CEL: bit matrix, one entry per layer and column ---------------------
  // Each layer has its own array (l0, g_layer[l].nxt) so that no signal feeds
  // itself.
  logic [MAXH-1:0] l0 [ACC_W];

  for (genvar c = 0; c < ACC_W; c++) begin : g_l0
    localparam int RLO = (c - DW + 1 > 0) ? c - DW + 1 : 0;
    localparam int RHI = (c < DW - 2) ? c : DW - 2;
    localparam int NR  = (RHI >= RLO) ? RHI - RLO + 1 : 0;
    for (genvar r = RLO; r <= RHI; r++) begin : g_pp
      assign l0[c][r-RLO] = pp[r][c-r];
    end
    if (c >= DW - 1) begin : g_corr
      assign l0[c][NR] = corr[c];
      assign l0[c][NR+1] = p_inj[c];
      if (c >= 1) begin : g_g
        assign l0[c][NR+2] = g_inj[c-1];
      end
    end else begin : g_nocorr
      assign l0[c][NR] = p_inj[c];
      if (c >= 1) begin : g_g
        assign l0[c][NR+1] = g_inj[c-1];
      end
    end
    for (genvar k = h0(c); k < MAXH; k++) begin : g_zero
      assign l0[c][k] = 1'b0;
    end
  end

  for (genvar l = 0; l < NL; l++) begin : g_layer
    logic [MAXH-1:0] cur [ACC_W];
    logic [MAXH-1:0] nxt [ACC_W];
    if (l == 0) begin : g_first
      assign cur = l0;
    end else begin : g_next
      assign cur = g_layer[l-1].nxt;
    end
    for (genvar c = 0; c < ACC_W; c++) begin : g_col
      localparam int H    = int'(HT[l][c]);
      localparam int NFA  = H / 3;
      localparam int REM  = H % 3;
      localparam int HN   = int'(HT[l+1][c]);
      localparam int HNX  = (c + 1 < ACC_W) ? int'(HT[l][c+1]) : 0;
      localparam int COFS = HNX / 3 + HNX % 3;   // carries land after these in column c+1
      for (genvar k = 0; k < NFA; k++) begin : g_fa
        logic [1:0] hw;
        hwc #(.M(3)) u_hwc (.x(cur[c][3*k +: 3]), .hw(hw));
        assign nxt[c][k] = hw[0];
        if (c + 1 < ACC_W) begin : g_cy
          assign nxt[c+1][COFS + k] = hw[1];
        end
      end
      for (genvar j = 0; j < REM; j++) begin : g_pass
        assign nxt[c][NFA + j] = cur[c][3*NFA + j];
      end
      for (genvar k = HN; k < MAXH; k++) begin : g_zero
        assign nxt[c][k] = 1'b0;
      end
    end
  end

  // ---- GEN: generate / propagate of the last two rows ----------------------
  for (genvar c = 0; c < ACC_W; c++) begin : g_gen
    localparam int HF = int'(HT[NL][c]);
    logic x, y;
    assign x = (HF >= 1) ? g_layer[NL-1].nxt[c][0] : 1'b0;
    assign y = (HF >= 2) ? g_layer[NL-1].nxt[c][1] : 1'b0;
    assign gen_g[c] = x & y;
    assign gen_p[c] = x ^ y;
  end

  // ---- PCPA: carry propagation over the stored (P, G) pair -----------------
  always_comb begin
    logic cy;
    cy = 1'b0;
    for (int m = 0; m < ACC_W; m++) begin
      pcpa[m] = oru[m] ^ cy;
      cy      = cbu[m] | (oru[m] & cy);
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      oru <= '0;
      cbu <= '0;
      sum <= '0;
    end else begin
      if (en) begin
        oru <= gen_p;
        cbu <= gen_g;
      end
      if (prop) sum <= pcpa;
    end
  end

endmodule
