// controller: schedule-driven FSM of the TCD-NPE (output-stationary flow).
//
// The off-chip mapper turns an MLP and a batch size into a sequence of rolls
// of the PE array, each in one configuration NPE(K,N); this design stores one
// sched_entry_t per roll (written through sched_we before `start`). For every
// roll the controller:
//   FETCH  reads the entry.
//   COMP   walks the input index i = 0 .. I-1, one per cycle. W-Mem is read
//          only when i starts a new W row (every WORDS/N inputs), FM-Mem only
//          when i starts a new FM row (every WORDS_FM/KI inputs); in between
//          the row buffers are reused. One cycle later (pipeline stage 1) the
//          LDNs hand the buffered data of input i to the array and the MACs
//          run in carry-deferring mode (clr on i = 0).
//   DRAIN  last stage-1 cycle.
//   PROP   one carry-propagation (PCPA) cycle: I + 1 MAC cycles per roll.
//   WB     stores neuron n = 0 .. nn_act-1 of every batch, one neuron per
//          cycle: group n / TGS, column n mod TGS, through the Q/A units and
//          the write LDN into the other FM bank.
// After the last roll of a layer (entry.swap) the FM banks change roles; after
// the entry flagged `last` the controller pulses `done` and returns to IDLE.
// Only MACs that hold a neuron of a present batch are enabled.
// The entry format, the serial write-back and the non-overlapped phases are
// this design's choices; the original work describes the controller only as an
// FSM that turns the schedule into control signals.
module controller
  import tcd_pkg::sched_entry_t;
  import tcd_pkg::ctrl_state_t;
  import tcd_pkg::C_IDLE, tcd_pkg::C_FETCH, tcd_pkg::C_COMP, tcd_pkg::C_DRAIN, tcd_pkg::C_PROP, tcd_pkg::C_WB;
#(
  parameter int NTG      = tcd_pkg::NTG,
  parameter int TGS      = tcd_pkg::TGS,
  parameter int W_ROWS   = tcd_pkg::W_ROWS,
  parameter int W_WORDS  = tcd_pkg::W_WORDS,
  parameter int FM_ROWS  = tcd_pkg::FM_ROWS,
  parameter int FM_WORDS = tcd_pkg::FM_WORDS,
  parameter int DEPTH    = tcd_pkg::SCHED_DEPTH
) (
  input  logic                          clk,
  input  logic                          rst_n,
  // schedule load and run control
  input  logic                          sched_we,
  input  logic [$clog2(DEPTH)-1:0]      sched_addr,
  input  sched_entry_t                  sched_data,
  input  logic                          start,
  output logic                          busy,
  output logic                          done,
  output logic                          bank,        // FM bank holding the current input
  // memory reads
  output logic                          w_re,
  output logic [$clog2(W_ROWS)-1:0]     w_row,
  output logic                          fm_re,
  output logic [$clog2(FM_ROWS)-1:0]    fm_row,
  // LDN / array controls
  output sched_entry_t                  cfg,         // entry of the current roll
  output logic [15:0]                   idx,         // input index at stage 1
  output logic [NTG-1:0][TGS-1:0]       mac_en,
  output logic                          mac_clr,
  output logic                          mac_prop,
  output logic [$clog2(TGS)-1:0]        col_sel,
  output logic [$clog2(NTG)-1:0]        tsel,
  // write-back
  output logic                          wb_valid,
  output logic [$clog2(FM_ROWS)-1:0]    wb_row,
  output logic [$clog2(FM_WORDS)-1:0]   wb_off,
  // activity counters
  output logic [31:0]                   n_rolls,
  output logic [31:0]                   n_w_reads,
  output logic [31:0]                   n_fm_reads,
  output logic [31:0]                   n_mac_cycles
);
  localparam int LG  = $clog2(NTG);
  localparam int LT  = $clog2(TGS);
  localparam int LA  = $clog2(NTG * TGS);
  localparam int LWW = $clog2(W_WORDS);
  localparam int LFW = $clog2(FM_WORDS);

  sched_entry_t sched [DEPTH];
  ctrl_state_t  state;
  logic [$clog2(DEPTH)-1:0] pc;
  logic [15:0]  i0;           // stage-0 input index
  logic         v1;           // stage-1 valid
  logic [15:0]  n;            // neuron under write-back

  always_ff @(posedge clk) begin
    if (sched_we && state == C_IDLE) sched[sched_addr] <= sched_data;
  end

  // ---- stage 0: memory read requests --------------------------------------
  logic [15:0] w_mask, fm_mask;
  int          w_sh, fm_sh;
  always_comb begin
    w_sh    = LWW - LA + int'(cfg.kcfg);      // log2(inputs per W row)
    fm_sh   = LFW - int'(cfg.ki);             // log2(inputs per FM row)
    w_mask  = 16'((1 << w_sh) - 1);
    fm_mask = 16'((1 << fm_sh) - 1);
    w_re    = (state == C_COMP) && ((i0 & w_mask) == 0);
    fm_re   = (state == C_COMP) && ((i0 & fm_mask) == 0);
    w_row   = $bits(w_row)'(cfg.w_base) + $bits(w_row)'(i0 >> w_sh);
    fm_row  = $bits(fm_row)'(cfg.rd_base) + $bits(fm_row)'(i0 >> fm_sh);
  end

  // ---- stage 1: MAC controls -----------------------------------------------
  logic [NTG-1:0][TGS-1:0] active;
  always_comb begin
    logic [LG:0]  gpb;
    logic [LG:0]  bt, t;
    logic [15:0]  nn;
    gpb = (LG+1)'(NTG) >> cfg.kcfg;
    for (int g = 0; g < NTG; g++) begin
      bt = (LG+1)'(g) >> (LG - int'(cfg.kcfg));
      t  = (LG+1)'(g) & (gpb - 1'b1);
      for (int j = 0; j < TGS; j++) begin
        nn = 16'(t) * 16'(TGS) + 16'(j);
        active[g][j] = (bt < (LG+1)'(cfg.nb_act)) && (nn < 16'(cfg.nn_act));
      end
    end
  end

  assign mac_en   = v1 ? active : '0;
  assign mac_clr  = v1 && (idx == 16'd0);
  assign mac_prop = (state == C_PROP);

  // ---- write-back addressing ----------------------------------------------
  always_comb begin
    logic [15:0] gn;
    gn       = cfg.n_base + n;
    wb_valid = (state == C_WB);
    wb_row   = $bits(wb_row)'(cfg.wr_base) + $bits(wb_row)'(gn >> (LFW - int'(cfg.ko)));
    wb_off   = LFW'(gn) & LFW'((FM_WORDS >> cfg.ko) - 1);
    col_sel  = LT'(n);
    tsel     = LG'(n >> LT);
  end

  assign busy = (state != C_IDLE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state        <= C_IDLE;
      pc           <= '0;
      cfg          <= '0;
      i0           <= '0;
      v1           <= 1'b0;
      idx          <= '0;
      n            <= '0;
      bank         <= 1'b0;
      done         <= 1'b0;
      n_rolls      <= '0;
      n_w_reads    <= '0;
      n_fm_reads   <= '0;
      n_mac_cycles <= '0;
    end else begin
      done <= 1'b0;
      v1   <= (state == C_COMP);
      idx  <= i0;
      if (w_re)  n_w_reads  <= n_w_reads + 1;
      if (fm_re) n_fm_reads <= n_fm_reads + 1;
      if (v1 || mac_prop) n_mac_cycles <= n_mac_cycles + 1;
      unique case (state)
        C_IDLE: if (start) begin
          pc    <= '0;
          state <= C_FETCH;
        end
        C_FETCH: begin
          cfg   <= sched[pc];
          i0    <= '0;
          state <= C_COMP;
        end
        C_COMP: begin
          if (i0 + 16'd1 >= cfg.n_in) state <= C_DRAIN;
          i0 <= i0 + 16'd1;
        end
        C_DRAIN: state <= C_PROP;
        C_PROP: begin
          n     <= '0;
          state <= C_WB;
        end
        C_WB: begin
          n <= n + 16'd1;
          if (n + 16'd1 >= 16'(cfg.nn_act)) begin
            n_rolls <= n_rolls + 1;
            if (cfg.swap) bank <= ~bank;
            if (cfg.last) begin
              done  <= 1'b1;
              state <= C_IDLE;
            end else begin
              pc    <= pc + 1'b1;
              state <= C_FETCH;
            end
          end
        end
        default: state <= C_IDLE;
      endcase
    end
  end

  // ---- rules of a schedule entry -------------------------------------------
  always_ff @(posedge clk) begin
    if (state == C_COMP && i0 == 16'd0) begin
      assert (int'(cfg.kcfg) <= LG && int'(cfg.kcfg) >= LA - LWW)
        else $error("K = %0d not supported by this array", 1 << cfg.kcfg);
      assert (cfg.n_in != 0) else $error("roll without inputs");
      assert (int'(cfg.nb_act) <= (1 << cfg.kcfg) && cfg.nb_act != 0)
        else $error("more batches than K");
      assert (int'(cfg.nn_act) <= ((NTG * TGS) >> cfg.kcfg) && cfg.nn_act != 0)
        else $error("more neurons than N");
    end
  end
endmodule
