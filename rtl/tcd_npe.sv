// tcd_npe: top level of the TCD-NPE neural processing engine.
//
// A 16 x 8 array of TCD-MACs (16 groups of 8) computes fully connected MLP
// layers with an output-stationary data flow: each MAC accumulates one output
// neuron over all I input features in carry-deferring mode and resolves it in
// one extra carry-propagation cycle (I+1 cycles per roll). The array is
// re-configured per roll as NPE(K,N), K batches of N = 128/K neurons,
// K in {1,2,4,8,16}. Per roll the weights come from W-Mem through the weight
// LDN, the features of K batches from the input bank of the ping-pong FM-Mem
// through the feature LDN; the results pass the per-group quantisation/ReLU
// units and the write LDN into the other FM bank.
//
// Host side, all plain valid/ready streams:
//   * schedule: sched_we/sched_addr/sched_data load roll descriptors, `start`
//     runs them, `done` pulses at the end (busy high meanwhile);
//   * weight load: w_ld_start sets a start word address (row*W_WORDS+word),
//     then run-length tokens on w_tok_* are decoded into consecutive words;
//   * feature load: the same on fm_tok_* into bank fm_ld_bank;
//   * feature dump: fm_dump_start reads fm_dump_len words of bank fm_dump_bank
//     from word address fm_dump_addr and returns them run-length coded on
//     fm_out_* (fm_dump_busy falls once the last word is in the encoder).
// The host must not load or dump while busy. The DRAM itself, the mapper and
// the supply domains of the original implementation are outside this module.
module tcd_npe
  import tcd_pkg::sched_entry_t;
#(
  parameter int NTG      = tcd_pkg::NTG,
  parameter int TGS      = tcd_pkg::TGS,
  parameter int DW       = tcd_pkg::DW,
  parameter int ACC_W    = tcd_pkg::ACC_W,
  parameter int W_ROWS   = tcd_pkg::W_ROWS,
  parameter int W_WORDS  = tcd_pkg::W_WORDS,
  parameter int FM_ROWS  = tcd_pkg::FM_ROWS,
  parameter int FM_WORDS = tcd_pkg::FM_WORDS,
  parameter int DEPTH    = tcd_pkg::SCHED_DEPTH,
  parameter int RUN_W    = tcd_pkg::RUN_W,
  localparam int WA      = $clog2(W_ROWS * W_WORDS),
  localparam int FA      = $clog2(FM_ROWS * FM_WORDS)
) (
  input  logic                       clk,
  input  logic                       rst_n,
  // schedule and control
  input  logic                       sched_we,
  input  logic [$clog2(DEPTH)-1:0]   sched_addr,
  input  sched_entry_t               sched_data,
  input  logic                       start,
  output logic                       busy,
  output logic                       done,
  output logic                       bank,
  // weight load (from DRAM, run-length coded)
  input  logic                       w_ld_start,
  input  logic [WA-1:0]              w_ld_addr,
  input  logic                       w_tok_valid,
  output logic                       w_tok_ready,
  input  logic [RUN_W+DW-1:0]        w_tok,
  // feature load (from DRAM, run-length coded)
  input  logic                       fm_ld_start,
  input  logic                       fm_ld_bank,
  input  logic [FA-1:0]              fm_ld_addr,
  input  logic                       fm_tok_valid,
  output logic                       fm_tok_ready,
  input  logic [RUN_W+DW-1:0]        fm_tok,
  // feature dump (to DRAM, run-length coded)
  input  logic                       fm_dump_start,
  input  logic                       fm_dump_bank,
  input  logic [FA-1:0]              fm_dump_addr,
  input  logic [15:0]                fm_dump_len,
  output logic                       fm_dump_busy,
  output logic                       fm_out_valid,
  input  logic                       fm_out_ready,
  output logic [RUN_W+DW-1:0]        fm_out,
  // activity counters
  output logic [31:0]                n_rolls,
  output logic [31:0]                n_w_reads,
  output logic [31:0]                n_fm_reads,
  output logic [31:0]                n_mac_cycles
);
  localparam int LWW = $clog2(W_WORDS);
  localparam int LFW = $clog2(FM_WORDS);

  // ---- controller ------------------------------------------------------------
  sched_entry_t                       cfg;
  logic [15:0]                        idx;
  logic [NTG-1:0][TGS-1:0]            mac_en;
  logic                               mac_clr, mac_prop;
  logic [$clog2(TGS)-1:0]             col_sel;
  logic [$clog2(NTG)-1:0]             tsel;
  logic                               c_w_re, c_fm_re, wb_valid;
  logic [$clog2(W_ROWS)-1:0]          c_w_row;
  logic [$clog2(FM_ROWS)-1:0]         c_fm_row, wb_row;
  logic [LFW-1:0]                     wb_off;

  controller #(.NTG(NTG), .TGS(TGS), .W_ROWS(W_ROWS), .W_WORDS(W_WORDS),
               .FM_ROWS(FM_ROWS), .FM_WORDS(FM_WORDS), .DEPTH(DEPTH)) u_ctrl (
    .clk, .rst_n, .sched_we, .sched_addr, .sched_data, .start, .busy, .done, .bank,
    .w_re(c_w_re), .w_row(c_w_row), .fm_re(c_fm_re), .fm_row(c_fm_row),
    .cfg, .idx, .mac_en, .mac_clr, .mac_prop, .col_sel, .tsel,
    .wb_valid, .wb_row, .wb_off,
    .n_rolls, .n_w_reads, .n_fm_reads, .n_mac_cycles);

  // ---- memories --------------------------------------------------------------
  logic [W_WORDS-1:0][DW-1:0]   w_row_q;
  logic [FM_WORDS-1:0][DW-1:0]  fm_row_q;
  logic                         w_we;
  logic [WA-1:0]                w_wa;
  logic [DW-1:0]                w_wd;
  logic                         fm_we, fm_wr_bank, fm_re, fm_rd_bank;
  logic [$clog2(FM_ROWS)-1:0]   fm_wr_row, fm_rd_row;
  logic [FM_WORDS-1:0]          fm_wr_mask;
  logic [FM_WORDS-1:0][DW-1:0]  fm_wr_data;

  w_mem #(.DW(DW), .ROWS(W_ROWS), .WORDS(W_WORDS)) u_wmem (
    .clk, .rst_n, .we(w_we), .wr_row(w_wa[WA-1:LWW]), .wr_word(w_wa[LWW-1:0]),
    .wr_data(w_wd), .re(c_w_re), .rd_row(c_w_row), .row(w_row_q));

  fm_mem #(.DW(DW), .ROWS(FM_ROWS), .WORDS(FM_WORDS)) u_fmem (
    .clk, .rst_n, .we(fm_we), .wr_bank(fm_wr_bank), .wr_row(fm_wr_row),
    .wr_mask(fm_wr_mask), .wr_data(fm_wr_data),
    .re(fm_re), .rd_bank(fm_rd_bank), .rd_row(fm_rd_row), .row(fm_row_q));

  // ---- LDNs and PE array -----------------------------------------------------
  logic [NTG-1:0][DW-1:0]           feat, q;
  logic [NTG-1:0][TGS-1:0][DW-1:0]  wts;
  logic [FM_WORDS-1:0][DW-1:0]      wb_data;
  logic [FM_WORDS-1:0]              wb_mask;

  ldn_fm_rd #(.DW(DW), .NTG(NTG), .WORDS(FM_WORDS)) u_ldn_fm_rd (
    .row(fm_row_q), .kcfg(cfg.kcfg), .ki(cfg.ki), .rd_seg(cfg.rd_seg), .idx, .feat);

  ldn_w #(.DW(DW), .NTG(NTG), .TGS(TGS), .WORDS(W_WORDS)) u_ldn_w (
    .row(w_row_q), .kcfg(cfg.kcfg), .idx, .w(wts));

  pe_array #(.DW(DW), .ACC_W(ACC_W), .NTG(NTG), .TGS(TGS)) u_pe (
    .clk, .rst_n, .en(mac_en), .clr(mac_clr), .prop(mac_prop),
    .feat, .w(wts), .col_sel, .relu(cfg.relu), .q);

  ldn_fm_wr #(.DW(DW), .NTG(NTG), .WORDS(FM_WORDS)) u_ldn_fm_wr (
    .q, .kcfg(cfg.kcfg), .tsel, .ko(cfg.ko), .wr_seg(cfg.wr_seg), .off(wb_off),
    .nb_act(cfg.nb_act), .valid(wb_valid), .wdata(wb_data), .wmask(wb_mask));

  // ---- DRAM side: run-length decoders and the weight / feature loaders ------
  logic            wd_valid, fd_valid;
  logic [DW-1:0]   wd_data, fd_data;
  logic [FA-1:0]   f_la;
  logic            f_lbank;

  rlc_decoder #(.DW(DW), .RUN_W(RUN_W)) u_wdec (
    .clk, .rst_n, .tok_valid(w_tok_valid), .tok_ready(w_tok_ready), .tok(w_tok),
    .o_valid(wd_valid), .o_data(wd_data));

  rlc_decoder #(.DW(DW), .RUN_W(RUN_W)) u_fdec (
    .clk, .rst_n, .tok_valid(fm_tok_valid), .tok_ready(fm_tok_ready), .tok(fm_tok),
    .o_valid(fd_valid), .o_data(fd_data));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      w_wa    <= '0;
      f_la    <= '0;
      f_lbank <= 1'b0;
    end else begin
      if (w_ld_start)    w_wa <= w_ld_addr;
      else if (wd_valid) w_wa <= w_wa + 1'b1;
      if (fm_ld_start) begin
        f_la    <= fm_ld_addr;
        f_lbank <= fm_ld_bank;
      end else if (fd_valid) begin
        f_la    <= f_la + 1'b1;
      end
    end
  end

  assign w_we = wd_valid;
  assign w_wd = wd_data;

  // ---- feature dump: one word per two cycles into the run-length encoder ----
  typedef enum logic [1:0] {D_IDLE, D_READ, D_SEND} dump_state_t;
  dump_state_t     dstate;
  logic [FA-1:0]   d_addr;
  logic [15:0]     d_left;
  logic            d_bank;
  logic            e_valid, e_ready, e_last;
  logic [DW-1:0]   e_data;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      dstate <= D_IDLE;
      d_addr <= '0;
      d_left <= '0;
      d_bank <= 1'b0;
    end else begin
      unique case (dstate)
        D_IDLE: if (fm_dump_start && fm_dump_len != 16'd0) begin
          d_addr <= fm_dump_addr;
          d_left <= fm_dump_len;
          d_bank <= fm_dump_bank;
          dstate <= D_READ;
        end
        D_READ: dstate <= D_SEND;
        D_SEND: if (e_ready) begin
          d_addr <= d_addr + 1'b1;
          d_left <= d_left - 16'd1;
          dstate <= (d_left == 16'd1) ? D_IDLE : D_READ;
        end
        default: dstate <= D_IDLE;
      endcase
    end
  end

  assign e_valid      = (dstate == D_SEND);
  assign e_data       = fm_row_q[d_addr[LFW-1:0]];
  assign e_last       = (d_left == 16'd1);
  assign fm_dump_busy = (dstate != D_IDLE);

  rlc_encoder #(.DW(DW), .RUN_W(RUN_W)) u_enc (
    .clk, .rst_n, .i_valid(e_valid), .i_ready(e_ready), .i_data(e_data), .i_last(e_last),
    .t_valid(fm_out_valid), .t_ready(fm_out_ready), .t_data(fm_out));

  // ---- FM-Mem port sharing: the controller while busy, the host otherwise ---
  always_comb begin
    if (busy) begin
      fm_re      = c_fm_re;
      fm_rd_bank = bank;
      fm_rd_row  = c_fm_row;
      fm_we      = wb_valid;
      fm_wr_bank = ~bank;
      fm_wr_row  = wb_row;
      fm_wr_mask = wb_mask;
      fm_wr_data = wb_data;
    end else begin
      fm_re      = (dstate == D_READ);
      fm_rd_bank = d_bank;
      fm_rd_row  = d_addr[FA-1:LFW];
      fm_we      = fd_valid;
      fm_wr_bank = f_lbank;
      fm_wr_row  = f_la[FA-1:LFW];
      fm_wr_mask = FM_WORDS'(1) << f_la[LFW-1:0];
      fm_wr_data = {FM_WORDS{fd_data}};
    end
  end

  a_no_load_while_busy: assert property (@(posedge clk) disable iff (!rst_n)
                                         busy |-> !fd_valid && !wd_valid && dstate == D_IDLE);
endmodule
