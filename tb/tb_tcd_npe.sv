// tb_tcd_npe: end-to-end test of the TCD-NPE at its full default size
// (16 x 8 TCD-MACs, 512 KB W-Mem, 2 x 64 KB FM-Mem).
//
// For each MLP the test acts as host and off-chip mapper: it draws random
// 16-bit weights and input features, lays the weights out in W-Mem rows
// (the N weights of W_WORDS/N consecutive inputs per row) and the features
// of every batch in its own FM partition, sends both through the run-length
// coded load streams, writes one schedule entry per roll of NPE(K,N) and
// runs it. The output layer is then dumped through the run-length encoder and
// compared with a reference computed here: for every layer
//   y[b][n] = sat16(floor(sum_i x[b][i] * w[i][n] / 2^9)), ReLU on hidden layers.
// The MLPs are topologies of the benchmark set (Iris 4:10:5:3, FFT 8:140:2,
// Poker Hands 10:85:50:10, Adult 14:48:2, Wine 13:10:3) with small batches, mapped so that every
// configuration K = 1, 2, 4, 8, 16 is used. Each mechanism of the engine is
// counted and must occur at least once: every K, layers split over several
// neuron blocks and several batch groups, switched-off MACs, W-Buffer and
// FM-Buffer row reuse, ping-pong bank swaps, quantiser saturation, ReLU
// clipping, zero runs in the load and dump streams. The MAC-cycle counter
// must equal sum(I+1) over all rolls, and the run time must match the
// schedule (fetch + I + drain + propagate + one write-back cycle per neuron,
// plus the start cycle and the registered done).
// Weights of the Iris run span the whole 16-bit range to drive the quantiser
// into saturation.
module tb_tcd_npe
  import tcd_pkg::*;
;
  logic clk = 0, rst_n = 0;
  logic sched_we, start, busy, done, bank;
  logic [5:0] sched_addr;
  sched_entry_t sched_data;
  logic w_ld_start, w_tok_valid, w_tok_ready;
  logic [17:0] w_ld_addr;
  logic [TOK_W-1:0] w_tok, fm_tok, fm_out;
  logic fm_ld_start, fm_ld_bank, fm_tok_valid, fm_tok_ready;
  logic [14:0] fm_ld_addr, fm_dump_addr;
  logic fm_dump_start, fm_dump_bank, fm_dump_busy, fm_out_valid, fm_out_ready;
  logic [15:0] fm_dump_len;
  logic [31:0] n_rolls, n_w_reads, n_fm_reads, n_mac_cycles;

  tcd_npe dut (.*);
  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  int cnt_k [5];
  int cnt_multi_block = 0, cnt_multi_group = 0, cnt_idle_macs = 0, cnt_wbuf_reuse = 0;
  int cnt_fbuf_reuse = 0, cnt_swap = 0, cnt_sat = 0, cnt_relu = 0, cnt_zrun_in = 0, cnt_zrun_out = 0;

  initial begin : watchdog
    repeat (3000000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  // ---- run-length coded streams -------------------------------------------
  task automatic send_tokens(ref logic [DW-1:0] words [$], input bit is_w);
    int k, run;
    k = 0;
    while (k < words.size()) begin
      run = 0;
      while (k + run < words.size() - 1 && words[k + run] == 0 && run < 255) run++;
      if (run > 0) cnt_zrun_in++;
      if (is_w) begin w_tok_valid <= 1; w_tok <= {RUN_W'(run), words[k + run]}; end
      else      begin fm_tok_valid <= 1; fm_tok <= {RUN_W'(run), words[k + run]}; end
      @(posedge clk);
      while (!(is_w ? w_tok_ready : fm_tok_ready)) @(posedge clk);
      k += run + 1;
    end
    w_tok_valid <= 0; fm_tok_valid <= 0;
    repeat (260) @(posedge clk);           // let the last token drain
  endtask

  task automatic load_w(int addr, ref logic [DW-1:0] words [$]);
    w_ld_start <= 1; w_ld_addr <= 18'(addr);
    @(posedge clk);
    w_ld_start <= 0;
    send_tokens(words, 1);
  endtask

  task automatic load_fm(bit bk, int addr, ref logic [DW-1:0] words [$]);
    fm_ld_start <= 1; fm_ld_bank <= bk; fm_ld_addr <= 15'(addr);
    @(posedge clk);
    fm_ld_start <= 0;
    send_tokens(words, 0);
  endtask

  task automatic dump_fm(bit bk, int addr, int len, ref logic [DW-1:0] words [$]);
    words.delete();
    fm_dump_start <= 1; fm_dump_bank <= bk; fm_dump_addr <= 15'(addr); fm_dump_len <= 16'(len);
    @(posedge clk);
    fm_dump_start <= 0;
    while (words.size() < len) begin
      fm_out_ready <= ($urandom_range(0, 3) != 0);
      @(posedge clk);
      if (fm_out_valid && fm_out_ready) begin
        if (fm_out[TOK_W-1:DW] != 0) cnt_zrun_out++;
        for (int z = 0; z < int'(fm_out[TOK_W-1:DW]); z++) words.push_back('0);
        words.push_back(fm_out[DW-1:0]);
      end
    end
    fm_out_ready <= 0;
    @(posedge clk);
    chk(!fm_dump_busy && !fm_out_valid, "dump ends with its last token");
  endtask

  // ---- reference quantiser ------------------------------------------------
  function automatic int qa(longint v, bit r);
    v = v >>> 9;
    if (v > 32767) v = 32767;
    if (v < -32768) v = -32768;
    if (r && v < 0) v = 0;
    return int'(v);
  endfunction

  // ---- one MLP: map, load, run, check ---------------------------------------
  task automatic run_mlp(string name, int topo [$], int nb, int kforce [$], int wmax);
    int x [][];                          // activations [batch][feature]
    int y [][];
    int nl, wrow, nent, kpart, exp_cycles, exp_mac, sum_in, t0, cyc, bank_start;
    sched_entry_t ents [$];
    logic [DW-1:0] img [$];
    logic [DW-1:0] res [$];
    bit bk;

    nl = topo.size() - 1;
    kpart = 1;
    while (kpart < nb) kpart *= 2;      // FM partitions: one per batch
    x = new [nb];
    foreach (x[b]) begin
      x[b] = new [topo[0]];
      foreach (x[b][i]) x[b][i] = $urandom_range(0, 1023) - 512;
    end
    // input features, batch b in partition b of kpart
    begin
      int sw, rows;
      sw = FM_WORDS / kpart;
      rows = (topo[0] + sw - 1) / sw;
      img.delete();
      for (int w = 0; w < rows * FM_WORDS; w++) img.push_back('0);
      foreach (x[b]) foreach (x[b][i]) img[(i / sw) * FM_WORDS + b * sw + i % sw] = DW'(x[b][i]);
      bk = bank;
      load_fm(bk, 0, img);
    end

    wrow = 0;
    ents.delete();
    exp_cycles = 2; exp_mac = 0;    // start cycle + registered done sum_in = 0;
    for (int l = 0; l < nl; l++) begin
      int ni, nh, k, n, per, rpb, nblk, ngrp;
      int w [][];
      ni = topo[l]; nh = topo[l + 1];
      k = kforce[l];
      n = (NTG * TGS) >> k;
      per = W_WORDS / n;
      rpb = (ni + per - 1) / per;
      nblk = (nh + n - 1) / n;
      ngrp = (nb + (1 << k) - 1) / (1 << k);
      cnt_k[k]++;
      if (nblk > 1) cnt_multi_block++;
      if (ngrp > 1) cnt_multi_group++;
      if (per > 1 && ni > 1) cnt_wbuf_reuse++;
      if (FM_WORDS / kpart > 1 && ni > 1) cnt_fbuf_reuse++;
      w = new [ni];
      foreach (w[i]) begin
        w[i] = new [nh];
        foreach (w[i][h]) w[i][h] = $urandom_range(0, 2 * wmax - 1) - wmax;
      end
      // weights: block nb_i, input i -> row wrow + nb_i*rpb + i/per, word (i%per)*n + h%n
      img.delete();
      for (int q = 0; q < nblk * rpb * W_WORDS; q++) img.push_back('0);
      foreach (w[i]) foreach (w[i][h])
        img[((h / n) * rpb + i / per) * W_WORDS + (i % per) * n + h % n] = DW'(w[i][h]);
      if (wrow + nblk * rpb > W_ROWS) $fatal(1, "weights do not fit");
      load_w(wrow * W_WORDS, img);
      for (int bi = 0; bi < nblk; bi++)
        for (int g = 0; g < ngrp; g++) begin
          sched_entry_t e;
          e = '0;
          e.kcfg = 3'(k); e.n_in = 16'(ni); e.w_base = 11'(wrow + bi * rpb);
          e.ki = 3'($clog2(kpart)); e.rd_seg = 5'(g << k); e.rd_base = 0;
          e.ko = 3'($clog2(kpart)); e.wr_seg = 5'(g << k); e.wr_base = 0;
          e.n_base = 16'(bi * n);
          e.nb_act = 5'(((nb - (g << k)) < (1 << k)) ? nb - (g << k) : (1 << k));
          e.nn_act = 8'(((nh - bi * n) < n) ? nh - bi * n : n);
          e.relu = (l != nl - 1);
          e.swap = (bi == nblk - 1) && (g == ngrp - 1);
          e.last = e.swap && (l == nl - 1);
          if (int'(e.nb_act) * int'(e.nn_act) < NTG * TGS) cnt_idle_macs++;
          exp_cycles += 3 + ni + int'(e.nn_act);
          exp_mac += ni + 1;
          sum_in += ni;
          ents.push_back(e);
        end
      wrow += nblk * rpb;
      // reference layer
      y = new [nb];
      foreach (y[b]) begin
        y[b] = new [nh];
        foreach (y[b][h]) begin
          longint acc;
          acc = 0;
          for (int i = 0; i < ni; i++) acc += longint'(x[b][i]) * longint'(w[i][h]);
          y[b][h] = qa(acc, l != nl - 1);
          if (y[b][h] == 32767 || y[b][h] == -32768) cnt_sat++;
          if (l != nl - 1 && qa(acc, 0) < 0) cnt_relu++;
        end
      end
      x = y;
    end
    if (ents.size() > SCHED_DEPTH) $fatal(1, "schedule too long");

    foreach (ents[q]) begin
      sched_we <= 1; sched_addr <= 6'(q); sched_data <= ents[q];
      @(posedge clk);
    end
    sched_we <= 0;
    begin
      int r0, w0, f0, m0;
      r0 = n_rolls; w0 = n_w_reads; f0 = n_fm_reads; m0 = n_mac_cycles;
      bank_start = bank;
      start <= 1;
      t0 = $time / 10;
      @(posedge clk);
      start <= 0;
      while (!done) @(posedge clk);
      cyc = $time / 10 - t0;
      chk(cyc == exp_cycles, $sformatf("%s: %0d cycles, schedule gives %0d", name, cyc, exp_cycles));
      chk(int'(n_mac_cycles) - m0 == exp_mac, $sformatf("%s: MAC cycles %0d, sum(I+1) = %0d",
                                                       name, int'(n_mac_cycles) - m0, exp_mac));
      chk(int'(n_rolls) - r0 == ents.size(), $sformatf("%s: rolls", name));
      chk(int'(n_w_reads) - w0 < sum_in, $sformatf("%s: W-Mem reads %0d for %0d inputs", name, int'(n_w_reads) - w0, sum_in));
      chk(int'(n_fm_reads) - f0 < sum_in, $sformatf("%s: FM-Mem reads %0d for %0d inputs", name, int'(n_fm_reads) - f0, sum_in));
      chk(int'(bank) == (bank_start ^ (nl % 2)), $sformatf("%s: bank after %0d layers", name, nl));
      cnt_swap += nl;
      $display("%s: %0d rolls, %0d cycles, %0d W reads, %0d FM reads for %0d inputs",
               name, ents.size(), cyc, int'(n_w_reads) - w0, int'(n_fm_reads) - f0, sum_in);
    end
    @(posedge clk);
    // output layer, batch b / neuron h at row h/sw, word b*sw + h%sw
    begin
      int sw, rows, no, bad;
      no = topo[nl];
      sw = FM_WORDS / kpart;
      rows = (no + sw - 1) / sw;
      dump_fm(bank, 0, rows * FM_WORDS, res);
      bad = 0;
      foreach (x[b]) foreach (x[b][h]) begin
        checks++;
        if (int'(signed'(res[(h / sw) * FM_WORDS + b * sw + h % sw])) != x[b][h]) begin
          failures++;
          if (bad++ < 5) $display("FAIL %s batch %0d neuron %0d: %0d exp %0d", name, b, h,
                                  int'(signed'(res[(h / sw) * FM_WORDS + b * sw + h % sw])), x[b][h]);
        end
      end
    end
  endtask

  initial begin
    sched_we = 0; start = 0; sched_addr = 0; sched_data = '0;
    w_ld_start = 0; w_ld_addr = 0; w_tok_valid = 0; w_tok = '0;
    fm_ld_start = 0; fm_ld_bank = 0; fm_ld_addr = 0; fm_tok_valid = 0; fm_tok = '0;
    fm_dump_start = 0; fm_dump_bank = 0; fm_dump_addr = 0; fm_dump_len = 0; fm_out_ready = 0;
    foreach (cnt_k[k]) cnt_k[k] = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    repeat (2) @(posedge clk);
    run_mlp("Iris 4:10:5:3, B=3",        '{4, 10, 5, 3},       3, '{4, 3, 0}, 32768);
    run_mlp("FFT 8:140:2, B=2",          '{8, 140, 2},         2, '{0, 1}, 256);
    run_mlp("Poker 10:85:50:10, B=5",    '{10, 85, 50, 10},    5, '{1, 2, 4}, 256);
    run_mlp("Adult 14:48:2, B=4",        '{14, 48, 2},         4, '{2, 1}, 256);
    run_mlp("Wine 13:10:3, B=8",         '{13, 10, 3},         8, '{3, 3}, 256);
    foreach (cnt_k[k]) chk(cnt_k[k] > 0, $sformatf("configuration K=%0d used", 1 << k));
    chk(cnt_multi_block > 0, "layer split over neuron blocks");
    chk(cnt_multi_group > 0, "layer split over batch groups");
    chk(cnt_idle_macs > 0, "rolls with switched-off MACs");
    chk(cnt_wbuf_reuse > 0, "W-Buffer row reuse");
    chk(cnt_fbuf_reuse > 0, "FM-Buffer row reuse");
    chk(cnt_swap > 0, "FM bank swaps");
    chk(cnt_sat > 0, "quantiser saturation");
    chk(cnt_relu > 0, "ReLU clipping");
    chk(cnt_zrun_in > 0, "zero runs in load streams");
    chk(cnt_zrun_out > 0, "zero runs in the dump stream");
    $display("mechanisms: K=%p blocks=%0d groups=%0d idle=%0d wbuf=%0d fbuf=%0d swaps=%0d sat=%0d relu=%0d zin=%0d zout=%0d",
             cnt_k, cnt_multi_block, cnt_multi_group, cnt_idle_macs, cnt_wbuf_reuse, cnt_fbuf_reuse,
             cnt_swap, cnt_sat, cnt_relu, cnt_zrun_in, cnt_zrun_out);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
