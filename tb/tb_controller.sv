// tb_controller: the schedule FSM at the default array size. A schedule of
// rolls with different NPE(K,N) configurations is loaded and run; for every
// roll the test counts, from the controller's outputs alone:
//   - MAC cycles: I carry-deferring cycles followed by exactly one
//     propagation cycle (I + 1 per roll) that carries no product, clr only
//     on the first;
//   - W-Mem and FM-Mem row reads: ceil(I / (128/N)) and ceil(I / (64/KI));
//   - enabled MACs per cycle: nb_act * nn_act;
//   - write-back cycles: nn_act, with the row / offset of neuron n_base + n;
// and checks the bank swap and the done pulse.
module tb_controller
  import tcd_pkg::*;
;
  logic clk = 0, rst_n = 0;
  logic sched_we, start, busy, done, bank;
  logic [5:0] sched_addr;
  sched_entry_t sched_data, cfg;
  logic w_re, fm_re, mac_clr, mac_prop, wb_valid;
  logic [10:0] w_row;
  logic [8:0] fm_row, wb_row;
  logic [15:0] idx;
  logic [15:0][7:0] mac_en;
  logic [2:0] col_sel;
  logic [3:0] tsel;
  logic [5:0] wb_off;
  logic [31:0] n_rolls, n_w_reads, n_fm_reads, n_mac_cycles;
  int checks = 0, failures = 0;

  controller dut (.*);
  always #5 clk = ~clk;

  initial begin : watchdog
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  sched_entry_t ents [$];

  task automatic chk(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  function automatic sched_entry_t mk(int k, int n_in, int ki, int ko, int nb, int nn, int nbase,
                                      bit swap, bit last);
    sched_entry_t e;
    e = '0;
    e.kcfg = 3'(k); e.n_in = 16'(n_in); e.w_base = 11'($urandom_range(0, 100));
    e.ki = 3'(ki); e.rd_seg = 0; e.rd_base = 9'($urandom_range(0, 50));
    e.ko = 3'(ko); e.wr_seg = 0; e.wr_base = 9'($urandom_range(0, 50));
    e.n_base = 16'(nbase); e.nb_act = 5'(nb); e.nn_act = 8'(nn);
    e.relu = 1; e.swap = swap; e.last = last;
    return e;
  endfunction

  initial begin
    int wr, fr, mc, pc, wb, clr_n, en_bad, addr_bad, roll;
    bit bank0;
    sched_we = 0; start = 0; sched_addr = 0; sched_data = '0;
    ents.push_back(mk(0, 40, 0, 1, 1, 100, 0, 0, 0));     // NPE(1,128)
    ents.push_back(mk(1, 70, 1, 1, 2, 64, 100, 1, 0));    // NPE(2,64), as in the memory example
    ents.push_back(mk(2, 9, 2, 2, 3, 20, 0, 0, 0));       // NPE(4,32)
    ents.push_back(mk(4, 33, 4, 4, 16, 8, 8, 1, 0));      // NPE(16,8)
    ents.push_back(mk(3, 1, 3, 3, 5, 16, 0, 1, 1));       // NPE(8,16), one input
    repeat (2) @(posedge clk);
    rst_n = 1;
    foreach (ents[k]) begin
      sched_we <= 1; sched_addr <= 6'(k); sched_data <= ents[k];
      @(posedge clk);
    end
    sched_we <= 0;
    bank0 = bank;
    start <= 1;
    @(posedge clk);
    start <= 0;
    foreach (ents[k]) begin
      sched_entry_t e;
      int per_w, per_f, sw_o, exp_en;
      e = ents[k];
      wr = 0; fr = 0; mc = 0; pc = 0; wb = 0; clr_n = 0; en_bad = 0; addr_bad = 0;
      per_w = 128 / (128 >> e.kcfg);
      per_f = 64 >> e.ki;
      sw_o  = 64 >> e.ko;
      exp_en = int'(e.nb_act) * int'(e.nn_act);
      // run until the write-back of this roll ends
      do begin
        @(posedge clk);
        #1;
        if (w_re) begin
          if (w_row != 11'(int'(e.w_base) + wr)) addr_bad++;   // consecutive rows
          wr++;
        end
        if (fm_re) begin
          if (fm_row != 9'(int'(e.rd_base) + fr)) addr_bad++;
          fr++;
        end
        if (|mac_en) begin
          mc++;
          if ($countones(mac_en) != exp_en) en_bad++;
        end
        if (mac_clr) clr_n++;
        if (mac_prop) begin
          pc++;
          if (mc != int'(e.n_in)) addr_bad++;
          if (|mac_en) addr_bad++;             // no product in the CPM cycle
        end
        if (wb_valid) begin
          int gn;
          gn = int'(e.n_base) + wb;
          if (wb_row != 9'(int'(e.wr_base) + gn / sw_o) || int'(wb_off) != gn % sw_o ||
              int'(col_sel) != wb % 8 || int'(tsel) != wb / 8) addr_bad++;
          wb++;
        end
      end while (!(wb_valid && wb == int'(e.nn_act)));
      chk(mc == int'(e.n_in) && pc == 1, $sformatf("roll %0d: %0d CDM + %0d CPM cycles for I=%0d", k, mc, pc, e.n_in));
      chk(wr == (int'(e.n_in) + per_w - 1) / per_w, $sformatf("roll %0d: %0d W reads", k, wr));
      chk(fr == (int'(e.n_in) + per_f - 1) / per_f, $sformatf("roll %0d: %0d FM reads", k, fr));
      chk(clr_n == 1, $sformatf("roll %0d: clr %0d times", k, clr_n));
      chk(en_bad == 0, $sformatf("roll %0d: wrong MAC enables in %0d cycles", k, en_bad));
      chk(addr_bad == 0, $sformatf("roll %0d: %0d address errors", k, addr_bad));
    end
    @(posedge clk);
    #1;
    chk(done == 1'b1, "done pulse");
    chk(bank == (bank0 ^ 1'b1), "three swaps leave the banks exchanged");
    chk(n_rolls == 32'(ents.size()), "roll counter");
    @(posedge clk);
    #1;
    chk(!busy && !done, "idle after done");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
