// tb_tcd_group: one TCD-MAC group of 8 MACs. Every stream broadcasts one
// feature per cycle and gives each MAC its own weight; after the propagation
// cycle each column is read through the group's output bus and compared with
// the dot product computed here. MACs whose enable is low during a stream must
// keep (and re-present) their previous result.
module tb_tcd_group;
  localparam int DW = 16, ACC_W = 36, TGS = 8;
  logic clk = 0, rst_n = 0;
  logic [TGS-1:0] en;
  logic clr, prop;
  logic [DW-1:0] feat;
  logic [TGS-1:0][DW-1:0] w;
  logic [$clog2(TGS)-1:0] col_sel;
  logic [ACC_W-1:0] bus;
  int checks = 0, failures = 0;
  longint expv [TGS];

  tcd_group #(.DW(DW), .ACC_W(ACC_W), .TGS(TGS)) dut (.*);
  always #5 clk = ~clk;

  initial begin : watchdog
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic stream(int n, logic [TGS-1:0] mask);
    longint acc [TGS];
    foreach (acc[j]) acc[j] = 0;
    for (int i = 0; i < n; i++) begin
      feat <= DW'($urandom);
      for (int j = 0; j < TGS; j++) w[j] <= DW'($urandom);
      en <= mask; clr <= (i == 0); prop <= 0;
      @(posedge clk);
      for (int j = 0; j < TGS; j++) acc[j] += longint'(signed'(feat)) * longint'(signed'(w[j]));
    end
    en <= '0; clr <= 0; prop <= 1;
    @(posedge clk);
    prop <= 0;
    for (int j = 0; j < TGS; j++) if (mask[j]) expv[j] = acc[j];
    for (int j = 0; j < TGS; j++) begin
      col_sel = j[$clog2(TGS)-1:0];
      #1;
      checks++;
      if (bus !== ACC_W'(expv[j])) begin
        failures++;
        $display("FAIL col %0d bus %h exp %h", j, bus, ACC_W'(expv[j]));
      end
    end
  endtask

  initial begin
    en = 0; clr = 0; prop = 0; feat = 0; w = '0; col_sel = 0;
    foreach (expv[j]) expv[j] = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    @(posedge clk);
    stream(20, '1);
    for (int k = 0; k < 30; k++) stream($urandom_range(1, 60), TGS'($urandom));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
