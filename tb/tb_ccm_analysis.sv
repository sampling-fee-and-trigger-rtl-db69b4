// tb_ccm_analysis: sends leading/trailing hit-word pairs with known coarse
// times (including wrap-around of the coarse counter and ToTs beyond the
// last bin), plus unpaired words that must be ignored, and compares the ToT
// events and the whole histogram with the bench's own counts; then checks
// the clear.
module tb_ccm_analysis;
  import daq_pkg::*;

  localparam int N_BINS = 64;

  logic clk = 1'b0, rst_n = 1'b0, clr = 1'b0, hit_v = 1'b0;
  hit_word_t hit = '0;
  logic clr_busy, tot_v;
  coarse_t tot;
  logic [CH_W-1:0] tot_ch;
  logic [$clog2(N_BINS)-1:0] rd_bin = '0;
  logic [31:0] rd_data;
  int checks = 0, failures = 0;
  int hist [N_BINS];
  int n_tot = 0, exp_tot[$];

  ccm_analysis #(.N_BINS(N_BINS)) dut (
    .clk, .rst_n, .hit_v_i(hit_v), .hit_i(hit), .clr_i(clr), .clr_busy_o(clr_busy),
    .tot_v_o(tot_v), .tot_o(tot), .tot_ch_o(tot_ch), .rd_bin_i(rd_bin), .rd_data_o(rd_data));

  always #5 clk = ~clk;

  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", what); end
  endtask

  always @(posedge clk) if (rst_n && tot_v) begin
    int e;
    e = exp_tot.pop_front();
    check(int'(tot) == e, $sformatf("tot %0d exp %0d", tot, e));
    n_tot++;
  end

  task automatic word(input bit lead, input int ch, input int coarse);
    hit_v = 1'b1;
    hit = '{rsv: 1'b0, lead: lead, ch: CH_W'(ch), coarse: coarse_t'(coarse), fine: fine_t'($urandom)};
    @(negedge clk);
    hit_v = 1'b0;
    if ($urandom % 2) @(negedge clk);
  endtask

  task automatic check_hist();
    for (int b = 0; b < N_BINS; b++) begin
      rd_bin = b[$clog2(N_BINS)-1:0];
      #1 check(rd_data == 32'(hist[b]), $sformatf("bin %0d: %0d exp %0d", b, rd_data, hist[b]));
    end
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int pairs = 0;
    foreach (hist[b]) hist[b] = 0;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    while (clr_busy) @(negedge clk);
    for (int i = 0; i < 300; i++) begin
      int ch, t0, w;
      ch = $urandom % 192;
      t0 = $urandom % 4096;               // may wrap
      w  = (i % 10 == 0) ? 64 + $urandom % 200 : $urandom % 64;
      word(1'b1, ch, t0);
      if (i % 13 == 5) begin
        word(1'b0, (ch + 1) % 192, t0 + w);   // other channel: no pair
        continue;
      end
      exp_tot.push_back(w % 4096);
      word(1'b0, ch, t0 + w);
      if (i % 17 == 3) word(1'b0, ch, t0 + w + 5); // second trail: no lead left
      hist[w >= N_BINS ? N_BINS - 1 : w]++;
      pairs++;
    end
    repeat (3) @(negedge clk);
    check(n_tot == pairs, $sformatf("ToT events %0d exp %0d", n_tot, pairs));
    check_hist();
    @(negedge clk);
    clr = 1'b1; @(negedge clk); clr = 1'b0;
    while (clr_busy) @(negedge clk);
    foreach (hist[b]) hist[b] = 0;
    check_hist();
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
