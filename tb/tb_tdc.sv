// tb_tdc: the 48-channel TDC at its defaults.  Random pulses (random widths,
// random fine codes) on all channels are recorded by the bench with the
// coarse time of a counter of its own that runs from reset like the TDC's.
// After each window the bench snapshots, reads every pending channel
// through the shared read port and compares each signal with its record.
// One channel receives more than 54 signals in one window to check the
// overflow flag.
module tb_tdc;
  import daq_pkg::*;

  localparam int N_CH = 48, DEPTH = 54;

  logic clk = 1'b0, rst_n = 1'b0;
  logic  [N_CH-1:0] hit = '0;
  fine_t [N_CH-1:0] fine = '0;
  logic snap = 1'b0, pop = 1'b0;
  logic [$clog2(N_CH)-1:0] rd_ch = '0;
  logic [N_CH-1:0] pending;
  signal_t head;
  logic ovf;
  int checks = 0, failures = 0;

  tdc dut (.clk, .rst_n, .hit_i(hit), .fine_i(fine), .snap_i(snap), .rd_ch_i(rd_ch),
           .pop_i(pop), .pending_o(pending), .head_o(head), .ovf_o(ovf));

  always #5 clk = ~clk;

  coarse_t cnt;
  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) cnt <= '0; else cnt <= cnt + 1'b1;

  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", what); end
  endtask

  // Pulse generator, one state per channel, acting on falling clock edges.
  signal_t expq [N_CH][$];
  int      remain [N_CH];
  signal_t cur [N_CH];
  bit      gen_on = 1'b0;
  int      burst_ch = -1;   // channel whose values are no longer compared
  bit      burst_on = 1'b0;

  always @(negedge clk) begin
    for (int c = 0; c < N_CH; c++) begin
      fine[c] = fine_t'($urandom);
      if (hit[c]) begin
        if (remain[c] == 0) begin
          hit[c] = 1'b0;
          cur[c].trail = '{coarse: cnt, fine: fine[c]};
          expq[c].push_back(cur[c]);
        end else remain[c]--;
      end else if (gen_on && ((burst_on && c == burst_ch) || ($urandom % 100) == 0)) begin
        hit[c] = 1'b1;
        remain[c] = $urandom % 4;
        cur[c].lead = '{coarse: cnt, fine: fine[c]};
      end
    end
  end

  // Snapshot and read back every pending signal.
  task automatic readout(input bit exp_ovf);
    @(negedge clk); snap = 1'b1;
    @(negedge clk); snap = 1'b0;
    check(ovf == exp_ovf, $sformatf("overflow flag %0d exp %0d", ovf, exp_ovf));
    for (int c = 0; c < N_CH; c++) begin
      rd_ch = c[$clog2(N_CH)-1:0];
      while (pending[c]) begin
        signal_t e;
        #1;
        if (c == burst_ch) e = head;             // values of the burst channel are not kept
        else if (expq[c].size() == 0) begin
          check(0, $sformatf("channel %0d: unexpected signal", c));
          e = head;
        end else e = expq[c].pop_front();
        check(head == e, $sformatf("ch %0d got %h exp %h", c, head, e));
        pop = 1'b1; @(negedge clk); pop = 1'b0;
      end
    end
  endtask

  initial begin
    repeat (40000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    foreach (remain[c]) remain[c] = 0;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    gen_on = 1'b1;
    for (int w = 0; w < 4; w++) begin
      repeat (1500) @(negedge clk);
      readout(1'b0);
    end
    // Burst: channel 17 fires continuously for long enough to fill its buffer.
    burst_ch = 17;
    burst_on = 1'b1;
    repeat (8 * (DEPTH + 10)) @(negedge clk);
    burst_on = 1'b0;
    repeat (10) @(negedge clk);
    expq[17].delete();
    readout(1'b1);
    // Stop, let pulses end, final readout: everything recorded must be out.
    gen_on = 1'b0;
    repeat (10) @(negedge clk);
    expq[17].delete();
    readout(1'b0);
    for (int c = 0; c < N_CH; c++)
      check(expq[c].size() == 0, $sformatf("channel %0d: %0d signals never read", c, expq[c].size()));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
