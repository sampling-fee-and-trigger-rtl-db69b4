// tb_tdc_channel: self-checking test of one TDC channel at its full depth
// of 54 signals.
//
// The bench generates pulses with known edge cycles and fine codes, keeps its
// own queue of the expected (leading, trailing) pairs, and after each
// snapshot reads the channel back and compares count, order and values.  It
// covers: a window with a few signals, a full window of exactly 54 signals
// (no overflow), a window of 57 signals (3 lost, overflow flag set and then
// cleared at the next snapshot), signals recorded while the previous window
// is being read (kept for the next window), and a one-cycle pulse.
module tb_tdc_channel;
  import daq_pkg::*;

  localparam int DEPTH = 54;

  logic    clk = 1'b0, rst_n = 1'b0;
  logic    hit = 1'b0;
  fine_t   fine = '0;
  coarse_t coarse = '0;
  logic    snap = 1'b0, pop = 1'b0;
  signal_t head;
  logic [$clog2(DEPTH+1)-1:0] left;
  logic    ovf;

  int checks = 0, failures = 0;
  signal_t expq[$];

  tdc_channel #(.DEPTH(DEPTH)) dut (
    .clk, .rst_n, .hit_i(hit), .fine_i(fine), .coarse_i(coarse),
    .snap_i(snap), .pop_i(pop), .head_o(head), .left_o(left), .ovf_o(ovf)
  );

  always #5 clk = ~clk;
  always_ff @(posedge clk) coarse <= coarse + 1'b1;

  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  // One pulse: high for `width` cycles; fine codes chosen at random.
  // The expected signal is pushed unless the model buffer is full.
  task automatic pulse(input int width, input bit expect_kept);
    signal_t s;
    @(negedge clk);
    hit  = 1'b1;
    fine = fine_t'($urandom);
    s.lead = '{coarse: coarse, fine: fine};
    @(negedge clk);
    fine = fine_t'($urandom);
    repeat (width - 1) @(negedge clk);
    hit  = 1'b0;
    fine = fine_t'($urandom);
    s.trail = '{coarse: coarse, fine: fine};
    @(negedge clk);
    if (expect_kept) expq.push_back(s);
  endtask

  task automatic do_snap();
    @(negedge clk); snap = 1'b1;
    @(negedge clk); snap = 1'b0;
  endtask

  // Read n signals and compare them with the expected queue.
  task automatic read_back(input int n);
    for (int i = 0; i < n; i++) begin
      signal_t e;
      e = expq.pop_front();
      check(head == e, $sformatf("signal %0d: got %h exp %h", i, head, e));
      pop = 1'b1;
      @(negedge clk);
      pop = 1'b0;
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
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    // Window 0: one signal of a single clock period.
    hit = 1'b1; @(negedge clk); hit = 1'b0; @(negedge clk);
    do_snap();
    check(left == 1, $sformatf("window0 count %0d exp 1", left));
    pop = 1'b1; @(negedge clk); pop = 1'b0;
    check(left == 0, "window0 emptied");

    // Window 1: five signals of various widths.
    for (int i = 0; i < 5; i++) pulse(1 + i, 1'b1);
    do_snap();
    check(left == 5, $sformatf("window1 count %0d exp 5", left));
    check(!ovf, "window1 no overflow");
    read_back(5);
    check(left == 0, "window1 emptied");

    // Window 2: exactly DEPTH signals.
    for (int i = 0; i < DEPTH; i++) pulse(2, 1'b1);
    do_snap();
    check(left == DEPTH, $sformatf("window2 count %0d exp %0d", left, DEPTH));
    check(!ovf, "window2 full but no overflow");
    read_back(DEPTH);

    // Window 3: DEPTH+3 signals, three are lost.
    for (int i = 0; i < DEPTH + 3; i++) pulse(1, i < DEPTH);
    do_snap();
    check(left == DEPTH, "window3 count saturates at depth");
    check(ovf, "window3 overflow flagged");
    // Read half, then record new signals while reading the rest.
    read_back(DEPTH / 2);
    fork
      begin
        for (int i = 0; i < 4; i++) pulse(3, 1'b0);
      end
    join_none
    // While pulses run, finish reading window 3 (the new ones are not in it).
    begin
      signal_t keep[$];
      keep = expq;           // window-3 remainder
      for (int i = 0; i < DEPTH - DEPTH / 2; i++) begin
        signal_t e;
        e = keep.pop_front();
        check(head == e, $sformatf("window3 late read %0d", i));
        pop = 1'b1; @(negedge clk); pop = 1'b0;
      end
      expq = keep;
    end
    check(left == 0, "window3 emptied");
    wait fork;
    repeat (2) @(negedge clk);
    do_snap();
    check(left == 4, $sformatf("window4 keeps signals recorded during readout: %0d", left));
    check(!ovf, "overflow flag cleared by the snapshot");
    // Those four were not queued by pulse(); just drain them.
    repeat (4) begin pop = 1'b1; @(negedge clk); pop = 1'b0; end
    check(left == 0, "window4 emptied");

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
