// tb_master_trb: checks the master board at its defaults: every slave sees a
// one-cycle request every 4000 cycles (50 kHz at 200 MHz) with consecutive
// sequence numbers, and a request sent while slave 5 is busy counts as
// late and marks slave 5.
module tb_master_trb;
  import daq_pkg::*;

  localparam int N = 8;
  localparam int PERIOD = 4000;

  logic clk = 1'b0, rst_n = 1'b0, enable = 1'b0, clr = 1'b0;
  logic [N-1:0] req, busy = '0, late_slaves;
  seq_t seq;
  logic [15:0] late;
  int checks = 0, failures = 0;

  master_trb dut (.clk, .rst_n, .enable_i(enable), .clr_i(clr), .req_o(req),
                  .seq_o(seq), .busy_i(busy), .late_o(late), .late_slaves_o(late_slaves));

  always #5 clk = ~clk;

  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", what); end
  endtask

  longint cyc = 0, last = -1;
  int n = 0;
  always @(posedge clk) begin
    cyc <= cyc + 1;
    if (rst_n && req != '0) begin
      check(req == '1, "request reaches all slaves together");
      check(seq == seq_t'(n), $sformatf("seq %0d exp %0d", seq, n));
      if (last >= 0) check(cyc - last == PERIOD, $sformatf("period %0d", cyc - last));
      last <= cyc;
      n    <= n + 1;
    end
  end

  initial begin
    repeat (8 * PERIOD) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    enable = 1'b1;
    wait (n == 2);
    busy[5] = 1'b1;
    wait (n == 3);
    @(negedge clk);
    busy = '0;
    check(late == 1, $sformatf("late %0d", late));
    check(late_slaves == 8'b0010_0000, $sformatf("late slaves %b", late_slaves));
    wait (n == 5);
    check(late == 1, "no more late requests");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
