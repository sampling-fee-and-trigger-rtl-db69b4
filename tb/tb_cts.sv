// tb_cts: checks the period and sequence numbers of the readout requests at
// the default 200 MHz / 50 kHz setting (a request every 4000 cycles, one cycle
// wide, sequence numbers 0, 1, 2, ...), that disabling stops the requests
// and restarts the period, and that requests issued while a slave is busy are
// counted as late.
module tb_cts;
  import daq_pkg::*;

  localparam int PERIOD = 200_000_000 / 50_000;   // 4000 cycles = 20 us

  logic clk = 1'b0, rst_n = 1'b0, enable = 1'b0, busy_any = 1'b0;
  logic req;
  seq_t seq;
  logic [15:0] late;
  int checks = 0, failures = 0;

  cts dut (.clk, .rst_n, .enable_i(enable), .busy_any_i(busy_any),
           .req_o(req), .seq_o(seq), .late_o(late));

  always #5 clk = ~clk;

  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", what); end
  endtask

  longint cyc = 0, last_req = -1;
  int n_req = 0;
  always @(posedge clk) begin
    cyc <= cyc + 1;
    if (rst_n && req) begin
      if (last_req >= 0 && enable)
        check(cyc - last_req == PERIOD, $sformatf("period %0d", cyc - last_req));
      check(seq == seq_t'(n_req), $sformatf("seq %0d exp %0d", seq, n_req));
      last_req <= cyc;
      n_req    <= n_req + 1;
    end
  end

  initial begin
    repeat (10 * PERIOD) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    longint t_en;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    repeat (PERIOD) @(negedge clk);
    check(n_req == 0, "no request while disabled");
    enable = 1'b1; t_en = cyc;
    wait (n_req == 1);
    check(cyc - t_en == PERIOD + 1 || cyc - t_en == PERIOD,
          $sformatf("first request after %0d cycles", cyc - t_en));
    wait (n_req == 3);
    busy_any = 1'b1;
    wait (n_req == 4);
    @(negedge clk);
    busy_any = 1'b0;
    check(late == 1, $sformatf("late %0d exp 1", late));
    // Disable mid-period: no request, then a full period after re-enabling.
    repeat (PERIOD / 2) @(negedge clk);
    enable = 1'b0;
    repeat (PERIOD) @(negedge clk);
    check(n_req == 4, "stopped while disabled");
    enable = 1'b1; last_req = -1; t_en = cyc;
    wait (n_req == 5);
    check(cyc - t_en >= PERIOD, "period restarts after enable");
    wait (n_req == 6);
    check(late == 1, "no further late requests");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
