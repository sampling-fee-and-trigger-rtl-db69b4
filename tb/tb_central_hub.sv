// tb_central_hub: checks that each request reaches all eight slaves one cycle
// later with its sequence number, that busy lines are gathered into
// busy_any_o, that slaves busy at a request are marked late (sticky) and
// that clear resets the marks.
module tb_central_hub;
  import daq_pkg::*;

  localparam int N = 8;

  logic clk = 1'b0, rst_n = 1'b0, clr = 1'b0, req = 1'b0;
  seq_t seq_i = '0, seq_o;
  logic [N-1:0] req_o, busy = '0, late;
  logic busy_any;
  int checks = 0, failures = 0;

  central_hub #(.N_SLAVES(N)) dut (
    .clk, .rst_n, .clr_i(clr), .req_i(req), .seq_i(seq_i), .req_o(req_o),
    .seq_o(seq_o), .busy_i(busy), .busy_any_o(busy_any), .late_o(late));

  always #5 clk = ~clk;

  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    repeat (1000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [N-1:0] exp_late;
    exp_late = '0;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    for (int i = 0; i < 20; i++) begin
      logic [N-1:0] b;
      b = N'($urandom);
      if (i % 3 == 0) b = '0;
      busy = b;
      #1 check(busy_any == (b != 0), "busy_any");
      req = 1'b1; seq_i = seq_t'($urandom);
      @(negedge clk);
      check(req_o == '1, $sformatf("request %0d reaches all slaves", i));
      check(seq_o == seq_i, "sequence number forwarded");
      exp_late |= b;
      req = 1'b0;
      @(negedge clk);
      check(req_o == '0, "request is one cycle");
      check(late == exp_late, $sformatf("late %b exp %b", late, exp_late));
      if (i == 10) begin
        clr = 1'b1; @(negedge clk); clr = 1'b0;
        exp_late = '0;
        check(late == '0, "clear");
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
