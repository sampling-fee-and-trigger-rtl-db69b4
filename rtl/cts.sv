// cts: Central Trigger System of the master board, for trigger-less readout.
//
// Instead of reacting to detector triggers, the CTS issues a Readout Request
// at a fixed rate: every PERIOD = CLK_HZ / READOUT_HZ clock cycles
// (200 MHz / 50 kHz = 4000 cycles, i.e. every 20 us) it raises `req_o` for one
// cycle together with a new sequence number on `seq_o`.  The sequence number
// starts at 0 after reset and increments by one per request; the event
// builders use it, with the module ID, to put together packets of the same
// time window.  `enable_i` starts and stops the request stream; stopping it
// restarts the period from zero.
//
// Monitoring: `busy_any_i` comes from the hub; a request issued while some
// slave is still busy with the previous one is counted in `late_o`.
//
// From the source: periodic request at 50 kHz carrying a sequence number.
// Own choices: the clock frequency, the 16-bit sequence number, the counter
// of late requests.
module cts
  import daq_pkg::*;
#(
  parameter int unsigned CLK_HZ     = daq_pkg::DEF_CLK_HZ,
  parameter int unsigned READOUT_HZ = daq_pkg::DEF_READOUT_HZ
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        enable_i,
  input  logic        busy_any_i,
  output logic        req_o,
  output seq_t        seq_o,
  output logic [15:0] late_o
);
  localparam int unsigned PERIOD = CLK_HZ / READOUT_HZ;
  localparam int PW = $clog2(PERIOD);

  logic [PW-1:0] cnt;
  seq_t          next_seq;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cnt      <= '0;
      req_o    <= 1'b0;
      seq_o    <= '0;
      next_seq <= '0;
      late_o   <= '0;
    end else begin
      req_o <= 1'b0;
      if (!enable_i) begin
        cnt <= '0;
      end else if (cnt == PW'(PERIOD-1)) begin
        cnt      <= '0;
        req_o    <= 1'b1;
        seq_o    <= next_seq;
        next_seq <= next_seq + 1'b1;
        if (busy_any_i) late_o <= late_o + 1'b1;
      end else begin
        cnt <= cnt + 1'b1;
      end
    end
  end

  initial assert (PERIOD >= 2) else $error("cts: READOUT_HZ too high for CLK_HZ");

endmodule
