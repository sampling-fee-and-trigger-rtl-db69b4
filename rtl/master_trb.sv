// master_trb: the master readout board.
//
// The master controls the readout of all slaves.  Its central FPGA holds the
// Central Trigger System (cts), which issues a readout request every 20 us
// with a sequence number, and the hub (central_hub), which sends each request
// to all slaves and collects their busy lines.  A request leaves on `req_o`
// two cycles after the CTS period expires (CTS register, hub register).
//
// From the source: master with CTS, periodic 50 kHz request, eight slaves.
// Own choices: see cts and central_hub.
module master_trb
  import daq_pkg::*;
#(
  parameter int unsigned N_SLAVES   = 8,
  parameter int unsigned CLK_HZ     = daq_pkg::DEF_CLK_HZ,
  parameter int unsigned READOUT_HZ = daq_pkg::DEF_READOUT_HZ
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                enable_i,
  input  logic                clr_i,
  output logic [N_SLAVES-1:0] req_o,
  output seq_t                seq_o,
  input  logic [N_SLAVES-1:0] busy_i,
  output logic [15:0]         late_o,
  output logic [N_SLAVES-1:0] late_slaves_o
);
  logic req, busy_any;
  seq_t seq;

  cts #(.CLK_HZ(CLK_HZ), .READOUT_HZ(READOUT_HZ)) u_cts (
    .clk, .rst_n,
    .enable_i,
    .busy_any_i (busy_any),
    .req_o      (req),
    .seq_o      (seq),
    .late_o
  );

  central_hub #(.N_SLAVES(N_SLAVES)) u_hub (
    .clk, .rst_n,
    .clr_i,
    .req_i      (req),
    .seq_i      (seq),
    .req_o,
    .seq_o,
    .busy_i,
    .busy_any_o (busy_any),
    .late_o     (late_slaves_o)
  );

endmodule
