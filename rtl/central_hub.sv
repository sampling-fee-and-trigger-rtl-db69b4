// central_hub: the hub of the master board that links the CTS to the slaves.
//
// It passes every readout request of the CTS, with its sequence number, to
// all N_SLAVES slave boards in the same cycle (one register stage), and it
// gathers the slaves' busy lines back: `busy_any_o` tells the CTS whether any
// slave is still sending the previous packet, and `late_o` has a sticky bit
// per slave that was busy when a request was sent to it (cleared by `clr_i`).
//
// The source only names the hub and says the master controls the readout and
// synchronisation of all slaves.  The broadcast with one register stage and
// the busy collection are this design's own, simplest reading of that.
module central_hub
  import daq_pkg::*;
#(
  parameter int unsigned N_SLAVES = 8
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                clr_i,
  input  logic                req_i,
  input  seq_t                seq_i,
  output logic [N_SLAVES-1:0] req_o,
  output seq_t                seq_o,
  input  logic [N_SLAVES-1:0] busy_i,
  output logic                busy_any_o,
  output logic [N_SLAVES-1:0] late_o
);
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      req_o  <= '0;
      seq_o  <= '0;
      late_o <= '0;
    end else begin
      req_o <= {N_SLAVES{req_i}};
      if (req_i) seq_o <= seq_i;
      if (clr_i)      late_o <= '0;
      else if (req_i) late_o <= late_o | busy_i;
    end
  end

  assign busy_any_o = |busy_i;

endmodule
