// slave_trb: one slave readout board.
//
// A board carries four peripheral FPGAs configured as 48-channel TDCs and a
// central FPGA that acts as controller and local data collector.  Here the
// four TDCs (tdc) share the data transmitter (data_transmitter) of the central
// FPGA, which answers each readout request from the master with one packet of
// everything the board recorded since the previous request.  Its packet
// stream goes to the board's Gigabit Ethernet link (outside this RTL).
//
// Interface: `hit_i`/`fine_i` per TDC and channel (discriminator outputs and
// delay-line fine codes); `req_i`/`seq_i` from the master's hub; `busy_o`
// back to it; the packet stream with valid/ready.  Timing: the snapshot is
// taken one cycle after a request reaches an idle board; the header leaves in
// the next cycle.
//
// From the source: four TDC FPGAs x 48 channels, one packet per request
// tagged with sequence number and module ID.  Own choice: one clock for the
// whole board.
module slave_trb
  import daq_pkg::*;
#(
  parameter int unsigned N_TDC = 4,
  parameter int unsigned N_CH  = 48,
  parameter int unsigned DEPTH = 54
) (
  input  logic                        clk,
  input  logic                        rst_n,
  input  modid_t                      module_id_i,
  input  logic [N_TDC-1:0][N_CH-1:0]  hit_i,
  input  fine_t [N_TDC-1:0][N_CH-1:0] fine_i,
  input  logic                        req_i,
  input  seq_t                        seq_i,
  output logic                        busy_o,
  output logic [15:0]                 missed_o,
  output logic                        out_valid_o,
  output word_t                       out_data_o,
  output logic                        out_last_o,
  input  logic                        out_ready_i
);
  logic                       snap;
  logic [$clog2(N_CH)-1:0]    rd_ch;
  logic [N_TDC-1:0]           pop;
  logic [N_TDC-1:0][N_CH-1:0] pending;
  signal_t [N_TDC-1:0]        head;
  logic [N_TDC-1:0]           ovf;

  for (genvar t = 0; t < N_TDC; t++) begin : g_tdc
    tdc #(.N_CH(N_CH), .DEPTH(DEPTH)) u_tdc (
      .clk, .rst_n,
      .hit_i     (hit_i[t]),
      .fine_i    (fine_i[t]),
      .snap_i    (snap),
      .rd_ch_i   (rd_ch),
      .pop_i     (pop[t]),
      .pending_o (pending[t]),
      .head_o    (head[t]),
      .ovf_o     (ovf[t])
    );
  end

  data_transmitter #(.N_TDC(N_TDC), .N_CH(N_CH)) u_tx (
    .clk, .rst_n,
    .module_id_i,
    .req_i, .seq_i,
    .busy_o, .missed_o,
    .snap_o    (snap),
    .rd_ch_o   (rd_ch),
    .pop_o     (pop),
    .pending_i (pending),
    .head_i    (head),
    .ovf_i     (ovf),
    .out_valid_o, .out_data_o, .out_last_o, .out_ready_i
  );

endmodule
