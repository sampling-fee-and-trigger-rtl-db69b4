// tdc: the time-measurement design of one peripheral FPGA, 48 channels.
//
// Each channel (tdc_channel) time-stamps both edges of its discriminator
// output against a coarse counter shared by all channels of the FPGA, adds the
// fine code delivered by that channel's tapped delay line, and buffers up to
// 54 complete signals.  The delay lines are FPGA carry chains and are not part
// of this RTL: their fine codes come in on `fine_i`.
//
// Readout interface: `snap_i` takes a snapshot in every channel at once;
// `pending_o[c]` then says channel c still has signals of this readout; the
// reader selects a channel with `rd_ch_i`, sees its oldest signal on `head_o`
// and removes it with `pop_i`.  `ovf_o` is the OR of the channels' overflow
// flags of the last snapshot.
//
// From the source: 48 channels, both edges, 54-signal buffers.  Own choice:
// a free-running COARSE_W-bit coarse counter started by reset.
module tdc
  import daq_pkg::*;
#(
  parameter int unsigned N_CH  = 48,
  parameter int unsigned DEPTH = 54
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic [N_CH-1:0]      hit_i,
  input  fine_t [N_CH-1:0]     fine_i,
  input  logic                 snap_i,
  input  logic [$clog2(N_CH)-1:0] rd_ch_i,
  input  logic                 pop_i,
  output logic [N_CH-1:0]      pending_o,
  output signal_t              head_o,
  output logic                 ovf_o
);
  localparam int CW = $clog2(DEPTH+1);

  coarse_t          coarse;
  signal_t          head [N_CH];
  logic [CW-1:0]    left [N_CH];
  logic [N_CH-1:0]  ovf;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) coarse <= '0;
    else        coarse <= coarse + 1'b1;
  end

  for (genvar c = 0; c < N_CH; c++) begin : g_ch
    tdc_channel #(.DEPTH(DEPTH)) u_ch (
      .clk, .rst_n,
      .hit_i    (hit_i[c]),
      .fine_i   (fine_i[c]),
      .coarse_i (coarse),
      .snap_i,
      .pop_i    (pop_i && rd_ch_i == c),
      .head_o   (head[c]),
      .left_o   (left[c]),
      .ovf_o    (ovf[c])
    );
    assign pending_o[c] = left[c] != '0;
  end

  assign head_o = head[rd_ch_i];
  assign ovf_o  = |ovf;

endmodule
