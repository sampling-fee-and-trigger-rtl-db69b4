// ccm_forwarder: "board-in-the-middle" forwarding of the original packets.
//
// N_LINKS valid/ready packet streams come in from the slaves; one stream
// leaves towards the event-building machines.  Packets are forwarded
// unchanged and whole: a round-robin arbiter picks, at a packet boundary, the
// next link (after the last one served) that offers a word, and stays with it
// until that packet's `last` word is taken.  The selected link's ready is the
// output's ready; the other links wait.  The path is combinational (no
// latency); in the source the output is 10G Ethernet, outside this RTL.
//
// From the source: the CCM receives the slaves' packet streams and forwards
// the original packets further.  The round-robin packet arbiter is this
// design's own, simplest choice.
module ccm_forwarder
  import daq_pkg::*;
#(
  parameter int unsigned N_LINKS = 16
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic  [N_LINKS-1:0]  in_valid_i,
  input  word_t [N_LINKS-1:0]  in_data_i,
  input  logic  [N_LINKS-1:0]  in_last_i,
  output logic  [N_LINKS-1:0]  in_ready_o,
  output logic                 out_valid_o,
  output word_t                out_data_o,
  output logic                 out_last_o,
  input  logic                 out_ready_i
);
  localparam int LW = $clog2(N_LINKS);

  logic          locked;
  logic [LW-1:0] cur, last_served, pick;
  logic          found;
  logic [LW-1:0] sel;

  // Round-robin search starting after the last link served.
  always_comb begin
    pick  = '0;
    found = 1'b0;
    for (int unsigned k = 1; k <= N_LINKS; k++) begin
      logic [LW-1:0] idx;
      idx = LW'((32'(last_served) + k) % N_LINKS);
      if (!found && in_valid_i[idx]) begin
        pick  = idx;
        found = 1'b1;
      end
    end
  end

  assign sel = locked ? cur : pick;

  always_comb begin
    out_valid_o = (locked || found) && in_valid_i[sel];
    out_data_o  = in_data_i[sel];
    out_last_o  = in_last_i[sel];
    in_ready_o  = '0;
    if (locked || found) in_ready_o[sel] = out_ready_i;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      locked      <= 1'b0;
      cur         <= '0;
      last_served <= LW'(N_LINKS-1);
    end else if (out_valid_o && out_ready_i) begin
      if (out_last_o) begin
        locked      <= 1'b0;
        last_served <= sel;
      end else begin
        locked <= 1'b1;
        cur    <= sel;
      end
    end
  end

endmodule
