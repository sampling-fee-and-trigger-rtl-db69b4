// data_transmitter: the readout engine of a slave board's central FPGA.
//
// When a readout request arrives (`req_i` with its sequence number `seq_i`)
// the transmitter takes a snapshot of every TDC channel buffer of the board
// and turns their contents into one packet: a header with the module ID and
// the sequence number, a leading and a trailing hit word for every buffered
// signal, and a trailer with the number of hit words and an overflow flag.
// The packet is the payload that the board's Gigabit Ethernet link sends as a
// UDP packet; the Ethernet/UDP stack is outside this RTL.
//
// Operation: IDLE -> HDR (snapshot taken on leaving IDLE) -> SCAN, which
// visits the N_TDC x N_CH channels in order; a channel with pending signals
// emits LEAD then TRAIL and pops one signal, until it has none, then the scan
// moves on.  After the last channel the TRL word ends the packet.  One word is
// offered per cycle on a valid/ready stream; an idle channel costs one cycle.
//
// From the source: one packet per slave per request holding all time samples
// of the board recorded since the previous request, tagged with the request
// sequence number and module ID.  Own choices: the word layout (daq_pkg), the
// channel order, and what happens to a request that arrives while a packet is
// still being sent: it is held (one deep) and served next; a further one
// arriving meanwhile replaces it and is counted in `missed_o`.
module data_transmitter
  import daq_pkg::*;
#(
  parameter int unsigned N_TDC = 4,
  parameter int unsigned N_CH  = 48
) (
  input  logic        clk,
  input  logic        rst_n,
  input  modid_t      module_id_i,
  input  logic        req_i,
  input  seq_t        seq_i,
  output logic        busy_o,
  output logic [15:0] missed_o,
  // TDC readout side
  output logic                       snap_o,
  output logic [$clog2(N_CH)-1:0]    rd_ch_o,
  output logic [N_TDC-1:0]           pop_o,
  input  logic [N_TDC-1:0][N_CH-1:0] pending_i,
  input  signal_t [N_TDC-1:0]        head_i,
  input  logic [N_TDC-1:0]           ovf_i,
  // packet stream
  output logic        out_valid_o,
  output word_t       out_data_o,
  output logic        out_last_o,
  input  logic        out_ready_i
);
  localparam int TW  = (N_TDC > 1) ? $clog2(N_TDC) : 1;
  localparam int CHW = $clog2(N_CH);

  typedef enum logic [2:0] {S_IDLE, S_HDR, S_SCAN, S_LEAD, S_TRAIL, S_TRL} state_t;
  state_t state;

  logic            req_pend;
  seq_t            pend_seq, cur_seq;
  logic [TW-1:0]   t_idx;
  logic [CHW-1:0]  c_idx;
  logic [15:0]     n_hits;
  logic            ovf_any;
  logic            accept;
  signal_t         head;
  logic [CH_W-1:0] board_ch;

  assign head     = head_i[t_idx];
  assign board_ch = CH_W'(32'(t_idx) * N_CH + 32'(c_idx));
  assign accept   = out_valid_o & out_ready_i;
  assign rd_ch_o  = c_idx;
  assign busy_o   = state != S_IDLE;
  assign snap_o   = (state == S_IDLE) && req_pend;

  always_comb begin
    pop_o = '0;
    if (state == S_TRAIL && accept) pop_o[t_idx] = 1'b1;
  end

  always_comb begin
    out_valid_o = 1'b0;
    out_last_o  = 1'b0;
    out_data_o  = '0;
    unique case (state)
      S_HDR: begin
        out_valid_o = 1'b1;
        out_data_o  = hdr_word_t'{module_id: module_id_i, seq: cur_seq};
      end
      S_LEAD: begin
        out_valid_o = 1'b1;
        out_data_o  = hit_word_t'{rsv: 1'b0, lead: 1'b1, ch: board_ch,
                                  coarse: head.lead.coarse, fine: head.lead.fine};
      end
      S_TRAIL: begin
        out_valid_o = 1'b1;
        out_data_o  = hit_word_t'{rsv: 1'b0, lead: 1'b0, ch: board_ch,
                                  coarse: head.trail.coarse, fine: head.trail.fine};
      end
      S_TRL: begin
        out_valid_o = 1'b1;
        out_last_o  = 1'b1;
        out_data_o  = trl_word_t'{overflow: ovf_any, rsv: '0, n_hits: n_hits};
      end
      default: ;
    endcase
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state    <= S_IDLE;
      req_pend <= 1'b0;
      pend_seq <= '0;
      cur_seq  <= '0;
      t_idx    <= '0;
      c_idx    <= '0;
      n_hits   <= '0;
      ovf_any  <= 1'b0;
      missed_o <= '0;
    end else begin
      if (req_i) begin
        pend_seq <= seq_i;
        req_pend <= 1'b1;
        if (req_pend && !snap_o) missed_o <= missed_o + 1'b1;
      end else if (snap_o) begin
        req_pend <= 1'b0;
      end

      unique case (state)
        S_IDLE: if (req_pend) begin
          cur_seq <= pend_seq;
          t_idx   <= '0;
          c_idx   <= '0;
          n_hits  <= '0;
          state   <= S_HDR;
        end
        S_HDR: if (accept) begin
          ovf_any <= |ovf_i;          // flags of the snapshot just taken
          state   <= S_SCAN;
        end
        S_SCAN: begin
          if (pending_i[t_idx][c_idx]) begin
            state <= S_LEAD;
          end else if (c_idx == CHW'(N_CH-1)) begin
            c_idx <= '0;
            if (t_idx == TW'(N_TDC-1)) state <= S_TRL;
            else                       t_idx <= t_idx + 1'b1;
          end else begin
            c_idx <= c_idx + 1'b1;
          end
        end
        S_LEAD: if (accept) begin
          n_hits <= n_hits + 1'b1;
          state  <= S_TRAIL;
        end
        S_TRAIL: if (accept) begin
          n_hits <= n_hits + 1'b1;
          state  <= S_SCAN;
        end
        S_TRL:   if (accept) state <= S_IDLE;
        default: state <= S_IDLE;
      endcase
    end
  end

  // A word offered on the stream is held until it is taken.
  a_stable: assert property (@(posedge clk) disable iff (!rst_n)
    out_valid_o && !out_ready_i |=> out_valid_o && $stable(out_data_o) && $stable(out_last_o));

endmodule
