// packetizer: the virtualized small-message sender of the ExaNet NI.
//
// Following the paper: 64 virtual interfaces, each a private memory page with 4 channels.
// A user process stores the message payload into a channel with ordinary (posted) stores,
// then writes payload size and destination address to the channel's command word. That
// last store makes the packetizer build one cell carrying the payload, the destination
// address and the PDID that system software assigned to the interface (the user cannot
// choose it). Each channel is ongoing, acknowledged, negatively acknowledged or timed out;
// software polls these status bits. A hardware timer per channel marks an unanswered
// message as timed out so that software may send it again.
//
// This design's own choices: the register map inside a page (words 0..3 hold up to 64 B of
// payload, word 4 is the command: bits 79:0 destination GVA, bits 88:80 size in bytes),
// one shared FIFO of channels waiting to send, a single timestamp per channel checked by a
// scanner that visits one channel per clock, and the timeout value.
//
// Interface: cpu_* is the store path from the cores; cfg_* is the privileged PDID setting;
// st_* returns the four channel states of one interface; out_* is the cell stream to the
// switch; in_* receives ACK/NACK cells (always accepted).
// Timing: the header leaves two cycles after the command store, then one word per cycle.
module packetizer
  import exanet_pkg::*;
#(
  parameter int N_IF        = 64,      // paper: 64 virtual interfaces
  parameter int N_CH        = 4,       // paper: 4 channels per interface
  parameter int MAX_BYTES   = 64,      // paper: messages of up to 64 bytes
  parameter int TIMEOUT_CYC = 15000    // assumed: 100 us at 150 MHz
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic [NODE_W-1:0] my_node,
  // privileged configuration: PDID of an interface
  input  logic              cfg_we,
  input  logic [$clog2(N_IF)-1:0] cfg_if,
  input  logic [PDID_W-1:0] cfg_pdid,
  // user stores: {interface, channel, word}
  input  logic              cpu_we,
  input  logic [$clog2(N_IF)-1:0] cpu_if,
  input  logic [$clog2(N_CH)-1:0] cpu_ch,
  input  logic [2:0]        cpu_word,
  input  word_t             cpu_wdata,
  // status of the channels of one interface (3 bits each, see ch_state_e)
  input  logic [$clog2(N_IF)-1:0] st_if,
  output logic [N_CH*3-1:0] st_state,
  // cells to the network
  output logic              out_valid,
  input  logic              out_ready,
  output flit_t             out_flit,
  // ACK / NACK cells from the network
  input  logic              in_valid,
  output logic              in_ready,
  input  flit_t             in_flit
);
  localparam int NCHAN = N_IF * N_CH;
  localparam int CW    = $clog2(NCHAN);
  localparam int PWORDS = MAX_BYTES / 16;
  localparam int TW    = 24;

  typedef enum logic [2:0] {CH_IDLE = 3'd0, CH_ONGOING = 3'd1, CH_ACKED = 3'd2,
                            CH_NACKED = 3'd3, CH_TIMEOUT = 3'd4} ch_state_e;

  logic [PDID_W-1:0] if_pdid  [N_IF];
  word_t             pay_mem  [NCHAN][PWORDS];
  gva_t              cmd_dst  [NCHAN];
  logic [LEN_W-1:0]  cmd_len  [NCHAN];
  ch_state_e         state    [NCHAN];
  logic [TW-1:0]     sent_at  [NCHAN];
  logic [TW-1:0]     now;

  wire [CW-1:0] cpu_chan = {cpu_if, cpu_ch};
  wire          cmd_wr   = cpu_we && (cpu_word == 3'd4) && (state[cpu_chan] != CH_ONGOING);

  always_ff @(posedge clk) begin
    if (cfg_we) if_pdid[cfg_if] <= cfg_pdid;
    if (cpu_we && cpu_word < 3'(PWORDS)) pay_mem[cpu_chan][cpu_word[$clog2(PWORDS)-1:0]] <= cpu_wdata;
    if (cmd_wr) begin
      cmd_dst[cpu_chan] <= gva_t'(cpu_wdata[79:0]);
      cmd_len[cpu_chan] <= (cpu_wdata[88:80] > LEN_W'(MAX_BYTES)) ? LEN_W'(MAX_BYTES) : cpu_wdata[88:80];
    end
  end

  always_comb begin
    for (int c = 0; c < N_CH; c++) st_state[c*3 +: 3] = state[{st_if, ($clog2(N_CH))'(c)}];
  end

  // ---------------- FIFO of channels waiting to send ----------------
  logic [CW-1:0] pend_mem [NCHAN];
  logic [CW-1:0] pend_wp, pend_rp;
  logic [CW:0]   pend_cnt;
  logic          pend_pop;

  always_ff @(posedge clk) if (cmd_wr) pend_mem[pend_wp] <= cpu_chan;

  // ---------------- sender ----------------
  typedef enum logic [1:0] {S_IDLE, S_HDR, S_PAY, S_FTR} snd_e;
  snd_e          snd;
  logic [CW-1:0] cur;
  logic [3:0]    widx, nwords;
  logic [31:0]   csum;
  cell_hdr_t     hdr;
  cell_ftr_t     ftr;

  always_comb begin
    hdr          = '0;
    hdr.dst      = cmd_dst[cur];
    hdr.dst.pdid = if_pdid[cur[CW-1 -: $clog2(N_IF)]];
    hdr.src_node = my_node;
    hdr.ctype    = CT_MBOX;
    hdr.len      = cmd_len[cur];
    ftr          = '0;
    ftr.chan     = 16'(cur);
    ftr.csum     = csum;
    out_flit     = '0;
    out_valid    = (snd != S_IDLE);
    case (snd)
      S_HDR:   out_flit = '{data: word_t'(hdr), sop: 1'b1, eop: 1'b0};
      S_PAY:   out_flit = '{data: pay_mem[cur][widx[$clog2(PWORDS)-1:0]], sop: 1'b0, eop: 1'b0};
      S_FTR:   out_flit = '{data: word_t'(ftr), sop: 1'b0, eop: 1'b1};
      default: ;
    endcase
  end

  assign pend_pop = (snd == S_IDLE) && (pend_cnt != '0);

  // ---------------- ACK / NACK reception ----------------
  assign in_ready = 1'b1;
  cell_type_e    ack_type;
  logic          ack_do;
  logic [CW-1:0] ack_chan;
  logic          ack_nack;
  cell_hdr_t     in_hdr;
  assign in_hdr = cell_hdr_t'(in_flit.data);
  always_comb begin
    cell_ftr_t f;
    f        = cell_ftr_t'(in_flit.data);
    ack_do   = in_valid && in_flit.eop;
    ack_chan = f.chan[CW-1:0];
    ack_nack = (ack_type == CT_NACK);
  end

  logic [CW-1:0] scan;
  wire scan_expired = (state[scan] == CH_ONGOING) && ((now - sent_at[scan]) >= TW'(TIMEOUT_CYC));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int c = 0; c < NCHAN; c++) begin
        state[c] <= CH_IDLE; sent_at[c] <= '0;
      end
      pend_wp <= '0; pend_rp <= '0; pend_cnt <= '0;
      snd <= S_IDLE; cur <= '0; widx <= '0; nwords <= '0; csum <= '0;
      now <= '0; scan <= '0; ack_type <= CT_ACK;
    end else begin
      now  <= now + 1'b1;
      scan <= scan + 1'b1;
      if (in_valid && in_flit.sop) ack_type <= in_hdr.ctype;

      // timeouts (lowest priority)
      if (scan_expired) state[scan] <= CH_TIMEOUT;
      // acknowledgements
      if (ack_do && state[ack_chan] == CH_ONGOING)
        state[ack_chan] <= ack_nack ? CH_NACKED : CH_ACKED;
      // new command
      if (cmd_wr) begin
        state[cpu_chan]    <= CH_ONGOING;
        sent_at[cpu_chan]  <= now;
        pend_wp            <= pend_wp + 1'b1;
      end
      pend_cnt <= pend_cnt + (CW+1)'(cmd_wr) - (CW+1)'(pend_pop);

      case (snd)
        S_IDLE: if (pend_pop) begin
          cur     <= pend_mem[pend_rp];
          pend_rp <= pend_rp + 1'b1;
          snd     <= S_HDR;
        end
        S_HDR: if (out_ready) begin
          csum    <= fold32(word_t'(hdr));
          widx    <= '0;
          nwords  <= 4'(words_of(cmd_len[cur]));
          sent_at[cur] <= now;
          snd     <= (cmd_len[cur] == '0) ? S_FTR : S_PAY;
        end
        S_PAY: if (out_ready) begin
          csum <= csum ^ fold32(out_flit.data);
          widx <= widx + 1'b1;
          if (widx + 1'b1 == nwords) snd <= S_FTR;
        end
        S_FTR: if (out_ready) snd <= S_IDLE;
      endcase
    end
  end

  a_cell_framed: assert property (@(posedge clk) disable iff (!rst_n)
                                  out_valid && !out_ready |=> out_valid && $stable(out_flit));
endmodule
