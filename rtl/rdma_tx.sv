// rdma_tx: the hardware Send Engine of the ExaNet RDMA send unit.
//
// Following the paper: the firmware hands the engine one block (up to 16 KB) at a time; the
// engine splits it into cells of up to 256 bytes, reads each cell's payload with an
// IO-coherent AXI read burst (16 x 128-bit beats) through the SMMU, waits until the whole
// payload has arrived (store-and-forward, so memory hiccups never stall the network) and
// then injects the cell. Up to eight bursts may be outstanding, which the paper found
// enough to saturate the memory path. Block acknowledgements coming back from the
// receiver are passed on to the firmware, which retransmits blocks that fail.
//
// This design's own choices: the block command fields, the cell buffer of N_BUF slots
// (one per outstanding burst) with issue/fill/send pointers, that every cell of a block
// carries the block length, its offset, the last-cell flag and the notification address
// in its footer, and the done report per injected block.
//
// Interface: blk_* takes a block command (valid/ready); ar_*/r_* is the memory read master
// (read data is always accepted, returned in order); out_* is the cell stream; in_* takes
// RDMA_ACK/RDMA_NACK cells and turns each into an ack_evt_* pulse; done_* pulses when a
// block's last cell has left. Timing: one read request per cycle while slots are free;
// a full cell leaves in 18 consecutive cycles (header, 16 payload words, footer).
module rdma_tx
  import exanet_pkg::*;
#(
  parameter int N_BUF = 8     // paper: eight outstanding AXI bursts
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic [NODE_W-1:0] my_node,
  // block command from the firmware
  input  logic              blk_valid,
  output logic              blk_ready,
  input  logic [15:0]       blk_chan,
  input  logic [CTX_W-1:0]  blk_ctx,      // {PDID, rank} of the source process
  input  logic [UVA_W-1:0]  blk_src_va,
  input  gva_t              blk_dst,
  input  logic [14:0]       blk_len,      // bytes, 1..16384
  input  logic              blk_notify,
  input  logic [NVA_W-1:0]  blk_notif_va,
  // memory read master
  output logic              ar_valid,
  input  logic              ar_ready,
  output logic [CTX_W-1:0]  ar_ctx,
  output logic [UVA_W-1:0]  ar_va,
  output logic [4:0]        ar_beats,
  input  logic              r_valid,
  input  word_t             r_data,
  input  logic              r_last,
  input  logic              r_err,
  // cells out
  output logic              out_valid,
  input  logic              out_ready,
  output flit_t             out_flit,
  // acknowledgements in, reported to the firmware
  input  logic              in_valid,
  output logic              in_ready,
  input  flit_t             in_flit,
  output logic              ack_evt_valid,
  output logic [15:0]       ack_evt_chan,
  output logic              ack_evt_nack,
  output logic [6:0]        ack_evt_reason,
  // block injected
  output logic              done_valid,
  output logic [15:0]       done_chan,
  output logic              done_err
);
  localparam int BW = $clog2(N_BUF);

  typedef struct packed {
    cell_hdr_t hdr;
    logic [15:0] chan;
    logic [14:0] blk_len;
    logic [13:0] offset;
    logic        last;
    logic        notify;
    logic [NVA_W-1:0] notif_va;
  } slot_t;

  // ---------------- current block ----------------
  logic             act;
  logic [15:0]      b_chan;
  logic [CTX_W-1:0] b_ctx;
  logic [UVA_W-1:0] b_src;
  gva_t             b_dst;
  logic [14:0]      b_len;
  logic             b_notify;
  logic [NVA_W-1:0] b_nva;
  logic [14:0]      b_off;

  assign blk_ready = !act;

  // ---------------- slots ----------------
  slot_t       sl_info [N_BUF];
  word_t       sl_data [N_BUF][CELL_WORDS];
  logic [N_BUF-1:0] sl_err;
  logic [BW-1:0] iss, fil, snd;
  logic [BW:0]   n_iss, n_fil;    // slots issued-not-sent, filled-not-sent
  logic [3:0]    fil_w;

  logic [14:0] remain;
  logic [8:0]  clen;
  always_comb begin
    remain   = b_len - b_off;
    clen     = (remain >= 15'd256) ? 9'd256 : 9'(remain);
    ar_valid = act && (n_iss != (BW+1)'(N_BUF));
    ar_ctx   = b_ctx;
    ar_va    = b_src + UVA_W'(b_off);
    ar_beats = 5'(words_of(clen));
  end
  wire ar_fire = ar_valid && ar_ready;

  slot_t new_slot;
  always_comb begin
    new_slot              = '0;
    new_slot.hdr.dst      = b_dst;
    new_slot.hdr.dst.va   = b_dst.va + UVA_W'(b_off);
    new_slot.hdr.src_node = my_node;
    new_slot.hdr.ctype    = CT_RDMA_WR;
    new_slot.hdr.len      = clen;
    new_slot.chan         = b_chan;
    new_slot.blk_len      = b_len;
    new_slot.offset       = b_off[13:0];
    new_slot.last         = (remain <= 15'd256);
    new_slot.notify       = b_notify;
    new_slot.notif_va     = b_nva;
  end

  // ---------------- sender ----------------
  typedef enum logic [1:0] {T_IDLE, T_HDR, T_PAY, T_FTR} tst_e;
  tst_e        tst;
  logic [4:0]  widx;
  logic [31:0] csum;
  logic        blk_err;
  slot_t       cs;
  cell_ftr_t   ftr;
  assign cs = sl_info[snd];

  always_comb begin
    ftr          = '0;
    ftr.csum     = csum;
    ftr.chan     = cs.chan;
    ftr.blk_len  = cs.blk_len;
    ftr.offset   = cs.offset;
    ftr.last     = cs.last;
    ftr.notify   = cs.notify;
    ftr.notif_va = cs.notif_va;
    out_valid    = (tst != T_IDLE);
    case (tst)
      T_HDR:   out_flit = '{data: word_t'(cs.hdr), sop: 1'b1, eop: 1'b0};
      T_PAY:   out_flit = '{data: sl_data[snd][widx[3:0]], sop: 1'b0, eop: 1'b0};
      default: out_flit = '{data: word_t'(ftr), sop: 1'b0, eop: 1'b1};
    endcase
  end

  always_ff @(posedge clk) begin
    if (ar_fire) sl_info[iss] <= new_slot;
    if (r_valid) sl_data[fil][fil_w] <= r_data;
  end

  wire sent = (tst == T_FTR) && out_ready;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      act <= 1'b0; b_chan <= '0; b_ctx <= '0; b_src <= '0; b_dst <= '0; b_len <= '0;
      b_notify <= 1'b0; b_nva <= '0; b_off <= '0;
      iss <= '0; fil <= '0; snd <= '0; n_iss <= '0; n_fil <= '0; fil_w <= '0; sl_err <= '0;
      tst <= T_IDLE; widx <= '0; csum <= '0; blk_err <= 1'b0;
      done_valid <= 1'b0; done_chan <= '0; done_err <= 1'b0;
    end else begin
      done_valid <= 1'b0;
      // accept a block
      if (blk_valid && blk_ready) begin
        act <= (blk_len != '0); b_chan <= blk_chan; b_ctx <= blk_ctx; b_src <= blk_src_va;
        b_dst <= blk_dst; b_len <= blk_len; b_notify <= blk_notify; b_nva <= blk_notif_va;
        b_off <= '0;
      end
      // issue reads
      if (ar_fire) begin
        iss   <= iss + 1'b1;
        b_off <= b_off + 15'(clen);
        if (new_slot.last) act <= 1'b0;
      end
      n_iss <= n_iss + (BW+1)'(ar_fire) - (BW+1)'(sent);
      // collect read data
      if (r_valid) begin
        fil_w <= fil_w + 1'b1;
        if (r_err) sl_err[fil] <= 1'b1;
        if (r_last) begin
          fil   <= fil + 1'b1;
          fil_w <= '0;
        end
      end
      n_fil <= n_fil + (BW+1)'(r_valid && r_last) - (BW+1)'(sent);
      // inject filled cells
      case (tst)
        T_IDLE: if (n_fil != '0) tst <= T_HDR;
        T_HDR: if (out_ready) begin
          csum <= fold32(word_t'(cs.hdr));
          widx <= '0;
          if (cs.offset == '0) blk_err <= sl_err[snd];
          else                 blk_err <= blk_err | sl_err[snd];
          tst  <= (cs.hdr.len == '0) ? T_FTR : T_PAY;
        end
        T_PAY: if (out_ready) begin
          csum <= csum ^ fold32(out_flit.data);
          widx <= widx + 1'b1;
          if (int'(widx) + 1 == int'(words_of(cs.hdr.len))) tst <= T_FTR;
        end
        T_FTR: if (out_ready) begin
          sl_err[snd] <= 1'b0;
          snd <= snd + 1'b1;
          tst <= T_IDLE;
          if (cs.last) begin
            done_valid <= 1'b1;
            done_chan  <= cs.chan;
            done_err   <= blk_err;
          end
        end
      endcase
    end
  end

  // ---------------- acknowledgements ----------------
  assign in_ready = 1'b1;
  cell_hdr_t ack_hdr_q;
  cell_ftr_t in_ftr;
  assign in_ftr = cell_ftr_t'(in_flit.data);
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) ack_hdr_q <= '0;
    else if (in_valid && in_flit.sop) ack_hdr_q <= cell_hdr_t'(in_flit.data);
  end
  assign ack_evt_valid  = in_valid && in_flit.eop;
  assign ack_evt_chan   = in_ftr.chan;
  assign ack_evt_nack   = (ack_hdr_q.ctype == CT_RDMA_NACK);
  assign ack_evt_reason = in_ftr.aux;

  a_rdata_expected: assert property (@(posedge clk) disable iff (!rst_n)
                                     r_valid |-> (n_iss != n_fil));
endmodule
