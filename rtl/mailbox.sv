// mailbox: the virtualized small-message receiver of the ExaNet NI.
//
// Following the paper: 64 virtual mailbox interfaces, each owned by one process and tied
// to that process's PDID by the driver. Any number of senders may write to the same
// interface. An arriving message is checked: a PDID different from the interface's, a
// damaged cell or a full mailbox each produce a NACK back to the sender; otherwise the
// message is appended to the interface's queue in host memory through the coherent AXI
// port (so it lands in the ARM L2 cache) and an ACK goes back. The queue's tail pointer
// lives here, its head pointer is advanced by the runtime.
//
// This design's own choices: the interface is selected by bits 17:12 of the destination
// VA (one 4 KB page per interface); each queue slot is 64 bytes, an 8-byte descriptor
// (length, source node, sequence number) followed by up to 56 bytes of payload, so longer
// messages are refused as errors; a cell is received whole before it is checked
// (store-and-forward); ACK/NACK is sent once the slot's write burst has been issued.
//
// Interface: cfg_* sets an interface (PDID, SMMU rank, queue base VA, log2 of slot count)
// and clears its tail; hd_* is the runtime's head update; tl_* reads a tail; in_* takes
// mailbox cells from the switch; out_* sends ACK/NACK cells; wr_*/b_* is the memory write
// master. Timing: a cell of n words is taken in n cycles, checked in one, written in 4
// beats, then acknowledged with a 2-word cell.
module mailbox
  import exanet_pkg::*;
#(
  parameter int N_IF = 64   // paper: 64 virtual interfaces
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic [NODE_W-1:0] my_node,
  // privileged configuration
  input  logic              cfg_we,
  input  logic [$clog2(N_IF)-1:0] cfg_if,
  input  logic [PDID_W-1:0] cfg_pdid,
  input  logic [RANK_W-1:0] cfg_rank,
  input  logic [UVA_W-1:0]  cfg_base,
  input  logic [3:0]        cfg_log2slots,
  // runtime head pointer update, tail read
  input  logic              hd_we,
  input  logic [$clog2(N_IF)-1:0] hd_if,
  input  logic [15:0]       hd_val,
  input  logic [$clog2(N_IF)-1:0] tl_if,
  output logic [15:0]       tl_val,
  // cells in
  input  logic              in_valid,
  output logic              in_ready,
  input  flit_t             in_flit,
  // ACK / NACK out
  output logic              out_valid,
  input  logic              out_ready,
  output flit_t             out_flit,
  // memory write master
  output logic              wr_valid,
  input  logic              wr_ready,
  output logic [CTX_W-1:0]  wr_ctx,
  output logic [UVA_W-1:0]  wr_va,
  output word_t             wr_data,
  output logic              wr_last,
  input  logic              b_valid,
  input  logic              b_err,
  // statistics
  output logic [31:0]       n_acked,
  output logic [31:0]       n_nacked
);
  localparam int IW = $clog2(N_IF);
  localparam int MAX_PAY = 56;

  logic [PDID_W-1:0] if_pdid  [N_IF];
  logic [RANK_W-1:0] if_rank  [N_IF];
  logic [UVA_W-1:0]  if_base  [N_IF];
  logic [3:0]        if_l2s   [N_IF];
  logic [15:0]       if_head  [N_IF];
  logic [15:0]       if_tail  [N_IF];

  assign tl_val = if_tail[tl_if];

  typedef enum logic [2:0] {M_RX, M_CHECK, M_WRITE, M_ACKH, M_ACKF} mst_e;
  mst_e        st;
  cell_hdr_t   hdr;
  cell_ftr_t   ftr;
  word_t       pay [4];
  logic [4:0]  nrx;        // payload words received
  logic [31:0] csum;
  logic [1:0]  beat;
  logic        is_nack;
  logic [6:0]  reason;
  logic [IW-1:0] mif;

  wire [IW-1:0] hdr_if = hdr.dst.va[12 +: IW];

  // ---------------- checks ----------------
  logic        chk_err, chk_pdid, chk_full;
  logic [15:0] slots;
  always_comb begin
    slots    = 16'(1) << if_l2s[hdr_if];
    chk_err  = (csum != ftr.csum) || (int'(hdr.len) > MAX_PAY) ||
               (int'(nrx) != int'(words_of(hdr.len)));
    chk_pdid = (hdr.dst.pdid != if_pdid[hdr_if]);
    chk_full = ((if_tail[hdr_if] - if_head[hdr_if]) >= slots);
  end

  // ---------------- slot assembly: 8-byte descriptor then payload ----------------
  logic [63:0] desc;
  word_t       slot_word;
  logic [15:0] slot_idx;
  always_comb begin
    desc = {16'(if_tail[mif] + 16'd1), 16'd0, hdr.src_node, 10'(hdr.len)};
    case (beat)
      2'd0:    slot_word = {pay[0][63:0], desc};
      2'd1:    slot_word = {pay[1][63:0], pay[0][127:64]};
      2'd2:    slot_word = {pay[2][63:0], pay[1][127:64]};
      default: slot_word = {pay[3][63:0], pay[2][127:64]};
    endcase
    slot_idx = if_tail[mif] & (16'(1) << if_l2s[mif]) - 16'd1;
  end

  assign wr_valid = (st == M_WRITE);
  assign wr_ctx   = {if_pdid[mif], if_rank[mif]};
  assign wr_va    = if_base[mif] + UVA_W'({slot_idx, 6'd0});
  assign wr_data  = slot_word;
  assign wr_last  = (beat == 2'd3);
  assign in_ready = (st == M_RX);

  // ---------------- ACK / NACK cell ----------------
  cell_hdr_t ahdr;
  cell_ftr_t aftr;
  always_comb begin
    ahdr          = '0;
    ahdr.dst.pdid = hdr.dst.pdid;
    ahdr.dst.node = hdr.src_node;
    ahdr.src_node = my_node;
    ahdr.ctype    = is_nack ? CT_NACK : CT_ACK;
    aftr          = '0;
    aftr.chan     = ftr.chan;
    aftr.aux      = reason;
    aftr.csum     = fold32(word_t'(ahdr));
    out_valid     = (st == M_ACKH) || (st == M_ACKF);
    out_flit      = (st == M_ACKH) ? '{data: word_t'(ahdr), sop: 1'b1, eop: 1'b0}
                                   : '{data: word_t'(aftr), sop: 1'b0, eop: 1'b1};
  end

  always_ff @(posedge clk) begin
    if (cfg_we) begin
      if_pdid[cfg_if] <= cfg_pdid;
      if_rank[cfg_if] <= cfg_rank;
      if_base[cfg_if] <= cfg_base;
      if_l2s[cfg_if]  <= cfg_log2slots;
    end
    if (st == M_RX && in_valid && !in_flit.sop && !in_flit.eop && nrx < 5'd4)
      pay[nrx[1:0]] <= in_flit.data;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= M_RX; hdr <= '0; ftr <= '0; nrx <= '0; csum <= '0; beat <= '0;
      is_nack <= 1'b0; reason <= '0; mif <= '0; n_acked <= '0; n_nacked <= '0;
      for (int i = 0; i < N_IF; i++) begin if_head[i] <= '0; if_tail[i] <= '0; end
    end else begin
      if (hd_we) if_head[hd_if] <= hd_val;
      if (cfg_we) if_tail[cfg_if] <= '0;
      case (st)
        M_RX: if (in_valid) begin
          if (in_flit.sop) begin
            hdr  <= cell_hdr_t'(in_flit.data);
            csum <= fold32(in_flit.data);
            nrx  <= '0;
          end else if (in_flit.eop) begin
            ftr <= cell_ftr_t'(in_flit.data);
            st  <= M_CHECK;
          end else begin
            csum <= csum ^ fold32(in_flit.data);
            if (nrx != 5'd31) nrx <= nrx + 1'b1;
          end
        end
        M_CHECK: begin
          mif     <= hdr_if;
          beat    <= '0;
          is_nack <= chk_err || chk_pdid || chk_full;
          reason  <= chk_err ? NR_ERR : chk_pdid ? NR_PDID : chk_full ? NR_FULL : 7'd0;
          st      <= (chk_err || chk_pdid || chk_full) ? M_ACKH : M_WRITE;
        end
        M_WRITE: if (wr_ready) begin
          beat <= beat + 1'b1;
          if (wr_last) begin
            if_tail[mif] <= if_tail[mif] + 16'd1;
            st <= M_ACKH;
          end
        end
        M_ACKH: if (out_ready) st <= M_ACKF;
        M_ACKF: if (out_ready) begin
          if (is_nack) n_nacked <= n_nacked + 1'b1;
          else         n_acked  <= n_acked + 1'b1;
          st <= M_RX;
        end
        default: st <= M_RX;
      endcase
    end
  end

  // A write error from the memory system is not expected for mailbox queues, which the
  // driver maps in advance.
  a_no_b_err: assert property (@(posedge clk) disable iff (!rst_n) b_valid |-> !b_err);
endmodule
