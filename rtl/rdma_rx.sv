// rdma_rx: the Receive Engine of the ExaNet RDMA receive unit.
//
// Following the paper: the payload of every incoming RDMA cell is forwarded, as it arrives
// (cut-through, no buffering), to its final place in memory with an AXI write that goes
// through the SMMU; the virtual address and the SMMU context (PDID + rank) come from the
// cell's destination address. The engine keeps dynamic contexts, 256 of them after Fig. 9,
// one per block in flight, to issue one acknowledgement per block to the sender and, when
// asked, a completion notification written to any virtual address of the receiving
// process. A block that hit a page fault (an SMMU error on a write) is negatively
// acknowledged, so the sender's firmware transmits it again; pages need not be pinned.
//
// This design's own choices: contexts are found by a fully associative match on
// {source node, source channel}; a block is counted complete when the write responses for
// all its bytes have come back; up to N_OUT write bursts may be outstanding; a cell whose
// checksum fails, or that finds no free context, spoils its block (NACK); the notification
// is one 16-byte word (bits 14:0 block length, 30:15 channel, 52:31 source node, bit 63 set)
// and is written before the block's ACK is sent.
//
// Interface: in_* takes RDMA write cells; wr_*/b_* is the memory write master (responses in
// order, always accepted); out_* sends RDMA_ACK/RDMA_NACK cells; n_* are statistics.
// Timing: payload words go to memory in the cycle they arrive; header and footer take one
// cycle each, plus one cycle of context lookup per cell.
module rdma_rx
  import exanet_pkg::*;
#(
  parameter int N_CTX = 256,   // Fig. 9: context table x256
  parameter int N_OUT = 8      // outstanding write bursts (paper: eight outstanding bursts)
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic [NODE_W-1:0] my_node,
  input  logic              in_valid,
  output logic              in_ready,
  input  flit_t             in_flit,
  output logic              wr_valid,
  input  logic              wr_ready,
  output logic [CTX_W-1:0]  wr_ctx,
  output logic [UVA_W-1:0]  wr_va,
  output word_t             wr_data,
  output logic              wr_last,
  input  logic              b_valid,
  input  logic              b_err,
  output logic              out_valid,
  input  logic              out_ready,
  output flit_t             out_flit,
  output logic [31:0]       n_acked,
  output logic [31:0]       n_nacked,
  output logic [31:0]       n_notif,
  output logic [31:0]       n_ctx_full
);
  localparam int XW  = $clog2(N_CTX);
  localparam int OW  = $clog2(N_OUT);
  localparam int QD  = 2 * N_OUT;           // completion queue depth
  localparam int QW  = $clog2(QD);

  // ---------------- context table ----------------
  logic [N_CTX-1:0]  cv;
  logic [NODE_W-1:0] c_src   [N_CTX];
  logic [15:0]       c_chan  [N_CTX];
  logic [14:0]       c_len   [N_CTX];
  logic [15:0]       c_bytes [N_CTX];
  logic              c_err   [N_CTX];
  logic              c_ntf   [N_CTX];
  logic [NVA_W-1:0]  c_nva   [N_CTX];
  logic [PDID_W-1:0] c_pdid  [N_CTX];

  // ---------------- receive path ----------------
  typedef enum logic [1:0] {R_HDR, R_PAY, R_FTR, R_LOOK} rst_e;
  rst_e        rs;
  cell_hdr_t   hdr;
  cell_ftr_t   ftr;
  logic [31:0] csum;
  logic [4:0]  widx;

  // outstanding write bursts, in order
  typedef struct packed {
    logic          notif;   // notification write: nothing to count
    logic          orphan;  // no context could be found
    logic [XW-1:0] idx;
    logic [8:0]    len;
    logic          bad;     // checksum failed
    logic [NODE_W-1:0] src; // for orphans
    logic [15:0]   chan;
    logic [PDID_W-1:0] pdid;
  } out_t;
  out_t         oq [N_OUT];
  logic [OW-1:0] oq_wp, oq_rp;
  logic [OW:0]   oq_n;

  // completed blocks waiting for notification + ACK
  typedef struct packed {
    logic [NODE_W-1:0] src;
    logic [15:0]       chan;
    logic [14:0]       len;
    logic              err;
    logic              ntf;
    logic [NVA_W-1:0]  nva;
    logic [PDID_W-1:0] pdid;
    logic [6:0]        reason;
  } comp_t;
  comp_t         cq [QD];
  logic [QW-1:0] cq_wp, cq_rp;
  logic [QW:0]   cq_n;

  typedef enum logic [1:0] {C_IDLE, C_NOTIF, C_AH, C_AF} cst_e;
  cst_e cs;
  comp_t cc;
  assign cc = cq[cq_rp];

  // a new cell may start only if its completion is sure to find room
  wire can_start = (int'(oq_n) + int'(cq_n) < QD - 1) && (oq_n != (OW+1)'(N_OUT)) && (cs != C_NOTIF);

  // context match / allocation
  logic          hit, free_found;
  logic [XW-1:0] hit_idx, free_idx;
  always_comb begin
    hit = 1'b0; hit_idx = '0; free_found = 1'b0; free_idx = '0;
    for (int i = N_CTX - 1; i >= 0; i--) begin
      if (cv[i] && c_src[i] == hdr.src_node && c_chan[i] == ftr.chan) begin
        hit = 1'b1; hit_idx = XW'(i);
      end
      if (!cv[i]) begin
        free_found = 1'b1; free_idx = XW'(i);
      end
    end
  end

  // write port: payload words, or a notification between cells
  wire notif_go = (cs == C_NOTIF) && (rs == R_HDR);
  always_comb begin
    in_ready = 1'b0;
    wr_valid = 1'b0;
    wr_ctx   = {hdr.dst.pdid, hdr.dst.rank};
    wr_va    = hdr.dst.va + UVA_W'({widx, 4'd0});
    wr_data  = in_flit.data;
    wr_last  = (int'(widx) + 1 == int'(words_of(hdr.len)));
    case (rs)
      R_HDR:  in_ready = can_start;
      R_PAY: begin
        wr_valid = in_valid;
        in_ready = wr_ready;
      end
      R_FTR:  in_ready = 1'b1;
      default: ;
    endcase
    if (notif_go) begin
      wr_valid = 1'b1;
      wr_ctx   = {cc.pdid, cc.nva[NVA_W-1 -: RANK_W]};
      wr_va    = cc.nva[UVA_W-1:0];
      wr_data  = {64'd0, 1'b1, 10'd0, cc.src, cc.chan, cc.len};
      wr_last  = 1'b1;
    end
  end

  // ---------------- ACK / NACK cells ----------------
  cell_hdr_t ahdr;
  cell_ftr_t aftr;
  always_comb begin
    ahdr          = '0;
    ahdr.dst.pdid = cc.pdid;
    ahdr.dst.node = cc.src;
    ahdr.src_node = my_node;
    ahdr.ctype    = cc.err ? CT_RDMA_NACK : CT_RDMA_ACK;
    aftr          = '0;
    aftr.chan     = cc.chan;
    aftr.blk_len  = cc.len;
    aftr.aux      = cc.reason;
    aftr.csum     = fold32(word_t'(ahdr));
    out_valid     = (cs == C_AH) || (cs == C_AF);
    out_flit      = (cs == C_AH) ? '{data: word_t'(ahdr), sop: 1'b1, eop: 1'b0}
                                 : '{data: word_t'(aftr), sop: 1'b0, eop: 1'b1};
  end

  cell_hdr_t in_hdr;
  assign in_hdr = cell_hdr_t'(in_flit.data);

  // ---------------- write responses ----------------
  out_t  ob;
  assign ob = oq[oq_rp];
  logic [15:0] nbytes;
  assign nbytes = c_bytes[ob.idx] + 16'(ob.len);
  // write responses are queued and matched in order with the outstanding entries (a
  // response may come back before the cell's footer has been looked up)
  logic [N_OUT:0] bq_err;
  logic [OW+1:0]  bq_n;
  wire  proc      = (oq_n != '0) && (bq_n != '0);
  wire  berr      = bq_err[0];
  wire pop_data  = proc && !ob.notif;
  wire comp_push = pop_data && (ob.orphan || nbytes >= 16'(c_len[ob.idx]));
  comp_t new_comp;
  always_comb begin
    new_comp = '0;
    if (ob.orphan) begin
      new_comp.src = ob.src; new_comp.chan = ob.chan; new_comp.pdid = ob.pdid;
      new_comp.err = 1'b1;   new_comp.reason = NR_FULL;
    end else begin
      new_comp.src  = c_src[ob.idx];  new_comp.chan = c_chan[ob.idx];
      new_comp.len  = c_len[ob.idx];  new_comp.pdid = c_pdid[ob.idx];
      new_comp.err  = c_err[ob.idx] || berr || ob.bad;
      new_comp.ntf  = c_ntf[ob.idx];  new_comp.nva = c_nva[ob.idx];
      new_comp.reason = (berr || c_err[ob.idx]) ? NR_FAULT : ob.bad ? NR_ERR : 7'd0;
    end
  end

  wire   look_push = (rs == R_LOOK);
  out_t  new_out;
  always_comb begin
    new_out        = '0;
    new_out.orphan = !hit && !free_found;
    new_out.idx    = hit ? hit_idx : free_idx;
    new_out.len    = hdr.len;
    new_out.bad    = (csum != ftr.csum);
    new_out.src    = hdr.src_node;
    new_out.chan   = ftr.chan;
    new_out.pdid   = hdr.dst.pdid;
  end
  out_t notif_out;
  always_comb begin
    notif_out       = '0;
    notif_out.notif = 1'b1;
  end

  always_ff @(posedge clk) begin
    if (look_push) oq[oq_wp] <= new_out;
    else if (notif_go && wr_ready) oq[oq_wp] <= notif_out;
    if (comp_push) cq[cq_wp] <= new_comp;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rs <= R_HDR; hdr <= '0; ftr <= '0; csum <= '0; widx <= '0;
      cv <= '0; bq_err <= '0; bq_n <= '0; oq_wp <= '0; oq_rp <= '0; oq_n <= '0; cq_wp <= '0; cq_rp <= '0; cq_n <= '0;
      cs <= C_IDLE; n_acked <= '0; n_nacked <= '0; n_notif <= '0; n_ctx_full <= '0;
      for (int i = 0; i < N_CTX; i++) begin
        c_src[i] <= '0; c_chan[i] <= '0; c_len[i] <= '0; c_bytes[i] <= '0; c_err[i] <= 1'b0;
        c_ntf[i] <= 1'b0; c_nva[i] <= '0; c_pdid[i] <= '0;
      end
    end else begin
      // ---- receive FSM ----
      case (rs)
        R_HDR: if (in_valid && in_ready && in_flit.sop) begin
          hdr  <= cell_hdr_t'(in_flit.data);
          csum <= fold32(in_flit.data);
          widx <= '0;
          rs   <= (in_hdr.len == '0) ? R_FTR : R_PAY;
        end
        R_PAY: if (in_valid && wr_ready) begin
          csum <= csum ^ fold32(in_flit.data);
          widx <= widx + 1'b1;
          if (wr_last) rs <= R_FTR;
        end
        R_FTR: if (in_valid) begin
          ftr <= cell_ftr_t'(in_flit.data);
          rs  <= R_LOOK;
        end
        R_LOOK: begin
          rs <= R_HDR;
          if (!hit && free_found) begin
            cv[free_idx]      <= 1'b1;
            c_src[free_idx]   <= hdr.src_node;
            c_chan[free_idx]  <= ftr.chan;
            c_len[free_idx]   <= ftr.blk_len;
            c_bytes[free_idx] <= '0;
            c_err[free_idx]   <= (csum != ftr.csum);
            c_ntf[free_idx]   <= ftr.notify;
            c_nva[free_idx]   <= ftr.notif_va;
            c_pdid[free_idx]  <= hdr.dst.pdid;
          end else if (hit) begin
            if (csum != ftr.csum) c_err[hit_idx] <= 1'b1;
          end else begin
            n_ctx_full <= n_ctx_full + 1'b1;
          end
        end
      endcase

      // ---- write responses ----
      if (pop_data && !ob.orphan) begin
        c_bytes[ob.idx] <= nbytes;
        if (berr) c_err[ob.idx] <= 1'b1;
        if (comp_push) cv[ob.idx] <= 1'b0;
      end
      if (proc) oq_rp <= oq_rp + 1'b1;
      // response queue (shift register, entry 0 is the oldest)
      begin
        logic [N_OUT:0] q;
        q = bq_err;
        if (proc) q = q >> 1;
        if (b_valid) q[int'(bq_n) - int'(proc)] = b_err;
        bq_err <= q;
        bq_n   <= bq_n + (OW+2)'(b_valid) - (OW+2)'(proc);
      end
      if (look_push || (notif_go && wr_ready)) oq_wp <= oq_wp + 1'b1;
      oq_n <= oq_n + (OW+1)'(look_push || (notif_go && wr_ready)) - (OW+1)'(proc);

      // ---- completions ----
      if (comp_push) cq_wp <= cq_wp + 1'b1;
      case (cs)
        C_IDLE:  if (cq_n != '0) cs <= (cc.ntf && !cc.err) ? C_NOTIF : C_AH;
        C_NOTIF: if (notif_go && wr_ready) begin
          n_notif <= n_notif + 1'b1;
          cs <= C_AH;
        end
        C_AH:    if (out_ready) cs <= C_AF;
        C_AF:    if (out_ready) begin
          if (cc.err) n_nacked <= n_nacked + 1'b1;
          else        n_acked  <= n_acked + 1'b1;
          cs <= C_IDLE;
        end
      endcase
      cq_n <= cq_n + (QW+1)'(comp_push) - (QW+1)'((cs == C_AF) && out_ready);
      if ((cs == C_AF) && out_ready) cq_rp <= cq_rp + 1'b1;
    end
  end

  a_oq_no_overflow: assert property (@(posedge clk) disable iff (!rst_n)
                                     (look_push || notif_go) |-> oq_n != (OW+1)'(N_OUT) || proc);
  a_bq_no_overflow: assert property (@(posedge clk) disable iff (!rst_n)
                                     b_valid |-> int'(bq_n) <= N_OUT);
endmodule
