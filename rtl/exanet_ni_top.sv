// exanet_ni_top: the ExaNet network interface of one FPGA (MPSoC) of the ExaNeSt prototype.
//
// Following the paper (Fig. 8): a packetizer and a mailbox for small messages, the RDMA
// engine (user channels, hardware send engine, receive engine), the Allreduce accelerator,
// and an on-chip cut-through switch that joins these endpoints to the FPGA's network
// links. Everything reaches host memory through one AXI-4 master (128-bit read and write
// channels) that goes through the SMMU of the ARM processing system.
//
// Parts the paper does not design, or that are outside logic, stay outside this module and
// are reached through its ports: the ARM cores and the SMMU (the axi_* master and the cpu_*
// register ports), the R5 co-processor firmware that drives RDMA transfers (fw_* and blk_*
// ports), and the link PHYs (the link_* ports carry words and credits per link).
//
// This design's own choices: the endpoint numbering of the switch (mailbox 0, packetizer 1,
// RDMA send 2, RDMA receive 3, Allreduce 4, then links 0..3), the AXI ids (writes: mailbox 0,
// RDMA receive 1, Allreduce 2; reads: RDMA send 0, Allreduce 1), and the register-port style.
// Timing: one 128-bit word per cycle per path at the NI clock (150 MHz in the paper).
module exanet_ni_top
  import exanet_pkg::*;
#(
  parameter int N_MBOX_IF  = 64,     // paper: 64 mailbox / packetizer interfaces
  parameter int N_PKT_CH   = 4,      // paper: 4 packetizer channels per interface
  parameter int N_PAGE     = 16,     // paper: 16 RDMA pages
  parameter int N_WRCH     = 32,     // paper: 32 write channels per page
  parameter int N_RDCH     = 32,     // paper: 32 read channels per page
  parameter int LINK_DEPTH = 256,    // paper: 4 KB link buffers (128-bit words)
  parameter int N_CTX      = 256,    // Fig. 9: receive context table x256
  parameter int N_BUF      = 8,      // paper: eight outstanding AXI bursts
  parameter int TIMEOUT_CYC = 15000, // assumed packetizer timeout (100 us at 150 MHz)
  parameter int MAX_RANKS  = 1024    // paper: Allreduce up to 1024 ranks
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic [NODE_W-1:0] my_node,
  // packetizer registers
  input  logic              pk_cfg_we,
  input  logic [$clog2(N_MBOX_IF)-1:0] pk_cfg_if,
  input  logic [PDID_W-1:0] pk_cfg_pdid,
  input  logic              pk_we,
  input  logic [$clog2(N_MBOX_IF)-1:0] pk_if,
  input  logic [$clog2(N_PKT_CH)-1:0]  pk_ch,
  input  logic [2:0]        pk_word,
  input  word_t             pk_wdata,
  input  logic [$clog2(N_MBOX_IF)-1:0] pk_st_if,
  output logic [N_PKT_CH*3-1:0] pk_st_state,
  // mailbox registers
  input  logic              mb_cfg_we,
  input  logic [$clog2(N_MBOX_IF)-1:0] mb_cfg_if,
  input  logic [PDID_W-1:0] mb_cfg_pdid,
  input  logic [RANK_W-1:0] mb_cfg_rank,
  input  logic [UVA_W-1:0]  mb_cfg_base,
  input  logic [3:0]        mb_cfg_log2slots,
  input  logic              mb_hd_we,
  input  logic [$clog2(N_MBOX_IF)-1:0] mb_hd_if,
  input  logic [15:0]       mb_hd_val,
  input  logic [$clog2(N_MBOX_IF)-1:0] mb_tl_if,
  output logic [15:0]       mb_tl_val,
  output logic [31:0]       mb_n_acked,
  output logic [31:0]       mb_n_nacked,
  // RDMA channel registers
  input  logic              rc_cfg_we,
  input  logic [$clog2(N_PAGE)-1:0] rc_cfg_page,
  input  logic [PDID_W-1:0] rc_cfg_pdid,
  input  logic              rc_we,
  input  logic [$clog2(N_PAGE*(N_WRCH+N_RDCH))-1:0] rc_chan,
  input  logic [1:0]        rc_word,
  input  word_t             rc_wdata,
  input  logic [$clog2(N_PAGE*(N_WRCH+N_RDCH))-1:0] rc_st_chan,
  output logic [1:0]        rc_st_state,
  // R5 firmware side of the RDMA engine
  output logic              fw_pend_valid,
  input  logic              fw_pend_pop,
  output logic [$clog2(N_PAGE*(N_WRCH+N_RDCH))-1:0] fw_pend_chan,
  output logic [4*WORD_W-1:0] fw_pend_desc,
  output logic [PDID_W-1:0] fw_pend_pdid,
  input  logic              fw_alloc_req,
  input  logic [$clog2(N_PAGE)-1:0] fw_alloc_page,
  input  logic [4*WORD_W-1:0] fw_alloc_desc,
  output logic              fw_alloc_ok,
  output logic [$clog2(N_PAGE*(N_WRCH+N_RDCH))-1:0] fw_alloc_chan,
  input  logic              fw_done_we,
  input  logic [$clog2(N_PAGE*(N_WRCH+N_RDCH))-1:0] fw_done_chan,
  input  logic              fw_done_err,
  input  logic              blk_valid,
  output logic              blk_ready,
  input  logic [15:0]       blk_chan,
  input  logic [CTX_W-1:0]  blk_ctx,
  input  logic [UVA_W-1:0]  blk_src_va,
  input  gva_t              blk_dst,
  input  logic [14:0]       blk_len,
  input  logic              blk_notify,
  input  logic [NVA_W-1:0]  blk_notif_va,
  output logic              ack_evt_valid,
  output logic [15:0]       ack_evt_chan,
  output logic              ack_evt_nack,
  output logic [6:0]        ack_evt_reason,
  output logic              tx_done_valid,
  output logic [15:0]       tx_done_chan,
  output logic              tx_done_err,
  output logic [31:0]       rx_n_acked,
  output logic [31:0]       rx_n_nacked,
  output logic [31:0]       rx_n_notif,
  output logic [31:0]       rx_n_ctx_full,
  // Allreduce accelerator registers
  input  logic              ar_start,
  input  ar_op_e            ar_cfg_op,
  input  ar_dt_e            ar_cfg_dtype,
  input  logic [LEN_W-1:0]  ar_cfg_len,
  input  logic [$clog2(MAX_RANKS)-1:0] ar_cfg_rank,
  input  logic [3:0]        ar_cfg_log2n,
  input  logic [CTX_W-1:0]  ar_cfg_ctx,
  input  logic [UVA_W-1:0]  ar_cfg_data_va,
  input  logic [UVA_W-1:0]  ar_cfg_table_va,
  output logic              ar_busy,
  output logic              ar_done,
  output logic [31:0]       ar_n_done,
  // AXI master towards the processing system (through the SMMU)
  output logic              axi_wr_valid,
  input  logic              axi_wr_ready,
  output logic [CTX_W-1:0]  axi_wr_ctx,
  output logic [UVA_W-1:0]  axi_wr_va,
  output word_t             axi_wr_data,
  output logic              axi_wr_last,
  output logic [1:0]        axi_wr_id,
  input  logic              axi_b_valid,
  input  logic [1:0]        axi_b_id,
  input  logic              axi_b_err,
  output logic              axi_ar_valid,
  input  logic              axi_ar_ready,
  output logic [CTX_W-1:0]  axi_ar_ctx,
  output logic [UVA_W-1:0]  axi_ar_va,
  output logic [4:0]        axi_ar_beats,
  output logic [1:0]        axi_ar_id,
  input  logic              axi_r_valid,
  input  logic [1:0]        axi_r_id,
  input  word_t             axi_r_data,
  input  logic              axi_r_last,
  input  logic              axi_r_err,
  // network links (towards the PHYs)
  output logic [N_LINK-1:0] link_out_valid,
  output flit_t             link_out_flit [N_LINK],
  input  logic [N_LINK-1:0] link_credit_in,
  input  logic [N_LINK-1:0] link_in_valid,
  input  flit_t             link_in_flit  [N_LINK],
  output logic [N_LINK-1:0] link_credit_out,
  output logic [N_LINK-1:0] link_overflow
);
  // ---------------- switch ports ----------------
  logic [N_PORT-1:0] sw_in_valid, sw_in_ready, sw_out_valid, sw_out_ready;
  flit_t             sw_in_flit [N_PORT];
  flit_t             sw_out_flit[N_PORT];

  ni_switch #(.NP(N_PORT)) u_switch (
    .clk, .rst_n, .my_node,
    .in_valid(sw_in_valid), .in_ready(sw_in_ready), .in_flit(sw_in_flit),
    .out_valid(sw_out_valid), .out_ready(sw_out_ready), .out_flit(sw_out_flit));

  // ---------------- links ----------------
  for (genvar l = 0; l < N_LINK; l++) begin : g_link
    link_port #(.DEPTH(LINK_DEPTH)) u_link (
      .clk, .rst_n,
      .tx_valid(sw_out_valid[N_EP + l]), .tx_ready(sw_out_ready[N_EP + l]),
      .tx_flit(sw_out_flit[N_EP + l]),
      .link_out_valid(link_out_valid[l]), .link_out_flit(link_out_flit[l]),
      .credit_in(link_credit_in[l]),
      .link_in_valid(link_in_valid[l]), .link_in_flit(link_in_flit[l]),
      .rx_valid(sw_in_valid[N_EP + l]), .rx_ready(sw_in_ready[N_EP + l]),
      .rx_flit(sw_in_flit[N_EP + l]),
      .credit_out(link_credit_out[l]), .overflow(link_overflow[l]));
  end

  // ---------------- memory masters ----------------
  localparam int NW = 3, NR = 2;
  logic [NW-1:0]    mw_valid, mw_ready, mw_last, mb_valid;
  logic [CTX_W-1:0] mw_ctx  [NW];
  logic [UVA_W-1:0] mw_va   [NW];
  word_t            mw_data [NW];
  logic             mb_err;
  logic [NR-1:0]    mr_avalid, mr_aready, mr_rvalid;
  logic [CTX_W-1:0] mr_actx  [NR];
  logic [UVA_W-1:0] mr_ava   [NR];
  logic [4:0]       mr_abeats[NR];
  word_t            mr_rdata;
  logic             mr_rlast, mr_rerr;

  axi_mux #(.NW(NW), .NR(NR)) u_axi (
    .clk, .rst_n,
    .s_wr_valid(mw_valid), .s_wr_ready(mw_ready), .s_wr_ctx(mw_ctx), .s_wr_va(mw_va),
    .s_wr_data(mw_data), .s_wr_last(mw_last), .s_b_valid(mb_valid), .s_b_err(mb_err),
    .m_wr_valid(axi_wr_valid), .m_wr_ready(axi_wr_ready), .m_wr_ctx(axi_wr_ctx),
    .m_wr_va(axi_wr_va), .m_wr_data(axi_wr_data), .m_wr_last(axi_wr_last), .m_wr_id(axi_wr_id),
    .m_b_valid(axi_b_valid), .m_b_id(axi_b_id), .m_b_err(axi_b_err),
    .s_ar_valid(mr_avalid), .s_ar_ready(mr_aready), .s_ar_ctx(mr_actx), .s_ar_va(mr_ava),
    .s_ar_beats(mr_abeats), .s_r_valid(mr_rvalid), .s_r_data(mr_rdata), .s_r_last(mr_rlast),
    .s_r_err(mr_rerr),
    .m_ar_valid(axi_ar_valid), .m_ar_ready(axi_ar_ready), .m_ar_ctx(axi_ar_ctx),
    .m_ar_va(axi_ar_va), .m_ar_beats(axi_ar_beats), .m_ar_id(axi_ar_id),
    .m_r_valid(axi_r_valid), .m_r_id(axi_r_id), .m_r_data(axi_r_data), .m_r_last(axi_r_last),
    .m_r_err(axi_r_err));

  // ---------------- packetizer (endpoint 1) ----------------
  packetizer #(.N_IF(N_MBOX_IF), .N_CH(N_PKT_CH), .TIMEOUT_CYC(TIMEOUT_CYC)) u_pkt (
    .clk, .rst_n, .my_node,
    .cfg_we(pk_cfg_we), .cfg_if(pk_cfg_if), .cfg_pdid(pk_cfg_pdid),
    .cpu_we(pk_we), .cpu_if(pk_if), .cpu_ch(pk_ch), .cpu_word(pk_word), .cpu_wdata(pk_wdata),
    .st_if(pk_st_if), .st_state(pk_st_state),
    .out_valid(sw_in_valid[EP_PKT]), .out_ready(sw_in_ready[EP_PKT]), .out_flit(sw_in_flit[EP_PKT]),
    .in_valid(sw_out_valid[EP_PKT]), .in_ready(sw_out_ready[EP_PKT]), .in_flit(sw_out_flit[EP_PKT]));

  // ---------------- mailbox (endpoint 0, write master 0) ----------------
  mailbox #(.N_IF(N_MBOX_IF)) u_mbox (
    .clk, .rst_n, .my_node,
    .cfg_we(mb_cfg_we), .cfg_if(mb_cfg_if), .cfg_pdid(mb_cfg_pdid), .cfg_rank(mb_cfg_rank),
    .cfg_base(mb_cfg_base), .cfg_log2slots(mb_cfg_log2slots),
    .hd_we(mb_hd_we), .hd_if(mb_hd_if), .hd_val(mb_hd_val), .tl_if(mb_tl_if), .tl_val(mb_tl_val),
    .in_valid(sw_out_valid[EP_MBOX]), .in_ready(sw_out_ready[EP_MBOX]), .in_flit(sw_out_flit[EP_MBOX]),
    .out_valid(sw_in_valid[EP_MBOX]), .out_ready(sw_in_ready[EP_MBOX]), .out_flit(sw_in_flit[EP_MBOX]),
    .wr_valid(mw_valid[0]), .wr_ready(mw_ready[0]), .wr_ctx(mw_ctx[0]), .wr_va(mw_va[0]),
    .wr_data(mw_data[0]), .wr_last(mw_last[0]), .b_valid(mb_valid[0]), .b_err(mb_err),
    .n_acked(mb_n_acked), .n_nacked(mb_n_nacked));

  // ---------------- RDMA channels ----------------
  rdma_channels #(.N_PAGE(N_PAGE), .N_WRCH(N_WRCH), .N_RDCH(N_RDCH)) u_rch (
    .clk, .rst_n,
    .cfg_we(rc_cfg_we), .cfg_page(rc_cfg_page), .cfg_pdid(rc_cfg_pdid),
    .cpu_we(rc_we), .cpu_chan(rc_chan), .cpu_word(rc_word), .cpu_wdata(rc_wdata),
    .st_chan(rc_st_chan), .st_state(rc_st_state),
    .fw_pend_valid, .fw_pend_pop, .fw_pend_chan, .fw_pend_desc, .fw_pend_pdid,
    .fw_alloc_req, .fw_alloc_page, .fw_alloc_desc, .fw_alloc_ok, .fw_alloc_chan,
    .fw_done_we, .fw_done_chan, .fw_done_err);

  // ---------------- RDMA send engine (endpoint 2, read master 0) ----------------
  rdma_tx #(.N_BUF(N_BUF)) u_rtx (
    .clk, .rst_n, .my_node,
    .blk_valid, .blk_ready, .blk_chan, .blk_ctx, .blk_src_va, .blk_dst, .blk_len,
    .blk_notify, .blk_notif_va,
    .ar_valid(mr_avalid[0]), .ar_ready(mr_aready[0]), .ar_ctx(mr_actx[0]), .ar_va(mr_ava[0]),
    .ar_beats(mr_abeats[0]), .r_valid(mr_rvalid[0]), .r_data(mr_rdata), .r_last(mr_rlast),
    .r_err(mr_rerr),
    .out_valid(sw_in_valid[EP_RDMATX]), .out_ready(sw_in_ready[EP_RDMATX]),
    .out_flit(sw_in_flit[EP_RDMATX]),
    .in_valid(sw_out_valid[EP_RDMATX]), .in_ready(sw_out_ready[EP_RDMATX]),
    .in_flit(sw_out_flit[EP_RDMATX]),
    .ack_evt_valid, .ack_evt_chan, .ack_evt_nack, .ack_evt_reason,
    .done_valid(tx_done_valid), .done_chan(tx_done_chan), .done_err(tx_done_err));

  // ---------------- RDMA receive engine (endpoint 3, write master 1) ----------------
  rdma_rx #(.N_CTX(N_CTX), .N_OUT(N_BUF)) u_rrx (
    .clk, .rst_n, .my_node,
    .in_valid(sw_out_valid[EP_RDMARX]), .in_ready(sw_out_ready[EP_RDMARX]),
    .in_flit(sw_out_flit[EP_RDMARX]),
    .wr_valid(mw_valid[1]), .wr_ready(mw_ready[1]), .wr_ctx(mw_ctx[1]), .wr_va(mw_va[1]),
    .wr_data(mw_data[1]), .wr_last(mw_last[1]), .b_valid(mb_valid[1]), .b_err(mb_err),
    .out_valid(sw_in_valid[EP_RDMARX]), .out_ready(sw_in_ready[EP_RDMARX]),
    .out_flit(sw_in_flit[EP_RDMARX]),
    .n_acked(rx_n_acked), .n_nacked(rx_n_nacked), .n_notif(rx_n_notif),
    .n_ctx_full(rx_n_ctx_full));

  // ---------------- Allreduce accelerator (endpoint 4, write 2, read 1) ----------------
  allreduce_engine #(.MAX_RANKS(MAX_RANKS)) u_ar (
    .clk, .rst_n, .my_node,
    .start(ar_start), .cfg_op(ar_cfg_op), .cfg_dtype(ar_cfg_dtype), .cfg_len(ar_cfg_len),
    .cfg_rank(ar_cfg_rank), .cfg_log2n(ar_cfg_log2n), .cfg_ctx(ar_cfg_ctx),
    .cfg_data_va(ar_cfg_data_va), .cfg_table_va(ar_cfg_table_va),
    .busy(ar_busy), .done(ar_done), .n_done(ar_n_done),
    .ar_valid(mr_avalid[1]), .ar_ready(mr_aready[1]), .ar_ctx(mr_actx[1]), .ar_va(mr_ava[1]),
    .ar_beats(mr_abeats[1]), .r_valid(mr_rvalid[1]), .r_data(mr_rdata), .r_last(mr_rlast),
    .r_err(mr_rerr),
    .wr_valid(mw_valid[2]), .wr_ready(mw_ready[2]), .wr_ctx(mw_ctx[2]), .wr_va(mw_va[2]),
    .wr_data(mw_data[2]), .wr_last(mw_last[2]), .b_valid(mb_valid[2]), .b_err(mb_err),
    .out_valid(sw_in_valid[EP_AR]), .out_ready(sw_in_ready[EP_AR]), .out_flit(sw_in_flit[EP_AR]),
    .in_valid(sw_out_valid[EP_AR]), .in_ready(sw_out_ready[EP_AR]), .in_flit(sw_out_flit[EP_AR]));
endmodule
