// tb_exanet_ni_top: end-to-end test of the ExaNet NI at its default sizes. Four NIs form one
// QFDB: node ids 0x100..0x103 (FPGA index in the two low bits; FPGA 0 is the 'Network'
// FPGA), fully meshed with their links, each with its own memory model (tb_axi_mem). The
// testbench plays the cores (register stores) and the R5 firmware (pops rung RDMA
// channels, hands blocks to the send engine, posts completion).
// Scenario and the mechanisms it must see at least once:
//   mailbox ACK (message stored in the right slot), PDID NACK, mailbox-full NACK,
//   packetizer timeout (message to an unreachable QFDB), RDMA write of a 16 KB block with
//   notification while the receiver's memory stalls (link credit stall), RDMA page fault
//   NACK, and an int-sum Allreduce over the 4 ranks (gather + broadcast).
// The data written to the receivers' memories is compared with what was sent.
`timescale 1ns/1ps
module tb_exanet_ni_top;
  import exanet_pkg::*;
  localparam int N = 4;
  logic clk = 0, rst_n = 0;
  always #3.333 clk = ~clk;   // 150 MHz
  int checks = 0, failures = 0;
  localparam int CW = $clog2(16 * 64);

  // ---------------- per-node signals ----------------
  logic [NODE_W-1:0] node_id [N];
  logic pk_cfg_we [N]; logic [5:0] pk_cfg_if [N]; logic [15:0] pk_cfg_pdid [N];
  logic pk_we [N]; logic [5:0] pk_if [N]; logic [1:0] pk_ch [N]; logic [2:0] pk_word [N]; word_t pk_wdata [N];
  logic [5:0] pk_st_if [N]; logic [11:0] pk_st_state [N];
  logic mb_cfg_we [N]; logic [5:0] mb_cfg_if [N]; logic [15:0] mb_cfg_pdid [N]; logic [2:0] mb_cfg_rank [N];
  logic [UVA_W-1:0] mb_cfg_base [N]; logic [3:0] mb_cfg_log2slots [N];
  logic mb_hd_we [N]; logic [5:0] mb_hd_if [N]; logic [15:0] mb_hd_val [N]; logic [5:0] mb_tl_if [N];
  logic [15:0] mb_tl_val [N]; logic [31:0] mb_n_acked [N], mb_n_nacked [N];
  logic rc_cfg_we [N]; logic [3:0] rc_cfg_page [N]; logic [15:0] rc_cfg_pdid [N];
  logic rc_we [N]; logic [CW-1:0] rc_chan [N]; logic [1:0] rc_word [N]; word_t rc_wdata [N];
  logic [CW-1:0] rc_st_chan [N]; logic [1:0] rc_st_state [N];
  logic fw_pend_valid [N], fw_pend_pop [N]; logic [CW-1:0] fw_pend_chan [N];
  logic [4*WORD_W-1:0] fw_pend_desc [N]; logic [15:0] fw_pend_pdid [N];
  logic fw_alloc_ok [N]; logic [CW-1:0] fw_alloc_chan [N];
  logic fw_done_we [N]; logic [CW-1:0] fw_done_chan [N]; logic fw_done_err [N];
  logic blk_valid [N], blk_ready [N]; logic [15:0] blk_chan [N]; logic [CTX_W-1:0] blk_ctx [N];
  logic [UVA_W-1:0] blk_src_va [N]; gva_t blk_dst [N]; logic [14:0] blk_len [N];
  logic blk_notify [N]; logic [NVA_W-1:0] blk_notif_va [N];
  logic ack_evt_valid [N]; logic [15:0] ack_evt_chan [N]; logic ack_evt_nack [N]; logic [6:0] ack_evt_reason [N];
  logic tx_done_valid [N]; logic [15:0] tx_done_chan [N]; logic tx_done_err [N];
  logic [31:0] rx_n_acked [N], rx_n_nacked [N], rx_n_notif [N], rx_n_ctx_full [N];
  logic ar_start [N]; ar_op_e ar_cfg_op [N]; ar_dt_e ar_cfg_dtype [N]; logic [8:0] ar_cfg_len [N];
  logic [9:0] ar_cfg_rank [N]; logic [3:0] ar_cfg_log2n [N]; logic [CTX_W-1:0] ar_cfg_ctx [N];
  logic [UVA_W-1:0] ar_cfg_data_va [N], ar_cfg_table_va [N];
  logic ar_busy [N], ar_done [N]; logic [31:0] ar_n_done [N];
  logic axi_wr_valid [N], axi_wr_ready [N], axi_wr_last [N], axi_b_valid [N], axi_b_err [N];
  logic [CTX_W-1:0] axi_wr_ctx [N], axi_ar_ctx [N]; logic [UVA_W-1:0] axi_wr_va [N], axi_ar_va [N];
  word_t axi_wr_data [N], axi_r_data [N]; logic [1:0] axi_wr_id [N], axi_b_id [N], axi_ar_id [N], axi_r_id [N];
  logic axi_ar_valid [N], axi_ar_ready [N], axi_r_valid [N], axi_r_last [N], axi_r_err [N];
  logic [4:0] axi_ar_beats [N];
  logic wr_stall [N];
  logic [N_LINK-1:0] l_out_v [N], l_cr_in [N], l_in_v [N], l_cr_out [N], l_ovf [N];
  flit_t l_out_f [N][N_LINK];
  flit_t l_in_f  [N][N_LINK];

  // full mesh inside the QFDB: node a reaches node b on link ((b-a) mod 4) - 1; link 3 is
  // the way out of the QFDB and is left unconnected (no credits come back, nothing arrives)
  always_comb begin
    for (int a = 0; a < N; a++) begin
      l_in_v[a] = '0; l_cr_in[a] = '0;
      for (int l = 0; l < N_LINK; l++) l_in_f[a][l] = '0;
    end
    for (int a = 0; a < N; a++)
      for (int b = 0; b < N; b++) if (a != b) begin
        int la, lb;
        la = ((b - a + 4) % 4) - 1;   // a's link towards b
        lb = ((a - b + 4) % 4) - 1;   // b's link towards a
        l_in_v[b][lb]  = l_out_v[a][la];
        l_in_f[b][lb]  = l_out_f[a][la];
        l_cr_in[a][la] = l_cr_out[b][lb];
      end
  end

  for (genvar n = 0; n < N; n++) begin : g_node
    flit_t lof [N_LINK];
    flit_t lif [N_LINK];
    for (genvar l = 0; l < N_LINK; l++) begin : g_l
      assign l_out_f[n][l] = lof[l];
      assign lif[l] = l_in_f[n][l];
    end
    exanet_ni_top u_ni (
      .clk, .rst_n, .my_node(node_id[n]),
      .pk_cfg_we(pk_cfg_we[n]), .pk_cfg_if(pk_cfg_if[n]), .pk_cfg_pdid(pk_cfg_pdid[n]),
      .pk_we(pk_we[n]), .pk_if(pk_if[n]), .pk_ch(pk_ch[n]), .pk_word(pk_word[n]), .pk_wdata(pk_wdata[n]),
      .pk_st_if(pk_st_if[n]), .pk_st_state(pk_st_state[n]),
      .mb_cfg_we(mb_cfg_we[n]), .mb_cfg_if(mb_cfg_if[n]), .mb_cfg_pdid(mb_cfg_pdid[n]),
      .mb_cfg_rank(mb_cfg_rank[n]), .mb_cfg_base(mb_cfg_base[n]), .mb_cfg_log2slots(mb_cfg_log2slots[n]),
      .mb_hd_we(mb_hd_we[n]), .mb_hd_if(mb_hd_if[n]), .mb_hd_val(mb_hd_val[n]),
      .mb_tl_if(mb_tl_if[n]), .mb_tl_val(mb_tl_val[n]),
      .mb_n_acked(mb_n_acked[n]), .mb_n_nacked(mb_n_nacked[n]),
      .rc_cfg_we(rc_cfg_we[n]), .rc_cfg_page(rc_cfg_page[n]), .rc_cfg_pdid(rc_cfg_pdid[n]),
      .rc_we(rc_we[n]), .rc_chan(rc_chan[n]), .rc_word(rc_word[n]), .rc_wdata(rc_wdata[n]),
      .rc_st_chan(rc_st_chan[n]), .rc_st_state(rc_st_state[n]),
      .fw_pend_valid(fw_pend_valid[n]), .fw_pend_pop(fw_pend_pop[n]), .fw_pend_chan(fw_pend_chan[n]),
      .fw_pend_desc(fw_pend_desc[n]), .fw_pend_pdid(fw_pend_pdid[n]),
      .fw_alloc_req(1'b0), .fw_alloc_page(4'd0), .fw_alloc_desc('0),
      .fw_alloc_ok(fw_alloc_ok[n]), .fw_alloc_chan(fw_alloc_chan[n]),
      .fw_done_we(fw_done_we[n]), .fw_done_chan(fw_done_chan[n]), .fw_done_err(fw_done_err[n]),
      .blk_valid(blk_valid[n]), .blk_ready(blk_ready[n]), .blk_chan(blk_chan[n]), .blk_ctx(blk_ctx[n]),
      .blk_src_va(blk_src_va[n]), .blk_dst(blk_dst[n]), .blk_len(blk_len[n]),
      .blk_notify(blk_notify[n]), .blk_notif_va(blk_notif_va[n]),
      .ack_evt_valid(ack_evt_valid[n]), .ack_evt_chan(ack_evt_chan[n]), .ack_evt_nack(ack_evt_nack[n]),
      .ack_evt_reason(ack_evt_reason[n]),
      .tx_done_valid(tx_done_valid[n]), .tx_done_chan(tx_done_chan[n]), .tx_done_err(tx_done_err[n]),
      .rx_n_acked(rx_n_acked[n]), .rx_n_nacked(rx_n_nacked[n]), .rx_n_notif(rx_n_notif[n]),
      .rx_n_ctx_full(rx_n_ctx_full[n]),
      .ar_start(ar_start[n]), .ar_cfg_op(ar_cfg_op[n]), .ar_cfg_dtype(ar_cfg_dtype[n]),
      .ar_cfg_len(ar_cfg_len[n]), .ar_cfg_rank(ar_cfg_rank[n]), .ar_cfg_log2n(ar_cfg_log2n[n]),
      .ar_cfg_ctx(ar_cfg_ctx[n]), .ar_cfg_data_va(ar_cfg_data_va[n]), .ar_cfg_table_va(ar_cfg_table_va[n]),
      .ar_busy(ar_busy[n]), .ar_done(ar_done[n]), .ar_n_done(ar_n_done[n]),
      .axi_wr_valid(axi_wr_valid[n]), .axi_wr_ready(axi_wr_ready[n]), .axi_wr_ctx(axi_wr_ctx[n]),
      .axi_wr_va(axi_wr_va[n]), .axi_wr_data(axi_wr_data[n]), .axi_wr_last(axi_wr_last[n]),
      .axi_wr_id(axi_wr_id[n]), .axi_b_valid(axi_b_valid[n]), .axi_b_id(axi_b_id[n]), .axi_b_err(axi_b_err[n]),
      .axi_ar_valid(axi_ar_valid[n]), .axi_ar_ready(axi_ar_ready[n]), .axi_ar_ctx(axi_ar_ctx[n]),
      .axi_ar_va(axi_ar_va[n]), .axi_ar_beats(axi_ar_beats[n]), .axi_ar_id(axi_ar_id[n]),
      .axi_r_valid(axi_r_valid[n]), .axi_r_id(axi_r_id[n]), .axi_r_data(axi_r_data[n]),
      .axi_r_last(axi_r_last[n]), .axi_r_err(axi_r_err[n]),
      .link_out_valid(l_out_v[n]), .link_out_flit(lof), .link_credit_in(l_cr_in[n]),
      .link_in_valid(l_in_v[n]), .link_in_flit(lif), .link_credit_out(l_cr_out[n]),
      .link_overflow(l_ovf[n]));
    tb_axi_mem u_mem (
      .clk, .rst_n, .wr_stall(wr_stall[n]),
      .wr_valid(axi_wr_valid[n]), .wr_ready(axi_wr_ready[n]), .wr_ctx(axi_wr_ctx[n]),
      .wr_va(axi_wr_va[n]), .wr_data(axi_wr_data[n]), .wr_last(axi_wr_last[n]), .wr_id(axi_wr_id[n]),
      .b_valid(axi_b_valid[n]), .b_id(axi_b_id[n]), .b_err(axi_b_err[n]),
      .ar_valid(axi_ar_valid[n]), .ar_ready(axi_ar_ready[n]), .ar_ctx(axi_ar_ctx[n]),
      .ar_va(axi_ar_va[n]), .ar_beats(axi_ar_beats[n]), .ar_id(axi_ar_id[n]),
      .r_valid(axi_r_valid[n]), .r_id(axi_r_id[n]), .r_data(axi_r_data[n]),
      .r_last(axi_r_last[n]), .r_err(axi_r_err[n]));
  end

  // backdoor access to the memory models
  function automatic word_t mem_rd(int n, longint unsigned va);
    case (n)
      0: return g_node[0].u_mem.rd(va >> 4);
      1: return g_node[1].u_mem.rd(va >> 4);
      2: return g_node[2].u_mem.rd(va >> 4);
      default: return g_node[3].u_mem.rd(va >> 4);
    endcase
  endfunction
  task automatic mem_wr(int n, longint unsigned va, word_t d);
    case (n)
      0: g_node[0].u_mem.mem[va >> 4] = d;
      1: g_node[1].u_mem.mem[va >> 4] = d;
      2: g_node[2].u_mem.mem[va >> 4] = d;
      default: g_node[3].u_mem.mem[va >> 4] = d;
    endcase
  endtask

  // ---------------- mechanism counters ----------------
  int m_mb_ack, m_nack_pdid, m_nack_full, m_timeout, m_credit_stall, m_rdma_ack, m_rdma_nack,
      m_notif, m_ar_done, m_mem_stall;
  always @(posedge clk) if (rst_n) begin
    for (int n = 0; n < N; n++) begin
      for (int l = 0; l < 3; l++)
        if (l_cr_in[n][l] == 1'b0 && l_out_v[n][l] == 1'b0 && credits_out(n, l)) m_credit_stall++;
      if (wr_stall[n] && axi_wr_valid[n]) m_mem_stall++;
      if (ack_evt_valid[n] && !ack_evt_nack[n]) m_rdma_ack++;
      if (ack_evt_valid[n] &&  ack_evt_nack[n]) m_rdma_nack++;
      if (ar_done[n]) m_ar_done++;
    end
  end
  // a link sender that wants to send but holds no credit
  function automatic logic credits_out(int n, int l);
    logic r;
    r = 1'b0;
    case (n)
      0: case (l) 0: r = g_node[0].u_ni.g_link[0].u_link.tx_valid && !g_node[0].u_ni.g_link[0].u_link.tx_ready;
                  1: r = g_node[0].u_ni.g_link[1].u_link.tx_valid && !g_node[0].u_ni.g_link[1].u_link.tx_ready;
                  default: r = g_node[0].u_ni.g_link[2].u_link.tx_valid && !g_node[0].u_ni.g_link[2].u_link.tx_ready;
         endcase
      default: r = 1'b0;
    endcase
    return r;
  endfunction

  task automatic tick(int k = 1); repeat (k) @(posedge clk); #0.5; endtask

  // ---------------- core-side helpers ----------------
  task automatic pk_send(int n, int ifc, int ch, int pdid_unused, gva_t dst, int size, word_t p[4]);
    for (int w = 0; w < 5; w++) begin
      pk_we[n] = 1; pk_if[n] = 6'(ifc); pk_ch[n] = 2'(ch); pk_word[n] = 3'(w);
      pk_wdata[n] = (w < 4) ? p[w] : word_t'({9'(size), dst});
      tick();
    end
    pk_we[n] = 0;
  endtask
  function automatic logic [2:0] pk_state(int n, int ch);
    return pk_st_state[n][3*ch +: 3];
  endfunction
  task automatic wait_pk(int n, int ifc, int ch, int max_cyc);
    pk_st_if[n] = 6'(ifc);
    for (int c = 0; c < max_cyc; c++) begin
      tick();
      if (pk_state(n, ch) != 3'd1) break;
    end
  endtask
  function automatic gva_t mk_gva(int pdid, logic [NODE_W-1:0] node, longint unsigned va);
    gva_t g; g.pdid = 16'(pdid); g.node = node; g.rank = '0; g.va = UVA_W'(va); return g;
  endfunction

  // R5 firmware model: pop rung channels, run them as one block each, post completion
  initial begin
    for (int n = 0; n < N; n++) begin fw_pend_pop[n] = 0; fw_done_we[n] = 0; fw_done_chan[n] = '0; fw_done_err[n] = 0; blk_valid[n] = 0; end
  end
  int fw_chan_of_blk [N];
  always @(posedge clk) if (rst_n) begin
    for (int n = 0; n < N; n++) begin
      fw_done_we[n] <= 1'b0;
      if (ack_evt_valid[n]) begin
        fw_done_we[n]   <= 1'b1;
        fw_done_chan[n] <= CW'(ack_evt_chan[n]);
        fw_done_err[n]  <= ack_evt_nack[n];
      end
    end
  end

  task automatic fw_run(int n);
    logic [4*WORD_W-1:0] d;
    wait (fw_pend_valid[n]); #0.5;
    d = fw_pend_desc[n];
    blk_chan[n]    = 16'(fw_pend_chan[n]);
    blk_ctx[n]     = {fw_pend_pdid[n], d[41:39]};
    blk_src_va[n]  = d[38:0];
    blk_dst[n]     = gva_t'(d[WORD_W +: 80]);
    blk_dst[n].pdid = fw_pend_pdid[n];
    blk_len[n]     = 15'(d[2*WORD_W +: 32]);
    blk_notif_va[n] = d[3*WORD_W +: 42];
    blk_notify[n]  = d[3*WORD_W + 42];
    fw_pend_pop[n] = 1;
    tick();
    fw_pend_pop[n] = 0;
    while (!blk_ready[n]) tick();
    blk_valid[n] = 1;
    tick(); blk_valid[n] = 0;
  endtask

  // ---------------- scenario ----------------
  word_t pl [4];
  initial begin
    for (int n = 0; n < N; n++) begin
      node_id[n] = {20'h00040, 2'(n)};
      pk_cfg_we[n] = 0; pk_cfg_if[n] = 0; pk_cfg_pdid[n] = 0; pk_we[n] = 0; pk_if[n] = 0; pk_ch[n] = 0;
      pk_word[n] = 0; pk_wdata[n] = '0; pk_st_if[n] = 0;
      mb_cfg_we[n] = 0; mb_cfg_if[n] = 0; mb_cfg_pdid[n] = 0; mb_cfg_rank[n] = 0; mb_cfg_base[n] = 0;
      mb_cfg_log2slots[n] = 0; mb_hd_we[n] = 0; mb_hd_if[n] = 0; mb_hd_val[n] = 0; mb_tl_if[n] = 0;
      rc_cfg_we[n] = 0; rc_cfg_page[n] = 0; rc_cfg_pdid[n] = 0; rc_we[n] = 0; rc_chan[n] = 0; rc_word[n] = 0;
      rc_wdata[n] = '0; rc_st_chan[n] = 0;
      blk_chan[n] = 0; blk_ctx[n] = 0; blk_src_va[n] = 0; blk_dst[n] = '0; blk_len[n] = 0; blk_notify[n] = 0; blk_notif_va[n] = 0;
      ar_start[n] = 0; ar_cfg_op[n] = OP_SUM; ar_cfg_dtype[n] = DT_INT; ar_cfg_len[n] = 0; ar_cfg_rank[n] = 0;
      ar_cfg_log2n[n] = 0; ar_cfg_ctx[n] = 0; ar_cfg_data_va[n] = 0; ar_cfg_table_va[n] = 0;
      wr_stall[n] = 0;
    end
    m_mb_ack = 0; m_nack_pdid = 0; m_nack_full = 0; m_timeout = 0; m_credit_stall = 0;
    m_rdma_ack = 0; m_rdma_nack = 0; m_notif = 0; m_ar_done = 0; m_mem_stall = 0;
    tick(5); rst_n = 1; tick(3);

    // configuration by the system software
    for (int n = 0; n < N; n++) begin
      // mailbox 1: 16 slots at 0x10000; mailbox 2: one slot at 0x20000
      mb_cfg_we[n] = 1; mb_cfg_if[n] = 1; mb_cfg_pdid[n] = 16'h11; mb_cfg_base[n] = 39'h10000; mb_cfg_log2slots[n] = 4; tick();
      mb_cfg_if[n] = 2; mb_cfg_base[n] = 39'h20000; mb_cfg_log2slots[n] = 0; tick();
      mb_cfg_we[n] = 0;
      pk_cfg_we[n] = 1; pk_cfg_if[n] = 3; pk_cfg_pdid[n] = 16'h11; tick();
      pk_cfg_if[n] = 4; pk_cfg_pdid[n] = 16'h99; tick();
      pk_cfg_we[n] = 0;
      rc_cfg_we[n] = 1; rc_cfg_page[n] = 0; rc_cfg_pdid[n] = 16'h11; tick(); rc_cfg_we[n] = 0;
    end

    // ---- 1. mailbox message node 0 -> node 1, mailbox 1 ----
    for (int w = 0; w < 4; w++) pl[w] = {$urandom, $urandom, $urandom, $urandom};
    pk_send(0, 3, 0, 0, mk_gva(16'h11, node_id[1], 39'h1000), 40, pl);
    wait_pk(0, 3, 0, 2000);
    checks++;
    if (pk_state(0, 0) != 3'd2) begin failures++; $display("mailbox message not ACKed (%0d)", pk_state(0, 0)); end
    else m_mb_ack++;
    begin
      word_t s0, s1, s2;
      s0 = mem_rd(1, 39'h10000); s1 = mem_rd(1, 39'h10010); s2 = mem_rd(1, 39'h10020);
      checks++;
      if (s0[9:0] != 10'd40 || s0[31:10] != node_id[0] || s0[127:64] != pl[0][63:0] ||
          s1 != {pl[1][63:0], pl[0][127:64]} || s2[63:0] != pl[1][127:64]) begin
        failures++; $display("mailbox slot content wrong %h %h", s0, s1);
      end
    end
    // ---- 2. PDID NACK: interface 4 belongs to another protection domain ----
    pk_send(0, 4, 0, 0, mk_gva(16'h11, node_id[1], 39'h1000), 16, pl);
    wait_pk(0, 4, 0, 2000);
    checks++;
    if (pk_state(0, 0) != 3'd3) begin failures++; $display("PDID NACK missing"); end else m_nack_pdid++;
    // ---- 3. mailbox full: mailbox 2 has one slot ----
    pk_send(2, 3, 0, 0, mk_gva(16'h11, node_id[1], 39'h2000), 16, pl);
    wait_pk(2, 3, 0, 2000);
    pk_send(2, 3, 1, 0, mk_gva(16'h11, node_id[1], 39'h2000), 16, pl);
    wait_pk(2, 3, 1, 2000);
    checks++;
    if (pk_state(2, 0) != 3'd2 || pk_state(2, 1) != 3'd3) begin
      failures++; $display("full NACK missing %0d %0d", pk_state(2, 0), pk_state(2, 1));
    end else m_nack_full++;
    // ---- 4. timeout: destination on another QFDB, whose link is not connected ----
    pk_send(1, 3, 2, 0, mk_gva(16'h11, 22'h00050, 39'h1000), 16, pl);
    wait_pk(1, 3, 2, 20000);
    checks++;
    if (pk_state(1, 2) != 3'd4) begin failures++; $display("timeout missing %0d", pk_state(1, 2)); end else m_timeout++;

    // ---- 5. RDMA write of 16 KB node 0 -> node 3 with notification, receiver memory stalls ----
    for (int w = 0; w < 1024; w++) mem_wr(0, 39'h100000 + 16 * w, {32'(w), $urandom, $urandom, 32'hABCD0000 + 32'(w)});
    rc_we[0] = 1; rc_chan[0] = CW'(5);
    rc_word[0] = 0; rc_wdata[0] = word_t'({3'd0, 39'h100000}); tick();
    rc_word[0] = 1; rc_wdata[0] = word_t'(mk_gva(16'h11, node_id[3], 39'h200000)); tick();
    rc_word[0] = 2; rc_wdata[0] = word_t'(32'd16384); tick();
    rc_word[0] = 3; rc_wdata[0] = word_t'({1'b1, 42'h300000}); tick();
    rc_we[0] = 0;
    wr_stall[3] = 1;
    fork
      fw_run(0);
      begin tick(3000); wr_stall[3] = 0; end
    join
    begin
      int c;
      c = 0;
      while (m_rdma_ack == 0 && m_rdma_nack == 0 && c < 40000) begin tick(); c++; end
    end
    tick(5);
    checks++;
    if (m_rdma_ack != 1) begin failures++; $display("RDMA block not ACKed once (%0d)", m_rdma_ack); end
    rc_st_chan[0] = CW'(5); #0.1;
    checks++;
    if (rc_st_state[0] != 2'd2) begin failures++; $display("channel not done %0d", rc_st_state[0]); end
    begin
      int bad;
      bad = 0;
      for (int w = 0; w < 1024; w++) if (mem_rd(3, 39'h200000 + 16 * w) != mem_rd(0, 39'h100000 + 16 * w)) bad++;
      checks++;
      if (bad != 0) begin failures++; $display("RDMA data: %0d words wrong", bad); end
    end
    checks++;
    if (rx_n_notif[3] != 1 || mem_rd(3, 39'h300000)[63] != 1'b1 || mem_rd(3, 39'h300000)[14:0] != 15'd16384) begin
      failures++; $display("notification missing %h", mem_rd(3, 39'h300000));
    end else m_notif++;

    // ---- 6. RDMA page fault: destination page not mapped -> block NACK ----
    rc_we[0] = 1; rc_chan[0] = CW'(6);
    rc_word[0] = 0; rc_wdata[0] = word_t'({3'd0, 39'h100000}); tick();
    rc_word[0] = 1; rc_wdata[0] = word_t'(mk_gva(16'h11, node_id[2], 39'h4000000000)); tick();
    rc_word[0] = 2; rc_wdata[0] = word_t'(32'd512); tick();
    rc_word[0] = 3; rc_wdata[0] = '0; tick();
    rc_we[0] = 0;
    fw_run(0);
    begin
      int c;
      c = 0;
      while (m_rdma_nack == 0 && c < 20000) begin tick(); c++; end
    end
    checks++;
    if (m_rdma_nack != 1 || m_rdma_ack != 1) begin failures++; $display("page fault NACK missing"); end

    // ---- 7. Allreduce, int sum over 4 ranks, 64-byte vectors ----
    for (int n = 0; n < N; n++) begin
      for (int r = 0; r < N; r++) mem_wr(n, 39'h500000 + 16 * r, word_t'(node_id[r]));
      for (int w = 0; w < 4; w++) mem_wr(n, 39'h400000 + 16 * w,
        {32'(n * 1000 + w), 32'(n + 7 * w), 32'(-n * 3), 32'(n * n + w)});
      ar_cfg_op[n] = OP_SUM; ar_cfg_dtype[n] = DT_INT; ar_cfg_len[n] = 9'd64; ar_cfg_rank[n] = 10'(n);
      ar_cfg_log2n[n] = 4'd2; ar_cfg_ctx[n] = {16'h11, 3'd0}; ar_cfg_data_va[n] = 39'h400000;
      ar_cfg_table_va[n] = 39'h500000;
    end
    // start in reverse order so the clients run ahead of the server
    for (int n = N - 1; n >= 0; n--) begin ar_start[n] = 1; tick(); ar_start[n] = 0; tick(7); end
    begin
      int c;
      c = 0;
      while (m_ar_done < N && c < 20000) begin tick(); c++; end
    end
    checks++;
    if (m_ar_done != N) begin failures++; $display("allreduce done on %0d of 4", m_ar_done); end
    for (int n = 0; n < N; n++)
      for (int w = 0; w < 4; w++) begin
        word_t e;
        e = {32'(6000 + 4 * w), 32'(6 + 28 * w), 32'(-18), 32'(14 + 4 * w)};
        checks++;
        if (mem_rd(n, 39'h400000 + 16 * w) != e) begin
          failures++; $display("allreduce result node %0d word %0d: %h expected %h", n, w, mem_rd(n, 39'h400000 + 16 * w), e);
        end
      end

    // ---- mechanisms ----
    $display("mechanisms: mb_ack=%0d nack_pdid=%0d nack_full=%0d timeout=%0d credit_stall=%0d mem_stall=%0d rdma_ack=%0d rdma_nack=%0d notif=%0d allreduce_done=%0d",
             m_mb_ack, m_nack_pdid, m_nack_full, m_timeout, m_credit_stall, m_mem_stall, m_rdma_ack, m_rdma_nack, m_notif, m_ar_done);
    checks++; if (m_mb_ack == 0)       begin failures++; $display("never: mailbox ACK"); end
    checks++; if (m_nack_pdid == 0)    begin failures++; $display("never: PDID NACK"); end
    checks++; if (m_nack_full == 0)    begin failures++; $display("never: full NACK"); end
    checks++; if (m_timeout == 0)      begin failures++; $display("never: timeout"); end
    checks++; if (m_credit_stall == 0) begin failures++; $display("never: credit stall"); end
    checks++; if (m_mem_stall == 0)    begin failures++; $display("never: memory stall"); end
    checks++; if (m_rdma_ack == 0)     begin failures++; $display("never: RDMA ACK"); end
    checks++; if (m_rdma_nack == 0)    begin failures++; $display("never: RDMA NACK"); end
    checks++; if (m_notif == 0)        begin failures++; $display("never: notification"); end
    checks++; if (m_ar_done == 0)      begin failures++; $display("never: allreduce"); end
    for (int n = 0; n < N; n++) begin checks++; if (l_ovf[n] != '0) begin failures++; $display("link overflow"); end end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #2ms;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end
endmodule
