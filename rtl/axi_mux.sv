// axi_mux: shares the NI's single AXI-4 master port towards the ARM processing system
// among the NI blocks that read or write host memory.
//
// Following the paper: the NI reaches the cores' memory through one high-speed AXI-4 master
// with separate 128-bit read and write channels. What is this design's own: the simplified
// channel signalling (see exanet_pkg), round-robin arbitration, and the use of the AXI id
// to send read data and write responses back to the block that asked. A write burst keeps
// the write channel from its first to its last beat, so beats of different bursts never mix.
//
// Interface: s_* are the per-block ports (NW writers, NR readers), m_* the shared master.
// Read data and write responses carry the id of the requesting port and are always accepted.
// Timing: purely combinational request path; the arbiter's pointer moves after each grant.
module axi_mux
  import exanet_pkg::*;
#(
  parameter int NW = 3,
  parameter int NR = 2
) (
  input  logic              clk,
  input  logic              rst_n,
  // write side
  input  logic [NW-1:0]     s_wr_valid,
  output logic [NW-1:0]     s_wr_ready,
  input  logic [CTX_W-1:0]  s_wr_ctx  [NW],
  input  logic [UVA_W-1:0]  s_wr_va   [NW],
  input  word_t             s_wr_data [NW],
  input  logic [NW-1:0]     s_wr_last,
  output logic [NW-1:0]     s_b_valid,
  output logic              s_b_err,
  output logic              m_wr_valid,
  input  logic              m_wr_ready,
  output logic [CTX_W-1:0]  m_wr_ctx,
  output logic [UVA_W-1:0]  m_wr_va,
  output word_t             m_wr_data,
  output logic              m_wr_last,
  output logic [1:0]        m_wr_id,
  input  logic              m_b_valid,
  input  logic [1:0]        m_b_id,
  input  logic              m_b_err,
  // read side
  input  logic [NR-1:0]     s_ar_valid,
  output logic [NR-1:0]     s_ar_ready,
  input  logic [CTX_W-1:0]  s_ar_ctx   [NR],
  input  logic [UVA_W-1:0]  s_ar_va    [NR],
  input  logic [4:0]        s_ar_beats [NR],
  output logic [NR-1:0]     s_r_valid,
  output word_t             s_r_data,
  output logic              s_r_last,
  output logic              s_r_err,
  output logic              m_ar_valid,
  input  logic              m_ar_ready,
  output logic [CTX_W-1:0]  m_ar_ctx,
  output logic [UVA_W-1:0]  m_ar_va,
  output logic [4:0]        m_ar_beats,
  output logic [1:0]        m_ar_id,
  input  logic              m_r_valid,
  input  logic [1:0]        m_r_id,
  input  word_t             m_r_data,
  input  logic              m_r_last,
  input  logic              m_r_err
);
  localparam int WIW = (NW > 1) ? $clog2(NW) : 1;
  localparam int RIW = (NR > 1) ? $clog2(NR) : 1;

  // ---------------- write ----------------
  logic           w_lock;
  logic [WIW-1:0] w_own, w_rr, w_sel;
  logic       w_any;
  always_comb begin
    w_any = 1'b0;
    w_sel = w_own;
    if (w_lock) begin
      w_any = s_wr_valid[w_own];
    end else begin
      for (int k = NW; k >= 1; k--) begin
        if (s_wr_valid[(int'(w_rr) + k) % NW]) begin
          w_any = 1'b1; w_sel = WIW'((int'(w_rr) + k) % NW);
        end
      end
    end
    m_wr_valid = w_any;
    m_wr_ctx   = s_wr_ctx[w_sel];
    m_wr_va    = s_wr_va[w_sel];
    m_wr_data  = s_wr_data[w_sel];
    m_wr_last  = s_wr_last[w_sel];
    m_wr_id    = 2'(w_sel);
    s_wr_ready = '0;
    s_wr_ready[w_sel] = w_any && m_wr_ready;
    s_b_valid  = '0;
    s_b_valid[WIW'(m_b_id)] = m_b_valid;
    s_b_err    = m_b_err;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      w_lock <= 1'b0; w_own <= '0; w_rr <= '0;
    end else if (m_wr_valid && m_wr_ready) begin
      w_lock <= !m_wr_last;
      w_own  <= w_sel;
      if (!w_lock) w_rr <= w_sel;
    end
  end

  // ---------------- read ----------------
  logic [RIW-1:0] r_rr, r_sel;
  logic       r_any;
  always_comb begin
    r_any = 1'b0;
    r_sel = '0;
    for (int k = NR; k >= 1; k--) begin
      if (s_ar_valid[(int'(r_rr) + k) % NR]) begin
        r_any = 1'b1; r_sel = RIW'((int'(r_rr) + k) % NR);
      end
    end
    m_ar_valid = r_any;
    m_ar_ctx   = s_ar_ctx[r_sel];
    m_ar_va    = s_ar_va[r_sel];
    m_ar_beats = s_ar_beats[r_sel];
    m_ar_id    = 2'(r_sel);
    s_ar_ready = '0;
    s_ar_ready[r_sel] = r_any && m_ar_ready;
    s_r_valid  = '0;
    s_r_valid[RIW'(m_r_id)] = m_r_valid;
    s_r_data   = m_r_data;
    s_r_last   = m_r_last;
    s_r_err    = m_r_err;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) r_rr <= '0;
    else if (m_ar_valid && m_ar_ready) r_rr <= r_sel;
  end

  a_bid_ok: assert property (@(posedge clk) disable iff (!rst_n) m_b_valid |-> int'(m_b_id) < NW);
  a_rid_ok: assert property (@(posedge clk) disable iff (!rst_n) m_r_valid |-> int'(m_r_id) < NR);
endmodule
