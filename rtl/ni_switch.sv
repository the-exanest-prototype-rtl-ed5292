// ni_switch: the small input-queued, cut-through switch found in every FPGA. It connects
// the local NI endpoints (mailbox, packetizer, RDMA send and receive units, allreduce
// accelerator) with the FPGA's links.
//
// What follows the paper: input queueing, cut-through forwarding and a latency of two clock
// cycles from a header entering an input to it leaving an output. What is this design's own:
// the port list (5 endpoints + 4 links, after Fig. 8), the routing rule (exanet_pkg::route_port),
// round-robin arbitration among inputs whose header waits for the same free output, and the
// input queue depth.
//
// How it works: each input has a small FIFO. When the FIFO's head is a header word, the
// route is computed from it and the input requests that output. A free output grants one
// requester (round robin) and stays locked to it until the footer (eop) has passed, so a
// cell is never interleaved with another. Output words pass through one register.
// Timing: a word offered on in_* in cycle t is written into the input FIFO at the end of t,
// is arbitrated in t+1 and is on out_* in cycle t+2 (when nothing blocks it).
module ni_switch
  import exanet_pkg::*;
#(
  parameter int NP       = N_PORT,  // number of ports
  parameter int IQ_DEPTH = 4        // words per input queue
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic [NODE_W-1:0] my_node,
  input  logic  [NP-1:0]    in_valid,
  output logic  [NP-1:0]    in_ready,
  input  flit_t             in_flit  [NP],
  output logic  [NP-1:0]    out_valid,
  input  logic  [NP-1:0]    out_ready,
  output flit_t             out_flit [NP]
);
  localparam int QW = $clog2(IQ_DEPTH);
  localparam int PW = (NP > 1) ? $clog2(NP) : 1;

  // ---------------- input queues ----------------
  flit_t        q_mem   [NP][IQ_DEPTH];
  logic [QW-1:0] q_wp   [NP];
  logic [QW-1:0] q_rp   [NP];
  logic [QW:0]   q_cnt  [NP];
  logic [NP-1:0] head_v;
  flit_t         head   [NP];
  logic [NP-1:0] pop;
  logic [PW-1:0] cur_dst [NP];   // output of the cell in progress at each input
  logic [PW-1:0] dst     [NP];

  for (genvar i = 0; i < NP; i++) begin : g_in
    assign in_ready[i] = (q_cnt[i] != (QW+1)'(IQ_DEPTH));
    assign head_v[i]   = (q_cnt[i] != '0);
    assign head[i]     = q_mem[i][q_rp[i]];
    assign dst[i]      = head[i].sop ? PW'(route_port(cell_hdr_t'(head[i].data), my_node))
                                     : cur_dst[i];

    always_ff @(posedge clk) begin
      if (in_valid[i] && in_ready[i]) q_mem[i][q_wp[i]] <= in_flit[i];
    end

    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) begin
        q_wp[i] <= '0; q_rp[i] <= '0; q_cnt[i] <= '0; cur_dst[i] <= '0;
      end else begin
        if (in_valid[i] && in_ready[i]) q_wp[i] <= q_wp[i] + 1'b1;
        if (pop[i]) q_rp[i] <= q_rp[i] + 1'b1;
        q_cnt[i] <= q_cnt[i] + (QW+1)'(in_valid[i] && in_ready[i]) - (QW+1)'(pop[i]);
        if (pop[i] && head[i].sop) cur_dst[i] <= dst[i];
      end
    end
  end

  // ---------------- per-output arbitration ----------------
  logic [NP-1:0] locked;
  logic [PW-1:0] owner [NP];
  logic [PW-1:0] rr    [NP];
  logic [NP-1:0] gnt_v;
  logic [PW-1:0] gnt   [NP];
  logic [NP-1:0] adv;

  always_comb begin
    pop = '0;
    for (int o = 0; o < NP; o++) begin
      adv[o]   = !out_valid[o] || out_ready[o];
      gnt_v[o] = 1'b0;
      gnt[o]   = owner[o];
      if (locked[o]) begin
        gnt_v[o] = head_v[owner[o]] && (int'(dst[owner[o]]) == o) && !head[owner[o]].sop;
      end else begin
        for (int k = NP; k >= 1; k--) begin
          if (head_v[(int'(rr[o]) + k) % NP] && head[(int'(rr[o]) + k) % NP].sop &&
              int'(dst[(int'(rr[o]) + k) % NP]) == o) begin
            gnt_v[o] = 1'b1;
            gnt[o]   = PW'((int'(rr[o]) + k) % NP);
          end
        end
      end
      if (gnt_v[o] && adv[o]) pop[gnt[o]] = 1'b1;
    end
  end

  for (genvar o = 0; o < NP; o++) begin : g_out
    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) begin
        locked[o] <= 1'b0; owner[o] <= '0; rr[o] <= '0;
        out_valid[o] <= 1'b0; out_flit[o] <= '0;
      end else if (adv[o]) begin
        out_valid[o] <= gnt_v[o];
        if (gnt_v[o]) begin
          out_flit[o] <= head[gnt[o]];
          if (head[gnt[o]].sop) begin
            owner[o] <= gnt[o];
            rr[o]    <= gnt[o];
          end
          locked[o] <= !head[gnt[o]].eop;
        end
      end
    end
  end

  // A cell must start with a header word.
  for (genvar i = 0; i < NP; i++) begin : g_chk
    a_route_ok: assert property (@(posedge clk) disable iff (!rst_n)
                                 head_v[i] && head[i].sop |-> int'(dst[i]) < NP);
  end
endmodule
