// tb_axi_mem: behavioural model of the processing system's memory as the NI's AXI master
// sees it (through the SMMU). Sparse 128-bit word memory indexed by virtual address / 16.
// Reads: up to 4 queued requests, one data beat per cycle, in order, tagged with the id.
// Writes: the address of a burst is taken from its first beat; the response (with id)
// follows 3 cycles after the last beat. An address with bit 38 set models an unmapped
// page: reads return r_err, writes b_err (the SMMU fault the RDMA engine must survive).
// wr_stall holds wr_ready low to create back-pressure.
module tb_axi_mem
  import exanet_pkg::*;
(
  input  logic              clk,
  input  logic              rst_n,
  input  logic              wr_stall,
  input  logic              wr_valid,
  output logic              wr_ready,
  input  logic [CTX_W-1:0]  wr_ctx,
  input  logic [UVA_W-1:0]  wr_va,
  input  word_t             wr_data,
  input  logic              wr_last,
  input  logic [1:0]        wr_id,
  output logic              b_valid,
  output logic [1:0]        b_id,
  output logic              b_err,
  input  logic              ar_valid,
  output logic              ar_ready,
  input  logic [CTX_W-1:0]  ar_ctx,
  input  logic [UVA_W-1:0]  ar_va,
  input  logic [4:0]        ar_beats,
  input  logic [1:0]        ar_id,
  output logic              r_valid,
  output logic [1:0]        r_id,
  output word_t             r_data,
  output logic              r_last,
  output logic              r_err
);
  word_t mem [longint unsigned];

  function automatic word_t rd(longint unsigned a);
    return mem.exists(a) ? mem[a] : '0;
  endfunction

  typedef struct { logic [UVA_W-1:0] va; int beats; logic [1:0] id; } rq_t;
  rq_t rq[$];
  int  rbeat;
  typedef struct { int due; logic [1:0] id; logic err; } bq_t;
  bq_t bq[$];
  logic in_burst;
  logic [UVA_W-1:0] w_va;
  int   w_beat, cyc;

  assign wr_ready = !wr_stall;
  assign ar_ready = (rq.size() < 4);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      r_valid <= 0; r_id <= 0; r_data <= '0; r_last <= 0; r_err <= 0;
      b_valid <= 0; b_id <= 0; b_err <= 0;
      in_burst <= 0; w_va <= '0; w_beat <= 0; rbeat <= 0; cyc <= 0;
      rq.delete(); bq.delete();
    end else begin
      cyc <= cyc + 1;
      // read side
      r_valid <= 0; r_last <= 0; r_err <= 0;
      if (rq.size() != 0) begin
        r_valid <= 1;
        r_id    <= rq[0].id;
        r_err   <= rq[0].va[38];
        r_data  <= rd(longint'(rq[0].va >> 4) + rbeat);
        if (rbeat + 1 == rq[0].beats) begin
          r_last <= 1; rbeat <= 0; void'(rq.pop_front());
        end else rbeat <= rbeat + 1;
      end
      if (ar_valid && ar_ready) rq.push_back('{ar_va, int'(ar_beats), ar_id});
      // write side
      if (wr_valid && wr_ready) begin
        logic [UVA_W-1:0] base;
        base = in_burst ? w_va : wr_va;
        if (!base[38]) mem[longint'(base >> 4) + (in_burst ? w_beat : 0)] = wr_data;
        if (!in_burst) begin w_va <= wr_va; end
        if (wr_last) begin
          in_burst <= 0; w_beat <= 0;
          bq.push_back('{cyc + 3, wr_id, base[38]});
        end else begin
          in_burst <= 1; w_beat <= (in_burst ? w_beat : 0) + 1;
        end
      end
      b_valid <= 0;
      if (bq.size() != 0 && bq[0].due <= cyc) begin
        b_valid <= 1; b_id <= bq[0].id; b_err <= bq[0].err;
        void'(bq.pop_front());
      end
    end
  end
endmodule
