// rdma_channels: the user-visible RDMA channels of the ExaNet NI send unit.
//
// Following the paper: 16 pages that system software hands to processes, each with 32
// write and 32 read channels (1024 channels in all). A process starts an RDMA write by
// writing a 64-byte descriptor into a free write channel of its page. The transfer itself
// is then discovered and driven by the NI's R5 co-processor firmware (outside this
// design), which splits it into 16 KB blocks for rdma_tx and reports the outcome. For an
// RDMA read, the firmware asks this block for a free read channel of the targeted page
// and fills it with the descriptor of the answering RDMA write.
//
// This design's own choices: descriptor layout (word 0 bits 38:0 source VA, bits 41:39
// source rank; word 1 bits 79:0 destination GVA; word 2 bits 31:0 length in bytes; word 3
// bits 41:0 notification VA, bit 42 notify enable), writing word 3 is the doorbell, a
// FIFO of rung channels that the firmware pops, and 2-bit channel states (idle, busy,
// done, error). The PDID of a transfer is always the page's, set by privileged software.
//
// Interface: cfg_* sets a page's PDID; cpu_* stores descriptor words; st_* reads a
// channel's state; fw_* is the firmware side (pop a rung channel with its descriptor,
// allocate a read channel, post completion). Timing: a rung channel is visible on
// fw_pend_* the cycle after the doorbell store; allocation answers in the same cycle.
module rdma_channels
  import exanet_pkg::*;
#(
  parameter int N_PAGE  = 16,   // paper: 16 pages
  parameter int N_WRCH  = 32,   // paper: 32 write channels per page
  parameter int N_RDCH  = 32    // paper: 32 read channels per page
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              cfg_we,
  input  logic [$clog2(N_PAGE)-1:0] cfg_page,
  input  logic [PDID_W-1:0] cfg_pdid,
  // descriptor stores from the cores
  input  logic              cpu_we,
  input  logic [$clog2(N_PAGE*(N_WRCH+N_RDCH))-1:0] cpu_chan,
  input  logic [1:0]        cpu_word,
  input  word_t             cpu_wdata,
  input  logic [$clog2(N_PAGE*(N_WRCH+N_RDCH))-1:0] st_chan,
  output logic [1:0]        st_state,
  // firmware: channels whose doorbell rang
  output logic              fw_pend_valid,
  input  logic              fw_pend_pop,
  output logic [$clog2(N_PAGE*(N_WRCH+N_RDCH))-1:0] fw_pend_chan,
  output logic [4*WORD_W-1:0] fw_pend_desc,
  output logic [PDID_W-1:0] fw_pend_pdid,
  // firmware: allocate a read channel in a page for an RDMA read request
  input  logic              fw_alloc_req,
  input  logic [$clog2(N_PAGE)-1:0] fw_alloc_page,
  input  logic [4*WORD_W-1:0] fw_alloc_desc,
  output logic              fw_alloc_ok,
  output logic [$clog2(N_PAGE*(N_WRCH+N_RDCH))-1:0] fw_alloc_chan,
  // firmware: transfer finished
  input  logic              fw_done_we,
  input  logic [$clog2(N_PAGE*(N_WRCH+N_RDCH))-1:0] fw_done_chan,
  input  logic              fw_done_err
);
  localparam int CPP = N_WRCH + N_RDCH;      // channels per page
  localparam int NCH = N_PAGE * CPP;
  localparam int CW  = $clog2(NCH);
  localparam int PW  = $clog2(N_PAGE);
  localparam int LW  = $clog2(CPP);

  typedef enum logic [1:0] {C_IDLE = 2'd0, C_BUSY = 2'd1, C_DONE = 2'd2, C_ERR = 2'd3} cst_e;

  word_t             desc_mem [NCH][4];
  logic [PDID_W-1:0] pg_pdid  [N_PAGE];
  cst_e              cst      [NCH];
  logic [CW-1:0]     pend_mem [NCH];
  logic [CW-1:0]     pend_wp, pend_rp;
  logic [CW:0]       pend_cnt;

  // write channels occupy local indices 0..N_WRCH-1 of a page, read channels the rest
  wire cpu_is_wr  = (int'(cpu_chan) % CPP) < N_WRCH;
  wire doorbell   = cpu_we && (cpu_word == 2'd3) && cpu_is_wr && (cst[cpu_chan] != C_BUSY);

  // read channel allocation: lowest free read channel of the page
  logic [LW-1:0] free_idx;
  logic          free_found;
  always_comb begin
    free_found = 1'b0;
    free_idx   = '0;
    for (int k = CPP - 1; k >= N_WRCH; k--) begin
      if (cst[int'(fw_alloc_page) * CPP + k] != C_BUSY) begin
        free_found = 1'b1;
        free_idx   = LW'(k);
      end
    end
  end
  assign fw_alloc_ok   = fw_alloc_req && free_found && !doorbell;  // retry next cycle if refused
  assign fw_alloc_chan = CW'(int'(fw_alloc_page) * CPP + int'(free_idx));

  assign st_state      = cst[st_chan];
  assign fw_pend_valid = (pend_cnt != '0);
  assign fw_pend_chan  = pend_mem[pend_rp];
  assign fw_pend_desc  = {desc_mem[fw_pend_chan][3], desc_mem[fw_pend_chan][2],
                          desc_mem[fw_pend_chan][1], desc_mem[fw_pend_chan][0]};
  assign fw_pend_pdid  = pg_pdid[PW'(fw_pend_chan / CW'(CPP))];

  wire push_alloc = fw_alloc_ok;
  wire push_door  = doorbell;

  always_ff @(posedge clk) begin
    if (cfg_we) pg_pdid[cfg_page] <= cfg_pdid;
    if (cpu_we) desc_mem[cpu_chan][cpu_word] <= cpu_wdata;
    if (push_alloc) begin
      for (int w = 0; w < 4; w++) desc_mem[fw_alloc_chan][w] <= fw_alloc_desc[w*WORD_W +: WORD_W];
    end
    // one push per cycle: a doorbell wins, an allocation in the same cycle is refused
    if (push_door)       pend_mem[pend_wp] <= cpu_chan;
    if (push_alloc)      pend_mem[pend_wp] <= fw_alloc_chan;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int c = 0; c < NCH; c++) cst[c] <= C_IDLE;
      pend_wp <= '0; pend_rp <= '0; pend_cnt <= '0;
    end else begin
      if (fw_done_we)        cst[fw_done_chan]  <= fw_done_err ? C_ERR : C_DONE;
      if (push_alloc)        cst[fw_alloc_chan] <= C_BUSY;
      if (push_door)         cst[cpu_chan]      <= C_BUSY;
      if (push_door || push_alloc) pend_wp <= pend_wp + 1'b1;
      if (fw_pend_pop && fw_pend_valid) pend_rp <= pend_rp + 1'b1;
      pend_cnt <= pend_cnt + (CW+1)'(push_door || push_alloc) - (CW+1)'(fw_pend_pop && fw_pend_valid);
    end
  end

  a_one_push: assert property (@(posedge clk) disable iff (!rst_n) !(push_door && push_alloc));
endmodule
