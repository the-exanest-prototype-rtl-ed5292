// allreduce_engine: the NI's MPI_Allreduce accelerator (client and server roles in one block).
//
// Following the paper: software programs the operation (sum, min, max), the datatype (int,
// float, double), the vector size (up to 256 bytes) and two pointers, the vector's address
// and the address of a table of {MPI rank, network address} pairs; up to 1024 ranks, one
// per FPGA, whole QFDBs only (rank count a multiple of 4). The rank on a QFDB's 'Network'
// FPGA acts as server, the other three as clients.
//   Level 0: every module fetches its own vector by DMA; clients send it to their server,
//            which reduces the three into its own.
//   Exchange levels: each server swaps its partial vector with the server whose rank differs
//            by 4, 8, 16, ... and reduces.
//   Last level: the server broadcasts the result to its clients; every module writes the
//            result to memory and tells the software the operation has completed.
// The paper's text numbers the exchange levels 1..log2(N)-1 and the broadcast log2(N);
// its Figure 10 (16 ranks) shows exchange at levels 1-2 and broadcast at level 3. This
// design follows the figure: log2(N)-2 exchange levels, which is what pairwise exchange
// among N/4 servers needs.
//
// This design's own choices: the server is the rank with rank % 4 == 0; a table entry is
// 16 bytes at table_va + 16*rank with the node address in bits 21:0; the result overwrites
// the input vector; vectors travel in one CT_AR_DATA cell whose tag holds the level
// (bits 12:9, 15 = broadcast) and the sender's position in its QFDB (bits 1:0); cells that
// arrive before the engine reaches their level wait in per-level buffers, so a fast
// partner can never deadlock a slow one; gather reduces the clients in fixed order 1, 2, 3
// so float results do not depend on arrival order; completion is a done pulse and counter.
//
// Interface: cfg_* and start begin an operation (ignored while busy); ar_*/r_* and
// wr_*/b_* are memory masters; out_*/in_* are cell streams to and from the switch.
// Timing: the reduction handles one 128-bit word per cycle.
module allreduce_engine
  import exanet_pkg::*;
#(
  parameter int MAX_RANKS = 1024      // paper: up to 1024 MPI ranks
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic [NODE_W-1:0] my_node,
  // software programming
  input  logic              start,
  input  ar_op_e            cfg_op,
  input  ar_dt_e            cfg_dtype,
  input  logic [LEN_W-1:0]  cfg_len,        // bytes, 1..256
  input  logic [$clog2(MAX_RANKS)-1:0] cfg_rank,
  input  logic [3:0]        cfg_log2n,      // log2 of the number of ranks, >= 2
  input  logic [CTX_W-1:0]  cfg_ctx,
  input  logic [UVA_W-1:0]  cfg_data_va,
  input  logic [UVA_W-1:0]  cfg_table_va,
  output logic              busy,
  output logic              done,
  output logic [31:0]       n_done,
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
  // memory write master
  output logic              wr_valid,
  input  logic              wr_ready,
  output logic [CTX_W-1:0]  wr_ctx,
  output logic [UVA_W-1:0]  wr_va,
  output word_t             wr_data,
  output logic              wr_last,
  input  logic              b_valid,
  input  logic              b_err,
  // cells
  output logic              out_valid,
  input  logic              out_ready,
  output flit_t             out_flit,
  input  logic              in_valid,
  output logic              in_ready,
  input  flit_t             in_flit
);
  localparam int RW  = $clog2(MAX_RANKS);
  localparam int NEX = RW - 2;                // most exchange levels
  localparam int NS  = 3 + NEX + 1;           // gather 3, exchange NEX, broadcast 1
  localparam int SW  = $clog2(NS);
  localparam logic [3:0] LVL_BC = 4'd15;

  // ---------------- receive buffers ----------------
  word_t          rbuf [NS][CELL_WORDS];
  logic [NS-1:0]  rvalid;
  logic [NS-1:0]  rclr;
  logic [SW-1:0]  rx_slot;
  logic [4:0]     rx_w;
  cell_hdr_t      rx_hdr;
  assign rx_hdr   = cell_hdr_t'(in_flit.data);
  assign in_ready = 1'b1;

  function automatic logic [SW-1:0] slot_of(input logic [3:0] lvl, input logic [1:0] src);
    if (lvl == 4'd0)        return SW'(src) - SW'(1);
    else if (lvl == LVL_BC) return SW'(NS - 1);
    else                    return SW'(2 + int'(lvl));
  endfunction

  always_ff @(posedge clk) begin
    if (in_valid && !in_flit.sop && !in_flit.eop && rx_w < 5'd16)
      rbuf[rx_slot][rx_w[3:0]] <= in_flit.data;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rvalid <= '0; rx_slot <= '0; rx_w <= '0;
    end else begin
      if (in_valid && in_flit.sop) begin
        rx_slot <= slot_of(rx_hdr.tag[12:9], rx_hdr.tag[1:0]);
        rx_w    <= '0;
      end else if (in_valid && !in_flit.eop) begin
        rx_w <= rx_w + 1'b1;
      end
      rvalid <= (rvalid & ~rclr) | ((in_valid && in_flit.eop) ? (NS'(1) << rx_slot) : '0);
    end
  end

  // ---------------- control ----------------
  typedef enum logic [3:0] {S_IDLE, S_FAR, S_FR, S_TAR, S_TR, S_SH, S_SP, S_SF,
                            S_WAIT, S_RED, S_WAR, S_WB} est_e;
  typedef enum logic [1:0] {PH_GATHER, PH_EXCH, PH_BCAST, PH_CLIENT} ph_e;

  est_e             st;
  ph_e              ph;
  ar_op_e           op;
  ar_dt_e           dt;
  logic [LEN_W-1:0] len;
  logic [RW-1:0]    rank, tgt;
  logic [3:0]       nex, lvl;
  logic [1:0]       c;
  logic [CTX_W-1:0] ctx;
  logic [UVA_W-1:0] dva, tva;
  logic [NODE_W-1:0] tgt_node;
  word_t            acc [CELL_WORDS];
  logic [4:0]       w;
  logic [31:0]      csum;
  logic [SW-1:0]    cur;

  wire [4:0] nw     = 5'(words_of(len));
  wire       server = (rank[1:0] == 2'b00);

  word_t alu_y;
  allreduce_alu u_alu (.a(acc[w[3:0]]), .b(rbuf[cur][w[3:0]]), .op(op), .dtype(dt), .y(alu_y));

  // outgoing cell
  cell_hdr_t shdr;
  cell_ftr_t sftr;
  always_comb begin
    shdr          = '0;
    shdr.dst.pdid = ctx[CTX_W-1 -: PDID_W];
    shdr.dst.node = tgt_node;
    shdr.src_node = my_node;
    shdr.ctype    = CT_AR_DATA;
    shdr.len      = len;
    shdr.tag      = {(ph == PH_CLIENT) ? 4'd0 : (ph == PH_BCAST) ? LVL_BC : lvl, 7'd0, rank[1:0]};
    sftr          = '0;
    sftr.csum     = csum;
    out_valid     = (st == S_SH) || (st == S_SP) || (st == S_SF);
    case (st)
      S_SH:    out_flit = '{data: word_t'(shdr), sop: 1'b1, eop: 1'b0};
      S_SP:    out_flit = '{data: acc[w[3:0]], sop: 1'b0, eop: 1'b0};
      default: out_flit = '{data: word_t'(sftr), sop: 1'b0, eop: 1'b1};
    endcase
  end

  assign busy     = (st != S_IDLE);
  assign ar_valid = (st == S_FAR) || (st == S_TAR);
  assign ar_ctx   = ctx;
  assign ar_va    = (st == S_FAR) ? dva : tva + UVA_W'({tgt, 4'd0});
  assign ar_beats = (st == S_FAR) ? nw : 5'd1;
  assign wr_valid = (st == S_WAR);
  assign wr_ctx   = ctx;
  assign wr_va    = dva;
  assign wr_data  = acc[w[3:0]];
  assign wr_last  = (w + 5'd1 == nw);

  // the exchange partner at level l differs by 4 << (l-1)
  function automatic logic [RW-1:0] partner(input logic [RW-1:0] r, input logic [3:0] l);
    return r ^ (RW'(4) << (l - 4'd1));
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= S_IDLE; ph <= PH_GATHER; op <= OP_SUM; dt <= DT_INT; len <= '0; rank <= '0;
      tgt <= '0; nex <= '0; lvl <= '0; c <= '0; ctx <= '0; dva <= '0; tva <= '0;
      tgt_node <= '0; w <= '0; csum <= '0; cur <= '0; done <= 1'b0; n_done <= '0;
      rclr <= '0;
      for (int i = 0; i < CELL_WORDS; i++) acc[i] <= '0;
    end else begin
      done <= 1'b0;
      rclr <= '0;
      case (st)
        S_IDLE: if (start) begin
          op <= cfg_op; dt <= cfg_dtype; len <= cfg_len; rank <= cfg_rank; ctx <= cfg_ctx;
          dva <= cfg_data_va; tva <= cfg_table_va;
          nex <= (cfg_log2n > 4'd2) ? cfg_log2n - 4'd2 : 4'd0;
          w <= '0;
          st <= S_FAR;
        end
        S_FAR: if (ar_ready) st <= S_FR;
        S_FR: if (r_valid) begin
          acc[w[3:0]] <= r_data;
          w <= w + 1'b1;
          if (r_last) begin
            if (server) begin
              ph <= PH_GATHER; c <= 2'd0; cur <= slot_of(4'd0, 2'd1); st <= S_WAIT;
            end else begin
              ph <= PH_CLIENT; tgt <= {rank[RW-1:2], 2'b00}; st <= S_TAR;
            end
          end
        end
        S_TAR: if (ar_ready) st <= S_TR;
        S_TR: if (r_valid) begin
          tgt_node <= r_data[NODE_W-1:0];
          st <= S_SH;
        end
        S_SH: if (out_ready) begin
          csum <= fold32(out_flit.data);
          w    <= '0;
          st   <= S_SP;
        end
        S_SP: if (out_ready) begin
          csum <= csum ^ fold32(out_flit.data);
          w    <= w + 1'b1;
          if (w + 5'd1 == nw) st <= S_SF;
        end
        S_SF: if (out_ready) begin
          w <= '0;
          case (ph)
            PH_EXCH:   begin cur <= slot_of(lvl, 2'd0); st <= S_WAIT; end
            PH_CLIENT: begin cur <= SW'(NS - 1);        st <= S_WAIT; end
            default: begin   // broadcast to the three clients
              if (c == 2'd2) st <= S_WAR;
              else begin
                c   <= c + 1'b1;
                tgt <= {rank[RW-1:2], c + 2'd2};
                st  <= S_TAR;
              end
            end
          endcase
        end
        S_WAIT: if (rvalid[cur]) begin w <= '0; st <= S_RED; end
        S_RED: begin
          acc[w[3:0]] <= (ph == PH_CLIENT) ? rbuf[cur][w[3:0]] : alu_y;
          w <= w + 1'b1;
          if (w + 5'd1 == nw) begin
            rclr <= NS'(1) << cur;
            w    <= '0;
            case (ph)
              PH_GATHER: begin
                if (c != 2'd2) begin
                  c <= c + 1'b1; cur <= slot_of(4'd0, c + 2'd2); st <= S_WAIT;
                end else if (nex != '0) begin
                  ph <= PH_EXCH; lvl <= 4'd1; tgt <= partner(rank, 4'd1); st <= S_TAR;
                end else begin
                  ph <= PH_BCAST; c <= 2'd0; tgt <= rank | RW'(1); st <= S_TAR;
                end
              end
              PH_EXCH: begin
                if (lvl != nex) begin
                  lvl <= lvl + 1'b1; tgt <= partner(rank, lvl + 4'd1); st <= S_TAR;
                end else begin
                  ph <= PH_BCAST; c <= 2'd0; tgt <= rank | RW'(1); st <= S_TAR;
                end
              end
              default: st <= S_WAR;
            endcase
          end
        end
        S_WAR: if (wr_ready) begin
          w <= w + 1'b1;
          if (wr_last) st <= S_WB;
        end
        S_WB: if (b_valid) begin
          done   <= 1'b1;
          n_done <= n_done + 1'b1;
          st     <= S_IDLE;
        end
        default: st <= S_IDLE;
      endcase
    end
  end

  // a level buffer must be free when its cell arrives (one operation at a time)
  a_no_slot_overrun: assert property (@(posedge clk) disable iff (!rst_n)
                                      (in_valid && in_flit.eop) |-> !rvalid[rx_slot] || rclr[rx_slot]);
  a_no_mem_err: assert property (@(posedge clk) disable iff (!rst_n)
                                 !(r_valid && r_err) && !(b_valid && b_err));
endmodule
