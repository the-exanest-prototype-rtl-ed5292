// exanet_pkg: types and constants shared by the ExaNet network-interface blocks.
//
// Global Virtual Address (GVA): 80 bits, most significant field first:
//   protection domain id (16) | destination node (22) | rank (3) | user virtual address (39).
// The field widths and their order are the paper's. Rank and user VA together form the
// 42-bit node-level virtual address; PDID and rank together select the SMMU context.
//
// Cells: every network packet ("cell") travels as a stream of 128-bit words:
// one 16-byte header word, 0..16 payload words (up to 256 bytes), one 16-byte footer word.
// Header 16 B + footer 16 B, 128-bit words and 256 B of payload follow the paper; which
// fields sit where inside header and footer is this design's own layout.
//
// Memory side: every block that reaches host memory uses a simplified AXI-4 style master:
// a read-address request (context, VA, beat count, id), read data beats tagged with the id,
// and a write burst whose first beat carries the address, answered by one response per burst.
// The address sent is the node-level VA plus SMMU context; the SMMU (outside this design)
// translates it.
package exanet_pkg;

  localparam int WORD_W      = 128;   // datapath / AXI data width (paper: 128 bit)
  localparam int PDID_W      = 16;
  localparam int NODE_W      = 22;
  localparam int RANK_W      = 3;
  localparam int UVA_W       = 39;
  localparam int NVA_W       = RANK_W + UVA_W;   // 42-bit node-level VA
  localparam int CTX_W       = PDID_W + RANK_W;  // SMMU context selector
  localparam int CELL_BYTES  = 256;   // max payload per cell
  localparam int CELL_WORDS  = CELL_BYTES / 16;
  localparam int LEN_W       = 9;     // 0..256 bytes

  typedef logic [WORD_W-1:0] word_t;

  typedef struct packed {
    logic [PDID_W-1:0] pdid;
    logic [NODE_W-1:0] node;
    logic [RANK_W-1:0] rank;
    logic [UVA_W-1:0]  va;
  } gva_t;   // 80 bits

  // Cell types. The encoding is this design's own.
  typedef enum logic [3:0] {
    CT_MBOX      = 4'd0,  // packetizer -> mailbox message
    CT_RDMA_WR   = 4'd1,  // RDMA write data cell
    CT_ACK       = 4'd2,  // mailbox -> packetizer acknowledgement
    CT_NACK      = 4'd3,  // mailbox -> packetizer negative acknowledgement
    CT_RDMA_ACK  = 4'd4,  // RDMA receive unit -> send unit block acknowledgement
    CT_RDMA_NACK = 4'd5,  // block negative acknowledgement (e.g. page fault)
    CT_AR_DATA   = 4'd6   // allreduce accelerator vector
  } cell_type_e;

  typedef struct packed {
    gva_t             dst;       // 80
    logic [NODE_W-1:0] src_node; // 22
    cell_type_e       ctype;     // 4
    logic [LEN_W-1:0] len;       // 9  payload bytes
    logic [12:0]      tag;       // 13 per-type use (allreduce level / slot)
  } cell_hdr_t;                  // 128

  typedef struct packed {
    logic [31:0]      csum;      // XOR fold of header and payload words
    logic [15:0]      chan;      // source channel (packetizer or RDMA)
    logic [14:0]      blk_len;   // RDMA block length in bytes
    logic [13:0]      offset;    // RDMA byte offset of this cell inside its block
    logic             last;      // last cell of an RDMA block
    logic             notify;    // write a completion notification when the block is complete
    logic [NVA_W-1:0] notif_va;  // node-level VA of the completion notification
    logic [6:0]       aux;       // reason code for NACKs
  } cell_ftr_t;                  // 128

  // Stream word with framing. sop marks the header, eop the footer.
  typedef struct packed {
    word_t data;
    logic  sop;
    logic  eop;
  } flit_t;

  // Local endpoints of the per-FPGA switch, then the links.
  localparam int EP_MBOX   = 0;
  localparam int EP_PKT    = 1;
  localparam int EP_RDMATX = 2;
  localparam int EP_RDMARX = 3;
  localparam int EP_AR     = 4;
  localparam int N_EP      = 5;
  localparam int N_LINK    = 4;  // 3 intra-QFDB links + 1 towards the network router
  localparam int N_PORT    = N_EP + N_LINK;

  // NACK reason codes (design's own)
  localparam logic [6:0] NR_PDID = 7'd1;
  localparam logic [6:0] NR_ERR  = 7'd2;
  localparam logic [6:0] NR_FULL = 7'd3;
  localparam logic [6:0] NR_FAULT = 7'd4;

  // Allreduce accelerator operation and datatype
  typedef enum logic [1:0] {OP_SUM = 2'd0, OP_MIN = 2'd1, OP_MAX = 2'd2} ar_op_e;
  typedef enum logic [1:0] {DT_INT = 2'd0, DT_FLOAT = 2'd1, DT_DOUBLE = 2'd2} ar_dt_e;

  function automatic logic [31:0] fold32(input word_t w);
    return w[31:0] ^ w[63:32] ^ w[95:64] ^ w[127:96];
  endfunction

  function automatic int unsigned words_of(input logic [LEN_W-1:0] len);
    return (int'(len) + 15) / 16;
  endfunction

  // Which local endpoint consumes a cell of a given type.
  function automatic int unsigned ep_of_type(input cell_type_e t);
    case (t)
      CT_MBOX:                 return EP_MBOX;
      CT_ACK, CT_NACK:         return EP_PKT;
      CT_RDMA_ACK, CT_RDMA_NACK: return EP_RDMATX;
      CT_RDMA_WR:              return EP_RDMARX;
      default:                 return EP_AR;
    endcase
  endfunction

  // Output port of the switch for a cell with header h at node my_node.
  // Node ids: the two low bits name the FPGA inside its QFDB (F1 = 0 is the network FPGA).
  // Link k (0..2) reaches FPGA (my_fpga + k + 1) mod 4 of the same QFDB; link 3 goes to
  // the network router (only wired on the network FPGA). Traffic for another QFDB goes
  // to the network FPGA first, or to the router when already there.
  function automatic int unsigned route_port(input cell_hdr_t h, input logic [NODE_W-1:0] my_node);
    logic [1:0] diff;
    if (h.dst.node == my_node) return ep_of_type(h.ctype);
    if (h.dst.node[NODE_W-1:2] == my_node[NODE_W-1:2]) begin
      diff = h.dst.node[1:0] - my_node[1:0];
      return N_EP + int'(diff) - 1;
    end
    if (my_node[1:0] == 2'd0) return N_EP + 3;
    diff = 2'd0 - my_node[1:0];
    return N_EP + int'(diff) - 1;
  endfunction

endpackage
