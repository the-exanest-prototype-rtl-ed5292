// link_port: one end of an ExaNet link with a shallow receive buffer and credit-based
// link-level flow control.
//
// The paper gives the buffer size (4 KB per link) and says that link-level flow control
// keeps packets from being dropped; the credit scheme is this design's choice. The sender
// side holds one credit per free word in the far end's buffer (DEPTH at reset), spends one
// credit per word it puts on the link and gets one back for every credit pulse returned.
// The receive side stores incoming words in a DEPTH-word FIFO and returns a credit pulse as
// each word leaves towards the local switch, so it can never overflow.
//
// Interface: tx_* is the local stream to send (valid/ready), link_out_* drives the serial
// link (the transceiver itself is outside this design), link_in_* is what arrives from the
// link, rx_* hands received words to the switch, credit_in/credit_out carry returned credits.
// Timing: a word accepted on tx appears on link_out one cycle later; a word arriving on
// link_in is offered on rx one cycle later.
module link_port
  import exanet_pkg::*;
#(
  parameter int DEPTH = 256   // 4 KB of 128-bit words (paper: 4 KBytes per link)
) (
  input  logic  clk,
  input  logic  rst_n,
  // local -> link
  input  logic  tx_valid,
  output logic  tx_ready,
  input  flit_t tx_flit,
  output logic  link_out_valid,
  output flit_t link_out_flit,
  input  logic  credit_in,
  // link -> local
  input  logic  link_in_valid,
  input  flit_t link_in_flit,
  output logic  rx_valid,
  input  logic  rx_ready,
  output flit_t rx_flit,
  output logic  credit_out,
  output logic  overflow   // sticky: a word arrived with the buffer full (protocol error)
);
  localparam int AW = $clog2(DEPTH);

  // ---------------- send side ----------------
  logic [AW:0] credits;
  assign tx_ready = (credits != '0);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      credits        <= (AW+1)'(DEPTH);
      link_out_valid <= 1'b0;
      link_out_flit  <= '0;
    end else begin
      link_out_valid <= tx_valid && tx_ready;
      link_out_flit  <= tx_flit;
      case ({tx_valid && tx_ready, credit_in})
        2'b10:   credits <= credits - 1'b1;
        2'b01:   credits <= credits + 1'b1;
        default: ;
      endcase
    end
  end

  // ---------------- receive side ----------------
  flit_t       buf_mem [DEPTH];
  logic [AW-1:0] wptr, rptr;
  logic [AW:0]   count;
  logic          push, pop;

  assign push     = link_in_valid && (count != (AW+1)'(DEPTH));
  assign pop      = rx_valid && rx_ready;
  assign rx_valid = (count != '0);
  assign rx_flit  = buf_mem[rptr];

  always_ff @(posedge clk) begin
    if (push) buf_mem[wptr] <= link_in_flit;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wptr <= '0; rptr <= '0; count <= '0; credit_out <= 1'b0; overflow <= 1'b0;
    end else begin
      if (push) wptr <= wptr + 1'b1;
      if (pop)  rptr <= rptr + 1'b1;
      count      <= count + (AW+1)'(push) - (AW+1)'(pop);
      credit_out <= pop;
      if (link_in_valid && !push) overflow <= 1'b1;
    end
  end

  // The far end must never send without a credit.
  a_no_overflow: assert property (@(posedge clk) disable iff (!rst_n)
                                  link_in_valid |-> count != (AW+1)'(DEPTH));
endmodule
