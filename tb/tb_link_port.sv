// tb_link_port: two link_port instances wired back to back (A sends, B receives).
// Sends 300 random words while B's consumer stalls at random; checks order and data,
// that A runs out of credits (stall) while B is blocked, that the buffer never overflows,
// and the one-cycle tx -> link_out timing. DEPTH is reduced to 8 so stalls happen quickly.
`timescale 1ns/1ps
module tb_link_port;
  import exanet_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic  a_tx_valid, a_tx_ready, b_rx_valid, b_rx_ready;
  flit_t a_tx_flit, b_rx_flit;
  logic  ab_valid, ba_credit, a_ovf, b_ovf, b_credit_unused, a_out_unused;
  flit_t ab_flit, a_rx_unused, b_out_flit;
  logic  a_rx_v, b_out_v, a_cr_out;

  link_port #(.DEPTH(8)) u_a (
    .clk, .rst_n, .tx_valid(a_tx_valid), .tx_ready(a_tx_ready), .tx_flit(a_tx_flit),
    .link_out_valid(ab_valid), .link_out_flit(ab_flit), .credit_in(ba_credit),
    .link_in_valid(1'b0), .link_in_flit('0), .rx_valid(a_rx_v), .rx_ready(1'b1),
    .rx_flit(a_rx_unused), .credit_out(a_cr_out), .overflow(a_ovf));
  link_port #(.DEPTH(8)) u_b (
    .clk, .rst_n, .tx_valid(1'b0), .tx_ready(b_credit_unused), .tx_flit('0),
    .link_out_valid(b_out_v), .link_out_flit(b_out_flit), .credit_in(1'b0),
    .link_in_valid(ab_valid), .link_in_flit(ab_flit), .rx_valid(b_rx_valid),
    .rx_ready(b_rx_ready), .rx_flit(b_rx_flit), .credit_out(ba_credit), .overflow(b_ovf));

  word_t exp_q[$];
  int sent = 0, got = 0, stalls = 0, cyc = 0;
  logic last_stall = 0;
  logic  last_fire; word_t last_data;

  initial begin
    a_tx_valid = 0; a_tx_flit = '0; b_rx_ready = 0; last_fire = 0; last_data = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    while (got < 300) begin
      @(negedge clk);
      // one-cycle timing: what was accepted last cycle is on the link now
      if (last_fire) begin
        checks++;
        if (!ab_valid || ab_flit.data != last_data) begin failures++; $display("timing err"); end
      end
      // consumer: long stalls in the first part, random later
      cyc++;
      b_rx_ready = (cyc < 60) ? 1'b0 : ($urandom % 3 != 0);
      if (b_rx_valid && b_rx_ready) begin
        checks++;
        if (exp_q.size() == 0 || b_rx_flit.data != exp_q[0]) begin
          failures++; $display("data mismatch at %0d", got);
        end
        if (exp_q.size() != 0) void'(exp_q.pop_front());
        got++;
      end
      if (sent < 300 && a_tx_valid && !a_tx_ready) stalls++;
      if (cyc < 60 && sent >= 8 && a_tx_ready) begin
        // B holds its 8 words; A must not have any credit left
        failures++; $display("credit not exhausted");
      end
      if (sent < 300) begin
        a_tx_valid = 1'b1;
        if (!last_stall) a_tx_flit.data = {$urandom, $urandom, $urandom, $urandom};
      end else a_tx_valid = 1'b0;
      last_fire = a_tx_valid && a_tx_ready;
      last_stall = a_tx_valid && !a_tx_ready;
      last_data = a_tx_flit.data;
      if (last_fire) begin exp_q.push_back(a_tx_flit.data); sent++; end
    end
    checks++; if (stalls == 0) begin failures++; $display("never stalled"); end
    checks++; if (a_ovf || b_ovf) begin failures++; $display("overflow"); end
    $display("stalls=%0d", stalls);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #10ms;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end
endmodule
