// tb_ni_switch: drives the 9-port NI switch (5 endpoints + 4 links) with 300 random cells
// from all inputs at once while outputs stall at random. Each cell carries its id in the
// header tag and id-derived payload words; the checker verifies every cell arrives whole,
// not interleaved with another, at the output route_port() selects, and that every cell is
// delivered. It also measures the paper's two-cycle switch latency on an idle switch and
// counts output contention (several inputs wanting one output) which must occur.
`timescale 1ns/1ps
module tb_ni_switch;
  import exanet_pkg::*;
  localparam int NP = N_PORT;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic [NODE_W-1:0] my_node = 22'h000105;
  logic [NP-1:0] in_valid, in_ready, out_valid, out_ready;
  flit_t in_flit [NP];
  flit_t out_flit[NP];

  ni_switch u_dut (.clk, .rst_n, .my_node, .in_valid, .in_ready, .in_flit,
                   .out_valid, .out_ready, .out_flit);

  localparam int NCELL = 300;
  cell_hdr_t hdrs [NCELL];
  int        nwd  [NCELL];
  int        src_q[NP][$];
  int        pos  [NP];       // word position in current cell, -1 idle
  int        cur  [NP];
  int        out_cur[NP], out_pos[NP];
  int        delivered = 0, contention = 0;

  function automatic word_t pay(int id, int w);
    return {32'(id), 32'(w), 32'hC0FFEE00 ^ 32'(id * 7 + w), 32'(w * 13)};
  endfunction

  function automatic flit_t flit_of(int id, int w);
    if (w == 0)            return '{data: word_t'(hdrs[id]), sop: 1'b1, eop: 1'b0};
    else if (w == nwd[id] - 1) return '{data: pay(id, w), sop: 1'b0, eop: 1'b1};
    else                   return '{data: pay(id, w), sop: 1'b0, eop: 1'b0};
  endfunction

  initial begin
    int t0, lat;
    for (int p = 0; p < NP; p++) begin in_flit[p] = '0; pos[p] = -1; out_cur[p] = -1; out_pos[p] = 0; cur[p] = 0; end
    in_valid = '0; out_ready = '1;
    for (int c = 0; c < NCELL; c++) begin
      hdrs[c] = '0;
      hdrs[c].ctype = cell_type_e'($urandom % 7);
      case ($urandom % 3)
        0: hdrs[c].dst.node = my_node;
        1: hdrs[c].dst.node = {my_node[21:2], 2'($urandom)};
        default: hdrs[c].dst.node = 22'($urandom);
      endcase
      hdrs[c].tag = 13'(c);
      hdrs[c].len = 9'($urandom % 257);
      nwd[c] = 2 + int'(words_of(hdrs[c].len)) ;
      src_q[$urandom % NP].push_back(c);
    end
    repeat (3) @(posedge clk);
    rst_n = 1;
    // ---- latency on an idle switch: cell 0 alone on input 0 ----
    @(negedge clk);
    in_valid[0] = 1; in_flit[0] = flit_of(0, 0);
    @(posedge clk); t0 = $time;
    @(negedge clk); in_valid[0] = 0;
    lat = 0;
    while (!(|out_valid)) begin @(posedge clk); lat++; end
    checks++;
    if (lat != 2) begin failures++; $display("latency %0d cycles, expected 2", lat); end
    // finish cell 0 so the output unlocks
    for (int w = 1; w < nwd[0]; w++) begin
      @(negedge clk); in_valid[0] = 1; in_flit[0] = flit_of(0, w);
      @(posedge clk); while (!in_ready[0]) @(posedge clk);
    end
    @(negedge clk); in_valid[0] = 0;
    repeat (10) @(posedge clk);
    delivered = 0;
    for (int p = 0; p < NP; p++) out_cur[p] = -1;
    // drop cell 0 from its queue (already sent)
    for (int p = 0; p < NP; p++) foreach (src_q[p][k]) if (src_q[p][k] == 0) src_q[p].delete(k);
    // ---- random traffic ----
    fork
      forever begin
        @(negedge clk);
        for (int p = 0; p < NP; p++) begin
          if (in_valid[p] && in_ready_q[p]) begin
            pos[p]++;
            if (pos[p] == nwd[cur[p]]) pos[p] = -1;
          end
          if (pos[p] < 0 && src_q[p].size() != 0 && ($urandom % 2 == 0)) begin
            cur[p] = src_q[p].pop_front(); pos[p] = 0;
          end
          in_valid[p] = (pos[p] >= 0);
          if (pos[p] >= 0) in_flit[p] = flit_of(cur[p], pos[p]);
          out_ready[p] = ($urandom % 4 != 0);
        end
      end
    join_none
    wait (delivered == NCELL - 1);
    repeat (5) @(posedge clk);
    checks++;
    if (contention == 0) begin failures++; $display("no contention seen"); end
    $display("delivered=%0d contention_cycles=%0d", delivered, contention);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // sample ready at the clock edge for the driver
  logic [NP-1:0] in_ready_q;
  always @(posedge clk) in_ready_q <= in_ready;

  // contention: two or more input heads with a start of cell for the same output
  always @(posedge clk) if (rst_n) begin
    for (int o = 0; o < NP; o++) begin
      int n; n = 0;
      for (int p = 0; p < NP; p++)
        if (in_valid[p] && in_flit[p].sop && route_port(cell_hdr_t'(in_flit[p].data), my_node) == o) n++;
      if (n > 1) contention++;
    end
  end

  // output checker
  always @(posedge clk) if (rst_n) begin
    for (int o = 0; o < NP; o++) begin
      if (out_valid[o] && out_ready[o]) begin
        if (out_flit[o].sop) begin
          cell_hdr_t h;
          h = cell_hdr_t'(out_flit[o].data);
          checks++;
          if (out_cur[o] != -1) begin failures++; $display("sop inside cell at out %0d", o); end
          out_cur[o] = int'(h.tag); out_pos[o] = 1;
          if (route_port(h, my_node) != o) begin failures++; $display("cell %0d at wrong port %0d", h.tag, o); end
        end else begin
          checks++;
          if (out_cur[o] < 0 || out_flit[o] != flit_of(out_cur[o], out_pos[o])) begin
            failures++; $display("bad word at out %0d", o);
          end
          out_pos[o]++;
          if (out_flit[o].eop) begin out_cur[o] = -1; delivered++; end
        end
      end
    end
  end

  initial begin
    #5ms;
    $display("watchdog: delivered=%0d", delivered);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end
endmodule
