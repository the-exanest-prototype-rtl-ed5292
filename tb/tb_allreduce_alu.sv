// tb_allreduce_alu: random operands for every operation (sum, min, max) and datatype
// (int32, float, double). The reference is the simulator's own arithmetic: signed int
// math, and real (double) arithmetic whose result, for float, is rounded to single by the
// testbench's own round-to-nearest-even. Operands avoid subnormals and overflow, which the unit flushes.
`timescale 1ns/1ps
module tb_allreduce_alu;
  import exanet_pkg::*;
  int checks = 0, failures = 0;
  word_t a, b, y;
  ar_op_e op;
  ar_dt_e dt;
  allreduce_alu u_dut (.a, .b, .op, .dtype(dt), .y);

  function automatic logic [31:0] rf32();
    // sign, exponent 100..154, random fraction
    return {1'($urandom), 8'(100 + $urandom % 55), 23'($urandom)};
  endfunction
  function automatic logic [63:0] rf64();
    return {1'($urandom), 11'(900 + $urandom % 250), 20'($urandom), 32'($urandom)};
  endfunction

  // independent single <-> double conversions for the reference (normal numbers only)
  function automatic real r_of(logic [31:0] f);
    return $bitstoreal({f[31], 11'(f[30:23]) + 11'd896, f[22:0], 29'd0});
  endfunction
  function automatic logic [31:0] f_of(real r);
    logic [63:0] d;
    logic [31:0] f;
    d = $realtobits(r);
    if (d[62:0] == '0) return {d[63], 31'd0};
    f = {d[63], 8'(d[62:52] - 11'd896), d[51:29]};
    if (d[28] && (d[27:0] != '0 || d[29])) f = f + 32'd1;
    return f;
  endfunction

  initial begin
    for (int n = 0; n < 3000; n++) begin
      word_t e;
      op = ar_op_e'($urandom % 3);
      dt = ar_dt_e'($urandom % 3);
      if (dt == DT_INT) begin a = {$urandom, $urandom, $urandom, $urandom}; b = {$urandom, $urandom, $urandom, $urandom}; end
      else if (dt == DT_FLOAT) begin
        for (int l = 0; l < 4; l++) begin a[32*l +: 32] = rf32(); b[32*l +: 32] = rf32(); end
        if (n % 10 == 0) b[31:0] = a[31:0] ^ 32'h80000000;   // exact cancellation
      end else begin
        for (int l = 0; l < 2; l++) begin a[64*l +: 64] = rf64(); b[64*l +: 64] = rf64(); end
        if (n % 10 == 0) b[63:0] = a[63:0] ^ 64'h8000000000000000;
      end
      #1;
      e = '0;
      case (dt)
        DT_INT: for (int l = 0; l < 4; l++) begin
          int signed p, q;
          p = a[32*l +: 32]; q = b[32*l +: 32];
          e[32*l +: 32] = (op == OP_SUM) ? p + q : (op == OP_MIN) ? ((p < q) ? p : q) : ((p > q) ? p : q);
        end
        DT_FLOAT: for (int l = 0; l < 4; l++) begin
          real p, q;
          p = r_of(a[32*l +: 32]); q = r_of(b[32*l +: 32]);
          e[32*l +: 32] = (op == OP_SUM) ? f_of(p + q) :
                          (op == OP_MIN) ? ((p < q) ? a[32*l +: 32] : b[32*l +: 32]) :
                                           ((p > q) ? a[32*l +: 32] : b[32*l +: 32]);
        end
        default: for (int l = 0; l < 2; l++) begin
          real p, q;
          p = $bitstoreal(a[64*l +: 64]); q = $bitstoreal(b[64*l +: 64]);
          e[64*l +: 64] = (op == OP_SUM) ? $realtobits(p + q) :
                          (op == OP_MIN) ? ((p < q) ? a[64*l +: 64] : b[64*l +: 64]) :
                                           ((p > q) ? a[64*l +: 64] : b[64*l +: 64]);
        end
      endcase
      checks++;
      if (y != e) begin
        failures++;
        if (failures < 10) $display("mismatch op=%0d dt=%0d a=%h b=%h y=%h exp=%h", op, dt, a, b, y, e);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #1ms;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end
endmodule
