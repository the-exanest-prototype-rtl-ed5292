// allreduce_alu: element-wise reduction of two 128-bit words for the Allreduce accelerator.
//
// Following the paper: the accelerator supports the sum, min and max operations on int,
// float and double data. This design's own choices: one 128-bit word (the NI's AXI data
// width) is reduced per call, as 4 x int32, 4 x float or 2 x double lanes; int sums wrap
// in two's complement; float arithmetic follows fp_pkg (round-to-nearest-even, subnormals
// flushed to zero).
//
// Interface: a, b operands, op and dtype select the operation, y the result.
// Timing: combinational; the engine registers the result.
module allreduce_alu
  import exanet_pkg::*;
  import fp_pkg::*;
(
  input  word_t  a,
  input  word_t  b,
  input  ar_op_e op,
  input  ar_dt_e dtype,
  output word_t  y
);
  word_t y_int, y_flt, y_dbl;

  for (genvar l = 0; l < 4; l++) begin : g_w32
    logic signed [31:0] p, q;
    assign p = a[32*l +: 32];
    assign q = b[32*l +: 32];
    always_comb begin
      case (op)
        OP_MIN:  y_int[32*l +: 32] = (p < q) ? p : q;
        OP_MAX:  y_int[32*l +: 32] = (p > q) ? p : q;
        default: y_int[32*l +: 32] = p + q;
      endcase
      case (op)
        OP_MIN:  y_flt[32*l +: 32] = (f32_key(p) < f32_key(q)) ? p : q;
        OP_MAX:  y_flt[32*l +: 32] = (f32_key(p) > f32_key(q)) ? p : q;
        default: y_flt[32*l +: 32] = f32_add(p, q);
      endcase
    end
  end

  for (genvar l = 0; l < 2; l++) begin : g_w64
    logic [63:0] p, q;
    assign p = a[64*l +: 64];
    assign q = b[64*l +: 64];
    always_comb begin
      case (op)
        OP_MIN:  y_dbl[64*l +: 64] = (f64_key(p) < f64_key(q)) ? p : q;
        OP_MAX:  y_dbl[64*l +: 64] = (f64_key(p) > f64_key(q)) ? p : q;
        default: y_dbl[64*l +: 64] = f64_add(p, q);
      endcase
    end
  end

  always_comb begin
    case (dtype)
      DT_INT:   y = y_int;
      DT_FLOAT: y = y_flt;
      default:  y = y_dbl;
    endcase
  end
endmodule
