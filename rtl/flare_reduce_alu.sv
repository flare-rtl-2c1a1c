// flare_reduce_alu: lane-wise reduction of two payload rows.
//
// Computes res = dst (op) src for every lane of a row in one combinational
// step. Operators: 32-bit signed sum, minimum and maximum, and packed sums of
// two int16 or four int8 values per lane (each sub-word wraps on its own, no
// carry crosses a sub-word). The paper asks for user-defined operators and
// data types, and reports that the cores aggregate two int16 in one cycle;
// this fixed set stands in for programmable handlers. Floating point is not
// provided. Purely combinational; no clock.
module flare_reduce_alu
  import flare_pkg::*;
(
  input  red_op_e op,
  input  row_t    dst,
  input  row_t    src,
  output row_t    res
);
  always_comb begin
    for (int l = 0; l < ROW_ELEMS; l++) begin
      logic signed [31:0] a, b;
      a = dst[l*32 +: 32];
      b = src[l*32 +: 32];
      unique case (op)
        OP_MIN_I32: res[l*32 +: 32] = (a < b) ? a : b;
        OP_MAX_I32: res[l*32 +: 32] = (a > b) ? a : b;
        OP_SUM_I16: begin
          res[l*32      +: 16] = a[15:0]  + b[15:0];
          res[l*32 + 16 +: 16] = a[31:16] + b[31:16];
        end
        OP_SUM_I8: begin
          for (int s = 0; s < 4; s++)
            res[l*32 + 8*s +: 8] = a[8*s +: 8] + b[8*s +: 8];
        end
        default:    res[l*32 +: 32] = a + b;
      endcase
    end
  end
endmodule
