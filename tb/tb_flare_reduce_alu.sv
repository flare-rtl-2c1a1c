// tb_flare_reduce_alu: random rows through every operator, compared with
// a lane-by-lane reference written independently here.
//
// Combinational DUT, checked 1 ns after each input change. int32/int16/int8
// come from the paper's data types; the operator set and wrap-around
// arithmetic are this design's.
module tb_flare_reduce_alu;
  import flare_pkg::*;
  red_op_e op; row_t dst, src, res;
  int checks = 0, failures = 0;
  flare_reduce_alu dut (.op, .dst, .src, .res);

  function automatic logic [31:0] ref_lane(red_op_e o, logic [31:0] a, logic [31:0] b);
    case (o)
      OP_MIN_I32: return ($signed(a) <= $signed(b)) ? a : b;
      OP_MAX_I32: return ($signed(a) >= $signed(b)) ? a : b;
      OP_SUM_I16: return {a[31:16] + b[31:16], a[15:0] + b[15:0]};
      OP_SUM_I8:  return {a[31:24] + b[31:24], a[23:16] + b[23:16], a[15:8] + b[15:8], a[7:0] + b[7:0]};
      default:    return a + b;
    endcase
  endfunction

  initial begin
    for (int t = 0; t < 2000; t++) begin
      op  = red_op_e'(t % 5);
      for (int l = 0; l < ROW_ELEMS; l++) begin
        dst[l*32 +: 32] = (t % 7 == 0) ? 32'h7FFF_FFFF : $urandom;
        src[l*32 +: 32] = (t % 11 == 0) ? 32'h8000_0001 : $urandom;
      end
      #1;
      for (int l = 0; l < ROW_ELEMS; l++) begin
        checks++;
        if (res[l*32 +: 32] !== ref_lane(op, dst[l*32 +: 32], src[l*32 +: 32])) begin
          failures++;
          $display("FAIL op=%0d lane=%0d %h %h -> %h", op, l, dst[l*32 +: 32], src[l*32 +: 32], res[l*32 +: 32]);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    #100000;
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
