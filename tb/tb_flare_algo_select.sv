// tb_flare_algo_select: sizes on both sides of each threshold, with and
// without the reproducibility request.
//
// Purely combinational DUT, checked 1 ns after each input change. The
// thresholds checked are the paper's; the expected buffer counts for the
// tree case (8) are this design's.
module tb_flare_algo_select;
  import flare_pkg::*;
  logic [31:0] size_bytes; logic repro; algo_e algo; logic [PORT_W:0] nbuf;
  int checks = 0, failures = 0;
  flare_algo_select dut (.*);
  task automatic t(int sz, bit rp, algo_e ea, int eb);
    size_bytes = 32'(sz); repro = rp; #1;
    checks++;
    if (algo != ea || int'(nbuf) != eb) begin
      failures++; $display("FAIL size=%0d repro=%0d -> algo=%0d nbuf=%0d", sz, rp, algo, nbuf);
    end
  endtask
  initial begin
    t(1024, 0, ALG_TREE, NPORTS);
    t(128*1024, 0, ALG_TREE, NPORTS);
    t(128*1024+1, 0, ALG_MULTI, 2);
    t(256*1024, 0, ALG_MULTI, 2);
    t(256*1024+4, 0, ALG_MULTI, 4);
    t(512*1024, 0, ALG_MULTI, 4);
    t(512*1024+1, 0, ALG_SINGLE, 1);
    t(100*1024*1024, 0, ALG_SINGLE, 1);
    t(100*1024*1024, 1, ALG_TREE, NPORTS);
    t(300*1024, 1, ALG_TREE, NPORTS);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    #10000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
