// tb_flare_ar_config: installs and removes allreduces and checks the table,
// including the algorithm derived from size and reproducibility.
//
// Writes through the control-plane port on a 10 ns clock and reads the
// table one cycle later. The algorithm rule is the paper's; the table
// layout is this design's.
module tb_flare_ar_config;
  import flare_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic wr_en = 0, wr_valid = 0, wr_is_root = 0, wr_repro = 0;
  logic [AR_W-1:0] wr_id = 0; portmask_t wr_children = 0; logic [PORT_W-1:0] wr_parent = 0;
  red_op_e wr_op = OP_SUM_I32; logic [31:0] wr_size_bytes = 0;
  ar_cfg_t tab [1<<AR_W];
  int checks = 0, failures = 0;
  flare_ar_config dut (.*);
  task automatic chk(bit ok, string s); checks++; if (!ok) begin failures++; $display("FAIL %s", s); end endtask
  task automatic wr(int id, bit v, int ch, int par, bit root, red_op_e op, int sz, bit rp);
    @(negedge clk);
    wr_en = 1; wr_id = AR_W'(id); wr_valid = v; wr_children = portmask_t'(ch); wr_parent = PORT_W'(par);
    wr_is_root = root; wr_op = op; wr_size_bytes = 32'(sz); wr_repro = rp;
    @(negedge clk); wr_en = 0;
  endtask
  initial begin
    #12 rst_n = 1;
    for (int i = 0; i < 4; i++) chk(!tab[i].valid, "empty after reset");
    wr(1, 1, 'h3C, 5, 0, OP_MAX_I32, 1<<20, 0);
    chk(tab[1].valid && tab[1].children == 8'h3C && tab[1].parent == 3'd5 && !tab[1].is_root, "entry 1 fields");
    chk(tab[1].op == OP_MAX_I32 && tab[1].algo == ALG_SINGLE && tab[1].nbuf == 1, "entry 1 algorithm");
    chk(!tab[0].valid && !tab[2].valid, "other entries untouched");
    wr(2, 1, 'hFF, 0, 1, OP_SUM_I16, 200*1024, 0);
    chk(tab[2].is_root && tab[2].algo == ALG_MULTI && tab[2].nbuf == 2, "entry 2 multi 2");
    wr(3, 1, 'h0F, 0, 1, OP_SUM_I32, 1<<22, 1);
    chk(tab[3].algo == ALG_TREE, "reproducible -> tree");
    wr(1, 0, 0, 0, 0, OP_SUM_I32, 0, 0);
    chk(!tab[1].valid && tab[2].valid, "uninstall");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin repeat (1000) @(posedge clk); failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
