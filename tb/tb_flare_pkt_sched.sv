// tb_flare_pkt_sched: blocks go to cluster block_id mod NCL in arrival
// order; a full cluster queue stalls the input and is counted.
//
// Four clusters with 2-entry queues; 10 ns clock; ready is sampled 1 ns
// after the inputs change. The block-to-cluster rule follows the paper's
// hierarchical FCFS; the queue depth is this design's.
module tb_flare_pkt_sched;
  import flare_pkg::*;
  localparam int NCL = 4, QD = 2;
  logic clk = 0, rst_n = 0; always #5 clk = ~clk;
  logic in_valid = 0, in_ready; pkt_desc_t in_desc = '0;
  logic out_valid [NCL], out_ready [NCL]; pkt_desc_t out_desc [NCL];
  logic [31:0] cnt_stall;
  int checks = 0, failures = 0;
  flare_pkt_sched #(.NCL(NCL), .QD(QD)) dut (.*);
  task automatic chk(bit ok, string s); checks++; if (!ok) begin failures++; $display("FAIL %s", s); end endtask
  int seq [NCL][$];
  initial begin
    for (int c = 0; c < NCL; c++) out_ready[c] = 0;
    #12 rst_n = 1;
    // 2 descriptors per cluster fit; the 9th (block 8 -> cluster 0) stalls
    for (int i = 0; i < 9; i++) begin
      @(negedge clk); in_valid = 1; in_desc = '{port: 3'(i), hdr: '{16'h88B5, 2'd0, 16'(i)}, slot: 16'(i)};
      #1;
      chk(in_ready == (i < 8), $sformatf("ready for desc %0d", i));
    end
    @(negedge clk);
    chk(cnt_stall >= 1, "stall counted");
    // drain cluster 0 one entry: descriptor 8 enters
    for (int c = 0; c < NCL; c++) chk(out_valid[c], "queue not empty");
    chk(out_desc[0].hdr.block_id == 0 && out_desc[1].hdr.block_id == 1 && out_desc[3].hdr.block_id == 3, "heads");
    out_ready[0] = 1; @(negedge clk); out_ready[0] = 0; #1;
    chk(out_desc[0].hdr.block_id == 4, "FCFS order in cluster 0");
    @(negedge clk); in_valid = 0;
    out_ready[0] = 1; @(negedge clk); #1;
    chk(out_valid[0] && out_desc[0].hdr.block_id == 8, "stalled descriptor delivered");
    @(negedge clk); out_ready[0] = 0; #1;
    chk(!out_valid[0], "cluster 0 empty");
    chk(out_desc[2].hdr.block_id == 2 && out_desc[2].slot == 2, "cluster 2 untouched");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin repeat (2000) @(posedge clk); failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
