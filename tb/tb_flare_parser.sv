// tb_flare_parser: matching, bypass, drop on a full packet memory, the
// per-packet decision held over all rows, backpressure and the counters.
//
// No ports; 10 ns clock; rows are offered with valid/ready. Matching rules
// and the drop on a full packet memory follow the paper; the single-stream
// format is this design's.
module tb_flare_parser;
  import flare_pkg::*;
  logic clk = 0, rst_n = 0; always #5 clk = ~clk;
  logic rule_wr = 0, rule_valid = 0; logic [2:0] rule_idx = 0; logic [15:0] rule_etype = 0;
  logic [3:0] ar_installed = 4'b0010;
  logic in_valid = 0, in_sop = 0, in_eop = 0, in_ready; logic [PORT_W-1:0] in_port = 0;
  pkt_hdr_t in_hdr = '0; row_t in_row = '0;
  logic mem_space = 1, pm_valid, pm_ready = 1, pm_sop, pm_eop; logic [PORT_W-1:0] pm_port; pkt_hdr_t pm_hdr; row_t pm_row;
  logic by_valid, by_ready = 1, by_sop, by_eop; logic [PORT_W-1:0] by_port; pkt_hdr_t by_hdr; row_t by_row;
  logic [31:0] cnt_processed, cnt_bypassed, cnt_dropped;
  int checks = 0, failures = 0;
  flare_parser #(.NRULES(8)) dut (.*);
  task automatic chk(bit ok, string s); checks++; if (!ok) begin failures++; $display("FAIL %s", s); end endtask

  // sends a 3-row packet; expects dest 0 = memory, 1 = bypass, 2 = dropped
  task automatic pkt(logic [15:0] et, int ar, int dest, bit ms);
    for (int r = 0; r < 3; r++) begin
      @(negedge clk);
      in_valid = 1; in_sop = (r == 0); in_eop = (r == 2); in_hdr = '{et, AR_W'(ar), 16'(r)};
      in_row = row_t'(r + 100); mem_space = (r == 0) ? ms : 1'b0;
      #1;
      chk(pm_valid == (dest == 0) && by_valid == (dest == 1), $sformatf("steer et=%h ar=%0d row %0d", et, ar, r));
      chk(in_ready == 1'b1, "ready");
      if (dest == 0) chk(pm_row == row_t'(r + 100) && pm_sop == (r == 0), "row forwarded");
    end
    @(negedge clk); in_valid = 0;
  endtask

  initial begin
    #12 rst_n = 1;
    @(negedge clk); rule_wr = 1; rule_idx = 5; rule_valid = 1; rule_etype = 16'h88B5;
    @(negedge clk); rule_wr = 0;
    pkt(16'h88B5, 1, 0, 1);   // match, installed
    pkt(16'h0800, 1, 1, 1);   // no rule
    pkt(16'h88B5, 2, 1, 1);   // allreduce not installed
    pkt(16'h88B5, 1, 2, 0);   // memory full: drop
    pkt(16'h88B5, 1, 0, 1);
    // backpressure from the memory side reaches the input
    @(negedge clk); in_valid = 1; in_sop = 1; in_eop = 0; in_hdr = '{16'h88B5, 2'd1, 16'd0}; mem_space = 1; pm_ready = 0;
    #1 chk(!in_ready && pm_valid, "backpressure");
    @(negedge clk); pm_ready = 1; #1 chk(in_ready, "released");
    @(negedge clk); in_sop = 0; in_eop = 1;
    @(negedge clk); in_valid = 0;
    @(negedge clk);
    chk(cnt_processed == 3 && cnt_bypassed == 2 && cnt_dropped == 1,
        $sformatf("counters %0d %0d %0d", cnt_processed, cnt_bypassed, cnt_dropped));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin repeat (2000) @(posedge clk); failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
