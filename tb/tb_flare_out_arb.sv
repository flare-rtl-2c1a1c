// tb_flare_out_arb: several sources with packets of different lengths and
// random output backpressure; every packet must come out whole, never
// interleaved, in per-source order, and sources are served round robin.
//
// No ports; 10 ns clock; sources present a new row after each accepted one.
// Packet-level arbitration is this design's choice for the paper's command
// unit.
module tb_flare_out_arb;
  import flare_pkg::*;
  localparam int N = 3;
  logic clk = 0, rst_n = 0; always #5 clk = ~clk;
  logic in_valid [N], in_ready [N], in_sop [N], in_eop [N]; out_hdr_t in_hdr [N]; row_t in_row [N];
  logic out_valid, out_ready, out_sop, out_eop; out_hdr_t out_hdr; row_t out_row;
  int checks = 0, failures = 0;
  flare_out_arb #(.N(N)) dut (.*);
  task automatic chk(bit ok, string s); checks++; if (!ok) begin failures++; $display("FAIL %s", s); end endtask
  int row_i [N], pkt_i [N];
  localparam int NPKT = 5, LEN = 4;
  always_comb for (int s = 0; s < N; s++) begin
    in_valid[s] = rst_n && pkt_i[s] < NPKT;
    in_sop[s] = (row_i[s] == 0); in_eop[s] = (row_i[s] == LEN-1);
    in_hdr[s] = '{dest: 8'(1 << s), ar_id: 2'd0, block_id: 16'(pkt_i[s])};
    in_row[s] = row_t'({s, pkt_i[s], row_i[s]});
  end
  always @(posedge clk) for (int s = 0; s < N; s++)
    if (in_valid[s] && in_ready[s]) begin
      if (row_i[s] == LEN-1) begin row_i[s] <= 0; pkt_i[s] <= pkt_i[s] + 1; end
      else row_i[s] <= row_i[s] + 1;
    end
  int cur_src = -1, exp_row = 0, got_pkts [N], order [$];
  always @(posedge clk) if (rst_n) begin
    out_ready <= ($urandom % 4) != 0;
    if (out_valid && out_ready) begin
      int s; s = $clog2(int'(out_hdr.dest));
      if (out_sop) begin chk(cur_src == -1, "no interleave"); cur_src = s; exp_row = 0; order.push_back(s); end
      chk(s == cur_src, "same source until eop");
      chk(out_row == row_t'({s, got_pkts[s], exp_row}), "row content and order");
      exp_row++;
      if (out_eop) begin chk(exp_row == LEN, "length"); got_pkts[s]++; cur_src = -1; end
    end
  end
  initial begin
    for (int s = 0; s < N; s++) begin row_i[s] = 0; pkt_i[s] = 0; got_pkts[s] = 0; end
    out_ready = 0;
    #12 rst_n = 1;
    repeat (400) @(posedge clk);
    for (int s = 0; s < N; s++) chk(got_pkts[s] == NPKT, $sformatf("source %0d delivered %0d", s, got_pkts[s]));
    for (int i = 0; i + 2 < N * 2; i++) chk(order[i] != order[i+1], "round robin alternates");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin repeat (5000) @(posedge clk); failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
