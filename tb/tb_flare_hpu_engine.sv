// tb_flare_hpu_engine: one handler unit connected to a block table and an
// L1 working memory, packets loaded through its DMA port one at a time.
// Checks the single buffer handler (copy of the first packet, combine of the
// second, result to all children at the root), the tree handler (leaf copy,
// combine, result to the parent port), retransmission discard, the packet
// processing time of a 1 KiB packet (claim, lock, 64 rows, release) and
// that the block entry is cleared after the result is sent.
//
// No ports; 10 ns clock; the packet is written through the DMA port before
// each start. Handler behaviour follows the paper; the cycle counts checked
// are those of this design's one-row-per-cycle datapath.
module tb_flare_hpu_engine;
  import flare_pkg::*;
  localparam int NCL = 2, NBLK = 16, DEPTH = NBLK * NPORTS * PKT_ROWS;
  logic clk = 0, rst_n = 0; always #5 clk = ~clk;
  logic start = 0; pkt_desc_t start_desc = '0; ar_cfg_t cfg_tab [1<<AR_W]; logic idle;
  logic dma_we = 0; logic [5:0] dma_row_idx = '0; row_t dma_row = '0;
  logic bt_valid; logic [$clog2(NBLK)-1:0] bt_entry; bt_req_t bt_req; logic bt_gnt; bt_resp_t bt_resp;
  logic [$clog2(DEPTH)-1:0] ra_addr, rb_addr, wa_addr; row_t ra_data, rb_data, wa_data; logic we;
  logic out_valid, out_ready = 1, out_sop, out_eop; out_hdr_t out_hdr; row_t out_row;
  logic ev_dup, ev_wait, ev_merge, ev_combine, ev_emit;
  int checks = 0, failures = 0;
  task automatic chk(bit ok, string s); checks++; if (!ok) begin failures++; $display("FAIL %s", s); end endtask

  flare_hpu_engine #(.NCL(NCL), .NBLK(NBLK), .OP_CYCLES(1)) dut (.*);
  logic [0:0] bv; logic [0:0] bg; logic [$clog2(NBLK)-1:0] be [1]; bt_req_t br [1];
  assign bv = bt_valid; assign be[0] = bt_entry; assign br[0] = bt_req; assign bt_gnt = bg[0];
  flare_block_table #(.NHPU(1), .NBLK(NBLK)) u_bt (.clk, .rst_n, .req_valid(bv), .req_entry(be), .req(br), .gnt(bg), .resp(bt_resp));
  logic [$clog2(DEPTH)-1:0] raa [1], rba [1], waa [1]; row_t rad [1], rbd [1], wad [1]; logic wea [1];
  assign raa[0] = ra_addr; assign rba[0] = rb_addr; assign waa[0] = wa_addr; assign wad[0] = wa_data; assign wea[0] = we;
  assign ra_data = rad[0]; assign rb_data = rbd[0];
  flare_l1_workmem #(.NP(1), .DEPTH(DEPTH)) u_l1 (.clk, .ra_addr(raa), .ra_data(rad), .rb_addr(rba), .rb_data(rbd), .we(wea), .wa_addr(waa), .wa_data(wad));

  function automatic logic [31:0] val(int ar, int blk, int port, int lane);
    return 32'(ar * 77777 + blk * 313 + port * 1000001 + lane * 99991) ^ (32'(port) << 29);
  endfunction

  int n_dup, n_emit, n_comb;
  always @(posedge clk) begin n_dup += ev_dup; n_emit += ev_emit; n_comb += ev_combine; end

  // result capture
  row_t res [PKT_ROWS]; out_hdr_t res_hdr; int res_rows, res_pkts;
  always @(posedge clk) if (out_valid && out_ready) begin
    if (out_sop) res_rows = 0;
    res[res_rows] = out_row; res_rows++; res_hdr = out_hdr;
    if (out_eop) res_pkts++;
  end

  int t0, t1;
  task automatic run_pkt(int ar, int blk, int port, output int cycles);
    for (int r = 0; r < PKT_ROWS; r++) begin
      @(negedge clk); dma_we = 1; dma_row_idx = 6'(r);
      for (int k = 0; k < ROW_ELEMS; k++) dma_row[k*ELEM_W +: ELEM_W] = val(ar, blk, port, r*ROW_ELEMS + k);
    end
    @(negedge clk); dma_we = 0;
    chk(idle, "idle before start");
    start = 1; start_desc = '{port: 3'(port), hdr: '{16'h88B5, 2'(ar), 16'(blk)}, slot: 16'd0};
    t0 = $time;
    @(negedge clk); start = 0;
    while (!idle) @(negedge clk);
    cycles = ($time - t0) / 10;
  endtask

  task automatic check_result(int ar, int blk, portmask_t ch, portmask_t dest, red_op_e op);
    logic signed [31:0] acc, b; logic first; int bad;
    bad = 0;
    for (int lane = 0; lane < N_ELEM; lane++) begin
      first = 1; acc = 0;
      for (int p = 0; p < NPORTS; p++) if (ch[p]) begin
        b = val(ar, blk, p, lane);
        if (first) acc = b; else if (op == OP_MAX_I32) acc = (b > acc) ? b : acc; else acc = acc + b;
        first = 0;
      end
      if (res[lane / ROW_ELEMS][(lane % ROW_ELEMS)*ELEM_W +: ELEM_W] !== acc) bad++;
    end
    chk(bad == 0, $sformatf("result payload ar %0d blk %0d (%0d bad lanes)", ar, blk, bad));
    chk(res_hdr.dest == dest && res_hdr.block_id == 16'(blk) && res_hdr.ar_id == 2'(ar), "result header");
  endtask

  int c;
  initial begin
    n_dup = 0; n_emit = 0; n_comb = 0; res_pkts = 0;
    for (int a = 0; a < 4; a++) cfg_tab[a] = '0;
    cfg_tab[0] = '{valid: 1, children: 8'h03, parent: 3'd0, is_root: 1, op: OP_SUM_I32, algo: ALG_SINGLE, nbuf: 4'd1};
    cfg_tab[1] = '{valid: 1, children: 8'h0B, parent: 3'd4, is_root: 0, op: OP_MAX_I32, algo: ALG_TREE, nbuf: 4'd8};
    #12 rst_n = 1;
    // single buffer, two children
    run_pkt(0, 0, 1, c);
    chk(c >= PKT_ROWS && c <= PKT_ROWS + 4, $sformatf("first packet takes %0d cycles", c));
    chk(res_pkts == 0, "no result after one of two packets");
    run_pkt(0, 0, 1, c);
    chk(n_dup == 1 && c <= 3, "retransmission discarded quickly");
    run_pkt(0, 0, 0, c);
    chk(res_pkts == 1 && n_emit == 1, "result sent after the second packet");
    chk(c >= 2 * PKT_ROWS && c <= 2 * PKT_ROWS + 6, $sformatf("combine + send takes %0d cycles", c));
    check_result(0, 0, 8'h03, 8'h03, OP_SUM_I32);
    // entry cleared: same block number again is a new block
    run_pkt(0, 0, 0, c);
    chk(n_dup == 1, "entry cleared after the result");
    run_pkt(0, 0, 1, c);
    chk(res_pkts == 2, "second round result");
    check_result(0, 0, 8'h03, 8'h03, OP_SUM_I32);
    // tree, children 0, 1, 3 arriving 3, 0, 1
    run_pkt(1, 2, 3, c);
    run_pkt(1, 2, 0, c);
    chk(res_pkts == 2, "tree waits for port 1");
    run_pkt(1, 2, 1, c);
    chk(res_pkts == 3, "tree result sent");
    chk(n_comb == 2, $sformatf("two tree combines (%0d)", n_comb));
    check_result(1, 2, 8'h0B, 8'h10, OP_MAX_I32);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin repeat (20000) @(posedge clk); failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
