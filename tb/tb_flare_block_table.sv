// tb_flare_block_table: drives the block table request port directly and
// checks each operation: retransmission detection (CLAIM), buffer locks
// (ACQ/REL, single and multiple buffers, "last" detection), the fixed tree
// sequence for four children arriving out of order and for a single child,
// entry clearing (FREE), per-entry independence and round robin service of
// two simultaneous requesters.
//
// One request per cycle from requester 0 (grant and response read 1 ns
// after the inputs settle), then two requesters at once. The bitmap and the
// four-port tree order come from the paper; the eight-port generalisation
// checked here is this design's.
module tb_flare_block_table;
  import flare_pkg::*;
  localparam int NHPU = 2, NBLK = 4;
  logic clk = 0, rst_n = 0; always #5 clk = ~clk;
  logic [NHPU-1:0] req_valid = '0; logic [1:0] req_entry [NHPU]; bt_req_t req [NHPU];
  logic [NHPU-1:0] gnt; bt_resp_t resp;
  int checks = 0, failures = 0;
  flare_block_table #(.NHPU(NHPU), .NBLK(NBLK)) dut (.*);
  task automatic chk(bit ok, string s); checks++; if (!ok) begin failures++; $display("FAIL %s", s); end endtask

  // one request from requester 0; returns the response of that cycle
  task automatic op(bt_op_e o, int ent, int port, portmask_t ch, output bt_resp_t rs,
                    input int bufi = 0, int nbuf = 1, int lvl = 0, int grp = 0);
    @(negedge clk);
    req_valid = 2'b01; req_entry[0] = 2'(ent);
    req[0] = '0; req[0].op = o; req[0].port = 3'(port); req[0].children = ch;
    req[0].bufi = 3'(bufi); req[0].nbuf = 4'(nbuf); req[0].level = 2'(lvl); req[0].group = 3'(grp);
    #1; chk(gnt == 2'b01, "single requester granted");
    rs = resp;
    @(negedge clk); req_valid = '0;
  endtask

  bt_resp_t rs;
  initial begin
    req[0] = '0; req[1] = '0; req_entry[0] = 0; req_entry[1] = 0;
    #12 rst_n = 1;
    // ---- CLAIM
    op(BT_CLAIM, 0, 2, 8'h0F, rs); chk(rs.ok, "first packet of port 2 claimed");
    op(BT_CLAIM, 0, 2, 8'h0F, rs); chk(!rs.ok, "retransmission refused");
    op(BT_CLAIM, 0, 5, 8'h0F, rs); chk(!rs.ok, "non-child port refused");
    op(BT_CLAIM, 1, 2, 8'h0F, rs); chk(rs.ok, "other entry independent");
    // ---- single buffer lock
    op(BT_ACQ, 0, 2, 8'h0F, rs, 0, 1); chk(rs.ok && rs.bufi == 0 && rs.first, "single: buffer 0, empty");
    op(BT_ACQ, 0, 3, 8'h0F, rs, 0, 1); chk(!rs.ok, "single: locked buffer refused");
    op(BT_REL, 0, 2, 8'h0F, rs, 0);    chk(rs.ok && !rs.last && rs.used == 8'h01, "release, not last");
    op(BT_ACQ, 0, 3, 8'h0F, rs, 0, 1); chk(rs.ok && rs.bufi == 0 && !rs.first, "single: buffer 0 holds data");
    op(BT_REL, 0, 3, 8'h0F, rs, 0);    chk(!rs.last, "two of four done");
    op(BT_ACQ, 0, 0, 8'h0F, rs, 0, 1); op(BT_REL, 0, 0, 8'h0F, rs, 0); chk(!rs.last, "three of four");
    op(BT_ACQ, 0, 1, 8'h0F, rs, 0, 1); op(BT_REL, 0, 1, 8'h0F, rs, 0); chk(rs.last, "last handler detected");
    op(BT_FREE, 0, 0, 8'h0F, rs); chk(rs.ok, "free");
    op(BT_CLAIM, 0, 2, 8'h0F, rs); chk(rs.ok, "entry cleared by free");
    op(BT_ACQ, 0, 2, 8'h0F, rs, 0, 1); chk(rs.first, "buffer empty after free");
    op(BT_REL, 0, 2, 8'h0F, rs, 0);
    op(BT_FREE, 0, 0, 8'h0F, rs);
    // ---- multiple buffers (B = 2): lowest free buffer, wait when all held
    op(BT_ACQ, 2, 0, 8'h07, rs, 0, 2); chk(rs.ok && rs.bufi == 0, "multi: buffer 0");
    op(BT_ACQ, 2, 1, 8'h07, rs, 0, 2); chk(rs.ok && rs.bufi == 1 && rs.first, "multi: buffer 1");
    op(BT_ACQ, 2, 2, 8'h07, rs, 0, 2); chk(!rs.ok, "multi: both held, wait");
    op(BT_REL, 2, 1, 8'h07, rs, 1);
    op(BT_ACQ, 2, 2, 8'h07, rs, 0, 2); chk(rs.ok && rs.bufi == 1 && !rs.first, "multi: freed buffer reused");
    op(BT_REL, 2, 2, 8'h07, rs, 1);    chk(!rs.last, "multi: not last");
    op(BT_REL, 2, 0, 8'h07, rs, 0);    chk(rs.last && rs.used == 8'h03, "multi: last sees both buffers used");
    // ---- tree, children 0..3, arrival order 0, 1, 3, 2
    op(BT_TREE, 3, 0, 8'h0F, rs, 0, 8, 0, 0); chk(!rs.ok, "tree: port 0 waits for port 1");
    op(BT_TREE, 3, 1, 8'h0F, rs, 0, 8, 0, 1);
    chk(rs.ok && rs.act == ACT_COMBINE && rs.dst == 1 && rs.src == 0, "tree: B1 += B0");
    op(BT_TREE, 3, 1, 8'h0F, rs, 0, 8, 1, 0); chk(!rs.ok, "tree: left pair waits for right pair");
    op(BT_TREE, 3, 3, 8'h0F, rs, 0, 8, 0, 3); chk(!rs.ok, "tree: port 3 waits for port 2");
    op(BT_TREE, 3, 2, 8'h0F, rs, 0, 8, 0, 2);
    chk(rs.ok && rs.act == ACT_COMBINE && rs.dst == 3 && rs.src == 2, "tree: B3 += B2");
    op(BT_TREE, 3, 2, 8'h0F, rs, 0, 8, 1, 1);
    chk(rs.ok && rs.act == ACT_COMBINE && rs.dst == 1 && rs.src == 3, "tree: B1 += B3");
    op(BT_TREE, 3, 2, 8'h0F, rs, 0, 8, 2, 0);
    chk(rs.ok && rs.act == ACT_NONE, "tree: empty upper half needs no work");
    op(BT_FREE, 3, 0, 8'h0F, rs);
    // ---- tree with the single child port 6
    op(BT_TREE, 3, 6, 8'h40, rs, 0, 8, 0, 6);
    chk(rs.ok && rs.act == ACT_COPY && rs.dst == 7 && rs.src == 6, "tree: lone leaf copied up");
    op(BT_TREE, 3, 6, 8'h40, rs, 0, 8, 1, 3);
    chk(rs.ok && rs.act == ACT_COPY && rs.dst == 5 && rs.src == 7, "tree: copied to group buffer");
    op(BT_TREE, 3, 6, 8'h40, rs, 0, 8, 2, 1);
    chk(rs.ok && rs.act == ACT_COPY && rs.dst == 1 && rs.src == 5, "tree: copied to the root buffer");
    op(BT_FREE, 3, 0, 8'h40, rs);
    // ---- round robin between two requesters
    begin
      int cnt [2] = '{0, 0};
      @(negedge clk);
      req[0] = '0; req[0].op = BT_CLAIM; req[0].children = 8'hFF;
      req[1] = '0; req[1].op = BT_CLAIM; req[1].children = 8'hFF;
      req_entry[0] = 1; req_entry[1] = 2;
      req_valid = 2'b11;
      for (int i = 0; i < 8; i++) begin
        #1; chk($onehot(gnt), "one grant per cycle");
        if (gnt[0]) cnt[0]++; if (gnt[1]) cnt[1]++;
        @(negedge clk);
      end
      req_valid = '0;
      chk(cnt[0] == 4 && cnt[1] == 4, "fair service");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin repeat (5000) @(posedge clk); failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
