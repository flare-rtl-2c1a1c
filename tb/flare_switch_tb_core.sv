// flare_switch_tb_core: end-to-end test bench body for flare_switch.
//
// Installs one matching rule and four allreduces that together use every
// algorithm and several operators:
//   AR0  1 MiB              -> single buffer, int32 sum, root, children 0-3
//   AR1  reproducible       -> tree, int32 sum, not root (parent 7), children 0-5
//   AR2  300 KiB            -> 4 buffers, int32 max, root, children 0-7
//   AR3  200 KiB            -> 2 buffers, packed int16 sum, not root, children 0,2,5
// Sends NB blocks per allreduce (the packets of a block back to back, so
// handlers contend for buffers), one retransmitted packet, and packets with
// a foreign EtherType (bypass). Every reduced packet is compared lane by
// lane with a sum/max computed here, and its destination ports are checked.
// A second phase blocks the result output until the packet memory fills,
// to make the unit drop packets. Counts of each mechanism (lock wait, merge,
// tree combine, retransmission, bypass, scheduler stall, drop) must be
// non-zero. FULL selects the default-size unit, otherwise a small one.
// Timing: 1 ns clock; the packet driver and the result monitor are clocked
// processes, so inputs change only after a clock edge. The allreduce
// semantics (children, parent, root broadcast, thresholds) are the paper's;
// the packet format and the statistics checked are this design's.
`timescale 1ns/1ps
module flare_switch_tb_core
  import flare_pkg::*;
#(
  parameter bit          FULL   = 1'b0,
  parameter int unsigned NB     = 6,
  parameter int unsigned DROP_PKTS = 400
) ();
  localparam logic [15:0] ETYPE = 16'h88B5;

  logic clk = 1'b0, rst_n = 1'b0;
  always #0.5 clk = ~clk;

  logic rule_wr = 0, rule_valid = 0; logic [2:0] rule_idx = 0; logic [15:0] rule_etype = 0;
  logic cfg_wr = 0, cfg_valid = 0, cfg_is_root = 0, cfg_repro = 0;
  logic [AR_W-1:0] cfg_id = 0; portmask_t cfg_children = 0; logic [PORT_W-1:0] cfg_parent = 0;
  red_op_e cfg_op = OP_SUM_I32; logic [31:0] cfg_size_bytes = 0;
  logic in_valid = 0, in_sop = 0, in_eop = 0, in_ready;
  logic [PORT_W-1:0] in_port = 0; pkt_hdr_t in_hdr = '0; row_t in_row = '0;
  logic by_valid, by_sop, by_eop; logic by_ready = 1'b1;
  logic [PORT_W-1:0] by_port; pkt_hdr_t by_hdr; row_t by_row;
  logic out_valid, out_sop, out_eop; logic out_ready = 1'b1;
  out_hdr_t out_hdr; row_t out_row;
  stats_t stats;
  logic [15:0] pmu;

  if (FULL) begin : g_full
    logic [$clog2(4096+1)-1:0] used;
    flare_switch dut (.*, .pkt_mem_used(used));
    assign pmu = 16'(used);
  end else begin : g_small
    logic [$clog2(64+1)-1:0] used;
    flare_switch #(.NCL(2), .NHPU(4), .NBLK(16), .NSLOTS(64), .QD(2), .OP_CYCLES(4)) dut (.*, .pkt_mem_used(used));
    assign pmu = 16'(used);
  end

  int checks = 0, failures = 0;
  task automatic chk(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  // ---- reference model
  portmask_t ch_of [4] = '{8'h0F, 8'h3F, 8'hFF, 8'h25};
  red_op_e   op_of [4] = '{OP_SUM_I32, OP_SUM_I32, OP_MAX_I32, OP_SUM_I16};
  logic      root_of [4] = '{1'b1, 1'b0, 1'b1, 1'b0};
  logic [2:0] par_of [4] = '{3'd0, 3'd7, 3'd0, 3'd1};

  function automatic logic [31:0] val(int ar, int blk, int port, int lane);
    logic [31:0] x;
    x = 32'(ar * 1000003 + blk * 7919 + port * 104729 + lane * 2654435);
    x = x ^ (x >> 13) ^ (32'(port) << 27);
    return x;
  endfunction

  function automatic logic [31:0] expect_lane(int ar, int blk, int lane);
    logic [31:0] acc; logic first; logic signed [31:0] a, b;
    first = 1'b1; acc = '0;
    for (int p = 0; p < NPORTS; p++) if (ch_of[ar][p]) begin
      b = val(ar, blk, p, lane);
      if (first) acc = b;
      else begin
        a = acc;
        case (op_of[ar])
          OP_MAX_I32: acc = (b > a) ? b : a;
          OP_SUM_I16: acc = {16'(acc[31:16] + b[31:16]), 16'(acc[15:0] + b[15:0])};
          default:    acc = acc + b;
        endcase
      end
      first = 1'b0;
    end
    return acc;
  endfunction

  // ---- driver: a queue of packets, sent row by row from a clocked process
  typedef struct { int port; logic [15:0] et; int ar; int blk; } pkt_t;
  pkt_t txq [$];
  pkt_t cur_p;
  int   txrow = -1;
  always @(posedge clk) begin
    if (!in_valid || in_ready) begin
      if (txrow < 0 && txq.size() > 0) begin cur_p = txq.pop_front(); txrow = 0; end
      if (txrow >= 0) begin
        in_valid <= 1'b1; in_sop <= (txrow == 0); in_eop <= (txrow == PKT_ROWS-1);
        in_port <= PORT_W'(cur_p.port);
        in_hdr  <= '{ethertype: cur_p.et, ar_id: AR_W'(cur_p.ar), block_id: BLK_W'(cur_p.blk)};
        for (int l = 0; l < ROW_ELEMS; l++)
          in_row[l*32 +: 32] <= val(cur_p.ar, cur_p.blk, cur_p.port, txrow*ROW_ELEMS + l);
        txrow = (txrow == PKT_ROWS-1) ? -1 : txrow + 1;
      end else in_valid <= 1'b0;
    end
  end
  task automatic send_pkt(int port, logic [15:0] et, int ar, int blk);
    pkt_t p;
    p.port = port; p.et = et; p.ar = ar; p.blk = blk;
    txq.push_back(p);
  endtask
  task automatic drain_tx();
    while (txq.size() > 0 || txrow >= 0 || (in_valid && !in_ready)) @(posedge clk);
  endtask

  task automatic install(int id, logic [31:0] size, logic repro);
    cfg_wr <= 1; cfg_id <= AR_W'(id); cfg_valid <= 1; cfg_children <= ch_of[id];
    cfg_parent <= par_of[id]; cfg_is_root <= root_of[id]; cfg_op <= op_of[id];
    cfg_size_bytes <= size; cfg_repro <= repro;
    @(posedge clk); cfg_wr <= 0;
  endtask

  // ---- result monitor
  int   results = 0, bypassed = 0;
  bit   seen [4][NB];
  row_t buf_rows [PKT_ROWS];
  int   rix = 0;
  always @(posedge clk) if (rst_n) begin
    if (out_valid && out_ready) begin
      buf_rows[rix] = out_row;
      if (out_sop && rix != 0) chk(0, "sop in the middle of a packet");
      rix++;
      if (out_eop) begin
        int ar, blk; bit ok; portmask_t exp_dest;
        ar = int'(out_hdr.ar_id); blk = int'(out_hdr.block_id);
        ok = (rix == PKT_ROWS) && blk < NB;
        if (ok) for (int r = 0; r < PKT_ROWS; r++)
          for (int l = 0; l < ROW_ELEMS; l++)
            if (buf_rows[r][l*32 +: 32] != expect_lane(ar, blk, r*ROW_ELEMS + l)) ok = 0;
        chk(ok, $sformatf("result ar%0d block %0d payload", ar, blk));
        exp_dest = root_of[ar] ? ch_of[ar] : portmask_t'(1) << par_of[ar];
        chk(out_hdr.dest == exp_dest, $sformatf("result ar%0d block %0d destination", ar, blk));
        if (blk < NB) begin
          chk(!seen[ar][blk], "block reduced once");
          seen[ar][blk] = 1;
        end
        results++; rix = 0;
      end
    end
    if (by_valid && by_ready && by_eop) begin
      chk(by_hdr.ethertype == 16'h0800, "bypass packet is the foreign one");
      bypassed++;
    end
  end

  // ---- watchdog
  initial begin
    repeat (FULL ? 400000 : 200000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int t0, t_first;
  initial begin
    repeat (4) @(posedge clk);
    rst_n <= 1'b1;
    @(posedge clk);
    rule_wr <= 1; rule_idx <= 3'd2; rule_valid <= 1; rule_etype <= ETYPE;
    @(posedge clk); rule_wr <= 0;
    install(0, 32'd1048576, 1'b0);
    install(1, 32'd65536,   1'b1);
    install(2, 32'd307200,  1'b0);
    install(3, 32'd204800,  1'b0);
    @(posedge clk);

    // latency of one packet through an idle unit: a block with one
    // missing child is not reduced, so measure the first result instead
    for (int b = 0; b < NB; b++)
      for (int ar = 0; ar < 4; ar++)
        for (int p = 0; p < NPORTS; p++)
          if (ch_of[ar][p]) begin
            send_pkt(p, ETYPE, ar, b);
            if (ar == 0 && b == 1 && p == 2) send_pkt(p, ETYPE, ar, b);  // retransmission
            if (ar == 1 && p == 3) send_pkt(p, 16'h0800, ar, b);         // not for the unit
          end

    drain_tx();
    t0 = 0;
    while (results < 4*NB && t0 < 100000) begin @(posedge clk); t0++; end
    repeat (200) @(posedge clk);

    chk(results == 4*NB, $sformatf("all %0d blocks reduced (got %0d)", 4*NB, results));
    chk(bypassed == NB, "bypassed packets");
    chk(stats.bypassed == 32'(NB), "bypass counter");
    chk(stats.dup == 1, $sformatf("one retransmission discarded (%0d)", stats.dup));
    chk(stats.results == 32'(4*NB), "result counter");
    chk(pmu <= 1, "packet memory empty after the run (one slot stays reserved)");
    $display("events: lock_wait=%0d merge=%0d combine=%0d dup=%0d stall=%0d bypass=%0d",
             stats.lock_wait, stats.merge, stats.combine, stats.dup, stats.sched_stall, stats.bypassed);
    chk(FULL || stats.lock_wait > 0, "buffer contention happened");
    chk(stats.merge > 0, "multi-buffer merge happened");
    chk(stats.combine > 0, "tree combine happened");
    chk(FULL || stats.sched_stall > 0, "scheduler stall happened");

    // phase 2: block the result output and flood until packets are dropped
    if (DROP_PKTS > 0) out_ready <= 1'b0;
    for (int i = 0; i < DROP_PKTS && stats.dropped == 0; i++) begin
      send_pkt(i % 4, ETYPE, 0, NB + i / 4);
      drain_tx();
    end
    repeat (10) @(posedge clk);
    $display("dropped=%0d processed=%0d", stats.dropped, stats.processed);
    chk(DROP_PKTS == 0 || stats.dropped > 0, "packet memory full: packets dropped");

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
