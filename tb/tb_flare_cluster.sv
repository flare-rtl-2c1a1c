// tb_flare_cluster: one cluster with four handler units fed by a packet
// descriptor stream and an L2 packet memory model. Three allreduces (single
// buffer sum, multiple buffers min, tree max) send several blocks each, from
// their child ports in random order, plus one retransmission. Checks: every
// block produces exactly one result packet with the right destination and
// payload, every L2 slot is released exactly once, the retransmission is
// discarded, and lock waits, merges and tree combines all occur.
//
// Descriptors are offered on a 10 ns clock; the output is ready two cycles
// in three at random. OP_CYCLES=3 makes the units slow enough that they
// contend for buffer locks. Expected results are computed here lane by lane
// from the same data generator.
module tb_flare_cluster;
  import flare_pkg::*;
  localparam int NCL = 2, NHPU = 4, NBLK = 16, NB = 4, OPC = 3;
  logic clk = 0, rst_n = 0; always #5 clk = ~clk;
  ar_cfg_t cfg_tab [1<<AR_W];
  logic desc_valid = 0, desc_ready; pkt_desc_t desc = '0;
  logic [15:0] l2_slot; logic [5:0] l2_row_idx; row_t l2_row; logic l2_free;
  logic out_valid, out_ready, out_sop, out_eop; out_hdr_t out_hdr; row_t out_row;
  logic [$clog2(NHPU+1)-1:0] ev_dup, ev_wait, ev_merge, ev_combine, ev_emit;
  logic [NHPU-1:0] hpu_busy;
  int checks = 0, failures = 0;
  flare_cluster #(.NCL(NCL), .NHPU(NHPU), .NBLK(NBLK), .OP_CYCLES(OPC)) dut (.*);
  task automatic chk(bit ok, string s); checks++; if (!ok) begin failures++; $display("FAIL %s", s); end endtask

  function automatic logic [31:0] val(int ar, int blk, int port, int lane);
    logic [31:0] x;
    x = 32'(ar * 1000003 + blk * 7919 + port * 104729 + lane * 2654435);
    return x ^ (x >> 11) ^ (32'(port) << 28);
  endfunction
  function automatic logic [31:0] ref_lane(int ar, int blk, int lane);
    logic signed [31:0] acc, b; logic first;
    first = 1; acc = 0;
    for (int p = 0; p < NPORTS; p++) if (cfg_tab[ar].children[p]) begin
      b = val(ar, blk, p, lane);
      if (first) acc = b;
      else case (cfg_tab[ar].op)
        OP_MIN_I32: acc = (b < acc) ? b : acc;
        OP_MAX_I32: acc = (b > acc) ? b : acc;
        default:    acc = acc + b;
      endcase
      first = 0;
    end
    return acc;
  endfunction

  // L2 model: slot -> (ar, blk, port)
  int s_ar [256], s_blk [256], s_port [256], s_freed [256];
  always_comb begin
    for (int k = 0; k < ROW_ELEMS; k++)
      l2_row[k*ELEM_W +: ELEM_W] = val(s_ar[l2_slot], s_blk[l2_slot], s_port[l2_slot], int'(l2_row_idx) * ROW_ELEMS + k);
  end
  always @(posedge clk) if (l2_free) s_freed[l2_slot]++;

  int n_dup, n_wait, n_merge, n_comb, n_emit;
  always @(posedge clk) if (rst_n) begin
    n_dup += ev_dup; n_wait += ev_wait; n_merge += ev_merge; n_comb += ev_combine; n_emit += ev_emit;
  end

  // result monitor
  int got [4][NB]; int r_row; logic [31:0] exp_l;
  always @(posedge clk) if (rst_n) begin
    out_ready <= ($urandom % 3) != 0;
    if (out_valid && out_ready) begin
      int ar, blk;
      ar = int'(out_hdr.ar_id); blk = int'(out_hdr.block_id) / NCL;
      if (out_sop) r_row = 0;
      for (int k = 0; k < ROW_ELEMS; k++) begin
        exp_l = ref_lane(ar, int'(out_hdr.block_id), r_row * ROW_ELEMS + k);
        if (out_row[k*ELEM_W +: ELEM_W] !== exp_l) begin
          failures++; $display("FAIL ar %0d blk %0d lane %0d: %h != %h", ar, out_hdr.block_id, r_row*4+k, out_row[k*ELEM_W +: ELEM_W], exp_l);
        end
      end
      r_row++;
      if (out_eop) begin
        checks++;
        chk(r_row == PKT_ROWS, "result length");
        chk(out_hdr.dest == (cfg_tab[ar].is_root ? cfg_tab[ar].children : portmask_t'(1 << cfg_tab[ar].parent)), "destination");
        got[ar][blk]++;
      end
    end
  end

  int nslot = 0;
  task automatic send(int ar, int blk, int port);
    s_ar[nslot] = ar; s_blk[nslot] = blk; s_port[nslot] = port; s_freed[nslot] = 0;
    @(negedge clk);
    desc_valid = 1;
    desc = '{port: 3'(port), hdr: '{16'h88B5, 2'(ar), 16'(blk)}, slot: 16'(nslot)};
    #1; while (!desc_ready) begin @(negedge clk); #1; end
    @(negedge clk); desc_valid = 0;
    nslot++;
  endtask

  initial begin
    n_dup = 0; n_wait = 0; n_merge = 0; n_comb = 0; n_emit = 0; out_ready = 0;
    for (int a = 0; a < 4; a++) cfg_tab[a] = '0;
    cfg_tab[0] = '{valid: 1, children: 8'h0F, parent: 3'd0, is_root: 1, op: OP_SUM_I32, algo: ALG_SINGLE, nbuf: 4'd1};
    cfg_tab[1] = '{valid: 1, children: 8'h3F, parent: 3'd7, is_root: 0, op: OP_MIN_I32, algo: ALG_MULTI,  nbuf: 4'd2};
    cfg_tab[2] = '{valid: 1, children: 8'h5B, parent: 3'd5, is_root: 0, op: OP_MAX_I32, algo: ALG_TREE,   nbuf: 4'd8};
    for (int a = 0; a < 4; a++) for (int b = 0; b < NB; b++) got[a][b] = 0;
    #12 rst_n = 1;
    for (int b = 0; b < NB; b++)
      for (int a = 0; a < 3; a++) begin
        automatic int ports [$];
        for (int p = 0; p < NPORTS; p++) if (cfg_tab[a].children[p]) ports.push_back(p);
        ports.shuffle();
        foreach (ports[i]) begin
          send(a, b * NCL, ports[i]);
          if (a == 0 && b == 1 && i == 1) send(a, b * NCL, ports[0]);   // retransmission
        end
      end
    repeat (30000) begin
      @(posedge clk);
      if (n_emit == 3 * NB && hpu_busy == '0 && !out_valid) break;
    end
    repeat (10) @(posedge clk);
    for (int a = 0; a < 3; a++) for (int b = 0; b < NB; b++)
      chk(got[a][b] == 1, $sformatf("one result for ar %0d block %0d (got %0d)", a, b, got[a][b]));
    for (int s = 0; s < nslot; s++) chk(s_freed[s] == 1, $sformatf("slot %0d freed once", s));
    chk(n_dup == 1, $sformatf("retransmission discarded (%0d)", n_dup));
    chk(n_wait > 0, "lock waits occurred");
    chk(n_merge > 0, "buffer merges occurred");
    chk(n_comb > 0, "tree combines occurred");
    $display("dup=%0d wait=%0d merge=%0d combine=%0d emit=%0d", n_dup, n_wait, n_merge, n_comb, n_emit);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin repeat (100000) @(posedge clk); failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
