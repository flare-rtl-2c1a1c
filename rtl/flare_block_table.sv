// flare_block_table: per-block aggregation state of one cluster.
//
// The cluster's working memory holds NBLK block entries; each entry owns
// NPORTS aggregation buffers (enough for one leaf per port in tree
// aggregation). For every entry the table keeps
//   claimed  - one bit per port: a packet from that port has arrived. A
//              second packet from the same port is a retransmission and is
//              not aggregated again (the paper's bitmap variant of the
//              children counter).
//   done     - one bit per port: that packet has been aggregated.
//   busy     - one lock per buffer (the critical section of single and
//              multiple buffer aggregation).
//   used     - the buffer already holds partial data.
//   ready    - one bit per tree node: the node's partial result is complete.
// The handler units (HPUs) send requests; one request is served per cycle,
// chosen round robin, and served atomically: gnt and resp are combinational
// in the cycle the request is served and the state changes at the next
// clock edge. This serialisation stands in for the atomic operations and
// locks of the software handlers in the paper.
//
// Tree aggregation uses a fixed shape so that the order of the operations
// never depends on arrival order: the packet of port i is copied to buffer
// i; at level 0 buffer 2k+1 += buffer 2k, at the upper levels the result of
// a group of 2^l ports lives in the buffer at the group's first index + 1,
// and the left group's buffer += the right group's buffer (B1 += B0,
// B3 += B2, then B1 += B3, as drawn in the paper for four ports). A node is
// combined with its partner only when both are complete; groups that contain
// no child port count as complete and empty, so any set of children works.
// Lint note: the assertion at the end is disabled by rst_n synchronously
// while the state uses it as an asynchronous reset; verilator reports this
// as SYNCASYNCNET. It concerns only the assertion, not the circuit.
module flare_block_table
  import flare_pkg::*;
#(
  parameter int unsigned NHPU = 8,
  parameter int unsigned NBLK = 64
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic [NHPU-1:0]         req_valid,
  input  logic [$clog2(NBLK)-1:0] req_entry [NHPU],
  input  bt_req_t                 req       [NHPU],
  output logic [NHPU-1:0]         gnt,
  output bt_resp_t                resp
);
  localparam int unsigned HW = (NHPU > 1) ? $clog2(NHPU) : 1;
  localparam int unsigned EW = $clog2(NBLK);

  portmask_t           claimed [NBLK];
  portmask_t           done    [NBLK];
  logic [NPORTS-1:0]   busy    [NBLK];
  logic [NPORTS-1:0]   used    [NBLK];
  logic [NODE_N-1:0]   ready   [NBLK];
  logic [HW-1:0]       rr;

  // ---- pick one request, round robin starting at rr
  logic          sel_v;
  logic [HW-1:0] sel;
  always_comb begin
    sel_v = 1'b0; sel = '0;
    for (int k = NHPU-1; k >= 0; k--) begin
      int h;
      h = (int'(rr) + k) % NHPU;
      if (req_valid[h]) begin sel_v = 1'b1; sel = HW'(h); end
    end
  end

  function automatic int node_idx(int l, int g);
    return (2*NPORTS - ((2*NPORTS) >> l)) + g;
  endfunction
  function automatic int loc(int l, int g);
    return (l == 0) ? g : ((g << l) + 1);
  endfunction
  function automatic logic grp_empty(portmask_t ch, int l, int g);
    logic e;
    e = 1'b1;
    for (int p = 0; p < NPORTS; p++)
      if (p >= (g << l) && p < ((g + 1) << l) && ch[p]) e = 1'b0;
    return e;
  endfunction

  bt_req_t           r;
  logic [EW-1:0]     e;
  portmask_t         n_claimed, n_done;
  logic [NPORTS-1:0] n_busy, n_used;
  logic [NODE_N-1:0] n_ready;

  int   l, g, q, dg, sg;
  logic pe;

  always_comb begin
    l = 0; g = 0; q = 0; dg = 0; sg = 0; pe = 1'b0;
    r = req[sel];
    e = req_entry[sel];
    n_claimed = claimed[e]; n_done = done[e];
    n_busy = busy[e]; n_used = used[e]; n_ready = ready[e];
    resp = '0;
    gnt  = '0;
    if (sel_v) gnt[sel] = 1'b1;
    unique case (r.op)
      BT_CLAIM: begin
        resp.ok = r.children[r.port] && !claimed[e][r.port];
        if (resp.ok) n_claimed[r.port] = 1'b1;
      end
      BT_ACQ: begin
        for (int b = NPORTS-1; b >= 0; b--)
          if (b < int'(r.nbuf) && !busy[e][b]) begin
            resp.ok = 1'b1; resp.bufi = BUF_W'(b); resp.first = !used[e][b];
          end
        if (resp.ok) begin n_busy[resp.bufi] = 1'b1; n_used[resp.bufi] = 1'b1; end
      end
      BT_REL: begin
        n_busy[r.bufi] = 1'b0;
        n_done[r.port] = 1'b1;
        resp.ok   = 1'b1;
        resp.last = (n_done == r.children);
        resp.used = used[e];
      end
      BT_TREE: begin
        l  = int'(r.level);
        g  = int'(r.group);
        q  = g ^ 1;
        pe = grp_empty(r.children, l, q);
        dg = (l == 0) ? (g | 1) : (g & ~1);   // group whose buffer is the destination
        sg = dg ^ 1;
        if (pe || ready[e][node_idx(l, q)]) begin
          resp.ok  = 1'b1;
          resp.dst = BUF_W'(loc(l, dg));
          resp.src = BUF_W'(loc(l, sg));
          if (grp_empty(r.children, l, dg))      resp.act = ACT_COPY;
          else if (grp_empty(r.children, l, sg)) resp.act = ACT_NONE;
          else                                   resp.act = ACT_COMBINE;
          n_ready[node_idx(l, q)] = 1'b0;
        end else begin
          n_ready[node_idx(l, g)] = 1'b1;
        end
      end
      default: begin  // BT_FREE
        resp.ok = 1'b1;
        n_claimed = '0; n_done = '0; n_busy = '0; n_used = '0; n_ready = '0;
      end
    endcase
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < NBLK; i++) begin
        claimed[i] <= '0; done[i] <= '0; busy[i] <= '0; used[i] <= '0; ready[i] <= '0;
      end
      rr <= '0;
    end else if (sel_v) begin
      claimed[e] <= n_claimed; done[e] <= n_done;
      busy[e] <= n_busy; used[e] <= n_used; ready[e] <= n_ready;
      rr <= (sel == HW'(NHPU-1)) ? '0 : sel + 1'b1;
    end
  end

  // a buffer lock is only released by its holder
  property p_rel_holds_lock;
    @(posedge clk) disable iff (!rst_n)
      (sel_v && r.op == BT_REL) |-> busy[e][r.bufi];
  endproperty
  assert property (p_rel_holds_lock);
endmodule
