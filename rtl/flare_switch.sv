// flare_switch: Flare processing unit of an allreduce-capable switch.
//
// Packets from the switch ports enter as one stream of 16-byte rows with a
// header (EtherType, allreduce id, block id) and the input port. The parser
// sends packets of installed allreduces to the L2 packet memory and all
// others to the bypass output. A descriptor per stored packet goes to the
// packet scheduler, which sends every packet of a block to the same one of
// NCL clusters. In the cluster a scheduler copies the packet into an idle
// handler unit's L1 slot, the unit aggregates it into the block's buffers in
// L1, and the unit that completes a block sends the reduced packet, tagged
// with its destination ports, to the result output (the command unit merges
// the clusters' outputs). Routing tables, crossbar and MACs are outside this
// module: the bypass and result streams are where they connect.
//
// The control plane installs matching rules (rule_*) and allreduces (cfg_*:
// children ports, parent port, root flag, operator, size and reproducibility
// request, from which the aggregation algorithm is chosen). Defaults follow
// the paper's main configuration: 64 clusters of 8 units, 4 MiB of packet
// memory, 1 KiB packets; the working memory per cluster (64 blocks of 8
// buffers, 512 KiB), the number of rules and the queue depths are this
// design's choices. OP_CYCLES (default 1) is the number of cycles a handler
// unit spends per 16-byte row when it copies or combines; larger values
// model a narrower datapath.
module flare_switch
  import flare_pkg::*;
#(
  parameter int unsigned NCL    = 64,
  parameter int unsigned NHPU   = 8,
  parameter int unsigned NBLK   = 64,
  parameter int unsigned NSLOTS = 4096,
  parameter int unsigned NRULES = 8,
  parameter int unsigned QD     = 16,
  parameter int unsigned OP_CYCLES = 1
) (
  input  logic                      clk,
  input  logic                      rst_n,
  // control plane
  input  logic                      rule_wr,
  input  logic [$clog2(NRULES)-1:0] rule_idx,
  input  logic                      rule_valid,
  input  logic [ETYPE_W-1:0]        rule_etype,
  input  logic                      cfg_wr,
  input  logic [AR_W-1:0]           cfg_id,
  input  logic                      cfg_valid,
  input  portmask_t                 cfg_children,
  input  logic [PORT_W-1:0]         cfg_parent,
  input  logic                      cfg_is_root,
  input  red_op_e                   cfg_op,
  input  logic [31:0]               cfg_size_bytes,
  input  logic                      cfg_repro,
  // packets from the ports
  input  logic                      in_valid,
  output logic                      in_ready,
  input  logic                      in_sop,
  input  logic                      in_eop,
  input  logic [PORT_W-1:0]         in_port,
  input  pkt_hdr_t                  in_hdr,
  input  row_t                      in_row,
  // unprocessed packets, to the routing tables
  output logic                      by_valid,
  input  logic                      by_ready,
  output logic                      by_sop,
  output logic                      by_eop,
  output logic [PORT_W-1:0]         by_port,
  output pkt_hdr_t                  by_hdr,
  output row_t                      by_row,
  // reduced packets, to the routing tables
  output logic                      out_valid,
  input  logic                      out_ready,
  output logic                      out_sop,
  output logic                      out_eop,
  output out_hdr_t                  out_hdr,
  output row_t                      out_row,
  // status
  output logic [$clog2(NSLOTS+1)-1:0] pkt_mem_used,
  output stats_t                    stats
);
  localparam int unsigned NUM_AR = 1 << AR_W;
  localparam int unsigned CW     = $clog2(NHPU+1);

  ar_cfg_t   cfg_tab [NUM_AR];
  logic [NUM_AR-1:0] installed;
  always_comb for (int a = 0; a < NUM_AR; a++) installed[a] = cfg_tab[a].valid;

  flare_ar_config u_cfg (
    .clk, .rst_n, .wr_en(cfg_wr), .wr_id(cfg_id), .wr_valid(cfg_valid),
    .wr_children(cfg_children), .wr_parent(cfg_parent), .wr_is_root(cfg_is_root),
    .wr_op(cfg_op), .wr_size_bytes(cfg_size_bytes), .wr_repro(cfg_repro),
    .tab(cfg_tab)
  );

  // parser -> packet memory
  logic        mem_space, pm_valid, pm_ready, pm_sop, pm_eop;
  logic [PORT_W-1:0] pm_port;
  pkt_hdr_t    pm_hdr;
  row_t        pm_row;

  flare_parser #(.NRULES(NRULES)) u_parser (
    .clk, .rst_n, .rule_wr, .rule_idx, .rule_valid, .rule_etype,
    .ar_installed(installed),
    .in_valid, .in_ready, .in_sop, .in_eop, .in_port, .in_hdr, .in_row,
    .mem_space, .pm_valid, .pm_ready, .pm_sop, .pm_eop, .pm_port, .pm_hdr, .pm_row,
    .by_valid, .by_ready, .by_sop, .by_eop, .by_port, .by_hdr, .by_row,
    .cnt_processed(stats.processed), .cnt_bypassed(stats.bypassed),
    .cnt_dropped(stats.dropped)
  );

  logic        d_valid, d_ready;
  pkt_desc_t   d_desc;
  logic [15:0] rd_slot   [NCL];
  logic [$clog2(PKT_ROWS)-1:0] rd_row_idx [NCL];
  row_t        rd_row    [NCL];
  logic        free_en   [NCL];
  logic [15:0] free_slot [NCL];

  flare_pkt_memory #(.NSLOTS(NSLOTS), .NRD(NCL)) u_pmem (
    .clk, .rst_n, .mem_space,
    .wr_valid(pm_valid), .wr_ready(pm_ready), .wr_sop(pm_sop), .wr_eop(pm_eop),
    .wr_port(pm_port), .wr_hdr(pm_hdr), .wr_row(pm_row),
    .desc_valid(d_valid), .desc_ready(d_ready), .desc(d_desc),
    .rd_slot, .rd_row_idx, .rd_row, .free_en, .free_slot,
    .used_slots(pkt_mem_used)
  );

  logic      c_valid [NCL], c_ready [NCL];
  pkt_desc_t c_desc  [NCL];

  flare_pkt_sched #(.NCL(NCL), .QD(QD)) u_sched (
    .clk, .rst_n, .in_valid(d_valid), .in_ready(d_ready), .in_desc(d_desc),
    .out_valid(c_valid), .out_ready(c_ready), .out_desc(c_desc),
    .cnt_stall(stats.sched_stall)
  );

  logic      co_valid [NCL], co_ready [NCL], co_sop [NCL], co_eop [NCL];
  out_hdr_t  co_hdr   [NCL];
  row_t      co_row   [NCL];
  logic [CW-1:0] ev_dup [NCL], ev_wait [NCL], ev_merge [NCL], ev_comb [NCL], ev_emit [NCL];

  for (genvar c = 0; c < NCL; c++) begin : g_cl
    logic [NHPU-1:0] busy;
    flare_cluster #(.NCL(NCL), .NHPU(NHPU), .NBLK(NBLK), .OP_CYCLES(OP_CYCLES)) u_cl (
      .clk, .rst_n, .cfg_tab,
      .desc_valid(c_valid[c]), .desc_ready(c_ready[c]), .desc(c_desc[c]),
      .l2_slot(rd_slot[c]), .l2_row_idx(rd_row_idx[c]), .l2_row(rd_row[c]),
      .l2_free(free_en[c]),
      .out_valid(co_valid[c]), .out_ready(co_ready[c]), .out_sop(co_sop[c]),
      .out_eop(co_eop[c]), .out_hdr(co_hdr[c]), .out_row(co_row[c]),
      .ev_dup(ev_dup[c]), .ev_wait(ev_wait[c]), .ev_merge(ev_merge[c]),
      .ev_combine(ev_comb[c]), .ev_emit(ev_emit[c]), .hpu_busy(busy)
    );
    assign free_slot[c] = rd_slot[c];
  end

  flare_out_arb #(.N(NCL)) u_cmd (
    .clk, .rst_n,
    .in_valid(co_valid), .in_ready(co_ready), .in_sop(co_sop), .in_eop(co_eop),
    .in_hdr(co_hdr), .in_row(co_row),
    .out_valid, .out_ready, .out_sop, .out_eop, .out_hdr, .out_row
  );

  // event counters: per-cycle sums over the clusters, then accumulate
  logic [31:0] sum_dup, sum_wait, sum_merge, sum_comb, sum_emit;
  always_comb begin
    sum_dup = '0; sum_wait = '0; sum_merge = '0; sum_comb = '0; sum_emit = '0;
    for (int c = 0; c < NCL; c++) begin
      sum_dup   += 32'(ev_dup[c]);
      sum_wait  += 32'(ev_wait[c]);
      sum_merge += 32'(ev_merge[c]);
      sum_comb  += 32'(ev_comb[c]);
      sum_emit  += 32'(ev_emit[c]);
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      stats.dup <= '0; stats.lock_wait <= '0; stats.merge <= '0;
      stats.combine <= '0; stats.results <= '0;
    end else begin
      stats.dup     <= stats.dup + sum_dup;
      stats.lock_wait <= stats.lock_wait + sum_wait;
      stats.merge   <= stats.merge + sum_merge;
      stats.combine <= stats.combine + sum_comb;
      stats.results <= stats.results + sum_emit;
    end
  end
endmodule
