// flare_cluster: one processing cluster of the Flare unit.
//
// Contains the cluster scheduler with its DMA engine (flare_cluster_sched),
// NHPU handler units (flare_hpu_engine), the block table that serialises
// their atomic requests (flare_block_table), the aggregation buffers in L1
// (flare_l1_workmem) and a packet arbiter that sends the result packets out
// (flare_out_arb). Packet descriptors arrive from the packet scheduler; the
// packet payload is read from the L2 packet memory through the l2_* port.
// Event outputs count, per cycle, how many units saw each event. The
// structure (scheduler, eight cores, L1 memory, DMA per cluster) follows the
// paper; see the submodules for the choices made here.
module flare_cluster
  import flare_pkg::*;
#(
  parameter int unsigned NCL  = 64,
  parameter int unsigned NHPU = 8,
  parameter int unsigned NBLK = 64,
  parameter int unsigned OP_CYCLES = 1
) (
  input  logic            clk,
  input  logic            rst_n,
  input  ar_cfg_t         cfg_tab [1<<AR_W],
  // descriptors
  input  logic            desc_valid,
  output logic            desc_ready,
  input  pkt_desc_t       desc,
  // L2 packet memory
  output logic [15:0]     l2_slot,
  output logic [$clog2(PKT_ROWS)-1:0] l2_row_idx,
  input  row_t            l2_row,
  output logic            l2_free,
  // result packets
  output logic            out_valid,
  input  logic            out_ready,
  output logic            out_sop,
  output logic            out_eop,
  output out_hdr_t        out_hdr,
  output row_t            out_row,
  // events
  output logic [$clog2(NHPU+1)-1:0] ev_dup,
  output logic [$clog2(NHPU+1)-1:0] ev_wait,
  output logic [$clog2(NHPU+1)-1:0] ev_merge,
  output logic [$clog2(NHPU+1)-1:0] ev_combine,
  output logic [$clog2(NHPU+1)-1:0] ev_emit,
  output logic [NHPU-1:0] hpu_busy
);
  localparam int unsigned HW = $clog2(NHPU);
  localparam int unsigned AW = $clog2(NBLK*NPORTS*PKT_ROWS);
  localparam int unsigned EW = $clog2(NBLK);

  logic [NHPU-1:0]  idle;
  logic             dma_we, start;
  logic [HW-1:0]    dma_hpu, start_hpu;
  logic [$clog2(PKT_ROWS)-1:0] dma_row_idx;
  row_t             dma_row;
  pkt_desc_t        start_desc;

  logic [NHPU-1:0]  bt_valid, bt_gnt;
  logic [EW-1:0]    bt_entry [NHPU];
  bt_req_t          bt_req   [NHPU];
  bt_resp_t         bt_resp;

  logic [AW-1:0]    ra_addr [NHPU], rb_addr [NHPU], wa_addr [NHPU];
  row_t             ra_data [NHPU], rb_data [NHPU], wa_data [NHPU];
  logic             we      [NHPU];

  logic             o_valid [NHPU], o_ready [NHPU], o_sop [NHPU], o_eop [NHPU];
  out_hdr_t         o_hdr   [NHPU];
  row_t             o_row   [NHPU];
  logic [NHPU-1:0]  e_dup, e_wait, e_merge, e_comb, e_emit;

  flare_cluster_sched #(.NHPU(NHPU)) u_csched (
    .clk, .rst_n, .desc_valid, .desc_ready, .desc, .hpu_idle(idle),
    .l2_slot, .l2_row_idx, .l2_row, .l2_free,
    .dma_we, .dma_hpu, .dma_row_idx, .dma_row,
    .start, .start_hpu, .start_desc
  );

  flare_block_table #(.NHPU(NHPU), .NBLK(NBLK)) u_bt (
    .clk, .rst_n, .req_valid(bt_valid), .req_entry(bt_entry), .req(bt_req),
    .gnt(bt_gnt), .resp(bt_resp)
  );

  flare_l1_workmem #(.NP(NHPU), .DEPTH(NBLK*NPORTS*PKT_ROWS)) u_l1 (
    .clk, .ra_addr, .ra_data, .rb_addr, .rb_data, .we, .wa_addr, .wa_data
  );

  for (genvar h = 0; h < NHPU; h++) begin : g_hpu
    flare_hpu_engine #(.NCL(NCL), .NBLK(NBLK), .OP_CYCLES(OP_CYCLES)) u_hpu (
      .clk, .rst_n,
      .start(start && start_hpu == HW'(h)), .start_desc, .cfg_tab,
      .idle(idle[h]),
      .dma_we(dma_we && dma_hpu == HW'(h)), .dma_row_idx, .dma_row,
      .bt_valid(bt_valid[h]), .bt_entry(bt_entry[h]), .bt_req(bt_req[h]),
      .bt_gnt(bt_gnt[h]), .bt_resp,
      .ra_addr(ra_addr[h]), .ra_data(ra_data[h]),
      .rb_addr(rb_addr[h]), .rb_data(rb_data[h]),
      .we(we[h]), .wa_addr(wa_addr[h]), .wa_data(wa_data[h]),
      .out_valid(o_valid[h]), .out_ready(o_ready[h]), .out_sop(o_sop[h]),
      .out_eop(o_eop[h]), .out_hdr(o_hdr[h]), .out_row(o_row[h]),
      .ev_dup(e_dup[h]), .ev_wait(e_wait[h]), .ev_merge(e_merge[h]),
      .ev_combine(e_comb[h]), .ev_emit(e_emit[h])
    );
  end

  flare_out_arb #(.N(NHPU)) u_arb (
    .clk, .rst_n,
    .in_valid(o_valid), .in_ready(o_ready), .in_sop(o_sop), .in_eop(o_eop),
    .in_hdr(o_hdr), .in_row(o_row),
    .out_valid, .out_ready, .out_sop, .out_eop, .out_hdr, .out_row
  );

  assign ev_dup     = ($clog2(NHPU+1))'($countones(e_dup));
  assign ev_wait    = ($clog2(NHPU+1))'($countones(e_wait));
  assign ev_merge   = ($clog2(NHPU+1))'($countones(e_merge));
  assign ev_combine = ($clog2(NHPU+1))'($countones(e_comb));
  assign ev_emit    = ($clog2(NHPU+1))'($countones(e_emit));
  assign hpu_busy   = ~idle;
endmodule
