// flare_hpu_engine: handler processing unit running the allreduce handler.
//
// In the paper each handler processing unit (HPU) is a RISC-V core running
// the aggregation handler as C code. This unit is a fixed-function engine
// that carries out the same handler steps for one packet at a time, so the
// three aggregation algorithms can be built without a processor:
//
//   claim    register the packet's port in the block entry; a repeated port
//            is a retransmission and the packet is discarded.
//   single / multiple buffers
//            lock a free buffer of the block (only buffer 0 for single
//            buffer, any of the first B for multiple buffers; wait and retry
//            while none is free), copy the packet into it if it is still
//            empty or combine it into it otherwise, unlock it. The handler
//            whose packet completes the block (the last one to finish)
//            combines the other used buffers into its own, in ascending
//            order, then sends the result.
//   tree     copy the packet into the buffer of its port, then walk up the
//            fixed tree: at each level ask the block table whether the
//            partner node is complete; if so do the copy or combine it
//            prescribes and go up, otherwise stop. The unit that completes
//            the top node sends the result from buffer 1.
//
// Copy and combine move one 16-byte row every OP_CYCLES cycles (default 1:
// 64 cycles per 1 KiB buffer); the result packet is sent one row per cycle with valid/ready. It
// goes to the parent port, or, at the root of the reduction tree, to all
// children ports. The packet itself sits in a private L1 slot filled by the
// cluster DMA before start. The handler behaviour follows the paper; the
// fixed-function form, the row-per-cycle datapath and the block-to-entry
// mapping are this design's choices.
module flare_hpu_engine
  import flare_pkg::*;
#(
  parameter int unsigned NCL  = 64,
  parameter int unsigned NBLK = 64,
  parameter int unsigned OP_CYCLES = 1     // cycles per row of copy/combine
) (
  input  logic                 clk,
  input  logic                 rst_n,
  // start from the cluster scheduler
  input  logic                 start,
  input  pkt_desc_t            start_desc,
  input  ar_cfg_t              cfg_tab [1<<AR_W],
  output logic                 idle,
  // DMA into the private packet slot
  input  logic                 dma_we,
  input  logic [$clog2(PKT_ROWS)-1:0] dma_row_idx,
  input  row_t                 dma_row,
  // block table
  output logic                 bt_valid,
  output logic [$clog2(NBLK)-1:0] bt_entry,
  output bt_req_t              bt_req,
  input  logic                 bt_gnt,
  input  bt_resp_t             bt_resp,
  // L1 working memory
  output logic [$clog2(NBLK*NPORTS*PKT_ROWS)-1:0] ra_addr,
  input  row_t                 ra_data,
  output logic [$clog2(NBLK*NPORTS*PKT_ROWS)-1:0] rb_addr,
  input  row_t                 rb_data,
  output logic                 we,
  output logic [$clog2(NBLK*NPORTS*PKT_ROWS)-1:0] wa_addr,
  output row_t                 wa_data,
  // result packet
  output logic                 out_valid,
  input  logic                 out_ready,
  output logic                 out_sop,
  output logic                 out_eop,
  output out_hdr_t             out_hdr,
  output row_t                 out_row,
  // events (one-cycle pulses)
  output logic                 ev_dup,      // retransmission discarded
  output logic                 ev_wait,     // buffer lock refused
  output logic                 ev_merge,    // last handler merges a buffer
  output logic                 ev_combine,  // tree node combined
  output logic                 ev_emit      // result packet sent
);
  localparam int unsigned RW  = $clog2(PKT_ROWS);
  localparam int unsigned EW  = $clog2(NBLK);
  localparam int unsigned CLW = $clog2(NCL);
  localparam int unsigned LW  = $clog2(LOG2P+1);

  typedef enum logic [3:0] {
    S_IDLE, S_CLAIM, S_ACQ, S_OP, S_REL, S_MERGE, S_TREE, S_UP, S_EMIT, S_FREE
  } state_e;
  typedef enum logic [1:0] {R_REL, R_MERGE, R_UP} ret_e;

  state_e            st;
  ret_e              ret;
  pkt_desc_t         d;
  ar_cfg_t           cfg;
  row_t              pkt [PKT_ROWS];
  logic [RW-1:0]     row;
  logic [$clog2(OP_CYCLES+1)-1:0] sub;   // cycle within the current row
  wire               row_step = (sub == ($clog2(OP_CYCLES+1))'(OP_CYCLES-1));
  logic [BUF_W-1:0]  dst, src, kbuf;
  logic              src_pkt, copy;
  logic [NPORTS-1:0] merge_set;
  logic [LW-1:0]     lvl;
  logic [PORT_W-1:0] grp;

  // block entry: statically partitioned by allreduce, then by block number
  // within the cluster
  assign bt_entry = EW'({d.hdr.ar_id, (EW-AR_W)'(d.hdr.block_id >> CLW)});

  always_comb begin
    bt_req          = '0;
    bt_req.port     = d.port;
    bt_req.bufi     = kbuf;
    bt_req.level    = lvl;
    bt_req.group    = grp;
    bt_req.children = cfg.children;
    bt_req.algo     = cfg.algo;
    bt_req.nbuf     = cfg.nbuf;
    unique case (st)
      S_CLAIM: bt_req.op = BT_CLAIM;
      S_ACQ:   bt_req.op = BT_ACQ;
      S_REL:   bt_req.op = BT_REL;
      S_TREE:  bt_req.op = BT_TREE;
      default: bt_req.op = BT_FREE;
    endcase
  end
  assign bt_valid = st inside {S_CLAIM, S_ACQ, S_REL, S_TREE, S_FREE};
  assign idle     = (st == S_IDLE);

  // datapath: dst (op)= src, one row per cycle
  row_t src_row, alu_row;
  assign src_row = src_pkt ? pkt[row] : rb_data;
  flare_reduce_alu u_alu (.op(cfg.op), .dst(ra_data), .src(src_row), .res(alu_row));

  assign ra_addr = {bt_entry, (st == S_EMIT) ? kbuf : dst, row};
  assign rb_addr = {bt_entry, src, row};
  assign we      = (st == S_OP) && row_step;
  assign wa_addr = {bt_entry, dst, row};
  assign wa_data = copy ? src_row : alu_row;

  assign out_valid     = (st == S_EMIT);
  assign out_sop       = (row == '0);
  assign out_eop       = (row == RW'(PKT_ROWS-1));
  assign out_row       = ra_data;
  assign out_hdr.dest  = cfg.is_root ? cfg.children : portmask_t'(1) << cfg.parent;
  assign out_hdr.ar_id = d.hdr.ar_id;
  assign out_hdr.block_id = d.hdr.block_id;

  assign ev_dup     = (st == S_CLAIM) && bt_gnt && !bt_resp.ok;
  assign ev_wait    = (st == S_ACQ)   && bt_gnt && !bt_resp.ok;
  assign ev_merge   = (st == S_MERGE) && (merge_set != '0);
  assign ev_combine = (st == S_TREE)  && bt_gnt && bt_resp.ok && bt_resp.act == ACT_COMBINE;
  assign ev_emit    = (st == S_EMIT)  && out_ready && out_eop;

  always_ff @(posedge clk)
    if (dma_we) pkt[dma_row_idx] <= dma_row;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= S_IDLE; ret <= R_REL; d <= '0; cfg <= '0; row <= '0; sub <= '0;
      dst <= '0; src <= '0; kbuf <= '0; src_pkt <= 1'b0; copy <= 1'b0;
      merge_set <= '0; lvl <= '0; grp <= '0;
    end else begin
      unique case (st)
        S_IDLE: if (start) begin
          d   <= start_desc;
          cfg <= cfg_tab[start_desc.hdr.ar_id];
          st  <= S_CLAIM;
        end
        S_CLAIM: if (bt_gnt) begin
          if (!bt_resp.ok) st <= S_IDLE;
          else if (cfg.algo == ALG_TREE) begin
            // copy the packet into the leaf buffer of its port
            dst <= BUF_W'(d.port); src_pkt <= 1'b1; copy <= 1'b1;
            row <= '0; lvl <= '0; grp <= d.port; ret <= R_UP; st <= S_OP;
          end else st <= S_ACQ;
        end
        S_ACQ: if (bt_gnt && bt_resp.ok) begin
          kbuf <= bt_resp.bufi; dst <= bt_resp.bufi;
          src_pkt <= 1'b1; copy <= bt_resp.first;
          row <= '0; ret <= R_REL; st <= S_OP;
        end
        S_OP: if (!row_step) sub <= sub + 1'b1;
        else begin
          sub <= '0;
          row <= row + 1'b1;
          if (row == RW'(PKT_ROWS-1)) begin
            unique case (ret)
              R_REL:   st <= S_REL;
              R_MERGE: st <= S_MERGE;
              default: st <= S_UP;
            endcase
          end
        end
        S_REL: if (bt_gnt) begin
          if (bt_resp.last) begin
            merge_set <= bt_resp.used & ~(NPORTS'(1) << kbuf);
            st <= S_MERGE;
          end else st <= S_IDLE;
        end
        S_MERGE: begin
          if (merge_set == '0) begin
            row <= '0; st <= S_EMIT;
          end else begin
            for (int b = NPORTS-1; b >= 0; b--)
              if (merge_set[b]) src <= BUF_W'(b);
            merge_set <= merge_set & (merge_set - 1'b1);   // drop lowest bit
            dst <= kbuf; src_pkt <= 1'b0; copy <= 1'b0;
            row <= '0; ret <= R_MERGE; st <= S_OP;
          end
        end
        S_UP: begin
          // a node at level lvl, group grp, has its complete result
          if (lvl == LW'(LOG2P)) begin
            kbuf <= BUF_W'(1); row <= '0; st <= S_EMIT;
          end else st <= S_TREE;
        end
        S_TREE: if (bt_gnt) begin
          if (!bt_resp.ok) st <= S_IDLE;          // partner not done yet
          else begin
            lvl <= lvl + 1'b1;
            grp <= grp >> 1;
            if (bt_resp.act == ACT_NONE) st <= S_UP;
            else begin
              dst <= bt_resp.dst; src <= bt_resp.src; src_pkt <= 1'b0;
              copy <= (bt_resp.act == ACT_COPY);
              row <= '0; ret <= R_UP; st <= S_OP;
            end
          end
        end
        S_EMIT: if (out_ready) begin
          row <= row + 1'b1;
          if (out_eop) st <= S_FREE;
        end
        default: if (bt_gnt) st <= S_IDLE;        // S_FREE
      endcase
    end
  end
endmodule
