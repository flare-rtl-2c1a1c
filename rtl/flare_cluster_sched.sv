// flare_cluster_sched: cluster-local scheduler (CSCHED) with its DMA engine.
//
// Takes the oldest packet descriptor queued for this cluster, picks the
// lowest-numbered idle handler unit (HPU), copies the packet row by row from
// the L2 packet memory into that HPU's packet slot in L1 (one 16-byte row per
// cycle, PKT_ROWS = 64 cycles for a 1 KiB packet), frees the L2 slot and
// pulses start for the HPU with the descriptor. One packet is copied at a
// time. L2 reads are combinational: the row addressed in a cycle is written
// to L1 in the same cycle. Selecting an HPU and copying the packet before
// starting the handler follow the paper, as does the 64-cycle copy time it
// quotes; the lowest-index choice is this design's own.
module flare_cluster_sched
  import flare_pkg::*;
#(
  parameter int unsigned NHPU = 8
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 desc_valid,
  output logic                 desc_ready,
  input  pkt_desc_t            desc,
  input  logic [NHPU-1:0]      hpu_idle,
  // L2 read / free
  output logic [15:0]          l2_slot,
  output logic [$clog2(PKT_ROWS)-1:0] l2_row_idx,
  input  row_t                 l2_row,
  output logic                 l2_free,
  // DMA write into the HPU packet slot
  output logic                 dma_we,
  output logic [$clog2(NHPU)-1:0] dma_hpu,
  output logic [$clog2(PKT_ROWS)-1:0] dma_row_idx,
  output row_t                 dma_row,
  // handler start
  output logic                 start,
  output logic [$clog2(NHPU)-1:0] start_hpu,
  output pkt_desc_t            start_desc
);
  localparam int unsigned HW = $clog2(NHPU);
  localparam int unsigned RW = $clog2(PKT_ROWS);

  typedef enum logic [1:0] {S_IDLE, S_COPY, S_START} state_e;
  state_e        st;
  pkt_desc_t     cur;
  logic [HW-1:0] hsel, pick;
  logic          any_idle;
  logic [RW-1:0] row;

  always_comb begin
    any_idle = 1'b0; pick = '0;
    for (int h = NHPU-1; h >= 0; h--)
      if (hpu_idle[h]) begin any_idle = 1'b1; pick = HW'(h); end
  end

  assign desc_ready  = (st == S_IDLE) && any_idle;
  assign l2_slot     = cur.slot;
  assign l2_row_idx  = row;
  assign dma_we      = (st == S_COPY);
  assign dma_hpu     = hsel;
  assign dma_row_idx = row;
  assign dma_row     = l2_row;
  assign l2_free     = (st == S_START);
  assign start       = (st == S_START);
  assign start_hpu   = hsel;
  assign start_desc  = cur;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= S_IDLE; cur <= '0; hsel <= '0; row <= '0;
    end else begin
      unique case (st)
        S_IDLE: if (desc_valid && any_idle) begin
          cur <= desc; hsel <= pick; row <= '0; st <= S_COPY;
        end
        S_COPY: begin
          row <= row + 1'b1;
          if (row == RW'(PKT_ROWS-1)) st <= S_START;
        end
        default: st <= S_IDLE;
      endcase
    end
  end
endmodule
