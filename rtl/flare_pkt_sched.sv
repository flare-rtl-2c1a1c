// flare_pkt_sched: hierarchical first-come-first-served packet scheduler.
//
// Packets of one reduction block are always sent to the same cluster, so
// that their aggregation buffer stays in that cluster's local L1 memory;
// different blocks are spread over the clusters. The cluster is the block
// identifier modulo NCL (consecutive blocks land on consecutive clusters).
// Within a cluster the packets are served in arrival order by whichever core
// is free (the cluster scheduler). Each cluster has a queue of QD
// descriptors; when the queue of the target cluster is full the descriptor
// waits here (in_ready low) and the event is counted as a stall. Restricting
// a block to the cores of one cluster (S = C) follows the paper; the modulo
// mapping and the queue depth are this design's choice.
module flare_pkt_sched
  import flare_pkg::*;
#(
  parameter int unsigned NCL = 64,
  parameter int unsigned QD  = 16
) (
  input  logic       clk,
  input  logic       rst_n,
  input  logic       in_valid,
  output logic       in_ready,
  input  pkt_desc_t  in_desc,
  output logic       out_valid [NCL],
  input  logic       out_ready [NCL],
  output pkt_desc_t  out_desc  [NCL],
  output logic [31:0] cnt_stall
);
  localparam int unsigned CW = (NCL > 1) ? $clog2(NCL) : 1;

  logic [CW-1:0] tgt;
  logic          q_in_ready [NCL];
  assign tgt      = (NCL > 1) ? CW'(in_desc.hdr.block_id) : '0;
  assign in_ready = q_in_ready[tgt];

  for (genvar c = 0; c < NCL; c++) begin : g_q
    logic [$clog2(QD+1)-1:0] cnt;
    flare_fifo #(.T(pkt_desc_t), .DEPTH(QD)) u_q (
      .clk, .rst_n,
      .in_valid(in_valid && tgt == CW'(c)), .in_ready(q_in_ready[c]),
      .in_data(in_desc),
      .out_valid(out_valid[c]), .out_ready(out_ready[c]), .out_data(out_desc[c]),
      .count(cnt)
    );
  end

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) cnt_stall <= '0;
    else if (in_valid && !in_ready) cnt_stall <= cnt_stall + 1;
endmodule
