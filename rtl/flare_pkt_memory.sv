// flare_pkt_memory: L2 packet memory of the processing unit.
//
// Holds NSLOTS packets of PKT_ROWS rows each (default 4096 x 1 KiB = 4 MiB,
// the paper's L2 packet memory size). A packet is written row by row from
// the parser into a free slot; after its last row a descriptor (slot, input
// port, header) is queued for the packet scheduler. Each of the NRD cluster
// DMA engines reads rows combinationally by (slot, row) and frees the slot
// when its copy into L1 is done; up to NRD slots can be freed per cycle.
//
// Free slots are found by a scanner that tests SCAN slots of a busy bitmap
// per cycle and keeps one free slot ready; mem_space reports that a slot is
// ready, so the parser can drop a packet that finds no space (the paper
// drops or signals congestion, and leaves the choice to the network). The
// scanner, the descriptor queue and the interfaces are this design's
// choice. used_slots counts the slot held ready for the next packet too. The storage is not reset.
module flare_pkt_memory
  import flare_pkg::*;
#(
  parameter int unsigned NSLOTS = 4096,
  parameter int unsigned NRD    = 64,
  parameter int unsigned SCAN   = 8
) (
  input  logic                 clk,
  input  logic                 rst_n,
  output logic                 mem_space,
  // write stream from the parser
  input  logic                 wr_valid,
  output logic                 wr_ready,
  input  logic                 wr_sop,
  input  logic                 wr_eop,
  input  logic [PORT_W-1:0]    wr_port,
  input  pkt_hdr_t             wr_hdr,
  input  row_t                 wr_row,
  // descriptors of complete packets
  output logic                 desc_valid,
  input  logic                 desc_ready,
  output pkt_desc_t            desc,
  // DMA read and free ports
  input  logic [15:0]          rd_slot [NRD],
  input  logic [$clog2(PKT_ROWS)-1:0] rd_row_idx [NRD],
  output row_t                 rd_row  [NRD],
  input  logic                 free_en   [NRD],
  input  logic [15:0]          free_slot [NRD],
  output logic [$clog2(NSLOTS+1)-1:0] used_slots
);
  localparam int unsigned SW = $clog2(NSLOTS);
  localparam int unsigned RW = $clog2(PKT_ROWS);

  row_t                 mem [NSLOTS*PKT_ROWS];
  logic [NSLOTS-1:0]    busy;
  logic [SW-1:0]        scan_ptr, nxt_slot, cur_slot;
  logic                 nxt_vld;
  logic [RW-1:0]        wr_idx;
  logic                 dq_in_ready;
  logic [$clog2(NSLOTS+1)-1:0] dq_count;

  // a new packet needs a ready slot; the descriptor queue has one entry per
  // slot, so it cannot overflow and never stops a packet half way
  assign mem_space = nxt_vld;
  assign wr_ready  = wr_sop ? nxt_vld : 1'b1;

  wire       fire  = wr_valid && wr_ready;
  wire [SW-1:0] slot_w = wr_sop ? nxt_slot : cur_slot;

  flare_fifo #(.T(pkt_desc_t), .DEPTH(NSLOTS)) u_dq (
    .clk, .rst_n,
    .in_valid(fire && wr_eop), .in_ready(dq_in_ready),
    .in_data('{port: wr_port, hdr: wr_hdr, slot: 16'(slot_w)}),
    .out_valid(desc_valid), .out_ready(desc_ready), .out_data(desc),
    .count(dq_count)
  );

  // scanner: find one free slot among SCAN consecutive slots
  logic          found;
  logic [SW-1:0] found_slot;
  always_comb begin
    found = 1'b0; found_slot = '0;
    for (int i = SCAN-1; i >= 0; i--)
      if (!busy[SW'(scan_ptr + SW'(i))]) begin
        found = 1'b1; found_slot = SW'(scan_ptr + SW'(i));
      end
  end

  // next slot occupancy: frees from the clusters, then the slot the
  // scanner reserves in this cycle
  logic [NSLOTS-1:0] busy_n;
  int                nused_n;
  logic              take;
  assign take = !(fire && wr_sop) && !nxt_vld && found;
  always_comb begin
    busy_n  = busy;
    nused_n = int'(used_slots);
    for (int r = 0; r < NRD; r++)
      if (free_en[r]) begin busy_n[free_slot[r][SW-1:0]] = 1'b0; nused_n--; end
    if (take) begin busy_n[found_slot] = 1'b1; nused_n++; end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy <= '0; scan_ptr <= '0; nxt_vld <= 1'b0; nxt_slot <= '0;
      cur_slot <= '0; wr_idx <= '0; used_slots <= '0;
    end else begin
      if (fire && wr_sop) begin
        nxt_vld  <= 1'b0;
        cur_slot <= nxt_slot;
      end else if (take) begin
        nxt_slot <= found_slot;
        nxt_vld  <= 1'b1;
      end
      if (!nxt_vld && !found) scan_ptr <= SW'(scan_ptr + SW'(SCAN));
      else if (!nxt_vld)      scan_ptr <= SW'(found_slot + 1'b1);
      busy       <= busy_n;
      used_slots <= ($clog2(NSLOTS+1))'(nused_n);
      if (fire) wr_idx <= wr_eop ? '0 : wr_idx + 1'b1;
    end
  end

  always_ff @(posedge clk)
    if (fire) mem[{slot_w, (wr_sop ? RW'(0) : wr_idx)}] <= wr_row;

  always_comb
    for (int r = 0; r < NRD; r++)
      rd_row[r] = mem[{rd_slot[r][SW-1:0], rd_row_idx[r]}];
endmodule
