// flare_l1_workmem: aggregation buffers in a cluster's L1 memory.
//
// DEPTH rows of 16 bytes (default 64 blocks x 8 buffers x 64 rows =
// 512 KiB, about half of the cluster's 1 MiB L1, the working memory size the
// paper reports). Each of the NP handler units has two combinational read
// ports (a: destination buffer, b: source buffer) and one write port, so
// every unit can read-modify-write one row per cycle as a single-cycle
// scratchpad would allow. Writes to the same row in one cycle are excluded
// by the buffer locks of the block table; if they happen, the highest port
// wins. The port structure is this design's choice. Not reset.
module flare_l1_workmem
  import flare_pkg::*;
#(
  parameter int unsigned NP    = 8,
  parameter int unsigned DEPTH = 64*8*64
) (
  input  logic                     clk,
  input  logic [$clog2(DEPTH)-1:0] ra_addr [NP],
  output row_t                     ra_data [NP],
  input  logic [$clog2(DEPTH)-1:0] rb_addr [NP],
  output row_t                     rb_data [NP],
  input  logic                     we      [NP],
  input  logic [$clog2(DEPTH)-1:0] wa_addr [NP],
  input  row_t                     wa_data [NP]
);
  row_t mem [DEPTH];

  always_ff @(posedge clk)
    for (int p = 0; p < NP; p++)
      if (we[p]) mem[wa_addr[p]] <= wa_data[p];

  always_comb
    for (int p = 0; p < NP; p++) begin
      ra_data[p] = mem[ra_addr[p]];
      rb_data[p] = mem[rb_addr[p]];
    end
endmodule
