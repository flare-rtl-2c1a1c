// flare_ar_config: per-allreduce handler state written by the control plane.
//
// The network manager installs an allreduce by writing its entry: the ports
// of its children in the reduction tree, the port of its parent, whether this
// switch is the root, the reduction operator, the allreduce size and whether
// a reproducible result is needed. The aggregation algorithm is derived from
// size and reproducibility (flare_algo_select) when the entry is written.
// Writing with wr_valid = 0 uninstalls the allreduce. The table has one
// write port, takes effect on the next clock, and is visible as a whole on
// the tab output so that every cluster can index it. The number of allreduces
// (NUM_AR, from the package's AR_W) is this design's choice: the paper only
// says the memory is statically split over a fixed maximum number of them.
module flare_ar_config
  import flare_pkg::*;
(
  input  logic                 clk,
  input  logic                 rst_n,
  // control-plane write
  input  logic                 wr_en,
  input  logic [AR_W-1:0]      wr_id,
  input  logic                 wr_valid,
  input  portmask_t            wr_children,
  input  logic [PORT_W-1:0]    wr_parent,
  input  logic                 wr_is_root,
  input  red_op_e              wr_op,
  input  logic [31:0]          wr_size_bytes,
  input  logic                 wr_repro,
  // installed allreduces
  output ar_cfg_t              tab [1<<AR_W]
);
  localparam int unsigned NUM_AR = 1 << AR_W;
  algo_e           sel_algo;
  logic [PORT_W:0] sel_nbuf;

  flare_algo_select u_sel (
    .size_bytes(wr_size_bytes), .repro(wr_repro),
    .algo(sel_algo), .nbuf(sel_nbuf)
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < NUM_AR; i++) tab[i] <= '0;
    end else if (wr_en) begin
      tab[wr_id] <= '{valid: wr_valid, children: wr_children, parent: wr_parent,
                      is_root: wr_is_root, op: wr_op, algo: sel_algo,
                      nbuf: sel_nbuf};
    end
  end
endmodule
