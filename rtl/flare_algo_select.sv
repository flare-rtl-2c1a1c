// flare_algo_select: chooses the aggregation algorithm of an allreduce.
//
// Rule taken from the paper: single buffer aggregation when the data to
// reduce is larger than 512 KiB, multiple buffers with 4 buffers above
// 256 KiB, with 2 buffers above 128 KiB, tree aggregation otherwise; tree
// aggregation always when a reproducible result is requested. Combinational;
// used when the control plane installs an allreduce.
module flare_algo_select
  import flare_pkg::*;
(
  input  logic [31:0]     size_bytes,  // total allreduce size per host
  input  logic            repro,       // reproducible result requested
  output algo_e           algo,
  output logic [PORT_W:0] nbuf         // buffers per block
);
  localparam logic [31:0] KIB = 32'd1024;
  always_comb begin
    if (repro || size_bytes <= 128 * KIB) begin
      algo = ALG_TREE;   nbuf = (PORT_W+1)'(NPORTS);
    end else if (size_bytes <= 256 * KIB) begin
      algo = ALG_MULTI;  nbuf = (PORT_W+1)'(2);
    end else if (size_bytes <= 512 * KIB) begin
      algo = ALG_MULTI;  nbuf = (PORT_W+1)'(4);
    end else begin
      algo = ALG_SINGLE; nbuf = (PORT_W+1)'(1);
    end
  end
endmodule
