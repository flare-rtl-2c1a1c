// flare_out_arb: command unit, packet-level round-robin arbiter.
//
// Merges the result packets of N sources (the handler units of a cluster, or
// the clusters of the processing unit) into one output stream towards the
// routing tables. A source that wins keeps the output until its last row
// (eop), so packets are never interleaved; the next winner is searched from
// the source after the previous one. Selection is combinational and costs no
// cycle. The paper names the command unit only; the arbitration is this
// design's choice.
module flare_out_arb
  import flare_pkg::*;
#(
  parameter int unsigned N = 8
) (
  input  logic      clk,
  input  logic      rst_n,
  input  logic      in_valid [N],
  output logic      in_ready [N],
  input  logic      in_sop   [N],
  input  logic      in_eop   [N],
  input  out_hdr_t  in_hdr   [N],
  input  row_t      in_row   [N],
  output logic      out_valid,
  input  logic      out_ready,
  output logic      out_sop,
  output logic      out_eop,
  output out_hdr_t  out_hdr,
  output row_t      out_row
);
  localparam int unsigned IW = (N > 1) ? $clog2(N) : 1;

  logic          locked;
  logic [IW-1:0] owner, rr, pick, cur;
  logic          any;

  always_comb begin
    any = 1'b0; pick = '0;
    for (int k = N-1; k >= 0; k--) begin
      int i;
      i = (int'(rr) + k) % N;
      if (in_valid[i]) begin any = 1'b1; pick = IW'(i); end
    end
  end

  assign cur       = locked ? owner : pick;
  assign out_valid = locked ? in_valid[owner] : any;
  assign out_sop   = in_sop[cur];
  assign out_eop   = in_eop[cur];
  assign out_hdr   = in_hdr[cur];
  assign out_row   = in_row[cur];

  always_comb
    for (int i = 0; i < N; i++)
      in_ready[i] = out_ready && out_valid && (cur == IW'(i));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      locked <= 1'b0; owner <= '0; rr <= '0;
    end else if (out_valid && out_ready) begin
      if (out_eop) begin
        locked <= 1'b0;
        rr     <= (cur == IW'(N-1)) ? '0 : cur + 1'b1;
      end else begin
        locked <= 1'b1;
        owner  <= cur;
      end
    end
  end
endmodule
