// flare_parser: classifies incoming packets of the processing unit.
//
// Each packet arrives as a stream of payload rows (in_sop on the first row,
// in_eop on the last) with its header and input port held beside every row.
// On the first row the parser compares the EtherType with NRULES matching
// rules written by the control plane. A packet that matches a rule and whose
// allreduce is installed goes to the L2 packet memory; if the packet memory
// has no free slot the packet is dropped and counted. Any other packet goes
// unchanged to the bypass output towards the routing tables. The decision is
// made on the first row without adding a cycle and is held for the rest of
// the packet; backpressure of the selected output reaches in_ready. Matching
// on EtherType and dropping on a full memory follow the paper; the rule
// format, the rule count and the stream interface are this design's choice.
module flare_parser
  import flare_pkg::*;
#(
  parameter int unsigned NRULES = 8
) (
  input  logic                      clk,
  input  logic                      rst_n,
  // control plane: rule write
  input  logic                      rule_wr,
  input  logic [$clog2(NRULES)-1:0] rule_idx,
  input  logic                      rule_valid,
  input  logic [ETYPE_W-1:0]        rule_etype,
  // allreduce installed (indexed by ar_id)
  input  logic [(1<<AR_W)-1:0]      ar_installed,
  // input stream
  input  logic                      in_valid,
  output logic                      in_ready,
  input  logic                      in_sop,
  input  logic                      in_eop,
  input  logic [PORT_W-1:0]         in_port,
  input  pkt_hdr_t                  in_hdr,
  input  row_t                      in_row,
  // towards L2 packet memory
  input  logic                      mem_space,   // a free slot exists
  output logic                      pm_valid,
  input  logic                      pm_ready,
  output logic                      pm_sop,
  output logic                      pm_eop,
  output logic [PORT_W-1:0]         pm_port,
  output pkt_hdr_t                  pm_hdr,
  output row_t                      pm_row,
  // bypass towards the routing tables
  output logic                      by_valid,
  input  logic                      by_ready,
  output logic                      by_sop,
  output logic                      by_eop,
  output logic [PORT_W-1:0]         by_port,
  output pkt_hdr_t                  by_hdr,
  output row_t                      by_row,
  // statistics
  output logic [31:0]               cnt_processed,
  output logic [31:0]               cnt_bypassed,
  output logic [31:0]               cnt_dropped
);
  typedef enum logic [1:0] {D_PROC, D_BYPASS, D_DROP} dest_e;

  logic               rv   [NRULES];
  logic [ETYPE_W-1:0] ret  [NRULES];
  dest_e              cur_q, cur;
  logic               match;

  always_comb begin
    match = 1'b0;
    for (int i = 0; i < NRULES; i++)
      if (rv[i] && ret[i] == in_hdr.ethertype) match = 1'b1;
  end

  always_comb begin
    if (in_sop)
      cur = (match && ar_installed[in_hdr.ar_id]) ? (mem_space ? D_PROC : D_DROP)
                                                  : D_BYPASS;
    else
      cur = cur_q;
  end

  assign pm_valid = in_valid && cur == D_PROC;
  assign by_valid = in_valid && cur == D_BYPASS;
  assign in_ready = (cur == D_PROC) ? pm_ready : (cur == D_BYPASS) ? by_ready : 1'b1;
  assign {pm_sop, pm_eop, pm_port, pm_hdr, pm_row} = {in_sop, in_eop, in_port, in_hdr, in_row};
  assign {by_sop, by_eop, by_port, by_hdr, by_row} = {in_sop, in_eop, in_port, in_hdr, in_row};

  wire fire = in_valid && in_ready;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < NRULES; i++) begin rv[i] <= 1'b0; ret[i] <= '0; end
      cur_q <= D_BYPASS;
      cnt_processed <= '0; cnt_bypassed <= '0; cnt_dropped <= '0;
    end else begin
      if (rule_wr) begin
        rv[rule_idx]  <= rule_valid;
        ret[rule_idx] <= rule_etype;
      end
      if (fire && in_sop) begin
        cur_q <= cur;
        unique case (cur)
          D_PROC:   cnt_processed <= cnt_processed + 1;
          D_DROP:   cnt_dropped   <= cnt_dropped + 1;
          default:  cnt_bypassed  <= cnt_bypassed + 1;
        endcase
      end
    end
  end
endmodule
