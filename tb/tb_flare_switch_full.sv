// tb_flare_switch_full: end-to-end test of the Flare unit at its default
// size (64 clusters of 8 handler units, 4 MiB packet memory); see
// flare_switch_tb_core for the test. The flood phase that forces drops is
// skipped at this size (4096 packet slots would take too long to fill).
//
// No ports; the top keeps all its default parameters.
module tb_flare_switch_full;
  flare_switch_tb_core #(.FULL(1'b1), .NB(6), .DROP_PKTS(0)) u_core ();
endmodule
