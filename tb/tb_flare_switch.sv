// tb_flare_switch: end-to-end test of a small Flare unit (2 clusters of 4
// handler units, 64 packet slots); see flare_switch_tb_core for the test.
//
// No ports; all the work is in flare_switch_tb_core, which also ends the
// run and prints the result line.
module tb_flare_switch;
  flare_switch_tb_core #(.FULL(1'b0)) u_core ();
endmodule
