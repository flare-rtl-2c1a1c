// tb_flare_cluster_sched: a descriptor is copied row by row from an L2
// model into the lowest idle unit, the slot is freed and the unit started
// after the 64-row copy (64 cycles from acceptance to start, checked).
//
// No ports; 10 ns clock; the L2 model returns a row pattern built from slot
// and row number so misplaced rows are detected. The 64-cycle copy is the
// paper's figure; the lowest-idle-unit choice is this design's.
module tb_flare_cluster_sched;
  import flare_pkg::*;
  localparam int NHPU = 4;
  logic clk = 0, rst_n = 0; always #5 clk = ~clk;
  logic desc_valid = 0, desc_ready; pkt_desc_t desc = '0; logic [NHPU-1:0] hpu_idle = '1;
  logic [15:0] l2_slot; logic [5:0] l2_row_idx; row_t l2_row; logic l2_free;
  logic dma_we; logic [1:0] dma_hpu; logic [5:0] dma_row_idx; row_t dma_row;
  logic start; logic [1:0] start_hpu; pkt_desc_t start_desc;
  int checks = 0, failures = 0;
  flare_cluster_sched #(.NHPU(NHPU)) dut (.*);
  task automatic chk(bit ok, string s); checks++; if (!ok) begin failures++; $display("FAIL %s", s); end endtask
  assign l2_row = {l2_slot, 10'(l2_row_idx), 104'h1234};
  int copied [NHPU]; int bad_rows = 0;
  always @(posedge clk) if (dma_we) begin
    copied[dma_hpu]++;
    if (dma_row != {desc_slot_q, 10'(dma_row_idx), 104'h1234}) bad_rows++;
  end
  logic [15:0] desc_slot_q;
  int t_acc, t_start;
  task automatic run(int slot, logic [NHPU-1:0] idle, int exp_h);
    hpu_idle = idle;
    @(negedge clk); desc_valid = 1; desc = '{port: 3'd2, hdr: '{16'h88B5, 2'd1, 16'(slot)}, slot: 16'(slot)};
    desc_slot_q = 16'(slot);
    #1; chk(desc_ready, "accepts with an idle unit");
    t_acc = $time;
    @(negedge clk); desc_valid = 0;
    while (!start) begin
      chk(!(l2_free && !start), "free only with start");
      @(negedge clk);
    end
    t_start = $time;
    chk(l2_free && l2_slot == 16'(slot), "L2 slot freed");
    chk(start_hpu == 2'(exp_h) && start_desc.slot == 16'(slot), $sformatf("start unit %0d", exp_h));
    chk((t_start - t_acc) / 10 == PKT_ROWS, $sformatf("copy time %0d cycles", (t_start - t_acc) / 10));
    @(negedge clk);
  endtask
  initial begin
    #12 rst_n = 1;
    hpu_idle = '0;
    @(negedge clk); desc_valid = 1; #1; chk(!desc_ready, "waits while no unit is idle");
    desc_valid = 0;
    run(5, 4'b1111, 0);
    run(9, 4'b1100, 2);
    run(3, 4'b1000, 3);
    chk(copied[0] == PKT_ROWS && copied[2] == PKT_ROWS && copied[3] == PKT_ROWS && copied[1] == 0, "rows per unit");
    chk(bad_rows == 0, "copied data");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin repeat (5000) @(posedge clk); failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
