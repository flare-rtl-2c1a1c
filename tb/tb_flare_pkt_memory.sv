// tb_flare_pkt_memory: stores packets until the memory is full, checks the
// descriptors and the stored rows through a DMA read port, frees slots and
// checks that the space comes back.
//
// Small instance (8 slots, 2 read ports); 10 ns clock; ready is sampled 1
// ns after the clock edge. The 4 MiB size is the paper's; the slot scheme
// is this design's.
module tb_flare_pkt_memory;
  import flare_pkg::*;
  localparam int NSLOTS = 8, NRD = 2;
  logic clk = 0, rst_n = 0; always #5 clk = ~clk;
  logic mem_space, wr_valid = 0, wr_ready, wr_sop = 0, wr_eop = 0;
  logic [PORT_W-1:0] wr_port = 0; pkt_hdr_t wr_hdr = '0; row_t wr_row = '0;
  logic desc_valid, desc_ready = 0; pkt_desc_t desc;
  logic [15:0] rd_slot [NRD]; logic [$clog2(PKT_ROWS)-1:0] rd_row_idx [NRD]; row_t rd_row [NRD];
  logic free_en [NRD]; logic [15:0] free_slot [NRD];
  logic [$clog2(NSLOTS+1)-1:0] used_slots;
  int checks = 0, failures = 0;
  flare_pkt_memory #(.NSLOTS(NSLOTS), .NRD(NRD)) dut (.*);
  task automatic chk(bit ok, string s); checks++; if (!ok) begin failures++; $display("FAIL %s", s); end endtask
  function automatic row_t pat(int p, int r); return {32'(p), 32'(r), 32'hA5A5_0000 + 32'(p*64+r), 32'(~p)}; endfunction

  task automatic send(int p);
    for (int r = 0; r < PKT_ROWS; r++) begin
      @(negedge clk);
      wr_valid = 1; wr_sop = (r == 0); wr_eop = (r == PKT_ROWS-1); wr_port = PORT_W'(p);
      wr_hdr = '{16'h88B5, 2'd0, 16'(p)}; wr_row = pat(p, r);
      #1; while (!wr_ready) begin @(negedge clk); #1; end
    end
    @(negedge clk); wr_valid = 0;
  endtask

  pkt_desc_t got [$];
  always @(posedge clk) if (desc_valid && desc_ready) got.push_back(desc);

  initial begin
    for (int i = 0; i < NRD; i++) begin rd_slot[i] = 0; rd_row_idx[i] = 0; free_en[i] = 0; free_slot[i] = 0; end
    #12 rst_n = 1;
    repeat (3) @(negedge clk);
    chk(mem_space, "space after reset");
    for (int p = 0; p < NSLOTS; p++) send(p);
    repeat (4) @(negedge clk);
    chk(!mem_space, "full after NSLOTS packets");
    desc_ready = 1;
    repeat (NSLOTS + 2) @(negedge clk);
    desc_ready = 0;
    chk(got.size() == NSLOTS, $sformatf("descriptors %0d", got.size()));
    for (int i = 0; i < got.size(); i++) begin
      chk(got[i].hdr.block_id == 16'(i) && got[i].port == PORT_W'(i), "descriptor order and fields");
      for (int r = 0; r < PKT_ROWS; r += 7) begin
        rd_slot[1] = got[i].slot; rd_row_idx[1] = 6'(r); #1;
        chk(rd_row[1] == pat(i, r), $sformatf("row %0d of packet %0d: %h vs %h", r, i, rd_row[1], pat(i,r)));
      end
    end
    // free two slots through both ports in one cycle
    @(negedge clk); free_en[0] = 1; free_slot[0] = got[2].slot; free_en[1] = 1; free_slot[1] = got[5].slot;
    @(negedge clk); free_en[0] = 0; free_en[1] = 0;
    repeat (4) @(negedge clk);
    chk(mem_space, "space after free");
    chk(used_slots == 7, $sformatf("used %0d", used_slots));   // 6 stored + 1 held ready
    send(9);
    repeat (4) @(negedge clk);
    chk(used_slots == 8, "one more stored");
    desc_ready = 1; repeat (2) @(negedge clk); desc_ready = 0;
    chk(got.size() == NSLOTS + 1 && (got[NSLOTS].slot == got[2].slot || got[NSLOTS].slot == got[5].slot), "freed slot reused");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin repeat (20000) @(posedge clk); failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
