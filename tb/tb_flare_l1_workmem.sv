// tb_flare_l1_workmem: concurrent writes from all ports, then reads of
// every written row through both read ports of every unit.
//
// No ports; 10 ns clock; writes take effect at the clock edge and reads are
// combinational. The memory organisation checked is this design's.
module tb_flare_l1_workmem;
  import flare_pkg::*;
  localparam int NP = 4, DEPTH = 256;
  logic clk = 0; always #5 clk = ~clk;
  logic [$clog2(DEPTH)-1:0] ra_addr [NP], rb_addr [NP], wa_addr [NP];
  row_t ra_data [NP], rb_data [NP], wa_data [NP];
  logic we [NP];
  row_t model [DEPTH];
  bit   wr [DEPTH];
  int checks = 0, failures = 0;
  flare_l1_workmem #(.NP(NP), .DEPTH(DEPTH)) dut (.*);
  initial begin
    for (int p = 0; p < NP; p++) begin we[p] = 0; ra_addr[p] = 0; rb_addr[p] = 0; wa_addr[p] = 0; wa_data[p] = '0; end
    for (int c = 0; c < 64; c++) begin
      @(negedge clk);
      for (int p = 0; p < NP; p++) begin
        we[p] = 1; wa_addr[p] = 8'(p * 64 + c);
        wa_data[p] = {$urandom, $urandom, $urandom, $urandom};
        model[p*64 + c] = wa_data[p]; wr[p*64+c] = 1;
      end
    end
    @(negedge clk);
    for (int p = 0; p < NP; p++) we[p] = 0;
    for (int a = 0; a < DEPTH; a++) begin
      for (int p = 0; p < NP; p++) begin ra_addr[p] = 8'(a); rb_addr[p] = 8'(DEPTH-1-a); end
      #1;
      for (int p = 0; p < NP; p++) begin
        checks += 2;
        if (ra_data[p] !== model[a]) begin failures++; $display("FAIL ra p%0d a%0d", p, a); end
        if (rb_data[p] !== model[DEPTH-1-a]) begin failures++; $display("FAIL rb p%0d a%0d", p, a); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin #100000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
