// tb_addr_map_table: registers pool offsets (positive and negative), checks
// that both lookup ports translate virtual = physical - offset correctly,
// that thread id is part of the key, that rewriting a key replaces it, that a
// miss leaves the address unchanged, and that the 49th key sets `full`.
module tb_addr_map_table;
  import nearpm_pkg::*;
  localparam int E = 48;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic wr_en, lk_hit, full;
  logic [15:0] wr_key, lk_key, lk2_key;
  addr_t wr_off, lk_va0, lk_va1, lk_pa0, lk_pa1, lk2_va0, lk2_va1, lk2_pa0, lk2_pa1;

  addr_map_table #(.ENTRIES(E)) dut (.*);

  task automatic chk(input logic c, input string msg);
    checks++;
    if (!c) begin failures++; $display("FAIL: %s", msg); end
  endtask
  task automatic wr(input logic [15:0] k, input addr_t off);
    @(negedge clk); wr_en = 1; wr_key = k; wr_off = off; @(negedge clk); wr_en = 0;
  endtask
  function automatic addr_t off_of(int p);
    // physical base 0x1000_0000*p, virtual base 0x7f00_0000_0000 + 0x10_0000*p
    return (64'h1000_0000 * p) - (64'h7f00_0000_0000 + 64'h10_0000 * p);
  endfunction

  initial begin
    repeat (100000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    wr_en = 0; wr_key = 0; wr_off = 0; lk_key = 0; lk2_key = 0;
    lk_va0 = 0; lk_va1 = 0; lk2_va0 = 0; lk2_va1 = 0;
    repeat (3) @(posedge clk); rst_n = 1; @(posedge clk);
    for (int p = 1; p <= 10; p++) wr({8'(p), 8'd0}, off_of(p));
    wr({8'd3, 8'd1}, 64'h55);       // same pool, other thread
    @(posedge clk);
    for (int p = 1; p <= 10; p++) begin
      lk_key = {8'(p), 8'd0};
      lk_va0 = 64'h7f00_0000_0000 + 64'h10_0000 * p + 64'h1c0;
      lk_va1 = 64'h7f00_0000_0000 + 64'h10_0000 * p + 64'h8000;
      lk2_key = {8'(p), 8'd0}; lk2_va0 = lk_va1; lk2_va1 = lk_va0;
      #1;
      chk(lk_hit, "hit");
      chk(lk_pa0 == 64'h1000_0000 * p + 64'h1c0, $sformatf("pa0 pool %0d", p));
      chk(lk_pa1 == 64'h1000_0000 * p + 64'h8000, "pa1");
      chk(lk2_pa0 == lk_pa1 && lk2_pa1 == lk_pa0, "second port");
    end
    lk_key = {8'd3, 8'd1}; lk_va0 = 64'h100; #1;
    chk(lk_hit && lk_pa0 == 64'h155, "thread id in key");
    lk_key = {8'd99, 8'd0}; lk_va0 = 64'h1234; #1;
    chk(!lk_hit && lk_pa0 == 64'h1234, "miss leaves address");
    wr({8'd2, 8'd0}, 64'h40); @(posedge clk);
    lk_key = {8'd2, 8'd0}; lk_va0 = 64'h1000; #1;
    chk(lk_hit && lk_pa0 == 64'h1040, "overwrite");
    chk(!full, "not full");
    for (int p = 11; p < 11 + E - 11; p++) wr({8'(p), 8'd0}, 64'(p));
    @(posedge clk); #1 chk(!full, "exactly 48 fit");
    wr({8'd200, 8'd0}, 64'h1); @(posedge clk); #1;
    chk(full, "49th key sets full");
    lk_key = {8'd200, 8'd0}; #1 chk(!lk_hit, "dropped key absent");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
