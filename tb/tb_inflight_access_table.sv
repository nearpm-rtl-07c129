// tb_inflight_access_table: uses the paper's example entry (unit a reads
// 0x8000-0x8100 and writes 0xB200-0xB300) and checks the conflict rules for
// pending commands and host reads/writes, the per-unit vectors, several units,
// and clearing. Expected results are worked out from the range rules.
module tb_inflight_access_table;
  import nearpm_pkg::*;
  localparam int U = 4;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic set_en, q_conflict, h_we, h_conflict;
  logic [1:0] set_unit;
  range_t set_rd, set_wr, q_rd, q_wr;
  logic [U-1:0] clr, q_conflict_vec, h_conflict_vec, busy;
  addr_t h_addr;

  inflight_access_table #(.NUM_UNITS(U)) dut (.*);

  task automatic chk(input logic c, input string msg);
    checks++;
    if (!c) begin failures++; $display("FAIL: %s", msg); end
  endtask
  function automatic range_t R(addr_t lo, addr_t hi);
    R.lo = lo; R.hi = hi;
  endfunction
  task automatic q(input range_t rd, input range_t wr, input logic exp, input string m);
    q_rd = rd; q_wr = wr; #1 chk(q_conflict == exp, m);
  endtask
  task automatic h(input logic we, input addr_t a, input logic exp, input string m);
    h_we = we; h_addr = a; #1 chk(h_conflict == exp, m);
  endtask

  initial begin
    repeat (10000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    set_en = 0; set_unit = 0; set_rd = '0; set_wr = '0; clr = 0;
    q_rd = '0; q_wr = '0; h_we = 0; h_addr = 0;
    repeat (3) @(posedge clk); rst_n = 1; @(posedge clk);
    q(R(0, 64'hffff), R(0, 64'hffff), 0, "empty table never conflicts");
    set_en <= 1; set_unit <= 2; set_rd <= R(64'h8000, 64'h8100); set_wr <= R(64'hB200, 64'hB300);
    @(posedge clk); set_en <= 0; @(posedge clk);
    chk(busy == 4'b0100, "busy unit a=2");
    // pending command writes 0x8040 (inside a's read range): must wait
    q(R(0, 0), R(64'h8040, 64'h8080), 1, "write into read range (WAR)");
    chk(q_conflict_vec == 4'b0100, "vector names unit a");
    q(R(64'hB2C0, 64'hB300), R(0, 0), 1, "read of write range (RAW)");
    q(R(64'hB100, 64'hB200), R(64'h8100, 64'h8200), 0, "adjacent ranges do not conflict");
    q(R(64'h8000, 64'h8100), R(64'hC000, 64'hC040), 0, "read-read does not conflict");
    q(R(0, 0), R(64'hB000, 64'hC000), 1, "write over write (WAW)");
    h(0, 64'h5C00, 0, "host read 0x5C00 free");
    h(0, 64'hB240, 1, "host read of write range waits");
    h(0, 64'h8080, 0, "host read of read range goes");
    h(1, 64'h8080, 1, "host write to read range waits");
    h(1, 64'h80FF, 1, "host write, unaligned, last line of read range");
    h(1, 64'h8100, 0, "host write just past read range");
    chk(h_conflict_vec == 4'b0000, "host vector");
    // second unit
    set_en <= 1; set_unit <= 0; set_rd <= R(64'h20000, 64'h21000); set_wr <= R(64'h30000, 64'h31000);
    @(posedge clk); set_en <= 0; @(posedge clk);
    h(1, 64'h20FC0, 1, "unit 0 read range"); chk(h_conflict_vec == 4'b0001, "vector unit 0");
    clr <= 4'b0100; @(posedge clk); clr <= 0; @(posedge clk);
    h(0, 64'hB240, 0, "cleared unit no longer blocks");
    q(R(0, 0), R(64'h8040, 64'h8080), 0, "cleared unit no longer blocks command");
    // set and clear of the same unit in one cycle: set wins
    set_en <= 1; set_unit <= 0; set_rd <= R(64'h100, 64'h140); set_wr <= R(0, 0); clr <= 4'b0001;
    @(posedge clk); set_en <= 0; clr <= 0; @(posedge clk);
    h(1, 64'h100, 1, "set wins over clear");
    h(1, 64'h20000, 0, "old ranges replaced");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
