// tb_dma_engine: copies ranges of 1, 8, 13 and 64 lines (a 4 kB page) through
// the DMA engine into a PM model; checks every destination line, that nothing
// past the end is written, that the source is unchanged, that odd byte sizes
// round up to whole lines, and the copy time against the burst formula.
module tb_dma_engine;
  import nearpm_pkg::*;
  localparam int LAT = 30, BURST = 8;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic start, busy, done, mem_req_valid, mem_req_ready, mem_rsp_valid;
  addr_t src, dst; logic [31:0] bytes; line_t mem_rsp_rdata; mem_req_t mem_req;

  dma_engine #(.BURST(BURST)) dut (.*);
  pm_mem_model #(.LATENCY(LAT)) pm (.clk, .rst_n, .req_valid(mem_req_valid), .req_ready(mem_req_ready),
    .req(mem_req), .rsp_valid(mem_rsp_valid), .rsp_rdata(mem_rsp_rdata));

  task automatic chk(input logic c, input string msg);
    checks++;
    if (!c) begin failures++; $display("FAIL: %s", msg); end
  endtask
  function automatic line_t pat(addr_t a);
    return {8{a ^ 64'hA5A5_0000_5A5A_0000}};
  endfunction

  task automatic copy(input addr_t s, input addr_t d, input int nbytes);
    int lines, cyc, bound;
    lines = (nbytes + 63) / 64;
    for (int i = 0; i < lines + 2; i++) pm.poke(s + 64 * i, pat(s + 64 * i));
    pm.poke(d + 64 * lines, '1);
    src <= s; dst <= d; bytes <= nbytes; start <= 1; @(posedge clk); start <= 0;
    cyc = 0;
    while (!done) begin @(posedge clk); #1; cyc++; end
    for (int i = 0; i < lines; i++) chk(pm.peek(d + 64 * i) == pat(s + 64 * i), $sformatf("line %0d of %0d", i, lines));
    chk(pm.peek(d + 64 * lines) == '1, "no write past the end");
    chk(pm.peek(s) == pat(s), "source unchanged");
    bound = ((lines + BURST - 1) / BURST) * (2 * BURST + 2 * LAT + 4);
    chk((cyc <= bound || pm.ready_pct != 100) && cyc >= 2 * LAT, $sformatf("cycles %0d within [%0d, %0d]", cyc, 2 * LAT, bound));
    @(posedge clk); #1 chk(!busy, "idle after done");
  endtask

  initial begin
    repeat (200000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    start = 0; src = 0; dst = 0; bytes = 0;
    repeat (3) @(posedge clk); rst_n = 1; @(posedge clk);
    copy(64'h1_0000, 64'h8_0000, 64);
    copy(64'h2_0000, 64'h9_0000, 512);
    copy(64'h3_0000, 64'hA_0000, 13 * 64 - 5);
    copy(64'h4_0000, 64'hB_0000, 4096);
    pm.ready_pct = 50;
    copy(64'h5_0000, 64'hC_0000, 1000);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
