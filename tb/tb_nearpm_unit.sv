// tb_nearpm_unit: runs each NearPM operation on one unit against a PM model
// and checks memory afterwards: undo-log and checkpoint create (data copied
// behind a header that describes it), apply-log and shadow copy (plain copy),
// commit (both headers of a two-entry log deleted, walk stops at the first
// non-header line, log data untouched), and a NOP completing at once.
module tb_nearpm_unit;
  import nearpm_pkg::*;
  localparam int LAT = 10;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic req_valid, busy, done, mem_req_valid, mem_req_ready, mem_rsp_valid;
  req_t req; mem_req_t mem_req; line_t mem_rsp_rdata;

  nearpm_unit #(.BURST(8)) dut (.*);
  pm_mem_model #(.LATENCY(LAT)) pm (.clk, .rst_n, .req_valid(mem_req_valid), .req_ready(mem_req_ready),
    .req(mem_req), .rsp_valid(mem_rsp_valid), .rsp_rdata(mem_rsp_rdata));

  task automatic chk(input logic c, input string msg);
    checks++;
    if (!c) begin failures++; $display("FAIL: %s", msg); end
  endtask
  function automatic line_t pat(addr_t a);
    return {8{a * 64'h9E37_79B9 + 64'h1}};
  endfunction
  task automatic fill(input addr_t a, input int lines);
    for (int i = 0; i < lines; i++) pm.poke(a + 64 * i, pat(a + 64 * i));
  endtask
  task automatic run(input op_e op, input addr_t s, input addr_t d, input int sz, output int cyc);
    req_t r = '0;
    r.op = op; r.src = s; r.dst = d; r.size = sz; r.pool_id = 8'd7; r.thread_id = 8'd2; r.tag = 16'h33;
    @(negedge clk); req_valid = 1; req = r; @(negedge clk); req_valid = 0;
    cyc = 1;
    while (!done) begin @(posedge clk); #1; cyc++; end
    @(negedge clk); chk(!busy, "idle after done");
  endtask
  task automatic chk_copy(input addr_t s, input addr_t d, input int lines, input string m);
    for (int i = 0; i < lines; i++) chk(pm.peek(d + 64 * i) == pat(s + 64 * i), $sformatf("%s line %0d", m, i));
  endtask

  initial begin
    repeat (200000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    int c; log_hdr_t h;
    req_valid = 0; req = '0;
    repeat (3) @(posedge clk); rst_n = 1; @(posedge clk);
    // undo log of 150 bytes (3 lines) at 0x80000
    fill(64'h1_0000, 4);
    run(OP_UNDOLOG_CREATE, 64'h1_0000, 64'h8_0000, 150, c);
    h = log_hdr_t'(pm.peek(64'h8_0000));
    chk(h.magic == HDR_MAGIC && h.valid && !h.committed && h.size == 150, "undo header");
    chk(h.obj_addr == 64'h1_0000 && h.pool_id == 7 && h.thread_id == 2 && h.tag == 16'h33, "undo header ids");
    chk_copy(64'h1_0000, 64'h8_0040, 3, "undo data");
    chk(pm.peek(64'h8_0100) == '0, "undo stops after 3 lines");
    chk(c <= 4 * LAT + 30, $sformatf("undo log took %0d cycles", c));
    // second log entry right behind it: 2 lines
    fill(64'h2_0000, 2);
    run(OP_UNDOLOG_CREATE, 64'h2_0000, 64'h8_0100, 128, c);
    chk_copy(64'h2_0000, 64'h8_0140, 2, "second entry");
    // checkpoint of a 4 kB page
    fill(64'h10_0000, 64);
    run(OP_CKPOINT_CREATE, 64'h10_0000, 64'h20_0000, 4096, c);
    h = log_hdr_t'(pm.peek(64'h20_0000));
    chk(h.valid && h.op == 8'(OP_CKPOINT_CREATE) && h.size == 4096 && h.seq == 2, "checkpoint header, sequence");
    chk_copy(64'h10_0000, 64'h20_0040, 64, "checkpoint");
    // apply a redo log and shadow-copy a page
    fill(64'h3_0000, 5);
    run(OP_APPLYLOG, 64'h3_0000, 64'h4_0000, 300, c);
    chk_copy(64'h3_0000, 64'h4_0000, 5, "applylog");
    chk(pm.peek(64'h4_0140) == '0, "applylog length");
    run(OP_SHADOWCPY, 64'h10_0000, 64'h30_0000, 4096, c);
    chk_copy(64'h10_0000, 64'h30_0000, 64, "shadow");
    // commit the two-entry log
    run(OP_COMMIT_LOG, 64'h0, 64'h8_0000, 4096, c);
    h = log_hdr_t'(pm.peek(64'h8_0000));
    chk(h.magic == HDR_MAGIC && !h.valid && h.committed && h.size == 150, "first header deleted");
    h = log_hdr_t'(pm.peek(64'h8_0100));
    chk(!h.valid && h.committed && h.size == 128, "second header deleted");
    chk_copy(64'h1_0000, 64'h8_0040, 3, "log data untouched");
    chk(pm.peek(64'h8_01C0) == '0, "walk stopped at first non-header");
    // commit of an already deleted log does nothing
    begin int w; w = pm.n_writes;
      run(OP_COMMIT_LOG, 64'h0, 64'h8_0000, 4096, c);
      chk(pm.n_writes == w, "nothing to delete");
    end
    run(OP_NOP, 0, 0, 0, c);
    chk(c <= 2, "NOP completes at once");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
