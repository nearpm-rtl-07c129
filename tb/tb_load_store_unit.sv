// tb_load_store_unit: writes and reads lines through the load/store unit to a
// PM model with a 20-cycle latency; checks data, alignment and that an access
// completes LATENCY + 2 cycles after it is requested when the port is free.
module tb_load_store_unit;
  import nearpm_pkg::*;
  localparam int LAT = 20;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic op_valid, op_we, op_busy, op_done, mem_req_valid, mem_req_ready, mem_rsp_valid;
  addr_t op_addr; line_t op_wdata, op_rdata, mem_rsp_rdata; mem_req_t mem_req;

  load_store_unit dut (.*);
  pm_mem_model #(.LATENCY(LAT)) pm (.clk, .rst_n, .req_valid(mem_req_valid), .req_ready(mem_req_ready),
    .req(mem_req), .rsp_valid(mem_rsp_valid), .rsp_rdata(mem_rsp_rdata));

  task automatic chk(input logic c, input string msg);
    checks++;
    if (!c) begin failures++; $display("FAIL: %s", msg); end
  endtask
  task automatic acc(input logic we, input addr_t a, input line_t d, output line_t r, output int cyc);
    op_valid <= 1; op_we <= we; op_addr <= a; op_wdata <= d; @(posedge clk); op_valid <= 0;
    cyc = 1;
    while (!op_done) begin @(posedge clk); #1; cyc++; end
    r = op_rdata;
    @(posedge clk);
  endtask

  initial begin
    repeat (100000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    line_t r, d[8]; int c;
    op_valid = 0; op_we = 0; op_addr = 0; op_wdata = 0;
    repeat (3) @(posedge clk); rst_n = 1; @(posedge clk);
    for (int i = 0; i < 8; i++) begin
      d[i] = {16{$urandom}};
      acc(1, 64'h4000 + 64 * i, d[i], r, c);
      chk(c == LAT + 2, $sformatf("write latency %0d", c));
      chk(pm.peek(64'h4000 + 64 * i) == d[i], "write reached PM");
    end
    for (int i = 7; i >= 0; i--) begin
      acc(0, 64'h4000 + 64 * i + 13, '0, r, c);   // unaligned address reads its line
      chk(r == d[i], $sformatf("read back %0d", i));
      chk(c == LAT + 2, "read latency");
    end
    pm.ready_pct = 30;
    for (int i = 0; i < 8; i++) begin
      acc(0, 64'h4000 + 64 * i, '0, r, c);
      chk(r == d[i] && c >= LAT + 2, "read under back-pressure");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
