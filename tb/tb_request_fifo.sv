// tb_request_fifo: fills the 32-entry request FIFO, checks that it refuses a
// 33rd command, drains it in order, and checks simultaneous push and pop,
// the per-entry view and the count.
module tb_request_fifo;
  import nearpm_pkg::*;
  localparam int D = 32;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic in_valid, in_ready, out_valid, out_ready;
  req_t in_req, out_req;
  logic [STAMP_W-1:0] in_stamp, out_stamp;
  range_t in_prd, in_pwr;
  logic [D-1:0] ent_valid;
  req_t ent_req [D];
  logic [STAMP_W-1:0] ent_stamp [D];
  range_t ent_prd [D], ent_pwr [D];
  logic [$clog2(D+1)-1:0] count;

  request_fifo #(.DEPTH(D)) dut (.*);

  task automatic chk(input logic c, input string msg);
    checks++;
    if (!c) begin failures++; $display("FAIL: %s", msg); end
  endtask

  function automatic req_t mk(int i);
    req_t r = '0;
    r.op = OP_UNDOLOG_CREATE; r.src = 64'h1000 * i; r.dst = 64'h9000_0000 + addr_t'(i); r.size = 32'(i);
    r.tag = 16'(i);
    return r;
  endfunction

  initial begin
    repeat (200000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    in_valid = 0; out_ready = 0; in_req = '0; in_stamp = 0; in_prd = '0; in_pwr = '0;
    repeat (3) @(posedge clk); rst_n = 1; @(posedge clk);
    chk(!out_valid && count == 0, "empty after reset");
    for (int i = 0; i < D; i++) begin
      in_valid <= 1; in_req <= mk(i); in_stamp <= STAMP_W'(i);
      in_prd <= '{lo: 64'(i), hi: 64'(i + 1)}; in_pwr <= '0;
      @(posedge clk);
      chk(in_ready || i == D, "accepts while not full");
    end
    in_valid <= 0; @(posedge clk); #1;
    chk(!in_ready, "full after 32");
    chk(int'(count) == D, "count 32");
    chk(ent_valid == '1, "all entries valid");
    chk(ent_req[5] == mk(5) && ent_stamp[5] == 5 && ent_prd[5].lo == 5, "entry view");
    for (int i = 0; i < D; i++) begin
      #1;
      chk(out_valid && out_req == mk(i) && out_stamp == STAMP_W'(i), $sformatf("order %0d", i));
      out_ready <= 1; @(posedge clk); out_ready <= 0;
    end
    #1 chk(!out_valid && count == 0, "empty after drain");
    // simultaneous push/pop
    in_valid <= 1; in_req <= mk(100); @(posedge clk);
    in_req <= mk(101); out_ready <= 1; @(posedge clk);
    in_valid <= 0; out_ready <= 0; #1;
    chk(out_valid && out_req == mk(101) && count == 1, "push and pop together");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
