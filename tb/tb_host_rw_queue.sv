// tb_host_rw_queue: fills the 64-entry host queue, checks back-pressure,
// in-order release under head_go (including cycles where the head is held
// back), and the entry view.
module tb_host_rw_queue;
  import nearpm_pkg::*;
  localparam int D = 64;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic in_valid, in_ready, head_valid, head_go;
  host_acc_t in_acc, head_acc;
  logic [STAMP_W-1:0] in_stamp, head_stamp;
  logic [D-1:0] ent_valid;
  host_acc_t ent_acc [D];
  logic [STAMP_W-1:0] ent_stamp [D];

  host_rw_queue #(.DEPTH(D)) dut (.*);

  task automatic chk(input logic c, input string msg);
    checks++;
    if (!c) begin failures++; $display("FAIL: %s", msg); end
  endtask
  function automatic host_acc_t mk(int i);
    host_acc_t a;
    a.we = i[0]; a.addr = 64'h40 * i; a.data = {16{32'(i * 7 + 1)}};
    return a;
  endfunction

  initial begin
    repeat (200000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    in_valid = 0; head_go = 0; in_acc = '0; in_stamp = 0;
    repeat (3) @(posedge clk); rst_n = 1; @(posedge clk);
    chk(!head_valid, "empty after reset");
    for (int i = 0; i < D; i++) begin
      in_valid <= 1; in_acc <= mk(i); in_stamp <= STAMP_W'(i + 3); @(posedge clk);
    end
    in_valid <= 0; @(posedge clk); #1;
    chk(!in_ready, "full after 64");
    chk(ent_valid == '1 && ent_acc[9] == mk(9) && ent_stamp[9] == 12, "entry view");
    for (int i = 0; i < D; i++) begin
      // hold the head for a cycle on every third entry
      if (i % 3 == 0) begin @(posedge clk); #1 chk(head_acc == mk(i), "head held"); end
      #1 chk(head_valid && head_acc == mk(i) && head_stamp == STAMP_W'(i + 3), $sformatf("order %0d", i));
      head_go <= 1; @(posedge clk); head_go <= 0;
    end
    #1 chk(!head_valid && in_ready, "drained");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
