// tb_multi_device_handler: device 0 of two. Walks the synchronisation state
// machine through both paths (C -> E -> L -> C and C -> E -> R -> C), checks
// the broadcast of the local completion, a completion that arrives before the
// command is issued here, a command that is not duplicated, and that the unit
// is only freed in state C. States are read as {Device0, Device1}.
module tb_multi_device_handler;
  import nearpm_pkg::*;
  localparam int U = 4, ND = 2;
  localparam logic [1:0] ST_C = 2'b11, ST_E = 2'b00, ST_L = 2'b10, ST_R = 2'b01;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic start, start_dup, remote_out_valid, all_complete;
  logic [1:0] start_unit;
  logic [TAG_W-1:0] start_tag, remote_out_tag;
  logic [U-1:0] local_done, unit_free;
  logic [ND-1:0] remote_in_valid;
  logic [TAG_W-1:0] remote_in_tag [ND];
  logic [ND-1:0] comp [U];

  multi_device_handler #(.NUM_UNITS(U), .NUM_DEV(ND), .DEV_ID(0)) dut (.*);

  task automatic chk(input logic c, input string msg);
    checks++;
    if (!c) begin failures++; $display("FAIL: %s", msg); end
  endtask
  function automatic logic [1:0] st(int u);
    return {comp[u][0], comp[u][1]};
  endfunction
  task automatic issue(input int u, input int tag, input logic dup);
    start <= 1; start_unit <= 2'(u); start_tag <= TAG_W'(tag); start_dup <= dup;
    @(posedge clk); start <= 0; #1;
  endtask
  task automatic ldone(input int u);
    local_done[u] <= 1; @(posedge clk); local_done <= 0; #1;
  endtask
  task automatic rdone(input int tag);
    remote_in_valid[1] <= 1; remote_in_tag[1] <= TAG_W'(tag); @(posedge clk);
    remote_in_valid <= 0; #1;
  endtask

  int bcast = 0; logic [TAG_W-1:0] last_tag;
  always @(posedge clk) if (rst_n && remote_out_valid) begin bcast++; last_tag = remote_out_tag; end

  initial begin
    repeat (10000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    start = 0; start_unit = 0; start_tag = 0; start_dup = 0; local_done = 0;
    remote_in_valid = 0; remote_in_tag[0] = 0; remote_in_tag[1] = 0;
    repeat (3) @(posedge clk); rst_n = 1; @(posedge clk); #1;
    chk(st(0) == ST_C && unit_free == 4'hf && all_complete, "initial: All Complete");
    // path via Local Complete
    issue(1, 5, 1);
    chk(st(1) == ST_E && !unit_free[1] && !all_complete, "receive command -> Executing");
    ldone(1);
    chk(st(1) == ST_L && !unit_free[1], "receive local complete -> Local Complete");
    @(posedge clk); #1;
    chk(bcast == 1 && last_tag == 5, "local completion broadcast once");
    rdone(5);
    chk(st(1) == ST_C && unit_free[1], "receive remote completion -> All Complete");
    // path via Remote Complete
    issue(2, 6, 1);
    rdone(6);
    chk(st(2) == ST_R && !unit_free[2], "receive remote completion -> Remote Complete");
    ldone(2);
    chk(st(2) == ST_C, "receive local complete -> All Complete");
    @(posedge clk); #1 chk(unit_free[2] && bcast == 2, "freed after broadcast");
    // remote completion before the command is issued here
    rdone(9);
    issue(0, 9, 1);
    chk(st(0) == ST_R, "early remote completion applied at issue");
    ldone(0); @(posedge clk); #1;
    chk(st(0) == ST_C && unit_free[0], "early case completes");
    // a later command with the same tag is not completed by the old notice
    issue(0, 9, 1);
    chk(st(0) == ST_E, "early bit consumed");
    ldone(0); rdone(9); @(posedge clk); #1;
    chk(unit_free[0], "second use of tag completes");
    // command not duplicated: only local completion needed, no broadcast
    begin int b0; b0 = bcast;
      issue(3, 20, 0);
      chk(st(3) == ST_R, "non-duplicated: other device counted complete");
      ldone(3); @(posedge clk); #1;
      chk(unit_free[3] && bcast == b0, "non-duplicated: no broadcast");
    end
    // remote completion for a tag nobody waits on does not disturb others
    issue(1, 30, 1); rdone(31);
    chk(st(1) == ST_E, "unrelated tag ignored");
    ldone(1); rdone(30); @(posedge clk); #1;
    chk(all_complete, "all complete at end");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
