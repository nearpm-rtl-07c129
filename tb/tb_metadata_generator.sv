// tb_metadata_generator: checks every field of a generated header against the
// command, the deletion of a header read back, and that non-header lines and
// deleted headers are not taken as live.
module tb_metadata_generator;
  import nearpm_pkg::*;
  int checks = 0, failures = 0;
  req_t req; addr_t obj_pa; logic [31:0] seq;
  line_t hdr, in_hdr, del_hdr; logic in_live; logic [31:0] in_size;

  metadata_generator dut (.*);

  task automatic chk(input logic c, input string msg);
    checks++;
    if (!c) begin failures++; $display("FAIL: %s", msg); end
  endtask

  initial begin
    log_hdr_t h;
    for (int k = 0; k < 20; k++) begin
      req = '0;
      req.op = (k % 2 != 0) ? OP_CKPOINT_CREATE : OP_UNDOLOG_CREATE;
      req.pool_id = 8'($urandom); req.thread_id = 8'($urandom); req.tag = 16'($urandom);
      req.size = $urandom_range(4096, 1); req.src = {$urandom, $urandom}; req.dst = 64'h100;
      obj_pa = {$urandom, $urandom}; seq = $urandom;
      in_hdr = '0; #1;
      h = log_hdr_t'(hdr);
      chk(h.magic == 32'h4E504D4C && h.valid && !h.committed, "magic/valid");
      chk(h.op == 8'(req.op) && h.pool_id == req.pool_id && h.thread_id == req.thread_id, "ids");
      chk(h.tag == req.tag && h.size == req.size && h.obj_addr == obj_pa && h.seq == seq, "fields");
      chk(h.rsvd == 0, "reserved zero");
      in_hdr = hdr; #1;
      chk(in_live && in_size == req.size, "generated header is live");
      h = log_hdr_t'(del_hdr);
      chk(!h.valid && h.committed && h.size == req.size && h.obj_addr == obj_pa, "deleted header");
      in_hdr = del_hdr; #1;
      chk(!in_live, "deleted header not live");
      in_hdr = {16{$urandom}}; in_hdr[31:0] = 32'h12345678; #1;
      chk(!in_live, "data line not live");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
