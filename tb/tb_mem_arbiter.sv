// tb_mem_arbiter: five requesters issue random reads and writes to their own
// address regions through the arbiter into a PM model. Each requester keeps a
// reference copy of its region; every read response must reach the requester
// that asked, in its order, with the reference data, and every request must
// get exactly one response. Under full load, grants must rotate (each
// requester gets one of every five grants).
module tb_mem_arbiter;
  import nearpm_pkg::*;
  localparam int N = 5, LAT = 12, OPS = 200;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic [N-1:0] req_valid, req_ready, rsp_valid;
  mem_req_t req [N];
  line_t rsp_rdata;
  logic pm_req_valid, pm_req_ready, pm_rsp_valid; mem_req_t pm_req; line_t pm_rsp_rdata;

  mem_arbiter #(.N(N), .MAX_OUT(16)) dut (.*);
  pm_mem_model #(.LATENCY(LAT)) pm (.clk, .rst_n, .req_valid(pm_req_valid), .req_ready(pm_req_ready),
    .req(pm_req), .rsp_valid(pm_rsp_valid), .rsp_rdata(pm_rsp_rdata));

  task automatic chk(input logic c, input string msg);
    checks++;
    if (!c) begin failures++; $display("FAIL: %s", msg); end
  endtask

  typedef struct { bit rd; line_t data; } exp_t;
  line_t ref_mem [N][8];
  exp_t  exp_q [N][$];
  int issued [N], answered [N];
  int load = 3;   // request probability in quarters
  int grants [N];

  always @(posedge clk) begin
    if (!rst_n) begin
      req_valid <= '0;
      for (int g = 0; g < N; g++) begin
        issued[g] = 0; answered[g] = 0; grants[g] = 0;
      end
    end else begin
      for (int g = 0; g < N; g++) begin
        logic fire;
        fire = req_valid[g] && req_ready[g];
        if (fire) begin
          exp_t e;
          issued[g]++; grants[g]++;
          e.rd = !req[g].we;
          if (req[g].we) begin ref_mem[g][req[g].addr[8:6]] = req[g].wdata; e.data = '0; end
          else e.data = ref_mem[g][req[g].addr[8:6]];
          exp_q[g].push_back(e);
        end
        if (rsp_valid[g]) begin
          answered[g]++;
          if (exp_q[g].size() == 0) chk(0, "response without request");
          else begin
            exp_t e; e = exp_q[g].pop_front();
            if (e.rd) chk(rsp_rdata == e.data, $sformatf("read data for requester %0d at %0t", g, $time));
          end
        end
        if ((fire || !req_valid[g]) && issued[g] + int'(fire && 0) < OPS) begin
          if (issued[g] < OPS && $urandom_range(3) < load) begin
            req_valid[g]  <= 1;
            req[g].we    <= 1'($urandom_range(1));
            req[g].addr  <= 64'(g) * 64'h1000 + 64'($urandom_range(7)) * 64;
            req[g].wdata <= {16{$urandom}};
          end else req_valid[g] <= 0;
        end else if (fire) req_valid[g] <= 0;
      end
    end
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    for (int g = 0; g < N; g++) for (int k = 0; k < 8; k++) ref_mem[g][k] = '0;
    repeat (3) @(posedge clk); rst_n = 1;
    for (int t = 0; t < 20000; t++) begin
      bit all; all = 1;
      @(posedge clk);
      for (int g = 0; g < N; g++) if (answered[g] < OPS) all = 0;
      if (all) break;
    end
    repeat (LAT + 5) @(posedge clk);
    for (int g = 0; g < N; g++)
      chk(issued[g] == OPS && answered[g] == OPS && exp_q[g].size() == 0,
          $sformatf("requester %0d served %0d of %0d", g, answered[g], issued[g]));
    // full load: every requester always valid, grants must rotate
    rst_n = 0; @(posedge clk); @(posedge clk); rst_n = 1; load = 4;
    repeat (500) @(posedge clk);
    for (int g = 0; g < N; g++) chk(grants[g] >= 80 && grants[g] <= 101, $sformatf("fair share %0d", grants[g]));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
