// tb_import_frontier: self-checking test of the Import-frontier module.
// Sends frontier messages and batch-end markers (some carrying a frontier,
// some empty) into a back-pressured frontier HBM, with the enable input
// toggling. Checks that each frontier lands at its vertex address as
// {tag, property}, that nothing moves while enable is low, and that every
// batch end produces one batch_done pulse with its interval.
`timescale 1ns/1ps
module tb_import_frontier;
  import swift_pkg::*;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic enable, h2c_valid, h2c_ready, req_valid, req_ready, rsp_valid, batch_done;
  fmsg_t h2c_msg;
  mem_req_t req;
  word_t rsp_data;
  ivl_t batch_interval;
  logic [31:0] n_imp;

  import_frontier dut (
    .clk, .rst_n, .enable, .h2c_valid, .h2c_ready, .h2c_msg, .req_valid, .req_ready, .req,
    .batch_done, .batch_interval, .frontiers_imported (n_imp)
  );
  hbm_model #(.LATENCY(4), .STALL_PCT(30), .SEED(9)) u_hbm (
    .clk, .rst_n, .req_valid, .req_ready, .req, .rsp_valid, .rsp_data
  );

  int checks = 0, failures = 0;
  ivl_t exp_batches [$];
  int n_data;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  always @(posedge clk) begin
    if (rst_n) enable <= ($urandom_range(0, 4) != 0);
    if (rst_n && !enable) check(!h2c_ready && !req_valid, "held while disabled");
    if (rst_n && batch_done) begin
      if (exp_batches.size() == 0) check(0, "unexpected batch_done");
      else check(batch_interval == exp_batches.pop_front(), "batch interval");
    end
  end

  initial begin
    #2000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    frontier_t sent [$];
    h2c_valid = 0; h2c_msg = '0; enable = 1; n_data = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int i = 0; i < 300; i++) begin
      fmsg_t m;
      m = '0;
      m.interval = ivl_t'($urandom_range(0, 7));
      m.last     = ($urandom_range(0, 9) == 0);
      m.has_data = !m.last || $urandom_range(0, 1);
      m.f.vid    = vid_t'(i * 3);          // distinct vertices
      m.f.prop   = $urandom;
      m.f.tag    = tag_t'($urandom_range(1, 200));
      if (m.has_data) begin sent.push_back(m.f); n_data++; end
      if (m.last) exp_batches.push_back(m.interval);
      h2c_valid <= 1; h2c_msg <= m;
      @(posedge clk);
      while (!h2c_ready) @(posedge clk);
    end
    h2c_valid <= 0;
    repeat (10) @(posedge clk);
    foreach (sent[i]) begin
      automatic word_t w = u_hbm.peek(addr_t'(sent[i].vid));
      check(w[39:0] == {sent[i].tag, sent[i].prop}, $sformatf("frontier of vertex %0d got %h exp %h", sent[i].vid, w, {sent[i].tag, sent[i].prop}));
    end
    check(exp_batches.size() == 0, "all batch ends reported");
    check(int'(n_imp) == n_data, "import count");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
