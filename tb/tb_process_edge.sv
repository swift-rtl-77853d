// tb_process_edge: self-checking test of the Process-edge stage.
//
// Fills the VertexProperty buffer with random properties and tags, streams
// random edges of the interval and compares each vertex update with a
// reference computed here (activity: tag >= iteration; PR passes the source
// property, SpMV multiplies by the edge weight). The output is randomly
// back-pressured. A final run with the output always ready checks the
// one-edge-per-cycle rate and the two-cycle latency.
`timescale 1ns/1ps
module tb_process_edge;
  import swift_pkg::*;
  localparam int unsigned SRC_DEPTH = 256;
  localparam vid_t BASE = 32'h0000_0400;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  algo_e      algo;
  tag_t       iter;
  logic       src_we;
  logic [7:0] src_waddr;
  src_entry_t src_wdata;
  logic       edge_valid, edge_ready, upd_valid, upd_ready, busy;
  edge_t      edge_in;
  update_t    upd_out;
  logic [31:0] n_proc, n_skip;

  process_edge #(.SRC_DEPTH(SRC_DEPTH)) dut (
    .clk, .rst_n, .cfg_algo (algo), .cur_iter (iter), .interval_base (BASE),
    .src_we, .src_waddr, .src_wdata, .edge_valid, .edge_ready, .edge_in,
    .upd_valid, .upd_ready, .upd_out, .busy, .edges_processed (n_proc), .edges_skipped (n_skip)
  );

  int checks = 0, failures = 0;
  src_entry_t ref_buf [SRC_DEPTH];
  update_t exp_q [$];
  int n_active;
  logic random_ready;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  // output side: compare every update in order
  always @(posedge clk) begin
    if (rst_n) upd_ready <= random_ready ? ($urandom_range(0, 3) != 0) : 1'b1;
    if (rst_n && upd_valid && upd_ready) begin
      update_t e;
      if (exp_q.size() == 0) check(0, "unexpected update");
      else begin
        e = exp_q.pop_front();
        check(upd_out == e, $sformatf("update %h expected %h", upd_out, e));
      end
    end
  end

  task automatic run_edges(int n, algo_e a);
    algo = a;
    for (int i = 0; i < n; i++) begin
      edge_t e;
      e.src    = BASE + vid_t'($urandom_range(0, SRC_DEPTH-1));
      e.dst    = $urandom;
      e.weight = prop_t'($urandom_range(1, 9));
      if (ref_buf[e.src - BASE].tag >= iter) begin
        update_t u;
        u.dst   = e.dst;
        u.value = (a == ALGO_SPMV) ? e.weight * ref_buf[e.src - BASE].prop
                                   : ref_buf[e.src - BASE].prop;
        exp_q.push_back(u);
        n_active++;
      end
      edge_valid <= 1'b1;
      edge_in    <= e;
      @(posedge clk);
      while (!edge_ready) @(posedge clk);
    end
    edge_valid <= 1'b0;
    repeat (20) @(posedge clk);
  endtask

  initial begin
    #2000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    edge_valid = 0; src_we = 0; src_waddr = 0; src_wdata = '0; edge_in = '0;
    iter = 8'd3; algo = ALGO_PR; random_ready = 1; upd_ready = 1; n_active = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int i = 0; i < SRC_DEPTH; i++) begin
      ref_buf[i].tag  = tag_t'($urandom_range(1, 5));
      ref_buf[i].prop = $urandom;
      src_we    <= 1'b1;
      src_waddr <= 8'(i);
      src_wdata <= ref_buf[i];
      @(posedge clk);
    end
    src_we <= 1'b0;
    @(posedge clk);
    run_edges(300, ALGO_PR);
    run_edges(300, ALGO_SPMV);
    check(exp_q.size() == 0, "all expected updates seen");
    check(n_proc == 32'(n_active), $sformatf("processed %0d vs %0d", n_proc, n_active));
    check(n_skip == 32'(600 - n_active), "skipped count");
    // rate: 64 edges with an always-ready output take 64 cycles to enter
    random_ready = 0;
    begin
      int t0, t1;
      @(posedge clk);
      t0 = $time;
      run_edges(64, ALGO_PR);
      t1 = $time;
      check((t1 - t0) / 10 == 64 + 20, $sformatf("64 edges in %0d cycles", (t1 - t0) / 10 - 20));
    end
    check(exp_q.size() == 0, "all expected updates seen (rate run)");
    check(!busy, "pipeline empty");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
