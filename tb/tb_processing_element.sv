// tb_processing_element: self-checking test of one processing element on a
// behavioural HBM channel.
//
// A small PE (8 destination intervals of 8 vertices, bins of 4, regions of
// 32 updates) is PE number 1 of a two-PE cluster, so it owns the vertices
// b*16 + 8 + i. The test writes the edge table, the edges (SpMV, weights
// 1..5) and the destination properties into the HBM model, fills the
// VertexProperty buffer for each source interval, and runs:
//   process(interval 0, slot 0); then apply(slot 0) while process(interval 1,
//   slot 1) runs; then apply(slot 1).
// A reference computed here gives, for every destination vertex, the sum of
// weight * source property over the edges with an active source. Checks:
// the properties written back to HBM, the frontiers (vertex ID, value,
// tag = iteration + 1, interval) of each apply, the edge counters, that the
// two engines overlapped, and finally that a bin region overflow is flagged.
`timescale 1ns/1ps
module tb_processing_element;
  import swift_pkg::*;
  localparam int SRC_DEPTH = 64, AD = 8, NB = 8, BD = 4, CAP = 32;
  localparam int PROP_BASE = NB, UPD_BASE = NB + NB * AD, EDGE_BASE = 1024;
  localparam int ITER = 2;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic src_we;
  logic [5:0] src_waddr;
  src_entry_t src_wdata;
  logic pepu_start, pepu_slot, pepu_done, pepu_busy, au_start, au_slot, au_done, au_busy;
  ivl_t pepu_interval, au_interval;
  tag_t pepu_iter, au_iter;
  vid_t pepu_base;
  logic fr_valid, fr_ready;
  fmsg_t fr_data;
  logic [2:0] fr_count;
  logic hv, hr, rv, overflow;
  mem_req_t hq;
  word_t rd;
  logic [31:0] e_proc, e_skip, u_app, a_fwd, b_full;

  processing_element #(.SRC_DEPTH(SRC_DEPTH), .APPLY_DEPTH(AD), .NUM_BINS(NB), .BIN_DEPTH(BD),
                       .BIN_CAP(CAP), .FR_DEPTH(4)) dut (
    .clk, .rst_n, .cfg_algo (ALGO_SPMV), .cfg_bin_shift (6'd4), .pe_gid (16'd1),
    .src_we, .src_waddr, .src_wdata,
    .pepu_start, .pepu_interval, .pepu_slot, .pepu_iter, .pepu_base, .pepu_done, .pepu_busy,
    .au_start, .au_interval, .au_slot, .au_iter, .au_done, .au_busy,
    .fr_valid, .fr_ready, .fr_data, .fr_count,
    .hbm_req_valid (hv), .hbm_req_ready (hr), .hbm_req (hq), .hbm_rsp_valid (rv), .hbm_rsp_data (rd),
    .overflow, .edges_processed (e_proc), .edges_skipped (e_skip), .updates_applied (u_app),
    .apply_forwards (a_fwd), .bin_full_flushes (b_full)
  );
  hbm_model #(.LATENCY(8), .STALL_PCT(20), .SEED(11)) u_hbm (
    .clk, .rst_n, .req_valid (hv), .req_ready (hr), .req (hq), .rsp_valid (rv), .rsp_data (rd)
  );

  int checks = 0, failures = 0;
  src_entry_t S [64];               // source copy: vertices 0..63 (intervals 0..3)
  int unsigned P [128];             // destination properties by vertex ID
  bit changed [2][128];             // vertices changed by the apply of interval 0/1
  int exp_active;
  int fr_seen;
  int overlap;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  function automatic int local_addr(int v);
    return PROP_BASE + (v >> 4) * AD + (v & 7);
  endfunction

  // frontier FIFO consumer
  always @(posedge clk) begin
    if (rst_n) fr_ready <= ($urandom_range(0, 2) != 0);
    if (rst_n && pepu_busy && au_busy) overlap++;
    if (rst_n && fr_valid && fr_ready) begin
      automatic int v = int'(fr_data.f.vid);
      automatic int k = int'(fr_data.interval);
      fr_seen++;
      check(k < 2 && changed[k][v], $sformatf("frontier %0d of interval %0d expected", v, k));
      if (k < 2) changed[k][v] = 0;
      check(fr_data.f.tag == tag_t'(ITER + 1), "frontier tag");
      check(fr_data.has_data && !fr_data.last, "frontier flags");
    end
  end

  task automatic make_interval(int k, int n, int only_bin);
    edge_t e;
    u_hbm.poke(addr_t'(k), word_t'({32'(n), 32'(EDGE_BASE + 64 * k)}));
    for (int i = 0; i < n; i++) begin
      e.src    = vid_t'(16 * k + $urandom_range(0, 15));
      e.dst    = vid_t'(16 * (only_bin >= 0 ? only_bin : $urandom_range(0, NB - 1))
                        + 8 + $urandom_range(0, 7));
      e.weight = prop_t'($urandom_range(1, 5));
      u_hbm.poke(addr_t'(EDGE_BASE + 64 * k + i), word_t'(e));
      if (k < 2 && S[e.src].tag >= tag_t'(ITER)) begin
        P[e.dst] += e.weight * S[e.src].prop;
        changed[k][e.dst] = 1;
        exp_active++;
      end
    end
  endtask

  task automatic load_src(int k);
    for (int j = 0; j < 16; j++) begin
      src_we <= 1; src_waddr <= 6'(j); src_wdata <= S[16 * k + j];
      @(posedge clk);
    end
    src_we <= 0;
  endtask

  task automatic run_pepu(int k, bit slot);
    pepu_interval <= ivl_t'(k); pepu_slot <= slot; pepu_iter <= tag_t'(ITER);
    pepu_base <= vid_t'(16 * k); pepu_start <= 1;
    @(posedge clk);
    pepu_start <= 0;
    @(posedge clk);
    while (pepu_busy) @(posedge clk);
  endtask

  task automatic run_au(int k, bit slot);
    au_interval <= ivl_t'(k); au_slot <= slot; au_iter <= tag_t'(ITER); au_start <= 1;
    @(posedge clk);
    au_start <= 0;
    @(posedge clk);
    while (au_busy) @(posedge clk);
  endtask

  initial begin
    #5000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    src_we = 0; src_waddr = 0; src_wdata = '0; pepu_start = 0; au_start = 0;
    pepu_interval = 0; pepu_slot = 0; pepu_iter = 0; pepu_base = 0;
    au_interval = 0; au_slot = 0; au_iter = 0; fr_ready = 1;
    exp_active = 0; fr_seen = 0; overlap = 0;
    foreach (S[i]) begin
      S[i].tag  = tag_t'($urandom_range(0, 3));     // active when tag >= 2
      S[i].prop = prop_t'($urandom_range(1, 100));
    end
    foreach (P[v]) begin
      P[v] = $urandom_range(0, 1000);
      changed[0][v] = 0; changed[1][v] = 0;
      u_hbm.poke(addr_t'(local_addr(v)), word_t'(P[v]));
    end
    make_interval(0, 60, -1);
    make_interval(1, 45, -1);
    make_interval(3, 60, 5);               // all into one bin: overflows 32
    foreach (S[i]) if (i >= 48) S[i].tag = tag_t'(ITER);
    repeat (3) @(posedge clk);
    rst_n = 1;
    repeat (3) @(posedge clk);
    load_src(0);
    run_pepu(0, 0);
    check(!overflow, "no overflow yet");
    // apply interval 0 (slot 0) while interval 1 is processed (slot 1)
    fork
      run_au(0, 0);
      begin load_src(1); run_pepu(1, 1); end
    join
    run_au(1, 1);
    repeat (10) @(posedge clk);
    check(int'(e_proc) == exp_active, $sformatf("edges processed %0d vs %0d", e_proc, exp_active));
    check(int'(e_proc + e_skip) == 105, "every edge seen once");
    check(int'(u_app) == exp_active, "updates applied");
    check(b_full > 0, "full bins flushed during processing");
    check(overlap > 0, "apply overlapped processing");
    foreach (changed[k, v]) check(!changed[k][v], $sformatf("frontier %0d of interval %0d emitted", v, k));
    for (int v = 0; v < 128; v++) if ((v & 8) != 0) begin
      automatic word_t w = u_hbm.peek(addr_t'(local_addr(v)));
      check(w[31:0] == P[v], $sformatf("property of vertex %0d: %0d vs %0d", v, w[31:0], P[v]));
    end
    // overflow: 60 active updates into one region of 32
    load_src(3);
    run_pepu(3, 0);
    check(overflow, "bin region overflow flagged");
    $display("frontiers=%0d overlap=%0d forwards=%0d", fr_seen, overlap, a_fwd);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
