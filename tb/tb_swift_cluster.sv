// tb_swift_cluster: the evaluated cluster configurations at reduced size.
//
// Eight swift_top instances (2 PEs each) share a host model that passes
// every exported frontier message to every card of the active cluster, in
// order. The graph is a small RMAT-style power-law graph (256 vertices,
// NE edges; each edge picks its source and destination by descending the
// adjacency matrix quadrant by quadrant with probabilities 0.57/0.19/0.19/
// 0.05). It runs PageRank-style propagation (edge function passes the
// source value, apply sums) for ITERS iterations in four runs:
//   4 cards synchronous, 4 cards asynchronous, 8 cards synchronous,
//   8 cards asynchronous.
// Unused cards are held idle. A synchronous run is deterministic and every
// destination property is compared with a reference computed here; an
// asynchronous run must finish with every frontier imported on every card
// and with computation overlapping communication on every card. The test
// prints the cycles and active edges of each run. The asynchronous run is
// not checked to be faster: a frontier that arrives before its interval is
// processed makes the vertex active one iteration early, so the amount of
// work differs between the modes. The graph placement follows the rule of the RTL: blocks
// of APPLY_DEPTH destination vertices over all PEs of the cluster, edges
// with their destination's PE, grouped by source interval.
`timescale 1ns/1ps
module tb_swift_cluster;
  import swift_pkg::*;
  localparam int NPE = 2, NFMAX = 8, AD = 4, NB = 8, CAP = 512;
  localparam int NV = 256, NE = 700, ITERS = 3;
  localparam int PROP_BASE = NB, EDGE_BASE = 16384, EDGE_STRIDE = 1024;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic        start [NFMAX];
  logic        sync_m;
  logic [1:0]  log2_nf;
  int          nf = 4, ivs = 32, ni = 8;
  logic        init_active [NB];

  logic     w_req_valid [NFMAX][NPE];
  logic     w_req_ready [NFMAX][NPE];
  mem_req_t w_req       [NFMAX][NPE];
  logic     w_rsp_valid [NFMAX][NPE];
  word_t    w_rsp_data  [NFMAX][NPE];
  logic     f_req_valid [NFMAX], f_req_ready [NFMAX], f_rsp_valid [NFMAX];
  mem_req_t f_req [NFMAX];
  word_t    f_rsp_data [NFMAX];
  logic     h2c_valid [NFMAX], h2c_ready [NFMAX], c2h_valid [NFMAX], c2h_ready [NFMAX];
  fmsg_t    h2c_msg [NFMAX], c2h_msg [NFMAX];
  logic     running [NFMAX], done [NFMAX], converged [NFMAX], overflow [NFMAX];
  logic [31:0] c_fe [NFMAX], c_fi [NFMAX], c_occ [NFMAX], c_ep [NFMAX];

  edge_t       edges [NE];
  src_entry_t  S0 [NV];
  int unsigned P0 [NV];
  src_entry_t  S [NV];
  int unsigned P [NV];
  event ev_load, ev_check;
  int n_loaded, n_checked;
  int checks = 0, failures = 0;

  function automatic int owner_gid(int v);  return (v / AD) % (NPE * nf); endfunction
  function automatic int prop_addr(int v);  return PROP_BASE + (v / ivs) * AD + (v % AD); endfunction

  for (genvar f = 0; f < NFMAX; f++) begin : g_fpga
    swift_top #(.NUM_PE(NPE), .MAX_FPGAS(NFMAX), .APPLY_DEPTH(AD), .MAX_INTERVALS(NB),
                .BIN_DEPTH(2), .BIN_CAP(CAP), .FR_DEPTH(4)) u_fpga (
      .clk, .rst_n, .start (start[f]), .cfg_algo (ALGO_PR), .cfg_num_intervals (ivl_t'(ni)),
      .cfg_max_iter (tag_t'(ITERS)), .cfg_log2_fpgas (log2_nf), .cfg_fpga_id (4'(f)),
      .cfg_sync (sync_m), .init_active,
      .w_req_valid (w_req_valid[f]), .w_req_ready (w_req_ready[f]), .w_req (w_req[f]),
      .w_rsp_valid (w_rsp_valid[f]), .w_rsp_data (w_rsp_data[f]),
      .f_req_valid (f_req_valid[f]), .f_req_ready (f_req_ready[f]), .f_req (f_req[f]),
      .f_rsp_valid (f_rsp_valid[f]), .f_rsp_data (f_rsp_data[f]),
      .h2c_valid (h2c_valid[f]), .h2c_ready (h2c_ready[f]), .h2c_msg (h2c_msg[f]),
      .c2h_valid (c2h_valid[f]), .c2h_ready (c2h_ready[f]), .c2h_msg (c2h_msg[f]),
      .running (running[f]), .done (done[f]), .converged (converged[f]), .overflow (overflow[f]),
      .edges_processed (c_ep[f]), .edges_skipped (), .updates_applied (), .apply_forwards (),
      .bin_full_flushes (), .frontiers_exported (c_fe[f]), .frontiers_imported (c_fi[f]),
      .barrier_stalls (), .bypassed (), .overlap_pepu_au (), .overlap_comp_comm (c_occ[f])
    );
    for (genvar p = 0; p < NPE; p++) begin : g_ch
      localparam int G = f * NPE + p;
      hbm_model #(.LATENCY(6), .STALL_PCT(10), .SEED(G + 3)) u_hbm (
        .clk, .rst_n, .req_valid (w_req_valid[f][p]), .req_ready (w_req_ready[f][p]),
        .req (w_req[f][p]), .rsp_valid (w_rsp_valid[f][p]), .rsp_data (w_rsp_data[f][p])
      );
      always @(ev_load) begin
        automatic int cnt [NB];
        u_hbm.clear();
        foreach (cnt[k]) cnt[k] = 0;
        if (f < nf) begin
          foreach (edges[i]) begin
            if (owner_gid(int'(edges[i].dst)) == G) begin
              automatic int k = int'(edges[i].src) / ivs;
              u_hbm.poke(addr_t'(EDGE_BASE + EDGE_STRIDE * k + cnt[k]), word_t'(edges[i]));
              cnt[k]++;
            end
          end
          for (int k = 0; k < ni; k++)
            u_hbm.poke(addr_t'(k), word_t'({32'(cnt[k]), 32'(EDGE_BASE + EDGE_STRIDE * k)}));
          for (int v = 0; v < NV; v++)
            if (owner_gid(v) == G) u_hbm.poke(addr_t'(prop_addr(v)), word_t'(P0[v]));
        end
        n_loaded++;
      end
      always @(ev_check) begin
        if (f < nf) begin
          for (int v = 0; v < NV; v++) begin
            if (owner_gid(v) == G) begin
              automatic word_t w = u_hbm.peek(addr_t'(prop_addr(v)));
              checks++;
              if (w[31:0] != P[v]) begin
                failures++;
                if (failures < 10) $display("FAIL: %0d cards: property of vertex %0d = %0d, expected %0d",
                                            nf, v, w[31:0], P[v]);
              end
            end
          end
        end
        n_checked++;
      end
    end
    hbm_model #(.LATENCY(6), .STALL_PCT(10), .SEED(f + 77)) u_fhbm (
      .clk, .rst_n, .req_valid (f_req_valid[f]), .req_ready (f_req_ready[f]),
      .req (f_req[f]), .rsp_valid (f_rsp_valid[f]), .rsp_data (f_rsp_data[f])
    );
    always @(ev_load) begin
      u_fhbm.clear();
      for (int v = 0; v < NV; v++) u_fhbm.poke(addr_t'(v), word_t'(S0[v]));
      n_loaded++;
    end
  end

  // host: every message of an active card goes to every active card, in order
  fmsg_t hq [NFMAX][$];
  always @(posedge clk) begin
    if (rst_n) begin
      for (int f = 0; f < NFMAX; f++)
        if (c2h_valid[f] && c2h_ready[f])
          for (int d = 0; d < nf; d++) hq[d].push_back(c2h_msg[f]);
      for (int d = 0; d < NFMAX; d++)
        if (h2c_valid[d] && h2c_ready[d]) void'(hq[d].pop_front());
      for (int f = 0; f < NFMAX; f++) c2h_ready[f] <= ($urandom_range(0, 5) != 0);
    end
  end
  always_comb begin
    for (int d = 0; d < NFMAX; d++) begin
      h2c_valid[d] = (hq[d].size() != 0);
      h2c_msg[d]   = (hq[d].size() != 0) ? hq[d][0] : '0;
    end
  end

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  function automatic bit all_done();
    for (int f = 0; f < nf; f++) if (!done[f] || hq[f].size() != 0) return 0;
    return 1;
  endfunction

  // one run; returns the cycle count
  int edges_done;
  task automatic run(int cards, bit s, output int cycles);
    nf = cards; log2_nf = (cards == 8) ? 2'd3 : 2'd2;
    ivs = AD * NPE * cards; ni = NV / ivs;
    sync_m = s;
    foreach (init_active[k]) begin
      init_active[k] = 0;
      if (k < ni) for (int j = 0; j < ivs; j++) if (S0[k * ivs + j].tag >= 1) init_active[k] = 1;
    end
    rst_n <= 0;
    repeat (3) @(posedge clk);
    rst_n <= 1;
    n_loaded = 0;
    -> ev_load;
    wait (n_loaded == NFMAX * (NPE + 1));
    repeat (3) @(posedge clk);
    for (int f = 0; f < nf; f++) start[f] <= 1;
    @(posedge clk);
    for (int f = 0; f < NFMAX; f++) start[f] <= 0;
    @(posedge clk);
    cycles = 0;
    while (!all_done()) begin
      @(posedge clk);
      cycles++;
    end
    repeat (20) @(posedge clk);
    for (int f = 0; f < nf; f++) check(!overflow[f], $sformatf("%0d cards: no overflow", cards));
    edges_done = 0;
    for (int f = 0; f < nf; f++) edges_done += int'(c_ep[f]);
    if (s) begin
      n_checked = 0;
      -> ev_check;
      wait (n_checked == NFMAX * NPE);
    end else begin
      automatic int exported = 0;
      for (int f = 0; f < nf; f++) exported += int'(c_fe[f]);
      for (int f = 0; f < nf; f++)
        check(int'(c_fi[f]) == exported, $sformatf("%0d cards async: card %0d imported every frontier", cards, f));
      for (int f = 0; f < nf; f++)
        check(c_occ[f] > 0, $sformatf("%0d cards async: card %0d computed while communicating", cards, f));
    end
  endtask

  // RMAT-style vertex pair: 8 levels of quadrant choice
  function automatic void rmat_pair(output int u, output int v);
    u = 0; v = 0;
    for (int l = 0; l < 8; l++) begin
      automatic int r = $urandom_range(0, 99);
      u = u * 2 + ((r >= 76) ? 1 : 0);            // quadrants 3 (0.19) and 4 (0.05)
      v = v * 2 + ((r >= 57 && r < 76) || r >= 95 ? 1 : 0);
    end
  endfunction

  initial begin
    #40000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int cyc [2][2];
  initial begin
    foreach (start[f]) start[f] = 0;
    sync_m = 0; log2_nf = 2'd2;
    foreach (c2h_ready[f]) c2h_ready[f] = 1;
    foreach (edges[i]) begin
      int u, v;
      rmat_pair(u, v);
      edges[i].src    = vid_t'(u);
      edges[i].dst    = vid_t'(v);
      edges[i].weight = prop_t'(1);
    end
    for (int v = 0; v < NV; v++) begin
      S0[v].prop = prop_t'($urandom_range(1, 9));
      S0[v].tag  = tag_t'($urandom_range(0, 3) == 0 ? 0 : 1);
      P0[v]      = $urandom_range(0, 20);
    end
    // reference: bulk-synchronous iterations (independent of the cluster size)
    S = S0; P = P0;
    for (int it = 1; it <= ITERS; it++) begin
      automatic bit ch [NV];
      foreach (edges[i]) begin
        automatic int u = int'(edges[i].src), v = int'(edges[i].dst);
        if (int'(S[u].tag) >= it) begin
          P[v] += S[u].prop;
          ch[v] = 1;
        end
      end
      for (int v = 0; v < NV; v++) if (ch[v]) begin
        S[v].prop = P[v];
        S[v].tag  = tag_t'(it + 1);
      end
    end
    for (int c = 0; c < 2; c++) begin
      run(c == 0 ? 4 : 8, 1, cyc[c][0]);
      $display("%0d cards synchronous: %0d cycles, %0d active edges", c == 0 ? 4 : 8, cyc[c][0], edges_done);
      run(c == 0 ? 4 : 8, 0, cyc[c][1]);
      $display("%0d cards asynchronous: %0d cycles, %0d active edges", c == 0 ? 4 : 8, cyc[c][1], edges_done);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
