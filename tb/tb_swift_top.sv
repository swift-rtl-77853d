// tb_swift_top: end-to-end test of a two-FPGA Swift cluster.
//
// Two swift_top instances (FPGA 0 and 1) each get NUM_PE behavioural worker
// HBM channels and a frontier HBM channel. A host model stands for the
// shared host buffer and the DMA engine: every frontier message an FPGA
// exports is queued, in order, for import by both FPGAs. The test generates
// a random graph, partitions it the way the host pre-processing does
// (destination vertices in blocks of APPLY_DEPTH over all PEs of the
// cluster, edges with their destination's PE, sorted by source interval),
// and runs SpMV for ITERS iterations:
//   1. bulk-synchronous mode: the result is deterministic, so every
//      destination property in HBM and every FPGA's frontier copy is
//      compared with a reference computed here;
//   2. asynchronous mode from the same start: checks that the run ends with
//      every interval done and that the decoupled overlap happened;
//   3. bulk-synchronous mode on a graph whose activity dies out (all edges
//      lead into the last interval, which has no outgoing edges) with an
//      iteration limit of 6: the run must stop on convergence, and the
//      result is again compared with the reference.
// It counts how often each mechanism occurred (skipped inactive edges,
// skipped inactive interval, full-bin flush, apply forwarding, barrier
// stall, overlap of PE&PU with AU, overlap of computation with import or
// export, stop on convergence) and counts a failure for any that never did. Sizes are reduced:
// 2 PEs per FPGA, 4 intervals of 16 vertices.
`timescale 1ns/1ps
module tb_swift_top;
  import swift_pkg::*;
  localparam int NPE = 2, NF = 2, AD = 4, NB = 8, BD = 2, CAP = 64;
  localparam int NI = 4, IVS = AD * NPE * NF, NV = NI * IVS;
  localparam int PROP_BASE = NB, EDGE_BASE = 4096;
  localparam int NE = 260, ITERS = 3;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic start, sync_m;
  tag_t max_it;
  logic init_active [NB];

  // per FPGA signals
  logic     w_req_valid [NF][NPE];
  logic     w_req_ready [NF][NPE];
  mem_req_t w_req       [NF][NPE];
  logic     w_rsp_valid [NF][NPE];
  word_t    w_rsp_data  [NF][NPE];
  logic     f_req_valid [NF], f_req_ready [NF], f_rsp_valid [NF];
  mem_req_t f_req [NF];
  word_t    f_rsp_data [NF];
  logic     h2c_valid [NF], h2c_ready [NF], c2h_valid [NF], c2h_ready [NF];
  fmsg_t    h2c_msg [NF], c2h_msg [NF];
  logic     running [NF], done [NF], converged [NF], overflow [NF];
  logic [31:0] c_ep [NF], c_es [NF], c_ua [NF], c_af [NF], c_bf [NF], c_fe [NF], c_fi [NF];
  logic [31:0] c_bs [NF], c_by [NF], c_opa [NF], c_occ [NF];

  for (genvar f = 0; f < NF; f++) begin : g_fpga
    swift_top #(.NUM_PE(NPE), .MAX_FPGAS(NF), .APPLY_DEPTH(AD), .MAX_INTERVALS(NB),
                .BIN_DEPTH(BD), .BIN_CAP(CAP), .FR_DEPTH(4)) u_fpga (
      .clk, .rst_n, .start, .cfg_algo (ALGO_SPMV), .cfg_num_intervals (ivl_t'(NI)),
      .cfg_max_iter (max_it), .cfg_log2_fpgas (2'd1), .cfg_fpga_id (4'(f)),
      .cfg_sync (sync_m), .init_active,
      .w_req_valid (w_req_valid[f]), .w_req_ready (w_req_ready[f]), .w_req (w_req[f]),
      .w_rsp_valid (w_rsp_valid[f]), .w_rsp_data (w_rsp_data[f]),
      .f_req_valid (f_req_valid[f]), .f_req_ready (f_req_ready[f]), .f_req (f_req[f]),
      .f_rsp_valid (f_rsp_valid[f]), .f_rsp_data (f_rsp_data[f]),
      .h2c_valid (h2c_valid[f]), .h2c_ready (h2c_ready[f]), .h2c_msg (h2c_msg[f]),
      .c2h_valid (c2h_valid[f]), .c2h_ready (c2h_ready[f]), .c2h_msg (c2h_msg[f]),
      .running (running[f]), .done (done[f]), .converged (converged[f]), .overflow (overflow[f]),
      .edges_processed (c_ep[f]), .edges_skipped (c_es[f]), .updates_applied (c_ua[f]),
      .apply_forwards (c_af[f]), .bin_full_flushes (c_bf[f]), .frontiers_exported (c_fe[f]),
      .frontiers_imported (c_fi[f]), .barrier_stalls (c_bs[f]), .bypassed (c_by[f]),
      .overlap_pepu_au (c_opa[f]), .overlap_comp_comm (c_occ[f])
    );
    for (genvar p = 0; p < NPE; p++) begin : g_ch
      hbm_model #(.LATENCY(6), .STALL_PCT(15), .SEED(100 * f + p + 1)) u_hbm (
        .clk, .rst_n, .req_valid (w_req_valid[f][p]), .req_ready (w_req_ready[f][p]),
        .req (w_req[f][p]), .rsp_valid (w_rsp_valid[f][p]), .rsp_data (w_rsp_data[f][p])
      );
    end
    hbm_model #(.LATENCY(6), .STALL_PCT(15), .SEED(100 * f + 50)) u_fhbm (
      .clk, .rst_n, .req_valid (f_req_valid[f]), .req_ready (f_req_ready[f]),
      .req (f_req[f]), .rsp_valid (f_rsp_valid[f]), .rsp_data (f_rsp_data[f])
    );
  end

  // ---------------------------------------------------------------------
  // host: forward every exported message to both FPGAs, in order
  fmsg_t hq [NF][$];
  always @(posedge clk) begin
    if (rst_n) begin
      for (int f = 0; f < NF; f++) begin
        if (c2h_valid[f] && c2h_ready[f])
          for (int d = 0; d < NF; d++) hq[d].push_back(c2h_msg[f]);
      end
      for (int d = 0; d < NF; d++) begin
        if (h2c_valid[d] && h2c_ready[d]) void'(hq[d].pop_front());
      end
      for (int f = 0; f < NF; f++) c2h_ready[f] <= ($urandom_range(0, 4) != 0);
    end
  end
  always_comb begin
    for (int d = 0; d < NF; d++) begin
      h2c_valid[d] = (hq[d].size() != 0);
      h2c_msg[d]   = (hq[d].size() != 0) ? hq[d][0] : '0;
    end
  end

  // ---------------------------------------------------------------------
  int checks = 0, failures = 0;
  edge_t      edges [NE];
  src_entry_t S0 [NV];
  int unsigned P0 [NV];
  src_entry_t S [NV];
  int unsigned P [NV];

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  function automatic int owner_gid(int v);  return (v / AD) % (NPE * NF); endfunction
  function automatic int prop_addr(int v);  return PROP_BASE + (v / IVS) * AD + (v % AD); endfunction

  // lay the graph and the start state into the HBM models
  task automatic load_graph();
    int cnt [NF][NPE][NI];
    foreach (cnt[f, p, k]) cnt[f][p][k] = 0;
    for (int f = 0; f < NF; f++) begin
      for (int p = 0; p < NPE; p++) begin
        case (f * NPE + p)
          0: g_fpga[0].g_ch[0].u_hbm.clear();
          1: g_fpga[0].g_ch[1].u_hbm.clear();
          2: g_fpga[1].g_ch[0].u_hbm.clear();
          default: g_fpga[1].g_ch[1].u_hbm.clear();
        endcase
      end
    end
    g_fpga[0].u_fhbm.clear();
    g_fpga[1].u_fhbm.clear();
    foreach (edges[i]) begin
      automatic int g = owner_gid(int'(edges[i].dst));
      automatic int k = int'(edges[i].src) / IVS;
      automatic addr_t a = addr_t'(EDGE_BASE + 256 * k + cnt[g / NPE][g % NPE][k]);
      cnt[g / NPE][g % NPE][k]++;
      poke_w(g, a, word_t'(edges[i]));
    end
    for (int g = 0; g < NF * NPE; g++)
      for (int k = 0; k < NI; k++)
        poke_w(g, addr_t'(k), word_t'({32'(cnt[g / NPE][g % NPE][k]), 32'(EDGE_BASE + 256 * k)}));
    for (int v = 0; v < NV; v++) begin
      poke_w(owner_gid(v), addr_t'(prop_addr(v)), word_t'(P0[v]));
      g_fpga[0].u_fhbm.poke(addr_t'(v), word_t'(S0[v]));
      g_fpga[1].u_fhbm.poke(addr_t'(v), word_t'(S0[v]));
    end
  endtask

  task automatic poke_w(int g, addr_t a, word_t d);
    case (g)
      0: g_fpga[0].g_ch[0].u_hbm.poke(a, d);
      1: g_fpga[0].g_ch[1].u_hbm.poke(a, d);
      2: g_fpga[1].g_ch[0].u_hbm.poke(a, d);
      default: g_fpga[1].g_ch[1].u_hbm.poke(a, d);
    endcase
  endtask

  function automatic word_t peek_w(int g, addr_t a);
    case (g)
      0: return g_fpga[0].g_ch[0].u_hbm.peek(a);
      1: return g_fpga[0].g_ch[1].u_hbm.peek(a);
      2: return g_fpga[1].g_ch[0].u_hbm.peek(a);
      default: return g_fpga[1].g_ch[1].u_hbm.peek(a);
    endcase
  endfunction

  task automatic run(bit s, output int cycles);
    sync_m = s;
    rst_n <= 0;
    repeat (3) @(posedge clk);
    rst_n <= 1;
    load_graph();
    repeat (3) @(posedge clk);
    start <= 1;
    @(posedge clk);
    start <= 0;
    cycles = 0;
    @(posedge clk);
    while (!(done[0] && done[1] && hq[0].size() == 0 && hq[1].size() == 0)) begin
      @(posedge clk);
      cycles++;
    end
    repeat (20) @(posedge clk);
  endtask

  initial begin
    #50000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int n_skip_ref, cyc_sync, cyc_async, cyc_conv;
  int m_skip, m_bypass, m_flush, m_fwd, m_stall, m_opa, m_occ, m_conv;

  initial begin
    start = 0; sync_m = 0;
    for (int d = 0; d < NF; d++) c2h_ready[d] = 1;
    // graph and start state: interval 2 has no active vertex
    foreach (edges[i]) begin
      edges[i].src    = vid_t'($urandom_range(0, NV - 1));
      edges[i].dst    = vid_t'($urandom_range(0, NV - 1));
      edges[i].weight = prop_t'($urandom_range(1, 3));
    end
    for (int i = 0; i < 8; i++) edges[i].dst = vid_t'(5);     // repeated destination
    for (int v = 0; v < NV; v++) begin
      S0[v].prop = prop_t'($urandom_range(1, 9));
      S0[v].tag  = (v / IVS == 2) ? tag_t'(0) : tag_t'($urandom_range(0, 1));
      P0[v]      = $urandom_range(0, 50);
    end
    foreach (init_active[k]) begin
      init_active[k] = 0;
      if (k < NI) for (int j = 0; j < IVS; j++) if (S0[k * IVS + j].tag >= 1) init_active[k] = 1;
    end
    // reference: bulk-synchronous SpMV iterations
    reference(ITERS);
    max_it = tag_t'(ITERS);

    // ---- 1: bulk-synchronous run, exact comparison
    run(1, cyc_sync);
    compare("sync");
    check(int'(c_es[0] + c_es[1]) == n_skip_ref, $sformatf("sync: skipped edges %0d vs %0d",
                                                        c_es[0] + c_es[1], n_skip_ref));
    check(!converged[0] && !converged[1], "sync: ran to the iteration limit");
    m_skip = int'(c_es[0] + c_es[1]);
    m_bypass = int'(c_by[0] + c_by[1]);
    m_flush = int'(c_bf[0] + c_bf[1]);
    m_fwd = int'(c_af[0] + c_af[1]);
    m_stall = int'(c_bs[0] + c_bs[1]);
    m_opa = 0; m_occ = 0;

    // ---- 2: asynchronous run from the same start
    run(0, cyc_async);
    check(done[0] && done[1], "async: both FPGAs finished");
    check(!overflow[0] && !overflow[1], "async: no overflow");
    check(c_fe[0] + c_fe[1] > 0, "async: frontiers exported");
    check(c_fi[0] == c_fi[1] && c_fi[0] == c_fe[0] + c_fe[1], "async: every frontier imported on both FPGAs");
    m_skip += int'(c_es[0] + c_es[1]);
    m_fwd += int'(c_af[0] + c_af[1]);
    m_opa = int'(c_opa[0] + c_opa[1]);
    m_occ = int'(c_occ[0] + c_occ[1]);

    // ---- 3: activity dies out; stop on convergence before the limit
    foreach (edges[i]) begin
      edges[i].src = vid_t'(int'(edges[i].src) % (3 * IVS));
      edges[i].dst = vid_t'(3 * IVS + int'(edges[i].dst) % IVS);
    end
    max_it = tag_t'(6);
    reference(6);
    run(1, cyc_conv);
    compare("converging");
    m_conv = int'(converged[0]) + int'(converged[1]);
    check(converged[0] && converged[1], "converging: both FPGAs stopped on convergence");
    check(cyc_conv < cyc_sync, "converging: stopped before the iteration limit");
    $display("cycles: sync %0d, async %0d, converging %0d", cyc_sync, cyc_async, cyc_conv);
    $display("mechanisms: inactive-edge skip %0d, inactive-interval skip %0d, full-bin flush %0d, apply forward %0d, barrier stall %0d, PE&PU/AU overlap %0d, compute/communication overlap %0d, convergence stop %0d",
             m_skip, m_bypass, m_flush, m_fwd, m_stall, m_opa, m_occ, m_conv);
    check(m_skip > 0, "mechanism: inactive edges skipped");
    check(m_bypass > 0, "mechanism: inactive interval skipped to export");
    check(m_flush > 0, "mechanism: full bin flushed");
    check(m_fwd > 0, "mechanism: apply forwarding");
    check(m_stall > 0, "mechanism: barrier stall in synchronous mode");
    check(m_opa > 0, "mechanism: PE&PU overlapped AU");
    check(m_occ > 0, "mechanism: computation overlapped communication");
    check(m_conv > 0, "mechanism: stop on convergence");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic reference(int iters);
    S = S0; P = P0; n_skip_ref = 0;
    for (int it = 1; it <= iters; it++) begin
      bit ch [NV];
      foreach (ch[v]) ch[v] = 0;
      foreach (edges[i]) begin
        automatic int u = int'(edges[i].src), v = int'(edges[i].dst);
        if (int'(S[u].tag) >= it) begin
          P[v] += edges[i].weight * S[u].prop;
          ch[v] = 1;
        end else if (!(it == 1 && !init_active[u / IVS])) n_skip_ref++;
      end
      foreach (ch[v]) if (ch[v]) begin
        S[v].prop = P[v];
        S[v].tag  = tag_t'(it + 1);
      end
    end

  endtask

  task automatic compare(string what);
    for (int v = 0; v < NV; v++) begin
      automatic word_t w = peek_w(owner_gid(v), addr_t'(prop_addr(v)));
      check(w[31:0] == P[v], $sformatf("%s: property of vertex %0d = %0d, expected %0d", what, v, w[31:0], P[v]));
      for (int f = 0; f < NF; f++) begin
        automatic word_t s = (f == 0) ? g_fpga[0].u_fhbm.peek(addr_t'(v)) : g_fpga[1].u_fhbm.peek(addr_t'(v));
        check(s[39:0] == S[v], $sformatf("%s: frontier copy of vertex %0d on FPGA %0d", what, v, f));
      end
    end
    check(!overflow[0] && !overflow[1], {what, ": no overflow"});
  endtask

endmodule
