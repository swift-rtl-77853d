// tb_swift_top_full: one complete SpMV run of swift_top with every
// parameter at its default (32 PEs, 512-vertex apply buffers, 2048 interval
// bins, frontier buffers of 16, room for 8 FPGAs).
//
// The cluster is configured as a single FPGA, so an interval holds
// 512 * 32 = 16384 vertices; the graph has two intervals (32768 vertices)
// and NE random weighted edges, placed the way the host pre-processing
// places them: destination vertices in blocks of 512 over the 32 PEs, each
// PE's edges grouped by source interval behind a per-interval table entry.
// The host model feeds every exported frontier back to the same FPGA. The
// run is bulk-synchronous, so the result is exact: after ITERS iterations
// every destination property in the worker HBM channels and the frontier
// copy in the frontier HBM channel are compared with a reference computed
// here. Each worker channel loads and checks its own share of the vertices
// from inside the generate loop.
`timescale 1ns/1ps
module tb_swift_top_full;
  import swift_pkg::*;
  localparam int NPE = 32, AD = 512, NBINS = 2048;
  localparam int NI = 2, IVS = AD * NPE, NV = NI * IVS;
  localparam int PROP_BASE = NBINS, EDGE_BASE = 32'h0200_0000, EDGE_STRIDE = 32'h0001_0000;
  localparam int NE = 3000, ITERS = 2;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic start = 0;
  logic init_active [2048];

  logic     w_req_valid [NPE];
  logic     w_req_ready [NPE];
  mem_req_t w_req       [NPE];
  logic     w_rsp_valid [NPE];
  word_t    w_rsp_data  [NPE];
  logic     f_req_valid, f_req_ready, f_rsp_valid;
  mem_req_t f_req;
  word_t    f_rsp_data;
  logic     h2c_valid, h2c_ready, c2h_valid, c2h_ready;
  fmsg_t    h2c_msg, c2h_msg;
  logic     running, done, converged, overflow;
  logic [31:0] c_ep, c_es, c_ua, c_af, c_bf, c_fe, c_fi, c_bs, c_by, c_opa, c_occ;

  swift_top u_dut (
    .clk, .rst_n, .start, .cfg_algo (ALGO_SPMV), .cfg_num_intervals (ivl_t'(NI)),
    .cfg_max_iter (tag_t'(ITERS)), .cfg_log2_fpgas (2'd0), .cfg_fpga_id (4'd0),
    .cfg_sync (1'b1), .init_active,
    .w_req_valid, .w_req_ready, .w_req, .w_rsp_valid, .w_rsp_data,
    .f_req_valid, .f_req_ready, .f_req, .f_rsp_valid, .f_rsp_data,
    .h2c_valid, .h2c_ready, .h2c_msg, .c2h_valid, .c2h_ready, .c2h_msg,
    .running, .done, .converged, .overflow,
    .edges_processed (c_ep), .edges_skipped (c_es), .updates_applied (c_ua),
    .apply_forwards (c_af), .bin_full_flushes (c_bf), .frontiers_exported (c_fe),
    .frontiers_imported (c_fi), .barrier_stalls (c_bs), .bypassed (c_by),
    .overlap_pepu_au (c_opa), .overlap_comp_comm (c_occ)
  );

  int checks = 0, failures = 0;
  edge_t       edges [NE];
  src_entry_t  S0 [NV];
  int unsigned P0 [NV];
  src_entry_t  S [NV];
  int unsigned P [NV];
  event ev_load, ev_check;
  int  n_loaded = 0, n_checked = 0;

  function automatic int owner(int v);     return (v / AD) % NPE; endfunction
  function automatic int prop_addr(int v); return PROP_BASE + (v / IVS) * AD + (v % AD); endfunction

  for (genvar p = 0; p < NPE; p++) begin : g_ch
    hbm_model #(.LATENCY(8), .STALL_PCT(10), .SEED(p + 7)) u_hbm (
      .clk, .rst_n, .req_valid (w_req_valid[p]), .req_ready (w_req_ready[p]),
      .req (w_req[p]), .rsp_valid (w_rsp_valid[p]), .rsp_data (w_rsp_data[p])
    );
    // load this channel's edges, edge table and destination properties
    always @(ev_load) begin
      automatic int cnt [NI];
      foreach (cnt[k]) cnt[k] = 0;
      foreach (edges[i]) begin
        if (owner(int'(edges[i].dst)) == p) begin
          automatic int k = int'(edges[i].src) / IVS;
          u_hbm.poke(addr_t'(EDGE_BASE + EDGE_STRIDE * k + cnt[k]), word_t'(edges[i]));
          cnt[k]++;
        end
      end
      for (int k = 0; k < NI; k++)
        u_hbm.poke(addr_t'(k), word_t'({32'(cnt[k]), 32'(EDGE_BASE + EDGE_STRIDE * k)}));
      for (int v = 0; v < NV; v++)
        if (owner(v) == p) u_hbm.poke(addr_t'(prop_addr(v)), word_t'(P0[v]));
      n_loaded++;
    end
    // compare this channel's destination properties with the reference
    always @(ev_check) begin
      for (int v = 0; v < NV; v++) begin
        if (owner(v) == p) begin
          automatic word_t w = u_hbm.peek(addr_t'(prop_addr(v)));
          checks++;
          if (w[31:0] != P[v]) begin
            failures++;
            if (failures < 10) $display("FAIL: property of vertex %0d = %0d, expected %0d", v, w[31:0], P[v]);
          end
        end
      end
      n_checked++;
    end
  end

  hbm_model #(.LATENCY(8), .STALL_PCT(10), .SEED(99)) u_fhbm (
    .clk, .rst_n, .req_valid (f_req_valid), .req_ready (f_req_ready),
    .req (f_req), .rsp_valid (f_rsp_valid), .rsp_data (f_rsp_data)
  );

  // host: exported frontiers return to the same (only) FPGA
  fmsg_t hq [$];
  always @(posedge clk) begin
    if (rst_n) begin
      if (c2h_valid && c2h_ready) hq.push_back(c2h_msg);
      if (h2c_valid && h2c_ready) void'(hq.pop_front());
    end
  end
  assign c2h_ready = 1'b1;
  always_comb begin
    h2c_valid = (hq.size() != 0);
    h2c_msg   = (hq.size() != 0) ? hq[0] : '0;
  end

  initial begin
    #20000000;
    failures++;
    $display("watchdog: no completion");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int cycles;
  initial begin
    foreach (edges[i]) begin
      edges[i].src    = vid_t'($urandom_range(0, NV - 1));
      edges[i].dst    = vid_t'($urandom_range(0, NV - 1));
      edges[i].weight = prop_t'($urandom_range(1, 3));
    end
    for (int v = 0; v < NV; v++) begin
      S0[v].prop = prop_t'($urandom_range(1, 9));
      S0[v].tag  = tag_t'($urandom_range(0, 1));
      P0[v]      = $urandom_range(0, 50);
    end
    foreach (init_active[k]) begin
      init_active[k] = 0;
      if (k < NI) for (int j = 0; j < IVS; j++) if (S0[k * IVS + j].tag >= 1) init_active[k] = 1;
    end
    S = S0; P = P0;
    for (int it = 1; it <= ITERS; it++) begin
      automatic bit ch [NV];
      foreach (edges[i]) begin
        automatic int u = int'(edges[i].src), v = int'(edges[i].dst);
        if (int'(S[u].tag) >= it) begin
          P[v] += edges[i].weight * S[u].prop;
          ch[v] = 1;
        end
      end
      for (int v = 0; v < NV; v++) if (ch[v]) begin
        S[v].prop = P[v];
        S[v].tag  = tag_t'(it + 1);
      end
    end

    repeat (4) @(posedge clk);
    rst_n <= 1;
    -> ev_load;
    wait (n_loaded == NPE);
    for (int v = 0; v < NV; v++) u_fhbm.poke(addr_t'(v), word_t'(S0[v]));
    repeat (3) @(posedge clk);
    start <= 1;
    @(posedge clk);
    start <= 0;
    @(posedge clk);
    cycles = 0;
    while (!(done && hq.size() == 0)) begin
      @(posedge clk);
      cycles++;
    end
    repeat (20) @(posedge clk);
    -> ev_check;
    wait (n_checked == NPE);
    for (int v = 0; v < NV; v++) begin
      automatic word_t s = u_fhbm.peek(addr_t'(v));
      checks++;
      if (s[39:0] != S[v]) begin
        failures++;
        if (failures < 10) $display("FAIL: frontier copy of vertex %0d", v);
      end
    end
    checks++;
    if (converged) begin failures++; $display("FAIL: stopped early although frontiers remained"); end
    checks++;
    if (overflow) begin failures++; $display("FAIL: update bin overflow"); end
    checks++;
    if (c_ep == 0 || c_fe == 0 || c_fi != c_fe) begin
      failures++;
      $display("FAIL: counters edges %0d exported %0d imported %0d", c_ep, c_fe, c_fi);
    end
    $display("cycles %0d: edges processed %0d skipped %0d, updates applied %0d, frontiers %0d, forwards %0d, barrier stalls %0d",
             cycles, c_ep, c_es, c_ua, c_fe, c_af, c_bs);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
