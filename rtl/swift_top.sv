// swift_top: one FPGA of a Swift multi-FPGA graph accelerator.
//
// The FPGA owns a share of the graph's destination vertices and their
// incoming edges, spread over NUM_PE worker HBM channels with one processing
// element (PE) each, plus a full copy of all source vertex properties in a
// separate frontier HBM channel. The interval scheduler moves every source
// interval through process-edges/partition-updates (after the source
// interval broadcaster has copied the interval into every PE), apply-updates
// (which produces the active frontiers), export-frontier (frontiers leave for
// the host over the card-to-host stream) and import-frontier (frontiers of
// all FPGAs arrive over the host-to-card stream and are written into the
// frontier HBM). Different intervals are in different steps at the same
// time, which overlaps computation inside the FPGA with PCIe communication.
//
// Ports: configuration and start; one request/response port per worker HBM
// channel and one for the frontier channel (reads answered in order, any
// latency); the two host DMA frontier streams; status and event counters.
// The HBM, the DMA engine and the host that routes frontiers between FPGAs
// are outside this module. Vertex placement: an interval holds
// APPLY_DEPTH * NUM_PE * 2^cfg_log2_fpgas consecutive vertex IDs; within it,
// consecutive blocks of APPLY_DEPTH vertices belong to consecutive PEs of
// the whole cluster (PE number = fpga_id * NUM_PE + pe). NUM_PE = 32 follows
// the paper's 128 PEs on 4 FPGAs; the other sizes are this design's choices.
module swift_top
  import swift_pkg::*;
#(
  parameter int unsigned NUM_PE        = 32,
  parameter int unsigned MAX_FPGAS     = 8,
  parameter int unsigned APPLY_DEPTH   = 512,
  parameter int unsigned MAX_INTERVALS = 2048,
  parameter int unsigned BIN_DEPTH     = 8,
  parameter int unsigned BIN_CAP       = 1024,
  parameter int unsigned FR_DEPTH      = 16
) (
  input  logic       clk,
  input  logic       rst_n,
  // configuration
  input  logic       start,
  input  algo_e      cfg_algo,
  input  ivl_t       cfg_num_intervals,
  input  tag_t       cfg_max_iter,
  input  logic [1:0] cfg_log2_fpgas,      // cluster size 1, 2, 4 or 8
  input  logic [3:0] cfg_fpga_id,
  input  logic       cfg_sync,            // 1: bulk-synchronous iterations
  input  logic       init_active [MAX_INTERVALS],
  // worker HBM channels
  output logic       w_req_valid [NUM_PE],
  input  logic       w_req_ready [NUM_PE],
  output mem_req_t   w_req       [NUM_PE],
  input  logic       w_rsp_valid [NUM_PE],
  input  word_t      w_rsp_data  [NUM_PE],
  // frontier HBM channel
  output logic       f_req_valid,
  input  logic       f_req_ready,
  output mem_req_t   f_req,
  input  logic       f_rsp_valid,
  input  word_t      f_rsp_data,
  // host DMA frontier streams
  input  logic       h2c_valid,
  output logic       h2c_ready,
  input  fmsg_t      h2c_msg,
  output logic       c2h_valid,
  input  logic       c2h_ready,
  output fmsg_t      c2h_msg,
  // status
  output logic       running,
  output logic       done,
  output logic       converged,           // synchronous run stopped: no frontiers left
  output logic       overflow,
  output logic [31:0] edges_processed,
  output logic [31:0] edges_skipped,
  output logic [31:0] updates_applied,
  output logic [31:0] apply_forwards,
  output logic [31:0] bin_full_flushes,
  output logic [31:0] frontiers_exported,
  output logic [31:0] frontiers_imported,
  output logic [31:0] barrier_stalls,
  output logic [31:0] bypassed,
  output logic [31:0] overlap_pepu_au,    // cycles with PE&PU and AU both running
  output logic [31:0] overlap_comp_comm   // cycles computing while importing/exporting
);
  localparam int unsigned LOG2_APPLY = $clog2(APPLY_DEPTH);
  localparam int unsigned LOG2_PE    = $clog2(NUM_PE);
  localparam int unsigned SRC_DEPTH  = APPLY_DEPTH * NUM_PE * MAX_FPGAS;
  localparam int unsigned FW         = $clog2(FR_DEPTH) + 1;

  wire logic [5:0] bin_shift = 6'(LOG2_APPLY + LOG2_PE) + 6'(cfg_log2_fpgas);
  wire logic [3:0] num_fpgas = 4'd1 << cfg_log2_fpgas;

  // ------------------------------------------------------------------
  // scheduler
  logic s_pepu_start, s_pepu_slot, s_au_start, s_au_slot, s_ef_start;
  ivl_t s_pepu_ivl, s_au_ivl, s_ef_ivl;
  tag_t s_pepu_iter, s_au_iter;
  logic s_pepu_done, s_au_done, s_ef_done;
  logic imp_done, imp_enable;
  ivl_t imp_ivl;
  logic [31:0] sched_completed;

  interval_scheduler #(.MAX_INTERVALS(MAX_INTERVALS)) u_sched (
    .clk, .rst_n, .start, .cfg_num_intervals, .cfg_max_iter,
    .cfg_num_fpgas (num_fpgas), .cfg_sync, .init_active,
    .import_done (imp_done), .import_interval (imp_ivl),
    .frontier_in (h2c_valid && h2c_ready && h2c_msg.has_data),
    .pepu_start (s_pepu_start), .pepu_interval (s_pepu_ivl), .pepu_slot (s_pepu_slot),
    .pepu_iter (s_pepu_iter), .pepu_done (s_pepu_done),
    .au_start (s_au_start), .au_interval (s_au_ivl), .au_slot (s_au_slot),
    .au_iter (s_au_iter), .au_done (s_au_done),
    .ef_start (s_ef_start), .ef_interval (s_ef_ivl), .ef_done (s_ef_done),
    .import_enable (imp_enable), .running, .all_done (done), .converged, .barrier_stalls, .bypassed,
    .intervals_completed (sched_completed)
  );

  // ------------------------------------------------------------------
  // frontier HBM: 0 import writes, 1 broadcaster reads
  logic     fa_req_valid [2];
  logic     fa_req_ready [2];
  mem_req_t fa_req       [2];
  logic     fa_rsp_valid [2];
  word_t    fa_rsp_data;

  hbm_port_arbiter #(.N(2), .OUTSTANDING(32)) u_farb (
    .clk, .rst_n,
    .in_req_valid (fa_req_valid), .in_req_ready (fa_req_ready), .in_req (fa_req),
    .in_rsp_valid (fa_rsp_valid), .in_rsp_data (fa_rsp_data),
    .out_req_valid (f_req_valid), .out_req_ready (f_req_ready), .out_req (f_req),
    .out_rsp_valid (f_rsp_valid), .out_rsp_data (f_rsp_data)
  );

  import_frontier u_if (
    .clk, .rst_n, .enable (imp_enable), .h2c_valid, .h2c_ready, .h2c_msg,
    .req_valid (fa_req_valid[0]), .req_ready (fa_req_ready[0]), .req (fa_req[0]),
    .batch_done (imp_done), .batch_interval (imp_ivl), .frontiers_imported
  );

  // ------------------------------------------------------------------
  // PE&PU sequencing: broadcast the interval, then run all PEs
  logic        bc_start, bc_busy, bc_done, bc_we;
  logic [$clog2(SRC_DEPTH)-1:0] bc_waddr;
  src_entry_t  bc_wdata;
  vid_t        cur_base;
  logic        cur_slot;
  ivl_t        cur_ivl;
  tag_t        cur_iter;
  logic        pe_pepu_start;
  logic        pe_pepu_done [NUM_PE];
  logic        pe_pepu_busy [NUM_PE];
  logic [NUM_PE-1:0] pepu_seen;
  logic        seq_pepu;                 // broadcast or PE&PU in progress
  logic [31:0] bc_entries;

  source_interval_broadcaster #(.SRC_DEPTH(SRC_DEPTH)) u_bc (
    .clk, .rst_n, .start (bc_start), .base (cur_base),
    .count (32'd1 << bin_shift), .busy (bc_busy), .done (bc_done),
    .req_valid (fa_req_valid[1]), .req_ready (fa_req_ready[1]), .req_addr (fa_req[1].addr),
    .rsp_valid (fa_rsp_valid[1]), .rsp_data (fa_rsp_data),
    .bc_we, .bc_waddr, .bc_wdata, .entries_sent (bc_entries)
  );
  assign fa_req[1].we    = 1'b0;
  assign fa_req[1].wdata = '0;

  // AU sequencing
  logic              pe_au_done [NUM_PE];
  logic              pe_au_busy [NUM_PE];
  logic [NUM_PE-1:0] au_seen;
  logic              seq_au;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      bc_start      <= 1'b0;
      cur_base      <= '0;
      cur_slot      <= 1'b0;
      cur_ivl       <= '0;
      cur_iter      <= '0;
      pe_pepu_start <= 1'b0;
      pepu_seen     <= '0;
      seq_pepu      <= 1'b0;
      s_pepu_done   <= 1'b0;
      au_seen       <= '0;
      seq_au        <= 1'b0;
      s_au_done     <= 1'b0;
    end else begin
      bc_start      <= 1'b0;
      pe_pepu_start <= 1'b0;
      s_pepu_done   <= 1'b0;
      s_au_done     <= 1'b0;
      if (s_pepu_start) begin
        seq_pepu  <= 1'b1;
        bc_start  <= 1'b1;
        cur_base  <= vid_t'(s_pepu_ivl) << bin_shift;
        cur_slot  <= s_pepu_slot;
        cur_ivl   <= s_pepu_ivl;
        cur_iter  <= s_pepu_iter;
        pepu_seen <= '0;
      end
      if (bc_done) pe_pepu_start <= 1'b1;
      for (int p = 0; p < NUM_PE; p++) if (pe_pepu_done[p]) pepu_seen[p] <= 1'b1;
      if (seq_pepu && &pepu_seen) begin
        seq_pepu    <= 1'b0;
        pepu_seen   <= '0;
        s_pepu_done <= 1'b1;
      end
      if (s_au_start) begin
        seq_au  <= 1'b1;
        au_seen <= '0;
      end
      for (int p = 0; p < NUM_PE; p++) if (pe_au_done[p]) au_seen[p] <= 1'b1;
      if (seq_au && &au_seen) begin
        seq_au    <= 1'b0;
        au_seen   <= '0;
        s_au_done <= 1'b1;
      end
    end
  end

  // ------------------------------------------------------------------
  // processing elements
  logic  fr_valid [NUM_PE];
  logic  fr_ready [NUM_PE];
  fmsg_t fr_data  [NUM_PE];
  logic [FW-1:0] fr_count [NUM_PE];
  logic  pe_overflow [NUM_PE];
  logic  ef_busy;
  logic [31:0] c_ep [NUM_PE];
  logic [31:0] c_es [NUM_PE];
  logic [31:0] c_ua [NUM_PE];
  logic [31:0] c_af [NUM_PE];
  logic [31:0] c_bf [NUM_PE];

  for (genvar p = 0; p < NUM_PE; p++) begin : g_pe
    processing_element #(
      .SRC_DEPTH (SRC_DEPTH), .APPLY_DEPTH (APPLY_DEPTH), .NUM_BINS (MAX_INTERVALS),
      .BIN_DEPTH (BIN_DEPTH), .BIN_CAP (BIN_CAP), .FR_DEPTH (FR_DEPTH)
    ) u_pe (
      .clk, .rst_n, .cfg_algo, .cfg_bin_shift (bin_shift),
      .pe_gid (16'({cfg_fpga_id, LOG2_PE'(p)})),
      .src_we (bc_we), .src_waddr (bc_waddr), .src_wdata (bc_wdata),
      .pepu_start (pe_pepu_start), .pepu_interval (cur_ivl), .pepu_slot (cur_slot),
      .pepu_iter (cur_iter), .pepu_base (cur_base),
      .pepu_done (pe_pepu_done[p]), .pepu_busy (pe_pepu_busy[p]),
      .au_start (s_au_start), .au_interval (s_au_ivl), .au_slot (s_au_slot),
      .au_iter (s_au_iter), .au_done (pe_au_done[p]), .au_busy (pe_au_busy[p]),
      .fr_valid (fr_valid[p]), .fr_ready (fr_ready[p]), .fr_data (fr_data[p]),
      .fr_count (fr_count[p]),
      .hbm_req_valid (w_req_valid[p]), .hbm_req_ready (w_req_ready[p]), .hbm_req (w_req[p]),
      .hbm_rsp_valid (w_rsp_valid[p]), .hbm_rsp_data (w_rsp_data[p]),
      .overflow (pe_overflow[p]),
      .edges_processed (c_ep[p]), .edges_skipped (c_es[p]),
      .updates_applied (c_ua[p]), .apply_forwards (c_af[p]), .bin_full_flushes (c_bf[p])
    );
  end

  export_frontier #(.NUM_PE(NUM_PE), .FR_DEPTH(FR_DEPTH)) u_ef (
    .clk, .rst_n, .fr_valid, .fr_ready, .fr_data, .fr_count,
    .close_start (s_ef_start), .close_interval (s_ef_ivl), .close_busy (ef_busy),
    .close_done (s_ef_done), .c2h_valid, .c2h_ready, .c2h_msg, .frontiers_exported
  );

  // ------------------------------------------------------------------
  // status
  always_comb begin
    overflow         = 1'b0;
    edges_processed  = '0;
    edges_skipped    = '0;
    updates_applied  = '0;
    apply_forwards   = '0;
    bin_full_flushes = '0;
    for (int p = 0; p < NUM_PE; p++) begin
      overflow         = overflow | pe_overflow[p];
      edges_processed  = edges_processed + c_ep[p];
      edges_skipped    = edges_skipped + c_es[p];
      updates_applied  = updates_applied + c_ua[p];
      apply_forwards   = apply_forwards + c_af[p];
      bin_full_flushes = bin_full_flushes + c_bf[p];
    end
  end

  wire comm = (h2c_valid && h2c_ready) || (c2h_valid && c2h_ready);
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      overlap_pepu_au   <= '0;
      overlap_comp_comm <= '0;
    end else begin
      if (seq_pepu && seq_au) overlap_pepu_au <= overlap_pepu_au + 1;
      if ((seq_pepu || seq_au) && comm) overlap_comp_comm <= overlap_comp_comm + 1;
    end
  end
endmodule
