// processing_element: one Swift processing element (PE), bound to one worker
// HBM channel.
//
// A PE owns the destination vertices (and their incoming edges) that the
// host placed in its HBM channel. It holds two engines that share the
// channel through a round-robin request arbiter, so that the
// process-edges/partition-updates step of one interval can overlap the
// apply-updates step of another:
//
//  * PE&PU engine: reads the interval's edge-table word, streams the
//    interval's edges through process_edge (which reads the broadcast source
//    properties) and partition_updates, and writes each bin burst to the
//    update region of its slot in HBM, one region per destination interval.
//  * AU engine: for each destination interval with updates in the slot, loads
//    the PE's destination properties of that interval into apply_updates,
//    streams the updates in, writes the changed properties back and pushes
//    them as active frontiers into the PE's frontier FIFO.
//
// HBM channel layout (word addresses, one item per word):
//   [0, NUM_BINS)                 edge table: word k = {count[63:32], base[31:0]}
//                                 of the edges whose source is in interval k
//   PROP_BASE + b*APPLY_DEPTH + i destination property i of interval b
//   UPD_BASE + (s*NUM_BINS+b)*BIN_CAP + j   update j of interval b, slot s
//   edges: anywhere above UPD_END, as the edge table says
// Two update slots let one interval be partitioned while another is applied.
// A destination vertex v has local interval b = v >> cfg_bin_shift and local
// index v[LOG2_APPLY-1:0]; this is the interval-major placement across PEs
// and FPGAs described in the paper (consecutive blocks of APPLY_DEPTH
// vertices go to consecutive PEs of the whole cluster). The channel layout,
// the two slots and the per-bin region size BIN_CAP are this design's
// choices. A bin region that overflows drops the extra updates and sets
// overflow.
module processing_element
  import swift_pkg::*;
#(
  parameter int unsigned SRC_DEPTH   = 131072,
  parameter int unsigned APPLY_DEPTH = 512,
  parameter int unsigned NUM_BINS    = 2048,
  parameter int unsigned BIN_DEPTH   = 8,
  parameter int unsigned BIN_CAP     = 1024,
  parameter int unsigned FR_DEPTH    = 16
) (
  input  logic       clk,
  input  logic       rst_n,
  input  algo_e      cfg_algo,
  input  logic [5:0] cfg_bin_shift,
  input  logic [15:0] pe_gid,              // PE number in the whole cluster
  // VertexProperty buffer fill (from the source interval broadcaster)
  input  logic       src_we,
  input  logic [$clog2(SRC_DEPTH)-1:0] src_waddr,
  input  src_entry_t src_wdata,
  // process-edges + partition-updates command
  input  logic       pepu_start,
  input  ivl_t       pepu_interval,
  input  logic       pepu_slot,
  input  tag_t       pepu_iter,
  input  vid_t       pepu_base,            // first vertex of the source interval
  output logic       pepu_done,
  output logic       pepu_busy,
  // apply-updates command
  input  logic       au_start,
  input  ivl_t       au_interval,
  input  logic       au_slot,
  input  tag_t       au_iter,
  output logic       au_done,
  output logic       au_busy,
  // active frontiers
  output logic       fr_valid,
  input  logic       fr_ready,
  output fmsg_t      fr_data,
  output logic [$clog2(FR_DEPTH):0] fr_count,
  // worker HBM channel
  output logic       hbm_req_valid,
  input  logic       hbm_req_ready,
  output mem_req_t   hbm_req,
  input  logic       hbm_rsp_valid,
  input  word_t      hbm_rsp_data,
  // status
  output logic       overflow,
  output logic [31:0] edges_processed,
  output logic [31:0] edges_skipped,
  output logic [31:0] updates_applied,
  output logic [31:0] apply_forwards,
  output logic [31:0] bin_full_flushes
);
  localparam int unsigned LOG2_APPLY = $clog2(APPLY_DEPTH);
  localparam int unsigned BW         = $clog2(NUM_BINS);
  localparam int unsigned CW         = $clog2(BIN_CAP) + 1;
  localparam addr_t PROP_BASE = addr_t'(NUM_BINS);
  localparam addr_t UPD_BASE  = PROP_BASE + addr_t'(NUM_BINS * APPLY_DEPTH);
  typedef logic [BW-1:0] bin_t;
  typedef logic [CW-1:0] bcnt_t;

  // ------------------------------------------------------------------
  // channel arbiter: 0 PE&PU reads, 1 PE&PU writes, 2 AU reads, 3 AU writes
  logic     a_req_valid [4];
  logic     a_req_ready [4];
  mem_req_t a_req       [4];
  logic     a_rsp_valid [4];
  word_t    a_rsp_data;

  hbm_port_arbiter #(.N(4), .OUTSTANDING(64)) u_arb (
    .clk, .rst_n,
    .in_req_valid (a_req_valid), .in_req_ready (a_req_ready), .in_req (a_req),
    .in_rsp_valid (a_rsp_valid), .in_rsp_data (a_rsp_data),
    .out_req_valid (hbm_req_valid), .out_req_ready (hbm_req_ready), .out_req (hbm_req),
    .out_rsp_valid (hbm_rsp_valid), .out_rsp_data (hbm_rsp_data)
  );

  // per-slot, per-bin update counts in HBM
  bcnt_t bcnt [2*NUM_BINS];

  // ------------------------------------------------------------------
  // PE&PU engine
  typedef enum logic [2:0] {E_IDLE, E_TABLE, E_EDGES, E_RUN, E_FLUSH} e_state_e;
  e_state_e es;
  logic   e_slot;
  tag_t   e_iter;
  vid_t   e_base;
  logic   e_rd_start, e_rd_busy, e_rd_done;
  addr_t  e_rd_base;
  logic [31:0] e_rd_count;
  logic   e_out_valid, e_out_ready;
  word_t  e_out_data;
  logic   e_edges_done;

  hbm_stream_reader #(.DEPTH(16)) u_erd (
    .clk, .rst_n, .start (e_rd_start), .base (e_rd_base), .count (e_rd_count),
    .busy (e_rd_busy), .done (e_rd_done),
    .req_valid (a_req_valid[0]), .req_ready (a_req_ready[0]), .req_addr (a_req[0].addr),
    .rsp_valid (a_rsp_valid[0]), .rsp_data (a_rsp_data),
    .out_valid (e_out_valid), .out_ready (e_out_ready), .out_data (e_out_data)
  );
  assign a_req[0].we    = 1'b0;
  assign a_req[0].wdata = '0;

  logic    pe_edge_ready, pe_busy;
  logic    pe_upd_valid, pe_upd_ready;
  update_t pe_upd;

  process_edge #(.SRC_DEPTH(SRC_DEPTH)) u_pe (
    .clk, .rst_n, .cfg_algo, .cur_iter (e_iter), .interval_base (e_base),
    .src_we, .src_waddr, .src_wdata,
    .edge_valid (es == E_RUN && e_out_valid), .edge_ready (pe_edge_ready),
    .edge_in (edge_t'(e_out_data[$bits(edge_t)-1:0])),
    .upd_valid (pe_upd_valid), .upd_ready (pe_upd_ready), .upd_out (pe_upd),
    .busy (pe_busy), .edges_processed, .edges_skipped
  );

  logic    pu_flush, pu_done, pu_idle;
  logic    pu_out_valid, pu_out_ready, pu_out_last;
  update_t pu_out;
  bin_t    pu_bin;

  partition_updates #(.NUM_BINS(NUM_BINS), .BIN_DEPTH(BIN_DEPTH)) u_pu (
    .clk, .rst_n, .cfg_bin_shift,
    .in_valid (pe_upd_valid), .in_ready (pe_upd_ready), .in_upd (pe_upd),
    .flush (pu_flush), .done (pu_done), .idle (pu_idle),
    .out_valid (pu_out_valid), .out_ready (pu_out_ready), .out_upd (pu_out),
    .out_bin (pu_bin), .out_last (pu_out_last), .full_flushes (bin_full_flushes)
  );

  // table word -> edge job; edges -> process_edge
  assign e_out_ready = (es == E_TABLE) || (es == E_RUN && pe_edge_ready);

  // bin bursts -> update region of the slot
  wire [BW:0] w_bidx  = {e_slot, pu_bin};
  wire bcnt_t w_cnt   = bcnt[w_bidx];
  wire        w_full  = (w_cnt == bcnt_t'(BIN_CAP));
  assign a_req_valid[1]  = pu_out_valid && !w_full;
  assign a_req[1].we     = 1'b1;
  assign a_req[1].addr   = UPD_BASE + addr_t'(w_bidx) * addr_t'(BIN_CAP) + addr_t'(w_cnt);
  assign a_req[1].wdata  = word_t'(pu_out);
  assign pu_out_ready    = w_full || a_req_ready[1];
  wire   w_fire          = pu_out_valid && !w_full && a_req_ready[1];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      es           <= E_IDLE;
      e_slot       <= 1'b0;
      e_iter       <= '0;
      e_base       <= '0;
      e_rd_start   <= 1'b0;
      e_rd_base    <= '0;
      e_rd_count   <= '0;
      e_edges_done <= 1'b0;
      pu_flush     <= 1'b0;
      pepu_done    <= 1'b0;
    end else begin
      e_rd_start <= 1'b0;
      pu_flush   <= 1'b0;
      pepu_done  <= 1'b0;
      unique case (es)
        E_IDLE: if (pepu_start) begin
          es         <= E_TABLE;
          e_slot     <= pepu_slot;
          e_iter     <= pepu_iter;
          e_base     <= pepu_base;
          e_rd_start <= 1'b1;
          e_rd_base  <= addr_t'(pepu_interval);
          e_rd_count <= 32'd1;
        end
        E_TABLE: if (e_out_valid) begin
          es         <= E_EDGES;
          e_rd_start <= 1'b1;
          e_rd_base  <= e_out_data[31:0];
          e_rd_count <= e_out_data[63:32];
        end
        E_EDGES: if (!e_rd_start) begin
          es           <= E_RUN;
          e_edges_done <= !e_rd_busy;    // an empty edge list finishes at once
        end
        E_RUN: begin
          if (e_rd_done) e_edges_done <= 1'b1;
          if (e_edges_done && !pe_busy && pu_idle) begin
            pu_flush <= 1'b1;
            es       <= E_FLUSH;
          end
        end
        E_FLUSH: if (pu_done) begin
          pepu_done <= 1'b1;
          es        <= E_IDLE;
        end
        default: es <= E_IDLE;
      endcase
    end
  end
  assign pepu_busy = (es != E_IDLE);

  // ------------------------------------------------------------------
  // AU engine
  typedef enum logic [2:0] {A_IDLE, A_SCAN, A_LOAD, A_UPD, A_DRAIN, A_NEXT} a_state_e;
  a_state_e as_;
  logic   a_slot;
  ivl_t   a_interval;
  tag_t   a_iter;
  bin_t   a_bin;
  logic   a_rd_start, a_rd_busy, a_rd_done;
  addr_t  a_rd_base;
  logic [31:0] a_rd_count;
  logic   a_out_valid, a_out_ready;
  word_t  a_out_data;
  logic [LOG2_APPLY-1:0] a_ld_idx;
  logic   ap_upd_ready, ap_drain_start, ap_drain_done, ap_out_valid, ap_out_ready, ap_busy;
  logic [LOG2_APPLY-1:0] ap_out_idx;
  prop_t  ap_out_prop;

  hbm_stream_reader #(.DEPTH(16)) u_ard (
    .clk, .rst_n, .start (a_rd_start), .base (a_rd_base), .count (a_rd_count),
    .busy (a_rd_busy), .done (a_rd_done),
    .req_valid (a_req_valid[2]), .req_ready (a_req_ready[2]), .req_addr (a_req[2].addr),
    .rsp_valid (a_rsp_valid[2]), .rsp_data (a_rsp_data),
    .out_valid (a_out_valid), .out_ready (a_out_ready), .out_data (a_out_data)
  );
  assign a_req[2].we    = 1'b0;
  assign a_req[2].wdata = '0;

  wire update_t a_upd = update_t'(a_out_data[$bits(update_t)-1:0]);

  apply_updates #(.DEPTH(APPLY_DEPTH)) u_ap (
    .clk, .rst_n, .cfg_algo,
    .ld_valid (as_ == A_LOAD && a_out_valid), .ld_idx (a_ld_idx),
    .ld_prop (a_out_data[PROP_W-1:0]),
    .upd_valid (as_ == A_UPD && a_out_valid), .upd_ready (ap_upd_ready),
    .upd_idx (a_upd.dst[LOG2_APPLY-1:0]), .upd_value (a_upd.value),
    .drain_start (ap_drain_start), .drain_done (ap_drain_done),
    .out_valid (ap_out_valid), .out_ready (ap_out_ready),
    .out_idx (ap_out_idx), .out_prop (ap_out_prop),
    .busy (ap_busy), .applied (updates_applied), .forwards (apply_forwards)
  );

  assign a_out_ready = (as_ == A_LOAD) || (as_ == A_UPD && ap_upd_ready);

  // changed vertices: write back and push as frontier
  logic  f_in_ready;
  fmsg_t f_in;
  wire addr_t a_prop_addr = PROP_BASE + (addr_t'(a_bin) << LOG2_APPLY);

  assign a_req_valid[3]  = ap_out_valid && f_in_ready;
  assign a_req[3].we     = 1'b1;
  assign a_req[3].addr   = a_prop_addr + addr_t'(ap_out_idx);
  assign a_req[3].wdata  = word_t'(ap_out_prop);
  assign ap_out_ready    = f_in_ready && a_req_ready[3];

  always_comb begin
    f_in            = '0;
    f_in.has_data   = 1'b1;
    f_in.interval   = a_interval;
    f_in.f.vid      = (vid_t'(a_bin) << cfg_bin_shift) | (vid_t'(pe_gid) << LOG2_APPLY)
                      | vid_t'(ap_out_idx);
    f_in.f.prop     = ap_out_prop;
    f_in.f.tag      = a_iter + 1'b1;
  end

  sync_fifo #(.T(fmsg_t), .DEPTH(FR_DEPTH)) u_frq (
    .clk, .rst_n,
    .in_valid (ap_out_valid && a_req_ready[3]), .in_ready (f_in_ready), .in_data (f_in),
    .out_valid (fr_valid), .out_ready (fr_ready), .out_data (fr_data), .count (fr_count)
  );

  wire [BW:0] a_bidx = {a_slot, a_bin};

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      as_            <= A_IDLE;
      a_slot         <= 1'b0;
      a_interval     <= '0;
      a_iter         <= '0;
      a_bin          <= '0;
      a_rd_start     <= 1'b0;
      a_rd_base      <= '0;
      a_rd_count     <= '0;
      a_ld_idx       <= '0;
      ap_drain_start <= 1'b0;
      au_done        <= 1'b0;
      overflow       <= 1'b0;
      for (int i = 0; i < 2*NUM_BINS; i++) bcnt[i] <= '0;
    end else begin
      a_rd_start     <= 1'b0;
      ap_drain_start <= 1'b0;
      au_done        <= 1'b0;
      if (w_fire) bcnt[w_bidx] <= w_cnt + 1'b1;
      if (pu_out_valid && w_full) overflow <= 1'b1;
      unique case (as_)
        A_IDLE: if (au_start) begin
          as_        <= A_SCAN;
          a_slot     <= au_slot;
          a_interval <= au_interval;
          a_iter     <= au_iter;
          a_bin      <= '0;
        end
        A_SCAN: begin
          if (bcnt[a_bidx] != '0) begin
            as_        <= A_LOAD;
            a_rd_start <= 1'b1;
            a_rd_base  <= a_prop_addr;
            a_rd_count <= 32'(APPLY_DEPTH);
            a_ld_idx   <= '0;
          end else begin
            as_ <= A_NEXT;
          end
        end
        A_LOAD: begin
          if (a_out_valid) a_ld_idx <= a_ld_idx + 1'b1;
          if (a_rd_done) begin
            as_        <= A_UPD;
            a_rd_start <= 1'b1;
            a_rd_base  <= UPD_BASE + addr_t'(a_bidx) * addr_t'(BIN_CAP);
            a_rd_count <= 32'(bcnt[a_bidx]);
          end
        end
        A_UPD: begin
          if (a_rd_done) begin
            as_            <= A_DRAIN;
            ap_drain_start <= 1'b1;
          end
        end
        A_DRAIN: if (ap_drain_done) begin
          bcnt[a_bidx] <= '0;
          as_          <= A_NEXT;
        end
        A_NEXT: begin
          if (a_bin == bin_t'(NUM_BINS - 1)) begin
            as_     <= A_IDLE;
            au_done <= 1'b1;
          end else begin
            a_bin <= a_bin + 1'b1;
            as_   <= A_SCAN;
          end
        end
        default: as_ <= A_IDLE;
      endcase
    end
  end
  assign au_busy = (as_ != A_IDLE) || (fr_count != '0);

  a_no_slot_clash: assert property (@(posedge clk) disable iff (!rst_n)
    (as_ != A_IDLE && es != E_IDLE) |-> (a_slot != e_slot));
endmodule
