// process_edge: the Process-edge stage (PE_M) of one processing element.
//
// Edges of the current source interval stream in, one per cycle. Each edge's
// source property is looked up in the VertexProperty buffer, an on-chip
// (URAM) copy of the source interval that the source interval broadcaster
// fills through the write port. If the source vertex is active in this
// iteration (its tag is at least cur_iter) the edge function Process_Edge
// (E_weight, U_prop) produces a vertex update (Value, Dst); edges of inactive
// sources are dropped, as in the edge-centric GAS loop of the paper.
//
// Timing: two pipeline stages (buffer read, then update register), so an
// update appears two cycles after its edge is accepted; throughput is one
// edge per cycle unless the update output is back-pressured. The buffer
// depth (one source interval) and the tag rule for activity are this
// design's choices; the paper says only that source properties are read
// into URAM buffers and that only edges of active vertices are processed.
module process_edge
  import swift_pkg::*;
#(
  parameter int unsigned SRC_DEPTH = 131072
) (
  input  logic       clk,
  input  logic       rst_n,
  input  algo_e      cfg_algo,
  input  tag_t       cur_iter,
  input  vid_t       interval_base,     // first vertex ID of the interval
  // VertexProperty buffer fill port
  input  logic       src_we,
  input  logic [$clog2(SRC_DEPTH)-1:0] src_waddr,
  input  src_entry_t src_wdata,
  // edges in
  input  logic       edge_valid,
  output logic       edge_ready,
  input  edge_t      edge_in,
  // vertex updates out
  output logic       upd_valid,
  input  logic       upd_ready,
  output update_t    upd_out,
  // status
  output logic       busy,              // an edge is still in the pipeline
  output logic [31:0] edges_processed,
  output logic [31:0] edges_skipped
);
  localparam int unsigned AW = $clog2(SRC_DEPTH);

  src_entry_t vbuf [SRC_DEPTH];

  logic       s1_valid;
  edge_t      s1_edge;
  src_entry_t s1_src;

  wire advance = !upd_valid || upd_ready;
  assign edge_ready = advance;
  assign busy = s1_valid || upd_valid;

  wire vid_t rel = edge_in.src - interval_base;
  wire s1_active = (s1_src.tag >= cur_iter);

  always_ff @(posedge clk) begin
    if (src_we) vbuf[src_waddr] <= src_wdata;
    if (advance) s1_src <= vbuf[rel[AW-1:0]];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      s1_valid        <= 1'b0;
      s1_edge         <= '0;
      upd_valid       <= 1'b0;
      upd_out         <= '0;
      edges_processed <= '0;
      edges_skipped   <= '0;
    end else if (advance) begin
      s1_valid  <= edge_valid;
      s1_edge   <= edge_in;
      upd_valid <= s1_valid && s1_active;
      if (s1_valid && s1_active) begin
        upd_out.value   <= process_edge_fn(cfg_algo, s1_edge.weight, s1_src.prop);
        upd_out.dst     <= s1_edge.dst;
        edges_processed <= edges_processed + 1;
      end
      if (s1_valid && !s1_active) edges_skipped <= edges_skipped + 1;
    end
  end

  a_upd_stable: assert property (@(posedge clk) disable iff (!rst_n)
                                 upd_valid && !upd_ready |=> upd_valid && $stable(upd_out));
endmodule
