// import_frontier: the Import-frontier module (IF_M).
//
// Frontier messages arrive from the host DMA (host-to-card stream). Each
// message that carries a frontier is written into the frontier HBM channel
// at the vertex's global ID as a source entry {tag, property}, so the next
// broadcast of that vertex's interval sees the new value and activity. Global
// IDs are used on every FPGA, so no ID translation is needed. A message with
// last set closes one remote FPGA's batch for an interval: batch_done pulses
// with the interval number, which the scheduler counts to decide when the
// interval is ready-for-process. One message per cycle while the channel
// accepts writes, with a one-cycle pause after each batch end; enable low
// holds the stream. Message format and batch marker are this design's choices.
module import_frontier
  import swift_pkg::*;
(
  input  logic     clk,
  input  logic     rst_n,
  input  logic     enable,              // low: hold the stream (bulk-synchronous mode)
  // host-to-card frontier stream
  input  logic     h2c_valid,
  output logic     h2c_ready,
  input  fmsg_t    h2c_msg,
  // frontier HBM writes
  output logic     req_valid,
  input  logic     req_ready,
  output mem_req_t req,
  // batch completion
  output logic     batch_done,
  output ivl_t     batch_interval,
  output logic [31:0] frontiers_imported
);
  src_entry_t ent;
  assign ent.tag  = h2c_msg.f.tag;
  assign ent.prop = h2c_msg.f.prop;

  // After a batch end the stream pauses one cycle, so that the scheduler has
  // counted the batch (and may close enable) before the next message.
  wire go = enable && !batch_done;
  assign req_valid = go && h2c_valid && h2c_msg.has_data;
  assign req.we    = 1'b1;
  assign req.addr  = addr_t'(h2c_msg.f.vid);
  assign req.wdata = word_t'(ent);
  assign h2c_ready = go && (!h2c_msg.has_data || req_ready);

  wire fire = h2c_valid && h2c_ready;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      batch_done         <= 1'b0;
      batch_interval     <= '0;
      frontiers_imported <= '0;
    end else begin
      batch_done <= fire && h2c_msg.last;
      if (fire && h2c_msg.last) batch_interval <= h2c_msg.interval;
      if (fire && h2c_msg.has_data) frontiers_imported <= frontiers_imported + 1;
    end
  end
endmodule
