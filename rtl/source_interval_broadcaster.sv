// source_interval_broadcaster: fills the VertexProperty buffers of all PEs
// with one source interval.
//
// Each FPGA keeps a full copy of the source vertex properties, with their
// activity tags, in its frontier HBM channel (address = global vertex ID).
// Before the PEs process the edges of an interval, this block reads the
// interval's count entries starting at vertex base and streams them, as
// (index within the interval, entry), to the write port shared by every PE,
// so every PE gets the same copy in one pass. One entry per cycle when the
// channel keeps up; done pulses after the last write. The read is credit
// limited by hbm_stream_reader. The paper names the broadcaster and its AXI
// stream; the single-buffered fill (the PEs wait for it) is this design's
// choice.
module source_interval_broadcaster
  import swift_pkg::*;
#(
  parameter int unsigned SRC_DEPTH = 131072
) (
  input  logic       clk,
  input  logic       rst_n,
  input  logic       start,
  input  vid_t       base,
  input  logic [31:0] count,
  output logic       busy,
  output logic       done,
  // frontier HBM reads
  output logic       req_valid,
  input  logic       req_ready,
  output addr_t      req_addr,
  input  logic       rsp_valid,
  input  word_t      rsp_data,
  // broadcast write port to all PEs
  output logic       bc_we,
  output logic [$clog2(SRC_DEPTH)-1:0] bc_waddr,
  output src_entry_t bc_wdata,
  output logic [31:0] entries_sent
);
  localparam int unsigned AW = $clog2(SRC_DEPTH);

  logic  rd_valid;
  word_t rd_data;
  logic [AW-1:0] idx;

  hbm_stream_reader #(.DEPTH(16)) u_rd (
    .clk, .rst_n, .start, .base (addr_t'(base)), .count, .busy, .done,
    .req_valid, .req_ready, .req_addr, .rsp_valid, .rsp_data,
    .out_valid (rd_valid), .out_ready (1'b1), .out_data (rd_data)
  );

  assign bc_we    = rd_valid;
  assign bc_waddr = idx;
  assign bc_wdata = src_entry_t'(rd_data[$bits(src_entry_t)-1:0]);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      idx          <= '0;
      entries_sent <= '0;
    end else begin
      if (start && !busy) idx <= '0;
      else if (rd_valid) idx <= idx + 1'b1;
      if (rd_valid) entries_sent <= entries_sent + 1;
    end
  end

  a_fits: assert property (@(posedge clk) disable iff (!rst_n)
                           start && !busy |-> count <= SRC_DEPTH);
endmodule
