// export_frontier: the Export-frontier module (EF_M).
//
// Every PE pushes the active frontiers it produces into its own frontier
// FIFO. This block drains those FIFOs round-robin into the card-to-host DMA
// stream continuously, so export overlaps apply-updates. When the scheduler
// asks it to close interval k (apply-updates of k has finished on all PEs),
// it takes a snapshot of each FIFO's fill level: those entries include every
// frontier of k. Once all of them have been sent it emits a last message for
// k, which tells the host that the interval's batch is complete (the
// interval becomes ready-for-import on the other FPGAs), and pulses
// close_done. One message per cycle. The continuous drain, the snapshot rule
// and the batch marker are this design's choices.
module export_frontier
  import swift_pkg::*;
#(
  parameter int unsigned NUM_PE   = 32,
  parameter int unsigned FR_DEPTH = 16
) (
  input  logic  clk,
  input  logic  rst_n,
  // PE frontier FIFOs
  input  logic  fr_valid [NUM_PE],
  output logic  fr_ready [NUM_PE],
  input  fmsg_t fr_data  [NUM_PE],
  input  logic [$clog2(FR_DEPTH):0] fr_count [NUM_PE],
  // close request
  input  logic  close_start,
  input  ivl_t  close_interval,
  output logic  close_busy,
  output logic  close_done,
  // card-to-host frontier stream
  output logic  c2h_valid,
  input  logic  c2h_ready,
  output fmsg_t c2h_msg,
  output logic [31:0] frontiers_exported
);
  localparam int unsigned IW = (NUM_PE > 1) ? $clog2(NUM_PE) : 1;
  localparam int unsigned FW = $clog2(FR_DEPTH) + 1;
  typedef logic [IW-1:0] idx_t;

  idx_t rr, sel;
  logic sel_valid;
  logic [FW-1:0] remain [NUM_PE];
  ivl_t cl_ivl;
  logic remain_zero;

  always_comb begin
    sel       = '0;
    sel_valid = 1'b0;
    for (int k = 0; k < NUM_PE; k++) begin
      automatic int unsigned j = (int'(rr) + k) % NUM_PE;
      if (!sel_valid && fr_valid[j]) begin
        sel       = idx_t'(j);
        sel_valid = 1'b1;
      end
    end
    remain_zero = 1'b1;
    for (int p = 0; p < NUM_PE; p++) if (remain[p] != '0) remain_zero = 1'b0;
  end

  // the close marker goes out once every snapshot entry has left
  wire send_last = close_busy && remain_zero;

  always_comb begin
    c2h_valid = send_last || sel_valid;
    if (send_last) begin
      c2h_msg          = '0;
      c2h_msg.last     = 1'b1;
      c2h_msg.interval = cl_ivl;
    end else begin
      c2h_msg = fr_data[sel];
    end
    for (int p = 0; p < NUM_PE; p++)
      fr_ready[p] = !send_last && sel_valid && (sel == idx_t'(p)) && c2h_ready;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rr                 <= '0;
      close_busy         <= 1'b0;
      close_done         <= 1'b0;
      cl_ivl             <= '0;
      frontiers_exported <= '0;
      for (int p = 0; p < NUM_PE; p++) remain[p] <= '0;
    end else begin
      close_done <= 1'b0;
      if (!send_last && sel_valid && c2h_ready) begin
        rr                 <= (sel == idx_t'(NUM_PE - 1)) ? '0 : sel + 1'b1;
        frontiers_exported <= frontiers_exported + 1;
      end
      if (close_start && !close_busy) begin
        close_busy <= 1'b1;
        cl_ivl     <= close_interval;
        for (int p = 0; p < NUM_PE; p++)
          remain[p] <= fr_count[p] - FW'(fr_valid[p] && fr_ready[p]);
      end else begin
        for (int p = 0; p < NUM_PE; p++)
          if (fr_valid[p] && fr_ready[p] && remain[p] != '0) remain[p] <= remain[p] - 1'b1;
        if (send_last && c2h_ready) begin
          close_busy <= 1'b0;
          close_done <= 1'b1;
        end
      end
    end
  end
endmodule
