// tb_export_frontier: self-checking test of the Export-frontier module.
//
// Four PE frontier FIFOs (real sync_fifo instances) are filled by the test
// with frontiers of a sequence of intervals, the way the PEs would: all
// frontiers of interval k are pushed before close(k) is requested, while
// frontiers of the next interval may already be arriving. The card-to-host
// stream is randomly back-pressured. Checks: every frontier is exported
// exactly once; each interval's close marker comes after all of that
// interval's frontiers; close_done follows each marker.
`timescale 1ns/1ps
module tb_export_frontier;
  import swift_pkg::*;
  localparam int P = 4, FD = 8;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic  push_valid [P];
  logic  push_ready [P];
  fmsg_t push_data  [P];
  logic  fr_valid [P];
  logic  fr_ready [P];
  fmsg_t fr_data  [P];
  logic [3:0] fr_count [P];
  logic close_start, close_busy, close_done, c2h_valid, c2h_ready;
  ivl_t close_interval;
  fmsg_t c2h_msg;
  logic [31:0] n_exp;

  for (genvar p = 0; p < P; p++) begin : g_q
    sync_fifo #(.T(fmsg_t), .DEPTH(FD)) u_q (
      .clk, .rst_n, .in_valid (push_valid[p]), .in_ready (push_ready[p]), .in_data (push_data[p]),
      .out_valid (fr_valid[p]), .out_ready (fr_ready[p]), .out_data (fr_data[p]),
      .count (fr_count[p])
    );
  end

  export_frontier #(.NUM_PE(P), .FR_DEPTH(FD)) dut (
    .clk, .rst_n, .fr_valid, .fr_ready, .fr_data, .fr_count, .close_start, .close_interval,
    .close_busy, .close_done, .c2h_valid, .c2h_ready, .c2h_msg, .frontiers_exported (n_exp)
  );

  int checks = 0, failures = 0;
  int outstanding [8];        // frontiers of each interval not yet exported
  int seen_vid [int];
  int n_marker, n_close_done, n_pushed;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  always @(posedge clk) begin
    if (rst_n) c2h_ready <= ($urandom_range(0, 3) != 0);
    if (rst_n && close_done) n_close_done++;
    if (rst_n && c2h_valid && c2h_ready) begin
      if (c2h_msg.last) begin
        check(!c2h_msg.has_data, "marker carries no frontier");
        check(outstanding[c2h_msg.interval] == 0,
              $sformatf("marker of interval %0d after all its frontiers", c2h_msg.interval));
        n_marker++;
      end else begin
        outstanding[c2h_msg.interval]--;
        check(!seen_vid.exists(int'(c2h_msg.f.vid)), "exported once");
        seen_vid[int'(c2h_msg.f.vid)] = 1;
      end
    end
  end

  // push n frontiers of interval k spread over the PEs
  task automatic push_interval(int k, int n);
    for (int i = 0; i < n; i++) begin
      automatic int p = $urandom_range(0, P-1);
      fmsg_t m;
      m = '0;
      m.has_data = 1; m.interval = ivl_t'(k);
      m.f.vid = vid_t'(n_pushed); m.f.prop = $urandom;
      n_pushed++;
      outstanding[k]++;
      push_valid[p] <= 1; push_data[p] <= m;
      @(posedge clk);
      while (!push_ready[p]) @(posedge clk);
      push_valid[p] <= 0;
    end
  endtask

  initial begin
    #2000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int p = 0; p < P; p++) begin push_valid[p] = 0; push_data[p] = '0; end
    close_start = 0; close_interval = 0; n_marker = 0; n_close_done = 0; n_pushed = 0;
    foreach (outstanding[i]) outstanding[i] = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int k = 0; k < 6; k++) begin
      push_interval(k, 10 + 7 * k);
      // close k while the next interval's frontiers are already queued
      if (k < 5) push_interval(k + 1, 3);
      close_interval <= ivl_t'(k);
      close_start    <= 1;
      @(posedge clk);
      close_start <= 0;
      while (n_close_done <= k) @(posedge clk);
      if (k < 5) outstanding[k + 1] += 0;
    end
    repeat (40) @(posedge clk);
    check(n_marker == 6, "one marker per interval");
    check(int'(n_exp) == n_pushed, $sformatf("exported %0d of %0d", n_exp, n_pushed));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
