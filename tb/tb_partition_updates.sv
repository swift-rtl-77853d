// tb_partition_updates: self-checking test of the Partition-updates stage.
//
// Streams random updates into a small instance (16 bins of depth 4), with
// random output back-pressure, then flushes. Checks that every burst
// carries only updates of its own bin (dst >> shift), that updates of a bin
// keep their arrival order, that every update comes out exactly once, that
// bursts of a full bin have BIN_DEPTH words, and that the number of
// full-bin flushes equals sum over bins of floor(count / BIN_DEPTH).
`timescale 1ns/1ps
module tb_partition_updates;
  import swift_pkg::*;
  localparam int unsigned NB = 16, D = 4, SHIFT = 5;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic    in_valid, in_ready, flush, done, idle, out_valid, out_ready, out_last;
  update_t in_upd, out_upd;
  logic [3:0] out_bin;
  logic [31:0] full_flushes;

  partition_updates #(.NUM_BINS(NB), .BIN_DEPTH(D)) dut (
    .clk, .rst_n, .cfg_bin_shift (6'(SHIFT)), .in_valid, .in_ready, .in_upd,
    .flush, .done, .idle, .out_valid, .out_ready, .out_upd, .out_bin, .out_last, .full_flushes
  );

  int checks = 0, failures = 0;
  update_t exp_q [NB][$];
  int cnt [NB];
  int burst_len, n_out, n_done;
  logic in_burst;
  logic [3:0] burst_bin;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  always @(posedge clk) begin
    if (rst_n) out_ready <= ($urandom_range(0, 3) != 0);
    if (rst_n && done) n_done++;
    if (rst_n && out_valid && out_ready) begin
      int b;
      b = int'(out_upd.dst >> SHIFT);
      check(b == int'(out_bin), "bin of update");
      if (in_burst) check(out_bin == burst_bin, "burst stays in one bin");
      if (exp_q[b].size() == 0) check(0, "unexpected update");
      else check(out_upd == exp_q[b].pop_front(), "order within bin");
      burst_len++;
      n_out++;
      in_burst  = !out_last;
      burst_bin = out_bin;
      if (out_last) begin
        check(burst_len <= D, "burst length");
        burst_len = 0;
      end
    end
  end

  initial begin
    #2000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int exp_full;
    in_valid = 0; flush = 0; in_upd = '0; out_ready = 1;
    burst_len = 0; n_out = 0; n_done = 0; in_burst = 0; burst_bin = 0;
    foreach (cnt[i]) cnt[i] = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int i = 0; i < 500; i++) begin
      update_t u;
      // skew towards a few bins so some fill often and some stay partial
      u.dst   = vid_t'(($urandom_range(0, 3) == 0 ? $urandom_range(0, NB-1) : $urandom_range(0, 2))
                        * (1 << SHIFT) + $urandom_range(0, (1 << SHIFT) - 1));
      u.value = $urandom;
      exp_q[u.dst >> SHIFT].push_back(u);
      cnt[u.dst >> SHIFT]++;
      in_valid <= 1'b1;
      in_upd   <= u;
      @(posedge clk);
      while (!in_ready) @(posedge clk);
    end
    in_valid <= 1'b0;
    @(posedge clk);
    while (!idle) @(posedge clk);
    flush <= 1'b1;
    @(posedge clk);
    flush <= 1'b0;
    while (n_done == 0) @(posedge clk);
    repeat (5) @(posedge clk);
    exp_full = 0;
    foreach (cnt[i]) exp_full += cnt[i] / D;
    check(n_out == 500, $sformatf("all %0d updates out (%0d)", 500, n_out));
    foreach (exp_q[i]) check(exp_q[i].size() == 0, "bin emptied");
    check(int'(full_flushes) == exp_full, $sformatf("full flushes %0d vs %0d", full_flushes, exp_full));
    check(n_done == 1, "one done pulse");
    check(idle, "idle after drain");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
