// tb_interval_scheduler: self-checking test of the interval state table.
//
// The test plays the engines: it answers pepu_start, au_start and ef_start
// after random delays, and after each export of interval k delivers two
// frontier batches for k (a two-FPGA cluster), only while import_enable is
// high. Six intervals, two without active vertices, three iterations; run
// once asynchronously and once bulk-synchronously. Checks per interval: the
// step order process -> apply -> export, the iteration numbers, the apply
// slot equal to the process slot, the skip of inactive intervals, the
// completion. Asynchronous run: process and apply of different intervals
// overlap. Synchronous run: no interval starts iteration i+1 before every
// interval's batches of iteration i were imported, imports are held until
// all intervals have processed, and the barrier stalls at least once.
// A third, bulk-synchronous run marks only the first round's batches as
// carrying frontiers: the scheduler must detect convergence after the
// second round, stop every interval after two iterations and set converged.
`timescale 1ns/1ps
module tb_interval_scheduler;
  import swift_pkg::*;
  localparam int MAXI = 8, NI = 6, ITERS = 3;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic start, sync_m, import_done, import_enable, running, all_done;
  logic frontier_in, converged;
  int   fr_rounds;         // rounds whose batches carry frontiers
  logic init_active [MAXI];
  ivl_t import_interval;
  logic pepu_start, pepu_slot, pepu_done, au_start, au_slot, au_done, ef_start, ef_done;
  ivl_t pepu_interval, au_interval, ef_interval;
  tag_t pepu_iter, au_iter;
  logic [31:0] stalls, bypassed, completed;

  interval_scheduler #(.MAX_INTERVALS(MAXI)) dut (
    .clk, .rst_n, .start, .cfg_num_intervals (ivl_t'(NI)), .cfg_max_iter (tag_t'(ITERS)),
    .cfg_num_fpgas (4'd2), .cfg_sync (sync_m), .init_active,
    .import_done, .frontier_in, .import_interval, .pepu_start, .pepu_interval, .pepu_slot, .pepu_iter,
    .pepu_done, .au_start, .au_interval, .au_slot, .au_iter, .au_done, .ef_start,
    .ef_interval, .ef_done, .import_enable, .running, .all_done, .converged,
    .barrier_stalls (stalls), .bypassed, .intervals_completed (completed)
  );

  int checks = 0, failures = 0;
  // per-interval progress as seen by the test
  int  step [NI];          // 0 expect process, 1 expect apply, 2 expect export
  int  it   [NI];
  int  imports [NI];
  logic slot_of [NI];
  int  pepu_t, au_t, ef_t;  // countdowns of the engines
  int  pepu_k, au_k, ef_k;
  int  imp_q [$];
  int  overlap;
  int  max_iter_seen;     // highest iteration started so far

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  always @(posedge clk) begin
    pepu_done <= 0; au_done <= 0; ef_done <= 0; import_done <= 0; frontier_in <= 0;
    if (rst_n && running) begin
      if (pepu_start) begin
        automatic int k = int'(pepu_interval);
        check(step[k] == 0, $sformatf("interval %0d processed in order", k));
        check(int'(pepu_iter) == it[k], $sformatf("interval %0d iteration %0d", k, it[k]));
        check(imports[k] >= 2 * (it[k] - 1),
              $sformatf("interval %0d waits for the batches of both FPGAs", k));
        if (sync_m && it[k] > 1)
          for (int j = 0; j < NI; j++)
            check(imports[j] >= 2 * (it[k] - 1), "sync: all batches imported before next iteration");
        slot_of[k] = pepu_slot;
        if (it[k] > max_iter_seen) max_iter_seen = it[k];
        step[k] = 1;
        pepu_k = k; pepu_t = $urandom_range(3, 30);
      end
      if (au_start) begin
        automatic int k = int'(au_interval);
        check(step[k] == 1, "apply after process");
        check(au_slot == slot_of[k], "apply uses the process slot");
        check(int'(au_iter) == it[k], "apply iteration");
        step[k] = 2;
        au_k = k; au_t = $urandom_range(3, 30);
      end
      if (ef_start) begin
        automatic int k = int'(ef_interval);
        check(step[k] == 2, $sformatf("export after apply (interval %0d)", k));
        ef_k = k; ef_t = $urandom_range(2, 10);
      end
      if (pepu_t > 0 && au_t > 0) overlap++;
      if (pepu_t > 0) begin pepu_t--; if (pepu_t == 0) pepu_done <= 1; end
      if (au_t > 0)   begin au_t--;   if (au_t == 0)   au_done <= 1; end
      if (ef_t > 0) begin
        ef_t--;
        if (ef_t == 0) begin
          ef_done <= 1;
          step[ef_k] = 0;
          it[ef_k]++;
          imp_q.push_back(ef_k);
          imp_q.push_back(ef_k);
        end
      end
      if (imp_q.size() != 0 && import_enable && $urandom_range(0, 2) == 0) begin
        automatic int k = imp_q.pop_front();
        if (sync_m)
          for (int j = 0; j < NI; j++)
            check(step[j] != 0 || it[j] > max_iter_seen,
                  "sync: imports held until every interval has processed this iteration");
        import_done     <= 1;
        frontier_in     <= (imports[k] < 2 * fr_rounds);
        import_interval <= ivl_t'(k);
        imports[k]++;
      end
    end
  end

  task automatic run(bit s, int exp_iters);
    sync_m = s;
    foreach (step[k]) begin
      step[k] = init_active[k] ? 0 : 2;
      it[k] = 1; imports[k] = 0;
    end
    pepu_t = 0; au_t = 0; ef_t = 0; overlap = 0; max_iter_seen = 1;
    imp_q.delete();
    start <= 1;
    @(posedge clk);
    start <= 0;
    @(posedge clk);
    while (!all_done) @(posedge clk);
    foreach (it[k]) check(it[k] == exp_iters + 1, $sformatf("interval %0d ran %0d iterations", k, it[k] - 1));
    check(converged == (exp_iters < ITERS), "converged flag");
  endtask

  initial begin
    #20000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    start = 0; sync_m = 0; import_interval = 0; fr_rounds = 100;
    foreach (init_active[k]) init_active[k] = !(k == 2 || k == 4);
    repeat (3) @(posedge clk);
    rst_n = 1;
    repeat (2) @(posedge clk);
    run(0, ITERS);
    check(bypassed == 2, "two inactive intervals skipped to export");
    check(overlap > 0, "async: process and apply overlapped");
    check(stalls == 0, "async: no barrier stalls");
    $display("async overlap cycles=%0d", overlap);
    repeat (5) @(posedge clk);
    run(1, ITERS);
    check(stalls > 0, "sync: barrier stalled");
    check(completed == 2 * NI, "intervals completed over both runs");
    $display("sync stalls=%0d", stalls);
    repeat (5) @(posedge clk);
    fr_rounds = 1;
    run(1, 2);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
