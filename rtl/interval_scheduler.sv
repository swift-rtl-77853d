// interval_scheduler: the per-interval state table of Swift's decoupled,
// asynchronous execution model.
//
// Every source interval of the FPGA moves through the states
//   ready-for-process -> processing -> apply -> applying -> ready-for-export
//   -> exporting -> ready-for-import -> ready-for-process ...
// independently of the others, so process-edges/partition-updates, apply,
// export and import of different intervals run at the same time. Three
// scanners walk the table, one interval per cycle each, and start work on an
// interval whose state allows it and whose engine is free:
//   * process scanner: turns a ready-for-import interval that has received a
//     frontier batch from every FPGA into ready-for-process, and dispatches
//     a ready-for-process interval to the PE&PU step with a free update slot;
//   * apply scanner: dispatches a partitioned interval to apply-updates;
//   * export scanner: dispatches a ready-for-export interval to the exporter.
// After export an interval's iteration count rises; at cfg_max_iter it is
// done. At start, intervals without active vertices skip straight to
// ready-for-export (an empty batch), the rest are ready-for-process.
// With cfg_sync set the scheduler acts bulk-synchronously: no interval may
// start iteration i+1 before the frontier batches of iteration i have been
// imported for every interval (blocked dispatches count in barrier_stalls),
// and imports are held back (import_enable low) until every interval has
// finished process-edges of the current iteration, so no interval reads a
// source property of the iteration being computed. The states come from the
// paper; the scanners, the batch count per interval, the two update slots
// and the skip of inactive intervals are this design's choices.
// A run ends when every interval has done cfg_max_iter iterations or, as the
// paper also allows, when the algorithm has converged. Convergence is
// detected in the bulk-synchronous mode: every FPGA imports the same batches
// in a round, so a round in which no frontier arrived (frontier_in never
// pulsed) means that no vertex is active for the next iteration on any FPGA;
// the intervals are then retired to done at once and converged is set. In
// the asynchronous mode the FPGAs see the batches in different orders and
// no such common point exists, so that mode always runs cfg_max_iter
// iterations.
module interval_scheduler
  import swift_pkg::*;
#(
  parameter int unsigned MAX_INTERVALS = 2048
) (
  input  logic  clk,
  input  logic  rst_n,
  input  logic  start,
  input  ivl_t  cfg_num_intervals,
  input  tag_t  cfg_max_iter,
  input  logic [3:0] cfg_num_fpgas,
  input  logic  cfg_sync,
  input  logic  init_active [MAX_INTERVALS],
  // frontier batches imported
  input  logic  import_done,
  input  logic  frontier_in,          // a frontier carrying data was imported
  input  ivl_t  import_interval,
  // process-edges + partition-updates
  output logic  pepu_start,
  output ivl_t  pepu_interval,
  output logic  pepu_slot,
  output tag_t  pepu_iter,
  input  logic  pepu_done,
  // apply-updates
  output logic  au_start,
  output ivl_t  au_interval,
  output logic  au_slot,
  output tag_t  au_iter,
  input  logic  au_done,
  // export-frontier close
  output logic  ef_start,
  output ivl_t  ef_interval,
  input  logic  ef_done,
  // status
  output logic  import_enable,
  output logic  running,
  output logic  all_done,
  output logic  converged,            // bulk-synchronous run ended early: no frontiers
  output logic [31:0] barrier_stalls,
  output logic [31:0] bypassed,
  output logic [31:0] intervals_completed
);
  localparam int unsigned KW = $clog2(MAX_INTERVALS);
  typedef logic [KW-1:0] k_t;

  iv_state_e st      [MAX_INTERVALS];
  tag_t      iter    [MAX_INTERVALS];
  logic [3:0] imp_cnt [MAX_INTERVALS];
  logic      slot_of [MAX_INTERVALS];

  k_t   p_ptr, a_ptr, x_ptr;
  logic pepu_busy, au_busy, ef_busy;
  k_t   pepu_k, au_k, ef_k;
  logic [1:0] slot_used;
  tag_t round;                 // rounds whose imports completed for every interval
  logic [KW:0] round_cnt, done_cnt, pepu_cnt, retire_cnt;
  logic [KW+4:0] rx_cnt;       // frontier batches received for the current round
  logic round_fr;              // a frontier arrived in the current round

  wire k_t last_k = k_t'(cfg_num_intervals - 1'b1);
  function automatic k_t nxt(k_t k, k_t last);
    return (k == last) ? '0 : k + 1'b1;
  endfunction

  wire free_slot_ok = !(slot_used[0] && slot_used[1]);
  wire free_slot    = slot_used[0];          // lowest free slot
  wire barrier_ok   = !cfg_sync || (iter[p_ptr] <= round + 1'b1);
  wire p_import_ok  = (st[p_ptr] == IV_IMPORT) && (imp_cnt[p_ptr] >= cfg_num_fpgas);
  wire p_dispatch   = running && (st[p_ptr] == IV_PROCESS) && !pepu_busy && free_slot_ok
                      && barrier_ok && !converged;
  wire p_retire     = running && (st[p_ptr] == IV_PROCESS) && converged;
  wire a_dispatch   = running && (st[a_ptr] == IV_APPLY) && !au_busy;
  wire x_dispatch   = running && (st[x_ptr] == IV_EXPORT) && !ef_busy;

  // intervals without active vertices at start
  logic [KW:0] n_inactive;
  always_comb begin
    n_inactive = '0;
    for (int k = 0; k < MAX_INTERVALS; k++)
      if (k < int'(cfg_num_intervals) && !init_active[k]) n_inactive = n_inactive + 1'b1;
  end

  wire k_t imp_k = k_t'(import_interval);
  // batches that complete one round: one per interval from every FPGA
  wire [KW+4:0] round_batches = (KW+5)'(cfg_num_intervals) * (KW+5)'(cfg_num_fpgas);
  assign import_enable = !cfg_sync || ((pepu_cnt == (KW+1)'(cfg_num_intervals))
                                       && (rx_cnt < round_batches));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      running             <= 1'b0;
      all_done            <= 1'b0;
      p_ptr               <= '0;
      a_ptr               <= '0;
      x_ptr               <= '0;
      pepu_busy           <= 1'b0;
      au_busy             <= 1'b0;
      ef_busy             <= 1'b0;
      pepu_k              <= '0;
      au_k                <= '0;
      ef_k                <= '0;
      slot_used           <= '0;
      round               <= '0;
      round_cnt           <= '0;
      done_cnt            <= '0;
      retire_cnt          <= '0;
      pepu_cnt            <= '0;
      rx_cnt              <= '0;
      round_fr            <= 1'b0;
      converged           <= 1'b0;
      pepu_start          <= 1'b0;
      pepu_interval       <= '0;
      pepu_slot           <= 1'b0;
      pepu_iter           <= '0;
      au_start            <= 1'b0;
      au_interval         <= '0;
      au_slot             <= 1'b0;
      au_iter             <= '0;
      ef_start            <= 1'b0;
      ef_interval         <= '0;
      barrier_stalls      <= '0;
      bypassed            <= '0;
      intervals_completed <= '0;
      for (int k = 0; k < MAX_INTERVALS; k++) begin
        st[k]      <= IV_IDLE;
        iter[k]    <= '0;
        imp_cnt[k] <= '0;
        slot_of[k] <= 1'b0;
      end
    end else begin
      pepu_start <= 1'b0;
      au_start   <= 1'b0;
      ef_start   <= 1'b0;

      if (start && !running) begin
        running   <= 1'b1;
        all_done  <= 1'b0;
        p_ptr     <= '0;
        a_ptr     <= '0;
        x_ptr     <= '0;
        round     <= '0;
        round_cnt <= '0;
        done_cnt  <= '0;
        retire_cnt <= '0;
        pepu_cnt  <= n_inactive;
        rx_cnt    <= '0;
        round_fr  <= 1'b0;
        converged <= 1'b0;
        bypassed  <= bypassed + 32'(n_inactive);
        slot_used <= '0;
        for (int k = 0; k < MAX_INTERVALS; k++) begin
          iter[k]    <= tag_t'(1);
          imp_cnt[k] <= '0;
          if (k < int'(cfg_num_intervals)) begin
            st[k] <= init_active[k] ? IV_PROCESS : IV_EXPORT;

          end else begin
            st[k] <= IV_IDLE;
          end
        end
      end else if (running) begin
        // frontier batch arrived for an interval
        if (import_done) rx_cnt <= rx_cnt + 1'b1;
        if (frontier_in) round_fr <= 1'b1;
        if (import_done && st[imp_k] != IV_DONE)
          imp_cnt[imp_k] <= imp_cnt[imp_k] + 1'b1
                            - ((p_import_ok && p_ptr == imp_k) ? cfg_num_fpgas : 4'd0);
        // ---- process scanner
        if (p_import_ok) begin
          st[p_ptr] <= IV_PROCESS;
          if (round_cnt + 1'b1 == (KW+1)'(cfg_num_intervals)) begin
            round_cnt <= '0;
            round     <= round + 1'b1;
            pepu_cnt  <= '0;
            rx_cnt    <= rx_cnt + (KW+5)'(import_done) - round_batches;
            // a whole round without a frontier: no vertex is active any more
            round_fr  <= frontier_in;
            if (cfg_sync && !round_fr && !frontier_in) converged <= 1'b1;
          end else begin
            round_cnt <= round_cnt + 1'b1;
          end
          if (!(import_done && imp_k == p_ptr)) imp_cnt[p_ptr] <= imp_cnt[p_ptr] - cfg_num_fpgas;
        end else if (p_retire) begin
          st[p_ptr]  <= IV_DONE;
          retire_cnt <= retire_cnt + 1'b1;
          p_ptr      <= nxt(p_ptr, last_k);
        end else if (p_dispatch) begin
          st[p_ptr]        <= IV_PROCESSING;
          slot_of[p_ptr]   <= free_slot;
          slot_used[free_slot] <= 1'b1;
          pepu_busy        <= 1'b1;
          pepu_k           <= p_ptr;
          pepu_start       <= 1'b1;
          pepu_interval    <= ivl_t'(p_ptr);
          pepu_slot        <= free_slot;
          pepu_iter        <= iter[p_ptr];
          p_ptr            <= nxt(p_ptr, last_k);
        end else begin
          if (running && st[p_ptr] == IV_PROCESS && !barrier_ok && !pepu_busy)
            barrier_stalls <= barrier_stalls + 1;
          p_ptr <= nxt(p_ptr, last_k);
        end
        if (pepu_done) begin
          st[pepu_k] <= IV_APPLY;
          pepu_busy  <= 1'b0;
          pepu_cnt   <= pepu_cnt + 1'b1;
        end
        // ---- apply scanner
        if (a_dispatch) begin
          st[a_ptr]   <= IV_APPLYING;
          au_busy     <= 1'b1;
          au_k        <= a_ptr;
          au_start    <= 1'b1;
          au_interval <= ivl_t'(a_ptr);
          au_slot     <= slot_of[a_ptr];
          au_iter     <= iter[a_ptr];
        end
        a_ptr <= nxt(a_ptr, last_k);
        if (au_done) begin
          st[au_k]  <= IV_EXPORT;
          au_busy   <= 1'b0;
          slot_used[slot_of[au_k]] <= 1'b0;
        end
        // ---- export scanner
        if (x_dispatch) begin
          st[x_ptr]   <= IV_EXPORTING;
          ef_busy     <= 1'b1;
          ef_k        <= x_ptr;
          ef_start    <= 1'b1;
          ef_interval <= ivl_t'(x_ptr);
        end
        x_ptr <= nxt(x_ptr, last_k);
        if (ef_done) begin
          ef_busy <= 1'b0;
          iter[ef_k] <= iter[ef_k] + 1'b1;
          if (iter[ef_k] >= cfg_max_iter) begin
            st[ef_k]            <= IV_DONE;
            done_cnt            <= done_cnt + 1'b1;
            intervals_completed <= intervals_completed + 1;
          end else begin
            st[ef_k] <= IV_IMPORT;
          end
        end
        if (done_cnt + retire_cnt == (KW+1)'(cfg_num_intervals) && !ef_busy) begin
          running  <= 1'b0;
          all_done <= 1'b1;
        end
      end
    end
  end

  a_one_state_write: assert property (@(posedge clk) disable iff (!rst_n)
    pepu_done |-> st[pepu_k] == IV_PROCESSING);
endmodule
