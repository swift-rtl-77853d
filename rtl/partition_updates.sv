// partition_updates: the Partition-updates stage (PU_M) of one processing
// element.
//
// Vertex updates leave process_edge in destination order that has no
// locality. This stage sorts them into NUM_BINS on-chip BRAM bins, one per
// destination interval of the PE, so that the apply stage later finds all
// updates of one destination interval together and can apply them in a
// small URAM. The bin of an update is its destination ID shifted right by
// cfg_bin_shift (the ID bits above the PE's part of an interval). When a bin
// reaches BIN_DEPTH entries it is streamed out as one burst (out_last on the
// final word) to be written to HBM; flush drains every non-empty bin in bin
// order and then pulses done.
//
// Timing: one update accepted per cycle while filling; a full bin stops the
// input for BIN_DEPTH cycles while it is drained; the final drain visits
// every bin once (one cycle per empty bin). Output words come from a
// registered BRAM read. The paper describes a recursive binary BRAM tree
// that may need several passes through HBM; this block performs one pass
// with one bin per destination interval, which reaches apply-sized
// partitions directly for the sizes of this design.
module partition_updates
  import swift_pkg::*;
#(
  parameter int unsigned NUM_BINS  = 2048,
  parameter int unsigned BIN_DEPTH = 8
) (
  input  logic    clk,
  input  logic    rst_n,
  input  logic [5:0] cfg_bin_shift,
  // updates in
  input  logic    in_valid,
  output logic    in_ready,
  input  update_t in_upd,
  // end of the update stream: drain all bins
  input  logic    flush,
  output logic    done,
  output logic    idle,
  // bursts out
  output logic    out_valid,
  input  logic    out_ready,
  output update_t out_upd,
  output logic [$clog2(NUM_BINS)-1:0] out_bin,
  output logic    out_last,
  // status
  output logic [31:0] full_flushes
);
  localparam int unsigned BW = $clog2(NUM_BINS);
  localparam int unsigned DW = $clog2(BIN_DEPTH);
  typedef logic [BW-1:0] bin_t;
  typedef logic [DW:0]   cnt_t;

  typedef enum logic [1:0] {P_FILL, P_BURST, P_SCAN} pstate_e;

  update_t bin_mem [NUM_BINS*BIN_DEPTH];
  cnt_t    cnt  [NUM_BINS];

  pstate_e st;
  logic    draining;      // in the final drain (return to P_SCAN after a burst)
  bin_t    fbin;          // bin being streamed out
  cnt_t    fidx;          // next word of the burst
  cnt_t    flen;          // burst length

  wire vid_t sh   = in_upd.dst >> cfg_bin_shift;
  wire bin_t ibin = sh[BW-1:0];

  assign in_ready = (st == P_FILL) && !draining;
  assign idle     = (st == P_FILL) && !draining && !out_valid;

  wire in_fire = in_valid && in_ready;
  wire can_out = !out_valid || out_ready;

  always_ff @(posedge clk) begin
    if (in_fire) bin_mem[{ibin, cnt[ibin][DW-1:0]}] <= in_upd;
    if (st == P_BURST && can_out) out_upd <= bin_mem[{fbin, fidx[DW-1:0]}];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st           <= P_FILL;
      draining     <= 1'b0;
      fbin         <= '0;
      fidx         <= '0;
      flen         <= '0;
      out_valid    <= 1'b0;
      out_bin      <= '0;
      out_last     <= 1'b0;
      done         <= 1'b0;
      full_flushes <= '0;
      for (int b = 0; b < NUM_BINS; b++) cnt[b] <= '0;
    end else begin
      done <= 1'b0;
      if (out_valid && out_ready) out_valid <= 1'b0;
      unique case (st)
        P_FILL: begin
          if (in_fire) begin
            if (cnt[ibin] == cnt_t'(BIN_DEPTH - 1)) begin
              // bin becomes full: stream it out now
              cnt[ibin]    <= '0;
              st           <= P_BURST;
              fbin         <= ibin;
              fidx         <= '0;
              flen         <= cnt_t'(BIN_DEPTH);
              full_flushes <= full_flushes + 1;
            end else begin
              cnt[ibin] <= cnt[ibin] + 1'b1;
            end
          end else if (flush && !draining) begin
            draining <= 1'b1;
            st       <= P_SCAN;
            fbin     <= '0;
          end
        end
        P_BURST: begin
          if (can_out) begin
            out_valid <= 1'b1;
            out_bin   <= fbin;
            out_last  <= (fidx + 1'b1 == flen);
            fidx      <= fidx + 1'b1;
            if (fidx + 1'b1 == flen) begin
              if (draining) begin
                if (fbin == bin_t'(NUM_BINS - 1)) begin
                  st <= P_FILL;
                end else begin
                  st   <= P_SCAN;
                  fbin <= fbin + 1'b1;
                end
              end else begin
                st <= P_FILL;
              end
            end
          end
        end
        P_SCAN: begin
          if (cnt[fbin] != '0) begin
            st        <= P_BURST;
            fidx      <= '0;
            flen      <= cnt[fbin];
            cnt[fbin] <= '0;
          end else if (fbin == bin_t'(NUM_BINS - 1)) begin
            st <= P_FILL;
          end else begin
            fbin <= fbin + 1'b1;
          end
        end
        default: st <= P_FILL;
      endcase
      // drain finished: back in P_FILL with the last word accepted
      if (draining && st == P_FILL && (!out_valid || out_ready)) begin
        draining <= 1'b0;
        done     <= 1'b1;
      end
    end
  end

  a_out_stable: assert property (@(posedge clk) disable iff (!rst_n)
                                 out_valid && !out_ready |=> out_valid && $stable(out_upd));
endmodule
