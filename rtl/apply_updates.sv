// apply_updates: the Apply-updates stage (AU_M) of one processing element.
//
// The destination properties of one destination partition (DEPTH vertices,
// the PE's share of one interval) are loaded into an on-chip URAM buffer.
// The partition's vertex updates then stream in and are resolved with the
// user Apply function: V_prop <- Apply(V_temp_prop, res). Finally drain
// scans the buffer and emits every vertex whose property changed as an
// active frontier (local index and new property); only those need to be
// written back to HBM and exported.
//
// Timing: one update per cycle. A read-modify-write takes two cycles (a
// registered URAM read, then compute and write). When the next update hits
// the vertex being written in the same cycle, the new value is forwarded
// into the read register (the bypass counted in forwards), so back-to-back
// updates to one vertex are applied correctly at full rate. Drain reads one
// entry per cycle through an output register with valid/ready.
// The paper specifies the URAM buffer, the Apply function and frontier
// generation; the forwarding pipeline and the "changed" rule for
// activity are this design's choices.
module apply_updates
  import swift_pkg::*;
#(
  parameter int unsigned DEPTH = 512
) (
  input  logic  clk,
  input  logic  rst_n,
  input  algo_e cfg_algo,
  // partition load
  input  logic  ld_valid,
  input  logic [$clog2(DEPTH)-1:0] ld_idx,
  input  prop_t ld_prop,
  // vertex updates
  input  logic  upd_valid,
  output logic  upd_ready,
  input  logic [$clog2(DEPTH)-1:0] upd_idx,
  input  prop_t upd_value,
  // drain of changed vertices
  input  logic  drain_start,
  output logic  drain_done,
  output logic  out_valid,
  input  logic  out_ready,
  output logic [$clog2(DEPTH)-1:0] out_idx,
  output prop_t out_prop,
  // status
  output logic  busy,
  output logic [31:0] applied,
  output logic [31:0] forwards
);
  localparam int unsigned AW = $clog2(DEPTH);
  typedef logic [AW-1:0] idx_t;

  prop_t vprop   [DEPTH];
  logic  changed [DEPTH];

  logic  s1_valid;
  idx_t  s1_idx;
  prop_t s1_val, s1_old;
  logic  draining, drain_wait;
  idx_t  scan;
  logic  scan_last;

  wire prop_t s1_new = apply_fn(cfg_algo, s1_old, s1_val);
  wire upd_fire = upd_valid && upd_ready;
  wire fwd      = s1_valid && upd_fire && (s1_idx == upd_idx);
  wire can_out  = !out_valid || out_ready;
  wire rd_scan  = draining && !drain_wait && can_out;

  assign upd_ready = !draining;
  assign busy      = s1_valid || draining;

  // URAM array: load, apply write, apply read, drain read
  always_ff @(posedge clk) begin
    if (ld_valid) begin
      vprop[ld_idx]   <= ld_prop;
      changed[ld_idx] <= 1'b0;
    end else if (s1_valid) begin
      vprop[s1_idx] <= s1_new;
      if (s1_new != s1_old) changed[s1_idx] <= 1'b1;
    end
    if (upd_fire) s1_old <= fwd ? s1_new : vprop[upd_idx];
    if (rd_scan) out_prop <= vprop[scan];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      s1_valid   <= 1'b0;
      s1_idx     <= '0;
      s1_val     <= '0;
      draining   <= 1'b0;
      drain_wait <= 1'b0;
      drain_done <= 1'b0;
      scan       <= '0;
      scan_last  <= 1'b0;
      out_valid  <= 1'b0;
      out_idx    <= '0;
      applied    <= '0;
      forwards   <= '0;
    end else begin
      drain_done <= 1'b0;
      s1_valid   <= upd_fire;
      if (upd_fire) begin
        s1_idx <= upd_idx;
        s1_val <= upd_value;
      end
      if (s1_valid) applied  <= applied + 1;
      if (fwd)      forwards <= forwards + 1;

      if (out_valid && out_ready) out_valid <= 1'b0;
      if (drain_start && !draining) begin
        draining   <= 1'b1;
        drain_wait <= 1'b1;         // let the last apply write land first
        scan       <= '0;
        scan_last  <= 1'b0;
      end else if (draining && drain_wait) begin
        drain_wait <= s1_valid;
      end else if (draining) begin
        if (scan_last && can_out) begin
          draining   <= 1'b0;
          drain_done <= 1'b1;
        end else if (rd_scan) begin
          out_valid <= changed[scan];
          out_idx   <= scan;
          scan      <= scan + 1'b1;
          scan_last <= (scan == idx_t'(DEPTH - 1));
        end
      end
    end
  end

  a_no_load_during_apply: assert property (@(posedge clk) disable iff (!rst_n)
                                           !(ld_valid && s1_valid));
endmodule
