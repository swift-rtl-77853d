// tb_apply_updates: self-checking test of the Apply-updates stage.
//
// Loads a random partition of 64 properties, streams 400 updates at one per
// cycle, many of them back-to-back to the same vertex so the forwarding path
// is used, then drains with random back-pressure. Each drained vertex must
// be one that changed, with the sum computed here; every changed vertex must
// come out once. Also checks the one-update-per-cycle rate and that
// forwarding happened.
`timescale 1ns/1ps
module tb_apply_updates;
  import swift_pkg::*;
  localparam int unsigned DEPTH = 64;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic ld_valid, upd_valid, upd_ready, drain_start, drain_done, out_valid, out_ready, busy;
  logic [5:0] ld_idx, upd_idx, out_idx;
  prop_t ld_prop, upd_value, out_prop;
  logic [31:0] applied, forwards;

  apply_updates #(.DEPTH(DEPTH)) dut (
    .clk, .rst_n, .cfg_algo (ALGO_PR), .ld_valid, .ld_idx, .ld_prop,
    .upd_valid, .upd_ready, .upd_idx, .upd_value, .drain_start, .drain_done,
    .out_valid, .out_ready, .out_idx, .out_prop, .busy, .applied, .forwards
  );

  int checks = 0, failures = 0;
  prop_t ref_p [DEPTH];
  bit    ref_c [DEPTH];
  bit    seen  [DEPTH];
  int    n_out, n_changed, n_drain_done;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  always @(posedge clk) begin
    if (rst_n) out_ready <= ($urandom_range(0, 2) != 0);
    if (rst_n && drain_done) n_drain_done++;
    if (rst_n && out_valid && out_ready) begin
      n_out++;
      check(ref_c[out_idx], $sformatf("vertex %0d reported but unchanged", out_idx));
      check(out_prop == ref_p[out_idx], $sformatf("vertex %0d = %h, expected %h",
                                                  out_idx, out_prop, ref_p[out_idx]));
      check(!seen[out_idx], "reported once");
      seen[out_idx] = 1;
    end
  end

  initial begin
    #2000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int t0, idx;
    ld_valid = 0; upd_valid = 0; drain_start = 0; ld_idx = 0; ld_prop = 0;
    upd_idx = 0; upd_value = 0; out_ready = 1; n_out = 0; n_drain_done = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int i = 0; i < DEPTH; i++) begin
      ref_p[i] = $urandom; ref_c[i] = 0; seen[i] = 0;
      ld_valid <= 1; ld_idx <= 6'(i); ld_prop <= ref_p[i];
      @(posedge clk);
    end
    ld_valid <= 0;
    @(posedge clk);
    t0 = $time;
    idx = 0;
    for (int i = 0; i < 400; i++) begin
      prop_t v;
      if ($urandom_range(0, 2) != 0) idx = $urandom_range(0, DEPTH/2 - 1);  // repeats
      v = prop_t'($urandom_range(1, 1000));
      ref_p[idx] = ref_p[idx] + v;
      ref_c[idx] = 1;
      upd_valid <= 1; upd_idx <= 6'(idx); upd_value <= v;
      @(posedge clk);
      check(upd_ready, "update accepted every cycle");
    end
    upd_valid <= 0;
    check(($time - t0) / 10 == 400, "400 updates in 400 cycles");
    drain_start <= 1;
    @(posedge clk);
    drain_start <= 0;
    while (n_drain_done == 0) @(posedge clk);
    @(posedge clk);
    n_changed = 0;
    foreach (ref_c[i]) if (ref_c[i]) begin
      n_changed++;
      check(seen[i], $sformatf("changed vertex %0d drained", i));
    end
    check(n_out == n_changed, "drain count");
    check(applied == 400, "applied count");
    check(forwards > 0, "forwarding exercised");
    $display("forwards=%0d changed=%0d", forwards, n_changed);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
