// tb_source_interval_broadcaster: self-checking test of the source interval
// broadcaster. Preloads a behavioural frontier HBM with random source
// entries, broadcasts two intervals and checks that every index of each
// interval is written exactly once with the entry at base + index, and that
// done follows the last write.
`timescale 1ns/1ps
module tb_source_interval_broadcaster;
  import swift_pkg::*;
  localparam int unsigned SRC_DEPTH = 128;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic start, busy, done, req_valid, req_ready, rsp_valid, bc_we;
  addr_t req_addr;
  word_t rsp_data;
  logic [6:0] bc_waddr;
  src_entry_t bc_wdata;
  logic [31:0] sent;
  vid_t base;
  logic [31:0] count;
  mem_req_t mreq;

  assign mreq.we = 1'b0;
  assign mreq.addr = req_addr;
  assign mreq.wdata = '0;

  source_interval_broadcaster #(.SRC_DEPTH(SRC_DEPTH)) dut (
    .clk, .rst_n, .start, .base, .count, .busy, .done, .req_valid, .req_ready, .req_addr,
    .rsp_valid, .rsp_data, .bc_we, .bc_waddr, .bc_wdata, .entries_sent (sent)
  );
  hbm_model #(.LATENCY(7), .STALL_PCT(30), .SEED(5)) u_hbm (
    .clk, .rst_n, .req_valid, .req_ready, .req (mreq), .rsp_valid, .rsp_data
  );

  int checks = 0, failures = 0;
  int hits [SRC_DEPTH];
  bit done_seen;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  always @(posedge clk) begin
    if (rst_n && bc_we) begin
      automatic word_t w = u_hbm.peek(addr_t'(base) + addr_t'(bc_waddr));
      hits[bc_waddr]++;
      check(bc_wdata == src_entry_t'(w[39:0]), $sformatf("entry %0d", bc_waddr));
      check(!done_seen, "no write after done");
    end
    if (rst_n && done) done_seen = 1;
  end

  initial begin
    #2000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    start = 0; base = 0; count = 0;
    for (int a = 0; a < 1024; a++) u_hbm.poke(addr_t'(a), word_t'({$urandom, $urandom}));
    repeat (3) @(posedge clk);
    rst_n = 1;
    repeat (3) @(posedge clk);
    for (int k = 1; k <= 2; k++) begin
      foreach (hits[i]) hits[i] = 0;
      done_seen = 0;
      base  <= vid_t'(k * SRC_DEPTH);
      count <= SRC_DEPTH;
      start <= 1;
      @(posedge clk);
      start <= 0;
      while (!done_seen) @(posedge clk);
      repeat (3) @(posedge clk);
      foreach (hits[i]) check(hits[i] == 1, $sformatf("index %0d written once", i));
    end
    check(sent == 2 * SRC_DEPTH, "entries_sent");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
