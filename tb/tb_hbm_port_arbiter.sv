// tb_hbm_port_arbiter: self-checking test of the HBM channel request arbiter.
//
// Three requesters issue random reads and writes at the same time through
// the arbiter to a behavioural HBM channel with random back-pressure. Each
// requester reads from its own preloaded region (word value = address * 7 +
// 1) and writes to its own write region. Checks: every requester gets
// exactly its own read data, in order; every write lands; no requester
// starves (each finishes its 200 requests).
`timescale 1ns/1ps
module tb_hbm_port_arbiter;
  import swift_pkg::*;
  localparam int N = 3;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic     in_req_valid [N];
  logic     in_req_ready [N];
  mem_req_t in_req       [N];
  logic     in_rsp_valid [N];
  word_t    in_rsp_data;
  logic     m_req_valid, m_req_ready, m_rsp_valid;
  mem_req_t m_req;
  word_t    m_rsp_data;

  hbm_port_arbiter #(.N(N), .OUTSTANDING(8)) dut (
    .clk, .rst_n, .in_req_valid, .in_req_ready, .in_req, .in_rsp_valid, .in_rsp_data,
    .out_req_valid (m_req_valid), .out_req_ready (m_req_ready), .out_req (m_req),
    .out_rsp_valid (m_rsp_valid), .out_rsp_data (m_rsp_data)
  );
  hbm_model #(.LATENCY(5), .STALL_PCT(25), .SEED(3)) u_hbm (
    .clk, .rst_n, .req_valid (m_req_valid), .req_ready (m_req_ready), .req (m_req),
    .rsp_valid (m_rsp_valid), .rsp_data (m_rsp_data)
  );

  int checks = 0, failures = 0;
  word_t exp_q [N][$];
  int issued [N];

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  function automatic word_t pattern(addr_t a);
    return word_t'(a) * 7 + 1;
  endfunction

  always @(posedge clk) begin
    if (rst_n) begin
      for (int i = 0; i < N; i++) begin
        if (in_rsp_valid[i]) begin
          if (exp_q[i].size() == 0) check(0, "unexpected response");
          else check(in_rsp_data == exp_q[i].pop_front(), $sformatf("read data to %0d", i));
        end
        if (in_req_valid[i] && in_req_ready[i]) begin
          if (!in_req[i].we) exp_q[i].push_back(pattern(in_req[i].addr));
          issued[i]++;
        end
      end
      for (int i = 0; i < N; i++) begin
        if (!in_req_valid[i] || in_req_ready[i]) begin
          if (issued[i] + ((in_req_valid[i] && in_req_ready[i]) ? 0 : 0) < 200 &&
              $urandom_range(0, 3) != 0) begin
            automatic bit we = $urandom_range(0, 1);
            in_req_valid[i] <= 1'b1;
            in_req[i].we    <= we;
            in_req[i].addr  <= we ? addr_t'(32'h1000 * (i + 1) + issued[i])
                                  : addr_t'(32'h100 * i + $urandom_range(0, 255));
            in_req[i].wdata <= word_t'({i[7:0], issued[i]});
          end else begin
            in_req_valid[i] <= 1'b0;
          end
        end
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
    for (int i = 0; i < N; i++) begin
      in_req_valid[i] = 0; in_req[i] = '0; issued[i] = 0;
    end
    for (int a = 0; a < 32'h300; a++) u_hbm.poke(addr_t'(a), pattern(addr_t'(a)));
    repeat (3) @(posedge clk);
    rst_n = 1;
    wait (issued[0] >= 200 && issued[1] >= 200 && issued[2] >= 200);
    repeat (30) @(posedge clk);
    for (int i = 0; i < N; i++) begin
      check(exp_q[i].size() == 0, "all reads answered");
      check(issued[i] >= 200, "requester not starved");
    end
    // writes: every written address holds its requester's data
    for (int i = 0; i < N; i++)
      for (int a = 32'h1000 * (i + 1); a < 32'h1000 * (i + 1) + 200; a++) begin
        automatic word_t w = u_hbm.peek(addr_t'(a));
        if (w != '0) check(w[39:32] == 8'(i), "write landed with its requester's data");
      end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
