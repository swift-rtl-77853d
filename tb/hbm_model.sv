// hbm_model: behavioural model of one HBM pseudo-channel for simulation.
//
// Not synthesizable. Word-addressed sparse memory (an associative array)
// behind the request/response port used by the accelerator: a request is
// accepted when req_valid && req_ready; a read returns its word LATENCY
// cycles later on rsp_valid/rsp_data, in request order; a write takes effect
// at once. req_ready is pseudo-randomly low STALL_PCT percent of the
// cycles to exercise back-pressure. Unwritten
// words read as zero. poke/peek give the testbench backdoor access.
module hbm_model
  import swift_pkg::*;
#(
  parameter int unsigned LATENCY   = 6,
  parameter int unsigned STALL_PCT = 20,     // percent of cycles with req_ready low
  parameter int unsigned SEED      = 1
) (
  input  logic     clk,
  input  logic     rst_n,
  input  logic     req_valid,
  output logic     req_ready,
  input  mem_req_t req,
  output logic     rsp_valid,
  output word_t    rsp_data
);
  word_t   mem [addr_t];
  word_t   q_data [$];
  longint  q_due  [$];
  longint  cyc;
  int unsigned rng;

  function automatic void poke(addr_t a, word_t d);
    mem[a] = d;
  endfunction

  function automatic word_t peek(addr_t a);
    return mem.exists(a) ? mem[a] : '0;
  endfunction

  function automatic void clear();
    mem.delete();
  endfunction

  always @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cyc       <= 0;
      rng       <= SEED * 32'h9e3779b9 + 1;
      req_ready <= 1'b0;
      rsp_valid <= 1'b0;
      rsp_data  <= '0;
    end else begin
      cyc <= cyc + 1;
      rng <= rng * 32'd1664525 + 32'd1013904223;
      req_ready <= ((rng >> 16) % 100) >= STALL_PCT;
      if (req_valid && req_ready) begin
        if (req.we) begin
          mem[req.addr] = req.wdata;
        end else begin
          q_data.push_back(mem.exists(req.addr) ? mem[req.addr] : '0);
          q_due.push_back(cyc + LATENCY);
        end
      end
      if (q_due.size() != 0 && q_due[0] <= cyc) begin
        rsp_valid <= 1'b1;
        rsp_data  <= q_data.pop_front();
        void'(q_due.pop_front());
      end else begin
        rsp_valid <= 1'b0;
      end
    end
  end
endmodule
