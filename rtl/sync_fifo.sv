// sync_fifo: single-clock first-word-fall-through FIFO.
//
// Used for the per-PE frontier queues and the read-response buffers of the
// HBM stream readers. push when in_valid && in_ready; pop when
// out_valid && out_ready. The head is available combinationally from the
// storage array; count gives the fill level. DEPTH must be a power of two.
module sync_fifo #(
  parameter type         T     = logic [31:0],
  parameter int unsigned DEPTH = 16
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     in_valid,
  output logic                     in_ready,
  input  T                         in_data,
  output logic                     out_valid,
  input  logic                     out_ready,
  output T                         out_data,
  output logic [$clog2(DEPTH):0]   count
);
  localparam int unsigned AW = $clog2(DEPTH);

  T              mem [DEPTH];
  logic [AW-1:0] wptr, rptr;

  assign in_ready  = (count != DEPTH[AW:0]);
  assign out_valid = (count != '0);
  assign out_data  = mem[rptr];

  wire do_push = in_valid && in_ready;
  wire do_pop  = out_valid && out_ready;

  always_ff @(posedge clk) begin
    if (do_push) mem[wptr] <= in_data;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wptr  <= '0;
      rptr  <= '0;
      count <= '0;
    end else begin
      if (do_push) wptr <= wptr + 1'b1;
      if (do_pop)  rptr <= rptr + 1'b1;
      count <= count + (AW+1)'(do_push) - (AW+1)'(do_pop);
    end
  end

  a_no_overflow: assert property (@(posedge clk) disable iff (!rst_n) count <= DEPTH[AW:0]);
endmodule
