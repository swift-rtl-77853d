// hbm_port_arbiter: shares one HBM channel port between N requesters.
//
// This is the "worker channel read/write request buffer" in front of each
// HBM channel. A round-robin grant picks one valid requester per cycle and
// forwards its request. For every read it forwards, the arbiter records the
// requester's number in an order FIFO; since the channel answers reads in
// order, the head of that FIFO names the owner of each returning response.
// Writes need no response. A read is only granted while the order FIFO has
// room, which bounds the reads in flight to OUTSTANDING. Requests pass
// through combinationally (zero added latency); responses are steered
// combinationally as well.
module hbm_port_arbiter
  import swift_pkg::*;
#(
  parameter int unsigned N           = 4,
  parameter int unsigned OUTSTANDING = 64
) (
  input  logic           clk,
  input  logic           rst_n,
  // requesters
  input  logic           in_req_valid [N],
  output logic           in_req_ready [N],
  input  mem_req_t       in_req       [N],
  output logic           in_rsp_valid [N],
  output word_t          in_rsp_data,
  // channel
  output logic           out_req_valid,
  input  logic           out_req_ready,
  output mem_req_t       out_req,
  input  logic           out_rsp_valid,
  input  word_t          out_rsp_data
);
  localparam int unsigned IW = (N > 1) ? $clog2(N) : 1;
  typedef logic [IW-1:0] idx_t;

  idx_t rr;            // requester with the highest priority this cycle
  idx_t gnt;
  logic gnt_valid;
  logic ord_in_ready, ord_out_valid;
  idx_t ord_head;
  logic [$clog2(OUTSTANDING):0] ord_count;

  // A requester is eligible when it has a request that can be accepted now.
  always_comb begin
    gnt       = '0;
    gnt_valid = 1'b0;
    for (int k = 0; k < N; k++) begin
      automatic int unsigned j = (int'(rr) + k) % N;
      if (!gnt_valid && in_req_valid[j] && (in_req[j].we || ord_in_ready)) begin
        gnt       = idx_t'(j);
        gnt_valid = 1'b1;
      end
    end
  end

  assign out_req_valid = gnt_valid;
  assign out_req       = in_req[gnt];

  always_comb begin
    for (int j = 0; j < N; j++) begin
      in_req_ready[j] = gnt_valid && (gnt == idx_t'(j)) && out_req_ready;
      in_rsp_valid[j] = out_rsp_valid && ord_out_valid && (ord_head == idx_t'(j));
    end
  end
  assign in_rsp_data = out_rsp_data;

  wire fire = gnt_valid && out_req_ready;

  sync_fifo #(.T(idx_t), .DEPTH(OUTSTANDING)) u_order (
    .clk, .rst_n,
    .in_valid  (fire && !out_req.we), .in_ready (ord_in_ready), .in_data (gnt),
    .out_valid (ord_out_valid), .out_ready (out_rsp_valid), .out_data (ord_head),
    .count     (ord_count)
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) rr <= '0;
    else if (fire) rr <= (gnt == idx_t'(N-1)) ? '0 : gnt + 1'b1;
  end

  a_rsp_has_owner: assert property (@(posedge clk) disable iff (!rst_n)
                                    out_rsp_valid |-> ord_out_valid);
endmodule
