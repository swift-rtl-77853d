// hbm_stream_reader: turns a (base, count) read job into a valid/ready stream
// of HBM words.
//
// On start it issues count read requests to addresses base, base+1, ...
// Read responses arrive in order, a fixed but unknown number of cycles later,
// and cannot be back-pressured, so the reader only issues a request when the
// words already in flight plus those waiting in its response FIFO leave room
// for one more (credit-based flow control). done pulses once the last word
// has left the output stream. The port protocol is this design's own choice.
module hbm_stream_reader
  import swift_pkg::*;
#(
  parameter int unsigned DEPTH = 16
) (
  input  logic  clk,
  input  logic  rst_n,
  input  logic  start,
  input  addr_t base,
  input  logic [31:0] count,
  output logic  busy,
  output logic  done,
  // HBM request side (reads only)
  output logic  req_valid,
  input  logic  req_ready,
  output addr_t req_addr,
  input  logic  rsp_valid,
  input  word_t rsp_data,
  // output stream
  output logic  out_valid,
  input  logic  out_ready,
  output word_t out_data
);
  localparam int unsigned CW = $clog2(DEPTH) + 1;

  logic [31:0]   issued, delivered, total;
  logic [CW-1:0] inflight, fcount;
  logic          f_in_ready;

  sync_fifo #(.T(word_t), .DEPTH(DEPTH)) u_fifo (
    .clk, .rst_n,
    .in_valid (rsp_valid), .in_ready (f_in_ready), .in_data (rsp_data),
    .out_valid, .out_ready, .out_data, .count (fcount)
  );

  wire have_credit = (32'(inflight) + 32'(fcount)) < DEPTH;
  assign req_valid = busy && (issued != total) && have_credit;
  assign req_addr  = base + addr_t'(issued);

  wire req_fire = req_valid && req_ready;
  wire out_fire = out_valid && out_ready;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy      <= 1'b0;
      done      <= 1'b0;
      issued    <= '0;
      delivered <= '0;
      total     <= '0;
      inflight  <= '0;
    end else begin
      done     <= 1'b0;
      inflight <= inflight + CW'(req_fire) - CW'(rsp_valid);
      if (start && !busy) begin
        busy      <= (count != 0);
        done      <= (count == 0);
        issued    <= '0;
        delivered <= '0;
        total     <= count;
      end else if (busy) begin
        if (req_fire) issued <= issued + 1;
        if (out_fire) begin
          delivered <= delivered + 1;
          if (delivered + 1 == total) begin
            busy <= 1'b0;
            done <= 1'b1;
          end
        end
      end
    end
  end

  a_rsp_fits: assert property (@(posedge clk) disable iff (!rst_n) rsp_valid |-> f_in_ready);
endmodule
