// Event queue of a neuron core.
//
// Incoming events (from the network or looped back from the local SCU) wait here
// until the PSL takes them, first in, first out. The paper only says that a buffer
// stores received events for FIFO processing; the depth (DEPTH, default 16) and the
// valid/ready handshake on both sides are this design's choices.
//
// Interface: in_valid/in_ready/in_data and out_valid/out_ready/out_data; a word moves
// when valid and ready are both high at a clock edge. in_ready is low while the queue
// is full (back-pressure to the writer), out_valid is high while it holds an event.
// A write into an empty queue is visible on out_* one cycle later. count gives the
// current fill level.
module event_fifo
  import scp_pkg::*;
#(
  parameter int unsigned DEPTH = 16,
  parameter int unsigned CNT_W = $clog2(DEPTH + 1)
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             in_valid,
  output logic             in_ready,
  input  event_t           in_data,
  output logic             out_valid,
  input  logic             out_ready,
  output event_t           out_data,
  output logic [CNT_W-1:0] count
);

  localparam int unsigned PTR_W = (DEPTH > 1) ? $clog2(DEPTH) : 1;

  event_t           buf_q [DEPTH];
  logic [PTR_W-1:0] rd_ptr, wr_ptr;

  wire push = in_valid && in_ready;
  wire pop  = out_valid && out_ready;

  assign in_ready  = (count != CNT_W'(DEPTH));
  assign out_valid = (count != '0);
  assign out_data  = buf_q[rd_ptr];

  function automatic logic [PTR_W-1:0] inc(input logic [PTR_W-1:0] p);
    return (p == PTR_W'(DEPTH - 1)) ? '0 : p + 1'b1;
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rd_ptr <= '0;
      wr_ptr <= '0;
      count  <= '0;
    end else begin
      if (push) wr_ptr <= inc(wr_ptr);
      if (pop)  rd_ptr <= inc(rd_ptr);
      count <= count + CNT_W'(push) - CNT_W'(pop);
    end
  end

  always_ff @(posedge clk) begin
    if (push) buf_q[wr_ptr] <= in_data;
  end

  a_no_overflow  : assert property (@(posedge clk) disable iff (!rst_n) count <= CNT_W'(DEPTH));
  a_out_stable   : assert property (@(posedge clk) disable iff (!rst_n)
                                    out_valid && !out_ready |=> out_valid && $stable(out_data));

endmodule
