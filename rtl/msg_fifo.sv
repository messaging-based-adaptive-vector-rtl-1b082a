// msg_fifo: the Left or Top input queue of a SiteO.
//
// A synchronous first-in first-out queue of DEPTH messages with a fall-through
// path: while the queue is empty the incoming message is offered to the reader
// in the same cycle, so a message that meets an idle SiteO is consumed without
// a storage cycle and the SiteO turns it around in one clock. Messages that
// cannot be consumed at once are stored in order.
//
// Interface: in_valid/in_msg write a message; full tells the sender to stop.
// A message is taken from the sender in every cycle with in_valid high and full
// low. out_valid/out_msg show the oldest message; pop (only with out_valid)
// removes it at the clock edge. full depends only on registered state.
//
// The two queues, their purpose and the full signal sent back to the sender
// follow the published SiteO description; the depth is not given and the
// default of 4 is this design's choice.
module msg_fifo
  import mipu_pkg::*;
#(
  parameter int unsigned DEPTH = 4
) (
  input  logic clk,
  input  logic rst_n,
  input  logic in_valid,
  input  msg_t in_msg,
  output logic full,
  output logic out_valid,
  output msg_t out_msg,
  input  logic pop
);

  localparam int unsigned AW = (DEPTH > 1) ? $clog2(DEPTH) : 1;

  msg_t                mem [DEPTH];
  logic [AW-1:0]       rd_ptr, wr_ptr;
  localparam int unsigned CW = $clog2(DEPTH + 1);
  logic [CW-1:0]       count;
  logic                empty, push, bypass;

  assign empty     = (count == 0);
  assign full      = (count == CW'(DEPTH));
  assign out_valid = !empty || in_valid;
  assign out_msg   = empty ? in_msg : mem[rd_ptr];
  // an incoming message consumed straight from the input is not stored
  assign bypass    = empty && in_valid && pop;
  assign push      = in_valid && !full && !bypass;

  function automatic logic [AW-1:0] incr(logic [AW-1:0] p);
    return (p == AW'(DEPTH - 1)) ? '0 : p + 1'b1;
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rd_ptr <= '0;
      wr_ptr <= '0;
      count  <= '0;
    end else begin
      if (push) wr_ptr <= incr(wr_ptr);
      if (pop && !empty) rd_ptr <= incr(rd_ptr);
      count <= count + CW'(push) - CW'(pop && !empty);
    end
  end

  always_ff @(posedge clk) begin
    if (push) mem[wr_ptr] <= in_msg;
  end

  // a pop is only legal when a message is offered
  assert property (@(posedge clk) disable iff (!rst_n) pop |-> out_valid);

endmodule
