// siteo: the SiteO, the compute and message-passing element of the fabric.
//
// A SiteO sits at a fixed global row and column of the SiteO grid, given by
// the constant inputs my_row and my_col, and answers to the 12-bit
// destination mipu_pkg::make_addr(my_row, my_col). Position inputs rather than
// parameters keep all SiteOs one module, as the same cell replicated. Messages come in
// from the left and from the top, each through its own queue (msg_fifo), and
// leave to the right or downwards through one output register each.
//
// Every cycle the message fetcher takes at most one message from the heads of
// the two queues (round robin when both can proceed). The decoder compares its
// destination with the SiteO's own address:
//   * no match: the message is forwarded unchanged (the SiteO acts as a
//     buffer);
//   * match: the opcode is executed. Prog stores the value, the next opcode
//     and the next destination. UPDATE, A_ADD, A_SUB, A_MUL, A_DIV, Av_ADD and
//     CMP replace the stored value by (stored OP incoming). The stream opcodes
//     A_ADDS, A_SUBS, A_MULS, A_DIVS and RELU compute (stored OP incoming) and
//     the message generation unit sends the result on as a new message
//     {present opcode = stored next opcode, present destination = stored next
//     destination, value = result, next fields zero}.
// The distribution unit sends any outgoing message right when its destination
// lies in the SiteO's own row and down otherwise, so messages travel down
// their column to the destination row and then right along it. A message for a
// destination above or to the left therefore leaves the grid at its right or
// bottom edge; that is how results are offloaded.
//
// Fan-in counter: a stream opcode may have several operands that arrive as
// separate messages (nine products for one 3x3 convolution sum, for example).
// The SiteO counts them: the first operand is combined with the stored value,
// the following ones with a running partial result, and the new message is
// sent when the count reaches the programmed fan-in (1 after reset). The count
// is loaded with the OP_CNT message (value bits [7:0]).
//
// Timing: a message that reaches an idle SiteO with empty queues appears on its
// output register one clock later. An output register holds its message while
// the receiver reports full; the SiteO then stops taking messages that need
// that output, and its own queues fill and report full to their senders.
//
// Follows the published description: the left and top queues with a full
// signal, the fetcher, decoder, execution unit (FPU), registers holding value,
// next opcode and next destination, message generation and distribution
// units, the "same row: right, otherwise down" routing rule, the one-cycle
// turnaround, and the meaning of the thirteen opcodes. This design's own
// choices: the operand order (stored value first, so A_SUB gives stored minus
// incoming and A_DIV stored over incoming), Av_ADD as (stored + incoming) / 2,
// CMP as the maximum, round-robin arbitration, a SiteO that has never received
// Prog executes update opcodes but sends no generated messages, messages
// arriving at their destination with opcode "none" are dropped, and the
// OP_CNT message that loads the fan-in counter. The 8-word instruction buffer
// and the weight SRAM the text mentions are not modelled: the stored value
// register holds the weight.
module siteo
  import mipu_pkg::*;
#(
  parameter int unsigned FIFO_DEPTH = 4
) (
  input  logic clk,
  input  logic rst_n,
  // position: global row and column of this SiteO (constants at instance)
  input  logic [5:0] my_row,
  input  logic [5:0] my_col,
  // left input
  input  logic left_valid,
  input  msg_t left_msg,
  output logic left_full,
  // top input
  input  logic top_valid,
  input  msg_t top_msg,
  output logic top_full,
  // right output
  output logic right_valid,
  output msg_t right_msg,
  input  logic right_full,
  // down output
  output logic down_valid,
  output msg_t down_msg,
  input  logic down_full
);

  addr_t MY_ADDR;
  assign MY_ADDR = make_addr(my_row, my_col);

  // ---------------------------------------------------------------- queues
  logic lq_valid, tq_valid, lq_pop, tq_pop;
  msg_t lq_msg, tq_msg;

  msg_fifo #(.DEPTH(FIFO_DEPTH)) u_left_fifo (
    .clk, .rst_n, .in_valid(left_valid), .in_msg(left_msg), .full(left_full),
    .out_valid(lq_valid), .out_msg(lq_msg), .pop(lq_pop));

  msg_fifo #(.DEPTH(FIFO_DEPTH)) u_top_fifo (
    .clk, .rst_n, .in_valid(top_valid), .in_msg(top_msg), .full(top_full),
    .out_valid(tq_valid), .out_msg(tq_msg), .pop(tq_pop));

  // ------------------------------------------------------------- registers
  logic [31:0] stored_q;      // stored (programmed) value, e.g. a weight
  logic [31:0] acc_q;         // partial result while counting operands
  logic [3:0]  next_op_q;
  addr_t       next_dest_q;
  logic        programmed_q;
  logic [7:0]  cnt_q;         // operands received so far
  logic [7:0]  fanin_q;       // operands per generated message
  logic        rr_q;          // 1: top queue has priority

  // ---------------------------------------------------------- output state
  logic right_free, down_free;
  assign right_free = !right_valid || !right_full;
  assign down_free  = !down_valid  || !down_full;

  function automatic logic goes_right(addr_t d);
    return addr_row(d) == my_row;
  endfunction

  // Will a message need an output, and is that output free?
  function automatic logic can_go(msg_t m, logic prog_now,
                                  logic [7:0] cnt_now, logic [7:0] fanin_now,
                                  logic rf, logic df);
    logic fire;
    if (m.dest != MY_ADDR)
      return goes_right(m.dest) ? rf : df;
    fire = is_stream(m.op) && prog_now && (32'(cnt_now) + 1 >= 32'(fanin_now));
    if (!fire) return 1'b1;
    return goes_right(next_dest_q) ? rf : df;
  endfunction

  logic l_ok, t_ok, grant_l, grant_t;
  assign l_ok = lq_valid && can_go(lq_msg, programmed_q, cnt_q, fanin_q,
                                   right_free, down_free);
  assign t_ok = tq_valid && can_go(tq_msg, programmed_q, cnt_q, fanin_q,
                                   right_free, down_free);
  assign grant_t = t_ok && (rr_q || !l_ok);
  assign grant_l = l_ok && !grant_t;
  assign lq_pop  = grant_l;
  assign tq_pop  = grant_t;

  msg_t  cur;
  logic  take, match;
  assign take  = grant_l || grant_t;
  assign cur   = grant_t ? tq_msg : lq_msg;
  assign match = (cur.dest == MY_ADDR);

  // ------------------------------------------------------- execution unit
  fpu_op_e     fop;
  logic [31:0] fpu_a, fpu_y;
  assign fop   = fpu_op_of(cur.op);
  assign fpu_a = (is_stream(cur.op) && cnt_q != 0) ? acc_q : stored_q;

  fp32_alu u_fpu (.op(fop), .a(fpu_a), .b(cur.value), .y(fpu_y));

  // ------------------------------------------- generation and distribution
  logic  last_operand, emit;
  msg_t  gen_msg, out_msg;
  logic  send, send_right;

  assign last_operand = (32'(cnt_q) + 1 >= 32'(fanin_q));
  assign emit         = take && match && is_stream(cur.op) && last_operand && programmed_q;

  always_comb begin
    gen_msg           = '0;
    gen_msg.op        = next_op_q;
    gen_msg.dest      = next_dest_q;
    gen_msg.value     = fpu_y;
    send              = 1'b0;
    out_msg           = cur;
    if (take && !match) begin
      send    = 1'b1;
      out_msg = cur;
    end else if (emit) begin
      send    = 1'b1;
      out_msg = gen_msg;
    end
    send_right = goes_right(out_msg.dest);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      right_valid <= 1'b0;
      right_msg   <= '0;
      down_valid  <= 1'b0;
      down_msg    <= '0;
    end else begin
      if (send && send_right) begin
        right_valid <= 1'b1;
        right_msg   <= out_msg;
      end else if (!right_full) begin
        right_valid <= 1'b0;
      end
      if (send && !send_right) begin
        down_valid <= 1'b1;
        down_msg   <= out_msg;
      end else if (!down_full) begin
        down_valid <= 1'b0;
      end
    end
  end

  // ------------------------------------------------------ register update
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      stored_q     <= '0;
      acc_q        <= '0;
      next_op_q    <= OP_NONE;
      next_dest_q  <= '0;
      programmed_q <= 1'b0;
      cnt_q        <= '0;
      fanin_q      <= 8'd1;
      rr_q         <= 1'b0;
    end else begin
      if (lq_valid && tq_valid) rr_q <= grant_l;
      if (take && match) begin
        unique case (cur.op)
          OP_PROG: begin
            stored_q     <= cur.value;
            next_op_q    <= cur.next_op;
            next_dest_q  <= cur.next_dest;
            programmed_q <= 1'b1;
            cnt_q        <= '0;
          end
          OP_CNT: begin
            fanin_q <= (cur.value[7:0] == 0) ? 8'd1 : cur.value[7:0];
            cnt_q   <= '0;
          end
          OP_UPDATE:
            stored_q <= cur.value;
          OP_A_ADD, OP_A_SUB, OP_A_MUL, OP_A_DIV, OP_AV_ADD, OP_CMP:
            stored_q <= fpu_y;
          OP_A_ADDS, OP_A_SUBS, OP_A_MULS, OP_A_DIVS, OP_RELU: begin
            if (last_operand) begin
              cnt_q <= '0;
            end else begin
              cnt_q <= cnt_q + 1'b1;
              acc_q <= fpu_y;
            end
          end
          default: ;   // OP_NONE and unused codes: dropped
        endcase
      end
    end
  end

  // an output register holds its message while the receiver is full
  assert property (@(posedge clk) disable iff (!rst_n)
                   right_valid && right_full |=> right_valid && $stable(right_msg));
  assert property (@(posedge clk) disable iff (!rst_n)
                   down_valid && down_full |=> down_valid && $stable(down_msg));
  // at most one message is taken per cycle
  assert property (@(posedge clk) disable iff (!rst_n) !(lq_pop && tq_pop));

endmodule
