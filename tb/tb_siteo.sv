// tb_siteo: self-checking testbench of one SiteO.
//
// The SiteO under test sits at row 0, column 1 (address 1). A monitor records
// every message that leaves at the right or bottom. The test covers forwarding
// in both directions with the one-cycle turnaround, Prog, every update and
// stream opcode with expected values worked out by hand, the fan-in counter,
// a never-programmed SiteO sending nothing, backpressure from a full receiver
// up to the input queue reporting full, and round-robin service of both inputs.
module tb_siteo;
  import mipu_pkg::*;

  logic clk = 0, rst_n = 0;
  logic left_valid = 0, top_valid = 0;
  msg_t left_msg = '0, top_msg = '0;
  logic left_full, top_full;
  logic right_valid, down_valid;
  msg_t right_msg, down_msg;
  logic right_full = 0, down_full = 0;
  int checks = 0, failures = 0;
  int cycle = 0;
  msg_t rq[$], dq[$];
  int   r_cyc[$];

  logic [5:0] my_row = 6'd0, my_col = 6'd1;
  siteo dut (.*);

  always #5 clk = ~clk;
  always @(posedge clk) begin
    cycle <= cycle + 1;
    if (rst_n && right_valid && !right_full) begin rq.push_back(right_msg); r_cyc.push_back(cycle); end
    if (rst_n && down_valid && !down_full) dq.push_back(down_msg);
  end

  localparam addr_t ME = 12'd1;

  function automatic msg_t mk(logic [3:0] op, addr_t d, logic [31:0] v,
                              logic [3:0] nop = OP_NONE, addr_t nd = '0);
    msg_t m;
    m.op = op; m.dest = d; m.value = v; m.next_op = nop; m.next_dest = nd;
    return m;
  endfunction

  task automatic chk(logic c, string what);
    checks++;
    if (!c) begin failures++; $display("FAIL %s (t=%0t)", what, $time); end
  endtask

  // drive one message on the left input, waiting while it is full
  task automatic send_left(msg_t m);
    left_valid = 1; left_msg = m;
    @(posedge clk);
    while (left_full) @(posedge clk);
    #1 left_valid = 0;
  endtask

  task automatic send_top(msg_t m);
    top_valid = 1; top_msg = m;
    @(posedge clk);
    while (top_full) @(posedge clk);
    #1 top_valid = 0;
  endtask

  task automatic idle(int n);
    repeat (n) @(posedge clk);
    #1;
  endtask

  task automatic expect_right(msg_t m, string what);
    chk(rq.size() > 0, {what, ": right message present"});
    if (rq.size() > 0) begin
      msg_t g;
      g = rq.pop_front();
      void'(r_cyc.pop_front());
      chk(g == m, {what, ": right message value"});
      if (g != m) $display("  got %h expected %h", g, m);
    end
  endtask

  task automatic expect_stored(logic [31:0] v, string what);
    chk(dut.stored_q == v, what);
    if (dut.stored_q != v) $display("  stored %h expected %h", dut.stored_q, v);
  endtask

  initial begin
    #500000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int c0;
    msg_t m;
    repeat (3) @(posedge clk);
    #1 rst_n = 1;
    idle(1);

    // forwarding and one-cycle turnaround
    m = mk(OP_PROG, make_addr(0, 5), 32'h3f800000);
    c0 = cycle;
    send_left(m);
    idle(2);
    chk(r_cyc.size() == 1 && r_cyc[0] == c0 + 1, "one-cycle turnaround");
    expect_right(m, "forward right");
    m = mk(OP_A_MULS, make_addr(2, 1), 32'h40000000);
    send_top(m);
    idle(2);
    chk(dq.size() == 1 && dq[0] == m, "forward down");
    dq.delete();

    // never programmed: a stream opcode sends nothing
    send_left(mk(OP_A_MULS, ME, 32'h40000000));
    idle(2);
    chk(rq.size() == 0 && dq.size() == 0, "unprogrammed SiteO sends nothing");

    // Prog then a stream multiply: 3.1 * 2.0 = 6.2
    send_top(mk(OP_PROG, ME, 32'h40466666, OP_A_ADD, 12'd3));
    idle(1);
    expect_stored(32'h40466666, "Prog stores value");
    send_left(mk(OP_A_MULS, ME, 32'h40000000));
    idle(2);
    expect_right(mk(OP_A_ADD, 12'd3, 32'h40c66666), "A_MULS streams 6.2 to next destination");
    expect_stored(32'h40466666, "stream opcode keeps stored value");

    // update opcodes
    send_left(mk(OP_UPDATE, ME, 32'h40a00000));  idle(1); expect_stored(32'h40a00000, "UPDATE 5");
    send_left(mk(OP_A_ADD, ME, 32'h3f800000));   idle(1); expect_stored(32'h40c00000, "A_ADD 5+1=6");
    send_left(mk(OP_A_SUB, ME, 32'h40000000));   idle(1); expect_stored(32'h40800000, "A_SUB 6-2=4");
    send_left(mk(OP_A_MUL, ME, 32'h40400000));   idle(1); expect_stored(32'h41400000, "A_MUL 4*3=12");
    send_left(mk(OP_A_DIV, ME, 32'h40800000));   idle(1); expect_stored(32'h40400000, "A_DIV 12/4=3");
    send_left(mk(OP_AV_ADD, ME, 32'h40a00000));  idle(1); expect_stored(32'h40800000, "Av_ADD (3+5)/2=4");
    send_left(mk(OP_CMP, ME, 32'h40000000));     idle(1); expect_stored(32'h40800000, "CMP max(4,2)=4");
    send_left(mk(OP_CMP, ME, 32'h41100000));     idle(1); expect_stored(32'h41100000, "CMP max(4,9)=9");
    chk(rq.size() == 0 && dq.size() == 0, "update opcodes send nothing");

    // stream opcodes (stored 9)
    send_left(mk(OP_A_ADDS, ME, 32'h3f800000)); idle(2);
    expect_right(mk(OP_A_ADD, 12'd3, 32'h41200000), "A_ADDS 9+1");
    send_left(mk(OP_A_SUBS, ME, 32'h3f800000)); idle(2);
    expect_right(mk(OP_A_ADD, 12'd3, 32'h41000000), "A_SUBS 9-1");
    send_left(mk(OP_A_DIVS, ME, 32'h40400000)); idle(2);
    expect_right(mk(OP_A_ADD, 12'd3, 32'h40400000), "A_DIVS 9/3");
    send_left(mk(OP_RELU, ME, 32'hc0800000)); idle(2);
    expect_right(mk(OP_A_ADD, 12'd3, 32'h00000000), "RELU(-4)");
    send_left(mk(OP_RELU, ME, 32'h40800000)); idle(2);
    expect_right(mk(OP_A_ADD, 12'd3, 32'h40800000), "RELU(4)");

    // fan-in of three: 9 + 1 + 2 + 3 = 15 in one message; next destination below
    send_top(mk(OP_PROG, ME, 32'h41100000, OP_RELU, make_addr(3, 2)));
    send_top(mk(OP_CNT, ME, 32'd3));
    send_left(mk(OP_A_ADDS, ME, 32'h3f800000));
    send_left(mk(OP_A_ADDS, ME, 32'h40000000));
    idle(2);
    chk(dq.size() == 0 && rq.size() == 0, "no message before the last operand");
    send_top(mk(OP_A_ADDS, ME, 32'h40400000));
    idle(2);
    chk(dq.size() == 1 && dq[0] == mk(OP_RELU, make_addr(3, 2), 32'h41700000), "fan-in sum 15 sent down");
    dq.delete();
    send_top(mk(OP_CNT, ME, 32'd1));

    // backpressure: right receiver full; queue fills and reports full
    right_full = 1;
    for (int i = 0; i < 5; i++) begin
      left_valid = 1; left_msg = mk(OP_UPDATE, make_addr(0, 9), 32'(i));
      @(posedge clk); #1;
    end
    left_valid = 0;
    idle(1);
    chk(left_full, "left queue full under backpressure");
    chk(right_valid && right_msg.value == 0, "output register holds first message");
    chk(rq.size() == 0, "nothing delivered while full");
    right_full = 0;
    idle(8);
    chk(rq.size() == 5, "all five delivered after release");
    for (int i = 0; i < 5 && rq.size() > 0; i++) begin
      m = rq.pop_front();
      chk(m.value == 32'(i), "order kept under backpressure");
    end
    r_cyc.delete();

    // both inputs at once, both forwarded right: served alternately, 2 cycles
    left_valid = 1; left_msg = mk(OP_UPDATE, make_addr(0, 7), 32'd100);
    top_valid  = 1; top_msg  = mk(OP_UPDATE, make_addr(0, 7), 32'd200);
    @(posedge clk); #1;
    left_valid = 0; top_valid = 0;
    idle(3);
    chk(rq.size() == 2, "both inputs served");
    if (rq.size() == 2) chk(r_cyc[1] == r_cyc[0] + 1, "served in consecutive cycles");

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
