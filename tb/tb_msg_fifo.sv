// tb_msg_fifo: self-checking testbench of the SiteO input queue.
//
// Checks the same-cycle fall-through of a message into an empty queue, the full
// flag after DEPTH stored messages, that a write while full is refused, and
// ordering under random writes and pops against a queue model.
module tb_msg_fifo;
  import mipu_pkg::*;

  localparam int unsigned DEPTH = 4;

  logic clk = 0, rst_n = 0;
  logic in_valid = 0, pop = 0;
  msg_t in_msg = '0;
  logic full, out_valid;
  msg_t out_msg;
  int checks = 0, failures = 0;
  msg_t model[$];

  msg_fifo #(.DEPTH(DEPTH)) dut (.*);

  always #5 clk = ~clk;

  task automatic expect_true(logic c, string what);
    checks++;
    if (!c) begin
      failures++;
      $display("FAIL %s at %0t", what, $time);
    end
  endtask

  initial begin
    #200000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    msg_t m;
    repeat (2) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    // fall-through
    in_valid = 1; in_msg = 64'h0123_4567_89AB_CDEF; pop = 1;
    #1;
    expect_true(out_valid && out_msg == 64'h0123_4567_89AB_CDEF, "fall-through");
    @(negedge clk);
    in_valid = 0; pop = 0;
    #1;
    expect_true(!out_valid, "bypassed message not stored");
    // fill to full
    for (int i = 0; i < DEPTH; i++) begin
      in_valid = 1; in_msg = 64'(i + 100);
      @(negedge clk);
    end
    in_valid = 1; in_msg = 64'd999;
    #1;
    expect_true(full, "full after DEPTH writes");
    @(negedge clk);
    in_valid = 0;
    for (int i = 0; i < DEPTH; i++) begin
      pop = 1;
      #1;
      expect_true(out_valid && out_msg == 64'(i + 100), "order after fill");
      @(negedge clk);
    end
    pop = 0;
    #1;
    expect_true(!out_valid, "write while full was refused");
    // random traffic against a queue model
    for (int i = 0; i < 3000; i++) begin
      in_valid = ($urandom % 3) != 0;
      in_msg   = {$urandom, $urandom};
      #1;
      expect_true(full == (model.size() == DEPTH), "full flag");
      expect_true(out_valid == (model.size() > 0 || in_valid), "out_valid");
      pop = out_valid && ($urandom % 2);
      #1;
      if (pop) begin
        m = (model.size() > 0) ? model[0] : in_msg;
        expect_true(out_msg == m, "random order");
      end
      if (in_valid && !full) model.push_back(in_msg);
      if (pop) void'(model.pop_front());
      @(negedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
