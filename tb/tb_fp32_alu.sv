// tb_fp32_alu: self-checking testbench of the SiteO floating-point unit.
//
// The reference model works in double precision: single-precision operands are
// widened exactly to double, the operation is done in double, and the result is
// rounded back to single precision (nearest-even, subnormals flushed to zero)
// by bit manipulation of the double. Products are exact in double; sums and
// quotients are rounded twice, which differs from a single rounding with a
// probability near 2^-29, far below the number of random cases here.
// Directed cases cover the message values of the published examples, special
// values, RELU, maximum and average.
module tb_fp32_alu;
  import mipu_pkg::*;

  fpu_op_e     op;
  logic [31:0] a, b, y;
  int checks = 0, failures = 0;

  fp32_alu dut (.op(op), .a(a), .b(b), .y(y));

  function automatic real f2d(logic [31:0] f);
    logic [63:0] d;
    if (f[30:23] == 0) return 0.0;
    d = {f[31], 11'(int'(f[30:23]) - 127 + 1023), f[22:0], 29'd0};
    return $bitstoreal(d);
  endfunction

  function automatic logic [31:0] d2f(real r);
    logic [63:0] d;
    int          e;
    logic [24:0] m;
    logic        g, st;
    d = $realtobits(r);
    if (d[62:0] == 0) return {d[63], 31'd0};
    e  = int'(d[62:52]) - 1023 + 127;
    m  = {2'b01, d[51:29]};
    g  = d[28];
    st = |d[27:0];
    if (g && (st || m[0])) m = m + 1;
    if (m[24]) begin m = m >> 1; e = e + 1; end
    if (e >= 255) return {d[63], 8'hFF, 23'd0};
    if (e <= 0)   return {d[63], 31'd0};
    return {d[63], 8'(e), m[22:0]};
  endfunction

  function automatic logic [31:0] rnd_f();
    logic [31:0] f;
    f = $urandom;
    f[30:23] = 8'(97 + ($urandom % 60));   // exponents 2^-30 .. 2^29
    return f;
  endfunction

  task automatic check(fpu_op_e o, logic [31:0] x, logic [31:0] z, logic [31:0] exp_y);
    op = o; a = x; b = z;
    #1;
    checks++;
    if (y !== exp_y) begin
      failures++;
      if (failures < 10)
        $display("FAIL op=%0d a=%h b=%h y=%h expected %h", o, x, z, y, exp_y);
    end
  endtask

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [31:0] x, z;
    // published examples: 3.1*1 + 3.2*2 + 3.3*3 = 19.4 (0x419b3333)
    check(FPU_MUL, 32'h40466666, 32'h3f800000, 32'h40466666);
    check(FPU_ADD, 32'h40466666, 32'h40cccccd, 32'h41180000);
    check(FPU_ADD, 32'h41180000, 32'h411e6666, 32'h419b3333);
    check(FPU_MUL, 32'h41300000, 32'h3f800000, 32'h41300000);   // 11*1
    check(FPU_RELU, 32'h0, 32'hc0e00000, 32'h0);                // relu(-7)
    check(FPU_RELU, 32'h0, 32'h40e00000, 32'h40e00000);         // relu(7)
    check(FPU_MAX, 32'h40e00000, 32'h40a00000, 32'h40e00000);
    check(FPU_MAX, 32'hc0e00000, 32'hc0a00000, 32'hc0a00000);
    check(FPU_MAX, 32'h00000000, 32'hbf800000, 32'h00000000);
    check(FPU_AVG, 32'h40000000, 32'h40800000, 32'h40400000);   // (2+4)/2
    check(FPU_DIV, 32'h40e00000, 32'h40000000, 32'h40600000);   // 7/2
    check(FPU_DIV, 32'h3f800000, 32'h40400000, 32'h3eaaaaab);   // 1/3
    check(FPU_SUB, 32'h40400000, 32'h40400000, 32'h00000000);
    check(FPU_DIV, 32'h3f800000, 32'h00000000, 32'h7f800000);   // 1/0
    check(FPU_DIV, 32'h00000000, 32'h00000000, 32'h7fc00000);
    check(FPU_ADD, 32'h7f800000, 32'hff800000, 32'h7fc00000);
    check(FPU_MUL, 32'h7f000000, 32'h7f000000, 32'h7f800000);   // overflow
    check(FPU_MUL, 32'h00800000, 32'h00800000, 32'h00000000);   // underflow
    check(FPU_PASS, 32'h12345678, 32'h3f800000, 32'h3f800000);
    for (int i = 0; i < 4000; i++) begin
      x = rnd_f();
      z = rnd_f();
      if (i % 7 == 0) z[30:23] = x[30:23];             // near-cancellation cases
      check(FPU_ADD, x, z, d2f(f2d(x) + f2d(z)));
      check(FPU_SUB, x, z, d2f(f2d(x) - f2d(z)));
      check(FPU_MUL, x, z, d2f(f2d(x) * f2d(z)));
      check(FPU_DIV, x, z, d2f(f2d(x) / f2d(z)));
      check(FPU_MAX, x, z, (f2d(z) > f2d(x)) ? z : x);
      check(FPU_RELU, x, z, (f2d(z) > 0.0) ? z : 32'd0);
      check(FPU_AVG, x, z, d2f((f2d(x) + f2d(z)) / 2.0));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
