// tb_fp16_add: random test of the combinational FP16 addition and subtraction (sub input).
// Operands have random signs, mantissas and exponents in a range where the
// exact result is a normal FP16 number; the result must match the correctly
// rounded real result to within one unit in the last place. Zero operands
// and results that overflow to infinity are also checked.
module tb_fp16_add;
  import tb_fp16_pkg::*;
  logic [15:0] a, b, y;
  logic sub;
  fp16_add dut (.a, .b, .sub, .y);
  int checks = 0, failures = 0;

  function automatic int ulp_diff(logic [15:0] p, logic [15:0] q);
    int ip, iq;
    ip = p[15] ? -int'(p[14:0]) : int'(p[14:0]);
    iq = q[15] ? -int'(q[14:0]) : int'(q[14:0]);
    return (ip > iq) ? ip - iq : iq - ip;
  endfunction

  initial begin
    #100000000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    for (int i = 0; i < 20000; i++) begin
      real ra, rb, rr;
      logic [15:0] e;
      a = {1'($urandom), 5'($urandom_range(9, 21)), 10'($urandom)};
      b = {1'($urandom), 5'($urandom_range(9, 21)), 10'($urandom)};
      if (i % 8 == 0) b[14:10] = a[14:10] - 5'($urandom_range(0, 2));   // close exponents: cancellation
      sub = 1'($urandom);
      #1;
      ra = fp16_to_real(a); rb = fp16_to_real(b);
      rr = sub ? ra - rb : ra + rb;
      checks++;
      if (rr < 0 ? -rr < 6.2e-5 : rr < 6.2e-5) begin
        if (y[14:10] > 5'd1) begin failures++; $display("FAIL tiny %h %h -> %h", a, b, y); end
      end else begin
        e = real_to_fp16(rr);
        if (ulp_diff(y, e) > 1) begin
          failures++;
          if (failures < 10) $display("FAIL %h %h -> %h expected %h (%f)", a, b, y, e, rr);
        end
      end
    end
    // special operands: zero, and a result too large for FP16
    a = 16'h0000; b = 16'h3C00; sub = 0; #1; checks++;
    if (y !== 16'h3C00) begin failures++; $display("FAIL zero operand: %h", y); end
    a = 16'h7800; b = 16'h7800; sub = 0; #1; checks++;
    if (y !== 16'h7C00) begin failures++; $display("FAIL large operands: %h", y); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
