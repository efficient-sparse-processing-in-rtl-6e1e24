// tb_bf16_mac: self-checking test of the bfloat16 MAC.
// Compares acc_i + a_i*b_i against a double-precision reference rounded to
// fp32 (nearest even). Operands are drawn so that the exact sum fits in a
// double, making the reference a single correct rounding. Directed cases
// cover zeros, exact cancellation, rounding ties and carry-out.
module tb_bf16_mac;
  import fp_ref_pkg::*;

  logic [15:0] a, b;
  logic [31:0] acc, res, exp_res;
  int checks = 0, failures = 0;

  bf16_mac dut (.a_i(a), .b_i(b), .acc_i(acc), .acc_o(res));

  task automatic check(input string what);
    real ref_r;
    #1;
    ref_r   = fp32_to_real(acc) + bf16_to_real(a) * bf16_to_real(b);
    exp_res = real_to_fp32(ref_r);
    if (exp_res[30:0] == 31'd0) exp_res = {res[31], 31'd0};   // sign of zero not checked
    checks++;
    if (res !== exp_res) begin
      failures++;
      if (failures < 10)
        $display("FAIL %s: a=%h b=%h acc=%h got %h expected %h", what, a, b, acc, res, exp_res);
    end
  endtask

  initial begin
    #200000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    // directed
    a = int_to_bf16(3);  b = int_to_bf16(-4); acc = 32'd0;        check("zero acc");
    a = 16'd0;           b = int_to_bf16(5);  acc = 32'h40a00000; check("zero product");
    a = int_to_bf16(3);  b = int_to_bf16(4);  acc = 32'hc1400000; check("cancellation");
    a = int_to_bf16(-7); b = int_to_bf16(9);  acc = 32'h42c80000; check("subtract");
    // tie: 2^24 + 1 rounds to even (2^24), 2^24 + 3 rounds up to 2^24+4
    a = int_to_bf16(1);  b = int_to_bf16(1);  acc = 32'h4b800000; check("tie even");
    a = int_to_bf16(3);  b = int_to_bf16(1);  acc = 32'h4b800000; check("tie up");
    a = int_to_bf16(1);  b = int_to_bf16(1);  acc = 32'h4b7fffff; check("carry out");
    // random
    for (int n = 0; n < 4000; n++) begin
      int ea, eb, ec;
      ea = 110 + int'($urandom_range(0, 30));
      eb = 110 + int'($urandom_range(0, 30));
      a = {1'($urandom), 8'(ea), 7'($urandom)};
      b = {1'($urandom), 8'(eb), 7'($urandom)};
      ec = ea + eb - 127 + int'($urandom_range(0, 40)) - 20;
      acc = {1'($urandom), 8'(ec), 23'($urandom)};
      if (n % 7 == 0) acc = 32'd0;
      check("random");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
