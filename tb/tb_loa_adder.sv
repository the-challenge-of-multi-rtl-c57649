// tb_loa_adder: exhaustive check of the Lower-part-OR adder for 8-bit
// operands at l = 0, 1, 4 and 8, and random checks at b = 12, l = 5.
// Each sum is compared with a bit-level model: ORed low bits, exact upper
// sum with carry-in a[l-1] & b[l-1]. Further checks: l = 0 is the exact
// sum mod 2^b, the low l bits are the OR of the operands' low bits, and the
// error |s_hat - s| of an l-approximated add stays below 2^l.
module tb_loa_adder;
  import moa_ref_pkg::*;

  int checks = 0, failures = 0;

  logic [7:0]  a8, b8;
  logic [7:0]  s0, s1, s4, s8;
  logic [11:0] a12, b12, s12;

  loa_adder #(.B(8),  .L(0)) u0  (.a_i(a8),  .b_i(b8),  .s_o(s0));
  loa_adder #(.B(8),  .L(1)) u1  (.a_i(a8),  .b_i(b8),  .s_o(s1));
  loa_adder #(.B(8),  .L(4)) u4  (.a_i(a8),  .b_i(b8),  .s_o(s4));
  loa_adder #(.B(8),  .L(8)) u8  (.a_i(a8),  .b_i(b8),  .s_o(s8));
  loa_adder #(.B(12), .L(5)) u12 (.a_i(a12), .b_i(b12), .s_o(s12));

  task automatic check(string what, longint got, longint exp);
    checks++;
    if (got != exp) begin
      failures++;
      if (failures < 10) $display("FAIL %s: a=%0d b=%0d got %0d exp %0d", what, a8, b8, got, exp);
    end
  endtask

  initial begin
    #1_000_000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    longint exact, err;
    for (int a = 0; a < 256; a++) begin
      for (int b = 0; b < 256; b++) begin
        a8 = 8'(a); b8 = 8'(b);
        #1;
        exact = (a + b) & 255;
        check("l=0 exact", s0, exact);
        check("l=1", s1, loa_ref(a, b, 8, 1));
        check("l=4", s4, loa_ref(a, b, 8, 4));
        check("l=8 or", s8, a | b);
        // error bound of the l = 4 adder when the exact sum fits in 8 bits
        if (a + b < 256) begin
          err = longint'(s4) - (a + b);
          if (err < 0) err = -err;
          checks++;
          if (err >= 16) begin
            failures++;
            $display("FAIL error bound a=%0d b=%0d err=%0d", a, b, err);
          end
        end
        // low bits are the OR of the operands' low bits
        checks++;
        if (s4[3:0] != (a8[3:0] | b8[3:0])) failures++;
      end
    end
    for (int i = 0; i < 20000; i++) begin
      a12 = 12'($urandom); b12 = 12'($urandom);
      #1;
      checks++;
      if (longint'(s12) != loa_ref(a12, b12, 12, 5)) begin
        failures++;
        if (failures < 10) $display("FAIL b=12 l=5 a=%0d b=%0d got %0d", a12, b12, s12);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
