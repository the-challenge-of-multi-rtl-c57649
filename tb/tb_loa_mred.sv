// tb_loa_mred: accuracy sweep of the Lower-part-OR adder over operand
// widths b = 4 .. 12 and every approximation l = 0 .. b-1 (ratios l/b from
// 0 up to 92%). Each adder is a (b+1)-bit loa_adder fed zero-extended b-bit
// operands, so the top bit is the carry-out and the sum is never truncated.
// 60000 random operand pairs are applied; every sum is checked against the
// reference model, and the mean relative error distance
//   MRED = mean(|s_hat - s| / s)  over pairs with s != 0
// is accumulated per (b, l) and printed as a table. Further checks: MRED is
// 0 for l = 0, grows with l for every b, and for 8-bit adders stays below
// 10% up to l = 6 (75%).
module tb_loa_mred;
  import moa_ref_pkg::*;

  localparam int BMIN = 4, BMAX = 12, NPAIR = 60000;

  int checks = 0, failures = 0;
  logic [BMAX-1:0] a, b;
  logic [BMAX:0]   sh [BMIN:BMAX][0:BMAX-1];

  for (genvar w = BMIN; w <= BMAX; w++) begin : g_w
    for (genvar l = 0; l < w; l++) begin : g_l
      logic [w:0] s;
      loa_adder #(.B(w + 1), .L(l)) u_loa (
        .a_i({1'b0, a[w-1:0]}), .b_i({1'b0, b[w-1:0]}), .s_o(s));
      assign sh[w][l] = (BMAX + 1)'(s);
    end
  end

  initial begin
    #(NPAIR * 20);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  real    red  [BMIN:BMAX][0:BMAX-1];
  int     cnt  [BMIN:BMAX];
  real    mred [BMIN:BMAX][0:BMAX-1];

  initial begin
    longint av, bv, s, e;
    string line;
    foreach (red[w, l]) red[w][l] = 0.0;
    foreach (cnt[w]) cnt[w] = 0;
    for (int n = 0; n < NPAIR; n++) begin
      a = BMAX'($urandom); b = BMAX'($urandom);
      #1;
      for (int w = BMIN; w <= BMAX; w++) begin
        av = longint'(a) & mask(w);
        bv = longint'(b) & mask(w);
        s = av + bv;
        if (s != 0) cnt[w]++;
        for (int l = 0; l < w; l++) begin
          e = longint'(sh[w][l]);
          checks++;
          if (e != loa_ref(av, bv, w + 1, l)) begin
            failures++;
            if (failures < 10) $display("FAIL b=%0d l=%0d a=%0d b=%0d got %0d", w, l, av, bv, e);
          end
          if (s != 0) red[w][l] += ((e > s) ? real'(e - s) : real'(s - e)) / real'(s);
        end
      end
    end
    $display("MRED (%%) of the LOA, rows b = operand width, columns l = approximated bits");
    for (int w = BMIN; w <= BMAX; w++) begin
      line = $sformatf("b=%2d:", w);
      for (int l = 0; l < w; l++) begin
        mred[w][l] = 100.0 * red[w][l] / real'(cnt[w]);
        line = {line, $sformatf(" %6.2f", mred[w][l])};
      end
      $display("%s", line);
      checks++;
      if (mred[w][0] != 0.0) begin failures++; $display("FAIL b=%0d: exact adder with error", w); end
      for (int l = 1; l < w; l++) begin
        checks++;
        if (!(mred[w][l] > mred[w][l-1])) begin
          failures++; $display("FAIL b=%0d: MRED not growing at l=%0d", w, l);
        end
      end
    end
    for (int l = 0; l <= 6; l++) begin
      checks++;
      if (mred[8][l] >= 10.0) begin failures++; $display("FAIL b=8 l=%0d MRED %0.2f%% >= 10%%", l, mred[8][l]); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
