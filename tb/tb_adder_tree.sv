// tb_adder_tree: three pipelined trees fed every cycle (with valid gaps):
// 7 signed 8-bit operands exact, 13 signed 8-bit operands with 3-bit LOA
// adders, and a single operand. Each output must match the reference value
// of the operand set presented LEVELS cycles earlier, and valid_o must
// follow valid_i with exactly that latency (3, 4 and 1 cycles).
module tb_adder_tree;
  import moa_ref_pkg::*;

  int checks = 0, failures = 0;
  int approx_diff = 0;
  logic clk = 1'b0, rst_n = 1'b0;
  logic vld;

  logic [7:0]  opa [7];
  logic [7:0]  opb [13];
  logic [7:0]  opc [1];
  logic        va, vb, vc;
  logic [10:0] sa;
  logic [11:0] sb;
  logic [8:0]  sc;

  adder_tree #(.N(7),  .IN_W(8), .APPROX_BITS(0)) u_a (.clk, .rst_n, .valid_i(vld), .opd_i(opa), .valid_o(va), .sum_o(sa));
  adder_tree #(.N(13), .IN_W(8), .APPROX_BITS(3)) u_b (.clk, .rst_n, .valid_i(vld), .opd_i(opb), .valid_o(vb), .sum_o(sb));
  adder_tree #(.N(1),  .IN_W(8), .APPROX_BITS(0)) u_c (.clk, .rst_n, .valid_i(vld), .opd_i(opc), .valid_o(vc), .sum_o(sc));

  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // expected values and valid per cycle, indexed by the cycle they were driven
  longint ea [int], eb [int], ec [int];
  bit     ev [int];

  task automatic chk(string what, longint got, longint exp, int cyc);
    checks++;
    if (got != exp) begin
      failures++;
      if (failures < 10) $display("FAIL %s cycle %0d: got %0d exp %0d", what, cyc, got, exp);
    end
  endtask

  initial begin
    longint la[$], lb[$], lc[$];
    longint exact_b;
    vld = 1'b0;
    opa = '{default: '0}; opb = '{default: '0}; opc = '{default: '0};
    repeat (3) @(posedge clk);
    @(negedge clk) rst_n = 1'b1;
    for (int cyc = 0; cyc < 3000; cyc++) begin
      @(negedge clk);
      // compare outputs of the previous edge with what was driven LEVELS cycles earlier
      if (cyc >= 4) begin
        chk("valid a", va, ev[cyc-3], cyc);
        chk("valid b", vb, ev[cyc-4], cyc);
        chk("valid c", vc, ev[cyc-1], cyc);
        if (ev[cyc-3]) chk("sum a", sext(sa, 11), ea[cyc-3], cyc);
        if (ev[cyc-4]) chk("sum b", sext(sb, 12), eb[cyc-4], cyc);
        if (ev[cyc-1]) chk("sum c", sext(sc, 9),  ec[cyc-1], cyc);
      end
      la = {}; lb = {}; lc = {};
      for (int i = 0; i < 7; i++)  begin opa[i] = 8'($urandom); la.push_back(sext(opa[i], 8)); end
      for (int i = 0; i < 13; i++) begin opb[i] = 8'($urandom); lb.push_back(sext(opb[i], 8)); end
      opc[0] = 8'($urandom); lc.push_back(sext(opc[0], 8));
      if (cyc < 10) begin   // extremes first
        for (int i = 0; i < 7; i++)  begin opa[i] = (cyc % 2) ? 8'h80 : 8'h7f; la[i] = sext(opa[i], 8); end
      end
      vld = ($urandom % 4) != 0;
      ev[cyc] = vld;
      ea[cyc] = 0; foreach (la[i]) ea[cyc] += la[i];
      eb[cyc] = tree_ref(lb, 8, 3);
      ec[cyc] = lc[0];
      exact_b = 0; foreach (lb[i]) exact_b += lb[i];
      if (eb[cyc] != exact_b) approx_diff++;
    end
    // the approximate tree must actually differ from the exact sum sometimes
    checks++;
    if (approx_diff == 0) begin failures++; $display("FAIL approximation never visible"); end
    $display("approximate tree differed from exact sum in %0d of 3000 cases", approx_diff);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
