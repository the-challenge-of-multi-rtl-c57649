// tb_serial_moa: serializer/accumulator pairs at n_c = 6 (8-bit operands,
// the default) and n_c = 2 (the smallest), each with its own phase-aligned
// clock pair clk_c = n_c * clk0, and at n_c = 3 with a clk_c 5 times as
// fast as its clk0 (two spare clk_c cycles per batch). Random signed operands (and an all -128 /
// all +127 start) are presented every clk0 cycle with random valid gaps.
// sum_o and valid_o must show the sum of the operands captured two clk0
// edges earlier (three register stages), at one result per clk0 cycle.
module tb_serial_moa;
  import moa_ref_pkg::*;

  localparam int TC = 10;
  int checks = 0, failures = 0;
  logic rst_n = 1'b0;
  logic clk0a = 1'b0, clkca = 1'b0, clk0b = 1'b0, clkcb = 1'b0;
  logic clk0c = 1'b0, clkcc = 1'b0;
  logic [7:0]  dc [3];
  logic        vc, voc;
  logic [9:0]  sc;

  logic [7:0]  da [6];
  logic [7:0]  db [2];
  logic        va, vb, voa, vob;
  logic [10:0] sa;
  logic [8:0]  sb;

  serial_moa #(.N_C(6), .D_W(8)) u_a (.clk0(clk0a), .clk_c(clkca), .rst_n, .valid_i(va), .d_i(da), .valid_o(voa), .sum_o(sa));
  serial_moa #(.N_C(2), .D_W(8)) u_b (.clk0(clk0b), .clk_c(clkcb), .rst_n, .valid_i(vb), .d_i(db), .valid_o(vob), .sum_o(sb));

  serial_moa #(.N_C(3), .D_W(8)) u_c (.clk0(clk0c), .clk_c(clkcc), .rst_n, .valid_i(vc), .d_i(dc), .valid_o(voc), .sum_o(sc));

  initial forever #(TC/2) clkcc = ~clkcc;
  initial begin #(TC/2); forever begin clk0c = 1'b1; #(TC*5/2); clk0c = 1'b0; #(TC*5/2); end end

  initial begin
    dc = '{default: '0}; vc = 1'b0;
    #(TC * 3 + 2);
    for (int n = 0; n < 4000; n++) begin
      @(negedge clk0c);
      if (n >= 4) begin
        chk("c valid", voc, evc[n-3]);
        if (evc[n-3]) chk("c sum", sext(sc, 10), ec[n-3]);
      end
      ec[n] = 0;
      foreach (dc[i]) begin
        dc[i] = (n < 3) ? 8'h80 : 8'($urandom);
        ec[n] += sext(dc[i], 8);
      end
      vc = ($urandom % 3 != 0);
      evc[n] = vc;
    end
  end

  initial forever #(TC/2) clkca = ~clkca;
  initial forever #(TC/2) clkcb = ~clkcb;
  initial begin #(TC/2); forever begin clk0a = 1'b1; #(TC*6/2); clk0a = 1'b0; #(TC*6/2); end end
  initial begin #(TC/2); forever begin clk0b = 1'b1; #(TC*2/2); clk0b = 1'b0; #(TC*2/2); end end

  initial begin
    #(TC * 200000);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(string what, longint got, longint exp);
    checks++;
    if (got != exp) begin
      failures++;
      if (failures < 10) $display("FAIL %s at %0t: got %0d exp %0d", what, $time, got, exp);
    end
  endtask

  // one driver/checker per instance: operands driven at clk0 falling edge n
  // are captured by the next rising edge k and give sum_o after edge k + 2,
  // i.e. they are checked at falling edge n + 3
  longint ea [int], eb [int], ec [int];
  bit     eva [int], evb [int], evc [int];

  initial begin
    da = '{default: '0}; va = 1'b0;
    #(TC * 3 + 2);
    rst_n = 1'b1;
    for (int n = 0; n < 3000; n++) begin
      @(negedge clk0a);
      if (n >= 4) begin
        chk("a valid", voa, eva[n-3]);
        if (eva[n-3]) chk("a sum", sext(sa, 11), ea[n-3]);
      end
      ea[n] = 0;
      foreach (da[i]) begin
        da[i] = (n < 3) ? 8'h80 : (n < 6) ? 8'h7f : 8'($urandom);
        ea[n] += sext(da[i], 8);
      end
      va = (n < 6) || ($urandom % 5 != 0);
      eva[n] = va;
    end
    repeat (2) @(posedge clkcb);   // let u_b finish its own loop
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    db = '{default: '0}; vb = 1'b0;
    #(TC * 3 + 2);
    for (int n = 0; n < 8000; n++) begin
      @(negedge clk0b);
      if (n >= 4) begin
        chk("b valid", vob, evb[n-3]);
        if (evb[n-3]) chk("b sum", sext(sb, 9), eb[n-3]);
      end
      eb[n] = 0;
      foreach (db[i]) begin
        db[i] = (n < 3) ? 8'h80 : 8'($urandom);
        eb[n] += sext(db[i], 8);
      end
      vb = ($urandom % 3 != 0);
      evb[n] = vb;
    end
  end
endmodule
