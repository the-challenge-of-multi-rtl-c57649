// tb_serial_moa_sweep: serializer/accumulator pairs over the cluster-size
// range 2 .. 50 (n_c = 2, 3, 4, 5, 10, 20, 30, 40, 50) with 8-bit signed
// operands. Every instance has its own phase-aligned clock pair with
// clk_c = n_c * clk0 (clk_c period 2 time units) and runs 200 random
// operand sets at one per clk0 cycle; each sum must equal the exact sum of
// the set captured two clk0 edges earlier, with valid following.
module tb_serial_moa_sweep;
  import moa_ref_pkg::*;

  localparam int NPT = 9;
  localparam int NCS [NPT] = '{2, 3, 4, 5, 10, 20, 30, 40, 50};
  localparam int NSET = 200;

  int checks = 0, failures = 0;
  logic rst_n = 1'b0;
  bit   done [NPT];

  task automatic chk(int nc, string what, longint got, longint exp);
    checks++;
    if (got != exp) begin
      failures++;
      if (failures < 10) $display("FAIL n_c=%0d %s at %0t: got %0d exp %0d", nc, what, $time, got, exp);
    end
  endtask

  for (genvar p = 0; p < NPT; p++) begin : g_pt
    localparam int NC = NCS[p];
    localparam int SW = 8 + $clog2(NC);
    logic clk0 = 1'b0, clk_c = 1'b0;
    logic [7:0]    d [NC];
    logic          v, vo;
    logic [SW-1:0] s;

    serial_moa #(.N_C(NC), .D_W(8)) u_dut (.clk0, .clk_c, .rst_n, .valid_i(v), .d_i(d),
                                           .valid_o(vo), .sum_o(s));

    initial forever #1 clk_c = ~clk_c;
    initial begin #1; forever begin clk0 = 1'b1; #(NC); clk0 = 1'b0; #(NC); end end

    longint e [int];
    bit     ev [int];
    initial begin
      foreach (d[i]) d[i] = '0;
      v = 1'b0;
      wait (rst_n);
      for (int n = 0; n < NSET + 3; n++) begin
        @(negedge clk0);
        if (n >= 3) begin
          chk(NC, "valid", vo, ev[n-3]);
          if (ev[n-3]) chk(NC, "sum", sext(s, SW), e[n-3]);
        end
        e[n] = 0;
        foreach (d[i]) begin
          d[i] = (n == 0) ? 8'h80 : (n == 1) ? 8'h7f : 8'($urandom);
          e[n] += sext(d[i], 8);
        end
        v = (n < NSET) && ($urandom % 4 != 0 || n < 2);
        ev[n] = v;
      end
      done[p] = 1'b1;
    end
  end

  initial begin
    #(2 * 50 * (NSET + 50) * 2);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    bit all;
    #7 rst_n = 1'b1;
    do begin
      #10;
      all = 1'b1;
      foreach (done[i]) all &= done[i];
    end while (!all);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
