// tb_dhm_full: the dot-product datapath at its default size, parameters
// untouched: 363 taps (an 11x11x3 window) of which 325 carry a non-null
// weight, clustered by 6 into 55 serial MOAs whose clk_c runs 6 times as
// fast as clk0, then an exact 6-level adder tree. 400 random windows (the
// first ones all -128 or all +127) stream in at one per clk0 cycle with
// random valid gaps; each result must equal the exact dot product of its
// window and appear 1 + 3 + 6 = 10 clk0 cycles after it.
module tb_dhm_full;
  import moa_pkg::*;

  localparam int TC   = 10;       // clk_c period
  localparam int NC   = 6;        // clk_c / clk0 ratio (default N_C)
  localparam int T0   = TC * NC;
  localparam int TAPS = 363;
  localparam int LAT  = 10;
  localparam int NWIN = 400;

  int checks = 0, failures = 0;
  logic clk0 = 1'b0, clk_c = 1'b0, rst_n = 1'b0;
  logic vin, vout;
  logic signed [PIXEL_W-1:0] x [TAPS];
  logic signed [24:0] y;      // 16-bit products + 3 (cluster) + 6 (tree)

  dhm_dot_product u_dut (.clk0, .clk_c, .rst_n, .valid_i(vin), .x_i(x), .valid_o(vout), .y_o(y));

  initial forever #(TC/2) clk_c = ~clk_c;
  initial begin #(TC/2); forever begin clk0 = 1'b1; #(T0/2); clk0 = 1'b0; #(T0/2); end end

  initial begin
    #(T0 * (NWIN + 100));
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(string what, longint got, longint exp, int n);
    checks++;
    if (got != exp) begin
      failures++;
      if (failures < 12) $display("FAIL %s step %0d: got %0d exp %0d", what, n, got, exp);
    end
  endtask

  longint ey [int];
  bit     ev [int];

  initial begin
    theta_arr_t th = default_theta();
    int nz = 0;
    for (int t = 0; t < TAPS; t++) if (th[t] != 0) nz++;
    chk("non-null weights (Table 1, conv1)", nz, 325, 0);
    vin = 1'b0;
    foreach (x[i]) x[i] = '0;
    #(T0 * 3 + 2);
    rst_n = 1'b1;
    for (int n = 0; n < NWIN + LAT + 2; n++) begin
      @(negedge clk0);
      if (n >= LAT) begin
        chk("valid", vout, ev[n - LAT], n);
        if (ev[n - LAT]) chk("y", y, ey[n - LAT], n);
      end
      ey[n] = 0;
      for (int t = 0; t < TAPS; t++) begin
        x[t] = (n < 2) ? -8'sd128 : (n < 4) ? 8'sd127 : 8'($urandom);
        ey[n] += longint'(x[t]) * longint'(th[t]);
      end
      vin = (n < 8) || (n < NWIN && $urandom % 5 != 0);
      ev[n] = vin;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
