// tb_dhm_dot_product: end-to-end test of the dot-product datapath in five
// configurations, each fed a random window of signed pixels every clk0
// cycle with random valid gaps:
//   u_ser  : serial MOA clusters (n_c = 5), exact tree, 40 taps
//   u_loa  : no serialization, LOA tree with 3 approximate bits, 40 taps
//   u_both : serial clusters (n_c = 4) and a LOA tree (2 bits), 100 taps
//   u_tree : plain exact binary tree, 17 taps
//   u_one  : one serial MOA for all 17 operands (n_c = n_opd = 17), driven
//            by a clk_c 20 times as fast as clk0 (3 spare cycles per batch)
// The weights are the package's stand-in weights (taps 17, 18, 36, 37, ...
// are zero). The expected value is computed from the pixels and weights:
// exact dot product for the exact configurations; for the LOA ones, exact
// cluster sums (or the products) reduced by a reference LOA tree. Output
// and valid must appear exactly LATENCY clk0 cycles after the window.
// Mechanism counters (each must be non-zero): zero weights removed,
// power-of-two weights, zero-padded last cluster, windows through serial MOAs,
// approximate results differing from the exact dot product, valid gaps,
// windows through the single-cluster configuration.
module tb_dhm_dot_product;
  import moa_pkg::*;
  import moa_ref_pkg::*;

  localparam int TC = 10;         // clk_c period of pair A
  localparam int T0 = 40;         // clk0 period of both pairs
  localparam int NC = 4;          // pair A ratio (u_both); pair B ratio is 5
  localparam int TA = 40, TB = 40, TD = 100, TT = 17;
  // expected latencies in clk0 cycles: multiplier register, serial MOA
  // (3 registers) when serial, one register per tree level
  localparam int LAT_S = 1 + 3 + 3;   // 36 operands -> 8 clusters -> 3 levels
  localparam int LAT_L = 1 + 6;       // 36 operands -> 6 levels
  localparam int LAT_B = 1 + 3 + 5;   // 90 operands -> 23 clusters -> 5 levels
  localparam int LAT_T = 1 + 5;       // 17 operands -> 5 levels
  localparam int LAT_O = 1 + 3 + 1;   // 1 cluster -> 1 register level

  int checks = 0, failures = 0;
  logic rst_n = 1'b0;
  logic clk0 = 1'b0, clk_c = 1'b0, clk0s = 1'b0, clk_cs = 1'b0;
  logic vin;
  logic signed [7:0] x [TD];
  logic signed [7:0] xa [TA];
  logic signed [7:0] xt [TT];
  always_comb begin
    for (int i = 0; i < TA; i++) xa[i] = x[i];
    for (int i = 0; i < TT; i++) xt[i] = x[i];
  end

  logic vs, vl, vb, vt, vo;
  logic signed [21:0] yo;   // 16 + clog2(17) + 1
  logic clk_cf = 1'b0;
  logic signed [21:0] ys;   // 16 + clog2(5) + 3
  logic signed [21:0] yl;   // 16 + 6
  logic signed [22:0] yb;   // 16 + 2 + 5
  logic signed [20:0] yt;   // 16 + 5

  // pair B (clk_c = 5 * clk0): u_ser, u_loa
  dhm_dot_product #(.N_TAPS(TA), .N_C(5)) u_ser (
    .clk0(clk0s), .clk_c(clk_cs), .rst_n, .valid_i(vin), .x_i(xa), .valid_o(vs), .y_o(ys));
  dhm_dot_product #(.N_TAPS(TB), .SERIAL(0), .APPROX_BITS(3)) u_loa (
    .clk0(clk0s), .clk_c(1'b0), .rst_n, .valid_i(vin), .x_i(xa), .valid_o(vl), .y_o(yl));
  // pair A (clk_c = 4 * clk0): u_both, u_tree
  dhm_dot_product #(.N_TAPS(TD), .N_C(NC), .APPROX_BITS(2)) u_both (
    .clk0, .clk_c, .rst_n, .valid_i(vin), .x_i(x), .valid_o(vb), .y_o(yb));
  dhm_dot_product #(.N_TAPS(TT), .SERIAL(0)) u_tree (
    .clk0, .clk_c(1'b0), .rst_n, .valid_i(vin), .x_i(xt), .valid_o(vt), .y_o(yt));

  dhm_dot_product #(.N_TAPS(TT), .N_C(TT)) u_one (
    .clk0, .clk_c(clk_cf), .rst_n, .valid_i(vin), .x_i(xt), .valid_o(vo), .y_o(yo));
  // clk_cf rises at 1 + 2k: aligned with clk0, 20 edges per clk0 period
  initial forever #1 clk_cf = ~clk_cf;

  // pair A: clk_c rises at 5 + 10k, clk0 at 5 + 40m
  initial forever #(TC/2) clk_c = ~clk_c;
  initial begin #(TC/2); forever begin clk0 = 1'b1; #(T0/2); clk0 = 1'b0; #(T0/2); end end
  // pair B: clk_cs rises at 4 + 8k, clk0s at 4 + 40m
  initial forever #4 clk_cs = ~clk_cs;
  initial begin #4; forever begin clk0s = 1'b1; #(T0/2); clk0s = 1'b0; #(T0/2); end end

  initial begin
    #(T0 * 100_000);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(string what, longint got, longint exp, int n);
    checks++;
    if (got != exp) begin
      failures++;
      if (failures < 12) $display("FAIL %s window %0d: got %0d exp %0d", what, n, got, exp);
    end
  endtask

  // reference for one configuration
  function automatic longint ref_y(longint px[$], int taps, bit serial, int nc, int l,
                                   output longint exact);
    longint prod[$], cl[$];
    theta_arr_t th = default_theta();
    exact = 0;
    for (int t = 0; t < taps; t++) begin
      if (th[t] != 0) prod.push_back(px[t] * longint'(th[t]));
      exact += px[t] * longint'(th[t]);
    end
    if (serial) begin
      for (int c = 0; c < prod.size(); c += nc) begin
        longint s = 0;
        for (int i = c; i < c + nc && i < prod.size(); i++) s += prod[i];
        cl.push_back(s);
      end
      return tree_ref(cl, PROD_W + $clog2(nc), l);
    end
    return tree_ref(prod, PROD_W, l);
  endfunction

  // expected results per window (checked on each configuration's own clk0)
  longint es [int], el [int], eb [int], et [int];
  bit     ev [int];
  int     approx_diff = 0, gaps = 0, zero_w = 0, pow2_w = 0, loads = 0, padded = 0, ones = 0;


  localparam int NWIN = 1500;

  initial begin
    longint px[$];
    longint ex, dummy;
    theta_arr_t th = default_theta();
    for (int t = 0; t < TD; t++) begin
      if (th[t] == 0) zero_w++;
      else if ((th[t] & (th[t] - 1)) == 0 || th[t] == -128) pow2_w++;
    end
    vin = 1'b0;
    foreach (x[i]) x[i] = '0;
    #(T0 * 3 + 2);
    rst_n = 1'b1;
    for (int n = 0; n < NWIN + 20; n++) begin
      // At this falling edge of clk0 both pairs have just taken the edge
      // that completes window n - LAT (window m is driven here at step m).
      @(negedge clk0);
      if (n >= LAT_B) begin
        chk("u_both valid", vb, ev[n - LAT_B], n);
        if (ev[n - LAT_B]) begin
          chk("u_both y", yb, eb[n - LAT_B], n);
          loads++;
        end
      end
      if (n >= LAT_T) begin
        chk("u_tree valid", vt, ev[n - LAT_T], n);
        if (ev[n - LAT_T]) chk("u_tree y", yt, et[n - LAT_T], n);
      end
      if (n >= LAT_O) begin
        chk("u_one valid", vo, ev[n - LAT_O], n);
        if (ev[n - LAT_O]) begin
          chk("u_one y", yo, et[n - LAT_O], n);
          ones++;
        end
      end
      if (n >= LAT_S) begin
        chk("u_ser valid", vs, ev[n - LAT_S], n);
        if (ev[n - LAT_S]) begin
          chk("u_ser y", ys, es[n - LAT_S], n);
          loads++;
        end
      end
      if (n >= LAT_L) begin
        chk("u_loa valid", vl, ev[n - LAT_L], n);
        if (ev[n - LAT_L]) chk("u_loa y", yl, el[n - LAT_L], n);
      end
      px = {};
      for (int i = 0; i < TD; i++) begin
        x[i] = (n < 2) ? -8'sd128 : (n < 4) ? 8'sd127 : 8'($urandom);
        px.push_back(longint'(x[i]));
      end
      vin = (n < 8) || ($urandom % 6 != 0);
      if (!vin) gaps++;
      ev[n] = vin;
      es[n] = ref_y(px, TA, 1, 5, 0, ex);
      el[n] = ref_y(px, TB, 0, 0, 3, dummy);
      if (el[n] != ex) approx_diff++;
      eb[n] = ref_y(px, TD, 1, NC, 2, ex);
      if (eb[n] != ex) approx_diff++;
      et[n] = ref_y(px, TT, 0, 0, 0, dummy);
    end
    // operand counts from the weights: 36 of 40, 90 of 100 taps non-null
    padded = int'(36 % 5 != 0) + int'(90 % NC != 0);
    $display("zero weights %0d, power-of-two weights %0d, padded clusters %0d, serial windows checked %0d, approximate results %0d, valid gaps %0d, single-cluster windows %0d",
             zero_w, pow2_w, padded, loads, approx_diff, gaps, ones);
    checks++; if (zero_w == 0)       begin failures++; $display("FAIL no zero weight"); end
    checks++; if (pow2_w == 0)       begin failures++; $display("FAIL no power-of-two weight"); end
    checks++; if (padded == 0)       begin failures++; $display("FAIL no padded cluster"); end
    checks++; if (loads < NWIN)      begin failures++; $display("FAIL too few serial windows"); end
    checks++; if (approx_diff == 0)  begin failures++; $display("FAIL approximation never visible"); end
    checks++; if (ones == 0)         begin failures++; $display("FAIL no single-cluster window"); end
    checks++; if (gaps == 0)         begin failures++; $display("FAIL no valid gap"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
