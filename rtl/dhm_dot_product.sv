// dhm_dot_product: one directly mapped convolution dot product,
//   y = sum_{t < N_TAPS} x[t] * THETA[t],
// i.e. one output value Y[n,v,u] of a convolution layer for the C*J*K = N_TAPS
// pixels of its window, computed at one window per clk0 cycle.
//
// Structure (in pipeline order):
//  1. Constant multipliers: one const_mult per non-null weight. Taps whose
//     weight is 0 get no multiplier and no adder operand at all, so the
//     multi-operand adder (MOA) has N_OPD = (number of non-null weights)
//     operands. Default: 363 taps (11x11x3, AlexNet conv1) with 325 non-null
//     stand-in weights, the conv1 operand count of the paper's Table 1.
//  2. The MOA. With SERIAL = 1 (default) the N_OPD products are cut into
//     ceil(N_OPD/N_C) clusters of N_C consecutive operands (the last cluster
//     padded with zeros); each cluster is summed by a serial_moa whose
//     accumulator runs on clk_c = N_C * clk0, and the cluster sums are added
//     by a pipelined adder_tree in clk0. With SERIAL = 0 the products go
//     straight into the adder_tree, the plain binary-tree MOA.
//  3. APPROX_BITS > 0 turns every binary adder of the adder_tree into a
//     Lower-part-OR approximate adder with that many ORed low bits; the
//     serial accumulators stay exact.
// SERIAL and APPROX_BITS select the two footprint-reduction strategies the
// paper studies; they can be used alone or together.
//
// Interface: x_i[t] signed PIXEL_W-bit pixels sampled with valid_i at a clk0
// edge; y_o (Y_W bits, signed) and valid_o follow LATENCY clk0 cycles later:
//   LATENCY = 1 (multiplier) + [3 (serial MOA) if SERIAL] + tree levels.
// clk_c is only used with SERIAL = 1 and must rise together with clk0, N_C
// times per clk0 period. rst_n is asynchronous and active low; it clears the
// valid bits and the serial MOAs' registers, while the multiplier and tree
// data registers are left unreset (their contents are qualified by valid).
module dhm_dot_product
  import moa_pkg::*;
#(
  parameter int unsigned N_TAPS      = 363,
  parameter theta_arr_t  THETA       = default_theta(),
  parameter bit          SERIAL      = 1'b1,
  parameter int unsigned N_C         = 6,
  parameter int unsigned APPROX_BITS = 0,
  localparam int unsigned N_OPD      = count_nonzero(THETA, N_TAPS),
  localparam int unsigned N_CL       = SERIAL ? (N_OPD + N_C - 1) / N_C : N_OPD,
  localparam int unsigned CL_W       = SERIAL ? PROD_W + $clog2(N_C) : PROD_W,
  localparam int unsigned TREE_W     = CL_W + tree_levels(N_CL),
  localparam int unsigned Y_W        = TREE_W,
  localparam int unsigned LATENCY    = 1 + (SERIAL ? 3 : 0) + tree_levels(N_CL)
) (
  input  logic                      clk0,
  input  logic                      clk_c,
  input  logic                      rst_n,
  input  logic                      valid_i,
  input  logic signed [PIXEL_W-1:0] x_i [N_TAPS],
  output logic                      valid_o,
  output logic signed [Y_W-1:0]     y_o
);

  if (N_TAPS > MAX_TAPS || N_TAPS == 0) begin : g_bad_taps
    $error("dhm_dot_product: N_TAPS must be 1..%0d", MAX_TAPS);
  end
  if (N_OPD == 0) begin : g_bad_theta
    $error("dhm_dot_product: all weights are zero");
  end

  // ---- 1. constant multipliers on the non-null taps ----
  logic [PROD_W-1:0] prod [N_OPD];
  logic              prod_vld_q;

  for (genvar k = 0; k < N_OPD; k++) begin : g_mult
    localparam int unsigned TAP = nonzero_index(THETA, N_TAPS, k);
    logic signed [PROD_W-1:0] p;
    const_mult #(.THETA(THETA[TAP])) u_mult (.clk(clk0), .x_i(x_i[TAP]), .p_o(p));
    assign prod[k] = p;
  end

  always_ff @(posedge clk0 or negedge rst_n) begin
    if (!rst_n) prod_vld_q <= 1'b0;
    else        prod_vld_q <= valid_i;
  end

  // ---- 2. clusters: serial MOAs on clk_c, or none ----
  logic [CL_W-1:0] cl_sum [N_CL];
  logic            cl_vld;

  if (SERIAL) begin : g_serial
    logic [N_CL-1:0] vld;
    for (genvar c = 0; c < N_CL; c++) begin : g_cl
      logic [PROD_W-1:0] opd [N_C];
      for (genvar i = 0; i < N_C; i++) begin : g_opd
        if (c * N_C + i < N_OPD) begin : g_used
          assign opd[i] = prod[c*N_C + i];
        end else begin : g_pad
          assign opd[i] = '0;
        end
      end
      serial_moa #(.N_C(N_C), .D_W(PROD_W), .SIGNED(1'b1)) u_smoa (
        .clk0, .clk_c, .rst_n,
        .valid_i(prod_vld_q), .d_i(opd),
        .valid_o(vld[c]), .sum_o(cl_sum[c])
      );
    end
    assign cl_vld = &vld;   // all clusters run in lockstep
  end else begin : g_direct
    assign cl_sum = prod;
    assign cl_vld = prod_vld_q;
  end

  // ---- 3. (approximate) adder tree in clk0 ----
  logic [TREE_W-1:0] tree_sum;

  adder_tree #(.N(N_CL), .IN_W(CL_W), .APPROX_BITS(APPROX_BITS), .SIGNED(1'b1)) u_tree (
    .clk(clk0), .rst_n,
    .valid_i(cl_vld), .opd_i(cl_sum),
    .valid_o, .sum_o(tree_sum)
  );

  assign y_o = tree_sum;

endmodule
