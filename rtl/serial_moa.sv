// serial_moa: one serializer/accumulator pair ("SerialMOA"), the
// replacement for an N_C-input cluster of binary adders.
//
// The N_C operands arrive in parallel at the pixel rate on clk0, are shifted
// out one per cycle by the serializer on clk_c (f_c = N_C * f_0) and summed
// by a single accumulator; the finished sum is sampled back into the clk0
// domain. The outer structure (serializer feeding an accumulator, two clock
// domains, f_c = n_c f_0) is the paper's; the clock-domain handover is this
// design's (see serializer and serial_accumulator).
//
// Interface and timing, all on clk0: operands d_i and valid_i sampled at
// clk0 edge k give sum_o = sum of d_i (D_W + ceil(log2 N_C) bits, exact)
// and valid_o after clk0 edge k + 2, a latency of three clk0 registers
// (capture, accumulate on clk_c, sample back). A new set of operands is
// taken every clk0 cycle. Requires N_C >= 2 and clk_c rising with clk0.
module serial_moa #(
  parameter int unsigned N_C    = 6,
  parameter int unsigned D_W    = 8,
  parameter bit          SIGNED = 1'b1,
  localparam int unsigned S_W   = D_W + $clog2(N_C)
) (
  input  logic           clk0,
  input  logic           clk_c,
  input  logic           rst_n,
  input  logic           valid_i,
  input  logic [D_W-1:0] d_i [N_C],
  output logic           valid_o,
  output logic [S_W-1:0] sum_o
);

  logic [D_W-1:0] ser;
  logic           first, batch_end;
  logic [S_W-1:0] sum_c;
  logic [2:0]     vld_q;

  serializer #(.N_C(N_C), .D_W(D_W)) u_ser (
    .clk0, .clk_c, .rst_n,
    .d_i,
    .ser_o(ser), .first_o(first), .end_o(batch_end)
  );

  serial_accumulator #(.N_C(N_C), .D_W(D_W), .SIGNED(SIGNED)) u_acc (
    .clk_c, .rst_n,
    .ser_i(ser), .first_i(first), .end_i(batch_end),
    .sum_o(sum_c)
  );

  // Back to clk0: sum_c changes R + 1 clk_c cycles after the capturing clk0
  // edge (R = clk_c cycles per clk0 period >= N_C), i.e. one clk_c cycle
  // after the next clk0 edge, and is stable at the next-but-one (R >= 2).
  always_ff @(posedge clk0) sum_o <= sum_c;

  always_ff @(posedge clk0 or negedge rst_n) begin
    if (!rst_n) vld_q <= '0;
    else        vld_q <= {vld_q[1:0], valid_i};
  end
  assign valid_o = vld_q[2];

endmodule
