// const_mult: multiplication of a signed pixel by a weight fixed at
// elaboration (single constant multiplication, SCM), with one output register.
//
// In a directly mapped CNN every product X*theta has its own multiplier, and
// because theta is known when the circuit is built the multiplier reduces to
// shifted copies of x added together: one shifted copy per set bit of
// |theta|, negated when theta < 0. A weight of 0 needs no logic at all, and a
// power of two needs only a shift (no adder). These two reductions are the
// ones the paper cites; the shift-and-add form for other weights is this
// design's simplest choice (no canonical-signed-digit recoding).
//
// Interface: x_i (PIXEL_W signed) in clk domain, p_o (PIXEL_W+THETA_W signed)
// registered: p_o holds x_i*THETA one clock after x_i is presented.
module const_mult
  import moa_pkg::*;
#(
  parameter theta_t THETA = theta_t'(3)
) (
  input  logic                      clk,
  input  logic signed [PIXEL_W-1:0] x_i,
  output logic signed [PROD_W-1:0]  p_o
);

  localparam bit              NEG = THETA[THETA_W-1];
  // |THETA| as an unsigned number; |-128| = 128 still fits in THETA_W bits.
  localparam logic [THETA_W-1:0] MAG = NEG ? THETA_W'(-THETA) : THETA_W'(THETA);

  logic signed [PROD_W-1:0] x_ext;
  logic signed [PROD_W-1:0] mag_prod;
  logic signed [PROD_W-1:0] prod;

  assign x_ext = PROD_W'(x_i);

  always_comb begin
    mag_prod = '0;
    for (int k = 0; k < THETA_W; k++)
      if (MAG[k]) mag_prod = mag_prod + (x_ext <<< k);
    prod = NEG ? -mag_prod : mag_prod;
  end

  always_ff @(posedge clk) p_o <= prod;

endmodule
