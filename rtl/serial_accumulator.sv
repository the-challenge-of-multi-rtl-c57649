// serial_accumulator: adder with a feedback register in the fast clock
// domain clk_c, summing the operands a serializer delivers one per cycle.
//
// On a cycle flagged first_i the register restarts from the incoming
// operand; otherwise it adds the operand to what it holds. On the cycle
// flagged end_i (the batch's last operand, or a zero after it when clk_c
// has spare cycles) the completed sum, register plus that operand, is
// copied into the result register sum_o, where it stays for a whole batch,
// i.e. one clk0 period, so that the slow domain can sample it.
// The adder-plus-feedback-register is the paper's accumulator; the result
// register that holds the finished sum is this design's addition so that
// the clk0 side sees a stable value.
//
// Timing: sum_o changes at the clk_c edge that ends the end_i cycle.
// Widths: operands D_W bits, sums D_W + ceil(log2 N_C) bits, sign-extended
// when SIGNED = 1, so a batch of N_C operands cannot overflow.
module serial_accumulator #(
  parameter int unsigned N_C    = 6,
  parameter int unsigned D_W    = 8,
  parameter bit          SIGNED = 1'b1,
  localparam int unsigned S_W   = D_W + $clog2(N_C)
) (
  input  logic           clk_c,
  input  logic           rst_n,
  input  logic [D_W-1:0] ser_i,
  input  logic           first_i,
  input  logic           end_i,
  output logic [S_W-1:0] sum_o
);

  logic [S_W-1:0] opd;
  logic [S_W-1:0] acc_q;
  logic [S_W-1:0] acc_d;

  assign opd   = {{(S_W-D_W){SIGNED & ser_i[D_W-1]}}, ser_i};
  assign acc_d = (first_i ? '0 : acc_q) + opd;

  always_ff @(posedge clk_c or negedge rst_n) begin
    if (!rst_n) begin
      acc_q <= '0;
      sum_o <= '0;
    end else begin
      acc_q <= acc_d;
      if (end_i) sum_o <= acc_d;
    end
  end

endmodule
