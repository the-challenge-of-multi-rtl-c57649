// adder_tree: fully pipelined binary adder tree summing N operands, built
// from two-input LOA adders (APPROX_BITS = 0 gives an exact tree).
//
// This is the default way a multi-operand adder (MOA) is mapped: N-1 binary
// adders arranged in ceil(log2 N) levels. Level lv pairs the values of level
// lv-1 as (0,1), (2,3), ...; an odd value left at the end of a level is
// carried to the next level unchanged. Every level grows the width by one
// bit, so with sign extension no level can overflow: OUT_W = IN_W + LEVELS.
// Each binary adder of the tree is a loa_adder of the level's width with
// APPROX_BITS approximated low bits (the same l at every level), which is
// how the paper proposes to trade accuracy for area in the tree.
//
// Every level ends in a register (the paper compares against a "fully
// pipelined" tree). Latency: LEVELS = max(1, ceil(log2 N)) clock cycles from
// opd_i/valid_i to sum_o/valid_o; one new set of operands per cycle. Only
// valid is reset. Operands are signed (two's complement) when SIGNED = 1.
module adder_tree
  import moa_pkg::*;
#(
  parameter int unsigned N           = 8,  // number of operands
  parameter int unsigned IN_W        = 8,  // operand width
  parameter int unsigned APPROX_BITS = 0,  // LOA approximate bits per adder
  parameter bit          SIGNED      = 1'b1,
  localparam int unsigned LEVELS     = tree_levels(N),
  localparam int unsigned OUT_W      = IN_W + LEVELS
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             valid_i,
  input  logic [IN_W-1:0]  opd_i [N],
  output logic             valid_o,
  output logic [OUT_W-1:0] sum_o
);

  // Number of values at level lv.
  function automatic int unsigned cnt_at(int unsigned lv);
    return (N + (1 << lv) - 1) >> lv;
  endfunction

  for (genvar lv = 0; lv <= LEVELS; lv++) begin : g_lvl
    localparam int unsigned W = IN_W + lv;
    localparam int unsigned C = cnt_at(lv);
    logic [W-1:0] v [C];

    if (lv == 0) begin : g_in
      for (genvar j = 0; j < C; j++) begin : g_j
        assign v[j] = opd_i[j];
      end
    end else begin : g_add
      localparam int unsigned CP = cnt_at(lv - 1);
      for (genvar j = 0; j < C; j++) begin : g_j
        logic [W-1:0] a, s;
        assign a = {SIGNED & g_lvl[lv-1].v[2*j][W-2], g_lvl[lv-1].v[2*j]};
        if (2*j + 1 < CP) begin : g_pair
          logic [W-1:0] b;
          assign b = {SIGNED & g_lvl[lv-1].v[2*j+1][W-2], g_lvl[lv-1].v[2*j+1]};
          loa_adder #(.B(W), .L(APPROX_BITS > W ? W : APPROX_BITS)) u_add (.a_i(a), .b_i(b), .s_o(s));
        end else begin : g_pass
          assign s = a;
        end
        always_ff @(posedge clk) v[j] <= s;
      end
    end
  end

  logic [LEVELS-1:0] vld_q;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) vld_q <= '0;
    else        vld_q <= LEVELS'({vld_q, valid_i});
  end

  assign valid_o = vld_q[LEVELS-1];
  assign sum_o   = g_lvl[LEVELS].v[0];

endmodule
