// serializer: parallel-to-serial register between the slow pixel clock clk0
// and the fast accumulation clock clk_c (f_c = N_C * f_0).
//
// clk0 side: every clk0 edge captures the N_C operands d_i in a holding
// register and flips a toggle flag. clk_c side: when the flag differs from
// the copy the clk_c side last saw, the shift register loads the held
// operands; on every other clk_c edge it shifts by one operand towards
// ser_o, filling with zeros. first_o marks the cycle in which operand 0 is
// on ser_o. end_o marks the cycle whose closing edge loads the next batch:
// at exactly N_C clk_c cycles per clk0 period that is the cycle of the last
// operand; with a faster clk_c the extra cycles show 0 on ser_o and end_o
// comes in the last of them. A batch therefore always ends on the clk_c
// edge that follows the next clk0 edge, whatever the clock ratio.
//
// The paper draws the serializer as N_C registers loaded on clk0 and
// shifted on clk_c. A register cannot be clocked by both, so here the clk0
// load goes to a separate holding register and the toggle handshake decides
// the clk_c load; this split is this design's choice. The two clocks are
// assumed to come from one source, rising together every N_C clk_c cycles.
//
// Timing (clk_c cycles after the clk0 edge that captured d_i, R clk_c
// cycles per clk0 period): load at +1, operand k is on ser_o during cycle
// +1+k, k = 0 .. N_C-1, end_o is high during cycle +R, so the batch closes
// at edge +R+1. The assertion checks that R >= N_C.
module serializer #(
  parameter int unsigned N_C = 6,   // operands per cluster (n_c)
  parameter int unsigned D_W = 8    // operand width
) (
  input  logic           clk0,
  input  logic           clk_c,
  input  logic           rst_n,
  // clk0 domain
  input  logic [D_W-1:0] d_i [N_C],
  // clk_c domain
  output logic [D_W-1:0] ser_o,
  output logic           first_o,
  output logic           end_o
);

  localparam int unsigned POS_W = $clog2(N_C + 1);

  if (N_C < 2) begin : g_bad_nc
    $error("serializer: N_C must be at least 2");
  end

  // ---- clk0 domain: holding register and load toggle ----
  logic [D_W-1:0] hold_q [N_C];
  logic           tog0_q;

  always_ff @(posedge clk0) hold_q <= d_i;

  always_ff @(posedge clk0 or negedge rst_n) begin
    if (!rst_n) tog0_q <= 1'b0;
    else        tog0_q <= ~tog0_q;
  end

  // ---- clk_c domain: shift register and position counter ----
  logic             seen_q;
  logic             load;
  logic [D_W-1:0]   sreg_q [N_C];
  logic [POS_W-1:0] pos_q;

  assign load = (tog0_q != seen_q);

  always_ff @(posedge clk_c or negedge rst_n) begin
    if (!rst_n) begin
      seen_q <= 1'b0;
      pos_q  <= POS_W'(N_C);
    end else begin
      seen_q <= tog0_q;
      if (load)                   pos_q <= '0;
      else if (pos_q != POS_W'(N_C)) pos_q <= pos_q + 1'b1;
    end
  end

  always_ff @(posedge clk_c or negedge rst_n) begin
    if (!rst_n) begin
      sreg_q <= '{default: '0};
    end else if (load) begin
      sreg_q <= hold_q;
    end else begin
      for (int i = 0; i < N_C - 1; i++) sreg_q[i] <= sreg_q[i+1];
      sreg_q[N_C-1] <= '0;
    end
  end

  assign ser_o   = sreg_q[0];
  assign first_o = (pos_q == '0);
  assign end_o   = load;

  // A load must not cut a batch short: clk_c has to run at least N_C times
  // as fast as clk0, so pos_q is N_C - 1 or N_C at every load (N_C at the
  // first one after reset).
  a_ratio: assert property (@(posedge clk_c) disable iff (!rst_n)
                            load |-> pos_q >= POS_W'(N_C - 1))
    else $error("serializer: clk_c slower than N_C * clk0");

endmodule
