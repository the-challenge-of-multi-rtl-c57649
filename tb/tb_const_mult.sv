// tb_const_mult: constant multipliers for weights 0, 1, -1, 64, -128, 127,
// 3 and -77 (zero, powers of two, extremes, general values) driven with
// random and extreme signed pixels; each product must equal x*theta one
// clock after x is presented.
module tb_const_mult;
  import moa_pkg::*;

  localparam int NW = 8;
  localparam theta_t W [NW] = '{theta_t'(0), theta_t'(1), theta_t'(-1), theta_t'(64),
                                theta_t'(-128), theta_t'(127), theta_t'(3), theta_t'(-77)};

  int checks = 0, failures = 0;
  logic clk = 1'b0;
  logic signed [PIXEL_W-1:0] x;
  logic signed [PROD_W-1:0]  p [NW];

  for (genvar i = 0; i < NW; i++) begin : g_dut
    const_mult #(.THETA(W[i])) u_dut (.clk, .x_i(x), .p_o(p[i]));
  end

  always #5 clk = ~clk;

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int xv;
    x = '0;
    for (int n = 0; n < 1000; n++) begin
      @(negedge clk);
      case (n)
        0: xv = -128;
        1: xv = 127;
        2: xv = 0;
        3: xv = -1;
        default: xv = int'($signed(8'($urandom)));
      endcase
      x = 8'(xv);
      @(posedge clk);   // product registered on this edge
      #1;
      for (int i = 0; i < NW; i++) begin
        checks++;
        if (int'(p[i]) != xv * int'(W[i])) begin
          failures++;
          if (failures < 10) $display("FAIL theta=%0d x=%0d got %0d", W[i], xv, p[i]);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
