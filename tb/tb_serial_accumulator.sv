// tb_serial_accumulator: feeds batches of 6 signed 8-bit operands, flagged
// first_i on the first one and end_i either on the last one or, for about
// half of the batches, on one to three spare zero cycles after it (a clk_c
// faster than 6 x clk0), with random idle cycles in between and extreme
// batches (all -128, all +127). After the edge that ends each end_i cycle
// sum_o must hold the exact batch sum and keep it until the next batch
// completes.
module tb_serial_accumulator;
  import moa_ref_pkg::*;

  localparam int NC = 6;
  int checks = 0, failures = 0;
  logic clk_c = 1'b0, rst_n = 1'b0;
  logic [7:0]  ser;
  logic        first, bend;
  logic [10:0] sum;

  serial_accumulator #(.N_C(NC), .D_W(8)) u_dut (.clk_c, .rst_n, .ser_i(ser),
                                                 .first_i(first), .end_i(bend), .sum_o(sum));

  always #5 clk_c = ~clk_c;

  initial begin
    repeat (100000) @(posedge clk_c);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(string what, longint got, longint exp);
    checks++;
    if (got != exp) begin
      failures++;
      if (failures < 10) $display("FAIL %s at %0t: got %0d exp %0d", what, $time, got, exp);
    end
  endtask

  initial begin
    longint s, prev;
    bit spare;
    int spares = 0;
    logic [7:0] v;
    ser = '0; first = 1'b0; bend = 1'b0;
    repeat (3) @(posedge clk_c);
    @(negedge clk_c) rst_n = 1'b1;
    for (int b = 0; b < 2000; b++) begin
      spare = (b > 2) && ($urandom % 2 == 0);
      s = 0;
      for (int i = 0; i < NC; i++) begin
        @(negedge clk_c);
        if (b == 0)      v = 8'h80;
        else if (b == 1) v = 8'h7f;
        else             v = 8'($urandom);
        ser = v; first = (i == 0); bend = (i == NC - 1) && !spare;
        s += sext(v, 8);
        // the previous batch's sum must still be held while this one runs
        if (b > 0 && i > 0) chk("sum held", sext(sum, 11), prev);
      end
      if (spare) begin
        repeat (1 + $urandom % 2) begin
          @(negedge clk_c);
          ser = '0; first = 1'b0; bend = 1'b0;
          if (b > 0) chk("sum held in spare cycle", sext(sum, 11), prev);
        end
        @(negedge clk_c);
        ser = '0; bend = 1'b1;
        spares++;
      end
      @(negedge clk_c);
      chk("batch sum", sext(sum, 11), s);
      prev = s;
      ser = '0; first = 1'b0; bend = 1'b0;
      repeat ($urandom % 3) begin
        @(negedge clk_c);
        ser = 8'($urandom);   // idle operands must not disturb the held sum
        chk("idle hold", sext(sum, 11), s);
      end
      @(negedge clk_c);
      ser = '0;
    end
    checks++;
    if (spares == 0) begin failures++; $display("FAIL no batch with spare cycles"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
