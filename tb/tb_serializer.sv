// tb_serializer: two serializers share clk0. u_dut (N_C = 4) gets a clk_c
// exactly 4 times faster; u_fast (N_C = 3) gets the same clk_c, i.e. one
// spare clk_c cycle per clk0 period. For every clk0 edge the testbench
// records the captured operands and checks that they come out of ser_o in
// order, one per clk_c cycle, the first one flagged first_o exactly one
// clk_c cycle after the capturing clk0 edge. end_o (batch closes at the
// next edge) must come with the last operand in u_dut, and only in the
// spare cycle, where ser_o must read 0, in u_fast.
module tb_serializer;

  localparam int NC = 4;
  localparam int NF = 3;
  localparam int TC = 10;          // clk_c period

  int checks = 0, failures = 0;
  logic clk0 = 1'b0, clk_c = 1'b0, rst_n = 1'b0;
  logic [7:0] d [NC];
  logic [7:0] df [NF];
  logic [7:0] ser, serf;
  logic first, bend, firstf, bendf;

  serializer #(.N_C(NC), .D_W(8)) u_dut  (.clk0, .clk_c, .rst_n, .d_i(d),  .ser_o(ser),  .first_o(first),  .end_o(bend));
  serializer #(.N_C(NF), .D_W(8)) u_fast (.clk0, .clk_c, .rst_n, .d_i(df), .ser_o(serf), .first_o(firstf), .end_o(bendf));

  // clk_c rises at 5 + 10k, clk0 at 5 + 40m: phase aligned, ratio 4
  initial forever #(TC/2) clk_c = ~clk_c;
  initial begin
    #(TC/2);
    forever begin clk0 = 1'b1; #(TC*NC/2); clk0 = 1'b0; #(TC*NC/2); end
  end

  initial begin
    #(TC * 20000);
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

  // drive new operands after each clk0 rising edge
  always @(negedge clk0) begin
    foreach (d[i])  d[i]  = 8'($urandom);
    foreach (df[i]) df[i] = 8'($urandom);
  end

  // record what each clk0 edge captures (after reset)
  logic [NC-1:0][7:0] exp_q [$];
  logic [NF-1:0][7:0] expf_q [$];
  time t_clk0;
  int  batches = 0, batchesf = 0, spare = 0;
  always @(posedge clk0) if (rst_n) begin
    logic [NC-1:0][7:0] pd;
    logic [NF-1:0][7:0] pf;
    foreach (d[i])  pd[i] = d[i];
    foreach (df[i]) pf[i] = df[i];
    exp_q.push_back(pd);
    expf_q.push_back(pf);
    t_clk0 = $time;
  end

  int idx = -1, idxf = -1;
  logic [NC-1:0][7:0] cur;
  logic [NF-1:0][7:0] curf;
  always @(posedge clk_c) if (rst_n) begin
    #1;
    // u_dut
    if (first) begin
      chk("first one clk_c after clk0", $time - 1 - t_clk0, TC);
      chk("batch available", exp_q.size() > 0, 1);
      if (exp_q.size() > 0) cur = exp_q.pop_front();
      idx = 0;
      batches++;
    end else if (idx >= 0) idx++;
    if (idx >= 0 && idx < NC) begin
      chk("ser_o", ser, cur[idx]);
      chk("end_o", bend, idx == NC - 1);
    end
    // u_fast
    if (firstf) begin
      if (expf_q.size() > 0) curf = expf_q.pop_front();
      idxf = 0;
      batchesf++;
    end else if (idxf >= 0) idxf++;
    if (idxf >= 0 && idxf < NF) begin
      chk("fast ser_o", serf, curf[idxf]);
      chk("fast end_o", bendf, 0);
    end else if (idxf >= NF) begin
      spare++;
      chk("fast spare ser_o", serf, 0);
      chk("fast spare end_o", bendf, 1);
    end
  end

  initial begin
    foreach (d[i]) d[i] = '0;
    foreach (df[i]) df[i] = '0;
    #(TC * 7 + 2);
    rst_n = 1'b1;
    repeat (300) @(posedge clk0);
    #1;
    chk("batches seen", batches >= 298, 1);
    chk("fast batches seen", batchesf >= 298, 1);
    chk("spare cycles seen", spare >= 298, 1);
    $display("batches %0d / %0d, spare cycles %0d", batches, batchesf, spare);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
