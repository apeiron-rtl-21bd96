// tb_nn_dense_core: loads seeded random weights through the weight port,
// streams events with in_valid held high, and compares every result with
// nn_ref_pkg::infer. Timing checks: consecutive events are accepted exactly
// 8 cycles apart (18.75 MHz at 150 MHz) and each result appears 22 cycles
// after its event was accepted (146.66 ns at 150 MHz).
module tb_nn_dense_core;
  import nn_ref_pkg::*;
  localparam int LAT = 22, II = 8, N_EV = 40;
  logic clk = 0, rst_n = 0;
  logic wt_we;
  logic [12:0] wt_addr;
  logic signed [7:0] wt_data;
  logic in_valid, in_ready, out_valid;
  logic signed [63:0][15:0] in_x;
  logic [1:0] out_class;
  logic signed [3:0][15:0] out_score;
  int checks = 0, failures = 0;
  longint cyc = 0;
  longint acc_cyc[$];
  shortint exp_score[$];
  int exp_cls[$];
  int n_out = 0;
  int cls_seen[4];

  nn_dense_core dut (.*);
  always #5 clk = ~clk;
  always @(posedge clk) cyc <= cyc + 1;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // output monitor
  always @(posedge clk) if (rst_n && out_valid) begin
    longint t0;
    shortint es[4];
    t0 = acc_cyc.pop_front();
    for (int n = 0; n < 4; n++) es[n] = exp_score.pop_front();
    // out_valid is registered at the LAT-th edge after acceptance and
    // seen here on the following edge
    checks += 2;
    if (cyc - t0 != LAT + 1) begin failures++; $display("latency %0d, expected %0d", cyc - t0, LAT); end
    if (int'(out_class) != exp_cls[0]) begin failures++; $display("event %0d class %0d exp %0d", n_out, out_class, exp_cls[0]); end
    cls_seen[exp_cls.pop_front()]++;
    for (int n = 0; n < 4; n++) begin
      checks++;
      if (16'(out_score[n]) != 16'(es[n])) begin failures++; $display("event %0d score %0d: %0d exp %0d", n_out, n, out_score[n], es[n]); end
    end
    n_out++;
  end

  initial begin
    shortint x[64];
    shortint sc[4];
    int cl;
    longint last_acc;
    wt_we = 0; wt_addr = 0; wt_data = 0; in_valid = 0; in_x = '0;
    gen_weights(32'hC0FFEE);
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int a = 0; a < 5268; a++) begin
      @(negedge clk); wt_we = 1; wt_addr = 13'(a); wt_data = wt_at(a);
    end
    @(negedge clk); wt_we = 0;
    last_acc = -1;
    for (int e = 0; e < N_EV; e++) begin
      for (int i = 0; i < 64; i++) begin
        x[i] = (e % 5 == 4 && i >= 40) ? 16'sd0 : rand_feature();
        in_x[i] = x[i];
      end
      infer(x, sc, cl);
      in_valid = 1;
      @(posedge clk);
      while (!in_ready) @(posedge clk);
      acc_cyc.push_back(cyc);
      for (int n = 0; n < 4; n++) exp_score.push_back(sc[n]);
      exp_cls.push_back(cl);
      if (last_acc >= 0) begin
        checks++;
        if (cyc - last_acc != II) begin failures++; $display("interval %0d, expected %0d", cyc - last_acc, II); end
      end
      last_acc = cyc;
      @(negedge clk);
      in_valid = 0;
    end
    repeat (40) @(posedge clk);
    checks++;
    if (n_out != N_EV) begin failures++; $display("got %0d results", n_out); end
    $display("classes of the reference: %0d %0d %0d %0d", cls_seen[0], cls_seen[1], cls_seen[2], cls_seen[3]);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
