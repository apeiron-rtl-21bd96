// tb_rr_arbiter: random requests against a round-robin model.
// The model keeps its own priority pointer and expects the first requester
// at or after it; the pointer moves past the winner when advance is high.
module tb_rr_arbiter;
  localparam int N = 5;
  logic clk = 0, rst_n = 0;
  logic [N-1:0] req, grant;
  logic [2:0] grant_idx;
  logic advance, grant_valid;
  int checks = 0, failures = 0;
  int ptr = 0;

  rr_arbiter #(.N(N)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    req = '0; advance = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 2000; t++) begin
      int exp_idx;
      @(negedge clk);
      req     = N'($urandom);
      advance = ($urandom % 4) != 0;
      #1;
      exp_idx = -1;
      for (int k = 0; k < N; k++) if (exp_idx < 0 && req[(ptr + k) % N]) exp_idx = (ptr + k) % N;
      checks++;
      if (exp_idx < 0) begin
        if (grant_valid || grant != 0) begin failures++; $display("grant without request"); end
      end else if (!grant_valid || grant_idx != exp_idx || grant != (N'(1) << exp_idx)) begin
        failures++;
        $display("t=%0d req=%b ptr=%0d exp=%0d got idx=%0d grant=%b", t, req, ptr, exp_idx, grant_idx, grant);
      end
      if (advance && exp_idx >= 0) ptr = (exp_idx + 1) % N;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
