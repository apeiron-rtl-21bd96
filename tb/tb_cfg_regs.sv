// tb_cfg_regs: writes and reads back the configuration registers, checks
// their reset values and that the outputs follow, and counts random packet
// and error pulses against a model of the status counters.
module tb_cfg_regs;
  import apeiron_pkg::*;
  localparam int NP = 10;
  logic clk = 0, rst_n = 0;
  logic we;
  logic [7:0] addr;
  logic [31:0] wdata, rdata;
  logic [NP-1:0] pkt_sent;
  logic [3:0] err_pulse;
  node_t local_node, dim_max;
  logic torus;
  dest_t pid_dest;
  int checks = 0, failures = 0;
  int cnt[NP];
  int errs = 0;

  cfg_regs #(.NP(NP)) dut (.*);
  always #5 clk = ~clk;

  task automatic expect_eq(input logic [31:0] got, input logic [31:0] exp, input string what);
    checks++;
    if (got !== exp) begin failures++; $display("%s: got %h exp %h", what, got, exp); end
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    we = 0; addr = 0; wdata = 0; pkt_sent = 0; err_pulse = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    addr = 8'h01; #1 expect_eq(rdata, 32'hFFF, "dim_max reset");
    addr = 8'h00; #1 expect_eq(rdata, 0, "coord reset");
    for (int t = 0; t < 50; t++) begin
      logic [31:0] v0, v1, v3;
      v0 = $urandom; v1 = $urandom; v3 = $urandom;
      @(negedge clk); we = 1; addr = 0; wdata = v0;
      @(negedge clk); addr = 1; wdata = v1;
      @(negedge clk); addr = 2; wdata = 32'(t & 1);
      @(negedge clk); addr = 3; wdata = v3;
      @(negedge clk); we = 0; addr = 0;
      #1 expect_eq(rdata, v0 & 32'hFFF, "coord");
      expect_eq(32'(local_node), v0 & 32'hFFF, "coord out");
      addr = 1; #1 expect_eq(rdata, v1 & 32'hFFF, "dim_max");
      expect_eq(32'(dim_max), v1 & 32'hFFF, "dim_max out");
      addr = 2; #1 expect_eq(rdata, 32'(t & 1), "torus");
      expect_eq(32'(torus), 32'(t & 1), "torus out");
      addr = 3; #1 expect_eq(rdata, v3 & 32'h1FFFFF, "pid_dest");
      expect_eq(32'(pid_dest), v3 & 32'h1FFFFF, "pid_dest out");
    end
    for (int t = 0; t < 500; t++) begin
      @(negedge clk);
      pkt_sent = NP'($urandom);
      err_pulse = 4'($urandom);
      for (int p = 0; p < NP; p++) cnt[p] += pkt_sent[p];
      errs += $countones(err_pulse);
    end
    @(negedge clk); pkt_sent = 0; err_pulse = 0;
    @(negedge clk);
    for (int p = 0; p < NP; p++) begin
      addr = 8'(16 + p); #1 expect_eq(rdata, cnt[p], "pkt counter");
    end
    addr = 4; #1 expect_eq(rdata, errs, "err counter");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
