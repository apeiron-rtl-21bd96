// tb_vc_input_buffer: a credit-respecting sender writes random flits on
// random VCs while a reader pops at random; each VC's output order is
// checked against a queue model, and the credits returned must equal the
// flits popped. The sender fills a VC to its depth at least once.
module tb_vc_input_buffer;
  import apeiron_pkg::*;
  import apn_tb_pkg::*;
  localparam int DEPTH = 8;
  logic clk = 0, rst_n = 0;
  link_fwd_t in;
  link_credit_t credit_out;
  logic [1:0] pop;
  flit_t [1:0] head;
  logic [1:0] head_valid;
  int checks = 0, failures = 0;
  flit_t q[2][$];
  int cred[2];
  int full_seen = 0;

  vc_input_buffer #(.DEPTH(DEPTH)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    in = '0; pop = '0;
    cred[0] = DEPTH; cred[1] = DEPTH;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 5000; t++) begin
      int v;
      logic [1:0] p;
      @(negedge clk);
      // reader: check heads, pop at random (slow in the first part)
      p = '0;
      for (int k = 0; k < 2; k++) begin
        checks++;
        if (head_valid[k] != (q[k].size() > 0)) begin failures++; $display("valid mismatch vc%0d", k); end
        if (q[k].size() > 0 && head[k] != q[k][0]) begin failures++; $display("data mismatch vc%0d", k); end
        if (q[k].size() > 0 && ($urandom % ((t < 2000) ? 6 : 2)) == 0) p[k] = 1;
        if (q[k].size() == DEPTH) full_seen++;
      end
      pop = p;
      for (int k = 0; k < 2; k++) begin
        checks++;
        if (credit_out[k] != p[k]) begin failures++; $display("credit mismatch vc%0d", k); end
        if (p[k]) void'(q[k].pop_front());
      end
      // sender
      v = $urandom % 2;
      in = '0;
      if (cred[v] > 0 && ($urandom % 4) != 0) begin
        in.valid = 1; in.vc = 1'(v);
        in.flit = '{sop: 1'($urandom), eop: 1'($urandom), data: rand_word()};
        q[v].push_back(in.flit);
        cred[v]--;
      end
      // credits returned this cycle can be used from the next one
      for (int k = 0; k < 2; k++) if (p[k]) cred[k]++;
    end
    if (full_seen == 0) begin failures++; $display("never filled"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
