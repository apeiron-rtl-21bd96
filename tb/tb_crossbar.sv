// tb_crossbar: random flits and selections; every egress must show, one
// cycle later, the selected input's flit, the requested VC and valid.
module tb_crossbar;
  import apeiron_pkg::*;
  import apn_tb_pkg::*;
  localparam int N_IN = 6, N_OUT = 3;
  logic clk = 0, rst_n = 0;
  flit_t [N_IN-1:0] in_flit;
  logic [N_OUT-1:0] sel_valid, sel_vc;
  logic [N_OUT-1:0][2:0] sel;
  link_fwd_t [N_OUT-1:0] out;
  int checks = 0, failures = 0;

  crossbar #(.N_IN(N_IN), .N_OUT(N_OUT)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    flit_t [N_IN-1:0] f;
    logic [N_OUT-1:0] v, c;
    logic [N_OUT-1:0][2:0] s;
    in_flit = '0; sel_valid = '0; sel_vc = '0; sel = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 1000; t++) begin
      @(negedge clk);
      for (int i = 0; i < N_IN; i++) f[i] = '{sop: 1'($urandom), eop: 1'($urandom), data: rand_word()};
      for (int o = 0; o < N_OUT; o++) begin
        v[o] = 1'($urandom); c[o] = 1'($urandom); s[o] = 3'($urandom % N_IN);
      end
      in_flit = f; sel_valid = v; sel_vc = c; sel = s;
      @(negedge clk);
      for (int o = 0; o < N_OUT; o++) begin
        checks++;
        if (out[o].valid != v[o] || (v[o] && (out[o].flit != f[s[o]] || out[o].vc != c[o]))) begin
          failures++;
          $display("egress %0d mismatch at t=%0d", o, t);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
