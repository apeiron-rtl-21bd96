// tb_route_unit: random headers, node positions and ring sizes, compared
// with the integer reference apn_tb_pkg::ref_route, for mesh and torus.
// Also checks a few hand-worked cases (wrap-around on VC1, local delivery).
module tb_route_unit;
  import apeiron_pkg::*;
  import apn_tb_pkg::*;
  localparam int N_INTRA = 4, NP = N_INTRA + 2 * NDIM;
  dest_t dest;
  node_t local_node, dim_max;
  logic torus, in_vc, out_vc;
  logic [3:0] in_port, out_port;
  int checks = 0, failures = 0;
  int vc1 = 0, local_cnt = 0;

  route_unit #(.N_INTRA(N_INTRA)) dut (.*);

  task automatic check(input int exp_p, input int exp_v, input string what);
    #1;
    checks++;
    if (out_port != exp_p || out_vc != exp_v) begin
      failures++;
      $display("%s: dest=%h loc=%h max=%h torus=%0d in=%0d/%0d -> got %0d/%0d exp %0d/%0d", what,
               dest, local_node, dim_max, torus, in_port, in_vc, out_port, out_vc, exp_p, exp_v);
    end
  endtask

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    // hand cases: 4x4x4 torus, node (3,0,0), dest (0,0,0) -> plus link of dim 0, wrap -> VC1
    dim_max = {4'd3, 4'd3, 4'd3}; torus = 1;
    local_node = {4'd0, 4'd0, 4'd3}; dest = '0; dest.task_id = 2;
    in_port = 0; in_vc = 0;
    check(4, 1, "wrap");
    // same without torus: minus link of dim 0, VC0
    torus = 0;
    check(5, 0, "mesh");
    // arrived: local delivery to task 2 keeps VC
    local_node = '0; in_port = 5; in_vc = 1;
    check(2, 1, "local");
    // dim 0 done, turn into dim 1 (dest y=2): new dimension resets VC
    dest.node = {4'd0, 4'd2, 4'd0}; torus = 1;
    check(6, 0, "turn");
    for (int t = 0; t < 20000; t++) begin
      int ep, ev;
      for (int d = 0; d < NDIM; d++) begin
        int k;
        k = 1 + $urandom % 16;
        dim_max[d] = 4'(k - 1);
        local_node[d] = 4'($urandom % k);
        dest.node[d] = ($urandom % 3 == 0) ? local_node[d] : 4'($urandom % k);
      end
      dest.task_id = 2'($urandom);
      dest.ch_id = 7'($urandom);
      torus = 1'($urandom);
      in_port = 4'($urandom % NP);
      in_vc = 1'($urandom);
      ref_route(dest, local_node, dim_max, torus, in_port, in_vc, N_INTRA, ep, ev);
      check(ep, ev, "random");
      if (ev == 1 && ep >= N_INTRA) vc1++;
      if (ep < N_INTRA) local_cnt++;
    end
    if (vc1 == 0 || local_cnt == 0) failures++;
    $display("wrap-to-VC1 cases %0d, local deliveries %0d", vc1, local_cnt);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
