// apn_tb_pkg: reference models shared by the testbenches.
//
// ref_route: dimension-order routing written from the routing rules
// (integer arithmetic on ring distances), independent of route_unit.
// make_header/make_footer: packet framing as the header_t/footer_t layout
// defines it. The reference network model (weights, inference) is in
// nn_ref_pkg.
package apn_tb_pkg;
  import apeiron_pkg::*;

  // Returns out port in port_o, out VC in vc_o.
  function automatic void ref_route(input dest_t dest, input node_t loc, input node_t dmax,
                                    input bit torus, input int in_port, input int in_vc,
                                    input int n_intra, output int port_o, output int vc_o);
    port_o = dest.task_id;
    vc_o   = in_vc;
    for (int d = 0; d < NDIM; d++) begin
      int k, a, b, fwd, bwd;
      bit plus, wrap;
      a = loc[d]; b = dest.node[d]; k = dmax[d] + 1;
      if (a == b) continue;
      if (torus) begin
        fwd  = ((b - a) % k + k) % k;
        bwd  = k - fwd;
        plus = (fwd <= bwd);
        wrap = plus ? (a == k - 1) : (a == 0);
      end else begin
        plus = b > a;
        wrap = 0;
      end
      port_o = n_intra + 2 * d + (plus ? 0 : 1);
      if (wrap) vc_o = 1;
      else if (in_port >= n_intra && (in_port - n_intra) / 2 == d) vc_o = in_vc;
      else vc_o = 0;
      return;
    end
  endfunction

  function automatic logic [DATA_W-1:0] make_header(input dest_t dest, input int len, input bit last,
                                                    input node_t src, input int src_task, input int tag);
    header_t h;
    h = '0;
    h.rsvd     = $bits(h.rsvd)'(tag);
    h.magic    = HDR_MAGIC;
    h.src_node = src;
    h.src_task = TASK_W'(src_task);
    h.last     = last;
    h.len      = LEN_W'(len);
    h.dest     = dest;
    return h;
  endfunction

  function automatic logic [DATA_W-1:0] make_footer(input logic [DATA_W-1:0] pay[$]);
    footer_t f;
    logic [31:0] c;
    c = 0;
    foreach (pay[i]) for (int j = 0; j < DATA_W / 32; j++) c ^= pay[i][32*j +: 32];
    f = '0;
    f.magic = FTR_MAGIC;
    f.len   = LEN_W'(pay.size());
    f.csum  = c;
    return f;
  endfunction

  function automatic logic [DATA_W-1:0] rand_word();
    return {$urandom, $urandom, $urandom, $urandom};
  endfunction
endpackage
