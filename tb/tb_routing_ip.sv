// tb_routing_ip: all ten ports of the switch send random packets at once.
//
// Each input has a credit-respecting sender (VC0 on intra-node ports, a
// random VC on links); each output has a sink that returns credits after a
// random delay, long in the middle phase so that headers must wait for
// buffer space. Every packet carries a tag in its header; the sink checks
// that it leaves on the port and VC given by the reference router, with all
// flits intact. Run once as a mesh and once as a torus. Counted mechanisms:
// contention (several requests for one egress), virtual-cut-through waits
// (a header held back for lack of downstream credits), packets on VC1,
// local deliveries and link-to-link forwarding.
module tb_routing_ip;
  import apeiron_pkg::*;
  import apn_tb_pkg::*;
  localparam int N_INTRA = 4, NP = N_INTRA + 2 * NDIM, DEPTH = 32, NPKT = 60;

  class pkt_c;
    int port, vc;
    flit_t flits[$];
  endclass

  logic clk = 0, rst_n = 0;
  node_t local_node, dim_max;
  logic torus;
  link_fwd_t [NP-1:0] in, out;
  link_credit_t [NP-1:0] in_credit, out_credit;
  logic [NP-1:0] pkt_sent;
  link_fwd_t drv [NP];     // one driver variable per sender process
  for (genvar p = 0; p < NP; p++) begin : g_drv
    assign in[p] = drv[p];
  end

  int checks = 0, failures = 0;
  longint cyc = 0;
  int cred [NP][2];
  pkt_c expq [int];
  int tag_next = 1;
  flit_t cur [NP][$];
  longint credq [NP][2][$];
  int slow = 0;
  int senders_done = 0;
  int n_contention = 0, n_vct_wait = 0, n_vc1 = 0, n_local = 0, n_transit = 0, n_rx = 0;

  routing_ip #(.N_INTRA(N_INTRA), .BUF_DEPTH(DEPTH)) dut (.*);
  always #5 clk = ~clk;
  always @(posedge clk) cyc <= cyc + 1;

  initial begin
    repeat (60000) @(posedge clk);
    failures++;
    $display("watchdog: %0d packets outstanding", expq.num());
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // credits returned by the switch input buffers
  always @(posedge clk) for (int p = 0; p < NP; p++) for (int v = 0; v < 2; v++)
    if (in_credit[p][v]) cred[p][v]++;

  // sinks
  always @(posedge clk) begin
    for (int o = 0; o < NP; o++) begin
      for (int v = 0; v < 2; v++) begin
        if (credq[o][v].size() > 0 && credq[o][v][0] <= cyc) begin
          out_credit[o][v] <= 1'b1;
          void'(credq[o][v].pop_front());
        end else out_credit[o][v] <= 1'b0;
      end
      if (rst_n && out[o].valid) begin
        credq[o][out[o].vc].push_back(cyc + (slow ? 20 + $urandom % 20 : $urandom % 3));
        cur[o].push_back(out[o].flit);
        if (out[o].flit.eop) check_packet(o, out[o].vc);
      end
    end
  end

  task automatic check_packet(int o, int v);
    header_t h;
    int tag;
    pkt_c p;
    h = header_t'(cur[o][0].data);
    tag = int'(h.rsvd);
    checks++;
    if (!expq.exists(tag)) begin
      failures++; $display("unknown packet tag %0d on port %0d", tag, o);
    end else begin
      p = expq[tag];
      if (p.port != o || p.vc != v || p.flits.size() != cur[o].size()) begin
        failures++;
        $display("tag %0d: port %0d vc %0d len %0d, expected port %0d vc %0d len %0d",
                 tag, o, v, cur[o].size(), p.port, p.vc, p.flits.size());
      end else begin
        foreach (p.flits[i]) if (p.flits[i] != cur[o][i]) begin
          failures++; $display("tag %0d flit %0d differs", tag, i); break;
        end
      end
      if (v == 1) n_vc1++;
      if (o < N_INTRA) n_local++;
      expq.delete(tag);
    end
    n_rx++;
    cur[o].delete();
  endtask

  // mechanism monitor
  always @(posedge clk) if (rst_n) begin
    for (int o = 0; o < NP; o++) if ($countones(dut.req[o]) > 1) n_contention++;
    for (int i = 0; i < 2 * NP; i++)
      if (dut.head_valid[i] && dut.head[i].sop && !dut.active[i] &&
          !dut.busy[dut.rt_port[i]] && !dut.req[dut.rt_port[i]][i]) n_vct_wait++;
  end

  task automatic sender(int p);
    for (int k = 0; k < NPKT; k++) begin
      pkt_c pk;
      dest_t d;
      int len, vc, tag;
      logic [DATA_W-1:0] pay[$];
      pk = new;
      for (int j = 0; j < NDIM; j++) d.node[j] = 4'($urandom % 4);
      if ($urandom % 4 == 0) d.node = local_node;
      d.task_id = 2'($urandom);
      d.ch_id = 7'($urandom);
      len = $urandom % (MAX_PAYLOAD + 1);
      vc = (p < N_INTRA) ? 0 : int'($urandom % 2);
      tag = tag_next++;
      for (int w = 0; w < len; w++) pay.push_back(rand_word());
      pk.flits.push_back('{sop: 1'b1, eop: 1'b0, data: make_header(d, len, 1, local_node, 0, tag)});
      foreach (pay[w]) pk.flits.push_back('{sop: 1'b0, eop: 1'b0, data: pay[w]});
      pk.flits.push_back('{sop: 1'b0, eop: 1'b1, data: make_footer(pay)});
      ref_route(d, local_node, dim_max, torus, p, vc, N_INTRA, pk.port, pk.vc);
      if (pk.port >= N_INTRA) n_transit += (p >= N_INTRA);
      expq[tag] = pk;
      foreach (pk.flits[i]) begin
        @(posedge clk);
        while (cred[p][vc] == 0 || $urandom % 5 == 0) begin
          drv[p] <= '0;
          @(posedge clk);
        end
        drv[p] <= '{valid: 1'b1, vc: 1'(vc), flit: pk.flits[i]};
        cred[p][vc]--;
      end
      @(posedge clk);
      drv[p] <= '0;
    end
    senders_done++;
  endtask

  task automatic run_phase(bit tor);
    rst_n = 0;
    torus = tor;
    for (int p = 0; p < NP; p++) drv[p] = '0;
    out_credit = '0;
    repeat (3) @(posedge clk);
    for (int p = 0; p < NP; p++) begin cred[p][0] = DEPTH; cred[p][1] = DEPTH; end
    rst_n = 1;
    senders_done = 0;
    for (int p = 0; p < NP; p++) fork automatic int pp = p; sender(pp); join_none
    repeat (300) @(posedge clk);
    slow = 1;
    repeat (1500) @(posedge clk);
    slow = 0;
    wait (senders_done == NP);
    repeat (200) @(posedge clk);
    checks++;
    if (expq.num() != 0) begin failures++; $display("%0d packets never arrived", expq.num()); end
  endtask

  initial begin
    local_node = {4'd1, 4'd2, 4'd3};   // z=1, y=2, x=3 (x at the ring end)
    dim_max    = {4'd3, 4'd3, 4'd3};
    run_phase(0);
    run_phase(1);
    $display("received %0d: contention %0d, vct waits %0d, VC1 %0d, local %0d, transit %0d",
             n_rx, n_contention, n_vct_wait, n_vc1, n_local, n_transit);
    if (n_contention == 0 || n_vct_wait == 0 || n_vc1 == 0 || n_local == 0 || n_transit == 0) begin
      failures++; $display("a mechanism never happened");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
