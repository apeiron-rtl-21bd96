// tb_apeiron_node: end-to-end test of one node with every parameter at its
// default (4x4x4 torus, node at x=3, y=1, z=0).
//
// The host loads the network weights and the configuration through the
// register port. Then, all at once:
//  - RICH events arrive from the network on the X- link for task 0 (the
//    FPGA-RICH kernel); its results must leave on the X+ link (a wrap-around
//    link, hence VC1) with the scores and class of the reference model;
//  - packets for other nodes arrive on the Y+ link and must be forwarded
//    on the port and VC the reference router gives (transit);
//  - the task on port 1 sends messages, some longer than a packet, to task
//    2 of this node (intra-node path), read back on task 2's channel 3;
//  - the task on port 2 sends messages to remote nodes (inter-node send);
//  - one packet with a bad checksum arrives for task 3, which the status
//    register must count.
// Then full events are sent back to back to measure the event rate the node
// sustains: one per 10 cycles, set by the 10-flit event packet on the link.
// The link sinks return credits slowly for a while so that packets wait for
// buffer space. At the end the packet counter of the X+ link is read back.
// Each mechanism is counted; one that never happened is a failure.
module tb_apeiron_node;
  import apeiron_pkg::*;
  import apn_tb_pkg::*;
  import nn_ref_pkg::*;
  localparam int NL = 2 * NDIM, NX = 3, NOC = 4, DEPTH = 32, N_INTRA = 4;
  localparam int NBURST = 24;
  localparam int NEV = 40, NTRANSIT = 40, NINTRA = 16, NOUT = 30;

  class pkt_c;
    int port, vc;
    logic [DATA_W-1:0] pay[$];
  endclass

  logic clk = 0, rst_n = 0;
  logic cfg_we;
  logic [15:0] cfg_addr;
  logic [31:0] cfg_wdata, cfg_rdata;
  link_fwd_t [NL-1:0] net_in, net_out;
  link_credit_t [NL-1:0] net_in_credit, net_out_credit;
  logic [NX-1:0][CH_W-1:0] rx_ch;
  logic [NX-1:0] rx_ready, rx_valid, rx_last;
  logic [NX-1:0][DATA_W-1:0] rx_data;
  logic [NX-1:0][NOC-1:0] tx_valid, tx_ready, tx_last;
  logic [NX-1:0][NOC-1:0][DATA_W-1:0] tx_data;
  dest_t [NX-1:0][NOC-1:0] tx_dest;

  apeiron_node dut (.*);
  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  longint cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  node_t L, dmax, PD;
  dest_t pid_dest;

  // ---------------- drivers (one variable per process) ----------------
  link_fwd_t drv [NL];
  logic w_v [NX], w_l [NX];
  logic [DATA_W-1:0] w_d [NX];
  dest_t w_dest [NX];
  int w_ch [NX];
  for (genvar l = 0; l < NL; l++) begin : g_net
    assign net_in[l] = drv[l];
  end
  always_comb begin
    tx_valid = '0; tx_last = '0; tx_data = '0; tx_dest = '0;
    for (int x = 0; x < NX; x++) begin
      tx_valid[x][w_ch[x]] = w_v[x];
      tx_last[x][w_ch[x]]  = w_l[x];
      tx_data[x][w_ch[x]]  = w_d[x];
      tx_dest[x][w_ch[x]]  = w_dest[x];
    end
  end

  // ---------------- bookkeeping ----------------
  int cred [NL][2];
  pkt_c expq [bit [63:0]];               // keyed by the first payload word
  int exp_cls[$];
  shortint exp_sc[$];
  logic [DATA_W:0] intra_q[$];           // words expected at task 2, channel 3
  logic [DATA_W-1:0] err_q[$];           // words expected at task 3, channel 0
  flit_t cur [NL][$];
  longint credq [NL][2][$];
  int slow = 0, burst = 0;
  longint res_cyc[$];
  int n_res = 0, n_transit = 0, n_out = 0, n_intra = 0, n_split = 0, n_vc1 = 0;
  int n_contention = 0, n_vct_wait = 0, n_disp_stall = 0, n_xplus = 0;
  int procs_done = 0;

  initial begin
    repeat (300000) @(posedge clk);
    failures++;
    $display("watchdog: results %0d/%0d, %0d packets and %0d intra words outstanding",
             n_res, NEV, expq.num(), intra_q.size());
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) if (rst_n)
    for (int l = 0; l < NL; l++) for (int v = 0; v < 2; v++) if (net_in_credit[l][v]) cred[l][v]++;

  // mechanism monitors
  always @(posedge clk) if (rst_n) begin
    for (int o = 0; o < N_INTRA + NL; o++) if ($countones(dut.u_sw.req[o]) > 1) n_contention++;
    for (int i = 0; i < 2 * (N_INTRA + NL); i++)
      if (dut.u_sw.head_valid[i] && dut.u_sw.head[i].sop && !dut.u_sw.active[i] &&
          !dut.u_sw.busy[dut.u_sw.rt_port[i]] && !dut.u_sw.req[dut.u_sw.rt_port[i]][i]) n_vct_wait++;
    if (dut.g_port[2].u_disp.state == dut.g_port[2].u_disp.S_PAY &&
        dut.g_port[2].u_disp.head_valid[dut.g_port[2].u_disp.cur] &&
        dut.g_port[2].u_disp.mf_full[dut.g_port[2].u_disp.ch]) n_disp_stall++;
  end

  // ---------------- link sinks ----------------
  always @(posedge clk) begin
    for (int l = 0; l < NL; l++) begin
      for (int v = 0; v < 2; v++) begin
        if (credq[l][v].size() > 0 && credq[l][v][0] <= cyc) begin
          net_out_credit[l][v] <= 1'b1;
          void'(credq[l][v].pop_front());
        end else net_out_credit[l][v] <= 1'b0;
      end
      if (rst_n && net_out[l].valid) begin
        credq[l][net_out[l].vc].push_back(cyc + (slow ? 15 + $urandom % 20 : $urandom % 3));
        cur[l].push_back(net_out[l].flit);
        if (net_out[l].flit.eop) sink_packet(l, net_out[l].vc);
      end
    end
  end

  task automatic sink_packet(int l, int v);
    header_t h;
    footer_t f;
    int len;
    logic [DATA_W-1:0] pay[$];
    h = header_t'(cur[l][0].data);
    len = cur[l].size() - 2;
    for (int w = 0; w < len; w++) pay.push_back(cur[l][w + 1].data);
    checks++;
    if (cur[l][cur[l].size()-1].data != make_footer(pay) || int'(h.len) != len || h.magic != HDR_MAGIC) begin
      failures++; $display("link %0d: malformed packet", l);
    end
    if (v == 1) n_vc1++;
    if (l == 0) n_xplus++;
    if (h.src_node == L && h.src_task == 0) begin
      // FPGA-RICH result
      int c;
      c = exp_cls.pop_front();
      checks++;
      if (l != 0 || v != 1 || h.dest != pid_dest || len != 1 || pay[0][1:0] != 2'(c) ||
          pay[0][127:96] != 32'(n_res)) begin
        failures++; $display("result %0d: link %0d vc %0d class %0d exp %0d", n_res, l, v, pay[0][1:0], c);
      end
      for (int n = 0; n < 4; n++) begin
        shortint e;
        e = exp_sc.pop_front();
        checks++;
        if (pay[0][16*n + 16 +: 16] != 16'(e)) begin failures++; $display("result %0d score %0d", n_res, n); end
      end
      n_res++;
      res_cyc.push_back(cyc);
    end else begin
      bit [63:0] key;
      pkt_c p;
      key = pay[0][63:0];
      checks++;
      if (!expq.exists(key)) begin
        failures++; $display("link %0d: unexpected packet from task %0d", l, h.src_task);
      end else begin
        p = expq[key];
        if (p.port != N_INTRA + l || p.vc != v || p.pay.size() != len) begin
          failures++; $display("link %0d vc %0d len %0d: expected port %0d vc %0d len %0d", l, v, len, p.port, p.vc, p.pay.size());
        end else foreach (pay[w]) if (pay[w] != p.pay[w]) begin failures++; $display("payload differs"); break; end
        if (h.src_task == 2) n_out++; else n_transit++;
        expq.delete(key);
      end
    end
    cur[l].delete();
  endtask

  // ---------------- task-side readers ----------------
  initial begin
    rx_ch = '0; rx_ready = '0;
    rx_ch[1] = 7'd3;    // task 2 reads channel 3
    rx_ch[2] = 7'd0;    // task 3 reads channel 0
    forever begin
      @(negedge clk);
      rx_ready[1] = slow ? ($urandom % 8 == 0) : 1'($urandom);
      rx_ready[2] = 1'b1;
      #1;
      if (rx_valid[1] && rx_ready[1]) begin
        checks++;
        if (intra_q.size() == 0 || {rx_last[1], rx_data[1]} != intra_q[0]) begin
          failures++; $display("task 2 channel 3: wrong word");
        end
        if (intra_q.size() > 0) void'(intra_q.pop_front());
        n_intra++;
      end
      if (rx_valid[2]) begin
        checks++;
        if (err_q.size() == 0 || rx_data[2] != err_q[0]) begin failures++; $display("task 3: wrong word"); end
        if (err_q.size() > 0) void'(err_q.pop_front());
      end
      checks++;
      if (rx_valid[0]) begin failures++; $display("task 1 received data"); end
    end
  end

  // ---------------- senders ----------------
  task automatic net_send(int l, int vc, dest_t d, logic [DATA_W-1:0] pay[$], bit bad);
    logic [DATA_W-1:0] f;
    f = make_footer(pay);
    if (bad) f[5] = !f[5];
    for (int i = 0; i < pay.size() + 2; i++) begin
      flit_t fl;
      if (i == 0) fl = '{sop: 1'b1, eop: 1'b0, data: make_header(d, pay.size(), 1, '0, 0, 0)};
      else if (i <= pay.size()) fl = '{sop: 1'b0, eop: 1'b0, data: pay[i-1]};
      else fl = '{sop: 1'b0, eop: 1'b1, data: f};
      @(posedge clk);
      while (cred[l][vc] == 0 || (!burst && $urandom % 5 == 0)) begin drv[l] <= '0; @(posedge clk); end
      drv[l] <= '{valid: 1'b1, vc: 1'(vc), flit: fl};
      cred[l][vc]--;
    end
    if (!burst) @(posedge clk) drv[l] <= '0;   // in a burst the next packet follows at once
  endtask

  task automatic send_events(int nev, bit full);
    for (int e = 0; e < nev; e++) begin
      shortint x[64];
      shortint sc[4];
      int cl, nw;
      dest_t d;
      logic [DATA_W-1:0] pay[$];
      nw = (e % 4 == 3 && !full) ? 1 + $urandom % 7 : 8;
      foreach (x[i]) x[i] = (i < 8 * nw) ? rand_feature() : 16'sd0;
      for (int w = 0; w < nw; w++) begin
        logic [DATA_W-1:0] wd;
        for (int k = 0; k < 8; k++) wd[16*k +: 16] = x[8*w + k];
        pay.push_back(wd);
      end
      infer(x, sc, cl);
      exp_cls.push_back(cl);
      foreach (sc[n]) exp_sc.push_back(sc[n]);
      d = '{node: L, task_id: 2'd0, ch_id: 7'd0};
      net_send(1, e % 2, d, pay, 0);
    end
    procs_done++;
  endtask

  task automatic send_transit();
    for (int k = 0; k < NTRANSIT; k++) begin
      dest_t d;
      pkt_c p;
      int vc;
      p = new;
      for (int j = 0; j < NDIM; j++) d.node[j] = 4'($urandom % 4);
      d.node[0] = L[0];                 // arriving on a Y link: x already resolved
      if (d.node[1] == L[1]) d.node[1] = 4'((L[1] + 1) % 4);
      d.task_id = 2'($urandom); d.ch_id = 7'($urandom);
      vc = $urandom % 2;
      for (int w = 0; w < 1 + $urandom % MAX_PAYLOAD; w++) p.pay.push_back(rand_word());
      ref_route(d, L, dmax, 1, N_INTRA + 2, vc, N_INTRA, p.port, p.vc);
      expq[p.pay[0][63:0]] = p;
      net_send(2, vc, d, p.pay, 0);
    end
    procs_done++;
  endtask

  task automatic send_z(int l, int k);
    dest_t d;
    pkt_c p;
    p = new;
    d = '{node: L, task_id: 2'(k), ch_id: 7'(l)};
    d.node[2] = 4'((L[2] + 2) % 4);
    for (int w = 0; w < 4; w++) p.pay.push_back(rand_word());
    ref_route(d, L, dmax, 1, N_INTRA + l, 0, N_INTRA, p.port, p.vc);
    expq[p.pay[0][63:0]] = p;
    net_send(l, 0, d, p.pay, 0);
  endtask

  task automatic task_write(int x, int ch, dest_t d, logic [DATA_W-1:0] msg[$]);
    foreach (msg[w]) begin
      @(negedge clk);
      while ($urandom % 4 == 0) begin w_v[x] = 0; @(negedge clk); end
      w_ch[x] = ch; w_v[x] = 1; w_l[x] = (w == msg.size() - 1); w_d[x] = msg[w]; w_dest[x] = d;
      @(posedge clk);
      while (!tx_ready[x][ch]) @(posedge clk);
    end
    @(negedge clk) w_v[x] = 0;
  endtask

  task automatic send_intra();
    for (int m = 0; m < NINTRA; m++) begin
      logic [DATA_W-1:0] msg[$];
      int n;
      n = (m % 3 == 0) ? 17 + $urandom % 30 : 1 + $urandom % 16;
      if (n > MAX_PAYLOAD) n_split++;
      for (int w = 0; w < n; w++) begin
        msg.push_back(rand_word());
        intra_q.push_back({w == n - 1, msg[w]});
      end
      task_write(0, 0, '{node: L, task_id: 2'd2, ch_id: 7'd3}, msg);
    end
    procs_done++;
  endtask

  task automatic send_out();
    for (int m = 0; m < NOUT; m++) begin
      dest_t d;
      pkt_c p;
      p = new;
      for (int j = 0; j < NDIM; j++) d.node[j] = 4'($urandom % 4);
      if (d.node == L) d.node[2] = 4'((L[2] + 1) % 4);
      d.task_id = 2'($urandom); d.ch_id = 7'($urandom);
      for (int w = 0; w < 1 + $urandom % MAX_PAYLOAD; w++) p.pay.push_back(rand_word());
      ref_route(d, L, dmax, 1, 2, 0, N_INTRA, p.port, p.vc);
      expq[p.pay[0][63:0]] = p;
      task_write(1, 1, d, p.pay);
    end
    procs_done++;
  endtask

  task automatic cfg_write(int a, logic [31:0] v);
    @(negedge clk);
    cfg_we = 1; cfg_addr = 16'(a); cfg_wdata = v;
    @(negedge clk);
    cfg_we = 0;
  endtask

  task automatic cfg_read(int a, output logic [31:0] v);
    @(negedge clk);
    cfg_addr = 16'(a);
    #1 v = cfg_rdata;
  endtask

  initial begin
    logic [31:0] r, n_err;
    cfg_we = 0; cfg_addr = 0; cfg_wdata = 0; net_out_credit = '0;
    for (int l = 0; l < NL; l++) drv[l] = '0;
    for (int x = 0; x < NX; x++) begin w_v[x] = 0; w_l[x] = 0; w_d[x] = '0; w_dest[x] = '0; w_ch[x] = 0; end
    L    = {4'd0, 4'd1, 4'd3};           // z=0, y=1, x=3
    dmax = {4'd3, 4'd3, 4'd3};
    PD   = {4'd0, 4'd1, 4'd0};           // result destination x=0: X+ across the wrap link
    pid_dest = '{node: PD, task_id: 2'd1, ch_id: 7'd9};
    gen_weights(32'hA9E1_2026);
    repeat (3) @(posedge clk);
    for (int l = 0; l < NL; l++) begin cred[l][0] = DEPTH; cred[l][1] = DEPTH; end
    rst_n = 1;
    cfg_write(0, 32'(L));
    cfg_write(1, 32'(dmax));
    cfg_write(2, 1);
    cfg_write(3, 32'(pid_dest));
    for (int a = 0; a < 5268; a++) begin
      @(negedge clk); cfg_we = 1; cfg_addr = 16'h8000 | 16'(a); cfg_wdata = 32'(wt_at(a));
    end
    @(negedge clk); cfg_we = 0;
    cfg_read(0, r); checks++; if (r != 32'(L)) begin failures++; $display("coordinate register"); end
    // the bad packet for task 3
    begin
      logic [DATA_W-1:0] pay[$];
      for (int w = 0; w < 3; w++) begin pay.push_back(rand_word()); err_q.push_back(pay[w]); end
      net_send(3, 0, '{node: L, task_id: 2'd3, ch_id: 7'd0}, pay, 1);
    end
    fork
      send_events(NEV, 0);
      send_transit();
      send_intra();
      send_out();
      begin repeat (400) @(posedge clk); slow = 1; repeat (1500) @(posedge clk); slow = 0; end
    join
    repeat (1000) @(posedge clk);
    // event rate: full 8-word events back to back on one link; each is a
    // 10-flit packet, so the link allows one event per 10 cycles
    begin
      int r0;
      longint span;
      burst = 1;
      r0 = res_cyc.size();
      fork
        send_events(NBURST, 1);
        // two transit packets arrive together on both Z links for the same egress
        for (int k = 0; k < 4; k++) begin
          fork
            send_z(4, k);
            send_z(5, k);
          join
          @(posedge clk) begin drv[4] <= '0; drv[5] <= '0; end
        end
      join
      @(posedge clk) drv[1] <= '0;
      repeat (200) @(posedge clk);
      span = res_cyc[res_cyc.size()-1] - res_cyc[r0];
      checks++;
      if (res_cyc.size() - r0 != NBURST || span > longint'((NBURST - 1) * 10)) begin
        failures++; $display("event rate: %0d results in %0d cycles", res_cyc.size() - r0, span);
      end
      $display("back-to-back events: %0d results, %0d cycles apart on average (10 = link limit, 8 = core limit)",
               NBURST, span / (NBURST - 1));
      burst = 0;
    end
    checks += 4;
    if (n_res != NEV + NBURST) begin failures++; $display("%0d of %0d results", n_res, NEV + NBURST); end
    if (expq.num() != 0) begin failures++; $display("%0d packets never left", expq.num()); end
    if (intra_q.size() != 0) begin failures++; $display("%0d intra-node words never arrived", intra_q.size()); end
    if (err_q.size() != 0) begin failures++; $display("task 3 words missing"); end
    cfg_read(4, n_err); checks++; if (n_err != 1) begin failures++; $display("error counter %0d", n_err); end
    cfg_read(16 + N_INTRA, r); checks++;
    if (r != 32'(n_xplus)) begin failures++; $display("X+ packet counter %0d, seen %0d", r, n_xplus); end
    $display("inferences %0d, transit %0d, outbound %0d, intra words %0d, split messages %0d, VC1 %0d",
             n_res, n_transit, n_out, n_intra, n_split, n_vc1);
    $display("contention %0d, cut-through waits %0d, dispatcher stalls %0d, checksum errors %0d",
             n_contention, n_vct_wait, n_disp_stall, n_err);
    if (n_res == 0 || n_transit == 0 || n_out == 0 || n_intra == 0 || n_split == 0 || n_vc1 == 0 ||
        n_contention == 0 || n_vct_wait == 0 || n_disp_stall == 0 || n_err == 0) begin
      failures++; $display("a mechanism never happened");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
