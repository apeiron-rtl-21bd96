// tb_apeiron_mapping: four nodes in a 2x2 mesh running a five-task dataflow
// graph, the example mapping of five tasks onto four FPGAs:
//   node (0,0): task A        node (1,0): task B
//   node (0,1): task C        node (1,1): tasks D and E
// with messages A->C, A->D, B->D, C->E and D->E. The tasks are testbench
// processes on intra-node port 1 (task_id 1; E uses port 2, task_id 2).
// A and B produce messages of 1..40 words (long ones are split into several
// packets); C forwards each message from A with every word XORed with a
// key; D adds the words of A's and B's messages; E checks both results.
// C->E and A->D cross the mesh, D->E stays inside node (1,1). The
// nodes' link ports are wired to their neighbours, credits going back;
// every node runs with default parameters and a 2x2x1 mesh configuration.
// The test counts link flits, intra-node and inter-node messages and split
// packets, and fails if any of them never occurs.
module tb_apeiron_mapping;
  import apeiron_pkg::*;
  import apn_tb_pkg::*;
  localparam int NN = 4, NL = 2 * NDIM, NX = 3, NOC = 4, M = 25, WD = 100000;
  localparam logic [DATA_W-1:0] KEY = 128'h5A5A_0F0F_1234_5678_9ABC_DEF0_C3C3_A5A5;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic                  cfg_we   [NN];
  logic [15:0]           cfg_addr [NN];
  logic [31:0]           cfg_wdata[NN];
  logic [31:0]           cfg_rdata[NN];
  link_fwd_t    [NL-1:0] n_in     [NN];
  link_credit_t [NL-1:0] n_in_cr  [NN];
  link_fwd_t    [NL-1:0] n_out    [NN];
  link_credit_t [NL-1:0] n_out_cr [NN];
  logic [NX-1:0][CH_W-1:0]   rx_ch    [NN];
  logic [NX-1:0]             rx_ready [NN], rx_valid [NN], rx_last [NN];
  logic [NX-1:0][DATA_W-1:0] rx_data  [NN];
  logic [NX-1:0][NOC-1:0]    tx_valid [NN], tx_ready [NN], tx_last [NN];
  logic [NX-1:0][NOC-1:0][DATA_W-1:0] tx_data [NN];
  dest_t [NX-1:0][NOC-1:0]   tx_dest  [NN];

  // node n sits at x = n % 2, y = n / 2
  function automatic node_t coord(int n);
    node_t c;
    c = '0;
    c[0] = 4'(n % 2);
    c[1] = 4'(n / 2);
    return c;
  endfunction

  for (genvar n = 0; n < NN; n++) begin : g_node
    apeiron_node u_node (
      .clk, .rst_n,
      .cfg_we(cfg_we[n]), .cfg_addr(cfg_addr[n]), .cfg_wdata(cfg_wdata[n]), .cfg_rdata(cfg_rdata[n]),
      .net_in(n_in[n]), .net_in_credit(n_in_cr[n]), .net_out(n_out[n]), .net_out_credit(n_out_cr[n]),
      .rx_ch(rx_ch[n]), .rx_ready(rx_ready[n]), .rx_valid(rx_valid[n]), .rx_data(rx_data[n]), .rx_last(rx_last[n]),
      .tx_valid(tx_valid[n]), .tx_ready(tx_ready[n]), .tx_data(tx_data[n]), .tx_last(tx_last[n]), .tx_dest(tx_dest[n])
    );
    // links: +d of one node to -d of its neighbour, credits the other way;
    // links at the mesh edges and in Z are idle
    for (genvar d = 0; d < NDIM; d++) begin : g_dim
      localparam int C = (d == 0) ? n % 2 : (d == 1) ? n / 2 : 0;
      localparam int STEP = (d == 0) ? 1 : 2;
      if (d < 2 && C == 0) begin : g_plus
        assign n_in[n + STEP][2*d+1] = n_out[n][2*d];
        assign n_out_cr[n][2*d]      = n_in_cr[n + STEP][2*d+1];
        assign n_in[n][2*d]          = n_out[n + STEP][2*d+1];
        assign n_out_cr[n + STEP][2*d+1] = n_in_cr[n][2*d];
      end else begin : g_edge
        assign n_in[n][2*d]     = '0;
        assign n_out_cr[n][2*d] = '0;
      end
      if (!(d < 2 && C == 1)) begin : g_edge_minus
        assign n_in[n][2*d+1]     = '0;
        assign n_out_cr[n][2*d+1] = '0;
      end
    end
  end

  // ---------------- task-side drivers, one variable per process ----------------
  logic w_v [NN][NX], w_l [NN][NX], r_rdy [NN][NX];
  logic [DATA_W-1:0] w_d [NN][NX];
  dest_t w_dest [NN][NX];
  logic [CH_W-1:0] r_ch [NN][NX];
  always_comb
    for (int n = 0; n < NN; n++) begin
      tx_valid[n] = '0; tx_last[n] = '0; tx_data[n] = '0; tx_dest[n] = '0;
      for (int x = 0; x < NX; x++) begin
        tx_valid[n][x][0] = w_v[n][x];
        tx_last[n][x][0]  = w_l[n][x];
        tx_data[n][x][0]  = w_d[n][x];
        tx_dest[n][x][0]  = w_dest[n][x];
        rx_ready[n][x]    = r_rdy[n][x];
        rx_ch[n][x]       = r_ch[n][x];
      end
    end

  // port x of the brought-out ports is intra-node port x+1, i.e. task_id x+1
  task automatic send_msg(int n, int x, dest_t d, logic [DATA_W-1:0] msg[$]);
    foreach (msg[w]) begin
      @(negedge clk);
      while ($urandom % 4 == 0) begin w_v[n][x] = 0; @(negedge clk); end
      w_v[n][x] = 1; w_l[n][x] = (w == msg.size() - 1); w_d[n][x] = msg[w]; w_dest[n][x] = d;
      @(posedge clk);
      while (!tx_ready[n][x][0]) @(posedge clk);
    end
    @(negedge clk) w_v[n][x] = 0;
  endtask

  // Each input channel of a task has its own reading process (one per
  // message-input FIFO); here one drainer per port visits channels 0 and 1
  // in turn and hands the words to the task through per-channel queues. A
  // task that read one channel to the end before looking at the other could
  // deadlock: a full channel FIFO holds up the packets behind it in the port.
  logic [DATA_W:0] rq [NN][NX][2][$];
  task automatic drainer(int n, int x);
    int k = 0;
    forever begin
      @(negedge clk);
      r_ch[n][x] = 7'(k);
      r_rdy[n][x] = ($urandom % 3 != 0);
      #1;
      if (rx_valid[n][x] && r_rdy[n][x]) rq[n][x][k].push_back({rx_last[n][x], rx_data[n][x]});
      k = 1 - k;
    end
  endtask

  // blocking receive(ch): collects words up to the one marked last
  task automatic recv_msg(int n, int x, int ch, output logic [DATA_W-1:0] msg[$]);
    bit done;
    msg.delete();
    done = 0;
    while (!done) begin
      while (rq[n][x][ch].size() == 0) @(posedge clk);
      msg.push_back(rq[n][x][ch][0][DATA_W-1:0]);
      done = rq[n][x][ch][0][DATA_W];
      void'(rq[n][x][ch].pop_front());
    end
  endtask

  function automatic dest_t dst(int n, int t, int ch);
    return '{node: coord(n), task_id: 2'(t), ch_id: 7'(ch)};
  endfunction

  // ---------------- the five tasks ----------------
  int msg_len[M];
  logic [DATA_W-1:0] a_msgs[$], b_msgs[$];   // all words A and B produced, in order
  int n_split = 0, n_inter = 0, n_intra = 0, n_e = 0;
  longint link_flits = 0;
  int done_tasks = 0;

  task automatic task_a();
    for (int m = 0; m < M; m++) begin
      logic [DATA_W-1:0] msg[$];
      for (int w = 0; w < msg_len[m]; w++) begin msg.push_back(rand_word()); a_msgs.push_back(msg[w]); end
      send_msg(0, 0, dst(2, 1, 0), msg);    // to C
      send_msg(0, 0, dst(3, 1, 0), msg);    // to D
    end
    done_tasks++;
  endtask

  task automatic task_b();
    for (int m = 0; m < M; m++) begin
      logic [DATA_W-1:0] msg[$];
      for (int w = 0; w < msg_len[m]; w++) begin msg.push_back(rand_word()); b_msgs.push_back(msg[w]); end
      send_msg(1, 0, dst(3, 1, 1), msg);    // to D, channel 1
    end
    done_tasks++;
  endtask

  task automatic task_c();
    for (int m = 0; m < M; m++) begin
      logic [DATA_W-1:0] msg[$];
      recv_msg(2, 0, 0, msg);
      n_inter++;
      foreach (msg[w]) msg[w] ^= KEY;
      send_msg(2, 0, dst(3, 2, 0), msg);    // to E, channel 0
    end
    done_tasks++;
  endtask

  task automatic task_d();
    for (int m = 0; m < M; m++) begin
      logic [DATA_W-1:0] ma[$], mb[$], s[$];
      recv_msg(3, 0, 0, ma);
      recv_msg(3, 0, 1, mb);
      n_inter += 2;
      checks++;
      if (ma.size() != mb.size()) begin failures++; $display("D: message %0d lengths %0d/%0d", m, ma.size(), mb.size()); end
      foreach (ma[w]) s.push_back(ma[w] + ((w < mb.size()) ? mb[w] : '0));
      send_msg(3, 0, dst(3, 2, 1), s);      // to E on the same node, channel 1
    end
    done_tasks++;
  endtask

  task automatic task_e();
    int wa = 0;
    for (int m = 0; m < M; m++) begin
      logic [DATA_W-1:0] mc[$], md[$];
      recv_msg(3, 1, 0, mc);
      recv_msg(3, 1, 1, md);
      n_intra++;
      checks += 2;
      if (mc.size() != msg_len[m] || md.size() != msg_len[m]) begin
        failures++; $display("E: message %0d lengths %0d/%0d, expected %0d", m, mc.size(), md.size(), msg_len[m]);
      end else begin
        for (int w = 0; w < msg_len[m]; w++) begin
          checks += 2;
          if (mc[w] != (a_msgs[wa + w] ^ KEY)) begin failures++; $display("E: C result %0d word %0d", m, w); end
          if (md[w] != a_msgs[wa + w] + b_msgs[wa + w]) begin failures++; $display("E: D result %0d word %0d", m, w); end
        end
      end
      wa += msg_len[m];
      n_e++;
    end
    done_tasks++;
  endtask

  always @(posedge clk)
    for (int n = 0; n < NN; n++) for (int l = 0; l < NL; l++) if (n_out[n][l].valid) link_flits++;

  initial begin
    repeat (WD) @(posedge clk);
    failures++;
    $display("watchdog: E has %0d of %0d results, C/D got %0d, link flits %0d, A tx_valid %b ready %b", n_e, M, n_inter, link_flits, tx_valid[0], tx_ready[0]);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic cfg_write(int n, int a, logic [31:0] v);
    @(negedge clk);
    cfg_we[n] = 1; cfg_addr[n] = 16'(a); cfg_wdata[n] = v;
    @(negedge clk);
    cfg_we[n] = 0;
  endtask

  initial begin
    for (int n = 0; n < NN; n++) begin
      cfg_we[n] = 0; cfg_addr[n] = 0; cfg_wdata[n] = 0;
      for (int x = 0; x < NX; x++) begin
        w_v[n][x] = 0; w_l[n][x] = 0; w_d[n][x] = '0; w_dest[n][x] = '0; r_rdy[n][x] = 0; r_ch[n][x] = '0;
      end
    end
    for (int m = 0; m < M; m++) begin
      msg_len[m] = (m % 4 == 0) ? 17 + $urandom % 24 : 1 + $urandom % 16;
      if (msg_len[m] > MAX_PAYLOAD) n_split++;
    end
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int n = 0; n < NN; n++) begin
      cfg_write(n, 0, 32'(coord(n)));
      cfg_write(n, 1, 32'({4'd0, 4'd1, 4'd1}));   // 2 x 2 x 1
      cfg_write(n, 2, 0);                         // open mesh
    end
    fork
      drainer(2, 0); drainer(3, 0); drainer(3, 1);
    join_none
    fork
      task_a(); task_b(); task_c(); task_d(); task_e();
    join
    repeat (100) @(posedge clk);
    $display("messages: %0d received across nodes, %0d inside node (1,1); %0d split; %0d link flits",
             n_inter, n_intra, n_split, link_flits);
    checks++;
    if (n_inter == 0 || n_intra == 0 || n_split == 0 || link_flits == 0) begin
      failures++; $display("a mechanism never happened");
    end
    for (int n = 0; n < NN; n++) begin
      checks++;
      if (rx_valid[n][0] && n != 2 && n != 3) begin failures++; $display("node %0d: stray data", n); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
