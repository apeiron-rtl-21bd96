// tb_aggregator: four writers send messages of 1..40 words on the four
// output streams, each message with its own destination; the sink receives
// the packets, returns credits after a random (sometimes long) delay, and
// checks header (destination, length, last flag, source), payload and
// footer against per-stream models. Messages over 16 words must come out
// as several packets, only the final one flagged last. Stream c must use
// VC c mod 2 for whole packets, and the sink must never be sent more flits
// than the credits of that VC allow.
module tb_aggregator;
  import apeiron_pkg::*;
  import apn_tb_pkg::*;
  localparam int N_CH = 4, MSG_DEPTH = 32, DN = 32, NMSG = 60;
  logic clk = 0, rst_n = 0;
  node_t local_node;
  logic [TASK_W-1:0] src_task;
  logic [N_CH-1:0] tx_valid, tx_ready, tx_last;
  logic [N_CH-1:0][DATA_W-1:0] tx_data;
  dest_t [N_CH-1:0] tx_dest;
  link_fwd_t out;
  link_credit_t out_credit;
  int checks = 0, failures = 0;
  longint cyc = 0;
  // expected packets per stream: header fields and payload
  dest_t exp_dest[N_CH][$];
  int exp_len[N_CH][$];
  bit exp_last[N_CH][$];
  logic [DATA_W-1:0] exp_pay[N_CH][$];
  flit_t cur[$];
  longint credq[2][$];
  logic cur_vc;
  int n_vc1 = 0;
  int room[2] = '{DN, DN};
  int slow = 0, done_w = 0;
  int n_split = 0, n_pkts = 0, n_wait = 0;
  logic [DATA_W-1:0] wdata_q [N_CH];
  logic [N_CH-1:0] wv, wl;
  dest_t wd [N_CH];

  aggregator #(.N_CH(N_CH), .MSG_DEPTH(MSG_DEPTH), .DN_DEPTH(DN)) dut (.*);
  always #5 clk = ~clk;
  always @(posedge clk) cyc <= cyc + 1;
  for (genvar c = 0; c < N_CH; c++) begin : g_w
    assign tx_valid[c] = wv[c];
    assign tx_last[c]  = wl[c];
    assign tx_data[c]  = wdata_q[c];
    assign tx_dest[c]  = wd[c];
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // sink
  always @(posedge clk) if (rst_n) begin
    for (int v = 0; v < 2; v++)
      if (credq[v].size() > 0 && credq[v][0] <= cyc) begin out_credit[v] <= 1'b1; void'(credq[v].pop_front()); room[v]++; end
      else out_credit[v] <= 1'b0;
    if ($countones(dut.q_empty) < N_CH && dut.state == dut.S_IDLE && !dut.gvalid) n_wait++;
    if (out.valid) begin
      checks++;
      if (room[out.vc] == 0) begin failures++; $display("flit without credit"); end
      room[out.vc]--;
      credq[out.vc].push_back(cyc + (slow ? 10 + $urandom % 30 : $urandom % 3));
      if (out.flit.sop) cur_vc = out.vc;
      else if (out.vc != cur_vc) begin failures++; $display("VC changed inside a packet"); end
      if (out.vc) n_vc1++;
      cur.push_back(out.flit);
      if (out.flit.eop) check_packet();
    end
  end

  task automatic check_packet();
    header_t h;
    int c, len;
    logic [DATA_W-1:0] pay[$];
    h = header_t'(cur[0].data);
    c = int'(h.dest.ch_id) % N_CH;
    checks++;
    if (exp_len[c].size() == 0) begin
      failures++; $display("unexpected packet for stream %0d", c);
    end else begin
      len = exp_len[c].pop_front();
      if (h.dest != exp_dest[c].pop_front() || int'(h.len) != len || h.last != exp_last[c].pop_front() ||
          h.magic != HDR_MAGIC || h.src_node != local_node || h.src_task != src_task ||
          cur.size() != len + 2 || !cur[0].sop || !cur[cur.size()-1].eop || int'(cur_vc) != c % 2) begin
        failures++; $display("stream %0d: header mismatch", c);
      end else begin
        for (int w = 0; w < len; w++) begin
          pay.push_back(exp_pay[c].pop_front());
          if (cur[w + 1].data != pay[w]) begin failures++; $display("stream %0d payload word %0d", c, w); end
        end
        if (cur[len + 1].data != make_footer(pay)) begin failures++; $display("stream %0d footer", c); end
      end
    end
    n_pkts++;
    cur.delete();
  endtask

  task automatic writer(int c);
    for (int m = 0; m < NMSG; m++) begin
      int n;
      dest_t d;
      n = 1 + $urandom % 40;
      d.node = 12'($urandom); d.task_id = 2'($urandom);
      d.ch_id = 7'({5'($urandom), 2'(c)});
      for (int w = 0; w < n; w += MAX_PAYLOAD) begin
        int l;
        l = (n - w > MAX_PAYLOAD) ? MAX_PAYLOAD : n - w;
        exp_dest[c].push_back(d); exp_len[c].push_back(l); exp_last[c].push_back(w + l == n);
        if (w > 0) n_split++;
      end
      for (int w = 0; w < n; w++) begin
        logic [DATA_W-1:0] x;
        x = rand_word();
        exp_pay[c].push_back(x);
        @(negedge clk);
        while ($urandom % 4 == 0) begin wv[c] = 0; @(negedge clk); end
        wv[c] = 1; wl[c] = (w == n - 1); wdata_q[c] = x;
        wd[c] = (w == 0) ? d : dest_t'($urandom);   // sideband only sampled on the first word
        @(posedge clk);
        while (!tx_ready[c]) @(posedge clk);
      end
      @(negedge clk) wv[c] = 0;
    end
    done_w++;
  endtask

  initial begin
    wv = '0; wl = '0; out_credit = '0;
    for (int c = 0; c < N_CH; c++) begin wdata_q[c] = '0; wd[c] = '0; end
    local_node = 12'h321; src_task = 2'd3;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int c = 0; c < N_CH; c++) fork automatic int cc = c; writer(cc); join_none
    repeat (800) @(posedge clk);
    slow = 1;
    repeat (1500) @(posedge clk);
    slow = 0;
    wait (done_w == N_CH);
    repeat (500) @(posedge clk);
    for (int c = 0; c < N_CH; c++) begin
      checks++;
      if (exp_len[c].size() != 0) begin failures++; $display("stream %0d: %0d packets missing", c, exp_len[c].size()); end
    end
    $display("packets %0d, continuation packets %0d, credit-wait cycles %0d", n_pkts, n_split, n_wait);
    $display("flits on VC1 %0d", n_vc1);
    if (n_split == 0 || n_wait == 0 || n_vc1 == 0) begin failures++; $display("a mechanism never happened"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
