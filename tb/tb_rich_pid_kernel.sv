// tb_rich_pid_kernel: events of 1..8 words arrive on the receive side; the
// results on the send side are compared with nn_ref_pkg::infer (short
// events zero padded), with the sequence number, destination and last flag.
// Phase 1 streams events back to back with the send side always ready: the
// kernel must take one event every 8 cycles. Phase 2 holds the send side
// for long stretches: the kernel must stall its input and lose nothing.
module tb_rich_pid_kernel;
  import apeiron_pkg::*;
  import nn_ref_pkg::*;
  localparam int N1 = 30, N2 = 30;
  logic clk = 0, rst_n = 0;
  logic wt_we;
  logic [12:0] wt_addr;
  logic signed [7:0] wt_data;
  logic [CH_W-1:0] rx_ch;
  logic rx_ready, rx_valid, rx_last;
  logic [DATA_W-1:0] rx_data;
  dest_t pid_dest, tx_dest;
  logic tx_valid, tx_ready, tx_last;
  logic [DATA_W-1:0] tx_data;
  int checks = 0, failures = 0;
  longint cyc = 0;
  logic [DATA_W:0] words[$];        // {last, data} to present
  int exp_cls[$];
  shortint exp_sc[$];
  int n_res = 0, stall_cycles = 0, hold = 0;
  longint t_res[$];

  rich_pid_kernel dut (.*);
  always #5 clk = ~clk;
  always @(posedge clk) cyc <= cyc + 1;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // receive side: present queued words
  always @(negedge clk) begin
    rx_valid = words.size() > 0 && rst_n;
    rx_data  = words.size() > 0 ? words[0][DATA_W-1:0] : '0;
    rx_last  = words.size() > 0 ? words[0][DATA_W] : 1'b0;
  end
  always @(posedge clk) begin
    if (rx_valid && rx_ready) begin void'(words.pop_front()); rx_valid <= 1'b0; end
    if (rx_valid && !rx_ready) stall_cycles++;
    checks++;
    if (rx_ch != 0) begin failures++; $display("kernel reads channel %0d", rx_ch); end
  end

  // send side
  always @(posedge clk) if (rst_n && tx_valid && tx_ready) begin
    int c;
    c = exp_cls.pop_front();
    checks++;
    if (tx_data[1:0] != 2'(c) || tx_data[127:96] != 32'(n_res) || !tx_last || tx_dest != pid_dest) begin
      failures++; $display("result %0d: class %0d exp %0d seq %0d", n_res, tx_data[1:0], c, tx_data[127:96]);
    end
    for (int n = 0; n < 4; n++) begin
      shortint e;
      e = exp_sc.pop_front();
      checks++;
      if (tx_data[16*n + 16 +: 16] != 16'(e)) begin failures++; $display("result %0d score %0d got %0d exp %0d", n_res, n, $signed(tx_data[16*n + 16 +: 16]), e); end
    end
    t_res.push_back(cyc);
    n_res++;
  end

  task automatic add_event(int nw);
    shortint x[64];
    shortint sc[4];
    int cl;
    foreach (x[i]) x[i] = (i < 8 * nw) ? rand_feature() : 16'sd0;
    for (int w = 0; w < nw; w++) begin
      logic [DATA_W-1:0] d;
      for (int k = 0; k < 8; k++) d[16*k +: 16] = x[8*w + k];
      words.push_back({w == nw - 1, d});
    end
    infer(x, sc, cl);
    exp_cls.push_back(cl);
    foreach (sc[n]) exp_sc.push_back(sc[n]);
  endtask

  initial begin
    wt_we = 0; wt_addr = 0; wt_data = 0; tx_ready = 1;
    pid_dest = '{node: 12'h0A5, task_id: 2'd1, ch_id: 7'd9};
    gen_weights(32'h5EED);
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int a = 0; a < 5268; a++) begin
      @(negedge clk); wt_we = 1; wt_addr = 13'(a); wt_data = wt_at(a);
    end
    @(negedge clk); wt_we = 0;
    // phase 1: full events back to back
    for (int e = 0; e < N1; e++) add_event(8);
    wait (n_res == N1);
    for (int e = 5; e < N1; e++) begin
      checks++;
      if (t_res[e] - t_res[e-1] != 8) begin failures++; $display("result interval %0d", t_res[e] - t_res[e-1]); end
    end
    // phase 2: short events, send side often held
    fork
      begin
        while (n_res < N1 + N2) begin
          @(negedge clk);
          if (hold == 0 && $urandom % 30 == 0) hold = 40 + $urandom % 40;
          if (hold > 0) hold--;
          tx_ready = (hold == 0) && ($urandom % 2 == 0);
        end
      end
    join_none
    for (int e = 0; e < N2; e++) add_event(1 + $urandom % 8);
    wait (n_res == N1 + N2);
    checks++;
    if (stall_cycles == 0) begin failures++; $display("input never stalled"); end
    $display("results %0d, input stall cycles %0d", n_res, stall_cycles);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
