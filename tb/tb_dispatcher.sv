// tb_dispatcher: packets with random ch_id, length and last flag arrive on
// both VCs (credit-respecting sender); a reader picks random channels and
// checks each word and its last mark against a per-channel queue model.
// Some packets carry a wrong checksum: err_pulse must count exactly those.
// A burst to one channel with a slow reader fills its FIFO, so the
// dispatcher must stall (counted).
module tb_dispatcher;
  import apeiron_pkg::*;
  import apn_tb_pkg::*;
  localparam int N_CH = 128, MSG_DEPTH = 16, BUF_DEPTH = 32, NPKT = 400;
  logic clk = 0, rst_n = 0;
  link_fwd_t in;
  link_credit_t in_credit;
  logic [CH_W-1:0] rx_ch;
  logic rx_ready, rx_valid, rx_last, err_pulse;
  logic [DATA_W-1:0] rx_data;
  int checks = 0, failures = 0;
  int cred[2];
  logic [DATA_W:0] model[N_CH][$];
  int n_bad = 0, n_err = 0, n_stall = 0, n_words = 0, n_vc1 = 0;
  int sent_done = 0;

  dispatcher #(.N_CH(N_CH), .MSG_DEPTH(MSG_DEPTH), .BUF_DEPTH(BUF_DEPTH)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) if (rst_n) begin
    for (int v = 0; v < 2; v++) if (in_credit[v]) cred[v]++;
    if (err_pulse) n_err++;
    if (dut.state == dut.S_PAY && dut.head_valid[dut.cur] && dut.mf_full[dut.ch]) n_stall++;
  end

  // reader
  initial begin
    rx_ch = 0; rx_ready = 0;
    wait (rst_n);
    forever begin
      @(negedge clk);
      case ($urandom % 3)                 // the busy channels more often
        0: rx_ch = 7'd5;
        1: rx_ch = 7'($urandom % 4);
        default: rx_ch = 7'($urandom);
      endcase
      if (sent_done) begin                // drain: any channel still holding words
        for (int c = N_CH - 1; c >= 0; c--) if (model[c].size() > 0) rx_ch = 7'(c);
      end
      rx_ready = (sent_done == 0 && rx_ch == 5) ? ($urandom % 6 == 0) : 1'($urandom);
      #1;
      if (rx_valid) begin
        checks++;
        if (model[rx_ch].size() == 0) begin
          failures++; $display("data on empty channel %0d", rx_ch);
        end else if ({rx_last, rx_data} != model[rx_ch][0]) begin
          failures++; $display("channel %0d word mismatch", rx_ch);
        end
        if (rx_ready && model[rx_ch].size() > 0) begin void'(model[rx_ch].pop_front()); n_words++; end
      end
    end
  end

  task automatic send_flit(int vc, flit_t f);
    @(posedge clk);
    while (cred[vc] == 0 || $urandom % 6 == 0) begin in <= '0; @(posedge clk); end
    in <= '{valid: 1'b1, vc: 1'(vc), flit: f};
    cred[vc]--;
  endtask

  initial begin
    in = '0;
    repeat (3) @(posedge clk);
    cred[0] = BUF_DEPTH; cred[1] = BUF_DEPTH;
    rst_n = 1;
    for (int k = 0; k < NPKT; k++) begin
      dest_t d;
      int len, vc;
      bit last, bad;
      logic [DATA_W-1:0] pay[$];
      logic [DATA_W-1:0] ftr;
      d = '0;
      pay.delete();
      d.ch_id = (k < 60) ? 7'd5 : 7'($urandom);
      if (k >= 60 && $urandom % 2) d.ch_id = 7'($urandom % 4);
      len = 1 + $urandom % MAX_PAYLOAD;
      last = 1'($urandom);
      vc = d.ch_id % 2;   // order is only kept within a VC
      n_vc1 += vc;
      bad = ($urandom % 10 == 0);
      for (int w = 0; w < len; w++) begin
        pay.push_back(rand_word());
        model[d.ch_id].push_back({last && (w == len - 1), pay[w]});
      end
      ftr = make_footer(pay);
      if (bad) begin ftr[0] = !ftr[0]; n_bad++; end
      send_flit(vc, '{sop: 1'b1, eop: 1'b0, data: make_header(d, len, last, '0, 1, k)});
      foreach (pay[w]) send_flit(vc, '{sop: 1'b0, eop: 1'b0, data: pay[w]});
      send_flit(vc, '{sop: 1'b0, eop: 1'b1, data: ftr});
    end
    @(posedge clk) in <= '0;
    sent_done = 1;
    repeat (3000) @(posedge clk);
    for (int c = 0; c < N_CH; c++) begin
      checks++;
      if (model[c].size() != 0) begin failures++; $display("channel %0d: %0d words never read", c, model[c].size()); end
    end
    checks++;
    if (n_err != n_bad) begin failures++; $display("errors %0d, expected %0d", n_err, n_bad); end
    $display("words %0d, bad packets %0d, stall cycles %0d, VC1 packets %0d", n_words, n_bad, n_stall, n_vc1);
    if (n_stall == 0 || n_vc1 == 0) begin failures++; $display("a mechanism never happened"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
