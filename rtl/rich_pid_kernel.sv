// rich_pid_kernel: the FPGA-RICH task, attached to one intra-node port.
//
// It receives RICH events as messages on its input channel 0: each message
// is up to 8 words of 128 bits, each word holding 8 features of 16 bits
// (<16,6>, feature 8w+k in bits [16k+15:16k] of word w), so up to 64
// normalised photomultiplier identifiers. A message shorter than 8 words is
// padded with zero features. When an event is complete it is handed to
// nn_dense_core; the result is sent as a one-word message on output channel
// 0 to the destination set by the host (the task's parameter pid_dest).
// Result word: bits [1:0] class (0, 1, 2, 3+ charged particles), bits
// [79:16] the four scores (<16,6>, class c at [16c+31:16c+16]), bits
// [127:96] an event sequence number. The network is the paper's; the
// message layouts are this design's.
//
// Flow control: the receive side stalls while a complete event waits for
// the core; the core is only started when the result FIFO (RES_DEPTH words)
// has room for every event in flight, so results are never lost. With words
// arriving every cycle an event is taken every 8 cycles, the core's rate.
//
// Several outputs are constant by design: rx_ch is always channel 0,
// tx_last is always 1 (every result is a one-word message), tx_dest
// follows pid_dest, and the unused bits of the result word are zero.
module rich_pid_kernel
  import apeiron_pkg::*;
#(
  parameter int RES_DEPTH = 4
) (
  input  logic              clk,
  input  logic              rst_n,
  // weight load port of the network
  input  logic              wt_we,
  input  logic [12:0]       wt_addr,
  input  logic signed [7:0] wt_data,
  // receive(ch_id) side, from the dispatcher
  output logic [CH_W-1:0]   rx_ch,
  output logic              rx_ready,
  input  logic              rx_valid,
  input  logic [DATA_W-1:0] rx_data,
  input  logic              rx_last,
  // send() side, to the aggregator
  input  dest_t             pid_dest,
  output logic              tx_valid,
  input  logic              tx_ready,
  output logic [DATA_W-1:0] tx_data,
  output logic              tx_last,
  output dest_t             tx_dest
);
  localparam int WORDS = 8;                 // 64 features / 8 per word

  logic signed [63:0][15:0] feat;
  logic [2:0]  wc;
  logic        ev_pending;
  logic        fire, in_ready;
  logic        rx_take;
  logic [2:0]  inflight;

  logic        res_valid;
  logic [1:0]  res_class;
  logic signed [3:0][15:0] res_score;
  logic [31:0] seq;

  logic        rf_empty, rf_full;
  logic [$clog2(RES_DEPTH+1)-1:0] rf_count;

  assign rx_ch    = '0;
  assign fire     = ev_pending && in_ready &&
                    (int'(inflight) + int'(rf_count) < RES_DEPTH);
  assign rx_ready = !ev_pending || fire;
  assign rx_take  = rx_valid && rx_ready;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wc         <= '0;
      ev_pending <= 1'b0;
      inflight   <= '0;
      seq        <= '0;
      feat       <= '0;
    end else begin
      if (fire) ev_pending <= 1'b0;
      if (rx_take) begin
        if (wc == '0) feat <= '0;          // zero padding of a short event
        feat[int'(wc) * 8 +: 8] <= rx_data;
        if (rx_last || int'(wc) == WORDS - 1) begin
          ev_pending <= 1'b1;
          wc         <= '0;
        end else wc <= wc + 1'b1;
      end
      inflight <= inflight + 3'(fire) - 3'(res_valid);
      if (res_valid) seq <= seq + 1;
    end
  end

  nn_dense_core u_nn (
    .clk, .rst_n,
    .wt_we, .wt_addr, .wt_data,
    .in_valid (fire),
    .in_ready,
    .in_x     (feat),
    .out_valid(res_valid),
    .out_class(res_class),
    .out_score(res_score)
  );

  logic [DATA_W-1:0] res_word;
  assign res_word = {seq, 16'b0, res_score, 14'b0, res_class};

  sync_fifo #(.WIDTH(DATA_W), .DEPTH(RES_DEPTH)) u_res (
    .clk, .rst_n,
    .wr_en  (res_valid),
    .wr_data(res_word),
    .rd_en  (tx_valid && tx_ready),
    .rd_data(tx_data),
    .empty  (rf_empty),
    .full   (rf_full),
    .count  (rf_count)
  );

  assign tx_valid = !rf_empty;
  assign tx_last  = 1'b1;
  assign tx_dest  = pid_dest;

  a_no_event_lost: assert property (@(posedge clk) disable iff (!rst_n) res_valid |-> !rf_full);
endmodule
