// dispatcher: receive side of an intra-node port, between the Routing IP
// and one task.
//
// Packets arrive from the switch on two virtual channels and wait in a
// vc_input_buffer (the two FIFO columns of the intra-node port); credits go
// back to the switch as flits leave it. The dispatcher takes one packet at a
// time, VCs served in turn. It reads the header, then copies the payload
// words into the message-input FIFO chosen by the header's ch_id, marking
// the final word of a message (last payload word of a packet whose header
// has the last flag) with rx_last. If that FIFO is full the copy waits. The
// footer is checked (magic, word count, XOR checksum); a mismatch, or a
// ch_id beyond N_CH (whose payload is then dropped), gives one err_pulse.
// Steering by ch_id into per-channel FIFOs is the paper's; the framing,
// checks and stall behaviour are this design's.
//
// Task side: the task names a channel on rx_ch (the receive(ch_id) call)
// and reads that channel's FIFO with a valid/ready handshake; rx_valid,
// rx_data and rx_last are combinational on rx_ch. A payload word moves from
// the input buffer to a message FIFO in one cycle and can be read the
// cycle after.
module dispatcher
  import apeiron_pkg::*;
#(
  parameter int N_CH      = 128,
  parameter int MSG_DEPTH = 16,
  parameter int BUF_DEPTH = 32
) (
  input  logic              clk,
  input  logic              rst_n,
  input  link_fwd_t         in,
  output link_credit_t      in_credit,
  input  logic [CH_W-1:0]   rx_ch,
  input  logic              rx_ready,
  output logic              rx_valid,
  output logic [DATA_W-1:0] rx_data,
  output logic              rx_last,
  output logic              err_pulse
);
  typedef enum logic [1:0] {S_IDLE, S_PAY, S_FTR} state_t;

  flit_t [N_VC-1:0] head;
  logic  [N_VC-1:0] head_valid;
  logic  [N_VC-1:0] pop;

  vc_input_buffer #(.DEPTH(BUF_DEPTH)) u_buf (
    .clk, .rst_n, .in, .credit_out(in_credit), .pop, .head, .head_valid
  );

  state_t           state;
  logic             cur;          // VC being served
  logic             rr;           // VC to try first
  logic [CH_W-1:0]  ch;
  logic             ch_ok;
  logic             pkt_last;
  logic [LEN_W-1:0] len, cnt;
  logic [31:0]      csum;

  // message FIFOs
  logic [N_CH-1:0]              mf_wr, mf_rd, mf_empty, mf_full;
  logic [N_CH-1:0][DATA_W:0]    mf_q;

  for (genvar c = 0; c < N_CH; c++) begin : g_ch
    logic [$clog2(MSG_DEPTH+1)-1:0] count;
    sync_fifo #(.WIDTH(DATA_W + 1), .DEPTH(MSG_DEPTH)) u_msg (
      .clk, .rst_n,
      .wr_en  (mf_wr[c]),
      .wr_data({pkt_last && (cnt == len - 1'b1), head[cur].data}),
      .rd_en  (mf_rd[c]),
      .rd_data(mf_q[c]),
      .empty  (mf_empty[c]),
      .full   (mf_full[c]),
      .count
    );
    assign mf_rd[c] = rx_ready && rx_valid && rx_ch == CH_W'(c);
  end

  // channel numbers cut to the width that indexes the N_CH FIFOs
  localparam int IW = (N_CH > 1) ? $clog2(N_CH) : 1;
  logic          sel_ok;
  logic [IW-1:0] rxi, chi;
  assign sel_ok   = int'(rx_ch) < N_CH;
  assign rxi      = sel_ok ? IW'(rx_ch) : '0;
  assign chi      = ch_ok ? IW'(ch) : '0;
  assign rx_valid = sel_ok && !mf_empty[rxi];
  assign rx_data  = mf_q[rxi][DATA_W-1:0];
  assign rx_last  = mf_q[rxi][DATA_W];

  header_t hdr;
  footer_t ftr;
  logic    nxt;             // VC picked in S_IDLE
  logic    pay_move;
  assign hdr = header_t'(head[nxt].data);
  assign ftr = footer_t'(head[cur].data);
  assign nxt = head_valid[rr] ? rr : !rr;

  always_comb begin
    pop      = '0;
    mf_wr    = '0;
    pay_move = 1'b0;
    case (state)
      S_IDLE: if (head_valid[nxt]) pop[nxt] = 1'b1;
      S_PAY:  if (head_valid[cur] && (!ch_ok || !mf_full[chi])) begin
                pay_move = 1'b1;
                pop[cur] = 1'b1;
                if (ch_ok) mf_wr[chi] = 1'b1;
              end
      S_FTR:  if (head_valid[cur]) pop[cur] = 1'b1;
      default: ;
    endcase
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state     <= S_IDLE;
      cur       <= 1'b0;
      rr        <= 1'b0;
      ch        <= '0;
      ch_ok     <= 1'b0;
      pkt_last  <= 1'b0;
      len       <= '0;
      cnt       <= '0;
      csum      <= '0;
      err_pulse <= 1'b0;
    end else begin
      err_pulse <= 1'b0;
      case (state)
        S_IDLE: if (head_valid[nxt]) begin
          cur      <= nxt;
          rr       <= !nxt;
          ch       <= hdr.dest.ch_id;
          ch_ok    <= int'(hdr.dest.ch_id) < N_CH;
          pkt_last <= hdr.last;
          len      <= hdr.len;
          cnt      <= '0;
          csum     <= '0;
          state    <= (hdr.len == '0) ? S_FTR : S_PAY;
        end
        S_PAY: if (pay_move) begin
          csum <= csum ^ fold32(head[cur].data);
          cnt  <= cnt + 1'b1;
          if (cnt == len - 1'b1) state <= S_FTR;
        end
        S_FTR: if (head_valid[cur]) begin
          err_pulse <= !ch_ok || ftr.magic != FTR_MAGIC || ftr.len != len || ftr.csum != csum;
          state     <= S_IDLE;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  a_hdr_sop: assert property (@(posedge clk) disable iff (!rst_n)
                              (state == S_IDLE && head_valid[nxt]) |-> head[nxt].sop);
  a_ftr_eop: assert property (@(posedge clk) disable iff (!rst_n)
                              (state == S_FTR && head_valid[cur]) |-> head[cur].eop);
endmodule
