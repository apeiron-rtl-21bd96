// aggregator: send side of an intra-node port, between one task and the
// Routing IP.
//
// The task writes messages into N_CH output streams (valid/ready, last on
// the final word), each with its destination {node, task_id, ch_id} on a
// sideband, as the send() call gives it. Every stream has its own message
// FIFO. While a message is written, its words are counted: when the message
// ends, or MAX_PAYLOAD words have been written, a packet descriptor
// (destination, length, last flag) is queued for that stream. The
// destination is taken from the sideband of the first word of a message
// and reused for all its packets. So a long message becomes several
// packets and only the final one has the last flag.
//
// On the switch side, streams with a queued packet are served in round-robin
// order. Stream c injects on virtual channel c mod 2, so both input FIFOs of
// the switch port are fed while the packets of one stream stay in order. A
// packet starts only when its VC's input buffer has credits for all of it
// (virtual cut-through at the source); then header, payload and footer (word
// count and XOR checksum) leave one flit per cycle through a registered
// output. Building the header from sideband data and feeding the port's two
// FIFOs are the paper's; packet splitting, round-robin and the stream-to-VC
// mapping are this design's.
module aggregator
  import apeiron_pkg::*;
#(
  parameter int N_CH      = 4,
  parameter int MSG_DEPTH = 32,
  parameter int DN_DEPTH  = 32      // depth of the switch input buffer per VC
) (
  input  logic                          clk,
  input  logic                          rst_n,
  input  node_t                         local_node,
  input  logic [TASK_W-1:0]             src_task,
  input  logic  [N_CH-1:0]              tx_valid,
  output logic  [N_CH-1:0]              tx_ready,
  input  logic  [N_CH-1:0][DATA_W-1:0]  tx_data,
  input  logic  [N_CH-1:0]              tx_last,
  input  dest_t [N_CH-1:0]              tx_dest,
  output link_fwd_t                     out,
  input  link_credit_t                  out_credit
);
  localparam int CW = $clog2(DN_DEPTH + 1) + 1;
  localparam int IW = (N_CH > 1) ? $clog2(N_CH) : 1;

  typedef struct packed {
    dest_t            dest;
    logic [LEN_W-1:0] len;
    logic             last;
  } desc_t;

  typedef enum logic [1:0] {S_IDLE, S_PAY, S_FTR} state_t;

  // ---------------- write side, per stream ----------------
  logic  [N_CH-1:0]             d_rd, d_empty, d_full;
  logic  [N_CH-1:0][DATA_W-1:0] d_q;
  logic  [N_CH-1:0]             q_rd, q_empty, q_full;
  desc_t [N_CH-1:0]             q_q;

  for (genvar c = 0; c < N_CH; c++) begin : g_ch
    logic [LEN_W-1:0] wcnt;
    logic             wfirst;     // next word starts a message
    dest_t            wdest;
    logic             wr, push;
    desc_t            desc;
    logic [$clog2(MSG_DEPTH+1)-1:0] dcount, qcount;

    assign tx_ready[c] = !d_full[c] && !q_full[c];
    assign wr          = tx_valid[c] && tx_ready[c];
    assign push        = wr && (tx_last[c] || int'(wcnt) == MAX_PAYLOAD - 1);
    assign desc.dest   = wfirst ? tx_dest[c] : wdest;
    assign desc.len    = wcnt + 1'b1;
    assign desc.last   = tx_last[c];

    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) begin
        wcnt   <= '0;
        wfirst <= 1'b1;
        wdest  <= '0;
      end else if (wr) begin
        if (wfirst) wdest <= tx_dest[c];
        wfirst <= tx_last[c];
        wcnt   <= push ? '0 : wcnt + 1'b1;
      end
    end

    sync_fifo #(.WIDTH(DATA_W), .DEPTH(MSG_DEPTH)) u_data (
      .clk, .rst_n, .wr_en(wr), .wr_data(tx_data[c]), .rd_en(d_rd[c]),
      .rd_data(d_q[c]), .empty(d_empty[c]), .full(d_full[c]), .count(dcount)
    );
    sync_fifo #(.WIDTH($bits(desc_t)), .DEPTH(MSG_DEPTH)) u_desc (
      .clk, .rst_n, .wr_en(push), .wr_data(desc), .rd_en(q_rd[c]),
      .rd_data(q_q[c]), .empty(q_empty[c]), .full(q_full[c]), .count(qcount)
    );
  end

  // ---------------- switch side ----------------
  state_t           state;
  logic [IW-1:0]    cur;
  logic [LEN_W-1:0] left;
  logic [LEN_W-1:0] len;
  logic [31:0]      csum;
  logic [N_VC-1:0][CW-1:0] credits;   // free slots in the switch VC buffers
  logic             cvc;          // VC of the packet being sent

  logic [N_CH-1:0] req;
  logic [IW-1:0]   gidx;
  logic            gvalid;
  logic [N_CH-1:0] gnt;

  always_comb
    for (int c = 0; c < N_CH; c++)
      req[c] = (state == S_IDLE) && !q_empty[c] &&
               credits[c % N_VC] >= CW'({1'b0, q_q[c].len} + (LEN_W+1)'(2));

  rr_arbiter #(.N(N_CH), .IW(IW)) u_arb (
    .clk, .rst_n, .req, .advance(1'b1), .grant(gnt), .grant_idx(gidx), .grant_valid(gvalid)
  );

  logic send, svc;
  assign svc = (state == S_IDLE) ? gidx[0] : cvc;
  always_comb begin
    d_rd = '0;
    q_rd = '0;
    send = 1'b0;
    case (state)
      S_IDLE: if (gvalid) begin q_rd[gidx] = 1'b1; send = 1'b1; end
      S_PAY:  begin d_rd[cur] = 1'b1; send = 1'b1; end
      S_FTR:  send = 1'b1;
      default: ;
    endcase
  end

  header_t hdr;
  footer_t ftr;
  always_comb begin
    hdr          = '0;
    hdr.magic    = HDR_MAGIC;
    hdr.src_node = local_node;
    hdr.src_task = src_task;
    hdr.last     = q_q[gidx].last;
    hdr.len      = q_q[gidx].len;
    hdr.dest     = q_q[gidx].dest;
    ftr          = '0;
    ftr.magic    = FTR_MAGIC;
    ftr.len      = len;
    ftr.csum     = csum;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state   <= S_IDLE;
      cur     <= '0;
      left    <= '0;
      len     <= '0;
      csum    <= '0;
      credits <= {N_VC{CW'(DN_DEPTH)}};
      cvc     <= 1'b0;
      out     <= '0;
    end else begin
      for (int v = 0; v < N_VC; v++)
        credits[v] <= credits[v] + CW'(out_credit[v]) - CW'(send && svc == 1'(v));
      out       <= '0;
      out.valid <= send;
      out.vc    <= svc;
      case (state)
        S_IDLE: if (gvalid) begin
          cur      <= gidx;
          cvc      <= gidx[0];
          len      <= q_q[gidx].len;
          left     <= q_q[gidx].len;
          csum     <= '0;
          out.flit <= '{sop: 1'b1, eop: 1'b0, data: hdr};
          state    <= S_PAY;
        end
        S_PAY: begin
          out.flit <= '{sop: 1'b0, eop: 1'b0, data: d_q[cur]};
          csum     <= csum ^ fold32(d_q[cur]);
          left     <= left - 1'b1;
          if (left == 1) state <= S_FTR;
        end
        S_FTR: begin
          out.flit <= '{sop: 1'b0, eop: 1'b1, data: ftr};
          state    <= S_IDLE;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  a_pay_data: assert property (@(posedge clk) disable iff (!rst_n)
                               state == S_PAY |-> !d_empty[cur]);
  a_credit:   assert property (@(posedge clk) disable iff (!rst_n)
                               send |-> credits[svc] != '0);
  initial assert (MSG_DEPTH >= MAX_PAYLOAD);
endmodule
