// routing_ip: the packet switch of one APEIRON node.
//
// Ports 0..N_INTRA-1 connect to the tasks of this node (through the
// dispatcher/aggregator pairs); ports N_INTRA.. are the inter-node links,
// a plus and a minus link per dimension. Every port has a vc_input_buffer
// with one FIFO per virtual channel. The flit at the head of each VC FIFO,
// when it is a header, goes through a route_unit that gives its egress port
// and egress VC by dimension-order routing.
//
// Switching is virtual cut-through, as in the paper: a header may take an
// egress port as soon as its route is known and the downstream buffer of
// the chosen VC has credits for the whole packet (payload + 2 flits). Each
// egress port has a round-robin arbiter over all input VCs that request it.
// The winner owns the egress until its footer has passed; its flits are
// forwarded one per cycle as they arrive, through the registered crossbar.
// Credits: each egress keeps a counter per VC of free slots downstream,
// decremented per flit sent and incremented per credit pulse returned.
//
// Timing: a flit written into an input FIFO at edge k can be allocated at
// edge k+1 and appears at the egress after edge k+2, i.e. three cycles from
// input to output for the header; later flits follow one per cycle. An
// egress can be granted to the next packet in the cycle its footer leaves,
// so packets on one egress follow each other without an idle cycle.
// Interface: plain link structs per port, credits per VC back; local
// coordinate, ring sizes and torus bit from the configuration registers.
module routing_ip
  import apeiron_pkg::*;
#(
  parameter int N_INTRA   = 4,
  parameter int BUF_DEPTH = 32,            // own input FIFO depth per VC
  parameter int DN_DEPTH  = BUF_DEPTH,     // downstream buffer depth per VC
  parameter int NP        = N_INTRA + 2 * NDIM
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  node_t                    local_node,
  input  node_t                    dim_max,
  input  logic                     torus,
  input  link_fwd_t    [NP-1:0]    in,
  output link_credit_t [NP-1:0]    in_credit,
  output link_fwd_t    [NP-1:0]    out,
  input  link_credit_t [NP-1:0]    out_credit,
  output logic         [NP-1:0]    pkt_sent
);
  localparam int NI = NP * N_VC;            // switch inputs: one per (port, VC)
  localparam int IW = $clog2(NI);
  localparam int PW = $clog2(NP);
  localparam int CW = $clog2(DN_DEPTH + 1) + 1;

  // ---------------- input buffers ----------------
  flit_t [NI-1:0]  head;
  logic  [NI-1:0]  head_valid;
  logic  [NI-1:0]  pop;

  for (genvar p = 0; p < NP; p++) begin : g_in
    vc_input_buffer #(.DEPTH(BUF_DEPTH)) u_buf (
      .clk, .rst_n,
      .in        (in[p]),
      .credit_out(in_credit[p]),
      .pop       (pop[p*N_VC +: N_VC]),
      .head      (head[p*N_VC +: N_VC]),
      .head_valid(head_valid[p*N_VC +: N_VC])
    );
  end

  // ---------------- route computation ----------------
  logic [NI-1:0][PW-1:0] rt_port;
  logic [NI-1:0]         rt_vc;
  logic [NI-1:0][LEN_W:0] pkt_flits;

  for (genvar i = 0; i < NI; i++) begin : g_rt
    header_t hdr;
    assign hdr = header_t'(head[i].data);
    assign pkt_flits[i] = {1'b0, hdr.len} + (LEN_W+1)'(2);
    route_unit #(.N_INTRA(N_INTRA), .NP(NP)) u_rt (
      .dest      (hdr.dest),
      .local_node,
      .dim_max,
      .torus,
      .in_port   (PW'(i / N_VC)),
      .in_vc     (1'(i % N_VC)),
      .out_port  (rt_port[i]),
      .out_vc    (rt_vc[i])
    );
  end

  // ---------------- allocation state ----------------
  logic [NI-1:0]                 active;     // input VC holds an egress
  logic [NP-1:0]                 busy;
  logic [NP-1:0][IW-1:0]         owner;
  logic [NP-1:0]                 ovc;
  logic [NP-1:0][N_VC-1:0][CW-1:0] credits;

  logic [NP-1:0][NI-1:0]         req;
  logic [NP-1:0][NI-1:0]         gnt;
  logic [NP-1:0][IW-1:0]         gnt_idx;
  logic [NP-1:0]                 gnt_valid;

  // An egress is free when idle or when its packet's footer leaves this
  // cycle, so packets can follow each other without a gap. The flit leaving
  // now is already taken off the credits seen by the requests.
  logic [NP-1:0]                 fwd, fwd_eop;
  logic [NP-1:0][N_VC-1:0][CW-1:0] cr_avail;
  always_comb begin
    for (int o = 0; o < NP; o++)
      for (int v = 0; v < N_VC; v++)
        cr_avail[o][v] = credits[o][v] - ((fwd[o] && ovc[o] == 1'(v)) ? CW'(1) : CW'(0));
    for (int o = 0; o < NP; o++)
      for (int i = 0; i < NI; i++)
        req[o][i] = (!busy[o] || fwd_eop[o]) && head_valid[i] && head[i].sop && !active[i] &&
                    int'(rt_port[i]) == o &&
                    cr_avail[o][rt_vc[i]] >= CW'(pkt_flits[i]);
  end

  for (genvar o = 0; o < NP; o++) begin : g_arb
    rr_arbiter #(.N(NI)) u_arb (
      .clk, .rst_n,
      .req        (req[o]),
      .advance    (1'b1),
      .grant      (gnt[o]),
      .grant_idx  (gnt_idx[o]),
      .grant_valid(gnt_valid[o])
    );
  end

  // ---------------- forwarding ----------------
  // fwd[o]: egress o sends a flit this cycle; fwd_eop[o]: it is a footer

  always_comb begin
    pop     = '0;
    fwd     = '0;
    fwd_eop = '0;
    for (int o = 0; o < NP; o++) begin
      if (busy[o] && head_valid[owner[o]]) begin
        fwd[o]        = 1'b1;
        fwd_eop[o]    = head[owner[o]].eop;
        pop[owner[o]] = 1'b1;
      end
    end
  end

  crossbar #(.N_IN(NI), .N_OUT(NP)) u_xbar (
    .clk, .rst_n,
    .in_flit  (head),
    .sel_valid(fwd),
    .sel      (owner),
    .sel_vc   (ovc),
    .out      (out)
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      active   <= '0;
      busy     <= '0;
      owner    <= '0;
      ovc      <= '0;
      pkt_sent <= '0;
      for (int o = 0; o < NP; o++)
        for (int v = 0; v < N_VC; v++) credits[o][v] <= CW'(DN_DEPTH);
    end else begin
      pkt_sent <= fwd_eop;
      for (int o = 0; o < NP; o++) begin
        for (int v = 0; v < N_VC; v++)
          credits[o][v] <= credits[o][v]
                           + (out_credit[o][v] ? CW'(1) : CW'(0))
                           - ((fwd[o] && ovc[o] == 1'(v)) ? CW'(1) : CW'(0));
        if (fwd_eop[o]) begin
          busy[o]          <= 1'b0;
          active[owner[o]] <= 1'b0;
        end
        if (gnt_valid[o]) begin
          busy[o]              <= 1'b1;
          owner[o]             <= gnt_idx[o];
          ovc[o]               <= rt_vc[gnt_idx[o]];
          active[gnt_idx[o]]   <= 1'b1;
        end
      end
    end
  end

  // A FIFO head that is not owned by an egress must be a header.
  for (genvar i = 0; i < NI; i++) begin : g_chk
    a_framing: assert property (@(posedge clk) disable iff (!rst_n)
                                (head_valid[i] && !active[i]) |-> head[i].sop);
  end
  initial assert (BUF_DEPTH >= MAX_PKT && DN_DEPTH >= MAX_PKT);
endmodule
