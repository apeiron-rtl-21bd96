// vc_input_buffer: input buffering of one switch port, one FIFO per virtual
// channel.
//
// An arriving flit is written into the FIFO of the VC it carries. Each FIFO
// is read independently (pop[v]); every pop returns one credit to the
// upstream sender on credit_out[v] in the same cycle, so the sender always
// knows how many slots are free. The sender must not send without a credit;
// an assertion checks this. Two VCs per link follow the paper; the depth and
// the credit scheme are this design's.
module vc_input_buffer
  import apeiron_pkg::*;
#(
  parameter int DEPTH = 32
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  link_fwd_t              in,
  output link_credit_t           credit_out,
  input  logic [N_VC-1:0]        pop,
  output flit_t [N_VC-1:0]       head,
  output logic  [N_VC-1:0]       head_valid
);
  for (genvar v = 0; v < N_VC; v++) begin : g_vc
    logic empty, full;
    logic [$clog2(DEPTH+1)-1:0] count;
    sync_fifo #(.WIDTH($bits(flit_t)), .DEPTH(DEPTH)) u_fifo (
      .clk, .rst_n,
      .wr_en  (in.valid && in.vc == v),
      .wr_data(in.flit),
      .rd_en  (pop[v]),
      .rd_data(head[v]),
      .empty, .full, .count
    );
    assign head_valid[v] = !empty;
    assign credit_out[v] = pop[v];
    a_credit: assert property (@(posedge clk) disable iff (!rst_n)
                              (in.valid && in.vc == v) |-> !full);
  end
endmodule
