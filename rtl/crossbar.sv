// crossbar: the switch matrix of the Routing IP.
//
// Every egress port has a registered multiplexer that, when sel_valid is
// high, forwards the flit of the input selected by sel (an input is one VC
// FIFO of one port) together with an egress VC number. Without a selection
// the egress is idle. The switch allocator guarantees that each input is
// selected by at most one egress. The paper names the crossbar; this simple
// one-cycle multiplexer form is this design's.
module crossbar
  import apeiron_pkg::*;
#(
  parameter int N_IN  = 20,
  parameter int N_OUT = 10
) (
  input  logic                               clk,
  input  logic                               rst_n,
  input  flit_t     [N_IN-1:0]               in_flit,
  input  logic      [N_OUT-1:0]              sel_valid,
  input  logic      [N_OUT-1:0][$clog2(N_IN)-1:0] sel,
  input  logic      [N_OUT-1:0]              sel_vc,
  output link_fwd_t [N_OUT-1:0]              out
);
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out <= '0;
    end else begin
      for (int o = 0; o < N_OUT; o++) begin
        out[o].valid <= sel_valid[o];
        out[o].vc    <= sel_vc[o];
        out[o].flit  <= in_flit[sel[o]];
      end
    end
  end
endmodule
