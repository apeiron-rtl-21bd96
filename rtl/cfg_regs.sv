// cfg_regs: configuration and status registers of the Routing IP ("Cfg/Mgm").
//
// A 32-bit register bus from the host interface (write strobe, word
// address, write data; read data is combinational on the address).
// Register map, all this design's choice:
//   0x00 RW  local node coordinate, 4 bits per dimension, dim 0 lowest
//   0x01 RW  last coordinate of each dimension (ring size - 1)
//   0x02 RW  bit 0: torus (wrap-around links in use)
//   0x03 RW  FPGA-RICH result destination {node, task_id, ch_id} (dest_t)
//   0x04 RO  checksum/channel errors seen by the dispatchers (sum of all)
//   0x10+p RO packets sent by egress port p
// Counters count pulses from the switch and wrap around; they are cleared
// by reset only. Configuration registers reset to node 0, a 16x16x16 mesh
// and torus off.
module cfg_regs
  import apeiron_pkg::*;
#(
  parameter int NP    = 10,
  parameter int N_ERR = 4
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              we,
  input  logic [7:0]        addr,
  input  logic [31:0]       wdata,
  output logic [31:0]       rdata,
  input  logic [NP-1:0]     pkt_sent,     // one pulse per packet per egress
  input  logic [N_ERR-1:0]  err_pulse,    // one pulse per error per source
  output node_t             local_node,
  output node_t             dim_max,
  output logic              torus,
  output dest_t             pid_dest
);
  logic [31:0] pkt_cnt [NP];
  logic [31:0] err_cnt;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      local_node <= '0;
      dim_max    <= '1;
      torus      <= 1'b0;
      pid_dest   <= '0;
      err_cnt    <= '0;
      for (int p = 0; p < NP; p++) pkt_cnt[p] <= '0;
    end else begin
      if (we) begin
        case (addr)
          8'h00: local_node <= wdata[$bits(node_t)-1:0];
          8'h01: dim_max    <= wdata[$bits(node_t)-1:0];
          8'h02: torus      <= wdata[0];
          8'h03: pid_dest   <= wdata[$bits(dest_t)-1:0];
          default: ;
        endcase
      end
      for (int p = 0; p < NP; p++)
        if (pkt_sent[p]) pkt_cnt[p] <= pkt_cnt[p] + 1;
      err_cnt <= err_cnt + 32'($countones(err_pulse));
    end
  end

  always_comb begin
    rdata = '0;
    case (addr)
      8'h00: rdata = 32'(local_node);
      8'h01: rdata = 32'(dim_max);
      8'h02: rdata = {31'b0, torus};
      8'h03: rdata = 32'(pid_dest);
      8'h04: rdata = err_cnt;
      default:
        if (addr >= 8'h10 && int'(addr) < 16 + NP) rdata = pkt_cnt[$clog2(NP)'(addr - 8'h10)];
    endcase
  end
endmodule
