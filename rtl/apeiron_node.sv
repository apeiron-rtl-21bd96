// apeiron_node: one FPGA node of an APEIRON network, with the FPGA-RICH
// particle-identification task on intra-node port 0.
//
// The Communication IP of the node is the Routing IP (switch, route units,
// configuration/status registers) plus a dispatcher and an aggregator on
// each of the four intra-node ports. Port 0 carries the rich_pid_kernel
// (one input and one output channel); ports 1..3 are brought out to the
// node's ports so that other tasks can be attached (their receive side as a
// channel-select stream, their send side as N_OUT_CH streams with a
// destination sideband). The 2*NDIM inter-node links, which on the FPGA go
// to the serial transceivers, are brought out as link structs with credits.
// The host bus is brought out as a simple register port: cfg_addr[15] = 0
// selects the configuration registers (cfg_addr[7:0]), cfg_addr[15] = 1
// writes byte cfg_wdata[7:0] into network weight cfg_addr[12:0].
//
// Timing: a header crosses the switch in 3 cycles, then one flit per cycle
// follows; the network core takes an event every 8 cycles and answers 22
// cycles after accepting it. Reset is asynchronous, active low.
//
// Set local coordinate (reg 0x00), ring sizes (0x01), torus bit (0x02) and
// the FPGA-RICH result destination (0x03) before sending traffic. The block
// structure follows the paper's figures of the node; the port-level
// conventions are this design's.
module apeiron_node
  import apeiron_pkg::*;
#(
  parameter int N_INTRA       = 4,
  parameter int BUF_DEPTH     = 32,
  parameter int N_IN_CH       = 128,
  parameter int MSG_IN_DEPTH  = 16,
  parameter int N_OUT_CH      = 4,
  parameter int MSG_OUT_DEPTH = 32,
  parameter int NL            = 2 * NDIM,       // inter-node links
  parameter int NX            = N_INTRA - 1     // intra-node ports brought out
) (
  input  logic                                     clk,
  input  logic                                     rst_n,
  // host register port
  input  logic                                     cfg_we,
  input  logic [15:0]                              cfg_addr,
  input  logic [31:0]                              cfg_wdata,
  output logic [31:0]                              cfg_rdata,
  // inter-node links (towards the network transceivers)
  input  link_fwd_t    [NL-1:0]                    net_in,
  output link_credit_t [NL-1:0]                    net_in_credit,
  output link_fwd_t    [NL-1:0]                    net_out,
  input  link_credit_t [NL-1:0]                    net_out_credit,
  // intra-node ports 1..NX: receive side
  input  logic  [NX-1:0][CH_W-1:0]                 rx_ch,
  input  logic  [NX-1:0]                           rx_ready,
  output logic  [NX-1:0]                           rx_valid,
  output logic  [NX-1:0][DATA_W-1:0]               rx_data,
  output logic  [NX-1:0]                           rx_last,
  // intra-node ports 1..NX: send side
  input  logic  [NX-1:0][N_OUT_CH-1:0]             tx_valid,
  output logic  [NX-1:0][N_OUT_CH-1:0]             tx_ready,
  input  logic  [NX-1:0][N_OUT_CH-1:0][DATA_W-1:0] tx_data,
  input  logic  [NX-1:0][N_OUT_CH-1:0]             tx_last,
  input  dest_t [NX-1:0][N_OUT_CH-1:0]             tx_dest
);
  localparam int NP = N_INTRA + NL;

  node_t local_node, dim_max;
  logic  torus;
  dest_t pid_dest;

  link_fwd_t    [NP-1:0] sw_in, sw_out;
  link_credit_t [NP-1:0] sw_in_credit, sw_out_credit;
  logic         [NP-1:0] pkt_sent;
  logic  [N_INTRA-1:0]   err;

  // ---------------- configuration / status registers ----------------
  logic        reg_we;
  logic [31:0] reg_rdata;
  assign reg_we    = cfg_we && !cfg_addr[15];
  assign cfg_rdata = cfg_addr[15] ? '0 : reg_rdata;

  cfg_regs #(.NP(NP), .N_ERR(N_INTRA)) u_cfg (
    .clk, .rst_n,
    .we(reg_we), .addr(cfg_addr[7:0]), .wdata(cfg_wdata), .rdata(reg_rdata),
    .pkt_sent, .err_pulse(err),
    .local_node, .dim_max, .torus, .pid_dest
  );

  // ---------------- switch ----------------
  routing_ip #(.N_INTRA(N_INTRA), .BUF_DEPTH(BUF_DEPTH)) u_sw (
    .clk, .rst_n, .local_node, .dim_max, .torus,
    .in(sw_in), .in_credit(sw_in_credit),
    .out(sw_out), .out_credit(sw_out_credit),
    .pkt_sent
  );

  assign sw_in[NP-1:N_INTRA]         = net_in;
  assign net_in_credit               = sw_in_credit[NP-1:N_INTRA];
  assign net_out                     = sw_out[NP-1:N_INTRA];
  assign sw_out_credit[NP-1:N_INTRA] = net_out_credit;

  // ---------------- port 0: FPGA-RICH task ----------------
  logic [CH_W-1:0]   k_rx_ch;
  logic              k_rx_ready, k_rx_valid, k_rx_last;
  logic [DATA_W-1:0] k_rx_data;
  logic              k_tx_valid, k_tx_ready, k_tx_last;
  logic [DATA_W-1:0] k_tx_data;
  dest_t             k_tx_dest;

  dispatcher #(.N_CH(1), .MSG_DEPTH(MSG_IN_DEPTH), .BUF_DEPTH(BUF_DEPTH)) u_disp0 (
    .clk, .rst_n,
    .in(sw_out[0]), .in_credit(sw_out_credit[0]),
    .rx_ch(k_rx_ch), .rx_ready(k_rx_ready), .rx_valid(k_rx_valid),
    .rx_data(k_rx_data), .rx_last(k_rx_last), .err_pulse(err[0])
  );

  aggregator #(.N_CH(1), .MSG_DEPTH(MSG_OUT_DEPTH), .DN_DEPTH(BUF_DEPTH)) u_aggr0 (
    .clk, .rst_n, .local_node, .src_task(TASK_W'(0)),
    .tx_valid(k_tx_valid), .tx_ready(k_tx_ready), .tx_data(k_tx_data),
    .tx_last(k_tx_last), .tx_dest(k_tx_dest),
    .out(sw_in[0]), .out_credit(sw_in_credit[0])
  );

  rich_pid_kernel u_pid (
    .clk, .rst_n,
    .wt_we  (cfg_we && cfg_addr[15]),
    .wt_addr(cfg_addr[12:0]),
    .wt_data(cfg_wdata[7:0]),
    .rx_ch(k_rx_ch), .rx_ready(k_rx_ready), .rx_valid(k_rx_valid),
    .rx_data(k_rx_data), .rx_last(k_rx_last),
    .pid_dest,
    .tx_valid(k_tx_valid), .tx_ready(k_tx_ready), .tx_data(k_tx_data),
    .tx_last(k_tx_last), .tx_dest(k_tx_dest)
  );

  // ---------------- ports 1..NX: external tasks ----------------
  for (genvar t = 1; t < N_INTRA; t++) begin : g_port
    dispatcher #(.N_CH(N_IN_CH), .MSG_DEPTH(MSG_IN_DEPTH), .BUF_DEPTH(BUF_DEPTH)) u_disp (
      .clk, .rst_n,
      .in(sw_out[t]), .in_credit(sw_out_credit[t]),
      .rx_ch(rx_ch[t-1]), .rx_ready(rx_ready[t-1]), .rx_valid(rx_valid[t-1]),
      .rx_data(rx_data[t-1]), .rx_last(rx_last[t-1]), .err_pulse(err[t])
    );
    aggregator #(.N_CH(N_OUT_CH), .MSG_DEPTH(MSG_OUT_DEPTH), .DN_DEPTH(BUF_DEPTH)) u_aggr (
      .clk, .rst_n, .local_node, .src_task(TASK_W'(t)),
      .tx_valid(tx_valid[t-1]), .tx_ready(tx_ready[t-1]), .tx_data(tx_data[t-1]),
      .tx_last(tx_last[t-1]), .tx_dest(tx_dest[t-1]),
      .out(sw_in[t]), .out_credit(sw_in_credit[t])
    );
  end

  initial assert (N_INTRA == 4);   // task_id is 2 bits: four tasks per node
endmodule
