// apeiron_pkg: types and constants shared by the APEIRON communication blocks.
//
// A packet is a sequence of 128-bit flits: one header flit, 0..MAX_PAYLOAD
// payload flits and one footer flit. Every flit travels with sop/eop marks
// (start and end of packet) and, on a link, the number of the virtual
// channel it belongs to. The header carries the routing and addressing
// fields of the send() call (destination node coordinate, task_id, ch_id)
// plus the payload length. The 2-bit task_id (four tasks per node) and
// 7-bit ch_id (128 channels) follow the paper; the 128-bit flit, the
// 3-dimensional 4-bit coordinate, the 16-word maximum payload and the
// footer contents (word count and XOR checksum) are this design's choices.
package apeiron_pkg;

  localparam int DATA_W      = 128;
  localparam int NDIM        = 3;
  localparam int COORD_W     = 4;
  localparam int TASK_W      = 2;    // up to four tasks per node
  localparam int CH_W        = 7;    // up to 128 logical channels
  localparam int MAX_PAYLOAD = 16;   // payload words per packet
  localparam int LEN_W       = $clog2(MAX_PAYLOAD + 1);
  localparam int N_VC        = 2;    // virtual channels per physical link
  localparam int MAX_PKT     = MAX_PAYLOAD + 2;

  typedef logic [COORD_W-1:0]           coord_t;
  typedef logic [NDIM-1:0][COORD_W-1:0] node_t;   // [d] = coordinate in dimension d

  // Where a message goes: the dest_node, task_id, ch_id arguments of send().
  typedef struct packed {
    node_t             node;
    logic [TASK_W-1:0] task_id;
    logic [CH_W-1:0]   ch_id;
  } dest_t;

  localparam int HDR_USED = 2 * ($bits(node_t) + TASK_W) + CH_W + LEN_W + 1 + 16;

  typedef struct packed {
    logic [DATA_W-HDR_USED-1:0] rsvd;
    logic [15:0]       magic;      // HDR_MAGIC
    node_t             src_node;
    logic [TASK_W-1:0] src_task;
    logic              last;       // last packet of a message
    logic [LEN_W-1:0]  len;        // payload words
    dest_t             dest;
  } header_t;

  typedef struct packed {
    logic [DATA_W-16-LEN_W-32-1:0] rsvd;
    logic [15:0]      magic;       // FTR_MAGIC
    logic [LEN_W-1:0] len;         // payload words actually sent
    logic [31:0]      csum;        // XOR of all 32-bit lanes of the payload
  } footer_t;

  localparam logic [15:0] HDR_MAGIC = 16'hA9E1;
  localparam logic [15:0] FTR_MAGIC = 16'hF007;

  typedef struct packed {
    logic              sop;
    logic              eop;
    logic [DATA_W-1:0] data;
  } flit_t;

  // One direction of a link between two switch ports: a flit with its VC,
  // and credits going back, one pulse per freed buffer slot per VC.
  typedef struct packed {
    logic  valid;
    logic  vc;
    flit_t flit;
  } link_fwd_t;

  typedef logic [N_VC-1:0] link_credit_t;

  function automatic logic [31:0] fold32(input logic [DATA_W-1:0] w);
    logic [31:0] r;
    r = '0;
    for (int i = 0; i < DATA_W / 32; i++) r ^= w[32*i +: 32];
    return r;
  endfunction

endpackage
