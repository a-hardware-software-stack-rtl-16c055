// hm_pkg - types and constants shared by the cloud-side acceleration fabric.
//
// The fabric moves two kinds of traffic: RPCs between edge devices / cloud
// servers and host threads (NIC region), and one-line remote-memory
// operations between serverless functions on different servers (remote
// memory region). Both carry a 64-byte payload, the size of one host cache
// line and the RPC size the fabric is tuned for. Everything here that is not
// that 64-byte line (field widths, header layout, protocol numbers, opcodes,
// register map) is this design's own choice.
//
// Wire frame: a 192-bit header (three 64-bit words) followed by the 512-bit
// payload, sent most-significant word first as eleven 64-bit Avalon-ST beats.
//   word0 = {proto[7:0], conn[7:0], csum[15:0], dst_ip[31:0]}
//   word1 = {src_ip[31:0], dst_port[15:0], src_port[15:0]}
//   word2 = application word (RPC descriptor or RDMA operation)
package hm_pkg;

  localparam int unsigned LINE_W   = 512;  // one 64 B cache line / one RPC
  localparam int unsigned AVST_W   = 64;   // Avalon-ST beat toward the PHY
  localparam int unsigned CONN_W   = 7;    // connection id width (128 connections)
  localparam int unsigned FLOW_W   = 4;    // flow (host RPC thread) id width
  localparam int unsigned OBJ_W    = 8;    // remote-memory object id width
  localparam int unsigned ADDR_W   = 32;   // host line address width
  localparam int unsigned HDR_W    = 192;
  localparam int unsigned FRAME_W  = HDR_W + LINE_W;        // 704
  localparam int unsigned BEATS    = FRAME_W / AVST_W;      // 11

  localparam logic [7:0] PROTO_RPC  = 8'd17;   // UDP
  localparam logic [7:0] PROTO_RDMA = 8'd254;

  typedef logic [LINE_W-1:0] line_t;

  typedef enum logic [1:0] {
    RPC_REQ  = 2'd0,
    RPC_RESP = 2'd1
  } rpc_kind_e;

  // RPC descriptor carried next to its 64 B payload.
  typedef struct packed {
    rpc_kind_e          kind;
    logic [CONN_W-1:0]  conn;
    logic [FLOW_W-1:0]  flow;    // flow that issued the request
    logic [7:0]         fn_id;   // remote procedure number
    logic [15:0]        rpc_id;  // caller's sequence number
  } rpc_desc_t;                  // 36 bits

  typedef struct packed {
    rpc_desc_t desc;
    line_t     data;
  } rpc_t;

  // RPC plus the addressing the transport needs, as queued between the RPC
  // unit and the transport.
  typedef struct packed {
    rpc_t        rpc;
    logic [31:0] remote_ip;
    logic [15:0] remote_port;
    logic [15:0] local_port;
  } net_rpc_t;

  // Connection table entry.
  typedef struct packed {
    logic        valid;
    logic [31:0] remote_ip;
    logic [15:0] remote_port;
    logic [15:0] local_port;
  } conn_entry_t;

  typedef struct packed {
    logic [7:0]  proto;
    logic [7:0]  conn;
    logic [15:0] csum;
    logic [31:0] dst_ip;
    logic [31:0] src_ip;
    logic [15:0] dst_port;
    logic [15:0] src_port;
    logic [63:0] app;
  } net_hdr_t;

  typedef struct packed {
    net_hdr_t hdr;
    line_t    data;
  } frame_t;

  // Remote-memory operations.
  typedef enum logic [2:0] {
    RD_READ  = 3'd0,   // request: read one line of an object
    RD_WRITE = 3'd1,   // request: write one line of an object
    RD_DATA  = 3'd2,   // response: read data
    RD_ACK   = 3'd3,   // response: write done
    RD_NACK  = 3'd4    // response: unknown object or out of bounds
  } rdma_op_e;

  // Application word of a remote-memory frame.
  typedef struct packed {
    rdma_op_e        op;
    logic [12:0]     rsvd;
    logic [15:0]     tag;
    logic [OBJ_W-1:0] obj;
    logic [23:0]     offset;   // line index inside the object
  } rdma_app_t;                // 64 bits

  typedef struct packed {
    rdma_op_e          op;       // RD_READ or RD_WRITE
    logic [CONN_W-1:0] conn;     // connection to the node that owns the object
    logic [OBJ_W-1:0]  obj;
    logic [23:0]       offset;
    logic [15:0]       tag;
    line_t             data;     // write data
  } rdma_req_t;

  typedef struct packed {
    rdma_op_e    op;             // RD_DATA, RD_ACK or RD_NACK
    logic [15:0] tag;
    line_t       data;
  } rdma_cpl_t;

  // Remote-memory object table entry: virtual object -> host physical lines.
  typedef struct packed {
    logic              valid;
    logic [ADDR_W-1:0] base;     // first host line
    logic [23:0]       lines;    // object size in lines
  } obj_entry_t;

  // Soft configuration (see soft_regfile).
  typedef struct packed {
    logic        enable;
    logic [31:0] local_ip;
    logic [7:0]  batch;          // CCI-P batch size, lines
    logic [7:0]  active_flows;   // number of active RPC flows
    logic [7:0]  tx_qsize;       // usable entries per transmit queue
    logic [7:0]  rx_qsize;       // usable entries per receive queue
    logic        lb_rr;          // 0: static by connection, 1: round robin
    logic [15:0] flush_timeout;  // cycles before a partial batch is sent
  } soft_cfg_t;

  // Soft register indices.
  localparam logic [7:0] REG_LOCAL_IP = 8'h00;
  localparam logic [7:0] REG_BATCH    = 8'h01;
  localparam logic [7:0] REG_FLOWS    = 8'h02;
  localparam logic [7:0] REG_TXQSIZE  = 8'h03;
  localparam logic [7:0] REG_LB       = 8'h04;
  localparam logic [7:0] REG_FLUSH    = 8'h05;
  localparam logic [7:0] REG_ENABLE   = 8'h06;
  localparam logic [7:0] REG_RXQSIZE  = 8'h07;

  // 16-bit ones'-complement sum of the 32 halfwords of a line (UDP style,
  // header not covered).
  function automatic logic [15:0] line_csum(input line_t d);
    logic [31:0] s;
    s = '0;
    for (int i = 0; i < LINE_W/16; i++) s += 32'(d[i*16 +: 16]);
    s = {16'd0, s[15:0]} + {16'd0, s[31:16]};
    s = {16'd0, s[15:0]} + {16'd0, s[31:16]};
    return ~s[15:0];
  endfunction

endpackage
