// transport - UDP-style transport layer of the fabric's NIC region.
//
// Transmit: for each RPC handed down by the RPC unit (with the peer's IP
// address and ports looked up from the connection table) it builds the
// frame header - protocol 17 (UDP), connection id, source/destination IP and
// ports, the RPC descriptor as application word, and a 16-bit ones'-
// complement checksum of the 64 B payload - and serialises the frame onto
// its Avalon-ST stream toward the PHY.
// Receive: it reassembles frames from the stream, checks that the protocol
// is RPC, the destination IP is this node's (soft register) and the
// checksum matches, and hands good RPCs up with the destination port. Bad
// or malformed frames are consumed and reported on drop_evt.
//
// Only UDP is built: the choice between TCP and UDP is made by loading a
// different bitstream (hard reconfiguration), and the TCP variant is not
// part of this design. The header layout and checksum are this design's own.
//
// Timing: a frame enters the serialiser the cycle after tx_valid&&tx_ready,
// and leaves as 11 beats (hm_pkg::BEATS) at one beat per cycle, with no gap
// between back-to-back frames. Receive adds one cycle after the last beat.
module transport
  import hm_pkg::*;
(
  input  logic              clk,
  input  logic              rst_n,
  input  logic [31:0]       local_ip,
  // from the RPC unit
  input  logic              tx_valid,
  output logic              tx_ready,
  input  rpc_t              tx_rpc,
  input  logic [31:0]       tx_remote_ip,
  input  logic [15:0]       tx_remote_port,
  input  logic [15:0]       tx_local_port,
  // to the RPC unit
  output logic              rx_valid,
  input  logic              rx_ready,
  output rpc_t              rx_rpc,
  output logic [15:0]       rx_dst_port,
  output logic [31:0]       rx_src_ip,
  // Avalon-ST toward the PHY
  output logic              avst_tx_valid,
  input  logic              avst_tx_ready,
  output logic [AVST_W-1:0] avst_tx_data,
  output logic              avst_tx_sop,
  output logic              avst_tx_eop,
  input  logic              avst_rx_valid,
  output logic              avst_rx_ready,
  input  logic [AVST_W-1:0] avst_rx_data,
  input  logic              avst_rx_sop,
  input  logic              avst_rx_eop,
  // packet monitor events
  output logic              tx_evt,
  output logic [CONN_W-1:0] tx_conn,
  output logic              drop_evt
);

  // ---------------- transmit ----------------
  frame_t tx_frame;
  logic   ser_ready;

  always_comb begin
    tx_frame.hdr.proto    = PROTO_RPC;
    tx_frame.hdr.conn     = 8'(tx_rpc.desc.conn);
    tx_frame.hdr.csum     = line_csum(tx_rpc.data);
    tx_frame.hdr.dst_ip   = tx_remote_ip;
    tx_frame.hdr.src_ip   = local_ip;
    tx_frame.hdr.dst_port = tx_remote_port;
    tx_frame.hdr.src_port = tx_local_port;
    tx_frame.hdr.app      = 64'(tx_rpc.desc);
    tx_frame.data         = tx_rpc.data;
  end

  assign tx_ready = ser_ready;
  assign tx_evt   = tx_valid && tx_ready;
  assign tx_conn  = tx_rpc.desc.conn;

  frame_ser u_ser (
    .clk, .rst_n,
    .in_valid (tx_valid), .in_ready (ser_ready), .in_frame (tx_frame),
    .out_valid(avst_tx_valid), .out_ready(avst_tx_ready), .out_data(avst_tx_data),
    .out_sop  (avst_tx_sop),   .out_eop  (avst_tx_eop)
  );

  // ---------------- receive ----------------
  frame_t rx_frame;
  logic   des_valid, des_ready, des_err, rx_ok;

  frame_deser u_des (
    .clk, .rst_n,
    .in_valid (avst_rx_valid), .in_ready(avst_rx_ready), .in_data(avst_rx_data),
    .in_sop   (avst_rx_sop),   .in_eop  (avst_rx_eop),
    .out_valid(des_valid), .out_ready(des_ready), .out_frame(rx_frame), .err(des_err)
  );

  assign rx_ok = (rx_frame.hdr.proto == PROTO_RPC) &&
                 (rx_frame.hdr.dst_ip == local_ip) &&
                 (rx_frame.hdr.csum == line_csum(rx_frame.data));

  assign rx_valid    = des_valid && rx_ok;
  assign des_ready   = rx_ready || !rx_ok;
  assign rx_rpc.desc = rpc_desc_t'(rx_frame.hdr.app[$bits(rpc_desc_t)-1:0]);
  assign rx_rpc.data = rx_frame.data;
  assign rx_dst_port = rx_frame.hdr.dst_port;
  assign rx_src_ip   = rx_frame.hdr.src_ip;
  assign drop_evt    = des_err || (des_valid && !rx_ok);

endmodule
