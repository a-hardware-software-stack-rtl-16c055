// rdma_interface - remote-memory engine of the fabric (RoCE-style).
//
// Lets a serverless function read or write the output object of a function
// that ran on another server, without going through a database and without
// the host network stack. Objects are named by a virtual object id; each
// server's fabric holds an object table (written by host software) that maps
// the id to a base host line address and a size in lines, so a requester
// never needs to know where, physically, the object lives.
//
// Requester side: the host issues {op READ|WRITE, connection, object,
// line offset, tag, write data}. The engine looks up the connection for the
// peer's address, sends a request frame (protocol 254) and later returns a
// completion {DATA|ACK|NACK, tag, data} when the peer's response arrives. A
// request on a connection that is not open completes at once with NACK.
// Responder side: an incoming request is checked against the object table
// (valid object, offset below its size); a READ reads one host line and
// answers DATA, a WRITE writes one host line and answers ACK, anything else
// is answered NACK. The answer goes back to the frame's source address and
// port. One incoming request is served at a time, to completion.
// Frames with a wrong destination IP or a bad payload checksum are dropped.
//
// Connection ids are assumed to be assigned cluster-wide by the controller,
// so both ends of a connection use the same id. Coherence with the host's
// caches is the host link's job (not modelled): the memory port is a plain
// one-line read/write port. The object-id address mapping in the fabric
// follows the description of the remote-memory fabric; opcodes, one-line
// transfers and the NACK rule are this design's own.
//
// Timing: request frame enters the serialiser the cycle the host request is
// accepted (11 beats on the wire). Responder: frame accepted -> memory
// request next cycle -> response frame queued the cycle after the memory
// answers.
module rdma_interface
  import hm_pkg::*;
#(
  parameter int unsigned NUM_OBJ = 16
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              cfg_enable,
  input  logic [31:0]       local_ip,
  // object table write port: {valid[63], lines[55:32], base[31:0]}
  input  logic              obj_wr,
  input  logic [OBJ_W-1:0]  obj_idx,
  input  logic [63:0]       obj_wdata,
  output obj_entry_t        obj_rd_entry,
  // requester side (host)
  input  logic              loc_req_valid,
  output logic              loc_req_ready,
  input  rdma_req_t         loc_req,
  output logic              loc_cpl_valid,
  input  logic              loc_cpl_ready,
  output rdma_cpl_t         loc_cpl,
  // connection lookup
  output logic [CONN_W-1:0] cm_id,
  input  conn_entry_t       cm_entry,
  // host memory (responder side)
  output logic              mem_rd_valid,
  input  logic              mem_rd_ready,
  output logic [ADDR_W-1:0] mem_rd_addr,
  input  logic              mem_rsp_valid,
  input  line_t             mem_rsp_data,
  output logic              mem_wr_valid,
  input  logic              mem_wr_ready,
  output logic [ADDR_W-1:0] mem_wr_addr,
  output line_t             mem_wr_data,
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
  // events
  output logic              tx_evt,
  output logic [CONN_W-1:0] tx_conn,
  output logic              rx_evt,
  output logic [CONN_W-1:0] rx_conn,
  output logic              drop_evt,
  output logic              nack_evt
);

  // ---------------- object table ----------------
  localparam int unsigned OIW = (NUM_OBJ > 1) ? $clog2(NUM_OBJ) : 1;
  obj_entry_t objs [NUM_OBJ];

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      for (int i = 0; i < NUM_OBJ; i++) objs[i] <= '0;
    end else if (obj_wr && int'(obj_idx) < NUM_OBJ) begin
      objs[OIW'(obj_idx)].valid <= obj_wdata[63];
      objs[OIW'(obj_idx)].lines <= obj_wdata[55:32];
      objs[OIW'(obj_idx)].base  <= obj_wdata[31:0];
    end
  end

  function automatic obj_entry_t obj_lookup(input logic [OBJ_W-1:0] id);
    if (int'(id) < NUM_OBJ) return objs[OIW'(id)];
    return '0;
  endfunction

  assign obj_rd_entry = obj_lookup(obj_idx);

  // ---------------- receive ----------------
  frame_t    rx_frame;
  rdma_app_t rx_app;
  logic      des_valid, des_ready, des_err, rx_ok, rx_is_req;

  frame_deser u_des (
    .clk, .rst_n,
    .in_valid (avst_rx_valid), .in_ready(avst_rx_ready), .in_data(avst_rx_data),
    .in_sop   (avst_rx_sop),   .in_eop  (avst_rx_eop),
    .out_valid(des_valid), .out_ready(des_ready), .out_frame(rx_frame), .err(des_err)
  );

  assign rx_app    = rdma_app_t'(rx_frame.hdr.app);
  assign rx_ok     = (rx_frame.hdr.proto == PROTO_RDMA) &&
                     (rx_frame.hdr.dst_ip == local_ip) &&
                     (rx_frame.hdr.csum == line_csum(rx_frame.data));
  assign rx_is_req = (rx_app.op == RD_READ) || (rx_app.op == RD_WRITE);

  // ---------------- responder ----------------
  typedef enum logic [2:0] {S_IDLE, S_MEMRD, S_MEMRSP, S_MEMWR, S_RESP} srv_e;
  srv_e        st;
  net_hdr_t    sv_hdr;      // header of the request being served
  rdma_app_t   sv_app;
  logic [ADDR_W-1:0] sv_addr;
  line_t       sv_data;
  rdma_op_e    sv_rop;      // response opcode
  logic        resp_taken;

  logic        take_req, take_cpl, cpl_from_rx;
  obj_entry_t  rq_obj;
  assign rq_obj = obj_lookup(rx_app.obj);

  assign take_req = cfg_enable && des_valid && rx_ok && rx_is_req && (st == S_IDLE);

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      st      <= S_IDLE;
      sv_hdr  <= '0;
      sv_app  <= '0;
      sv_addr <= '0;
      sv_data <= '0;
      sv_rop  <= RD_NACK;
    end else begin
      unique case (st)
        S_IDLE: if (take_req) begin
          sv_hdr  <= rx_frame.hdr;
          sv_app  <= rx_app;
          sv_data <= rx_frame.data;
          sv_addr <= rq_obj.base + ADDR_W'(rx_app.offset);
          if (!rq_obj.valid || rx_app.offset >= rq_obj.lines) begin
            sv_rop <= RD_NACK;
            st     <= S_RESP;
          end else if (rx_app.op == RD_READ) begin
            sv_rop <= RD_DATA;
            st     <= S_MEMRD;
          end else begin
            sv_rop <= RD_ACK;
            st     <= S_MEMWR;
          end
        end
        S_MEMRD:  if (mem_rd_ready) st <= S_MEMRSP;
        S_MEMRSP: if (mem_rsp_valid) begin
          sv_data <= mem_rsp_data;
          st      <= S_RESP;
        end
        S_MEMWR:  if (mem_wr_ready) begin
          sv_data <= '0;
          st      <= S_RESP;
        end
        S_RESP:   if (resp_taken) st <= S_IDLE;
        default:  st <= S_IDLE;
      endcase
    end
  end

  assign mem_rd_valid = (st == S_MEMRD);
  assign mem_rd_addr  = sv_addr;
  assign mem_wr_valid = (st == S_MEMWR);
  assign mem_wr_addr  = sv_addr;
  assign mem_wr_data  = sv_data;
  assign nack_evt     = (st == S_IDLE) && take_req &&
                        (!rq_obj.valid || rx_app.offset >= rq_obj.lines);

  // ---------------- completions to the host ----------------
  logic loc_conn_bad;
  assign cm_id        = loc_req.conn;
  assign loc_conn_bad = !cm_entry.valid;

  assign cpl_from_rx = cfg_enable && des_valid && rx_ok && !rx_is_req;
  always_comb begin
    loc_cpl_valid = 1'b0;
    loc_cpl       = '0;
    if (cpl_from_rx) begin
      loc_cpl_valid = 1'b1;
      loc_cpl.op    = rx_app.op;
      loc_cpl.tag   = rx_app.tag;
      loc_cpl.data  = rx_frame.data;
    end else if (cfg_enable && loc_req_valid && loc_conn_bad) begin
      loc_cpl_valid = 1'b1;
      loc_cpl.op    = RD_NACK;
      loc_cpl.tag   = loc_req.tag;
    end
  end
  assign take_cpl = cpl_from_rx && loc_cpl_ready;

  assign des_ready = take_req || take_cpl || !rx_ok || !cfg_enable;

  // ---------------- transmit ----------------
  frame_t tx_frame;
  logic   ser_valid, ser_ready, send_resp;

  assign send_resp = (st == S_RESP);

  always_comb begin
    rdma_app_t app;
    app = '0;
    tx_frame.hdr.proto = PROTO_RDMA;
    tx_frame.hdr.src_ip = local_ip;
    if (send_resp) begin
      app.op     = sv_rop;
      app.tag    = sv_app.tag;
      app.obj    = sv_app.obj;
      app.offset = sv_app.offset;
      tx_frame.hdr.conn     = sv_hdr.conn;
      tx_frame.hdr.dst_ip   = sv_hdr.src_ip;
      tx_frame.hdr.dst_port = sv_hdr.src_port;
      tx_frame.hdr.src_port = sv_hdr.dst_port;
      tx_frame.data         = (sv_rop == RD_DATA) ? sv_data : '0;
    end else begin
      app.op     = loc_req.op;
      app.tag    = loc_req.tag;
      app.obj    = loc_req.obj;
      app.offset = loc_req.offset;
      tx_frame.hdr.conn     = 8'(loc_req.conn);
      tx_frame.hdr.dst_ip   = cm_entry.remote_ip;
      tx_frame.hdr.dst_port = cm_entry.remote_port;
      tx_frame.hdr.src_port = cm_entry.local_port;
      tx_frame.data         = (loc_req.op == RD_WRITE) ? loc_req.data : '0;
    end
    tx_frame.hdr.app  = 64'(app);
    tx_frame.hdr.csum = line_csum(tx_frame.data);
  end

  assign ser_valid  = cfg_enable && (send_resp || (loc_req_valid && !loc_conn_bad));
  assign resp_taken = send_resp && ser_ready;
  assign loc_req_ready = cfg_enable && !send_resp &&
                         (loc_conn_bad ? (loc_cpl_ready && !cpl_from_rx) : ser_ready);

  frame_ser u_ser (
    .clk, .rst_n,
    .in_valid (ser_valid), .in_ready (ser_ready), .in_frame (tx_frame),
    .out_valid(avst_tx_valid), .out_ready(avst_tx_ready), .out_data(avst_tx_data),
    .out_sop  (avst_tx_sop),   .out_eop  (avst_tx_eop)
  );

  assign tx_evt   = ser_valid && ser_ready;
  assign tx_conn  = CONN_W'(tx_frame.hdr.conn);
  assign rx_evt   = des_valid && des_ready && rx_ok && cfg_enable;
  assign rx_conn  = CONN_W'(rx_frame.hdr.conn);
  assign drop_evt = des_err || (des_valid && !rx_ok);

endmodule
