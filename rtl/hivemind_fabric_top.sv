// hivemind_fabric_top - cloud-server FPGA fabric for RPC and remote-memory
// acceleration.
//
// One FPGA sits next to each cloud server's CPU on its coherent memory link
// and is split statically into two regions that share one network port:
//  * NIC region - offloads the whole RPC stack used between edge devices and
//    cloud servers: host threads (flows) hand 64 B RPCs to the CPU-NIC
//    interface, which queues them per flow; the RPC unit arbitrates among
//    flows and attaches the connection's peer address; the UDP-style
//    transport frames and checksums them. Received RPCs come back through the
//    transport and the RPC unit, which load-balances them onto flow queues,
//    and the CPU-NIC interface returns them to the host in batches.
//  * Remote-memory region - the RDMA interface lets a serverless function
//    read or write, one line at a time, an object a function left in another
//    server's memory, translating object ids to host addresses in the fabric.
// Shared: the connection manager (connection table), the packet monitor
// (per-connection counters) and the soft register file (run-time tuning).
// net_mux joins the two regions' Avalon-ST streams at the PHY port.
//
// Host register port (single cycle write, combinational read), csr_addr:
//   0x0nnn  soft registers (see soft_regfile), nnn = register index
//   0x1nnn  connection table entry nnn (write format: connection_manager)
//   0x2nnn  remote-memory object table entry nnn (format: rdma_interface)
//   0x3nnn  packet counters of connection nnn {tx, rx}; any write clears all
//   0x4000  dropped-frame count, 0x4001 open connections, 0x4002-0x4006
//           mechanism counters (see below); all read only
// Vendor parts are outside: the coherent host link shell (its line and
// register channels are the host_*, rdma_*, mem_* and csr_* ports), and the
// Ethernet PHY and QSFP cage (the avst_* ports).
//
// The partitioning into these blocks follows the block diagram of the
// fabric. Sizes (flows, connections, objects, queue depth), the register map,
// the frame format and the use of a single clock are this design's choices.
// All logic uses one clock and a synchronous active-low reset.
module hivemind_fabric_top
  import hm_pkg::*;
#(
  parameter int unsigned NUM_FLOWS = 4,
  parameter int unsigned NUM_CONN  = 128,
  parameter int unsigned NUM_OBJ   = 16,
  parameter int unsigned QDEPTH    = 64,
  parameter int unsigned MAX_BATCH = 8
) (
  input  logic              clk,
  input  logic              rst_n,
  // host register port
  input  logic              csr_wr,
  input  logic [15:0]       csr_addr,
  input  logic [63:0]       csr_wdata,
  output logic [63:0]       csr_rdata,
  // RPC channel from / to the host
  input  logic              host_tx_valid,
  output logic              host_tx_ready,
  input  rpc_t              host_tx_rpc,
  input  logic [FLOW_W-1:0] host_tx_flow,
  output logic              host_rx_valid,
  input  logic              host_rx_ready,
  output rpc_t              host_rx_rpc,
  output logic [FLOW_W-1:0] host_rx_flow,
  output logic              host_rx_last,
  // remote-memory channel from / to the host
  input  logic              rdma_req_valid,
  output logic              rdma_req_ready,
  input  rdma_req_t         rdma_req,
  output logic              rdma_cpl_valid,
  input  logic              rdma_cpl_ready,
  output rdma_cpl_t         rdma_cpl,
  // host memory, served for remote requests
  output logic              mem_rd_valid,
  input  logic              mem_rd_ready,
  output logic [ADDR_W-1:0] mem_rd_addr,
  input  logic              mem_rsp_valid,
  input  line_t             mem_rsp_data,
  output logic              mem_wr_valid,
  input  logic              mem_wr_ready,
  output logic [ADDR_W-1:0] mem_wr_addr,
  output line_t             mem_wr_data,
  // Avalon-ST to / from the PHY
  output logic              avst_tx_valid,
  input  logic              avst_tx_ready,
  output logic [AVST_W-1:0] avst_tx_data,
  output logic              avst_tx_sop,
  output logic              avst_tx_eop,
  input  logic              avst_rx_valid,
  output logic              avst_rx_ready,
  input  logic [AVST_W-1:0] avst_rx_data,
  input  logic              avst_rx_sop,
  input  logic              avst_rx_eop
);

  localparam int unsigned CW = $clog2(QDEPTH + 1);

  // ---------------- register port decode ----------------
  logic [3:0] region;
  assign region = csr_addr[15:12];

  soft_cfg_t   cfg;
  logic [63:0] soft_rdata, mon_rdata;
  logic [31:0] mon_drops;
  logic [63:0] stat_rdata;
  conn_entry_t cm_csr_entry;
  obj_entry_t  obj_csr_entry;
  logic [CONN_W:0] open_count;

  soft_regfile #(.NUM_FLOWS(NUM_FLOWS), .QDEPTH(QDEPTH), .MAX_BATCH(MAX_BATCH)) u_soft (
    .clk, .rst_n,
    .csr_wr(csr_wr && region == 4'h0), .csr_addr(csr_addr[7:0]), .csr_wdata,
    .csr_rdata(soft_rdata), .cfg
  );

  logic [CONN_W-1:0] cm_id    [3];
  conn_entry_t       cm_entry [3];

  connection_manager #(.NUM_CONN(NUM_CONN), .NPORTS(3)) u_cm (
    .clk, .rst_n,
    .csr_wr(csr_wr && region == 4'h1), .csr_idx(csr_addr[CONN_W-1:0]), .csr_wdata,
    .csr_entry(cm_csr_entry), .lookup_id(cm_id), .lookup_entry(cm_entry), .open_count
  );

  always_comb begin
    unique case (region)
      4'h0:    csr_rdata = soft_rdata;
      4'h1:    csr_rdata = {cm_csr_entry.valid, cm_csr_entry.remote_ip,
                            cm_csr_entry.remote_port, cm_csr_entry.local_port[14:0]};
      4'h2:    csr_rdata = {obj_csr_entry.valid, 7'd0, obj_csr_entry.lines, obj_csr_entry.base};
      4'h3:    csr_rdata = mon_rdata;
      4'h4:    csr_rdata = stat_rdata;
      default: csr_rdata = 64'd0;
    endcase
  end

  // ---------------- flow queues ----------------
  logic  fq_tx_push [NUM_FLOWS], fq_tx_pop [NUM_FLOWS], fq_tx_full [NUM_FLOWS], fq_tx_empty [NUM_FLOWS];
  logic  fq_tx_valid [NUM_FLOWS];
  rpc_t  fq_tx_din, fq_tx_head [NUM_FLOWS];
  logic  fq_rx_push [NUM_FLOWS], fq_rx_pop [NUM_FLOWS], fq_rx_full [NUM_FLOWS], fq_rx_empty [NUM_FLOWS];
  rpc_t  fq_rx_din, fq_rx_head [NUM_FLOWS];
  logic [CW-1:0] fq_tx_cnt [NUM_FLOWS], fq_rx_cnt [NUM_FLOWS];
  logic [7:0]    fq_rx_count [NUM_FLOWS];
  logic [CW-1:0] tx_qlimit, rx_qlimit;

  assign tx_qlimit = CW'(cfg.tx_qsize);
  assign rx_qlimit = CW'(cfg.rx_qsize);

  for (genvar f = 0; f < NUM_FLOWS; f++) begin : g_flow
    sync_fifo #(.WIDTH($bits(rpc_t)), .DEPTH(QDEPTH)) u_txq (
      .clk, .rst_n, .limit(tx_qlimit),
      .push(fq_tx_push[f]), .din(fq_tx_din), .pop(fq_tx_pop[f]), .dout(fq_tx_head[f]),
      .full(fq_tx_full[f]), .empty(fq_tx_empty[f]), .count(fq_tx_cnt[f])
    );
    sync_fifo #(.WIDTH($bits(rpc_t)), .DEPTH(QDEPTH)) u_rxq (
      .clk, .rst_n, .limit(rx_qlimit),
      .push(fq_rx_push[f]), .din(fq_rx_din), .pop(fq_rx_pop[f]), .dout(fq_rx_head[f]),
      .full(fq_rx_full[f]), .empty(fq_rx_empty[f]), .count(fq_rx_cnt[f])
    );
    assign fq_tx_valid[f] = !fq_tx_empty[f];
    assign fq_rx_count[f] = 8'(fq_rx_cnt[f]);
  end

  // ---------------- CPU-NIC interface ----------------
  logic batch_full_evt, batch_flush_evt;

  cpu_nic_if #(.NUM_FLOWS(NUM_FLOWS)) u_cni (
    .clk, .rst_n,
    .cfg_enable(cfg.enable), .cfg_batch(cfg.batch), .cfg_active_flows(cfg.active_flows),
    .cfg_flush_timeout(cfg.flush_timeout),
    .host_tx_valid, .host_tx_ready, .host_tx_rpc, .host_tx_flow,
    .host_rx_valid, .host_rx_ready, .host_rx_rpc, .host_rx_flow, .host_rx_last,
    .fq_tx_push, .fq_tx_full, .fq_tx_data(fq_tx_din),
    .fq_rx_count, .fq_rx_rpc(fq_rx_head), .fq_rx_pop,
    .batch_full_evt, .batch_flush_evt
  );

  // ---------------- RPC unit and transport queues ----------------
  localparam int unsigned NRX_W = $bits(rpc_t) + 16;

  logic     nq_tx_push, nq_tx_pop, nq_tx_full, nq_tx_empty;
  net_rpc_t nq_tx_din, nq_tx_head;
  logic     nq_rx_push, nq_rx_pop, nq_rx_full, nq_rx_empty;
  logic [NRX_W-1:0] nq_rx_din, nq_rx_head;
  logic [CW-1:0]    nq_tx_cnt, nq_rx_cnt;
  logic rpc_tx_drop, rpc_rx_drop, rpc_rr_used, rpc_rx_stall;

  rpc_unit #(.NUM_FLOWS(NUM_FLOWS)) u_rpc (
    .clk, .rst_n,
    .cfg_enable(cfg.enable), .cfg_active_flows(cfg.active_flows), .cfg_lb_rr(cfg.lb_rr),
    .fq_tx_valid, .fq_tx_rpc(fq_tx_head), .fq_tx_pop,
    .fq_rx_push, .fq_rx_full, .fq_rx_rpc(fq_rx_din),
    .nq_tx_push, .nq_tx_full, .nq_tx_data(nq_tx_din),
    .nq_rx_valid(!nq_rx_empty), .nq_rx_rpc(nq_rx_head[NRX_W-1:16]),
    .nq_rx_dst_port(nq_rx_head[15:0]), .nq_rx_pop,
    .cm_id(cm_id[0:1]), .cm_entry(cm_entry[0:1]),
    .tx_drop(rpc_tx_drop), .rx_drop(rpc_rx_drop), .rx_lb_rr_used(rpc_rr_used),
    .rx_stall(rpc_rx_stall)
  );

  sync_fifo #(.WIDTH($bits(net_rpc_t)), .DEPTH(QDEPTH)) u_nq_tx (
    .clk, .rst_n, .limit(tx_qlimit),
    .push(nq_tx_push), .din(nq_tx_din), .pop(nq_tx_pop), .dout(nq_tx_head),
    .full(nq_tx_full), .empty(nq_tx_empty), .count(nq_tx_cnt)
  );
  sync_fifo #(.WIDTH(NRX_W), .DEPTH(QDEPTH)) u_nq_rx (
    .clk, .rst_n, .limit(rx_qlimit),
    .push(nq_rx_push), .din(nq_rx_din), .pop(nq_rx_pop), .dout(nq_rx_head),
    .full(nq_rx_full), .empty(nq_rx_empty), .count(nq_rx_cnt)
  );

  // ---------------- transport ----------------
  logic              tp_tx_ready, tp_rx_valid;
  rpc_t              tp_rx_rpc;
  logic [15:0]       tp_rx_dst_port;
  logic [31:0]       tp_rx_src_ip;
  logic              tp_tx_evt, tp_drop;
  logic [CONN_W-1:0] tp_tx_conn;

  logic              m_tx_valid [2], m_tx_ready [2], m_tx_sop [2], m_tx_eop [2];
  logic [AVST_W-1:0] m_tx_data  [2];
  logic              m_rx_valid [2], m_rx_ready [2], m_rx_sop, m_rx_eop;
  logic [AVST_W-1:0] m_rx_data;

  assign nq_tx_pop  = !nq_tx_empty && tp_tx_ready;
  assign nq_rx_push = tp_rx_valid && !nq_rx_full;
  assign nq_rx_din  = {tp_rx_rpc, tp_rx_dst_port};

  transport u_tp (
    .clk, .rst_n, .local_ip(cfg.local_ip),
    .tx_valid(!nq_tx_empty), .tx_ready(tp_tx_ready), .tx_rpc(nq_tx_head.rpc),
    .tx_remote_ip(nq_tx_head.remote_ip), .tx_remote_port(nq_tx_head.remote_port),
    .tx_local_port(nq_tx_head.local_port),
    .rx_valid(tp_rx_valid), .rx_ready(!nq_rx_full), .rx_rpc(tp_rx_rpc),
    .rx_dst_port(tp_rx_dst_port), .rx_src_ip(tp_rx_src_ip),
    .avst_tx_valid(m_tx_valid[0]), .avst_tx_ready(m_tx_ready[0]), .avst_tx_data(m_tx_data[0]),
    .avst_tx_sop(m_tx_sop[0]), .avst_tx_eop(m_tx_eop[0]),
    .avst_rx_valid(m_rx_valid[0]), .avst_rx_ready(m_rx_ready[0]), .avst_rx_data(m_rx_data),
    .avst_rx_sop(m_rx_sop), .avst_rx_eop(m_rx_eop),
    .tx_evt(tp_tx_evt), .tx_conn(tp_tx_conn), .drop_evt(tp_drop)
  );

  // ---------------- remote memory ----------------
  logic              rd_tx_evt, rd_rx_evt, rd_drop, rd_nack;
  logic [CONN_W-1:0] rd_tx_conn, rd_rx_conn;

  rdma_interface #(.NUM_OBJ(NUM_OBJ)) u_rdma (
    .clk, .rst_n, .cfg_enable(cfg.enable), .local_ip(cfg.local_ip),
    .obj_wr(csr_wr && region == 4'h2), .obj_idx(csr_addr[OBJ_W-1:0]), .obj_wdata(csr_wdata),
    .obj_rd_entry(obj_csr_entry),
    .loc_req_valid(rdma_req_valid), .loc_req_ready(rdma_req_ready), .loc_req(rdma_req),
    .loc_cpl_valid(rdma_cpl_valid), .loc_cpl_ready(rdma_cpl_ready), .loc_cpl(rdma_cpl),
    .cm_id(cm_id[2]), .cm_entry(cm_entry[2]),
    .mem_rd_valid, .mem_rd_ready, .mem_rd_addr, .mem_rsp_valid, .mem_rsp_data,
    .mem_wr_valid, .mem_wr_ready, .mem_wr_addr, .mem_wr_data,
    .avst_tx_valid(m_tx_valid[1]), .avst_tx_ready(m_tx_ready[1]), .avst_tx_data(m_tx_data[1]),
    .avst_tx_sop(m_tx_sop[1]), .avst_tx_eop(m_tx_eop[1]),
    .avst_rx_valid(m_rx_valid[1]), .avst_rx_ready(m_rx_ready[1]), .avst_rx_data(m_rx_data),
    .avst_rx_sop(m_rx_sop), .avst_rx_eop(m_rx_eop),
    .tx_evt(rd_tx_evt), .tx_conn(rd_tx_conn), .rx_evt(rd_rx_evt), .rx_conn(rd_rx_conn),
    .drop_evt(rd_drop), .nack_evt(rd_nack)
  );

  // ---------------- PHY port ----------------
  logic rx_unknown;

  net_mux u_mux (
    .clk, .rst_n,
    .c_tx_valid(m_tx_valid), .c_tx_ready(m_tx_ready), .c_tx_data(m_tx_data),
    .c_tx_sop(m_tx_sop), .c_tx_eop(m_tx_eop),
    .c_rx_valid(m_rx_valid), .c_rx_ready(m_rx_ready), .c_rx_data(m_rx_data),
    .c_rx_sop(m_rx_sop), .c_rx_eop(m_rx_eop),
    .phy_tx_valid(avst_tx_valid), .phy_tx_ready(avst_tx_ready), .phy_tx_data(avst_tx_data),
    .phy_tx_sop(avst_tx_sop), .phy_tx_eop(avst_tx_eop),
    .phy_rx_valid(avst_rx_valid), .phy_rx_ready(avst_rx_ready), .phy_rx_data(avst_rx_data),
    .phy_rx_sop(avst_rx_sop), .phy_rx_eop(avst_rx_eop),
    .rx_unknown
  );

  // ---------------- packet monitor ----------------
  logic              pm_tx_evt [2], pm_rx_evt [2];
  logic [CONN_W-1:0] pm_tx_conn [2], pm_rx_conn [2];

  assign pm_tx_evt[0]  = tp_tx_evt;
  assign pm_tx_conn[0] = tp_tx_conn;
  assign pm_rx_evt[0]  = nq_rx_pop && !rpc_rx_drop;
  assign pm_rx_conn[0] = cm_id[1];
  assign pm_tx_evt[1]  = rd_tx_evt;
  assign pm_tx_conn[1] = rd_tx_conn;
  assign pm_rx_evt[1]  = rd_rx_evt;
  assign pm_rx_conn[1] = rd_rx_conn;

  // ---------------- mechanism counters ----------------
  // How often the run-time tunables take effect, for the host to tune them:
  // 0 full batches, 1 timed-out batches, 2 requests balanced round robin,
  // 3 cycles a received RPC waited on a full flow queue, 4 NACKs sent by the
  // remote-memory responder. Cleared together with the packet counters.
  localparam int unsigned NSTAT = 5;
  logic [31:0] stat_cnt [NSTAT];
  logic [NSTAT-1:0] stat_evt;
  assign stat_evt = {rd_nack, rpc_rx_stall, rpc_rr_used, batch_flush_evt, batch_full_evt};

  always_ff @(posedge clk) begin
    if (!rst_n || (csr_wr && region == 4'h3)) begin
      for (int i = 0; i < NSTAT; i++) stat_cnt[i] <= '0;
    end else begin
      for (int i = 0; i < NSTAT; i++) stat_cnt[i] <= stat_cnt[i] + 32'(stat_evt[i]);
    end
  end

  // region 4: 0x4000 drops, 0x4001 open connections, 0x4002.. stat_cnt[0..]
  always_comb begin
    stat_rdata = 64'd0;
    if (csr_addr[3:0] == 4'd0)      stat_rdata = {32'd0, mon_drops};
    else if (csr_addr[3:0] == 4'd1) stat_rdata = 64'(open_count);
    else if (32'(csr_addr[3:0]) < NSTAT + 2) stat_rdata = {32'd0, stat_cnt[3'(csr_addr[3:0] - 4'd2)]};
  end

  packet_monitor #(.NUM_CONN(NUM_CONN), .NSRC(2), .NDROP(5)) u_pm (
    .clk, .rst_n, .clr(csr_wr && region == 4'h3),
    .tx_evt(pm_tx_evt), .tx_conn(pm_tx_conn), .rx_evt(pm_rx_evt), .rx_conn(pm_rx_conn),
    .drop_evt({tp_drop, rd_drop, rpc_tx_drop, rpc_rx_drop, rx_unknown}),
    .rd_idx(csr_addr[CONN_W-1:0]), .rd_data(mon_rdata), .rd_drops(mon_drops)
  );

endmodule
