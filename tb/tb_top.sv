// tb_top - end-to-end test of two cloud-server fabrics joined by a link.
//
// Node A and node B (hivemind_fabric_top at its default sizes) are wired
// PHY to PHY. Host models on both nodes configure the soft registers, open
// connections and register remote-memory objects through the register port,
// then act as RPC clients and servers at the same time: each node issues
// requests from random flows; the other node's host answers every request it
// receives with a response carrying the inverted payload, on the connection
// and for the flow the request named. Node A also reads and writes node B's
// objects through the remote-memory engines while RPCs are flowing.
//
// Checked: every response reaches the flow that issued the request with the
// expected payload; requests on a connection that is closed at either end
// are dropped and never answered; one frame corrupted on the link is dropped
// by its receiver; every remote-memory completion matches a reference
// memory; the packet counters and drop counters read over the register port
// match what crossed the link. Mechanisms that must each happen at least
// once: full batch, timed-out batch, round-robin and static balancing,
// receive stall on a full flow queue, host back-pressure on a full transmit
// queue, transmit and receive drops, checksum drop, remote-memory NACK, and
// both fabric regions contending for the PHY.
module tb_top;
  import hm_pkg::*;

  logic clk = 0, rst_n = 0;
  logic csr_wr [2];
  logic [15:0] csr_addr [2];
  logic [63:0] csr_wdata [2], csr_rdata [2];
  logic host_tx_valid [2], host_tx_ready [2];
  rpc_t host_tx_rpc [2];
  logic [FLOW_W-1:0] host_tx_flow [2];
  logic host_rx_valid [2], host_rx_ready [2], host_rx_last [2];
  rpc_t host_rx_rpc [2];
  logic [FLOW_W-1:0] host_rx_flow [2];
  logic rdma_req_valid [2], rdma_req_ready [2], rdma_cpl_valid [2], rdma_cpl_ready [2];
  rdma_req_t rdma_req [2];
  rdma_cpl_t rdma_cpl [2];
  logic mem_rd_valid [2], mem_rd_ready [2], mem_rsp_valid [2], mem_wr_valid [2], mem_wr_ready [2];
  logic [ADDR_W-1:0] mem_rd_addr [2], mem_wr_addr [2];
  line_t mem_rsp_data [2], mem_wr_data [2];
  logic tx_v [2], tx_r [2], tx_s [2], tx_e [2];
  logic [AVST_W-1:0] tx_d [2];
  logic rx_v [2], rx_r [2], rx_s [2], rx_e [2];
  logic [AVST_W-1:0] rx_d [2];
  logic link_stall [2];
  logic corrupt [2];

  for (genvar n = 0; n < 2; n++) begin : g_node
    hivemind_fabric_top u_top (
      .clk, .rst_n,
      .csr_wr(csr_wr[n]), .csr_addr(csr_addr[n]), .csr_wdata(csr_wdata[n]), .csr_rdata(csr_rdata[n]),
      .host_tx_valid(host_tx_valid[n]), .host_tx_ready(host_tx_ready[n]),
      .host_tx_rpc(host_tx_rpc[n]), .host_tx_flow(host_tx_flow[n]),
      .host_rx_valid(host_rx_valid[n]), .host_rx_ready(host_rx_ready[n]),
      .host_rx_rpc(host_rx_rpc[n]), .host_rx_flow(host_rx_flow[n]), .host_rx_last(host_rx_last[n]),
      .rdma_req_valid(rdma_req_valid[n]), .rdma_req_ready(rdma_req_ready[n]), .rdma_req(rdma_req[n]),
      .rdma_cpl_valid(rdma_cpl_valid[n]), .rdma_cpl_ready(rdma_cpl_ready[n]), .rdma_cpl(rdma_cpl[n]),
      .mem_rd_valid(mem_rd_valid[n]), .mem_rd_ready(mem_rd_ready[n]), .mem_rd_addr(mem_rd_addr[n]),
      .mem_rsp_valid(mem_rsp_valid[n]), .mem_rsp_data(mem_rsp_data[n]),
      .mem_wr_valid(mem_wr_valid[n]), .mem_wr_ready(mem_wr_ready[n]), .mem_wr_addr(mem_wr_addr[n]),
      .mem_wr_data(mem_wr_data[n]),
      .avst_tx_valid(tx_v[n]), .avst_tx_ready(tx_r[n]), .avst_tx_data(tx_d[n]),
      .avst_tx_sop(tx_s[n]), .avst_tx_eop(tx_e[n]),
      .avst_rx_valid(rx_v[n]), .avst_rx_ready(rx_r[n]), .avst_rx_data(rx_d[n]),
      .avst_rx_sop(rx_s[n]), .avst_rx_eop(rx_e[n])
    );
    // link from node n to node 1-n, with random stalls and one corrupted bit
    assign rx_v[1-n] = tx_v[n] && !link_stall[n];
    assign tx_r[n]   = rx_r[1-n] && !link_stall[n];
    assign rx_d[1-n] = tx_d[n] ^ (corrupt[n] ? 64'h1 : 64'h0);
    assign rx_s[1-n] = tx_s[n];
    assign rx_e[1-n] = tx_e[n];
  end

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 15) $display("FAIL %s at %0t", what, $time); end
  endtask

  // ---------------- mechanism counters ----------------
  int m_full, m_flush, m_rr, m_static, m_stall, m_txbp, m_txdrop, m_rxdrop, m_csumdrop, m_nack, m_contend;
  always @(posedge clk) if (rst_n) begin
    m_full    += int'(g_node[0].u_top.u_cni.batch_full_evt)  + int'(g_node[1].u_top.u_cni.batch_full_evt);
    m_flush   += int'(g_node[0].u_top.u_cni.batch_flush_evt) + int'(g_node[1].u_top.u_cni.batch_flush_evt);
    m_rr      += int'(g_node[0].u_top.u_rpc.rx_lb_rr_used)   + int'(g_node[1].u_top.u_rpc.rx_lb_rr_used);
    m_stall   += int'(g_node[0].u_top.u_rpc.rx_stall)        + int'(g_node[1].u_top.u_rpc.rx_stall);
    m_txdrop  += int'(g_node[0].u_top.u_rpc.tx_drop)         + int'(g_node[1].u_top.u_rpc.tx_drop);
    m_rxdrop  += int'(g_node[0].u_top.u_rpc.rx_drop)         + int'(g_node[1].u_top.u_rpc.rx_drop);
    m_csumdrop += int'(g_node[0].u_top.u_tp.drop_evt)        + int'(g_node[1].u_top.u_tp.drop_evt);
    m_nack    += int'(g_node[0].u_top.u_rdma.nack_evt)       + int'(g_node[1].u_top.u_rdma.nack_evt);
    m_contend += int'(g_node[0].u_top.m_tx_valid[0] && g_node[0].u_top.m_tx_valid[1]);
    for (int n = 0; n < 2; n++) if (host_tx_valid[n] && !host_tx_ready[n]) m_txbp++;
    if (g_node[0].u_top.u_rpc.nq_rx_pop && !g_node[0].u_top.u_rpc.rx_drop &&
        g_node[0].u_top.u_rpc.nq_rx_rpc.desc.kind == RPC_REQ && !g_node[0].u_top.cfg.lb_rr) m_static++;
  end

  // the receive queue size written at run time holds at node B
  always @(posedge clk) if (rst_n && g_node[1].u_top.cfg.enable)
    check(g_node[1].u_top.g_flow[0].u_rxq.count <= 3 && g_node[1].u_top.g_flow[1].u_rxq.count <= 3 &&
          g_node[1].u_top.g_flow[2].u_rxq.count <= 3 && g_node[1].u_top.g_flow[0].u_txq.count <= 6,
          "queue sizes at B");

  // ---------------- register port ----------------
  task automatic csr_write(input int n, input logic [15:0] a, input logic [63:0] d);
    @(negedge clk);
    csr_wr[n] = 1; csr_addr[n] = a; csr_wdata[n] = d;
    @(negedge clk);
    csr_wr[n] = 0;
  endtask

  task automatic csr_read(input int n, input logic [15:0] a, output logic [63:0] d);
    @(negedge clk);
    csr_addr[n] = a;
    #1;
    d = csr_rdata[n];
  endtask

  // ---------------- RPC host models ----------------
  typedef struct { rpc_t r; logic [FLOW_W-1:0] f; } send_t;
  send_t sendq [2][$];
  typedef struct { line_t d; int flow; int node; bit lost_ok; } outst_t;
  outst_t outst [int];
  int nreq [2], nresp_ok, n_lost_expected;
  int lost_id = -1;
  bit slow_host [2];
  int cyc = 0, rtt_min = 1 << 30;
  int t_sent [int];
  always @(posedge clk) cyc++;
  bit rr_flows_seen [4];

  always @(posedge clk) if (rst_n) begin
    for (int n = 0; n < 2; n++) begin
      if (host_tx_valid[n] && host_tx_ready[n]) begin
        if (sendq[n][0].r.desc.kind == RPC_REQ) t_sent[int'(sendq[n][0].r.desc.rpc_id) + n * 65536] = cyc;
        void'(sendq[n].pop_front());
      end
      if (host_rx_valid[n] && host_rx_ready[n]) begin
        rpc_t r;
        r = host_rx_rpc[n];
        if (r.desc.kind == RPC_REQ) begin
          send_t s;
          if (n == 0) check(int'(host_rx_flow[n]) == int'(r.desc.conn) % 4, "static balancing at A");
          else rr_flows_seen[host_rx_flow[n]] = 1;
          s.r = r;
          s.r.desc.kind = RPC_RESP;
          s.r.data = ~r.data;
          s.f = host_rx_flow[n];
          sendq[n].push_back(s);
        end else begin
          int id;
          id = int'(r.desc.rpc_id);
          check(outst.exists(id), "response to a known request");
          if (outst.exists(id)) begin
            check(outst[id].node == n, "response at the requesting node");
            check(int'(host_rx_flow[n]) == outst[id].flow, "response to the issuing flow");
            check(r.data == ~outst[id].d, "response payload");
            outst.delete(id);
            if (t_sent.exists(id + n * 65536) && cyc - t_sent[id + n * 65536] < rtt_min)
              rtt_min = cyc - t_sent[id + n * 65536];
            nresp_ok++;
          end
        end
      end
    end
  end

  always @(negedge clk) begin
    for (int n = 0; n < 2; n++) begin
      host_tx_valid[n] = sendq[n].size() > 0;
      host_tx_rpc[n]   = (sendq[n].size() > 0) ? sendq[n][0].r : '0;
      host_tx_flow[n]  = (sendq[n].size() > 0) ? sendq[n][0].f : '0;
      host_rx_ready[n] = slow_host[n] ? ($urandom_range(0, 63) == 0) : ($urandom_range(0, 3) != 0);
      link_stall[n]    = ($urandom_range(0, 7) == 0);
    end
  end

  task automatic new_request(input int n, input int nflows);
    send_t s;
    int id;
    id = n * 32768 + nreq[n];
    nreq[n]++;
    s.r.desc.kind   = RPC_REQ;
    s.r.desc.conn   = ($urandom_range(0, 11) == 0) ? CONN_W'(2) : CONN_W'(1);
    s.f             = FLOW_W'($urandom_range(0, nflows - 1));
    s.r.desc.flow   = s.f;
    s.r.desc.fn_id  = 8'($urandom);
    s.r.desc.rpc_id = 16'(id);
    s.r.data        = {16{$urandom}};
    outst[id] = '{d: s.r.data, flow: int'(s.f), node: n, lost_ok: (s.r.desc.conn == CONN_W'(2))};
    if (s.r.desc.conn == CONN_W'(2)) n_lost_expected++;
    sendq[n].push_back(s);
  endtask

  // corrupt the payload of the 25th RPC frame node A sends
  int a_frames = 0, a_beat = 0, a_conn1_frames = 0;
  bit a_cur_rpc;
  always @(negedge clk) begin
    corrupt[0] = 0; corrupt[1] = 0;
    if (tx_v[0] && a_beat == 6 && a_cur_rpc && a_frames == 25) corrupt[0] = 1;
  end
  always @(posedge clk) if (rst_n && tx_v[0] && tx_r[0]) begin
    if (tx_s[0]) begin
      a_cur_rpc = (tx_d[0][63:56] == PROTO_RPC);
      if (a_cur_rpc) a_frames++;
      if (tx_d[0][55:48] == 8'd1) a_conn1_frames++;
    end
    if (a_beat == 2 && a_cur_rpc && a_frames == 25) lost_id = int'(tx_d[0][15:0]);
    if (corrupt[0]) check(a_beat == 6, "corruption lands in the payload");
    a_beat = tx_e[0] ? 0 : a_beat + 1;
  end

  // ---------------- remote memory: host memory models ----------------
  line_t mem [2][logic [31:0]];
  line_t refm [logic [31:0]];
  logic [31:0] rd_pend [2][$];
  int rd_lat [2];
  rdma_cpl_t exp_cpl [$];
  int n_data, n_ack, n_rnack, n_lnack;

  always @(posedge clk) if (rst_n) begin
    for (int n = 0; n < 2; n++) begin
      if (mem_wr_valid[n] && mem_wr_ready[n]) mem[n][mem_wr_addr[n]] = mem_wr_data[n];
      if (mem_rd_valid[n] && mem_rd_ready[n]) rd_pend[n].push_back(mem_rd_addr[n]);
    end
    if (rdma_cpl_valid[0] && rdma_cpl_ready[0]) begin
      check(exp_cpl.size() > 0, "expected remote-memory completion");
      if (exp_cpl.size() > 0) begin
        rdma_cpl_t e;
        e = exp_cpl.pop_front();
        check(rdma_cpl[0].op == e.op && rdma_cpl[0].tag == e.tag, "completion op/tag");
        if (e.op == RD_DATA) begin check(rdma_cpl[0].data == e.data, "remote read data"); n_data++; end
        else if (e.op == RD_ACK) n_ack++;
        else if (e.data == '1) n_lnack++;
        else n_rnack++;
      end
    end
    check(!rdma_cpl_valid[1], "no completions at B");
  end

  always @(negedge clk) begin
    for (int n = 0; n < 2; n++) begin
      mem_rd_ready[n] = ($urandom_range(0, 2) != 0);
      mem_wr_ready[n] = ($urandom_range(0, 2) != 0);
      mem_rsp_valid[n] = 0;
      mem_rsp_data[n] = '0;
      if (rd_pend[n].size() > 0) begin
        if (rd_lat[n] == 0) begin
          logic [31:0] a;
          a = rd_pend[n].pop_front();
          mem_rsp_valid[n] = 1;
          mem_rsp_data[n] = mem[n].exists(a) ? mem[n][a] : '0;
          rd_lat[n] = $urandom_range(0, 5);
        end else rd_lat[n]--;
      end
      rdma_cpl_ready[n] = ($urandom_range(0, 3) != 0);
    end
  end

  logic [31:0] obase [16];
  int olines [16];
  task automatic rdma_op();
    rdma_req_t r;
    rdma_cpl_t e;
    int o;
    r.op     = ($urandom_range(0, 1) != 0) ? RD_WRITE : RD_READ;
    r.conn   = ($urandom_range(0, 9) == 0) ? CONN_W'(3) : CONN_W'(1);   // 3 is closed at A
    o        = $urandom_range(0, 7);
    r.obj    = OBJ_W'(o);
    r.offset = 24'($urandom_range(0, 5));
    r.tag    = 16'($urandom);
    r.data   = {16{$urandom}};
    e.tag = r.tag; e.data = '0;
    if (r.conn != CONN_W'(1)) begin
      e.op = RD_NACK; e.data = '1;
    end else if (o >= 6 || int'(r.offset) >= olines[o]) e.op = RD_NACK;
    else if (r.op == RD_READ) begin
      e.op = RD_DATA;
      e.data = refm.exists(obase[o] + 32'(r.offset)) ? refm[obase[o] + 32'(r.offset)] : '0;
    end else begin
      e.op = RD_ACK;
      refm[obase[o] + 32'(r.offset)] = r.data;
    end
    exp_cpl.push_back(e);
    @(negedge clk);
    rdma_req[0] = r;
    rdma_req_valid[0] = 1;
    @(posedge clk);
    while (!rdma_req_ready[0]) @(posedge clk);
    @(negedge clk);
    rdma_req_valid[0] = 0;
    while (exp_cpl.size() > 0) @(negedge clk);
  endtask

  // ---------------- watchdog ----------------
  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("watchdog: outstanding=%0d", outst.size());
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---------------- scenario ----------------
  initial begin
    logic [63:0] d;
    {m_full, m_flush, m_rr, m_static, m_stall, m_txbp, m_txdrop, m_rxdrop, m_csumdrop, m_nack, m_contend} = '0;
    {n_data, n_ack, n_rnack, n_lnack, nresp_ok, n_lost_expected} = '0;
    for (int n = 0; n < 2; n++) begin
      csr_wr[n] = 0; csr_addr[n] = 0; csr_wdata[n] = 0; nreq[n] = 0; rd_lat[n] = 0;
      rdma_req_valid[n] = 0; rdma_req[n] = '0; corrupt[n] = 0;
    end
    for (int f = 0; f < 4; f++) rr_flows_seen[f] = 0;
    slow_host[0] = 0; slow_host[1] = 0;
    repeat (4) @(posedge clk);
    rst_n = 1;
    // node A: 10.0.0.1, 4 flows, batch 4, static balancing, queues of 8
    csr_write(0, 16'h0000, 64'h0A00_0001);
    csr_write(0, 16'h0001, 4);
    csr_write(0, 16'h0002, 4);
    csr_write(0, 16'h0003, 8);
    csr_write(0, 16'h0007, 8);
    csr_write(0, 16'h0004, 0);
    csr_write(0, 16'h0005, 40);
    // node B: 10.0.0.2, 3 flows, batch 2, round robin, transmit queues of 6, receive queues of 3
    csr_write(1, 16'h0000, 64'h0A00_0002);
    csr_write(1, 16'h0001, 2);
    csr_write(1, 16'h0002, 3);
    csr_write(1, 16'h0003, 6);
    csr_write(1, 16'h0007, 3);
    csr_write(1, 16'h0004, 1);
    csr_write(1, 16'h0005, 30);
    // connection 1 joins A (port 100) and B (port 200); connection 2 is open
    // at A only
    csr_write(0, 16'h1001, {1'b1, 32'h0A00_0002, 16'd200, 15'd100});
    csr_write(1, 16'h1001, {1'b1, 32'h0A00_0001, 16'd100, 15'd200});
    csr_write(0, 16'h1002, {1'b1, 32'h0A00_0002, 16'd201, 15'd101});
    csr_read(0, 16'h1001, d);
    check(d == {1'b1, 32'h0A00_0002, 16'd200, 15'd100}, "connection read-back");
    csr_read(1, 16'h0002, d);
    check(d == 3, "soft register read-back");
    // objects 0..5 at node B
    for (int o = 0; o < 8; o++) begin
      olines[o] = $urandom_range(2, 6);
      obase[o]  = 32'(o * 64 + 1024);
      csr_write(1, 16'h2000 + 16'(o), {(o < 6) ? 1'b1 : 1'b0, 7'd0, 24'(olines[o]), obase[o]});
    end
    csr_write(0, 16'h0006, 1);
    csr_write(1, 16'h0006, 1);
    // traffic
    fork
      begin
        for (int it = 0; it < 3000; it++) begin
          @(negedge clk);
          if ($urandom_range(0, 3) == 0 && sendq[0].size() < 40) new_request(0, 4);
          if ($urandom_range(0, 5) == 0 && sendq[1].size() < 40) new_request(1, 3);
          if (it >= 1500 && it < 1600 && sendq[0].size() < 60) new_request(0, 4);   // burst
          slow_host[1] = (it >= 1500 && it < 1900);   // B's threads fall behind
        end
      end
      for (int i = 0; i < 60; i++) rdma_op();
    join
    // drain
    begin
      int w;
      w = 0;
      while (w < 20000 && (sendq[0].size() > 0 || sendq[1].size() > 0 || outst.size() > n_lost_expected + 1)) begin
        @(negedge clk); w++;
      end
      repeat (300) @(negedge clk);
    end
    // only requests on connection 2 and the corrupted frame go unanswered
    begin
      int left_bad;
      left_bad = 0;
      foreach (outst[id]) if (!outst[id].lost_ok && id != lost_id) left_bad++;
      check(left_bad == 0, "every answerable request answered");
      check(outst.size() <= n_lost_expected + 1, "no extra losses");
    end
    // counters over the register port
    csr_read(0, 16'h3001, d);
    check(int'(d[63:32]) == a_conn1_frames, "A frames sent on connection 1");
    csr_read(1, 16'h4000, d);
    check(d[31:0] != 0, "B counted drops");
    // mechanism counters of both nodes against the counts seen here
    begin
      int tot [5];
      int expct [5];
      logic [63:0] v;
      expct = '{m_full, m_flush, m_rr, m_stall, m_nack};
      for (int i = 0; i < 5; i++) begin
        tot[i] = 0;
        for (int n = 0; n < 2; n++) begin
          csr_read(n, 16'h4002 + 16'(i), v);
          tot[i] += int'(v[31:0]);
        end
        check(tot[i] == expct[i], $sformatf("mechanism counter %0d read over the register port", i));
      end
      csr_read(0, 16'h4001, v);
      check(v == 2, "A has two open connections");
    end
    csr_write(0, 16'h3000, 0);
    csr_read(0, 16'h3001, d);
    check(d == 0, "counters cleared");
    csr_read(0, 16'h4002, d);
    check(d == 0, "mechanism counters cleared");
    $display("requests A=%0d B=%0d answered=%0d unanswered=%0d (conn2=%0d, corrupted id=%0d)",
             nreq[0], nreq[1], nresp_ok, outst.size(), n_lost_expected, lost_id);
    $display("shortest RPC round trip, host write to response at the host: %0d cycles", rtt_min);
    // two frames of 11 beats each cross the link one way each
    check(rtt_min >= 2 * BEATS && rtt_min < 400, "round trip within bounds");
    $display("rdma data=%0d ack=%0d remote_nack=%0d local_nack=%0d", n_data, n_ack, n_rnack, n_lnack);
    $display("full=%0d flush=%0d rr=%0d static=%0d stall=%0d txbp=%0d txdrop=%0d rxdrop=%0d csumdrop=%0d nack=%0d contend=%0d",
             m_full, m_flush, m_rr, m_static, m_stall, m_txbp, m_txdrop, m_rxdrop, m_csumdrop, m_nack, m_contend);
    check(m_full > 0,     "mechanism: full batch");
    check(m_flush > 0,    "mechanism: timed-out batch");
    check(m_rr > 0,       "mechanism: round-robin balancing");
    check(m_static > 0,   "mechanism: static balancing");
    check(rr_flows_seen[0] && rr_flows_seen[1] && rr_flows_seen[2], "round robin reaches every active flow");
    check(m_stall > 0,    "mechanism: receive stall");
    check(m_txbp > 0,     "mechanism: host back-pressure");
    check(m_txdrop > 0,   "mechanism: transmit drop");
    check(m_rxdrop > 0,   "mechanism: receive drop");
    check(m_csumdrop == 1, "mechanism: checksum drop (exactly the corrupted frame)");
    check(m_nack > 0,     "mechanism: remote-memory NACK");
    check(m_contend > 0,  "mechanism: RPC and RDMA contend for the PHY");
    check(n_data > 0 && n_ack > 0 && n_lnack > 0, "remote-memory completions of every kind");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
