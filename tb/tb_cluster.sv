// tb_cluster - the 12-server evaluation cluster: one fabric per server,
// all joined through a top-of-rack switch, with a full mesh of connections.
//
// Twelve hivemind_fabric_top instances at their default sizes hang off a
// behavioural switch model that takes whole frames from each port and
// forwards them, in arrival order, to the port that owns the destination IP
// address (10.0.0.1 + server number). Each pair of servers (i, j) shares one
// cluster-wide connection id, 66 ids in all; every server opens the 11 that
// involve it. Every server's host then calls procedures on random peers
// from random flows while answering the calls it receives with the inverted
// payload. Checked: every call is answered exactly once, at the calling
// server and flow, with the right payload; no frame or RPC is dropped
// anywhere; every server reports 11 open connections; the packet counters
// of every server agree with the frames the switch carried.
module tb_cluster;
  import hm_pkg::*;

  localparam int N = 12;
  localparam int CALLS = 40;            // calls issued by each server

  logic clk = 0, rst_n = 0;
  logic csr_wr [N];
  logic [15:0] csr_addr [N];
  logic [63:0] csr_wdata [N], csr_rdata [N];
  logic host_tx_valid [N], host_tx_ready [N];
  rpc_t host_tx_rpc [N];
  logic [FLOW_W-1:0] host_tx_flow [N];
  logic host_rx_valid [N], host_rx_ready [N], host_rx_last [N];
  rpc_t host_rx_rpc [N];
  logic [FLOW_W-1:0] host_rx_flow [N];
  logic rdma_req_ready [N], rdma_cpl_valid [N];
  rdma_cpl_t rdma_cpl [N];
  logic mem_rd_valid [N], mem_wr_valid [N];
  logic [ADDR_W-1:0] mem_rd_addr [N], mem_wr_addr [N];
  line_t mem_wr_data [N];
  logic tx_v [N], tx_s [N], tx_e [N];
  logic [AVST_W-1:0] tx_d [N];
  logic rx_v [N], rx_r [N], rx_s [N], rx_e [N];
  logic [AVST_W-1:0] rx_d [N];

  for (genvar n = 0; n < N; n++) begin : g_node
    hivemind_fabric_top u_top (
      .clk, .rst_n,
      .csr_wr(csr_wr[n]), .csr_addr(csr_addr[n]), .csr_wdata(csr_wdata[n]), .csr_rdata(csr_rdata[n]),
      .host_tx_valid(host_tx_valid[n]), .host_tx_ready(host_tx_ready[n]),
      .host_tx_rpc(host_tx_rpc[n]), .host_tx_flow(host_tx_flow[n]),
      .host_rx_valid(host_rx_valid[n]), .host_rx_ready(host_rx_ready[n]),
      .host_rx_rpc(host_rx_rpc[n]), .host_rx_flow(host_rx_flow[n]), .host_rx_last(host_rx_last[n]),
      .rdma_req_valid(1'b0), .rdma_req_ready(rdma_req_ready[n]), .rdma_req('0),
      .rdma_cpl_valid(rdma_cpl_valid[n]), .rdma_cpl_ready(1'b1), .rdma_cpl(rdma_cpl[n]),
      .mem_rd_valid(mem_rd_valid[n]), .mem_rd_ready(1'b1), .mem_rd_addr(mem_rd_addr[n]),
      .mem_rsp_valid(1'b0), .mem_rsp_data('0),
      .mem_wr_valid(mem_wr_valid[n]), .mem_wr_ready(1'b1), .mem_wr_addr(mem_wr_addr[n]),
      .mem_wr_data(mem_wr_data[n]),
      .avst_tx_valid(tx_v[n]), .avst_tx_ready(1'b1), .avst_tx_data(tx_d[n]),
      .avst_tx_sop(tx_s[n]), .avst_tx_eop(tx_e[n]),
      .avst_rx_valid(rx_v[n]), .avst_rx_ready(rx_r[n]), .avst_rx_data(rx_d[n]),
      .avst_rx_sop(rx_s[n]), .avst_rx_eop(rx_e[n])
    );
  end

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 15) $display("FAIL %s at %0t", what, $time); end
  endtask

  // cluster-wide id of the connection between servers i and j (i != j)
  function automatic int pair_id(input int i, input int j);
    int a, b;
    a = (i < j) ? i : j;
    b = (i < j) ? j : i;
    return a * N - a * (a + 1) / 2 + (b - a - 1);
  endfunction

  // ---------------- top-of-rack switch ----------------
  typedef logic [AVST_W-1:0] beat_q_t [$];
  logic [AVST_W-1:0] inbuf [N][$];
  beat_q_t outq [N][$];
  int outbeat [N];
  int carried [N];                      // frames sent by each server

  always @(posedge clk) if (rst_n) begin
    for (int n = 0; n < N; n++) begin
      if (tx_v[n]) begin
        inbuf[n].push_back(tx_d[n]);
        if (tx_e[n]) begin
          int dst;
          dst = int'(inbuf[n][0][31:0]) - 32'h0A00_0001;
          check(dst >= 0 && dst < N && dst != n, "switch: destination is another server");
          if (dst >= 0 && dst < N) outq[dst].push_back(inbuf[n]);
          carried[n]++;
          inbuf[n].delete();
        end
      end
      if (rx_v[n] && rx_r[n]) begin
        outbeat[n]++;
        if (outbeat[n] == BEATS) begin
          void'(outq[n].pop_front());
          outbeat[n] = 0;
        end
      end
    end
  end

  always @(negedge clk) begin
    for (int n = 0; n < N; n++) begin
      rx_v[n] = outq[n].size() > 0;
      rx_d[n] = rx_v[n] ? outq[n][0][outbeat[n]] : '0;
      rx_s[n] = rx_v[n] && outbeat[n] == 0;
      rx_e[n] = rx_v[n] && outbeat[n] == BEATS - 1;
    end
  end

  // ---------------- hosts ----------------
  typedef struct { rpc_t r; logic [FLOW_W-1:0] f; } send_t;
  send_t sendq [N][$];
  typedef struct { line_t d; int flow; int node; } outst_t;
  outst_t outst [int];
  int answered = 0, served = 0;

  always @(posedge clk) if (rst_n) begin
    for (int n = 0; n < N; n++) begin
      if (host_tx_valid[n] && host_tx_ready[n]) void'(sendq[n].pop_front());
      if (host_rx_valid[n] && host_rx_ready[n]) begin
        rpc_t r;
        r = host_rx_rpc[n];
        if (r.desc.kind == RPC_REQ) begin
          send_t s;
          s.r = r;
          s.r.desc.kind = RPC_RESP;
          s.r.data = ~r.data;
          s.f = host_rx_flow[n];
          sendq[n].push_back(s);
          served++;
        end else begin
          int id;
          id = int'(r.desc.rpc_id);
          check(outst.exists(id), "answer to a known call");
          if (outst.exists(id)) begin
            check(outst[id].node == n, "answer at the calling server");
            check(int'(host_rx_flow[n]) == outst[id].flow, "answer to the calling flow");
            check(r.data == ~outst[id].d, "answer payload");
            outst.delete(id);
            answered++;
          end
        end
      end
    end
  end

  always @(negedge clk) begin
    for (int n = 0; n < N; n++) begin
      host_tx_valid[n] = sendq[n].size() > 0;
      host_tx_rpc[n]   = (sendq[n].size() > 0) ? sendq[n][0].r : '0;
      host_tx_flow[n]  = (sendq[n].size() > 0) ? sendq[n][0].f : '0;
      host_rx_ready[n] = ($urandom_range(0, 3) != 0);
    end
  end

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

  initial begin
    repeat (300000) @(posedge clk);
    failures++;
    $display("watchdog: %0d calls unanswered", outst.size());
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [63:0] d;
    int ncall [N];
    for (int n = 0; n < N; n++) begin
      csr_wr[n] = 0; csr_addr[n] = 0; csr_wdata[n] = 0; outbeat[n] = 0; carried[n] = 0; ncall[n] = 0;
      rx_v[n] = 0; rx_d[n] = 0; rx_s[n] = 0; rx_e[n] = 0;
    end
    repeat (4) @(posedge clk);
    rst_n = 1;
    // every server: its IP, 4 flows, batch 4, round robin; its 11 connections
    for (int n = 0; n < N; n++) begin
      csr_write(n, 16'h0000, 64'h0A00_0001 + 64'(n));
      csr_write(n, 16'h0001, 4);
      csr_write(n, 16'h0004, 1);
      csr_write(n, 16'h0005, 32);
      for (int m = 0; m < N; m++) if (m != n) begin
        int k;
        k = pair_id(n, m);
        // the lower-numbered server of a pair listens on 2000+k, the other on 3000+k
        csr_write(n, 16'h1000 + 16'(k), {1'b1, 32'h0A00_0001 + 32'(m),
                  16'((n < m) ? 3000 + k : 2000 + k), 15'((n < m) ? 2000 + k : 3000 + k)});
      end
      csr_write(n, 16'h0006, 1);
    end
    for (int n = 0; n < N; n++) begin
      csr_read(n, 16'h4001, d);
      check(d == 64'(N - 1), "11 open connections per server");
    end
    // calls
    for (int it = 0; it < CALLS * 64 && ncall.sum() < N * CALLS; it++) begin
      @(negedge clk);
      for (int n = 0; n < N; n++) begin
        if (ncall[n] < CALLS && $urandom_range(0, 7) == 0) begin
          send_t s;
          int peer, id;
          peer = $urandom_range(0, N - 2);
          if (peer >= n) peer++;
          id = n * 1024 + ncall[n];
          ncall[n]++;
          s.f             = FLOW_W'($urandom_range(0, 3));
          s.r.desc.kind   = RPC_REQ;
          s.r.desc.conn   = CONN_W'(pair_id(n, peer));
          s.r.desc.flow   = s.f;
          s.r.desc.fn_id  = 8'(peer);
          s.r.desc.rpc_id = 16'(id);
          s.r.data        = {16{$urandom}};
          outst[id] = '{d: s.r.data, flow: int'(s.f), node: n};
          sendq[n].push_back(s);
        end
      end
    end
    begin
      int w;
      w = 0;
      while (w < 50000 && outst.size() > 0) begin @(negedge clk); w++; end
      repeat (50) @(negedge clk);
    end
    check(outst.size() == 0, "every call answered");
    for (int n = 0; n < N; n++) begin
      int tx;
      tx = 0;
      for (int m = 0; m < N; m++) if (m != n) begin
        csr_read(n, 16'h3000 + 16'(pair_id(n, m)), d);
        tx += int'(d[63:32]);
      end
      check(tx == carried[n], "per-connection transmit counters add up to the frames carried");
      csr_read(n, 16'h4000, d);
      check(d == 0, "no drops");
    end
    $display("calls issued=%0d served=%0d answered=%0d, frames carried=%0d",
             N * CALLS, served, answered, carried.sum());
    check(answered == N * CALLS && served == N * CALLS, "call counts");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
