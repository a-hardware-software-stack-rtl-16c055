// tb_rpc_unit - self-checking test of the RPC layer.
//
// Queues and the connection table are modelled in the testbench. Transmit:
// every RPC forwarded to the transport is checked against the head of the
// expected flow (round robin over the active flows that hold RPCs) and must
// carry the peer address of its connection; RPCs on closed connections must
// be dropped. Receive: every RPC leaving the transport queue must be pushed
// to exactly the flow the reference picks - the issuing flow for responses,
// conn mod active_flows (static) or the next flow in turn (round robin) for
// requests - or dropped when the connection is closed or the port is wrong,
// and must wait while the chosen flow queue is full. The run fails if a
// drop, a stall or either balancing scheme never happened.
module tb_rpc_unit;
  import hm_pkg::*;
  localparam int NF = 4;

  logic clk = 0, rst_n = 0;
  logic cfg_enable = 1;
  logic [7:0] cfg_active_flows;
  logic cfg_lb_rr;
  logic fq_tx_valid [NF];
  rpc_t fq_tx_rpc [NF];
  logic fq_tx_pop [NF];
  logic fq_rx_push [NF];
  logic fq_rx_full [NF];
  rpc_t fq_rx_rpc;
  logic nq_tx_push, nq_tx_full;
  net_rpc_t nq_tx_data;
  logic nq_rx_valid;
  rpc_t nq_rx_rpc;
  logic [15:0] nq_rx_dst_port;
  logic nq_rx_pop;
  logic [CONN_W-1:0] cm_id [2];
  conn_entry_t cm_entry [2];
  logic tx_drop, rx_drop, rx_lb_rr_used, rx_stall;

  rpc_unit #(.NUM_FLOWS(NF)) dut (.*);
  always #5 clk = ~clk;

  conn_entry_t tbl [64];
  always_comb for (int p = 0; p < 2; p++) cm_entry[p] = tbl[cm_id[p]];

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL %s at %0t", what, $time); end
  endtask

  rpc_t txq [NF][$];
  rpc_t rxq [$];
  logic [15:0] rxport [$];
  int tx_ptr = 0, rr_ptr = 0;
  int n_txdrop = 0, n_rxdrop = 0, n_stall = 0, n_static = 0, n_rr = 0, n_resp = 0, n_tx = 0;

  function automatic rpc_t rnd_rpc(input bit resp);
    rpc_t r;
    r.desc = rpc_desc_t'({$urandom, $urandom});
    r.desc.kind = resp ? RPC_RESP : RPC_REQ;
    r.desc.conn = CONN_W'($urandom_range(0, 15));
    r.desc.flow = FLOW_W'($urandom_range(0, NF - 1));
    r.data = {16{$urandom}};
    return r;
  endfunction

  function automatic int nfl();
    return int'(cfg_active_flows);
  endfunction

  always @(posedge clk) if (rst_n) begin
    // ---- transmit reference ----
    begin
      int sel, pops;
      sel = -1; pops = 0;
      for (int i = 0; i < NF; i++) begin
        int f;
        f = (tx_ptr + i) % nfl();
        if (sel < 0 && i < nfl() && txq[f].size() > 0) sel = f;
      end
      for (int f = 0; f < NF; f++) pops += int'(fq_tx_pop[f]);
      if (sel >= 0 && !tbl[txq[sel][0].desc.conn].valid) begin
        check(tx_drop && fq_tx_pop[sel] && !nq_tx_push && pops == 1, "tx drop on closed connection");
        n_txdrop++;
      end else if (sel >= 0 && !nq_tx_full) begin
        conn_entry_t e;
        e = tbl[txq[sel][0].desc.conn];
        check(nq_tx_push && fq_tx_pop[sel] && pops == 1, "tx forward from round-robin flow");
        check(nq_tx_data.rpc == txq[sel][0], "tx rpc");
        check(nq_tx_data.remote_ip == e.remote_ip && nq_tx_data.remote_port == e.remote_port
              && nq_tx_data.local_port == e.local_port, "tx address");
        n_tx++;
      end else begin
        check(!nq_tx_push && pops == 0, "tx idle");
      end
      if (pops == 1 && sel >= 0) begin
        void'(txq[sel].pop_front());
        tx_ptr = (sel + 1 >= nfl()) ? 0 : sel + 1;
      end
    end
    // ---- receive reference ----
    if (rxq.size() > 0) begin
      rpc_t r;
      conn_entry_t e;
      int exp_f, pushes;
      bit ok;
      r = rxq[0];
      e = tbl[r.desc.conn];
      ok = e.valid && e.local_port == rxport[0];
      if (r.desc.kind == RPC_RESP) begin
        exp_f = int'(r.desc.flow);
        if (exp_f >= nfl()) ok = 0;
      end else if (cfg_lb_rr) exp_f = rr_ptr;
      else exp_f = int'(r.desc.conn) % nfl();
      pushes = 0;
      for (int f = 0; f < NF; f++) pushes += int'(fq_rx_push[f]);
      if (!ok) begin
        check(rx_drop && nq_rx_pop && pushes == 0, "rx drop");
        n_rxdrop++;
        void'(rxq.pop_front()); void'(rxport.pop_front());
      end else if (fq_rx_full[exp_f]) begin
        check(rx_stall && !nq_rx_pop && pushes == 0, "rx stall on full flow queue");
        n_stall++;
      end else begin
        check(nq_rx_pop && pushes == 1 && fq_rx_push[exp_f], "rx steering");
        check(fq_rx_rpc == r, "rx rpc");
        if (r.desc.kind == RPC_RESP) n_resp++;
        else if (cfg_lb_rr) begin n_rr++; rr_ptr = (rr_ptr + 1 >= nfl()) ? 0 : rr_ptr + 1; end
        else n_static++;
        void'(rxq.pop_front()); void'(rxport.pop_front());
      end
    end else check(!nq_rx_pop, "rx idle");
  end

  // drive queue heads from the model, shortly after the stimulus
  always @(negedge clk) begin
    #1;
    for (int f = 0; f < NF; f++) begin
      fq_tx_valid[f] = txq[f].size() > 0;
      fq_tx_rpc[f]   = (txq[f].size() > 0) ? txq[f][0] : '0;
    end
    nq_rx_valid    = rxq.size() > 0;
    nq_rx_rpc      = (rxq.size() > 0) ? rxq[0] : '0;
    nq_rx_dst_port = (rxport.size() > 0) ? rxport[0] : '0;
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int i = 0; i < 64; i++) begin
      tbl[i].valid = (i % 7 != 3);
      tbl[i].remote_ip = 32'h0A00_0000 + 32'(i);
      tbl[i].remote_port = 16'(4000 + i);
      tbl[i].local_port = 16'(5000 + i);
    end
    for (int f = 0; f < NF; f++) begin fq_tx_valid[f] = 0; fq_tx_rpc[f] = '0; fq_rx_full[f] = 0; end
    nq_rx_valid = 0; nq_rx_rpc = '0; nq_rx_dst_port = 0; nq_tx_full = 0;
    cfg_active_flows = 3; cfg_lb_rr = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int it = 0; it < 6000; it++) begin
      @(negedge clk);
      if (it == 2000) cfg_lb_rr = 1;
      if (it == 4000) cfg_active_flows = 4;
      nq_tx_full = ($urandom_range(0, 4) == 0);
      for (int f = 0; f < NF; f++) fq_rx_full[f] = ($urandom_range(0, 5) == 0);
      if ($urandom_range(0, 1)) begin
        int f;
        f = $urandom_range(0, nfl() - 1);
        if (txq[f].size() < 6) txq[f].push_back(rnd_rpc(0));
      end
      if ($urandom_range(0, 1) && rxq.size() < 6) begin
        rpc_t r;
        r = rnd_rpc($urandom_range(0, 2) == 0);
        rxq.push_back(r);
        rxport.push_back(($urandom_range(0, 9) == 0) ? 16'd1 : 16'(5000 + int'(r.desc.conn)));
      end
    end
    $display("tx=%0d txdrop=%0d rxdrop=%0d stall=%0d static=%0d rr=%0d resp=%0d",
             n_tx, n_txdrop, n_rxdrop, n_stall, n_static, n_rr, n_resp);
    check(n_tx > 0 && n_txdrop > 0 && n_rxdrop > 0 && n_stall > 0, "drops and stalls happened");
    check(n_static > 0 && n_rr > 0 && n_resp > 0, "both schemes and responses happened");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
