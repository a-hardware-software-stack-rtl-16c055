// tb_cpu_nic_if - self-checking test of the CPU-NIC interface.
//
// The flow queues are modelled in the testbench. Receive direction: RPCs are
// injected into the flow receive queues; every line written to the host is
// checked against the head of its flow's queue, every batch is checked to be
// min(queued, batch size) lines long, sent on consecutive cycles while the
// host is ready, with host_rx_last on its final line, and a short batch is
// only allowed once its flow's oldest RPC has waited the flush timeout.
// Transmit direction: random host writes are checked to land in the right
// flow queue, in order; writes to an inactive flow and to a full queue must
// be held off. The run fails if a full batch, a timed-out batch or transmit
// back-pressure never happened.
module tb_cpu_nic_if;
  import hm_pkg::*;
  localparam int NF = 4;
  localparam int TXLIM = 4;

  logic clk = 0, rst_n = 0;
  logic cfg_enable;
  logic [7:0] cfg_batch, cfg_active_flows;
  logic [15:0] cfg_flush_timeout;
  logic host_tx_valid, host_tx_ready;
  rpc_t host_tx_rpc;
  logic [FLOW_W-1:0] host_tx_flow;
  logic host_rx_valid, host_rx_ready, host_rx_last;
  rpc_t host_rx_rpc;
  logic [FLOW_W-1:0] host_rx_flow;
  logic fq_tx_push [NF], fq_tx_full [NF];
  rpc_t fq_tx_data;
  logic [7:0] fq_rx_count [NF];
  rpc_t fq_rx_rpc [NF];
  logic fq_rx_pop [NF];
  logic batch_full_evt, batch_flush_evt;

  cpu_nic_if #(.NUM_FLOWS(NF)) dut (.*);
  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL %s at %0t", what, $time); end
  endtask

  rpc_t rxq [NF][$];
  rpc_t txq [NF][$];
  rpc_t tx_expect [NF][$];
  int   inj [NF];
  int   since [NF];
  int   snap [NF], snap_age [NF];
  bit   snap_full;
  int   cycle = 0;
  bit   in_batch = 0;
  int   batch_left = 0, batch_flow = 0;
  int   n_full = 0, n_flush = 0, n_txbp = 0, n_delivered = 0, n_injected = 0, n_txok = 0;
  bit   drain_tx = 0;

  function automatic rpc_t rnd_rpc();
    rpc_t r;
    r.desc = rpc_desc_t'({$urandom, $urandom});
    r.desc.kind = RPC_REQ;
    r.data = {16{$urandom}};
    return r;
  endfunction

  always @(posedge clk) begin
    cycle++;
    if (rst_n) begin
      // state the design saw in this cycle
      for (int f = 0; f < NF; f++) begin
        if (host_tx_valid && int'(host_tx_flow) == f && txq[f].size() >= TXLIM)
          check(!host_tx_ready, "full queue held off");
      end
      if (batch_full_evt || batch_flush_evt) begin
        for (int f = 0; f < NF; f++) begin
          snap[f] = rxq[f].size();
          snap_age[f] = cycle - since[f];
        end
        snap_full = batch_full_evt;
      end
      // transmit: pushes
      for (int f = 0; f < NF; f++) if (fq_tx_push[f]) begin
        check(f < int'(cfg_active_flows), "push to inactive flow");
        check(tx_expect[f].size() > 0 && fq_tx_data == tx_expect[f][0], "tx data/order");
        if (tx_expect[f].size() > 0) void'(tx_expect[f].pop_front());
        txq[f].push_back(fq_tx_data);
        n_txok++;
      end
      if (host_tx_valid && !host_tx_ready) n_txbp++;
      if (host_tx_valid && host_tx_ready) begin
        int ones;
        ones = 0;
        for (int f = 0; f < NF; f++) ones += int'(fq_tx_push[f]);
        check(ones == 1 && fq_tx_push[host_tx_flow], "one push per accepted write");
      end
      if (host_tx_valid && int'(host_tx_flow) >= int'(cfg_active_flows))
        check(!host_tx_ready, "inactive flow held off");
      if (drain_tx) for (int f = 0; f < NF; f++) if (txq[f].size() > 0 && $urandom_range(0, 1)) void'(txq[f].pop_front());

      // receive: batches
      if (in_batch) check(host_rx_valid, "batch lines back to back");
      if (host_rx_valid && host_rx_ready) begin
        int f;
        f = int'(host_rx_flow);
        if (!in_batch) begin
          int q;
          q = snap[f];
          batch_left = (q < int'(cfg_batch)) ? q : int'(cfg_batch);
          batch_flow = f;
          in_batch   = 1;
          check(snap_full == (q >= int'(cfg_batch)), "batch kind");
          if (q >= int'(cfg_batch)) n_full++;
          else begin
            n_flush++;
            check(snap_age[f] >= int'(cfg_flush_timeout), "short batch only after timeout");
          end
        end
        check(f == batch_flow, "flow constant in batch");
        check(rxq[f].size() > 0 && host_rx_rpc == rxq[f][0], "rx data/order");
        check(fq_rx_pop[f], "pop matches transfer");
        check(host_rx_last == (batch_left == 1), "last flag");
        batch_left--;
        if (batch_left == 0) in_batch = 0;
        n_delivered++;
      end
      for (int f = 0; f < NF; f++) if (fq_rx_pop[f]) begin
        check(host_rx_valid && host_rx_ready && int'(host_rx_flow) == f, "no stray pop");
        if (rxq[f].size() > 0) void'(rxq[f].pop_front());
        if (rxq[f].size() > 0) since[f] = cycle;   // remaining lines age from now
      end
      for (int f = 0; f < NF; f++) begin
        if (inj[f] > 0 && rxq[f].size() == 0) since[f] = cycle;
        while (inj[f] > 0) begin rxq[f].push_back(rnd_rpc()); inj[f]--; n_injected++; end
      end
    end
    for (int f = 0; f < NF; f++) begin
      fq_rx_count[f] <= 8'(rxq[f].size());
      fq_rx_rpc[f]   <= (rxq[f].size() > 0) ? rxq[f][0] : '0;
      fq_tx_full[f]  <= (txq[f].size() >= TXLIM);
    end
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int f = 0; f < NF; f++) begin inj[f] = 0; since[f] = 0; end
    cfg_enable = 1; cfg_batch = 4; cfg_active_flows = 3; cfg_flush_timeout = 50;
    host_tx_valid = 0; host_tx_rpc = '0; host_tx_flow = 0; host_rx_ready = 1;
    repeat (3) @(posedge clk);
    @(negedge clk); rst_n = 1;
    // full batch: four RPCs on flow 2 must come back within a few cycles
    @(negedge clk); inj[2] = 4;
    repeat (12) @(negedge clk);
    check(n_full == 1 && n_delivered == 4, "full batch delivered promptly");
    // short batch: three RPCs on flow 1 wait for the flush timeout
    inj[1] = 3;
    repeat (30) @(negedge clk);
    check(n_delivered == 4, "short batch held");
    repeat (40) @(negedge clk);
    check(n_delivered == 7 && n_flush == 1, "short batch flushed after timeout");
    // random traffic with a stalling host
    cfg_batch = 3; cfg_flush_timeout = 20;
    for (int it = 0; it < 3000; it++) begin
      @(negedge clk);
      host_rx_ready = ($urandom_range(0, 3) != 0);
      if ($urandom_range(0, 9) == 0) inj[$urandom_range(0, 2)] = $urandom_range(1, 5);
      drain_tx = ($urandom_range(0, 3) == 0);
      if (!host_tx_valid || host_tx_ready) begin
        if (host_tx_valid && host_tx_ready && int'(host_tx_flow) < 3) ;  // accepted
        host_tx_valid = $urandom_range(0, 1);
        host_tx_flow  = FLOW_W'($urandom_range(0, 3));
        host_tx_rpc   = rnd_rpc();
        if (host_tx_valid && int'(host_tx_flow) < 3) tx_expect[host_tx_flow].push_back(host_tx_rpc);
      end else if (int'(host_tx_flow) >= 3) begin
        host_tx_valid = 0;    // give up on the inactive flow
      end
    end
    @(negedge clk); host_tx_valid = 0; host_rx_ready = 1; drain_tx = 1;
    repeat (200) @(negedge clk);
    check(n_delivered == n_injected, "all received RPCs delivered");
    for (int f = 0; f < NF; f++) check(tx_expect[f].size() == 0, "all host writes queued");
    check(n_full > 0, "full batches happened");
    check(n_flush > 0, "timed-out batches happened");
    check(n_txbp > 0, "transmit back-pressure happened");
    $display("full=%0d flush=%0d delivered=%0d tx=%0d txbp=%0d", n_full, n_flush, n_delivered, n_txok, n_txbp);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
