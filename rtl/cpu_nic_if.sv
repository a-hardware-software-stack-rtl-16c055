// cpu_nic_if - CPU-NIC interface of the fabric's NIC region.
//
// Connects the host's cache-line channel to the per-flow RPC queues. The host
// writes each outgoing RPC (one 64 B line plus descriptor) together with its
// flow number; the line goes into that flow's transmit queue, and the host is
// held off (host_tx_ready low) while the queue is full. In the other
// direction, received RPCs wait in the flow receive queues and are written to
// the host in batches: a flow becomes eligible once it holds `cfg_batch`
// RPCs, or once its oldest RPC has waited `cfg_flush_timeout` cycles; the
// eligible flows are served round robin. A batch is min(queued, batch) lines
// sent back to back; host_rx_last marks the final line of a batch.
//
// The host-side transport (the vendor's coherent CCI-P channel over UPI) is
// replaced by a valid/ready line interface. That the host-to-fabric transfer
// size is a run-time "batch size" comes from the description of the fabric;
// the eligibility rule and the flush timeout are this design's choice.
//
// Timing: a host write reaches the queue at the clock edge it is accepted.
// A batch starts the cycle after a flow becomes eligible and then moves one
// line per cycle while host_rx_ready is high.
module cpu_nic_if
  import hm_pkg::*;
#(
  parameter int unsigned NUM_FLOWS = 4
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              cfg_enable,
  input  logic [7:0]        cfg_batch,
  input  logic [7:0]        cfg_active_flows,
  input  logic [15:0]       cfg_flush_timeout,
  // host -> fabric
  input  logic              host_tx_valid,
  output logic              host_tx_ready,
  input  rpc_t              host_tx_rpc,
  input  logic [FLOW_W-1:0] host_tx_flow,
  // fabric -> host
  output logic              host_rx_valid,
  input  logic              host_rx_ready,
  output rpc_t              host_rx_rpc,
  output logic [FLOW_W-1:0] host_rx_flow,
  output logic              host_rx_last,
  // flow transmit queues
  output logic              fq_tx_push [NUM_FLOWS],
  input  logic              fq_tx_full [NUM_FLOWS],
  output rpc_t              fq_tx_data,
  // flow receive queues (heads)
  input  logic [7:0]        fq_rx_count [NUM_FLOWS],
  input  rpc_t              fq_rx_rpc   [NUM_FLOWS],
  output logic              fq_rx_pop   [NUM_FLOWS],
  // events
  output logic              batch_full_evt,
  output logic              batch_flush_evt
);

  localparam int unsigned FW = (NUM_FLOWS > 1) ? $clog2(NUM_FLOWS) : 1;

  logic [7:0] nflows, batch;
  assign nflows = (cfg_active_flows == 8'd0) ? 8'd1 :
                  (cfg_active_flows > 8'(NUM_FLOWS)) ? 8'(NUM_FLOWS) : cfg_active_flows;
  assign batch  = (cfg_batch == 8'd0) ? 8'd1 : cfg_batch;

  // ---------------- host -> fabric ----------------
  logic tx_flow_ok;
  assign tx_flow_ok    = (8'(host_tx_flow) < nflows);
  assign host_tx_ready = cfg_enable && tx_flow_ok && !fq_tx_full[FW'(host_tx_flow)];
  assign fq_tx_data    = host_tx_rpc;
  always_comb begin
    for (int i = 0; i < NUM_FLOWS; i++)
      fq_tx_push[i] = host_tx_valid && host_tx_ready && (FW'(host_tx_flow) == FW'(i));
  end

  // ---------------- fabric -> host ----------------
  logic [15:0]   age [NUM_FLOWS];
  logic          sending;
  logic [FW-1:0] cur, rr_ptr;
  logic [7:0]    remaining;

  logic          pick_found, pick_full;
  logic [FW-1:0] pick;

  always_comb begin
    logic [FW-1:0] f;
    pick_found = 1'b0;
    pick_full  = 1'b0;
    pick       = '0;
    f          = rr_ptr;
    for (int i = 0; i < NUM_FLOWS; i++) begin
      if (!pick_found && 8'(f) < nflows && fq_rx_count[f] != 8'd0 &&
          (fq_rx_count[f] >= batch || age[f] >= cfg_flush_timeout)) begin
        pick_found = 1'b1;
        pick       = f;
        pick_full  = fq_rx_count[f] >= batch;
      end
      f = (8'(f) + 8'd1 >= nflows) ? '0 : f + FW'(1);
    end
  end

  assign host_rx_valid = sending;
  assign host_rx_rpc   = fq_rx_rpc[cur];
  assign host_rx_flow  = FLOW_W'(cur);
  assign host_rx_last  = sending && (remaining == 8'd1);

  always_comb begin
    for (int i = 0; i < NUM_FLOWS; i++)
      fq_rx_pop[i] = sending && host_rx_ready && (cur == FW'(i));
  end

  assign batch_full_evt  = cfg_enable && !sending && pick_found && pick_full;
  assign batch_flush_evt = cfg_enable && !sending && pick_found && !pick_full;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      sending   <= 1'b0;
      cur       <= '0;
      rr_ptr    <= '0;
      remaining <= '0;
      for (int i = 0; i < NUM_FLOWS; i++) age[i] <= '0;
    end else begin
      for (int i = 0; i < NUM_FLOWS; i++) begin
        if (fq_rx_count[i] == 8'd0 || (sending && cur == FW'(i)))
          age[i] <= '0;
        else if (age[i] != 16'hFFFF)
          age[i] <= age[i] + 16'd1;
      end
      if (!sending) begin
        if (cfg_enable && pick_found) begin
          sending   <= 1'b1;
          cur       <= pick;
          remaining <= (fq_rx_count[pick] < batch) ? fq_rx_count[pick] : batch;
          rr_ptr    <= (8'(pick) + 8'd1 >= nflows) ? '0 : pick + FW'(1);
        end
      end else if (host_rx_ready) begin
        remaining <= remaining - 8'd1;
        if (remaining == 8'd1) sending <= 1'b0;
      end
    end
  end

  a_batch_in_queue: assert property (@(posedge clk) disable iff (!rst_n)
                                     sending |-> fq_rx_count[cur] != 8'd0)
    else $error("cpu_nic_if: batch longer than its queue");

endmodule
