// rpc_unit - the RPC layer of the fabric's NIC region.
//
// The host's RPC stack is offloaded here. Host threads ("flows") each own a
// transmit and a receive queue. Transmit: a round-robin arbiter picks one of
// the active flows whose transmit queue holds an RPC, looks up the RPC's
// connection, and forwards the RPC with the peer's IP address and ports to
// the transport queue; an RPC on a connection that is not open is removed
// and reported on tx_drop. Receive: for the RPC at the head of the transport
// receive queue it checks that the connection is open and that the frame was
// addressed to the connection's local port (else rx_drop), then picks the
// receive flow: a response goes back to the flow that issued the request
// (desc.flow); a request goes to flow (conn mod active_flows) under the
// static scheme or to the next active flow in turn under the round-robin
// scheme. If the chosen flow queue is full the RPC waits (back-pressure).
//
// Each direction handles one RPC per cycle, run to completion, with no
// pipeline state: decisions are combinational from the queue heads and pops
// and pushes happen at the same clock edge. Nothing moves while cfg_enable
// is low. Offloading the RPC stack, multiple flows and a selectable load-
// balancing scheme come from the description of the fabric; the two schemes
// themselves and the drop rules are this design's choice.
module rpc_unit
  import hm_pkg::*;
#(
  parameter int unsigned NUM_FLOWS = 4
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              cfg_enable,
  input  logic [7:0]        cfg_active_flows,
  input  logic              cfg_lb_rr,
  // flow transmit queues (heads)
  input  logic              fq_tx_valid [NUM_FLOWS],
  input  rpc_t              fq_tx_rpc   [NUM_FLOWS],
  output logic              fq_tx_pop   [NUM_FLOWS],
  // flow receive queues
  output logic              fq_rx_push  [NUM_FLOWS],
  input  logic              fq_rx_full  [NUM_FLOWS],
  output rpc_t              fq_rx_rpc,
  // transport transmit queue
  output logic              nq_tx_push,
  input  logic              nq_tx_full,
  output net_rpc_t          nq_tx_data,
  // transport receive queue (head)
  input  logic              nq_rx_valid,
  input  rpc_t              nq_rx_rpc,
  input  logic [15:0]       nq_rx_dst_port,
  output logic              nq_rx_pop,
  // connection table lookups (0: transmit, 1: receive)
  output logic [CONN_W-1:0] cm_id    [2],
  input  conn_entry_t       cm_entry [2],
  // events
  output logic              tx_drop,
  output logic              rx_drop,
  output logic              rx_lb_rr_used,
  output logic              rx_stall
);

  localparam int unsigned FW = (NUM_FLOWS > 1) ? $clog2(NUM_FLOWS) : 1;

  logic [7:0]    nflows;
  logic [FW-1:0] tx_ptr, rx_ptr;

  assign nflows = (cfg_active_flows == 8'd0) ? 8'd1 :
                  (cfg_active_flows > 8'(NUM_FLOWS)) ? 8'(NUM_FLOWS) : cfg_active_flows;

  function automatic logic [FW-1:0] next_flow(input logic [FW-1:0] f, input logic [7:0] n);
    return (8'(f) + 8'd1 >= n) ? '0 : f + FW'(1);
  endfunction

  // ---------------- transmit ----------------
  logic          tx_found;
  logic [FW-1:0] tx_sel;

  always_comb begin
    logic [FW-1:0] f;
    tx_found = 1'b0;
    tx_sel   = '0;
    f        = tx_ptr;
    for (int i = 0; i < NUM_FLOWS; i++) begin
      if (!tx_found && 8'(i) < nflows && fq_tx_valid[f]) begin
        tx_found = 1'b1;
        tx_sel   = f;
      end
      f = next_flow(f, nflows);
    end
  end

  assign cm_id[0] = fq_tx_rpc[tx_sel].desc.conn;

  always_comb begin
    for (int i = 0; i < NUM_FLOWS; i++) fq_tx_pop[i] = 1'b0;
    nq_tx_push = 1'b0;
    tx_drop    = 1'b0;
    nq_tx_data.rpc         = fq_tx_rpc[tx_sel];
    nq_tx_data.remote_ip   = cm_entry[0].remote_ip;
    nq_tx_data.remote_port = cm_entry[0].remote_port;
    nq_tx_data.local_port  = cm_entry[0].local_port;
    if (cfg_enable && tx_found) begin
      if (!cm_entry[0].valid) begin
        fq_tx_pop[tx_sel] = 1'b1;
        tx_drop           = 1'b1;
      end else if (!nq_tx_full) begin
        fq_tx_pop[tx_sel] = 1'b1;
        nq_tx_push        = 1'b1;
      end
    end
  end

  // ---------------- receive ----------------
  logic [FW-1:0] rx_sel;
  logic          rx_ok, rx_flow_ok;

  assign cm_id[1]   = nq_rx_rpc.desc.conn;
  assign rx_ok      = cm_entry[1].valid && (cm_entry[1].local_port == nq_rx_dst_port);
  assign fq_rx_rpc  = nq_rx_rpc;

  always_comb begin
    rx_flow_ok = 1'b1;
    if (nq_rx_rpc.desc.kind == RPC_RESP) begin
      rx_sel     = FW'(nq_rx_rpc.desc.flow);
      rx_flow_ok = (8'(nq_rx_rpc.desc.flow) < nflows);
    end else if (cfg_lb_rr) begin
      rx_sel = rx_ptr;
    end else begin
      rx_sel = FW'(8'(nq_rx_rpc.desc.conn) % nflows);
    end
  end

  always_comb begin
    for (int i = 0; i < NUM_FLOWS; i++) fq_rx_push[i] = 1'b0;
    nq_rx_pop     = 1'b0;
    rx_drop       = 1'b0;
    rx_stall      = 1'b0;
    rx_lb_rr_used = 1'b0;
    if (cfg_enable && nq_rx_valid) begin
      if (!rx_ok || !rx_flow_ok) begin
        nq_rx_pop = 1'b1;
        rx_drop   = 1'b1;
      end else if (fq_rx_full[rx_sel]) begin
        rx_stall = 1'b1;
      end else begin
        nq_rx_pop          = 1'b1;
        fq_rx_push[rx_sel] = 1'b1;
        rx_lb_rr_used      = cfg_lb_rr && (nq_rx_rpc.desc.kind == RPC_REQ);
      end
    end
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      tx_ptr <= '0;
      rx_ptr <= '0;
    end else begin
      if (cfg_enable && tx_found && (nq_tx_push || tx_drop)) tx_ptr <= next_flow(tx_sel, nflows);
      else if (8'(tx_ptr) >= nflows) tx_ptr <= '0;
      if (rx_lb_rr_used) rx_ptr <= next_flow(rx_ptr, nflows);
      else if (8'(rx_ptr) >= nflows) rx_ptr <= '0;
    end
  end

endmodule
