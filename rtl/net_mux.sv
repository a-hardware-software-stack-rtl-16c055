// net_mux - joins the two networking streams of the fabric at the PHY.
//
// The transport (RPC frames) and the RDMA interface (remote-memory frames)
// each have their own Avalon-ST stream; this block shares the single PHY
// port between them. Transmit: packet-level round robin between client 0
// and client 1; once a packet's first beat is granted the grant holds until
// its endofpacket beat. Receive: the protocol byte in the first beat
// (bits [63:56], see hm_pkg) selects client 0 (PROTO_RPC) or client 1
// (PROTO_RDMA) for the whole packet; a packet of any other protocol is
// consumed and dropped, pulsing rx_unknown on its first beat.
// That both streams meet before the PHY follows the block diagram; the
// arbitration and the split by protocol number are this design's own.
module net_mux
  import hm_pkg::*;
(
  input  logic              clk,
  input  logic              rst_n,
  // transmit clients
  input  logic              c_tx_valid [2],
  output logic              c_tx_ready [2],
  input  logic [AVST_W-1:0] c_tx_data  [2],
  input  logic              c_tx_sop   [2],
  input  logic              c_tx_eop   [2],
  // receive clients
  output logic              c_rx_valid [2],
  input  logic              c_rx_ready [2],
  output logic [AVST_W-1:0] c_rx_data,
  output logic              c_rx_sop,
  output logic              c_rx_eop,
  // PHY side
  output logic              phy_tx_valid,
  input  logic              phy_tx_ready,
  output logic [AVST_W-1:0] phy_tx_data,
  output logic              phy_tx_sop,
  output logic              phy_tx_eop,
  input  logic              phy_rx_valid,
  output logic              phy_rx_ready,
  input  logic [AVST_W-1:0] phy_rx_data,
  input  logic              phy_rx_sop,
  input  logic              phy_rx_eop,
  output logic              rx_unknown
);

  // ---------------- transmit ----------------
  logic tx_lock, tx_owner, tx_prio, sel;

  always_comb begin
    if (tx_lock) sel = tx_owner;
    else if (c_tx_valid[0] && c_tx_valid[1]) sel = tx_prio;
    else sel = c_tx_valid[1];
  end

  assign phy_tx_valid  = c_tx_valid[sel];
  assign phy_tx_data   = c_tx_data[sel];
  assign phy_tx_sop    = c_tx_sop[sel];
  assign phy_tx_eop    = c_tx_eop[sel];
  assign c_tx_ready[0] = phy_tx_ready && (sel == 1'b0);
  assign c_tx_ready[1] = phy_tx_ready && (sel == 1'b1);

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      tx_lock  <= 1'b0;
      tx_owner <= 1'b0;
      tx_prio  <= 1'b0;
    end else if (phy_tx_valid && phy_tx_ready) begin
      if (phy_tx_eop) begin
        tx_lock <= 1'b0;
        tx_prio <= ~sel;              // the other client goes first next time
      end else begin
        tx_lock  <= 1'b1;
        tx_owner <= sel;
      end
    end
  end

  // ---------------- receive ----------------
  typedef enum logic [1:0] {RX_C0 = 2'd0, RX_C1 = 2'd1, RX_DROP = 2'd2} rx_dst_e;
  rx_dst_e rx_dst_q, rx_dst;
  logic    rx_in_pkt;

  always_comb begin
    if (rx_in_pkt && !phy_rx_sop) rx_dst = rx_dst_q;
    else if (phy_rx_data[63:56] == PROTO_RPC)  rx_dst = RX_C0;
    else if (phy_rx_data[63:56] == PROTO_RDMA) rx_dst = RX_C1;
    else rx_dst = RX_DROP;
  end

  assign c_rx_data     = phy_rx_data;
  assign c_rx_sop      = phy_rx_sop;
  assign c_rx_eop      = phy_rx_eop;
  assign c_rx_valid[0] = phy_rx_valid && (rx_dst == RX_C0);
  assign c_rx_valid[1] = phy_rx_valid && (rx_dst == RX_C1);
  always_comb begin
    unique case (rx_dst)
      RX_C0:   phy_rx_ready = c_rx_ready[0];
      RX_C1:   phy_rx_ready = c_rx_ready[1];
      default: phy_rx_ready = 1'b1;
    endcase
  end
  assign rx_unknown = phy_rx_valid && phy_rx_ready && phy_rx_sop && (rx_dst == RX_DROP);

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      rx_in_pkt <= 1'b0;
      rx_dst_q  <= RX_DROP;
    end else if (phy_rx_valid && phy_rx_ready) begin
      rx_in_pkt <= !phy_rx_eop;
      rx_dst_q  <= rx_dst;
    end
  end

endmodule
