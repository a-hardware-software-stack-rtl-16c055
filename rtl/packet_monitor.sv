// packet_monitor - per-connection traffic counters of the fabric.
//
// Counts, for every connection, the frames sent and the frames received, and
// counts frames the transport dropped (bad checksum, wrong destination, or
// unknown connection). Host software reads the counters to track device and
// application progress. The block appears in the fabric's block diagram by
// name only; counting frames per connection is this design's reading of it.
//
// Interface: NSRC event sources (in the fabric: 0 the RPC path, 1 the RDMA
// interface). tx_evt[s] / rx_evt[s] with tx_conn[s] / rx_conn[s] count one
// frame each at the clock edge; all sources may fire in the same cycle, also
// for the same connection. Each set bit of drop_evt counts one drop. Counters
// are 32 bits and wrap. rd_idx selects a connection: rd_data =
// {tx_count, rx_count}; rd_drops is the global drop count. Reads are
// combinational. clr zeroes every counter.
module packet_monitor
  import hm_pkg::*;
#(
  parameter int unsigned NUM_CONN = 128,
  parameter int unsigned NSRC     = 2,
  parameter int unsigned NDROP    = 4
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              clr,
  input  logic              tx_evt  [NSRC],
  input  logic [CONN_W-1:0] tx_conn [NSRC],
  input  logic              rx_evt  [NSRC],
  input  logic [CONN_W-1:0] rx_conn [NSRC],
  input  logic [NDROP-1:0]  drop_evt,
  input  logic [CONN_W-1:0] rd_idx,
  output logic [63:0]       rd_data,
  output logic [31:0]       rd_drops
);

  logic [31:0] tx_cnt [NUM_CONN];
  logic [31:0] rx_cnt [NUM_CONN];
  logic [31:0] drops;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      for (int i = 0; i < NUM_CONN; i++) begin
        tx_cnt[i] <= '0;
        rx_cnt[i] <= '0;
      end
      drops <= '0;
    end else if (clr) begin
      for (int i = 0; i < NUM_CONN; i++) begin
        tx_cnt[i] <= '0;
        rx_cnt[i] <= '0;
      end
      drops <= '0;
    end else begin
      for (int i = 0; i < NUM_CONN; i++) begin
        logic [31:0] tinc, rinc;
        tinc = '0;
        rinc = '0;
        for (int s = 0; s < NSRC; s++) begin
          if (tx_evt[s] && int'(tx_conn[s]) == i) tinc += 32'd1;
          if (rx_evt[s] && int'(rx_conn[s]) == i) rinc += 32'd1;
        end
        tx_cnt[i] <= tx_cnt[i] + tinc;
        rx_cnt[i] <= rx_cnt[i] + rinc;
      end
      drops <= drops + 32'($countones(drop_evt));
    end
  end

  always_comb begin
    rd_data = '0;
    if (int'(rd_idx) < NUM_CONN) rd_data = {tx_cnt[rd_idx], rx_cnt[rd_idx]};
    rd_drops = drops;
  end

endmodule
