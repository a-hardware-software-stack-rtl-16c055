// connection_manager - table of open network connections.
//
// Host software sets up every client-server connection and records it here;
// the RPC unit and the remote-memory (RDMA) interface look up a connection id
// to find the peer's IP address and UDP port and the local port. Keeping the
// table in the fabric lets both engines build and check frames without host
// help. That the fabric holds per-connection state shared by the two engines
// follows the block diagram; the entry layout and write encoding are this
// design's own.
//
// Interface: csr_wr writes entry csr_idx at the clock edge with
//   csr_wdata = {valid[63], remote_ip[62:31], remote_port[30:15], local_port[14:0]}
// (local port is 15 bits wide on the write port, its MSB is written as 0).
// NPORTS lookup ports (in the fabric: 0 RPC transmit, 1 RPC receive, 2 RDMA
// interface) read the table combinationally; an id at or beyond NUM_CONN returns an invalid entry.
module connection_manager
  import hm_pkg::*;
#(
  parameter int unsigned NUM_CONN = 128,
  parameter int unsigned NPORTS   = 3
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              csr_wr,
  input  logic [CONN_W-1:0] csr_idx,
  input  logic [63:0]       csr_wdata,
  output conn_entry_t       csr_entry,
  input  logic [CONN_W-1:0] lookup_id    [NPORTS],
  output conn_entry_t       lookup_entry [NPORTS],
  output logic [CONN_W:0]   open_count
);

  conn_entry_t table_q [NUM_CONN];

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      for (int i = 0; i < NUM_CONN; i++) table_q[i] <= '0;
    end else if (csr_wr && (int'(csr_idx) < NUM_CONN)) begin
      table_q[csr_idx].valid       <= csr_wdata[63];
      table_q[csr_idx].remote_ip   <= csr_wdata[62:31];
      table_q[csr_idx].remote_port <= csr_wdata[30:15];
      table_q[csr_idx].local_port  <= {1'b0, csr_wdata[14:0]};
    end
  end

  function automatic conn_entry_t rd(input logic [CONN_W-1:0] id);
    if (int'(id) < NUM_CONN) return table_q[id];
    return '0;
  endfunction

  always_comb begin
    for (int p = 0; p < NPORTS; p++) lookup_entry[p] = rd(lookup_id[p]);
    csr_entry  = rd(csr_idx);
    open_count = '0;
    for (int i = 0; i < NUM_CONN; i++) open_count += (CONN_W+1)'(table_q[i].valid);
  end

endmodule
