// soft_regfile - soft reconfiguration registers of the acceleration fabric.
//
// The host CPU writes these registers at run time to tune the fabric to an
// application without loading a new bitstream: the batch size of host
// transfers, how many RPC flows (host threads) are active, the usable size of
// every RPC queue, the load-balancing scheme for received RPCs, the local IP
// address and the flush timeout of partial batches. The list of tunables
// follows the description of soft reconfiguration; the register map, reset
// values and clamping are this design's own.
//
// Interface: a single-cycle register port. csr_wr with csr_addr/csr_wdata
// writes at the clock edge; csr_rdata shows register csr_addr combinationally.
// Out-of-range values are clamped on write: batch to 1..MAX_BATCH, active
// flows to 1..NUM_FLOWS, queue sizes to 1..QDEPTH. `cfg` presents all fields,
// registered, one cycle after the write.
//
// Register map (index: field): 0 local IP, 1 batch size, 2 active flows,
// 3 transmit queue size, 4 load balancing (0 static by connection, 1 round
// robin), 5 flush timeout in cycles, 6 enable, 7 receive queue size.
module soft_regfile
  import hm_pkg::*;
#(
  parameter int unsigned NUM_FLOWS = 4,
  parameter int unsigned QDEPTH    = 64,
  parameter int unsigned MAX_BATCH = 8
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        csr_wr,
  input  logic [7:0]  csr_addr,
  input  logic [63:0] csr_wdata,
  output logic [63:0] csr_rdata,
  output soft_cfg_t   cfg
);

  function automatic logic [7:0] clamp(input logic [63:0] v, input int unsigned hi);
    if (v == 64'd0) return 8'd1;
    if (v > 64'(hi)) return 8'(hi);
    return v[7:0];
  endfunction

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      cfg.enable        <= 1'b0;
      cfg.local_ip      <= 32'h0A00_0001;   // 10.0.0.1
      cfg.batch         <= 8'd1;
      cfg.active_flows  <= 8'(NUM_FLOWS);
      cfg.tx_qsize      <= 8'(QDEPTH);
      cfg.rx_qsize      <= 8'(QDEPTH);
      cfg.lb_rr         <= 1'b0;
      cfg.flush_timeout <= 16'd64;
    end else if (csr_wr) begin
      unique case (csr_addr)
        REG_LOCAL_IP: cfg.local_ip      <= csr_wdata[31:0];
        REG_BATCH:    cfg.batch         <= clamp(csr_wdata, MAX_BATCH);
        REG_FLOWS:    cfg.active_flows  <= clamp(csr_wdata, NUM_FLOWS);
        REG_TXQSIZE:  cfg.tx_qsize      <= clamp(csr_wdata, QDEPTH);
        REG_RXQSIZE:  cfg.rx_qsize      <= clamp(csr_wdata, QDEPTH);
        REG_LB:       cfg.lb_rr         <= csr_wdata[0];
        REG_FLUSH:    cfg.flush_timeout <= csr_wdata[15:0];
        REG_ENABLE:   cfg.enable        <= csr_wdata[0];
        default: ;
      endcase
    end
  end

  always_comb begin
    unique case (csr_addr)
      REG_LOCAL_IP: csr_rdata = {32'd0, cfg.local_ip};
      REG_BATCH:    csr_rdata = {56'd0, cfg.batch};
      REG_FLOWS:    csr_rdata = {56'd0, cfg.active_flows};
      REG_TXQSIZE:  csr_rdata = {56'd0, cfg.tx_qsize};
      REG_RXQSIZE:  csr_rdata = {56'd0, cfg.rx_qsize};
      REG_LB:       csr_rdata = {63'd0, cfg.lb_rr};
      REG_FLUSH:    csr_rdata = {48'd0, cfg.flush_timeout};
      REG_ENABLE:   csr_rdata = {63'd0, cfg.enable};
      default:      csr_rdata = 64'd0;
    endcase
  end

endmodule
