// tb_rdma_interface - self-checking test of the remote-memory engine.
//
// Two engines, node A and node B, are wired back to back (A's stream into
// B and back), each with a host-memory model that answers after a random
// delay. Both nodes register objects in their object tables and issue random
// READs and WRITEs on each other's objects, with offsets that are sometimes
// past the object's end, object ids that are sometimes unregistered, and
// connections that are sometimes closed. A reference memory predicts every
// completion: DATA with the right line, ACK (and the line really written to
// the owner's host memory at base + offset), or NACK. The run fails if any of
// DATA, ACK, remote NACK or local NACK never happened.
module tb_rdma_interface;
  import hm_pkg::*;
  localparam int NOBJ = 8;

  logic clk = 0, rst_n = 0;
  logic [31:0] ip [2];
  logic obj_wr [2];
  logic [OBJ_W-1:0] obj_idx [2];
  logic [63:0] obj_wdata [2];
  obj_entry_t obj_rd_entry [2];
  logic loc_req_valid [2], loc_req_ready [2], loc_cpl_valid [2], loc_cpl_ready [2];
  rdma_req_t loc_req [2];
  rdma_cpl_t loc_cpl [2];
  logic [CONN_W-1:0] cm_id [2];
  conn_entry_t cm_entry [2];
  logic mem_rd_valid [2], mem_rd_ready [2], mem_rsp_valid [2], mem_wr_valid [2], mem_wr_ready [2];
  logic [ADDR_W-1:0] mem_rd_addr [2], mem_wr_addr [2];
  line_t mem_rsp_data [2], mem_wr_data [2];
  logic tx_v [2], tx_r [2], tx_s [2], tx_e [2];
  logic [AVST_W-1:0] tx_d [2];
  logic rx_r [2];
  logic tx_evt [2], rx_evt [2], drop_evt [2], nack_evt [2];
  logic [CONN_W-1:0] tx_conn [2], rx_conn [2];

  for (genvar n = 0; n < 2; n++) begin : g_node
    rdma_interface #(.NUM_OBJ(NOBJ)) u (
      .clk, .rst_n, .cfg_enable(1'b1), .local_ip(ip[n]),
      .obj_wr(obj_wr[n]), .obj_idx(obj_idx[n]), .obj_wdata(obj_wdata[n]), .obj_rd_entry(obj_rd_entry[n]),
      .loc_req_valid(loc_req_valid[n]), .loc_req_ready(loc_req_ready[n]), .loc_req(loc_req[n]),
      .loc_cpl_valid(loc_cpl_valid[n]), .loc_cpl_ready(loc_cpl_ready[n]), .loc_cpl(loc_cpl[n]),
      .cm_id(cm_id[n]), .cm_entry(cm_entry[n]),
      .mem_rd_valid(mem_rd_valid[n]), .mem_rd_ready(mem_rd_ready[n]), .mem_rd_addr(mem_rd_addr[n]),
      .mem_rsp_valid(mem_rsp_valid[n]), .mem_rsp_data(mem_rsp_data[n]),
      .mem_wr_valid(mem_wr_valid[n]), .mem_wr_ready(mem_wr_ready[n]), .mem_wr_addr(mem_wr_addr[n]),
      .mem_wr_data(mem_wr_data[n]),
      .avst_tx_valid(tx_v[n]), .avst_tx_ready(tx_r[n]), .avst_tx_data(tx_d[n]),
      .avst_tx_sop(tx_s[n]), .avst_tx_eop(tx_e[n]),
      .avst_rx_valid(tx_v[1-n]), .avst_rx_ready(rx_r[n]), .avst_rx_data(tx_d[1-n]),
      .avst_rx_sop(tx_s[1-n]), .avst_rx_eop(tx_e[1-n]),
      .tx_evt(tx_evt[n]), .tx_conn(tx_conn[n]), .rx_evt(rx_evt[n]), .rx_conn(rx_conn[n]),
      .drop_evt(drop_evt[n]), .nack_evt(nack_evt[n])
    );
    assign tx_r[n] = rx_r[1-n];
    // connection 1 leads to the other node, everything else is closed
    always_comb begin
      cm_entry[n] = '0;
      if (cm_id[n] == CONN_W'(1)) begin
        cm_entry[n].valid = 1'b1;
        cm_entry[n].remote_ip = ip[1-n];
        cm_entry[n].remote_port = 16'(100 + 1 - n);
        cm_entry[n].local_port = 16'(100 + n);
      end
    end
  end

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL %s at %0t", what, $time); end
  endtask

  // host memory models and reference
  line_t mem [2][logic [31:0]];
  line_t refm [2][logic [31:0]];
  logic [31:0] obase [2][NOBJ];
  int olines [2][NOBJ];
  bit ovalid [2][NOBJ];
  int rd_lat [2];
  logic [31:0] rd_pend [2][$];
  rdma_cpl_t exp_cpl [2][$];
  int n_data = 0, n_ack = 0, n_rnack = 0, n_lnack = 0;

  function automatic line_t rdm(input int n, input logic [31:0] a);
    if (mem[n].exists(a)) return mem[n][a];
    return '0;
  endfunction

  always @(posedge clk) if (rst_n) begin
    for (int n = 0; n < 2; n++) begin
      if (mem_wr_valid[n] && mem_wr_ready[n]) mem[n][mem_wr_addr[n]] = mem_wr_data[n];
      if (mem_rd_valid[n] && mem_rd_ready[n]) rd_pend[n].push_back(mem_rd_addr[n]);
      if (loc_cpl_valid[n] && loc_cpl_ready[n]) begin
        rdma_cpl_t e;
        check(exp_cpl[n].size() > 0, "unexpected completion");
        if (exp_cpl[n].size() > 0) begin
          e = exp_cpl[n].pop_front();
          check(loc_cpl[n].op == e.op && loc_cpl[n].tag == e.tag, "completion op/tag");
          if (e.op == RD_DATA) check(loc_cpl[n].data == e.data, "read data");
          case (e.op)
            RD_DATA: n_data++;
            RD_ACK:  n_ack++;
            default: if (e.data == '1) n_lnack++; else n_rnack++;
          endcase
        end
      end
    end
  end

  // memory: random ready, read answer after a random delay
  always @(negedge clk) begin
    for (int n = 0; n < 2; n++) begin
      mem_rd_ready[n] = ($urandom_range(0, 2) != 0);
      mem_wr_ready[n] = ($urandom_range(0, 2) != 0);
      mem_rsp_valid[n] = 0;
      mem_rsp_data[n] = '0;
      if (rd_pend[n].size() > 0) begin
        if (rd_lat[n] == 0) begin
          mem_rsp_valid[n] = 1;
          mem_rsp_data[n] = rdm(n, rd_pend[n].pop_front());
          rd_lat[n] = $urandom_range(0, 4);
        end else rd_lat[n]--;
      end
      loc_cpl_ready[n] = ($urandom_range(0, 3) != 0);
    end
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // issue one request from node n and predict its completion
  task automatic issue(input int n);
    rdma_req_t r;
    rdma_cpl_t e;
    int o, t;
    t = 1 - n;
    r.op     = ($urandom_range(0, 1) != 0) ? RD_WRITE : RD_READ;
    r.conn   = ($urandom_range(0, 9) == 0) ? CONN_W'(2) : CONN_W'(1);
    o        = $urandom_range(0, NOBJ - 1);
    r.obj    = OBJ_W'(o);
    r.offset = 24'($urandom_range(0, 9));
    r.tag    = 16'($urandom);
    r.data   = {16{$urandom}};
    e.tag = r.tag; e.data = '0;
    if (r.conn != CONN_W'(1)) begin
      e.op = RD_NACK; e.data = '1;                  // marks a local NACK
    end else if (!ovalid[t][o] || int'(r.offset) >= olines[t][o]) begin
      e.op = RD_NACK;
    end else if (r.op == RD_READ) begin
      logic [31:0] a;
      a = obase[t][o] + 32'(r.offset);
      e.op = RD_DATA;
      e.data = refm[t].exists(a) ? refm[t][a] : '0;
    end else begin
      logic [31:0] a;
      a = obase[t][o] + 32'(r.offset);
      e.op = RD_ACK;
      refm[t][a] = r.data;
    end
    // a read's expected data is taken when issued: requests of one node are
    // served by the other in order, so later writes from here cannot overtake
    exp_cpl[n].push_back(e);
    loc_req[n] = r;
    loc_req_valid[n] = 1;
    @(posedge clk);
    while (!loc_req_ready[n]) @(posedge clk);
    @(negedge clk);
    loc_req_valid[n] = 0;
    // wait for this completion before the next request from this node
    while (exp_cpl[n].size() > 0) @(negedge clk);
  endtask

  initial begin
    ip[0] = 32'h0A00_0001; ip[1] = 32'h0A00_0002;
    for (int n = 0; n < 2; n++) begin
      obj_wr[n] = 0; obj_idx[n] = 0; obj_wdata[n] = 0; loc_req_valid[n] = 0; loc_req[n] = '0;
      rd_lat[n] = 0; loc_cpl_ready[n] = 1;
    end
    repeat (3) @(posedge clk);
    rst_n = 1;
    // object tables: objects 0..5 registered, 6..7 not
    for (int n = 0; n < 2; n++)
      for (int o = 0; o < NOBJ; o++) begin
        ovalid[n][o] = (o < 6);
        olines[n][o] = $urandom_range(2, 8);
        obase[n][o]  = 32'(o * 256 + n * 4096);
        @(negedge clk);
        obj_wr[n] = 1; obj_idx[n] = OBJ_W'(o);
        obj_wdata[n] = {ovalid[n][o], 7'd0, 24'(olines[n][o]), obase[n][o]};
        @(negedge clk);
        obj_wr[n] = 0;
        #1;
        check(obj_rd_entry[n].valid == ovalid[n][o] && obj_rd_entry[n].base == obase[n][o]
              && int'(obj_rd_entry[n].lines) == olines[n][o], "object table read-back");
      end
    fork
      for (int i = 0; i < 300; i++) issue(0);
      for (int i = 0; i < 300; i++) issue(1);
    join
    repeat (50) @(negedge clk);
    // host memories hold exactly what the reference wrote
    for (int n = 0; n < 2; n++)
      foreach (refm[n][a]) check(mem[n].exists(a) && mem[n][a] == refm[n][a], "host memory contents");
    $display("data=%0d ack=%0d remote_nack=%0d local_nack=%0d", n_data, n_ack, n_rnack, n_lnack);
    check(n_data > 0 && n_ack > 0 && n_rnack > 0 && n_lnack > 0, "every completion kind happened");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
