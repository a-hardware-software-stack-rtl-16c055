// tb_net_mux - self-checking test of the stream join at the PHY port.
//
// Transmit: two clients send tagged packets of random length with random
// gaps while the PHY stalls at random; the PHY side must carry every beat
// exactly once, packets must never interleave, each client's order must hold,
// and when both clients wait the grant must alternate. Receive: packets with
// protocol 17, 254 and other values arrive; each beat must reach the right
// client (or be dropped, with rx_unknown on the first beat) while the
// clients stall at random.
module tb_net_mux;
  import hm_pkg::*;
  logic clk = 0, rst_n = 0;
  logic c_tx_valid [2], c_tx_ready [2], c_tx_sop [2], c_tx_eop [2];
  logic [AVST_W-1:0] c_tx_data [2];
  logic c_rx_valid [2], c_rx_ready [2], c_rx_sop, c_rx_eop;
  logic [AVST_W-1:0] c_rx_data;
  logic phy_tx_valid, phy_tx_ready, phy_tx_sop, phy_tx_eop;
  logic [AVST_W-1:0] phy_tx_data;
  logic phy_rx_valid, phy_rx_ready, phy_rx_sop, phy_rx_eop;
  logic [AVST_W-1:0] phy_rx_data;
  logic rx_unknown;

  net_mux dut (.*);
  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL %s at %0t", what, $time); end
  endtask

  // client packet generators: data = {client, packet, beat, last}
  int pkt [2], beat [2], len [2];
  int exp_pkt [2], exp_beat [2];
  int cur_owner = -1, last_owner = -1, n_alt = 0, n_both = 0, n_tx_beats = 0;

  always @(posedge clk) if (rst_n) begin
    // transmit checks
    if (phy_tx_valid && phy_tx_ready) begin
      int c, p, b;
      c = int'(phy_tx_data[63:56]); p = int'(phy_tx_data[55:24]); b = int'(phy_tx_data[23:8]);
      if (cur_owner >= 0) check(c == cur_owner, "no interleaving");
      check(p == exp_pkt[c] && b == exp_beat[c], "client order");
      check(phy_tx_sop == (b == 0), "sop passes through");
      exp_beat[c]++;
      if (phy_tx_eop) begin
        exp_pkt[c]++; exp_beat[c] = 0;
        if (n_pending_both) begin n_both++; if (last_owner >= 0 && c != last_owner) n_alt++; end
        last_owner = c;
        cur_owner = -1;
      end else cur_owner = c;
      n_tx_beats++;
    end
    for (int c = 0; c < 2; c++) if (c_tx_valid[c] && c_tx_ready[c]) begin
      if (c_tx_eop[c]) begin pkt[c]++; beat[c] = 0; len[c] = $urandom_range(1, 5); end
      else beat[c]++;
    end
  end
  bit n_pending_both;
  always @(negedge clk) n_pending_both = 0;
  always @(posedge clk) ;

  always @(negedge clk) begin
    #1;
    for (int c = 0; c < 2; c++) begin
      c_tx_data[c] = {8'(c), 32'(pkt[c]), 16'(beat[c]), 8'd0};
      c_tx_sop[c]  = (beat[c] == 0);
      c_tx_eop[c]  = (beat[c] == len[c] - 1);
    end
  end

  // receive side
  int rx_exp_dst [$];   // per beat: 0, 1 or 2 (dropped)
  logic [AVST_W-1:0] rx_exp_data [$];
  int n_rx [3];
  always @(posedge clk) if (rst_n) begin
    if (phy_rx_valid && phy_rx_ready) begin
      int d;
      d = rx_exp_dst.pop_front();
      void'(rx_exp_data.pop_front());
      n_rx[d]++;
      if (d < 2) check(c_rx_valid[d] && c_rx_ready[d] && !c_rx_valid[1-d] && c_rx_data == phy_rx_data, "rx routing");
      else check(!c_rx_valid[0] && !c_rx_valid[1], "rx drop");
      check(rx_unknown == (d == 2 && phy_rx_sop), "rx_unknown flag");
    end else check(!(c_rx_valid[0] && c_rx_ready[0]) && !(c_rx_valid[1] && c_rx_ready[1]), "no stray rx");
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int c = 0; c < 2; c++) begin
      pkt[c] = 0; beat[c] = 0; len[c] = 3; exp_pkt[c] = 0; exp_beat[c] = 0;
      c_tx_valid[c] = 0; c_rx_ready[c] = 1;
    end
    for (int d = 0; d < 3; d++) n_rx[d] = 0;
    phy_tx_ready = 1; phy_rx_valid = 0; phy_rx_data = 0; phy_rx_sop = 0; phy_rx_eop = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    fork
      begin
        for (int it = 0; it < 3000; it++) begin
          @(negedge clk);
          for (int c = 0; c < 2; c++)
            if (!c_tx_valid[c] || c_tx_ready[c] || beat[c] != 0) c_tx_valid[c] = ($urandom_range(0, 4) != 0);
          phy_tx_ready = ($urandom_range(0, 3) != 0);
          #2;
          n_pending_both = c_tx_valid[0] && c_tx_valid[1] && c_tx_sop[0] && c_tx_sop[1] && cur_owner < 0;
        end
        @(negedge clk); c_tx_valid[0] = 0; c_tx_valid[1] = 0;
      end
      begin
        for (int p = 0; p < 300; p++) begin
          int d, l;
          logic [7:0] proto;
          d = $urandom_range(0, 2);
          proto = (d == 0) ? PROTO_RPC : (d == 1) ? PROTO_RDMA : 8'd6;
          l = $urandom_range(1, 6);
          for (int b = 0; b < l; b++) begin
            @(negedge clk);
            phy_rx_valid = 1;
            phy_rx_data  = {(b == 0) ? proto : 8'($urandom), 24'($urandom), 32'($urandom)};
            phy_rx_sop   = (b == 0); phy_rx_eop = (b == l - 1);
            c_rx_ready[0] = $urandom_range(0, 1); c_rx_ready[1] = $urandom_range(0, 1);
            rx_exp_dst.push_back(d); rx_exp_data.push_back(phy_rx_data);
            @(posedge clk);
            while (!phy_rx_ready) begin
              @(negedge clk);
              c_rx_ready[0] = $urandom_range(0, 1); c_rx_ready[1] = $urandom_range(0, 1);
              @(posedge clk);
            end
          end
          @(negedge clk); phy_rx_valid = 0;
        end
      end
    join
    repeat (20) @(negedge clk);
    $display("tx beats=%0d both-waiting=%0d alternations=%0d rx c0=%0d c1=%0d drop=%0d",
             n_tx_beats, n_both, n_alt, n_rx[0], n_rx[1], n_rx[2]);
    check(rx_exp_dst.size() == 0, "all rx beats consumed");
    check(exp_pkt[0] == pkt[0] && exp_pkt[1] == pkt[1], "all tx packets carried");
    check(n_both > 0 && n_alt == n_both, "grant alternates when both wait");
    check(n_rx[0] > 0 && n_rx[1] > 0 && n_rx[2] > 0, "all rx routes used");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
