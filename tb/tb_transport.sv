// tb_transport - self-checking test of the UDP-style transport.
//
// Transmit: random RPCs are sent; each frame leaving on the Avalon-ST stream
// is checked beat by beat (11 beats, startofpacket / endofpacket, header
// fields, payload, and a checksum computed here independently). Back-to-back
// frames must leave at one beat per cycle with no gap. Receive: the captured
// frames are played back into the receive side, some unchanged, some with a
// flipped payload bit, a foreign destination IP, a foreign protocol or a
// missing beat; good frames must come out as the original RPC with their
// destination port, the others must be dropped and reported.
module tb_transport;
  import hm_pkg::*;
  logic clk = 0, rst_n = 0;
  logic [31:0] local_ip = 32'h0A00_0007;
  logic tx_valid, tx_ready;
  rpc_t tx_rpc;
  logic [31:0] tx_remote_ip;
  logic [15:0] tx_remote_port, tx_local_port;
  logic rx_valid, rx_ready;
  rpc_t rx_rpc;
  logic [15:0] rx_dst_port;
  logic [31:0] rx_src_ip;
  logic avst_tx_valid, avst_tx_ready, avst_tx_sop, avst_tx_eop;
  logic [AVST_W-1:0] avst_tx_data;
  logic avst_rx_valid, avst_rx_ready, avst_rx_sop, avst_rx_eop;
  logic [AVST_W-1:0] avst_rx_data;
  logic tx_evt, drop_evt;
  logic [CONN_W-1:0] tx_conn;

  transport dut (.*);
  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL %s at %0t", what, $time); end
  endtask

  // independent checksum: byte-wise big-endian pairs, end-around carry each step
  function automatic logic [15:0] ref_csum(input line_t d);
    logic [16:0] s;
    s = '0;
    for (int i = 63; i >= 1; i -= 2) begin
      s = s + {1'b0, d[i*8 +: 8], d[(i-1)*8 +: 8]};
      s = {1'b0, s[15:0]} + 17'(s[16]);
    end
    return ~s[15:0];
  endfunction

  typedef struct { rpc_t r; logic [31:0] ip; logic [15:0] rp, lp; } sent_t;
  sent_t sent [$];
  logic [AVST_W-1:0] beats [$];
  logic [AVST_W-1:0] frames [$][$];
  int n_frames = 0, sop_cycle = -1, cycle = 0, gaps = 0, n_drop = 0;

  always @(posedge clk) begin
    cycle++;
    if (rst_n && avst_tx_valid && avst_tx_ready) begin
      check(avst_tx_sop == (beats.size() == 0), "sop position");
      if (avst_tx_sop) begin
        if (sop_cycle >= 0 && cycle - sop_cycle != BEATS) gaps++;
        sop_cycle = cycle;
      end
      beats.push_back(avst_tx_data);
      check(avst_tx_eop == (beats.size() == BEATS), "eop position");
      if (avst_tx_eop) begin
        sent_t s;
        logic [FRAME_W-1:0] f;
        frame_t fr;
        for (int i = 0; i < BEATS; i++) f[FRAME_W-1-i*AVST_W -: AVST_W] = beats[i];
        fr = f;
        s = sent.pop_front();
        check(fr.hdr.proto == 8'd17 && fr.hdr.dst_ip == s.ip && fr.hdr.src_ip == local_ip, "hdr ip/proto");
        check(fr.hdr.dst_port == s.rp && fr.hdr.src_port == s.lp, "hdr ports");
        check(fr.hdr.conn == 8'(s.r.desc.conn), "hdr conn");
        check(fr.hdr.csum == ref_csum(s.r.data), "checksum");
        check(fr.data == s.r.data, "payload");
        frames.push_back(beats);
        beats.delete();
        n_frames++;
      end
    end
    if (rst_n && tx_valid && tx_ready) check(tx_evt && tx_conn == tx_rpc.desc.conn, "tx event");
    if (rst_n && drop_evt) n_drop++;
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  rpc_t orig [$];
  initial begin
    tx_valid = 0; tx_rpc = '0; tx_remote_ip = 0; tx_remote_port = 0; tx_local_port = 0;
    avst_tx_ready = 1; avst_rx_valid = 0; avst_rx_data = 0; avst_rx_sop = 0; avst_rx_eop = 0;
    rx_ready = 1;
    repeat (3) @(posedge clk);
    rst_n = 1;
    // ---- transmit 40 frames back to back, sink always ready ----
    for (int n = 0; n < 40; n++) begin
      sent_t s;
      @(negedge clk);
      tx_valid = 1;
      tx_rpc.desc = rpc_desc_t'({$urandom, $urandom});
      tx_rpc.data = {16{$urandom}};
      tx_remote_ip = local_ip;              // loop back to ourselves
      tx_remote_port = 16'($urandom); tx_local_port = 16'($urandom);
      s.r = tx_rpc; s.ip = tx_remote_ip; s.rp = tx_remote_port; s.lp = tx_local_port;
      sent.push_back(s);
      orig.push_back(tx_rpc);
      @(posedge clk);
      while (!tx_ready) @(posedge clk);
    end
    @(negedge clk); tx_valid = 0;
    repeat (30) @(negedge clk);
    check(n_frames == 40, "all frames sent");
    check(gaps == 0, "back-to-back frames, one beat per cycle");
    // ---- receive: replay with faults ----
    begin
      int good = 0, bad = 0;
      for (int n = 0; n < 40; n++) begin
        int kind;
        logic [AVST_W-1:0] fb [$];
        fb = frames[n];
        kind = (n % 5 == 4) ? (n / 5) % 4 + 1 : 0;   // two of each fault
        if (kind == 1) fb[5][7] = ~fb[5][7];              // payload bit
        if (kind == 2) fb[0][31:0] = 32'h0B00_0001;        // foreign destination
        if (kind == 3) fb[0][63:56] = 8'd6;                // foreign protocol
        if (kind == 4) fb.delete(7);                       // lost beat
        if (kind == 0) good++; else bad++;
        cur_n = n; cur_kind = kind;
        for (int b = 0; b < fb.size(); b++) begin
          @(negedge clk);
          while ($urandom_range(0, 3) == 0) begin avst_rx_valid = 0; @(negedge clk); end
          avst_rx_valid = 1; avst_rx_data = fb[b];
          avst_rx_sop = (b == 0); avst_rx_eop = (b == fb.size() - 1);
          rx_ready = $urandom_range(0, 1);
          @(posedge clk);
          while (!avst_rx_ready) @(posedge clk);
        end
        @(negedge clk); avst_rx_valid = 0; rx_ready = 1;
        repeat (3) @(negedge clk);
      end
      repeat (5) @(negedge clk);
      check(n_drop == bad, "every bad frame dropped and reported");
      check(n_deliv == good, "every good frame delivered");
      $display("good=%0d bad=%0d drops=%0d", good, bad, n_drop);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int cur_n = 0, cur_kind = 0, n_deliv = 0;
  always @(posedge clk) if (rst_n && rx_valid && rx_ready) begin
    check(cur_kind == 0, "only good frames delivered");
    check(rx_rpc == orig[cur_n], "received rpc");
    check(rx_dst_port == sent_dummy_port(cur_n), "received port");
    check(rx_src_ip == local_ip, "received source ip");
    n_deliv++;
  end

  logic [15:0] ports [$];
  always @(posedge clk) if (rst_n && tx_valid && tx_ready) ports.push_back(tx_remote_port);
  function automatic logic [15:0] sent_dummy_port(input int n);
    return ports[n];
  endfunction
endmodule
