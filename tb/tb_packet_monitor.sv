// tb_packet_monitor - self-checking test of the per-connection counters.
//
// Fires random transmit / receive events from two sources (often on the same
// connection in the same cycle) and random drops, then reads every counter
// and compares it with a reference count; finally checks clear.
module tb_packet_monitor;
  import hm_pkg::*;
  localparam int N = 64;
  logic clk = 0, rst_n = 0, clr = 0;
  logic tx_evt [2], rx_evt [2];
  logic [CONN_W-1:0] tx_conn [2], rx_conn [2];
  logic [4:0] drop_evt;
  logic [CONN_W-1:0] rd_idx = 0;
  logic [63:0] rd_data;
  logic [31:0] rd_drops;
  int unsigned rtx [N], rrx [N], rdrop;
  int checks = 0, failures = 0;

  packet_monitor #(.NUM_CONN(N), .NSRC(2), .NDROP(5)) dut (.*);
  always #5 clk = ~clk;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL %s", what); end
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int i = 0; i < N; i++) begin rtx[i] = 0; rrx[i] = 0; end
    rdrop = 0;
    for (int s = 0; s < 2; s++) begin tx_evt[s] = 0; rx_evt[s] = 0; tx_conn[s] = 0; rx_conn[s] = 0; end
    drop_evt = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int it = 0; it < 3000; it++) begin
      @(negedge clk);
      for (int s = 0; s < 2; s++) begin
        tx_evt[s]  = $urandom_range(0, 1);
        rx_evt[s]  = $urandom_range(0, 1);
        tx_conn[s] = CONN_W'($urandom_range(0, 7));   // small range -> collisions
        rx_conn[s] = CONN_W'($urandom_range(0, 7));
        if (tx_evt[s]) rtx[tx_conn[s]]++;
        if (rx_evt[s]) rrx[rx_conn[s]]++;
      end
      drop_evt = 5'($urandom);
      rdrop += $countones(drop_evt);
    end
    @(negedge clk);
    for (int s = 0; s < 2; s++) begin tx_evt[s] = 0; rx_evt[s] = 0; end
    drop_evt = 0;
    @(negedge clk);
    for (int i = 0; i < N; i++) begin
      rd_idx = CONN_W'(i); #1;
      check(rd_data[63:32] == 32'(rtx[i]), "tx count");
      check(rd_data[31:0]  == 32'(rrx[i]), "rx count");
    end
    check(rd_drops == 32'(rdrop), "drop count");
    @(negedge clk); clr = 1; @(negedge clk); clr = 0;
    rd_idx = 0; #1;
    check(rd_data == 0 && rd_drops == 0, "clear");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
