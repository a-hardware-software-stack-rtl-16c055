// tb_connection_manager - self-checking test of the connection table.
//
// Opens random connections, closes some, and checks every lookup port and the
// register read-back against a reference table, including ids beyond the
// table size and the count of open connections.
module tb_connection_manager;
  import hm_pkg::*;
  localparam int N = 40;
  logic clk = 0, rst_n = 0;
  logic csr_wr = 0;
  logic [CONN_W-1:0] csr_idx = 0;
  logic [63:0] csr_wdata = 0;
  conn_entry_t csr_entry;
  logic [CONN_W-1:0] lookup_id [3];
  conn_entry_t lookup_entry [3];
  logic [CONN_W:0] open_count;
  conn_entry_t ref_t [64];
  int checks = 0, failures = 0;

  connection_manager #(.NUM_CONN(N), .NPORTS(3)) dut (.*);
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
    int nopen;
    for (int i = 0; i < 64; i++) ref_t[i] = '0;
    for (int p = 0; p < 3; p++) lookup_id[p] = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int it = 0; it < 600; it++) begin
      logic [CONN_W-1:0] id;
      logic v;
      logic [31:0] ip;
      logic [15:0] rp;
      logic [14:0] lp;
      id = CONN_W'($urandom_range(0, 63));
      v  = ($urandom_range(0, 3) != 0);
      ip = $urandom; rp = 16'($urandom); lp = 15'($urandom);
      @(negedge clk);
      csr_wr = 1; csr_idx = id; csr_wdata = {v, ip, rp, lp};
      @(negedge clk);
      csr_wr = 0;
      if (int'(id) < N) begin
        ref_t[id].valid = v; ref_t[id].remote_ip = ip;
        ref_t[id].remote_port = rp; ref_t[id].local_port = {1'b0, lp};
      end
      for (int p = 0; p < 3; p++) lookup_id[p] = CONN_W'($urandom_range(0, 63));
      csr_idx = id;
      #1;
      for (int p = 0; p < 3; p++) check(lookup_entry[p] == ref_t[lookup_id[p]], "lookup");
      check(csr_entry == ref_t[id], "csr read");
      nopen = 0;
      for (int i = 0; i < N; i++) nopen += int'(ref_t[i].valid);
      check(int'(open_count) == nopen, "open count");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
