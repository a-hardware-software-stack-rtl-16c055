// tb_soft_regfile - self-checking test of the soft reconfiguration registers.
//
// Checks reset values, write/read-back of every register, the clamping of
// out-of-range batch size, flow count and queue sizes, and that `cfg` shows a
// write one cycle later. Then 300 random writes (random and small values, to
// mapped and unmapped indices) are checked against a model of the register
// map by reading every register back after each write.
module tb_soft_regfile;
  import hm_pkg::*;
  logic clk = 0, rst_n = 0;
  logic csr_wr = 0;
  logic [7:0] csr_addr = 0;
  logic [63:0] csr_wdata = 0, csr_rdata;
  soft_cfg_t cfg;
  int checks = 0, failures = 0;

  soft_regfile #(.NUM_FLOWS(4), .QDEPTH(64), .MAX_BATCH(8)) dut (.*);
  always #5 clk = ~clk;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  task automatic wr(input logic [7:0] a, input logic [63:0] d);
    @(negedge clk); csr_wr = 1; csr_addr = a; csr_wdata = d;
    @(negedge clk); csr_wr = 0;
  endtask

  task automatic rdchk(input logic [7:0] a, input logic [63:0] exp, input string what);
    csr_addr = a;
    #1;
    check(csr_rdata == exp, what);
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    check(cfg.enable == 0 && cfg.batch == 1 && cfg.active_flows == 4 && cfg.tx_qsize == 64 && cfg.rx_qsize == 64
          && cfg.lb_rr == 0 && cfg.local_ip == 32'h0A000001 && cfg.flush_timeout == 64, "reset values");
    wr(REG_LOCAL_IP, 64'hC0A8_0105); check(cfg.local_ip == 32'hC0A80105, "ip");
    rdchk(REG_LOCAL_IP, 64'hC0A80105, "ip read");
    wr(REG_BATCH, 5);   check(cfg.batch == 5, "batch 5");
    wr(REG_BATCH, 100); check(cfg.batch == 8, "batch clamp hi");
    wr(REG_BATCH, 0);   check(cfg.batch == 1, "batch clamp lo");
    rdchk(REG_BATCH, 1, "batch read");
    wr(REG_FLOWS, 3);   check(cfg.active_flows == 3, "flows 3");
    wr(REG_FLOWS, 9);   check(cfg.active_flows == 4, "flows clamp");
    rdchk(REG_FLOWS, 4, "flows read");
    wr(REG_TXQSIZE, 16);  check(cfg.tx_qsize == 16 && cfg.rx_qsize == 64, "tx qsize");
    wr(REG_RXQSIZE, 5);   check(cfg.tx_qsize == 16 && cfg.rx_qsize == 5, "rx qsize");
    rdchk(REG_TXQSIZE, 16, "tx qsize read");
    rdchk(REG_RXQSIZE, 5, "rx qsize read");
    wr(REG_TXQSIZE, 200); check(cfg.tx_qsize == 64, "tx qsize clamp hi");
    wr(REG_RXQSIZE, 0);   check(cfg.rx_qsize == 1, "rx qsize clamp lo");
    rdchk(REG_TXQSIZE, 64, "tx qsize read");
    wr(REG_LB, 1);      check(cfg.lb_rr == 1, "lb");
    rdchk(REG_LB, 1, "lb read");
    wr(REG_FLUSH, 1234); check(cfg.flush_timeout == 1234, "flush");
    rdchk(REG_FLUSH, 1234, "flush read");
    wr(REG_ENABLE, 1);  check(cfg.enable == 1, "enable");
    rdchk(REG_ENABLE, 1, "enable read");
    rdchk(8'h77, 0, "unmapped read");
    wr(8'h77, 64'hFFFF); check(cfg.batch == 1 && cfg.tx_qsize == 64 && cfg.rx_qsize == 1, "unmapped write ignored");
    // one-cycle update
    @(negedge clk); csr_wr = 1; csr_addr = REG_BATCH; csr_wdata = 7;
    check(cfg.batch == 1, "not yet visible");
    @(negedge clk); csr_wr = 0; check(cfg.batch == 7, "visible next cycle");
    // random writes against a model of the register map
    begin
      logic [63:0] model [8];
      model = '{64'h0A000001, 7, 4, 64, 1, 1234, 1, 1};   // state reached above
      for (int i = 0; i < 300; i++) begin
        logic [7:0] a;
        logic [63:0] v;
        int lim;
        a = 8'($urandom_range(0, 9));
        v = {$urandom, $urandom};
        if ($urandom_range(0, 1) == 1) v = 64'($urandom_range(0, 80));
        wr(a, v);
        lim = (a == REG_BATCH) ? 8 : (a == REG_FLOWS) ? 4 : 64;
        if (a == REG_LOCAL_IP) model[a] = {32'd0, v[31:0]};
        else if (a == REG_BATCH || a == REG_FLOWS || a == REG_TXQSIZE || a == REG_RXQSIZE)
          model[a] = (v == 0) ? 1 : (v > 64'(lim)) ? 64'(lim) : v;
        else if (a == REG_LB || a == REG_ENABLE) model[a] = {63'd0, v[0]};
        else if (a == REG_FLUSH) model[a] = {48'd0, v[15:0]};
        for (int r = 0; r < 8; r++) rdchk(8'(r), model[r], $sformatf("random write %0d, register %0d", i, r));
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
