// tb_sync_fifo - self-checking test of the run-time-sized RPC queue.
//
// Drives random pushes and pops (never pushing when full or popping when
// empty, as the queue's users do) against a reference queue, with the
// run-time size limit changed during the run. Checks every cycle: head entry,
// count, full and empty. A watchdog ends the run after a fixed cycle count.
module tb_sync_fifo;
  localparam int unsigned W = 16, D = 8, CW = $clog2(D + 1);

  logic clk = 0, rst_n = 0;
  logic [CW-1:0] limit;
  logic push, pop, full, empty;
  logic [W-1:0] din, dout;
  logic [CW-1:0] count;
  int checks = 0, failures = 0;
  logic [W-1:0] model [$];

  sync_fifo #(.WIDTH(W), .DEPTH(D)) dut (.*);

  always #5 clk = ~clk;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL %s at %0t", what, $time);
    end
  endtask

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int unsigned eff;
  initial begin
    limit = CW'(D); push = 0; pop = 0; din = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int cyc = 0; cyc < 4000; cyc++) begin
      if (cyc % 500 == 0) limit = CW'($urandom_range(0, D));   // includes 0 -> 1
      eff = (limit == 0) ? 1 : limit;
      @(negedge clk);
      // compare
      check(count == CW'(model.size()), "count");
      check(empty == (model.size() == 0), "empty");
      check(full == (model.size() >= eff), "full");
      if (model.size() > 0) check(dout == model[0], "head");
      push = !full && ($urandom_range(0, 99) < 55);
      pop  = !empty && ($urandom_range(0, 99) < 45);
      din  = W'($urandom);
      @(posedge clk);
      #1;
      if (pop) void'(model.pop_front());
      if (push) model.push_back(din);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
