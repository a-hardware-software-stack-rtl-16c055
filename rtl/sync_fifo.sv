// sync_fifo - one of the RPC queues between the CPU-NIC interface, the RPC
// unit and the transport.
//
// A first-word-fall-through FIFO in a RAM array of DEPTH entries. Its usable
// size is set at run time through `limit` (the soft register file's queue
// size), so software can provision queues per application without a new
// bitstream: `full` rises once `count` reaches min(limit, DEPTH). A limit of 0
// is treated as 1.
//
// Interface: push/din write at the clock edge when not full; dout shows the
// oldest entry whenever empty is low and pop removes it at the edge. A push
// while full or a pop while empty is ignored (and flagged by an assertion).
// Push and pop in the same cycle are allowed. Latency: an entry pushed in
// cycle t is visible on dout in cycle t+1.
//
// The queues themselves and their run-time size follow the description of
// the fabric; depth, width and the FWFT timing are this design's choice.
module sync_fifo #(
  parameter int unsigned WIDTH = 512,
  parameter int unsigned DEPTH = 64,
  localparam int unsigned AW = (DEPTH > 1) ? $clog2(DEPTH) : 1,
  localparam int unsigned CW = $clog2(DEPTH + 1)
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic [CW-1:0]    limit,
  input  logic             push,
  input  logic [WIDTH-1:0] din,
  input  logic             pop,
  output logic [WIDTH-1:0] dout,
  output logic             full,
  output logic             empty,
  output logic [CW-1:0]    count
);

  logic [WIDTH-1:0] mem [DEPTH];
  logic [AW-1:0]    wr_ptr, rd_ptr;
  logic [CW-1:0]    eff_limit;
  logic             do_push, do_pop;

  always_comb begin
    eff_limit = limit;
    if (eff_limit == '0) eff_limit = CW'(1);
    if (eff_limit > CW'(DEPTH)) eff_limit = CW'(DEPTH);
  end

  assign full    = (count >= eff_limit);
  assign empty   = (count == '0);
  assign do_push = push && !full;
  assign do_pop  = pop && !empty;
  assign dout    = mem[rd_ptr];

  function automatic logic [AW-1:0] inc(input logic [AW-1:0] p);
    return (p == AW'(DEPTH - 1)) ? '0 : p + AW'(1);
  endfunction

  always_ff @(posedge clk) begin
    if (do_push) mem[wr_ptr] <= din;
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      wr_ptr <= '0;
      rd_ptr <= '0;
      count  <= '0;
    end else begin
      if (do_push) wr_ptr <= inc(wr_ptr);
      if (do_pop)  rd_ptr <= inc(rd_ptr);
      count <= count + CW'(do_push) - CW'(do_pop);
    end
  end

  a_no_overflow: assert property (@(posedge clk) disable iff (!rst_n) push |-> !full)
    else $error("sync_fifo: push while full");
  a_no_underflow: assert property (@(posedge clk) disable iff (!rst_n) pop |-> !empty)
    else $error("sync_fifo: pop while empty");

endmodule
