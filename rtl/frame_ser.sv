// frame_ser - serialises one parallel frame onto an Avalon-ST stream.
//
// Takes a whole frame (header + 64 B payload, hm_pkg::frame_t) through a
// valid/ready handshake and sends it as FRAME_W/AVST_W beats, most
// significant word first, with startofpacket on the first beat and
// endofpacket on the last. Avalon-ST ready/valid: a beat moves when both are
// high. A new frame is accepted in the same cycle the last beat of the
// previous one leaves, so back-to-back frames have no bubble.
// Helper of the transport and of the RDMA interface; the framing is this
// design's own.
module frame_ser
  import hm_pkg::*;
(
  input  logic              clk,
  input  logic              rst_n,
  input  logic              in_valid,
  output logic              in_ready,
  input  frame_t            in_frame,
  output logic              out_valid,
  input  logic              out_ready,
  output logic [AVST_W-1:0] out_data,
  output logic              out_sop,
  output logic              out_eop
);

  localparam int unsigned NB = FRAME_W / AVST_W;

  logic [FRAME_W-1:0]      sh;
  logic [$clog2(NB+1)-1:0] beat;
  logic                    busy;
  logic                    last_go;

  assign out_valid = busy;
  assign out_data  = sh[FRAME_W-1 -: AVST_W];
  assign out_sop   = busy && (beat == '0);
  assign out_eop   = busy && (beat == ($clog2(NB+1))'(NB - 1));
  assign last_go   = out_valid && out_ready && out_eop;
  assign in_ready  = !busy || last_go;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      busy <= 1'b0;
      beat <= '0;
      sh   <= '0;
    end else if (in_valid && in_ready) begin
      busy <= 1'b1;
      beat <= '0;
      sh   <= in_frame;
    end else if (out_valid && out_ready) begin
      if (out_eop) busy <= 1'b0;
      beat <= beat + 1'b1;
      sh   <= sh << AVST_W;
    end
  end

  a_hold: assert property (@(posedge clk) disable iff (!rst_n)
                           out_valid && !out_ready |=> out_valid && $stable(out_data))
    else $error("frame_ser: beat changed while stalled");

endmodule
