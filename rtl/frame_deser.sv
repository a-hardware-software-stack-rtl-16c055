// frame_deser - collects an Avalon-ST packet back into a parallel frame.
//
// Accepts beats (most significant word first) and, on endofpacket, presents
// the assembled frame (hm_pkg::frame_t) through a valid/ready handshake. A
// packet whose length is not exactly FRAME_W/AVST_W beats, or that does not
// begin with startofpacket, is discarded and reported with a one-cycle
// `err` pulse. While an assembled frame waits to be taken the stream is
// back-pressured (in_ready low). Helper of the transport and of the RDMA
// interface; the framing is this design's own.
module frame_deser
  import hm_pkg::*;
(
  input  logic              clk,
  input  logic              rst_n,
  input  logic              in_valid,
  output logic              in_ready,
  input  logic [AVST_W-1:0] in_data,
  input  logic              in_sop,
  input  logic              in_eop,
  output logic              out_valid,
  input  logic              out_ready,
  output frame_t            out_frame,
  output logic              err
);

  localparam int unsigned NB = FRAME_W / AVST_W;
  localparam int unsigned BW = $clog2(NB + 2);

  logic [FRAME_W-1:0] sh;
  logic [BW-1:0]      beat;     // beats collected in the current packet
  logic               in_pkt;
  logic               bad;      // current packet is malformed
  logic               go;

  assign in_ready  = !out_valid;
  assign out_frame = sh;
  assign go        = in_valid && in_ready;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      sh        <= '0;
      beat      <= '0;
      in_pkt    <= 1'b0;
      bad       <= 1'b0;
      out_valid <= 1'b0;
      err       <= 1'b0;
    end else begin
      err <= 1'b0;
      if (out_valid && out_ready) out_valid <= 1'b0;
      if (go) begin
        logic          bad_n;
        logic [BW-1:0] beat_n;
        bad_n  = in_sop ? 1'b0 : (bad || !in_pkt);
        beat_n = (in_sop ? BW'(0) : beat) + BW'(1);
        if (beat_n > BW'(NB)) bad_n = 1'b1;
        sh <= {sh[FRAME_W-AVST_W-1:0], in_data};
        if (in_eop) begin
          in_pkt <= 1'b0;
          beat   <= '0;
          bad    <= 1'b0;
          if (!bad_n && beat_n == BW'(NB)) out_valid <= 1'b1;
          else                             err       <= 1'b1;
        end else begin
          in_pkt <= 1'b1;
          beat   <= (beat_n > BW'(NB)) ? BW'(NB) : beat_n;
          bad    <= bad_n;
        end
      end
    end
  end

endmodule
