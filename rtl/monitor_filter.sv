// monitor_filter: frame filter in front of one monitor buffer.
//
// The filter follows one port's byte stream. After the SFD it passes every
// frame byte (destination MAC .. FCS) on fb, one cycle after its byte time,
// and compares on the way: bytes 0..5 with the destination MAC, bytes 6..11
// with the source MAC and the Ethertype at bytes 12..13, or at 16..17 when
// bytes 12..13 hold the 802.1Q tag type 0x8100. In the cycle after the byte
// time in which the frame ends, eof pulses and keep says whether every
// enabled comparison matched (a frame without an Ethertype fails the type
// comparison). With bypass set (transparent mode) every frame is kept.
//
// Filtering on source/destination MAC and Ethertype follows the platform
// description; the per-field enables and the VLAN handling are this design's
// choices.
module monitor_filter
  import flag_pkg::*;
(
  input  logic     clk,
  input  logic     rst_n,
  input  mon_cfg_t cfg,
  input  logic     bypass,
  input  gmii_t    in,
  output fbyte_t   fb,
  output logic     eof,
  output logic     keep
);

  logic        in_frame_q;
  logic [10:0] idx_q;
  logic        dst_ok_q, src_ok_q, type_ok_q;
  logic        vlan_q;
  logic [7:0]  type_hi_q;

  wire frame_end = in.stb && !in.dv && in_frame_q;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      in_frame_q <= 1'b0;
      idx_q      <= '0;
      dst_ok_q   <= 1'b0;
      src_ok_q   <= 1'b0;
      type_ok_q  <= 1'b0;
      vlan_q     <= 1'b0;
      type_hi_q  <= '0;
      fb         <= '0;
      eof        <= 1'b0;
      keep       <= 1'b0;
    end else begin
      fb  <= '0;
      eof <= 1'b0;
      if (in.stb) begin
        if (!in.dv) begin
          in_frame_q <= 1'b0;
        end else if (!in_frame_q) begin
          if (in.data == SFD_BYTE) begin
            in_frame_q <= 1'b1;
            idx_q      <= '0;
            dst_ok_q   <= 1'b1;
            src_ok_q   <= 1'b1;
            type_ok_q  <= 1'b0;
            vlan_q     <= 1'b0;
          end
        end else begin
          fb    <= '{vld: 1'b1, data: in.data};
          if (idx_q != '1) idx_q <= idx_q + 1;
          if (idx_q < 6  && in.data != cfg.dst[8*(5 - idx_q) +: 8])  dst_ok_q <= 1'b0;
          if (idx_q >= 6 && idx_q < 12 && in.data != cfg.src[8*(11 - idx_q) +: 8]) src_ok_q <= 1'b0;
          if (idx_q == 12 || idx_q == 16) type_hi_q <= in.data;
          if (idx_q == 13) begin
            vlan_q    <= ({type_hi_q, in.data} == 16'h8100);
            type_ok_q <= ({type_hi_q, in.data} == cfg.etype);
          end
          if (idx_q == 17 && vlan_q) type_ok_q <= ({type_hi_q, in.data} == cfg.etype);
        end
      end
      if (frame_end) begin
        eof  <= 1'b1;
        keep <= bypass || ((!cfg.dst_en || dst_ok_q) && (!cfg.src_en || src_ok_q) &&
                           (!cfg.type_en || type_ok_q));
      end
    end
  end

endmodule
