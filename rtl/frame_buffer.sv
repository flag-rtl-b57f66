// frame_buffer: one monitor buffer, holding one frame for Port L.
//
// Frame bytes arrive from the monitor filter (fb), followed by an eof pulse
// with the filter's keep decision and the analyser's trailer code. A frame
// is taken only if the buffer is empty when its first byte arrives; it is
// then written from address 0. At eof a kept frame that fit into DEPTH bytes
// becomes the held frame (full = 1, len, code); a frame that was not kept is
// forgotten. A kept frame lost because the buffer was full or the frame was
// longer than DEPTH bytes increments drops.
//
// The output arbiter reads the held frame through the asynchronous read port
// (rd_addr -> rd_data in the same cycle) and pulses release when done.
//
// Four such buffers give the monitor its capacity of four frames, as on the
// platform; one frame per buffer, the drop counter and DEPTH = 2048 bytes
// (enough for a 1522-byte VLAN-tagged frame) are this design's choices.
module frame_buffer
  import flag_pkg::*;
#(
  parameter int unsigned DEPTH = 2048,
  localparam int unsigned AW   = $clog2(DEPTH)
) (
  input  logic          clk,
  input  logic          rst_n,
  input  fbyte_t        fb,
  input  logic          eof,
  input  logic          keep,
  input  logic [7:0]    tag_code,
  output logic          full,
  output logic [AW:0]   len,
  output logic [7:0]    code,
  input  logic [AW-1:0] rd_addr,
  output logic [7:0]    rd_data,
  input  logic          release_frame,
  output logic [31:0]   drops
);

  logic [7:0]  mem [DEPTH];
  logic [AW:0] wr_ptr_q;
  logic        in_frame_q, taking_q, ovf_q;

  wire take_now = in_frame_q ? taking_q : !full;

  always_ff @(posedge clk) begin
    if (fb.vld && take_now && !wr_ptr_q[AW])
      mem[wr_ptr_q[AW-1:0]] <= fb.data;
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      wr_ptr_q   <= '0;
      in_frame_q <= 1'b0;
      taking_q   <= 1'b0;
      ovf_q      <= 1'b0;
      full       <= 1'b0;
      len        <= '0;
      code       <= '0;
      drops      <= '0;
    end else begin
      if (release_frame) full <= 1'b0;
      if (fb.vld) begin
        in_frame_q <= 1'b1;
        taking_q   <= take_now;
        if (take_now) begin
          if (wr_ptr_q[AW]) ovf_q <= 1'b1;
          else              wr_ptr_q <= wr_ptr_q + 1;
        end
      end
      if (eof) begin
        in_frame_q <= 1'b0;
        taking_q   <= 1'b0;
        wr_ptr_q   <= '0;
        ovf_q      <= 1'b0;
        if (keep && in_frame_q) begin
          if (taking_q && !ovf_q) begin
            full <= 1'b1;
            len  <= wr_ptr_q;
            code <= tag_code;
          end else begin
            drops <= drops + 1;
          end
        end
      end
    end
  end

  always_comb rd_data = mem[rd_addr];

endmodule
