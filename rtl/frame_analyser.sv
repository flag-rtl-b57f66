// frame_analyser: per-port receive analyser.
//
// The analyser follows the received byte stream: it waits for the SFD, then
// takes every byte until the line goes idle. It compares the first
// HEADER_SIZE bytes with the user pattern (ETHDST, ETHSRC, HDR_AFTER_MAC),
// checks that the frame is HEADER_SIZE + PAYLOAD_SIZE + 4 bytes long and
// that the CRC is correct. Deeper in the frame (up to the application
// layer) it compares a 4-byte pattern: the bytes at PAT_OFFSET ..
// PAT_OFFSET+3 after the SFD, first byte in PAT_VALUE[31:24], are compared
// with PAT_VALUE under PAT_MASK (a mask of 0, the reset value, turns the
// pattern off; a frame too short to hold the pattern fails it). A frame
// meeting all four is a match.
//
// While in the Receiving state it counts matches in NUMBER_OF_RECV_OK and
// mismatches in NUMBER_OF_RECV_NOK and records the SFD timestamps of the
// first and the last counted frame. It stops by itself (state Hold) once
// FRAMES_EXP frames in all or FRAMES_EXP_OK matching frames have arrived
// (a limit of 0 is ignored). Counters are cleared and Receiving entered at
// the start of the execution phase (rising edge of run) if TR_CTRL bit 0 is
// set. TR_STAT reads 0 Disable, 1 Receiving, 2 Hold.
//
// For every frame, whether counted or not, a verdict is given one cycle after
// the byte time in which the frame ended: verdict_valid pulses, verdict_ok
// tells the result, and tag_code carries ERROR_CODE for a mismatch when
// tagging (TR_CTRL bit 1) is on, else 0. The monitor puts this code into the
// frame's trailer at Port L.
//
// The attribute set follows the published analyser attributes; the exact
// matching rule, the pattern registers, the tagging enable bit and the
// timestamp registers are this design's own choices.
module frame_analyser
  import flag_pkg::*;
#(
  parameter int unsigned DEFAULT_HEADER_SIZE = 14
) (
  input  logic        clk,
  input  logic        rst_n,
  input  ocb_req_t    ocb,
  output logic [31:0] ocb_rdata,
  input  logic        run,
  input  gmii_t       rx,
  input  logic [63:0] rx_ts,          // SFD time of the frame being received (held until the next SFD)
  output logic        verdict_valid,
  output logic        verdict_ok,
  output logic [7:0]  tag_code,
  output rx_state_e   state
);

  // ---------------- registers ----------------
  logic        en_q, tag_en_q;
  logic [31:0] header_size_q, payload_size_q, frames_exp_q, frames_exp_ok_q;
  logic [47:0] dst_q, src_q, hdr_after_q;
  logic [7:0]  error_code_q;
  logic [31:0] pat_off_q, pat_val_q, pat_mask_q;
  logic [31:0] ok_q, nok_q;
  logic [63:0] first_ts_q, last_ts_q;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      en_q            <= 1'b0;
      tag_en_q        <= 1'b0;
      header_size_q   <= 32'(DEFAULT_HEADER_SIZE);
      payload_size_q  <= 32'd46;
      frames_exp_q    <= '0;
      frames_exp_ok_q <= '0;
      dst_q           <= '0;
      src_q           <= '0;
      hdr_after_q     <= '0;
      error_code_q    <= '0;
      pat_off_q       <= '0;
      pat_val_q       <= '0;
      pat_mask_q      <= '0;
    end else if (ocb.wr) begin
      unique case (ocb.addr[15:0])
        REG_TR_CTRL:       {tag_en_q, en_q}   <= ocb.wdata[1:0];
        REG_HEADER_SIZE:   header_size_q      <= ocb.wdata;
        REG_ETHDST_HI:     dst_q[47:32]       <= ocb.wdata[15:0];
        REG_ETHDST_LO:     dst_q[31:0]        <= ocb.wdata;
        REG_ETHSRC_HI:     src_q[47:32]       <= ocb.wdata[15:0];
        REG_ETHSRC_LO:     src_q[31:0]        <= ocb.wdata;
        REG_HDR_AFTER_HI:  hdr_after_q[47:32] <= ocb.wdata[15:0];
        REG_HDR_AFTER_LO:  hdr_after_q[31:0]  <= ocb.wdata;
        REG_PAYLOAD_SIZE:  payload_size_q     <= ocb.wdata;
        REG_FRAMES_EXP:    frames_exp_q       <= ocb.wdata;
        REG_FRAMES_EXP_OK: frames_exp_ok_q    <= ocb.wdata;
        REG_ERROR_CODE:    error_code_q       <= ocb.wdata[7:0];
        REG_PAT_OFFSET:    pat_off_q          <= ocb.wdata;
        REG_PAT_VALUE:     pat_val_q          <= ocb.wdata;
        REG_PAT_MASK:      pat_mask_q         <= ocb.wdata;
        default: ;
      endcase
    end
  end

  always_comb begin
    unique case (ocb.addr[15:0])
      REG_TR_CTRL:       ocb_rdata = {30'b0, tag_en_q, en_q};
      REG_TR_STAT:       ocb_rdata = {30'b0, state};
      REG_HEADER_SIZE:   ocb_rdata = header_size_q;
      REG_ETHDST_HI:     ocb_rdata = {16'b0, dst_q[47:32]};
      REG_ETHDST_LO:     ocb_rdata = dst_q[31:0];
      REG_ETHSRC_HI:     ocb_rdata = {16'b0, src_q[47:32]};
      REG_ETHSRC_LO:     ocb_rdata = src_q[31:0];
      REG_HDR_AFTER_HI:  ocb_rdata = {16'b0, hdr_after_q[47:32]};
      REG_HDR_AFTER_LO:  ocb_rdata = hdr_after_q[31:0];
      REG_PAYLOAD_SIZE:  ocb_rdata = payload_size_q;
      REG_FRAMES_EXP:    ocb_rdata = frames_exp_q;
      REG_FRAMES_EXP_OK: ocb_rdata = frames_exp_ok_q;
      REG_RECV_OK:       ocb_rdata = ok_q;
      REG_RECV_NOK:      ocb_rdata = nok_q;
      REG_ERROR_CODE:    ocb_rdata = {24'b0, error_code_q};
      REG_FIRST_TS_LO:   ocb_rdata = first_ts_q[31:0];
      REG_FIRST_TS_HI:   ocb_rdata = first_ts_q[63:32];
      REG_LAST_TS_LO:    ocb_rdata = last_ts_q[31:0];
      REG_LAST_TS_HI:    ocb_rdata = last_ts_q[63:32];
      REG_PAT_OFFSET:    ocb_rdata = pat_off_q;
      REG_PAT_VALUE:     ocb_rdata = pat_val_q;
      REG_PAT_MASK:      ocb_rdata = pat_mask_q;
      default:           ocb_rdata = 32'h0;
    endcase
  end

  // ---------------- frame parser ----------------
  logic        in_frame_q;   // between SFD and the end of the frame
  logic [31:0] idx_q;        // bytes after the SFD seen so far
  logic [31:0] crc_q;
  logic        hdr_ok_q, pat_ok_q;

  function automatic logic [7:0] pat_byte(input logic [31:0] i,
      input logic [47:0] d, input logic [47:0] s, input logic [47:0] h);
    if (i < 6)       return d[8*(5 - i) +: 8];
    else if (i < 12) return s[8*(11 - i) +: 8];
    else if (i < 18) return h[8*(17 - i) +: 8];
    else             return 8'h00;
  endfunction

  // position of the current byte inside the pattern window
  wire [31:0] pat_pos  = idx_q - pat_off_q;
  wire        in_pat   = (idx_q >= pat_off_q) && (pat_pos < 32'd4);
  wire [7:0]  pat_m    = pat_mask_q[{~pat_pos[1:0], 3'b000} +: 8];
  wire [7:0]  pat_v    = pat_val_q[{~pat_pos[1:0], 3'b000} +: 8];
  wire        pat_seen = (pat_mask_q == 32'h0) || (idx_q >= pat_off_q + 32'd4);

  wire frame_end = rx.stb && !rx.dv && in_frame_q;
  wire match     = hdr_ok_q && pat_ok_q && pat_seen && (crc_q == CRC_RESIDUE) &&
                   (idx_q == header_size_q + payload_size_q + 32'd4);

  // ---------------- counting state ----------------
  logic run_q, hold_q;
  wire  start = run & ~run_q;
  wire  counting = en_q && !hold_q && run_q;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      in_frame_q    <= 1'b0;
      idx_q         <= '0;
      crc_q         <= '1;
      hdr_ok_q      <= 1'b0;
      pat_ok_q      <= 1'b0;
      verdict_valid <= 1'b0;
      verdict_ok    <= 1'b0;
      tag_code      <= '0;
      run_q         <= 1'b0;
      hold_q        <= 1'b0;
      ok_q          <= '0;
      nok_q         <= '0;
      first_ts_q    <= '0;
      last_ts_q     <= '0;
    end else begin
      run_q         <= run;
      verdict_valid <= 1'b0;

      if (rx.stb) begin
        if (!rx.dv) begin
          in_frame_q <= 1'b0;
        end else if (!in_frame_q) begin
          if (rx.data == SFD_BYTE) begin
            in_frame_q <= 1'b1;
            idx_q      <= '0;
            crc_q      <= '1;
            hdr_ok_q   <= 1'b1;
            pat_ok_q   <= 1'b1;
          end
        end else begin
          idx_q <= idx_q + 1;
          crc_q <= crc32_byte(crc_q, rx.data);
          if (idx_q < header_size_q && rx.data != pat_byte(idx_q, dst_q, src_q, hdr_after_q))
            hdr_ok_q <= 1'b0;
          if (in_pat && (rx.data & pat_m) != (pat_v & pat_m))
            pat_ok_q <= 1'b0;
        end
      end

      if (frame_end) begin
        verdict_valid <= 1'b1;
        verdict_ok    <= match;
        tag_code      <= (tag_en_q && !match) ? error_code_q : 8'h00;
      end

      if (start && en_q) begin
        hold_q <= 1'b0;
        ok_q   <= '0;
        nok_q  <= '0;
      end else if (frame_end && counting) begin
        if (match) ok_q  <= ok_q + 1;
        else       nok_q <= nok_q + 1;
        if (ok_q == 0 && nok_q == 0) first_ts_q <= rx_ts;
        last_ts_q <= rx_ts;
        if ((frames_exp_q != 0 && ok_q + nok_q + 1 >= frames_exp_q) ||
            (frames_exp_ok_q != 0 && match && ok_q + 1 >= frames_exp_ok_q))
          hold_q <= 1'b1;
      end
    end
  end

  always_comb begin
    if (!en_q)       state = RX_DISABLE;
    else if (hold_q) state = RX_HOLD;
    else if (run_q)  state = RX_RECEIVING;
    else             state = RX_DISABLE;
  end

endmodule
