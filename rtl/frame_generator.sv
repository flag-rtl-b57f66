// frame_generator: per-port Ethernet frame generator, the engine of the load
// generator.
//
// When the execution phase starts (rising edge of run) and the generator is
// enabled (TR_CTRL bit 0), it waits START_DELAY byte times, then sends
// NUMBER_OF_FRAMES frames. Each frame is 7 preamble bytes, the SFD, the
// destination MAC, the source MAC, HEADER_SIZE-12 bytes of HDR_AFTER_MAC
// (2 for a plain Ethertype, 6 for an 802.1Q tag plus Ethertype),
// PAYLOAD_SIZE payload bytes and the 4-byte CRC. Frames are separated by
// INTERFRAME_GAP idle byte times. A frame therefore occupies
// 8 + HEADER_SIZE + PAYLOAD_SIZE + 4 + INTERFRAME_GAP byte times, so writing
// INTERFRAME_GAP = I_L = 12 + (S+12)(100-L)/L yields a load of L percent.
//
// TR_STAT reads the TRANSMITTER_STATE: 0 Disable, 1 Transmitting, 2 Done.
// Done holds until the next start or the next write to TR_CTRL. A TR_CTRL
// write also aborts a run in progress at once, cutting a frame on the line;
// it is meant to be written between runs, as the published script does.
// Clearing run (ETH_TXRX_STOP) stops the generator at the next frame
// boundary; a frame already started is completed.
//
// Timing: the state advances on each byte strobe stb; the byte for that byte
// time appears on tx one cycle later with tx.stb = 1. The register set and
// its meaning follow the published attribute list; the payload pattern
// (incrementing bytes from 0 in each frame), the stop rule and the register
// reset values are this design's own choices.
module frame_generator
  import flag_pkg::*;
#(
  parameter int unsigned DEFAULT_HEADER_SIZE = 14,
  parameter int unsigned DEFAULT_IFG         = MIN_IFG
) (
  input  logic        clk,
  input  logic        rst_n,
  input  ocb_req_t    ocb,        // addr holds the offset within the block
  output logic [31:0] ocb_rdata,
  input  logic        run,
  input  logic        stb,
  output gmii_t       tx,
  output tx_state_e   state
);

  typedef enum logic [2:0] {
    PH_IDLE, PH_DELAY, PH_PRE, PH_SFD, PH_HDR, PH_PAY, PH_FCS, PH_GAP
  } phase_e;

  // ---------------- registers ----------------
  logic        en_q;
  logic [31:0] start_delay_q, ifg_q, nframes_q, header_size_q, payload_size_q;
  logic [47:0] dst_q, src_q, hdr_after_q;
  logic [31:0] sent_q;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      en_q           <= 1'b0;
      start_delay_q  <= '0;
      ifg_q          <= 32'(DEFAULT_IFG);
      nframes_q      <= '0;
      header_size_q  <= 32'(DEFAULT_HEADER_SIZE);
      payload_size_q <= 32'd46;
      dst_q          <= '0;
      src_q          <= '0;
      hdr_after_q    <= '0;
    end else if (ocb.wr) begin
      unique case (ocb.addr[15:0])
        REG_TR_CTRL:          en_q           <= ocb.wdata[0];
        REG_START_DELAY:      start_delay_q  <= ocb.wdata;
        REG_INTERFRAME_GAP:   ifg_q          <= ocb.wdata;
        REG_NUMBER_OF_FRAMES: nframes_q      <= ocb.wdata;
        REG_HEADER_SIZE:      header_size_q  <= ocb.wdata;
        REG_ETHDST_HI:        dst_q[47:32]       <= ocb.wdata[15:0];
        REG_ETHDST_LO:        dst_q[31:0]        <= ocb.wdata;
        REG_ETHSRC_HI:        src_q[47:32]       <= ocb.wdata[15:0];
        REG_ETHSRC_LO:        src_q[31:0]        <= ocb.wdata;
        REG_HDR_AFTER_HI:     hdr_after_q[47:32] <= ocb.wdata[15:0];
        REG_HDR_AFTER_LO:     hdr_after_q[31:0]  <= ocb.wdata;
        REG_PAYLOAD_SIZE:     payload_size_q <= ocb.wdata;
        default: ;
      endcase
    end
  end

  always_comb begin
    unique case (ocb.addr[15:0])
      REG_TR_CTRL:          ocb_rdata = {31'b0, en_q};
      REG_TR_STAT:          ocb_rdata = {30'b0, state};
      REG_START_DELAY:      ocb_rdata = start_delay_q;
      REG_INTERFRAME_GAP:   ocb_rdata = ifg_q;
      REG_NUMBER_OF_FRAMES: ocb_rdata = nframes_q;
      REG_HEADER_SIZE:      ocb_rdata = header_size_q;
      REG_ETHDST_HI:        ocb_rdata = {16'b0, dst_q[47:32]};
      REG_ETHDST_LO:        ocb_rdata = dst_q[31:0];
      REG_ETHSRC_HI:        ocb_rdata = {16'b0, src_q[47:32]};
      REG_ETHSRC_LO:        ocb_rdata = src_q[31:0];
      REG_HDR_AFTER_HI:     ocb_rdata = {16'b0, hdr_after_q[47:32]};
      REG_HDR_AFTER_LO:     ocb_rdata = hdr_after_q[31:0];
      REG_PAYLOAD_SIZE:     ocb_rdata = payload_size_q;
      REG_FRAMES_SENT:      ocb_rdata = sent_q;
      default:              ocb_rdata = 32'h0;
    endcase
  end

  // ---------------- sequencer ----------------
  phase_e      phase_q;
  logic [31:0] cnt_q;       // byte index inside the current phase
  logic [31:0] crc_q;
  logic        run_q;
  logic        done_q;
  wire         start = run & ~run_q;

  // Byte of the header at index i (0..17): dst, src, then HDR_AFTER_MAC.
  function automatic logic [7:0] hdr_byte(input logic [31:0] i,
      input logic [47:0] d, input logic [47:0] s, input logic [47:0] h);
    if (i < 6)       return d[8*(5 - i) +: 8];
    else if (i < 12) return s[8*(11 - i) +: 8];
    else if (i < 18) return h[8*(17 - i) +: 8];
    else             return 8'h00;
  endfunction

  // Length of a phase in byte times.
  function automatic logic [31:0] ph_len(input phase_e p);
    unique case (p)
      PH_DELAY: return start_delay_q;
      PH_PRE:   return 32'(PREAMBLE_LEN);
      PH_SFD:   return 32'd1;
      PH_HDR:   return header_size_q;
      PH_PAY:   return payload_size_q;
      PH_FCS:   return 32'd4;
      PH_GAP:   return ifg_q;
      default:  return 32'd0;
    endcase
  endfunction

  logic [7:0] byte_now;
  logic       dv_now;
  always_comb begin
    dv_now   = 1'b1;
    byte_now = 8'h00;
    unique case (phase_q)
      PH_PRE: byte_now = PREAMBLE_BYTE;
      PH_SFD: byte_now = SFD_BYTE;
      PH_HDR: byte_now = hdr_byte(cnt_q, dst_q, src_q, hdr_after_q);
      PH_PAY: byte_now = cnt_q[7:0];
      PH_FCS: byte_now = ~crc_q[8*cnt_q[1:0] +: 8];
      default: dv_now = 1'b0;
    endcase
  end

  // What comes after the last byte of the current phase (zero-length phases
  // are skipped).
  phase_e      next_ph;
  logic [31:0] sent_next;
  always_comb begin
    sent_next = sent_q + ((phase_q == PH_FCS) ? 32'd1 : 32'd0);
    next_ph   = phase_q;
    unique case (phase_q)
      PH_DELAY: next_ph = PH_PRE;
      PH_PRE:   next_ph = PH_SFD;
      PH_SFD:   next_ph = (header_size_q != 0) ? PH_HDR : ((payload_size_q != 0) ? PH_PAY : PH_FCS);
      PH_HDR:   next_ph = (payload_size_q != 0) ? PH_PAY : PH_FCS;
      PH_PAY:   next_ph = PH_FCS;
      PH_FCS, PH_GAP: begin
        if (phase_q == PH_FCS && ifg_q != 0) next_ph = PH_GAP;
        else if (sent_next >= nframes_q || !run) next_ph = PH_IDLE;
        else next_ph = PH_PRE;
      end
      default: next_ph = PH_IDLE;
    endcase
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      phase_q <= PH_IDLE;
      cnt_q   <= '0;
      crc_q   <= '1;
      run_q   <= 1'b0;
      done_q  <= 1'b0;
      sent_q  <= '0;
      tx      <= GMII_IDLE;
    end else begin
      run_q <= run;
      tx    <= '{stb: stb, dv: 1'b0, data: 8'h00};
      if (!en_q || (ocb.wr && ocb.addr[15:0] == REG_TR_CTRL)) begin
        phase_q <= PH_IDLE;
        done_q  <= 1'b0;
      end else if (phase_q == PH_IDLE) begin
        if (start) begin
          cnt_q  <= '0;
          sent_q <= '0;
          done_q <= 1'b0;
          if (nframes_q == 0)          done_q  <= 1'b1;
          else if (start_delay_q != 0) phase_q <= PH_DELAY;
          else                         phase_q <= PH_PRE;
        end
      end else if (stb) begin
        tx <= '{stb: 1'b1, dv: dv_now, data: byte_now};
        if (phase_q == PH_SFD) crc_q <= '1;
        if (phase_q == PH_HDR || phase_q == PH_PAY) crc_q <= crc32_byte(crc_q, byte_now);
        if (cnt_q + 1 >= ph_len(phase_q)) begin
          cnt_q   <= '0;
          sent_q  <= sent_next;
          phase_q <= next_ph;
          if (next_ph == PH_IDLE) done_q <= 1'b1;
        end else begin
          cnt_q <= cnt_q + 1;
        end
      end
    end
  end

  always_comb begin
    if (!en_q)                 state = TX_DISABLE;
    else if (phase_q != PH_IDLE) state = TX_TRANSMITTING;
    else if (done_q)           state = TX_DONE;
    else                       state = TX_DISABLE;
  end

  // An enabled generator sends only complete frames: the FCS phase is always
  // four byte times long.
  assert property (@(posedge clk) disable iff (!rst_n)
                   (phase_q == PH_FCS && stb) |-> cnt_q < 4);

endmodule
