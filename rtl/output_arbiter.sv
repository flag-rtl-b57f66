// output_arbiter: sends the frames held in the monitor buffers out of Port L.
//
// Buffers holding a frame are served in round-robin order, starting after
// the one served last. Port L runs at one byte per cycle (1 Gb/s, strobe
// always high). A frame goes out as 7 preamble bytes, the SFD and the stored
// bytes, followed by the minimum gap of 12 idle bytes.
//
// Trailer: when the buffer's port has port tagging enabled, or the analyser
// attached a non-zero code, the stored FCS is dropped and the frame is sent
// as stored bytes without FCS, a two-byte trailer {port number, code} and a
// freshly computed FCS, so Port L receives a valid Ethernet frame that tells
// where it came from and why it was marked. Without a trailer the frame is
// sent exactly as stored, original FCS included.
//
// The arbiter with trailer insertion is named in the platform's block
// diagram; round-robin order and the trailer layout are this design's
// choices.
module output_arbiter
  import flag_pkg::*;
#(
  parameter int unsigned NUM_PORTS = 4,
  parameter int unsigned DEPTH     = 2048,
  localparam int unsigned AW       = $clog2(DEPTH)
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic [NUM_PORTS-1:0] full,
  input  logic [AW:0]          len      [NUM_PORTS],
  input  logic [7:0]           code     [NUM_PORTS],
  input  logic [NUM_PORTS-1:0] port_tag,
  output logic [AW-1:0]        rd_addr,
  input  logic [7:0]           rd_data  [NUM_PORTS],
  output logic [NUM_PORTS-1:0] release_frame,
  output gmii_t                portl_tx
);

  localparam int unsigned PW = (NUM_PORTS > 1) ? $clog2(NUM_PORTS) : 1;

  typedef enum logic [2:0] {S_IDLE, S_PRE, S_SFD, S_DATA, S_TRL, S_FCS, S_GAP} st_e;

  st_e         st_q;
  logic [PW-1:0] sel_q;
  logic [AW:0] cnt_q;
  logic [AW:0] data_len_q;
  logic        trl_q;
  logic [31:0] crc_q;

  // next buffer to serve after sel_q
  logic          found;
  logic [PW-1:0] pick;
  always_comb begin
    found = 1'b0;
    pick  = '0;
    for (int k = 1; k <= NUM_PORTS; k++) begin
      int idx;
      idx = (int'(sel_q) + k) % NUM_PORTS;
      if (!found && full[idx]) begin
        found = 1'b1;
        pick  = PW'(idx);
      end
    end
  end

  always_comb rd_addr = cnt_q[AW-1:0];

  logic [7:0] byte_now;
  always_comb begin
    unique case (st_q)
      S_PRE:   byte_now = PREAMBLE_BYTE;
      S_SFD:   byte_now = SFD_BYTE;
      S_DATA:  byte_now = rd_data[sel_q];
      S_TRL:   byte_now = (cnt_q[0] == 1'b0) ? 8'(sel_q) : code[sel_q];
      S_FCS:   byte_now = ~crc_q[8*cnt_q[1:0] +: 8];
      default: byte_now = 8'h00;
    endcase
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      st_q          <= S_IDLE;
      sel_q         <= PW'(NUM_PORTS - 1);
      cnt_q         <= '0;
      data_len_q    <= '0;
      trl_q         <= 1'b0;
      crc_q         <= '1;
      release_frame <= '0;
      portl_tx      <= GMII_IDLE;
    end else begin
      release_frame <= '0;
      portl_tx <= '{stb: 1'b1,
                    dv: (st_q != S_IDLE && st_q != S_GAP),
                    data: (st_q != S_IDLE && st_q != S_GAP) ? byte_now : 8'h00};
      cnt_q <= cnt_q + 1;
      unique case (st_q)
        S_IDLE: begin
          cnt_q <= '0;
          if (found) begin
            sel_q <= pick;
            trl_q <= port_tag[pick] || (code[pick] != 8'h00);
            data_len_q <= (port_tag[pick] || code[pick] != 8'h00)
                          ? ((len[pick] > 4) ? len[pick] - 4 : '0) : len[pick];
            st_q  <= S_PRE;
          end
        end
        S_PRE: if (cnt_q == (AW+1)'(PREAMBLE_LEN - 1)) begin cnt_q <= '0; st_q <= S_SFD; end
        S_SFD: begin
          cnt_q <= '0;
          crc_q <= '1;
          if (data_len_q == 0) release_frame[sel_q] <= 1'b1;
          st_q  <= (data_len_q != 0) ? S_DATA : (trl_q ? S_TRL : S_GAP);
        end
        S_DATA: begin
          crc_q <= crc32_byte(crc_q, byte_now);
          if (cnt_q + 1 >= data_len_q) begin
            cnt_q <= '0;
            release_frame[sel_q] <= 1'b1;
            st_q <= trl_q ? S_TRL : S_GAP;
          end
        end
        S_TRL: begin
          crc_q <= crc32_byte(crc_q, byte_now);
          if (cnt_q == 1) begin cnt_q <= '0; st_q <= S_FCS; end
        end
        S_FCS: if (cnt_q == 3) begin cnt_q <= '0; st_q <= S_GAP; end
        S_GAP: if (cnt_q == (AW+1)'(MIN_IFG - 1)) begin cnt_q <= '0; st_q <= S_IDLE; end
        default: st_q <= S_IDLE;
      endcase
    end
  end

endmodule
