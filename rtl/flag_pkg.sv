// flag_pkg: types, constants and helpers shared by the load-generator logic.
//
// Every Ethernet port moves one byte per "byte time". All logic runs on a
// single 125 MHz clock (8 ns); a byte time is marked by a strobe that is high
// every cycle at 1 Gb/s and every tenth cycle at 100 Mb/s. A byte stream is
// therefore carried as gmii_t {stb, dv, data}: dv/data are meaningful only in
// cycles with stb = 1, and dv = 0 in a byte time means an idle line byte.
//
// The register map of the generator and analyser (base addresses and the
// offsets TR_CTRL .. HEADER_SIZE) follows the register listing published for
// the platform; the offsets of the remaining registers, the global and monitor
// register blocks and all bit layouts are this design's own choice.
//
// CRC: the IEEE 802.3 frame check sequence (reflected polynomial 0xEDB88320,
// preset all-ones, complemented, sent least significant byte first). Running
// the same update over a good frame including its FCS leaves CRC_RESIDUE.
package flag_pkg;

  localparam int unsigned NS_PER_CYCLE = 8;        // 125 MHz system clock
  localparam int unsigned FAST_ETH_DIV = 10;       // 125 MHz / 12.5 Mbyte/s
  localparam int unsigned MIN_IFG      = 12;       // minimum interframe gap, bytes
  localparam int unsigned PREAMBLE_LEN = 7;
  localparam logic [7:0]  PREAMBLE_BYTE = 8'h55;
  localparam logic [7:0]  SFD_BYTE      = 8'hD5;
  localparam logic [31:0] CRC_RESIDUE   = 32'hDEBB20E3;

  // One byte time of an Ethernet byte stream.
  typedef struct packed {
    logic       stb;   // this cycle is a byte time
    logic       dv;    // data valid (TX_EN / RX_DV) in this byte time
    logic [7:0] data;
  } gmii_t;

  localparam gmii_t GMII_IDLE = '{stb: 1'b0, dv: 1'b0, data: 8'h00};

  // Frame bytes after the SFD (destination MAC .. FCS), one per cycle at most.
  typedef struct packed {
    logic       vld;
    logic [7:0] data;
  } fbyte_t;

  // On-Chip Bus request. wr and rd are single-cycle strobes.
  typedef struct packed {
    logic        wr;
    logic        rd;
    logic [31:0] addr;
    logic [31:0] wdata;
  } ocb_req_t;

  localparam ocb_req_t OCB_IDLE = '{wr: 1'b0, rd: 1'b0, addr: 32'h0, wdata: 32'h0};

  typedef enum logic [1:0] {
    MODE_TRANSPARENT = 2'd0,
    MODE_SWITCHING   = 2'd1,
    MODE_SCRIPTING   = 2'd2
  } nj_mode_e;

  // TRANSMITTER_STATE of a generator and of an analyser (value read at TR_STAT)
  typedef enum logic [1:0] {
    TX_DISABLE      = 2'd0,
    TX_TRANSMITTING = 2'd1,
    TX_DONE         = 2'd2
  } tx_state_e;

  typedef enum logic [1:0] {
    RX_DISABLE   = 2'd0,
    RX_RECEIVING = 2'd1,
    RX_HOLD      = 2'd2
  } rx_state_e;

  // ---- address map -------------------------------------------------------
  localparam logic [31:0] GLOBAL_BASE  = 32'h4000_0000;
  localparam logic [31:0] MONITOR_BASE = 32'h4001_0000;
  localparam logic [31:0] TXA_BASE     = 32'h4003_0000;  // TXB..TXD at +0x10000 each
  localparam logic [31:0] RX_OFFSET    = 32'h0000_4000;  // RXx = TXx + 0x4000
  localparam logic [31:0] PORT_STRIDE  = 32'h0001_0000;

  // ---- generator / analyser register offsets -----------------------------
  localparam logic [15:0] REG_TR_CTRL          = 16'h2800;
  localparam logic [15:0] REG_TR_STAT          = 16'h2804;
  localparam logic [15:0] REG_START_DELAY      = 16'h2808;  // generator
  localparam logic [15:0] REG_INTERFRAME_GAP   = 16'h280C;  // generator
  localparam logic [15:0] REG_NUMBER_OF_FRAMES = 16'h2810;  // generator
  localparam logic [15:0] REG_HEADER_SIZE      = 16'h2814;
  localparam logic [15:0] REG_ETHDST_HI        = 16'h2818;  // bytes 0..1
  localparam logic [15:0] REG_ETHDST_LO        = 16'h281C;  // bytes 2..5
  localparam logic [15:0] REG_ETHSRC_HI        = 16'h2820;
  localparam logic [15:0] REG_ETHSRC_LO        = 16'h2824;
  localparam logic [15:0] REG_HDR_AFTER_HI     = 16'h2828;  // bytes 0..1
  localparam logic [15:0] REG_HDR_AFTER_LO     = 16'h282C;  // bytes 2..5
  localparam logic [15:0] REG_PAYLOAD_SIZE     = 16'h2830;
  localparam logic [15:0] REG_FRAMES_SENT      = 16'h2834;  // generator, read-only
  localparam logic [15:0] REG_FRAMES_EXP       = 16'h2840;  // analyser
  localparam logic [15:0] REG_FRAMES_EXP_OK    = 16'h2844;
  localparam logic [15:0] REG_RECV_OK          = 16'h2848;
  localparam logic [15:0] REG_RECV_NOK         = 16'h284C;
  localparam logic [15:0] REG_ERROR_CODE       = 16'h2850;
  localparam logic [15:0] REG_FIRST_TS_LO      = 16'h2854;
  localparam logic [15:0] REG_FIRST_TS_HI      = 16'h2858;
  localparam logic [15:0] REG_LAST_TS_LO       = 16'h285C;
  localparam logic [15:0] REG_LAST_TS_HI       = 16'h2860;
  localparam logic [15:0] REG_PAT_OFFSET       = 16'h2864;
  localparam logic [15:0] REG_PAT_VALUE        = 16'h2868;
  localparam logic [15:0] REG_PAT_MASK         = 16'h286C;

  // ---- global register offsets --------------------------------------------
  localparam logic [15:0] GREG_MODE       = 16'h0000;  // [1:0] nj_mode_e
  localparam logic [15:0] GREG_RUN        = 16'h0004;  // [0] 1 = ETH_TXRX_START, 0 = ETH_TXRX_STOP
  localparam logic [15:0] GREG_SPEED      = 16'h0008;  // bit p: port p at 100 Mb/s
  localparam logic [15:0] GREG_TIME_LO    = 16'h000C;
  localparam logic [15:0] GREG_TIME_HI    = 16'h0010;
  localparam logic [15:0] GREG_LOAD       = 16'h0020;  // L in percent
  localparam logic [15:0] GREG_FRAME_SIZE = 16'h0024;  // S in bytes
  localparam logic [15:0] GREG_CALC       = 16'h0028;  // write: start, read: {error, done, busy}
  localparam logic [15:0] GREG_LOAD_GAP   = 16'h002C;  // I_L in bytes

  // ---- monitor register offsets (port p at p*0x40) -----------------------
  localparam logic [15:0] MREG_CTRL    = 16'h0000;
  localparam logic [15:0] MREG_DST_HI  = 16'h0004;
  localparam logic [15:0] MREG_DST_LO  = 16'h0008;
  localparam logic [15:0] MREG_SRC_HI  = 16'h000C;
  localparam logic [15:0] MREG_SRC_LO  = 16'h0010;
  localparam logic [15:0] MREG_TYPE    = 16'h0014;
  localparam logic [15:0] MREG_DROPS   = 16'h0018;  // read-only
  localparam logic [15:0] MREG_STRIDE  = 16'h0040;

  // Filter configuration of one monitor port
  typedef struct packed {
    logic        dst_en;    // compare destination MAC
    logic        src_en;    // compare source MAC
    logic        type_en;   // compare Ethertype
    logic        port_tag;  // append {port, code} trailer at Port L
    logic        watch_tx;  // 1: watch the transmitted stream, 0: the received one
    logic [47:0] dst;
    logic [47:0] src;
    logic [15:0] etype;
  } mon_cfg_t;

  // One byte of the IEEE 802.3 CRC-32 (reflected, LSB first).
  function automatic logic [31:0] crc32_byte(input logic [31:0] crc, input logic [7:0] d);
    logic [31:0] c;
    c = crc;
    for (int i = 0; i < 8; i++) begin
      if (c[0] ^ d[i]) c = (c >> 1) ^ 32'hEDB88320;
      else             c = c >> 1;
    end
    return c;
  endfunction

endpackage
