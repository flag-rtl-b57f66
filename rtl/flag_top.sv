// flag_top: programmable-logic top of the load generator.
//
// The processor writes registers over the On-Chip Bus (ocb_*) to set the
// operating mode, program the four port generators and analysers and the
// monitor, and to start and stop the execution phase. Four port blocks face
// the Ethernet PHYs (phy_rx / phy_tx, byte-wide with a byte strobe). The
// stream switch bridges Port A and Port B in switching mode. The monitor
// copies selected frames of every port to Port L (portl_tx), the link to the
// processor. SFD timestamps and the TR_STAT states of every port's
// generator and analyser are brought out as well (status pins).
//
// To generate a load of L percent with frames of S bytes on port p:
// select scripting mode, write the frame header and sizes and
// INTERFRAME_GAP = I_L (computed by the load-gap unit in the global
// registers, or by software) and NUMBER_OF_FRAMES to generator p, set its
// TR_CTRL to 1 and write RUN = 1. TR_STAT reads 2 when all frames are sent.
//
// All logic runs on one 125 MHz clock with a synchronous active-low reset.
// The processor, the NSL script interpreter and the PHYs are outside this
// module; the receive direction of Port L (processor to ports) and the
// unspecified function blocks of the platform are not part of it.
module flag_top
  import flag_pkg::*;
#(
  parameter int unsigned NUM_PORTS = 4,
  parameter int unsigned MON_DEPTH = 2048
) (
  input  logic        clk,
  input  logic        rst_n,
  // On-Chip Bus from the processor
  input  logic        ocb_wr,
  input  logic        ocb_rd,
  input  logic [31:0] ocb_addr,
  input  logic [31:0] ocb_wdata,
  output logic [31:0] ocb_rdata,
  output logic        ocb_rvalid,
  // Ethernet ports A..D
  input  gmii_t       phy_rx [NUM_PORTS],
  output gmii_t       phy_tx [NUM_PORTS],
  output logic [63:0] rx_ts  [NUM_PORTS],
  output logic [63:0] tx_ts  [NUM_PORTS],
  output logic [NUM_PORTS-1:0] rx_ts_valid,
  output logic [NUM_PORTS-1:0] tx_ts_valid,
  output tx_state_e   gen_state [NUM_PORTS],
  output rx_state_e   ana_state [NUM_PORTS],
  // Port L towards the processor
  output gmii_t       portl_tx
);

  ocb_req_t    bus, glb_req, mon_req;
  ocb_req_t    gen_req [NUM_PORTS];
  ocb_req_t    ana_req [NUM_PORTS];
  logic [31:0] glb_rdata, mon_rdata;
  logic [31:0] gen_rdata [NUM_PORTS];
  logic [31:0] ana_rdata [NUM_PORTS];

  nj_mode_e             mode;
  logic                 run;
  logic [NUM_PORTS-1:0] speed_100;
  logic [63:0]          now_ns;

  gmii_t      rx_s    [NUM_PORTS];
  gmii_t      tx_s    [NUM_PORTS];
  gmii_t      fwd     [NUM_PORTS];
  logic [7:0] rx_code [NUM_PORTS];

  always_comb bus = '{wr: ocb_wr, rd: ocb_rd, addr: ocb_addr, wdata: ocb_wdata};

  ocb #(.NUM_PORTS(NUM_PORTS)) u_ocb (
    .clk, .rst_n, .bus, .rdata(ocb_rdata), .rvalid(ocb_rvalid),
    .glb_req, .glb_rdata, .mon_req, .mon_rdata,
    .gen_req, .gen_rdata, .ana_req, .ana_rdata
  );

  global_ctrl #(.NUM_PORTS(NUM_PORTS)) u_glb (
    .clk, .rst_n, .ocb(glb_req), .ocb_rdata(glb_rdata),
    .mode, .run, .speed_100, .now_ns
  );

  for (genvar p = 0; p < NUM_PORTS; p++) begin : g_port
    port_mgmt u_port (
      .clk, .rst_n, .mode, .run, .speed_100(speed_100[p]), .now_ns,
      .gen_req(gen_req[p]), .gen_rdata(gen_rdata[p]),
      .ana_req(ana_req[p]), .ana_rdata(ana_rdata[p]),
      .phy_rx(phy_rx[p]), .phy_tx(phy_tx[p]), .fwd_in(fwd[p]),
      .rx_out(rx_s[p]), .tx_out(tx_s[p]), .rx_code(rx_code[p]),
      .rx_ts(rx_ts[p]), .tx_ts(tx_ts[p]),
      .rx_ts_valid(rx_ts_valid[p]), .tx_ts_valid(tx_ts_valid[p]),
      .gen_state(gen_state[p]), .ana_state(ana_state[p])
    );
  end

  stream_switch #(.NUM_PORTS(NUM_PORTS)) u_switch (
    .clk, .rst_n, .mode, .rx(rx_s), .fwd
  );

  monitor #(.NUM_PORTS(NUM_PORTS), .DEPTH(MON_DEPTH)) u_mon (
    .clk, .rst_n, .ocb(mon_req), .ocb_rdata(mon_rdata), .mode,
    .port_rx(rx_s), .port_tx(tx_s), .rx_code, .portl_tx
  );

endmodule
