// port_mgmt: everything that belongs to one Ethernet test port.
//
// The port joins its adaptor (byte strobe, PHY registers, SFD timestamps),
// its frame analyser on the received stream and its frame generator. A
// multiplexer picks what the port transmits: the generator in scripting
// mode, the Ethernet stream from the switch (fwd_in) otherwise; in
// transparent mode the switch forwards nothing, so the port stays silent.
// The generator is only started in scripting mode (its run input is gated).
// The received stream leaves on rx_out for the switch and the monitor, the
// transmitted stream on tx_out for the monitor.
//
// Timing: received bytes reach the analyser one cycle after the PHY pins;
// generated bytes reach the PHY pins two cycles after the byte strobe.
//
// The grouping of analyser, generator, multiplexer and adaptor per port and
// the rule that a frame leaves from the generator in scripting mode or from
// the stream path in switching mode follow the platform description.
// The analyser's per-frame verdict strobe (verdict_valid / verdict_ok) is
// left unconnected here: the counters and the trailer code carry the result,
// so the linter reports the two signals as unused.
module port_mgmt
  import flag_pkg::*;
(
  input  logic        clk,
  input  logic        rst_n,
  input  nj_mode_e    mode,
  input  logic        run,
  input  logic        speed_100,
  input  logic [63:0] now_ns,
  input  ocb_req_t    gen_req,
  output logic [31:0] gen_rdata,
  input  ocb_req_t    ana_req,
  output logic [31:0] ana_rdata,
  input  gmii_t       phy_rx,
  output gmii_t       phy_tx,
  input  gmii_t       fwd_in,
  output gmii_t       rx_out,
  output gmii_t       tx_out,
  output logic [7:0]  rx_code,
  output logic [63:0] rx_ts,
  output logic [63:0] tx_ts,
  output logic        rx_ts_valid,
  output logic        tx_ts_valid,
  output tx_state_e   gen_state,
  output rx_state_e   ana_state
);

  logic  stb;
  gmii_t gen_tx;
  logic  verdict_valid, verdict_ok;

  frame_generator u_gen (
    .clk, .rst_n, .ocb(gen_req), .ocb_rdata(gen_rdata),
    .run(run && mode == MODE_SCRIPTING), .stb, .tx(gen_tx), .state(gen_state)
  );

  always_comb tx_out = (mode == MODE_SCRIPTING) ? gen_tx : fwd_in;

  rgmii_adaptor u_adapt (
    .clk, .rst_n, .speed_100, .now_ns, .stb, .tx_in(tx_out), .phy_tx,
    .phy_rx, .rx_out, .rx_ts, .rx_ts_valid, .tx_ts, .tx_ts_valid
  );

  frame_analyser u_ana (
    .clk, .rst_n, .ocb(ana_req), .ocb_rdata(ana_rdata), .run, .rx(rx_out),
    .rx_ts, .verdict_valid, .verdict_ok, .tag_code(rx_code), .state(ana_state)
  );

endmodule
