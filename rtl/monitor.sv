// monitor: copies selected port traffic to Port L, the link to the processor.
//
// For every port there is a filter and a one-frame buffer; an output
// arbiter empties the buffers onto Port L. Each port's filter watches either
// the port's received stream or its transmitted stream (CTRL bit 4), so the
// processor can see frames sent by the generators or received by the
// analysers. With only one frame per buffer (four in all) the monitor can
// lose frames under load; lost kept frames are counted per port (DROPS).
// In transparent mode the filters keep every frame.
//
// Registers (offset from the monitor base, port p at p*0x40):
//   CTRL   0x00  [0] compare dst MAC, [1] compare src MAC, [2] compare
//                Ethertype, [3] port tag trailer, [4] watch transmit stream
//   DST    0x04 (bytes 0..1) / 0x08 (bytes 2..5),  SRC 0x0C / 0x10
//   TYPE   0x14  Ethertype to compare
//   DROPS  0x18  read-only count of lost frames
// The analyser's trailer code is used only for the received stream.
//
// The split into filters, buffers and an arbiter that adds a trailer, and
// the four-frame capacity, follow the platform description; the register
// layout and the source select are this design's choices.
module monitor
  import flag_pkg::*;
#(
  parameter int unsigned NUM_PORTS = 4,
  parameter int unsigned DEPTH     = 2048
) (
  input  logic        clk,
  input  logic        rst_n,
  input  ocb_req_t    ocb,
  output logic [31:0] ocb_rdata,
  input  nj_mode_e    mode,
  input  gmii_t       port_rx  [NUM_PORTS],
  input  gmii_t       port_tx  [NUM_PORTS],
  input  logic [7:0]  rx_code  [NUM_PORTS],
  output gmii_t       portl_tx
);

  localparam int unsigned AW = $clog2(DEPTH);

  mon_cfg_t             cfg     [NUM_PORTS];
  logic [31:0]          drops   [NUM_PORTS];
  logic [NUM_PORTS-1:0] full, rel, port_tag;
  logic [AW:0]          len     [NUM_PORTS];
  logic [7:0]           code    [NUM_PORTS];
  logic [7:0]           rd_data [NUM_PORTS];
  logic [AW-1:0]        rd_addr;

  wire [15:0] off  = ocb.addr[15:0] & (MREG_STRIDE - 16'd1);
  wire [15:0] pidx = ocb.addr[15:0] / MREG_STRIDE;

  for (genvar p = 0; p < NUM_PORTS; p++) begin : g_port
    always_ff @(posedge clk) begin
      if (!rst_n) begin
        cfg[p] <= '0;
      end else if (ocb.wr && pidx == 16'(p)) begin
        unique case (off)
          MREG_CTRL:   {cfg[p].watch_tx, cfg[p].port_tag, cfg[p].type_en,
                        cfg[p].src_en, cfg[p].dst_en} <= ocb.wdata[4:0];
          MREG_DST_HI: cfg[p].dst[47:32] <= ocb.wdata[15:0];
          MREG_DST_LO: cfg[p].dst[31:0]  <= ocb.wdata;
          MREG_SRC_HI: cfg[p].src[47:32] <= ocb.wdata[15:0];
          MREG_SRC_LO: cfg[p].src[31:0]  <= ocb.wdata;
          MREG_TYPE:   cfg[p].etype      <= ocb.wdata[15:0];
          default: ;
        endcase
      end
    end

    gmii_t  watched;
    fbyte_t fb;
    logic   eof, keep;
    always_comb watched = cfg[p].watch_tx ? port_tx[p] : port_rx[p];
    always_comb port_tag[p] = cfg[p].port_tag;

    monitor_filter u_filter (
      .clk, .rst_n, .cfg(cfg[p]), .bypass(mode == MODE_TRANSPARENT),
      .in(watched), .fb, .eof, .keep
    );

    frame_buffer #(.DEPTH(DEPTH)) u_buffer (
      .clk, .rst_n, .fb, .eof, .keep,
      .tag_code(cfg[p].watch_tx ? 8'h00 : rx_code[p]),
      .full(full[p]), .len(len[p]), .code(code[p]),
      .rd_addr, .rd_data(rd_data[p]), .release_frame(rel[p]), .drops(drops[p])
    );
  end

  output_arbiter #(.NUM_PORTS(NUM_PORTS), .DEPTH(DEPTH)) u_arb (
    .clk, .rst_n, .full, .len, .code, .port_tag, .rd_addr, .rd_data,
    .release_frame(rel), .portl_tx
  );

  always_comb begin
    ocb_rdata = 32'h0;
    for (int p = 0; p < NUM_PORTS; p++) begin
      if (pidx == 16'(p)) begin
        unique case (off)
          MREG_CTRL:   ocb_rdata = {27'b0, cfg[p].watch_tx, cfg[p].port_tag, cfg[p].type_en,
                                    cfg[p].src_en, cfg[p].dst_en};
          MREG_DST_HI: ocb_rdata = {16'b0, cfg[p].dst[47:32]};
          MREG_DST_LO: ocb_rdata = cfg[p].dst[31:0];
          MREG_SRC_HI: ocb_rdata = {16'b0, cfg[p].src[47:32]};
          MREG_SRC_LO: ocb_rdata = cfg[p].src[31:0];
          MREG_TYPE:   ocb_rdata = {16'b0, cfg[p].etype};
          MREG_DROPS:  ocb_rdata = drops[p];
          default:     ocb_rdata = 32'h0;
        endcase
      end
    end
  end

endmodule
