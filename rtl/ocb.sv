// ocb: On-Chip Bus decoder between the processor and the register blocks.
//
// The processor side issues single-cycle write (wr) or read (rd) strobes
// with a 32-bit address. The decoder forwards the request to exactly one
// device, with the strobes of all other devices held low and the address
// reduced to the offset inside the device's block:
//   0x4000_0000 + off          global registers
//   0x4001_0000 + off          monitor
//   0x4003_0000 + p*0x1_0000   generator of port p (TXA..TXD), off < 0x4000
//   0x4003_4000 + p*0x1_0000   analyser of port p (RXA..RXD)
// Read data of the addressed device is registered: rvalid pulses one cycle
// after rd with rdata. Unmapped addresses read as 0 and ignore writes.
// The upper 16 address bits of every routed request are constant 0, and the
// generator/analyser offsets keep only 14 bits: synthesis reports these
// request bits as constant outputs, which is intended.
//
// The generator and analyser bases follow the platform's published register
// map; the global and monitor bases and the handshake are this design's
// choices.
module ocb
  import flag_pkg::*;
#(
  parameter int unsigned NUM_PORTS = 4
) (
  input  logic        clk,
  input  logic        rst_n,
  input  ocb_req_t    bus,
  output logic [31:0] rdata,
  output logic        rvalid,
  output ocb_req_t    glb_req,
  input  logic [31:0] glb_rdata,
  output ocb_req_t    mon_req,
  input  logic [31:0] mon_rdata,
  output ocb_req_t    gen_req   [NUM_PORTS],
  input  logic [31:0] gen_rdata [NUM_PORTS],
  output ocb_req_t    ana_req   [NUM_PORTS],
  input  logic [31:0] ana_rdata [NUM_PORTS]
);

  wire [15:0] hi = bus.addr[31:16];

  function automatic ocb_req_t route(input ocb_req_t r, input logic sel, input logic [15:0] off);
    ocb_req_t o;
    o       = r;
    o.wr    = r.wr & sel;
    o.rd    = r.rd & sel;
    o.addr  = {16'h0, off};
    return o;
  endfunction

  logic [31:0] rd_mux;

  always_comb begin
    glb_req = route(bus, hi == GLOBAL_BASE[31:16],  bus.addr[15:0]);
    mon_req = route(bus, hi == MONITOR_BASE[31:16], bus.addr[15:0]);
    for (int p = 0; p < NUM_PORTS; p++) begin
      logic port_hit;
      port_hit   = (hi == 16'(TXA_BASE[31:16] + p));
      gen_req[p] = route(bus, port_hit && bus.addr[15:14] == 2'b00, {2'b00, bus.addr[13:0]});
      ana_req[p] = route(bus, port_hit && bus.addr[15:14] == 2'b01, {2'b00, bus.addr[13:0]});
    end
  end

  always_comb begin
    rd_mux = 32'h0;
    if (hi == GLOBAL_BASE[31:16])  rd_mux = glb_rdata;
    if (hi == MONITOR_BASE[31:16]) rd_mux = mon_rdata;
    for (int p = 0; p < NUM_PORTS; p++) begin
      if (hi == 16'(TXA_BASE[31:16] + p) && bus.addr[15:14] == 2'b00) rd_mux = gen_rdata[p];
      if (hi == 16'(TXA_BASE[31:16] + p) && bus.addr[15:14] == 2'b01) rd_mux = ana_rdata[p];
    end
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      rdata  <= '0;
      rvalid <= 1'b0;
    end else begin
      rvalid <= bus.rd;
      if (bus.rd) rdata <= rd_mux;
    end
  end

  assert property (@(posedge clk) disable iff (!rst_n) !(bus.wr && bus.rd));

endmodule
