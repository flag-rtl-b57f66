// global_ctrl: device-wide registers and the time base.
//
// Holds the operating mode (transparent after reset, switching, scripting),
// the run flag of the execution phase (written 1 by ETH_TXRX_START and 0 by
// ETH_TXRX_STOP; generators and analysers start on its rising edge), the
// speed of each port (bit p = 1: 100 Mb/s) and a free-running time base in
// nanoseconds that advances by 8 each 125 MHz cycle. It also hosts the
// load-gap calculator: software writes L and S, writes CALC to start it,
// polls CALC until done and reads LOAD_GAP, the value to program into the
// generators' INTERFRAME_GAP.
//
// Registers (offset from the global base):
//   MODE 0x00, RUN 0x04, SPEED 0x08, TIME_LO 0x0C, TIME_HI 0x10 (read-only),
//   LOAD 0x20, FRAME_SIZE 0x24, CALC 0x28 (write: start; read: [2] error,
//   [1] done, [0] busy), LOAD_GAP 0x2C (read-only).
//
// The three modes, the start/stop of the execution phase and the 8 ns time
// base follow the platform description; the register layout is this
// design's choice.
module global_ctrl
  import flag_pkg::*;
#(
  parameter int unsigned NUM_PORTS = 4
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  ocb_req_t             ocb,
  output logic [31:0]          ocb_rdata,
  output nj_mode_e             mode,
  output logic                 run,
  output logic [NUM_PORTS-1:0] speed_100,
  output logic [63:0]          now_ns
);

  logic [6:0]  load_q;
  logic [15:0] size_q;
  logic        calc_start, calc_busy, calc_done, calc_err, done_q;
  logic [31:0] calc_gap;

  always_comb calc_start = ocb.wr && ocb.addr[15:0] == GREG_CALC;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      mode      <= MODE_TRANSPARENT;
      run       <= 1'b0;
      speed_100 <= '0;
      now_ns    <= '0;
      load_q    <= 7'd100;
      size_q    <= 16'd72;
      done_q    <= 1'b0;
    end else begin
      now_ns <= now_ns + 64'(NS_PER_CYCLE);
      if (calc_start) done_q <= 1'b0;
      else if (calc_done) done_q <= 1'b1;
      if (ocb.wr) begin
        unique case (ocb.addr[15:0])
          GREG_MODE:       mode      <= nj_mode_e'(ocb.wdata[1:0]);
          GREG_RUN:        run       <= ocb.wdata[0];
          GREG_SPEED:      speed_100 <= ocb.wdata[NUM_PORTS-1:0];
          GREG_LOAD:       load_q    <= ocb.wdata[6:0];
          GREG_FRAME_SIZE: size_q    <= ocb.wdata[15:0];
          default: ;
        endcase
      end
    end
  end

  load_gap_calc u_calc (
    .clk, .rst_n, .start(calc_start), .load_pct(load_q), .frame_size(size_q),
    .busy(calc_busy), .done(calc_done), .error(calc_err), .gap(calc_gap)
  );

  always_comb begin
    unique case (ocb.addr[15:0])
      GREG_MODE:       ocb_rdata = {30'b0, mode};
      GREG_RUN:        ocb_rdata = {31'b0, run};
      GREG_SPEED:      ocb_rdata = 32'(speed_100);
      GREG_TIME_LO:    ocb_rdata = now_ns[31:0];
      GREG_TIME_HI:    ocb_rdata = now_ns[63:32];
      GREG_LOAD:       ocb_rdata = {25'b0, load_q};
      GREG_FRAME_SIZE: ocb_rdata = {16'b0, size_q};
      GREG_CALC:       ocb_rdata = {29'b0, calc_err, done_q, calc_busy};
      GREG_LOAD_GAP:   ocb_rdata = calc_gap;
      default:         ocb_rdata = 32'h0;
    endcase
  end

endmodule
