// load_gap_calc: computes the load gap I_L for a requested network load.
//
// A frame of S bytes (preamble to FCS) followed by a gap of I_L idle bytes
// occupies the line for S + I_L byte times, of which S + 12 would be used at
// full load (12 being the minimum interframe gap). For a load of L percent
//     I_L = 12 + (12 + S) * (100 - L) / L
// so that (S + 12) / (S + I_L) = L / 100. The result is rounded to the
// nearest byte: quotient of (12 + S)(100 - L) + floor(L/2) by L.
//
// Interface: pulse start with load_pct (1..100) and frame_size valid; busy
// is high while the divider runs, done pulses when gap is valid (gap then
// holds until the next start). load_pct of 0 or above 100 raises error
// together with done and leaves gap at 0.
//
// Timing: one quotient bit per cycle, done 33 cycles after start.
//
// The formula is the published load-gap equation (with L in percent); the
// rounding and the serial divider are this design's choices.
module load_gap_calc
  import flag_pkg::*;
(
  input  logic        clk,
  input  logic        rst_n,
  input  logic        start,
  input  logic [6:0]  load_pct,
  input  logic [15:0] frame_size,
  output logic        busy,
  output logic        done,
  output logic        error,
  output logic [31:0] gap
);

  logic [31:0] num_q;     // dividend, shifted out MSB first
  logic [31:0] quo_q;
  logic [31:0] rem_q;
  logic [6:0]  div_q;
  logic [5:0]  bit_q;

  wire  [31:0] rem_sh = {rem_q[30:0], num_q[31]};

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      num_q <= '0;
      quo_q <= '0;
      rem_q <= '0;
      div_q <= '0;
      bit_q <= '0;
      busy  <= 1'b0;
      done  <= 1'b0;
      error <= 1'b0;
      gap   <= '0;
    end else begin
      done <= 1'b0;
      if (start && !busy) begin
        if (load_pct == 0 || load_pct > 7'd100) begin
          error <= 1'b1;
          done  <= 1'b1;
          gap   <= '0;
        end else begin
          error <= 1'b0;
          busy  <= 1'b1;
          num_q <= (32'(frame_size) + 32'(MIN_IFG)) * (32'd100 - 32'(load_pct))
                   + 32'(load_pct >> 1);
          div_q <= load_pct;
          quo_q <= '0;
          rem_q <= '0;
          bit_q <= 6'd32;
        end
      end else if (busy) begin
        num_q <= {num_q[30:0], 1'b0};
        if (rem_sh >= 32'(div_q)) begin
          rem_q <= rem_sh - 32'(div_q);
          quo_q <= {quo_q[30:0], 1'b1};
        end else begin
          rem_q <= rem_sh;
          quo_q <= {quo_q[30:0], 1'b0};
        end
        bit_q <= bit_q - 1;
        if (bit_q == 1) begin
          busy <= 1'b0;
          done <= 1'b1;
          gap  <= 32'(MIN_IFG) + {quo_q[30:0], (rem_sh >= 32'(div_q))};
        end
      end
    end
  end

endmodule
