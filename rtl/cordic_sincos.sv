// cordic_sincos: pipelined CORDIC that turns a phase into a cosine and a sine.
//
// The phase is an unsigned fraction of a turn (PHASE_W bits). The two top bits
// select the quadrant: the vector is first rotated by 0, 90, 180 or 270 degrees,
// then CORDIC_N micro-rotations by +/-atan(2^-i) drive the residual angle
// (within +/-45 degrees) to zero. The start vector is pre-scaled by 1/K so no
// gain correction is needed at the end.
//
// Interface: phase in, cos_o/sin_o out, both SIN_W-bit signed.
// Timing: one result per clock, latency CORDIC_N + 1 clocks.
// The choice of a CORDIC rather than a lookup table is this design's own.
module cordic_sincos
  import dopp_pkg::*;
#(
  parameter int PHASE_BITS = PHASE_W,
  parameter int OUT_BITS   = SIN_W
) (
  input  logic                        clk,
  input  logic                        rst,
  input  logic [PHASE_BITS-1:0]       phase,
  output logic signed [OUT_BITS-1:0]  cos_o,
  output logic signed [OUT_BITS-1:0]  sin_o
);
  localparam int XW = OUT_BITS + 2;   // guard bits for the CORDIC growth

  logic signed [XW-1:0]         x [CORDIC_N+1];
  logic signed [XW-1:0]         y [CORDIC_N+1];
  logic signed [PHASE_BITS:0]   z [CORDIC_N+1];

  // Stage 0: quadrant rotation. Residual angle z in [-1/8, +1/8) turn.
  always_ff @(posedge clk) begin
    if (rst) begin
      x[0] <= '0; y[0] <= '0; z[0] <= '0;
    end else begin
      logic [PHASE_BITS-1:0] p;
      p = phase + PHASE_BITS'(1 << (PHASE_BITS-3));   // shift by 45 deg so each quadrant is centred
      unique case (p[PHASE_BITS-1 -: 2])
        2'd0: begin x[0] <=  XW'(CORDIC_X0); y[0] <= '0; end
        2'd1: begin x[0] <= '0; y[0] <=  XW'(CORDIC_X0); end
        2'd2: begin x[0] <= -XW'(CORDIC_X0); y[0] <= '0; end
        default: begin x[0] <= '0; y[0] <= -XW'(CORDIC_X0); end
      endcase
      z[0] <= $signed({1'b0, 2'b00, p[PHASE_BITS-3:0]}) - $signed((PHASE_BITS+1)'(1 << (PHASE_BITS-3)));
    end
  end

  for (genvar i = 0; i < CORDIC_N; i++) begin : g_stage
    // atan table is in 2^-20 turn units; rescale for other phase widths
    localparam int signed ATAN_I = (PHASE_BITS >= 20) ? (CORDIC_ATAN[i] <<< (PHASE_BITS-20))
                                                      : (CORDIC_ATAN[i] >>> (20-PHASE_BITS));
    always_ff @(posedge clk) begin
      if (rst) begin
        x[i+1] <= '0; y[i+1] <= '0; z[i+1] <= '0;
      end else if (z[i] >= 0) begin
        x[i+1] <= x[i] - (y[i] >>> i);
        y[i+1] <= y[i] + (x[i] >>> i);
        z[i+1] <= z[i] - (PHASE_BITS+1)'(ATAN_I);
      end else begin
        x[i+1] <= x[i] + (y[i] >>> i);
        y[i+1] <= y[i] - (x[i] >>> i);
        z[i+1] <= z[i] + (PHASE_BITS+1)'(ATAN_I);
      end
    end
  end

  function automatic logic signed [OUT_BITS-1:0] sat(input logic signed [XW-1:0] v);
    localparam logic signed [XW-1:0] MAXV = XW'((1 << (OUT_BITS-1)) - 1);
    if (v > MAXV)       return OUT_BITS'(MAXV);
    else if (v < -MAXV) return OUT_BITS'(-MAXV);
    else                return OUT_BITS'(v);
  endfunction

  assign cos_o = sat(x[CORDIC_N]);
  assign sin_o = sat(y[CORDIC_N]);

endmodule
