// pi_ctrl: proportional-integral loop controller.
//
// corr = sat( kp*err + (I >>> I_SHIFT) ),  I <= sat(I + ki*err) every clock.
// The integrator saturates at its own width (anti-windup) and is cleared by
// int_clr. Gains are signed run-time inputs, so the sign of the loop can be
// chosen in use; kp = ki = 0 (with a cleared integrator) opens the loop,
// which is how the open-loop reference of the rejection measurement is taken.
// The output is a signed offset of the output oscillator's phase increment.
//
// Interface: err (ERR_BITS), kp, ki (GAIN_BITS), int_clr in; corr (OUT_BITS) out.
// Timing: err registered with the products (1 clock), output registered
// (1 clock): latency 2 clocks.
// The PI structure follows the loop diagram; gain format, integrator size,
// saturation and scaling are this design's choices.
module pi_ctrl
  import dopp_pkg::*;
#(
  parameter int ERR_BITS  = ERR_W,
  parameter int GAIN_BITS = GAIN_W,
  parameter int OUT_BITS  = CORR_W,
  parameter int INT_BITS  = 48,
  parameter int I_SHIFT   = 16
) (
  input  logic                         clk,
  input  logic                         rst,
  input  logic signed [ERR_BITS-1:0]   err,
  input  logic signed [GAIN_BITS-1:0]  kp,
  input  logic signed [GAIN_BITS-1:0]  ki,
  input  logic                         int_clr,
  output logic signed [OUT_BITS-1:0]   corr
);
  localparam int PB = ERR_BITS + GAIN_BITS;
  localparam int SB = INT_BITS + 2;

  logic signed [PB-1:0]       p_term, i_prod;
  logic signed [INT_BITS-1:0] integ;
  logic signed [INT_BITS:0]   integ_next;
  logic signed [SB-1:0]       sum;

  localparam logic signed [INT_BITS:0] IMAX = (INT_BITS+1)'((65'sd1 <<< (INT_BITS-1)) - 1);
  localparam logic signed [INT_BITS:0] IMIN = -(INT_BITS+1)'(65'sd1 <<< (INT_BITS-1));
  localparam logic signed [SB-1:0] OMAX = SB'((65'sd1 <<< (OUT_BITS-1)) - 1);
  localparam logic signed [SB-1:0] OMIN = -SB'(65'sd1 <<< (OUT_BITS-1));

  assign integ_next = (INT_BITS+1)'(integ) + (INT_BITS+1)'(i_prod);
  assign sum        = SB'(p_term) + SB'(integ >>> I_SHIFT);

  always_ff @(posedge clk) begin
    if (rst) begin
      p_term <= '0; i_prod <= '0; integ <= '0; corr <= '0;
    end else begin
      p_term <= kp * err;
      i_prod <= ki * err;
      if (int_clr)                integ <= '0;
      else if (integ_next > IMAX) integ <= INT_BITS'(IMAX);
      else if (integ_next < IMIN) integ <= INT_BITS'(IMIN);
      else                        integ <= INT_BITS'(integ_next);
      if (sum > OMAX)      corr <= OUT_BITS'(OMAX);
      else if (sum < OMIN) corr <= OUT_BITS'(OMIN);
      else                 corr <= OUT_BITS'(sum);
    end
  end

endmodule
