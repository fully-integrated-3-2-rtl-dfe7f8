// pid_controller: phase stabilization of the unbalanced interferometer.
//
// A power meter watches the second interferometer output; its reading drifts as the
// arm phase drifts. On every new reading (pm_valid) this block computes a positional
// PID correction and writes a new code for the DAC, whose voltage is amplified by the
// high-voltage module that drives the phase shifter in one arm:
//   e[t]   = setpoint - pm_data                     (signed)
//   I[t]   = clamp(I[t-1] + e[t], +/-INT_LIM)       (anti-windup)
//   u[t]   = (kp*e[t] + ki*I[t] + kd*(e[t]-e[t-1])) >>> FRAC
//   dac    = clamp(2^(DAC_W-1) + u[t], 0, 2^DAC_W-1)
// Gains are signed COEF_W-bit numbers with FRAC fraction bits, so the loop sign can be
// chosen to suit the phase shifter's direction. Reset sets I and e[t-1] to zero and the
// DAC code to mid-scale.
//
// Timing: dac_valid pulses and dac_data updates one clock after pm_valid.
// That the loop is a PID run in the FPGA between the power meter and the DAC follows
// the published design; the PID form, widths, clamps and gain format are this
// implementation's choices.
module pid_controller #(
  parameter int unsigned PM_W   = 12,
  parameter int unsigned DAC_W  = 16,
  parameter int unsigned COEF_W = 16,
  parameter int unsigned FRAC   = 8,
  parameter int unsigned INT_W  = 24
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     pm_valid,
  input  logic [PM_W-1:0]          pm_data,
  input  logic [PM_W-1:0]          setpoint,
  input  logic signed [COEF_W-1:0] kp,
  input  logic signed [COEF_W-1:0] ki,
  input  logic signed [COEF_W-1:0] kd,
  output logic                     dac_valid,
  output logic [DAC_W-1:0]         dac_data
);
  localparam int unsigned EW = PM_W + 1;                  // error width
  localparam int unsigned SW = COEF_W + INT_W + 3;        // sum width
  localparam logic signed [INT_W-1:0] INT_LIM = (INT_W)'((1 << (INT_W - 2)) - 1);
  localparam logic signed [SW-1:0]    DAC_MAX = SW'((1 << DAC_W) - 1);
  localparam logic signed [SW-1:0]    DAC_MID = SW'(1 << (DAC_W - 1));

  logic signed [EW-1:0]    err, err_prev;
  logic signed [EW:0]      derr;
  logic signed [INT_W-1:0] integ, integ_next;
  logic signed [INT_W:0]   integ_sum;
  logic signed [SW-1:0]    acc, u, code;

  always_comb begin
    err        = $signed({1'b0, setpoint}) - $signed({1'b0, pm_data});
    derr       = (EW+1)'(err) - (EW+1)'(err_prev);
    integ_sum  = (INT_W+1)'(integ) + (INT_W+1)'(err);
    if (integ_sum > (INT_W+1)'(INT_LIM))       integ_next = INT_LIM;
    else if (integ_sum < -(INT_W+1)'(INT_LIM)) integ_next = -INT_LIM;
    else                                       integ_next = INT_W'(integ_sum);
    acc  = SW'(kp) * SW'(err) + SW'(ki) * SW'(integ_next) + SW'(kd) * SW'(derr);
    u    = acc >>> FRAC;
    code = DAC_MID + u;
    if (code < 0)            code = '0;
    else if (code > DAC_MAX) code = DAC_MAX;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      err_prev  <= '0;
      integ     <= '0;
      dac_valid <= 1'b0;
      dac_data  <= DAC_W'(1 << (DAC_W - 1));
    end else begin
      dac_valid <= pm_valid;
      if (pm_valid) begin
        err_prev <= err;
        integ    <= integ_next;
        dac_data <= DAC_W'(code);
      end
    end
  end
endmodule
