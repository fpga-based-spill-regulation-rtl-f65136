// pid_controller: the fast regulation controller (10 kHz PID).
//
// At each 10 kHz tick the controller takes the current smoothed intensity
// (this sampling is the decimation from the bunch rate to 10 kHz) and forms
//   e      = setpoint - intensity
//   I      = clamp(I + e)                   (integral, anti-windup clamp)
//   D      = e - e_previous
//   u      = (kp*e + ki*I + kd*D) >>> FRAC  (gains are signed Q8.8)
//   corr   = saturate(u) to CORR_W bits
// A positive correction raises the quadrupole current, which moves more beam
// into the resonance and raises the extracted intensity.
//
// Follows the paper: a PID regulator evaluated at 10 kHz on the decimated,
// moving-average-smoothed intensity, whose output corrects the reference
// waveform. This design's own choices: the fixed-point formats, the
// integral clamp, the derivative on the error, and clearing the state at
// the start of every spill and while feedback is disabled.
//
// Interface: tick is a one-cycle strobe. corr/corr_valid are registered:
// they change one clock after the tick. While enable is low corr is held at
// zero and the integral and error history are cleared.
module pid_controller #(
  parameter int unsigned IN_W   = 24,
  parameter int unsigned CORR_W = 16,
  parameter int unsigned FRAC   = 8,
  parameter int unsigned ACC_W  = 32
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     clear,
  input  logic                     enable,
  input  logic                     tick,
  input  logic signed [IN_W-1:0]   intensity,
  input  logic        [IN_W-1:0]   setpoint,
  input  logic signed [15:0]       kp,
  input  logic signed [15:0]       ki,
  input  logic signed [15:0]       kd,
  output logic signed [CORR_W-1:0] corr,
  output logic                     corr_valid,
  output logic signed [ACC_W-1:0]  err
);

  localparam int unsigned PW = ACC_W + 16 + 2;
  localparam logic signed [ACC_W-1:0] I_MAX = {1'b0, {(ACC_W-1){1'b1}}} >>> 4;
  localparam logic signed [ACC_W-1:0] I_MIN = -I_MAX;
  localparam logic signed [PW-1:0] C_MAX = PW'({1'b0, {(CORR_W-1){1'b1}}});
  localparam logic signed [PW-1:0] C_MIN = -C_MAX - 1;

  logic signed [ACC_W-1:0] e, e_prev, integ, integ_sum, i_next, d;
  logic signed [ACC_W:0]   integ_wide;
  logic signed [PW-1:0]    u, u_sh;

  always_comb begin
    e          = ACC_W'($signed({1'b0, setpoint})) - ACC_W'(intensity);
    integ_wide = (ACC_W+1)'(integ) + (ACC_W+1)'(e);
    if (integ_wide > (ACC_W+1)'(I_MAX))      i_next = I_MAX;
    else if (integ_wide < (ACC_W+1)'(I_MIN)) i_next = I_MIN;
    else                                     i_next = ACC_W'(integ_wide);
    integ_sum  = i_next;
    d          = e - e_prev;
    u          = PW'(kp) * PW'(e) + PW'(ki) * PW'(integ_sum) + PW'(kd) * PW'(d);
    u_sh       = u >>> FRAC;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      e_prev     <= '0;
      integ      <= '0;
      corr       <= '0;
      corr_valid <= 1'b0;
      err        <= '0;
    end else if (clear || !enable) begin
      e_prev     <= '0;
      integ      <= '0;
      corr       <= '0;
      corr_valid <= 1'b0;
      err        <= '0;
    end else begin
      corr_valid <= tick;
      if (tick) begin
        e_prev <= e;
        integ  <= i_next;
        err    <= e;
        if (u_sh > C_MAX)      corr <= CORR_W'(C_MAX);
        else if (u_sh < C_MIN) corr <= CORR_W'(C_MIN);
        else                   corr <= CORR_W'(u_sh);
      end
    end
  end

endmodule
