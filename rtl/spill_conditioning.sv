// spill_conditioning: summing node and final spill conditioning.
//
// The quadrupole reference is target = ref + corr, saturated to the DAC
// range [0, 2^DW - 1]. The DAC code does not jump to the target: every
// rate_div clocks (one "update") it moves toward it by at most slew_max codes,
// which is the slew-rate limiter. slew_limited pulses on each update where
// the limit was applied.
//
// States (cond_state_e):
//   COND_IDLE  the DAC code is held at zero; spill_go enters COND_RUN.
//   COND_RUN   the code follows target through the slew limiter. An abort,
//              or tick_count reaching timeout (the internal spill timeout),
//              enters COND_RAMP.
//   COND_RAMP  safe ramp-down: the code falls by ramp_step per update,
//              whatever the reference and correction do, until it is zero;
//              then spill_done pulses and the state returns to COND_IDLE.
//
// Follows the paper: the sum of reference and PID correction, a slew-rate
// limiter and a safe ramp-down triggered by an abort event or an internal
// timeout. This design's own choices: ramping to zero, linear ramp and slew
// steps, the update divider, saturation at the DAC range, and the timeout
// counted in 10 kHz ticks from the start of the spill.
//
// Timing: dac is registered; a change of target reaches dac at the next
// update. abort_req must already be synchronous to clk.
module spill_conditioning
  import srs_pkg::*;
#(
  parameter int unsigned DW  = 16,
  parameter int unsigned CW = 16
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     spill_go,
  input  logic                     abort_req,
  input  logic [15:0]              tick_count,
  input  logic [DW-1:0]         ref_in,
  input  logic signed [CW-1:0] corr,
  input  logic [15:0]              cfg_slew_max,
  input  logic [15:0]              cfg_ramp_step,
  input  logic [15:0]              cfg_rate_div,
  input  logic [15:0]              cfg_timeout,
  output logic [DW-1:0]         dac,
  output cond_state_e              state,
  output logic                     spill_done,
  output logic                     slew_limited,
  output logic                     timed_out,
  output logic                     aborted
);

  localparam int unsigned TW = (DW > CW ? DW : CW) + 2;
  localparam logic signed [TW-1:0] DAC_MAX = TW'((1 << DW) - 1);

  logic signed [TW-1:0] sum, diff, slew;
  logic [DW-1:0]     target, dac_next;
  logic [15:0]          div_cnt;
  logic                 upd, limited, go_ramp;

  // the clock on which RUN turns into RAMP already takes a ramp step
  assign go_ramp = (state == COND_RUN) && (abort_req || tick_count >= cfg_timeout);

  // summing node with saturation to the DAC range
  always_comb begin
    sum = TW'($signed({1'b0, ref_in})) + TW'(corr);
    if (sum < 0)             target = '0;
    else if (sum > DAC_MAX)  target = '1;
    else                     target = DW'(sum);
  end

  // update divider
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      div_cnt <= '0;
    end else if (div_cnt == 16'd0) begin
      div_cnt <= (cfg_rate_div == 16'd0) ? 16'd0 : cfg_rate_div - 16'd1;
    end else begin
      div_cnt <= div_cnt - 16'd1;
    end
  end
  assign upd = (div_cnt == 16'd0);

  // slew-rate limiter / ramp step
  always_comb begin
    slew     = TW'($signed({1'b0, cfg_slew_max}));
    diff     = TW'($signed({1'b0, target})) - TW'($signed({1'b0, dac}));
    limited  = 1'b0;
    dac_next = dac;
    if (state == COND_RAMP || go_ramp) begin
      if (32'(cfg_ramp_step) >= 32'(dac))
        dac_next = '0;
      else
        dac_next = dac - DW'(cfg_ramp_step);
    end else if (state == COND_RUN) begin
      if (diff > slew) begin
        dac_next = dac + DW'(cfg_slew_max);
        limited  = 1'b1;
      end else if (diff < -slew) begin
        dac_next = dac - DW'(cfg_slew_max);
        limited  = 1'b1;
      end else begin
        dac_next = target;
      end
    end else begin
      dac_next = '0;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state        <= COND_IDLE;
      dac          <= '0;
      spill_done   <= 1'b0;
      slew_limited <= 1'b0;
      timed_out    <= 1'b0;
      aborted      <= 1'b0;
    end else begin
      spill_done   <= 1'b0;
      slew_limited <= 1'b0;
      timed_out    <= 1'b0;
      aborted      <= 1'b0;
      if (upd) begin
        dac          <= dac_next;
        slew_limited <= limited;
      end
      unique case (state)
        COND_IDLE: if (spill_go) state <= COND_RUN;
        COND_RUN: begin
          if (abort_req) begin
            state   <= COND_RAMP;
            aborted <= 1'b1;
          end else if (tick_count >= cfg_timeout) begin
            state     <= COND_RAMP;
            timed_out <= 1'b1;
          end
        end
        COND_RAMP: begin
          if (dac == '0) begin
            state      <= COND_IDLE;
            spill_done <= 1'b1;
          end
        end
        default: state <= COND_IDLE;
      endcase
    end
  end

endmodule
