// spill_sequencer: picks which stored reference spill is played next.
//
// The ring delivers a cycle of NUM_SPILLS spills, and the playback memory
// holds one reference waveform per spill of the cycle. A cycle_start pulse
// points the sequencer back at spill 0. Each spill_event that arrives while
// no spill is running starts spill next_idx: spill_go pulses for one clock,
// spill_idx holds the index for the whole spill, spill_active rises, and
// next_idx advances (wrapping after NUM_SPILLS-1). spill_active falls when
// the conditioning stage reports spill_done (its ramp-down has finished).
// A spill_event during an active spill is ignored and flagged on missed.
//
// The paper shows a spill sequencer and eight spill buffers synchronized
// across the system, but not how it sequences them; the cycle/spill event
// protocol here is this design's choice. cycle_start and spill_event are
// synchronous one-clock pulses; outputs are registered.
module spill_sequencer #(
  parameter int unsigned NUM_SPILLS = 8,
  parameter int unsigned IW         = $clog2(NUM_SPILLS)
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          cycle_start,
  input  logic          spill_event,
  input  logic          spill_done,
  output logic [IW-1:0] spill_idx,
  output logic          spill_go,
  output logic          spill_active,
  output logic          missed
);

  logic [IW-1:0] next_idx;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      next_idx     <= '0;
      spill_idx    <= '0;
      spill_go     <= 1'b0;
      spill_active <= 1'b0;
      missed       <= 1'b0;
    end else begin
      spill_go <= 1'b0;
      missed   <= 1'b0;
      if (spill_done) spill_active <= 1'b0;
      if (spill_event && spill_active && !spill_done) begin
        missed <= 1'b1;
      end else if (spill_event) begin
        spill_idx    <= cycle_start ? '0 : next_idx;
        if (cycle_start)                            next_idx <= IW'(1 % NUM_SPILLS);
        else if (next_idx == IW'(NUM_SPILLS - 1))   next_idx <= '0;
        else                                        next_idx <= next_idx + 1'b1;
        spill_go     <= 1'b1;
        spill_active <= 1'b1;
      end else if (cycle_start) begin
        next_idx <= '0;
      end
    end
  end

endmodule
