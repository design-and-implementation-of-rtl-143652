// pulse_ctrl: turns an event into a square wave on one shaping channel and
// drives the DAC and the analog switches.
//
// States:
//   IDLE   - waiting for an event z.
//   WAIT   - event seen, waiting for an amplitude (amp_valid); only the
//            loaded-spectrum source can make this last more than one clock.
//   SQUARE - for SQ_CYCLES clocks the DAC holds the amplitude and switch1 and
//            switch2 of the chosen crystal's channel are closed. The shaper
//            differentiates the rising edge into the positive double-
//            exponential pulse.
//   BLANK  - for BLANK_CYCLES clocks the DAC holds 0 and both switches are
//            open; the falling edge's negative pulse is kept from the output.
// dac_wr pulses for one clock whenever dac_data changes (entering SQUARE and
// BLANK). Events arriving outside IDLE are dropped and reported on `missed`
// (dead time). Timing: amp is taken in the clock where amp_valid && amp_ready;
// the next clock is the first of SQUARE, with dac_wr high.
//
// Following the published generator: a square wave of the wanted amplitude
// through the DAC, a per-crystal switch before and after each shaper, the
// negative pulse removed by a switch. Chosen here: the state sequence, the
// 5 us widths (250 clocks at 50 MHz) and dropping events during a pulse.
module pulse_ctrl
  import siggen_pkg::*;
#(
  parameter int unsigned SQ_CYCLES    = 250,
  parameter int unsigned BLANK_CYCLES = 250
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             z,
  input  logic             amp_valid,
  output logic             amp_ready,
  input  logic [DAC_W-1:0] amp,
  input  xtal_e            xtal,
  output logic [DAC_W-1:0] dac_data,
  output logic             dac_wr,
  output logic [1:0]       sw1,          // [0] NaI channel, [1] CsI channel
  output logic [1:0]       sw2,
  output logic             pulse_start,  // one clock, first clock of SQUARE
  output logic             missed,       // event dropped (dead time)
  output logic             stalled,      // waiting for an amplitude
  output logic             busy
);
  localparam int unsigned MAXC = (SQ_CYCLES > BLANK_CYCLES) ? SQ_CYCLES : BLANK_CYCLES;
  localparam int unsigned CW   = $clog2(MAXC + 1);

  typedef enum logic [1:0] {S_IDLE, S_WAIT, S_SQUARE, S_BLANK} state_e;

  state_e        state_q;
  logic [CW-1:0] cnt_q;
  xtal_e         xtal_q;

  assign amp_ready = (state_q == S_WAIT);
  assign stalled   = (state_q == S_WAIT) && !amp_valid;
  assign busy      = (state_q != S_IDLE);
  assign missed    = z && (state_q != S_IDLE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state_q     <= S_IDLE;
      cnt_q       <= '0;
      xtal_q      <= XTAL_NAI;
      dac_data    <= '0;
      dac_wr      <= 1'b0;
      pulse_start <= 1'b0;
    end else begin
      dac_wr      <= 1'b0;
      pulse_start <= 1'b0;
      unique case (state_q)
        S_IDLE: if (z) state_q <= S_WAIT;
        S_WAIT: if (amp_valid) begin
          state_q     <= S_SQUARE;
          cnt_q       <= CW'(SQ_CYCLES - 1);
          xtal_q      <= xtal;
          dac_data    <= amp;
          dac_wr      <= 1'b1;
          pulse_start <= 1'b1;
        end
        S_SQUARE: if (cnt_q == '0) begin
          state_q  <= S_BLANK;
          cnt_q    <= CW'(BLANK_CYCLES - 1);
          dac_data <= '0;
          dac_wr   <= 1'b1;
        end else begin
          cnt_q <= cnt_q - 1'b1;
        end
        S_BLANK: if (cnt_q == '0) state_q <= S_IDLE;
                 else              cnt_q   <= cnt_q - 1'b1;
        default: state_q <= S_IDLE;
      endcase
    end
  end

  always_comb begin
    sw1 = 2'b00;
    sw2 = 2'b00;
    if (state_q == S_SQUARE) begin
      sw1[xtal_q] = 1'b1;
      sw2[xtal_q] = 1'b1;
    end
  end

  // The amplitude handshake only completes while a pulse is being prepared.
  assert property (@(posedge clk) disable iff (!rst_n) amp_ready |-> state_q == S_WAIT);
  // Never drive both channels at once.
  assert property (@(posedge clk) disable iff (!rst_n) !(sw1[0] && sw1[1]));

endmodule
