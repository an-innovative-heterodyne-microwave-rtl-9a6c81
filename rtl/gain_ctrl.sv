// gain_ctrl: automatic gain setting of the plasma-signal amplifier chain.
//
// The amplified plasma signal feeds a window comparator on the mixed-signal
// board. `win_lo` is high while the signal is above the lower threshold and
// `win_hi` while it is above the upper threshold; for a good amplitude the
// first pulses once per 1 MHz period and the second never does. The block
// watches both for EVAL_CYCLES clock cycles and then decides:
//   upper threshold seen           -> one step less gain
//   lower threshold never seen     -> one step more gain
//   otherwise                      -> hold
// A step is one pulse of PULSE_CYCLES on `pot_inc[k]` with the direction on
// `pot_up`, held steady for the whole pulse, to the digital potentiometer of
// amplifier stage 1 (k = 0) or stage 3 (k = 1, a dual pot in tracking mode on
// the board, driven by one line). More gain is taken from stage 3 until its
// pot is at the top, then from stage 1; less gain is taken from stage 1 first,
// then from stage 3. The wiper positions are tracked here (`pos1`, `pos3`)
// from POT_INIT at reset, the position the pots assume at power-up. After a
// step the next window is skipped, so the chain settles before it is judged.
//
// A `freeze` pulse (the shot trigger) stops all adjustment, because a moving
// pot changes its parasitic capacitance and so the signal phase, which would
// read as density. A pulse already on the wire completes. `arm` (a host
// command) allows adjustment again. Freeze wins over a simultaneous arm.
//
// From the paper: window comparator into the FPGA, control pulses to the
// digital pots of stages 1 and 3, automatic adjustment before the shot and
// none after the trigger. This design's own: the window length, the step
// order between the two pots, the pulse interface, pot size and start value.
module gain_ctrl
  import interf_pkg::*;
#(
  parameter int unsigned EVAL_CYCLES  = 1000,
  parameter int unsigned POT_STEPS    = 128,
  parameter int unsigned POT_INIT     = 64,
  parameter int unsigned PULSE_CYCLES = 50
) (
  input  logic                         clk,
  input  logic                         rst_n,
  input  logic                         win_hi,   // signal above upper threshold
  input  logic                         win_lo,   // signal above lower threshold
  input  logic                         freeze,   // trigger: stop adjusting
  input  logic                         arm,      // host: adjust again
  output logic [1:0]                   pot_inc,  // step pulse, [0] stage 1, [1] stage 3
  output logic                         pot_up,   // step direction, 1 = more gain
  output logic [$clog2(POT_STEPS)-1:0] pos1,     // tracked wiper of stage 1
  output logic [$clog2(POT_STEPS)-1:0] pos3,     // tracked wiper of stage 3
  output logic                         frozen,
  output gain_act_e                    last_act  // decision of the last window
);
  localparam int unsigned PPW = $clog2(POT_STEPS);
  localparam int unsigned EW  = $clog2(EVAL_CYCLES + 1);
  localparam int unsigned LW  = $clog2(PULSE_CYCLES + 1);
  localparam logic [PPW-1:0] PMAX = PPW'(POT_STEPS - 1);

  logic [EW-1:0]  timer;
  logic           saw_hi, saw_lo, settle;
  logic [LW-1:0]  pulse_left;
  logic           sel3;
  gain_act_e      act;
  logic           win_end;

  always_comb begin
    win_end = (timer == EW'(EVAL_CYCLES - 1));
    if (saw_hi || win_hi)       act = ACT_DOWN;
    else if (!(saw_lo || win_lo)) act = ACT_UP;
    else                        act = ACT_HOLD;
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      timer      <= '0;
      saw_hi     <= 1'b0;
      saw_lo     <= 1'b0;
      settle     <= 1'b0;
      pulse_left <= '0;
      sel3       <= 1'b0;
      pot_up     <= 1'b0;
      pos1       <= PPW'(POT_INIT);
      pos3       <= PPW'(POT_INIT);
      frozen     <= 1'b0;
      last_act   <= ACT_HOLD;
    end else begin
      if (freeze)   frozen <= 1'b1;
      else if (arm) frozen <= 1'b0;

      if (pulse_left != '0) pulse_left <= pulse_left - 1'b1;

      if (win_end) begin
        timer    <= '0;
        saw_hi   <= 1'b0;
        saw_lo   <= 1'b0;
        settle   <= 1'b0;
        last_act <= act;
        if (!settle && !frozen && !freeze && pulse_left == '0) begin
          unique case (act)
            ACT_UP: begin
              if (pos3 != PMAX) begin
                pos3 <= pos3 + 1'b1; sel3 <= 1'b1;
                pot_up <= 1'b1; pulse_left <= LW'(PULSE_CYCLES); settle <= 1'b1;
              end else if (pos1 != PMAX) begin
                pos1 <= pos1 + 1'b1; sel3 <= 1'b0;
                pot_up <= 1'b1; pulse_left <= LW'(PULSE_CYCLES); settle <= 1'b1;
              end
            end
            ACT_DOWN: begin
              if (pos1 != '0) begin
                pos1 <= pos1 - 1'b1; sel3 <= 1'b0;
                pot_up <= 1'b0; pulse_left <= LW'(PULSE_CYCLES); settle <= 1'b1;
              end else if (pos3 != '0) begin
                pos3 <= pos3 - 1'b1; sel3 <= 1'b1;
                pot_up <= 1'b0; pulse_left <= LW'(PULSE_CYCLES); settle <= 1'b1;
              end
            end
            default: ;
          endcase
        end
      end else begin
        timer  <= timer + 1'b1;
        saw_hi <= saw_hi | win_hi;
        saw_lo <= saw_lo | win_lo;
      end
    end
  end

  assign pot_inc = (pulse_left != '0) ? (sel3 ? 2'b10 : 2'b01) : 2'b00;

  initial begin
    assert (PULSE_CYCLES < EVAL_CYCLES) else $error("gain_ctrl: pulse longer than window");
    assert (POT_INIT < POT_STEPS) else $error("gain_ctrl: POT_INIT out of range");
  end
  // Never two pots stepped at once, and the direction is steady during a pulse.
  a_onehot: assert property (@(posedge clk) disable iff (!rst_n) $onehot0(pot_inc));
  a_dir:    assert property (@(posedge clk) disable iff (!rst_n)
                             (pot_inc != 2'b00 && $past(pot_inc) != 2'b00) |-> $stable(pot_up));
endmodule
