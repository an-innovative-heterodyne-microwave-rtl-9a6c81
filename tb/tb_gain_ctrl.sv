// tb_gain_ctrl: checks the automatic gain loop with short windows
// (EVAL_CYCLES = 40, 8-position pots starting at 4, 3-cycle pulses).
// The testbench keeps its own copy of both wiper positions by counting the
// step pulses it sees, and compares with the block's. It runs:
//   1. no signal at all: gain must climb, stage 3 first, then stage 1, and
//      stop at the top (6 steps), never faster than one step per 2 windows;
//   2. signal always too large: gain must fall, stage 1 first, to the bottom;
//   3. a closed loop with a model amplifier (amplitude grows with the step
//      index): gain must settle inside the window and stay there;
//   4. a freeze pulse: no step in 20 windows although the signal is too
//      large; an arm pulse: steps resume.
module tb_gain_ctrl;
  import interf_pkg::*;
  localparam int EV = 40, NP = 8, PI = 4, PL = 3;

  logic clk = 1'b0, rst_n = 1'b0;
  logic win_hi = 1'b0, win_lo = 1'b0, freeze = 1'b0, arm = 1'b0;
  logic [1:0] pot_inc;
  logic pot_up, frozen;
  logic [2:0] pos1, pos3;
  gain_act_e last_act;
  int checks = 0, failures = 0;

  gain_ctrl #(.EVAL_CYCLES(EV), .POT_STEPS(NP), .POT_INIT(PI), .PULSE_CYCLES(PL)) dut (
    .clk, .rst_n, .win_hi, .win_lo, .freeze, .arm,
    .pot_inc, .pot_up, .pos1, .pos3, .frozen, .last_act);

  always #5ns clk = ~clk;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  // model of the two pots: count rising edges of the step lines
  int m1 = PI, m3 = PI, steps = 0, ups3_before_1 = 1, last_step_t = -1000, min_gap = 1 << 30;
  int t = 0;
  logic [1:0] prev_inc = 2'b00;
  string order = "";
  always @(posedge clk) begin
    t <= t + 1;
    prev_inc <= rst_n ? pot_inc : 2'b00;
    if (rst_n && pot_inc[0] && !prev_inc[0]) begin
      m1 += pot_up ? 1 : -1; steps++; order = {order, pot_up ? "1+" : "1-"};
      if (t - last_step_t < min_gap) min_gap = t - last_step_t;
      last_step_t = t;
    end
    if (rst_n && pot_inc[1] && !prev_inc[1]) begin
      m3 += pot_up ? 1 : -1; steps++; order = {order, pot_up ? "3+" : "3-"};
      if (t - last_step_t < min_gap) min_gap = t - last_step_t;
      last_step_t = t;
    end
    // the block's own wiper count must follow the pulses it sent
    if (rst_n) begin
      checks++;
      if (pos1 !== 3'(m1) || pos3 !== 3'(m3)) begin
        failures++;
        if (failures < 5) $display("FAIL t=%0d positions %0d/%0d, pulses give %0d/%0d", t, pos1, pos3, m1, m3);
      end
    end
  end

  // closed-loop amplifier model: amplitude index = m1 + m3 (0..14);
  // the lower threshold is passed from 9 up, the upper one from 11 up.
  bit closed = 1'b0;
  always @(posedge clk) if (closed) begin
    win_lo <= (m1 + m3 >= 9) && ((t % 10) < 3);   // pulses once per period
    win_hi <= (m1 + m3 >= 11) && ((t % 10) == 1);
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2) @(posedge clk);
    rst_n <= 1'b1;
    // 1. no signal
    win_hi <= 1'b0; win_lo <= 1'b0;
    repeat (EV * 20) @(posedge clk);
    #1ns;
    check(steps == 6, $sformatf("phase 1: %0d steps, want 6", steps));
    check(order == "3+3+3+1+1+1+", $sformatf("phase 1 order %s", order));
    check(pos1 == 3'(m1) && pos3 == 3'(m3) && m1 == 7 && m3 == 7,
          $sformatf("phase 1 positions %0d/%0d model %0d/%0d", pos1, pos3, m1, m3));
    check(min_gap >= 2 * EV, $sformatf("steps %0d cycles apart, want >= %0d", min_gap, 2 * EV));
    check(last_act == ACT_UP, "phase 1 last decision");
    // 2. too large
    steps = 0; order = "";
    win_hi <= 1'b1; win_lo <= 1'b1;
    repeat (EV * 40) @(posedge clk);
    #1ns;
    check(steps == 14, $sformatf("phase 2: %0d steps, want 14", steps));
    check(order == "1-1-1-1-1-1-1-3-3-3-3-3-3-3-", $sformatf("phase 2 order %s", order));
    check(m1 == 0 && m3 == 0 && pos1 == 0 && pos3 == 0, "phase 2 bottom");
    check(last_act == ACT_DOWN, "phase 2 last decision");
    // 3. closed loop
    steps = 0; order = "";
    closed = 1'b1;
    repeat (EV * 40) @(posedge clk);
    #1ns;
    check(m1 + m3 inside {9, 10}, $sformatf("phase 3 settled at %0d, want 9 or 10", m1 + m3));
    check(pos1 == 3'(m1) && pos3 == 3'(m3), "phase 3 positions match model");
    steps = 0;
    repeat (EV * 10) @(posedge clk);
    #1ns;
    check(steps == 0 && last_act == ACT_HOLD, $sformatf("phase 3 not steady: %0d steps", steps));
    // 4. freeze and arm
    closed = 1'b0;
    @(posedge clk) begin win_hi <= 1'b1; win_lo <= 1'b1; freeze <= 1'b1; end
    @(posedge clk) freeze <= 1'b0;
    steps = 0;
    repeat (EV * 20) @(posedge clk);
    #1ns;
    check(frozen && steps == 0, $sformatf("phase 4 frozen=%0b steps=%0d", frozen, steps));
    @(posedge clk) arm <= 1'b1;
    @(posedge clk) arm <= 1'b0;
    repeat (EV * 6) @(posedge clk);
    #1ns;
    check(!frozen && steps >= 2, $sformatf("phase 4 after arm frozen=%0b steps=%0d", frozen, steps));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
