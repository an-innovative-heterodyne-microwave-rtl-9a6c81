// tb_ref_gen: checks the 1 MHz reference divider at its default DIV = 100.
// Over 20 periods it checks that ref_out is high for exactly 50 cycles and
// low for 50, that ref_rise pulses once per period in the first high cycle,
// and that phase counts 0..99 with the pulse at 0. Period 0 must start at
// the first clock edge after reset.
module tb_ref_gen;
  logic clk = 1'b0, rst_n = 1'b0;
  logic ref_out, ref_rise;
  logic [6:0] phase;
  int checks = 0, failures = 0;

  ref_gen dut (.clk, .rst_n, .ref_out, .ref_rise, .phase);

  always #5ns clk = ~clk;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  initial begin
    repeat (300000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int t, exp_phase, rises, highs;
    logic prev;
    repeat (3) @(posedge clk);
    rst_n <= 1'b1;
    #1ns;
    // in reset: last phase, reference low; the first edge starts period 0
    check(phase == 99 && !ref_out && !ref_rise, "state in reset");
    @(posedge clk); #1ns;
    exp_phase = 0; rises = 0; highs = 0; prev = 1'b0;
    for (t = 0; t < 2000; t++) begin
      check(phase === 7'(exp_phase), $sformatf("phase %0d at cycle %0d", phase, t));
      check(ref_out === (exp_phase < 50), $sformatf("ref_out at cycle %0d", t));
      check(ref_rise == (ref_out && !prev), $sformatf("ref_rise at cycle %0d", t));
      if (ref_rise) rises++;
      if (ref_out) highs++;
      prev = ref_out;
      exp_phase = (exp_phase + 1) % 100;
      @(posedge clk); #1ns;
    end
    check(rises == 20, $sformatf("rises=%0d, want 20 in 2000 cycles", rises));
    check(highs == 1000, $sformatf("high cycles=%0d, want 1000", highs));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
