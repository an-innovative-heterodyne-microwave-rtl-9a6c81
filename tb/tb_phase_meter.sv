// tb_phase_meter: checks the fringe counter against a known phase history.
// The testbench makes its own reference (period 100, rising at phase 0) and
// places each plasma rising edge k at 100*k + d_k cycles after the first
// reference edge. The delay history d_k holds steady parts, a ramp of +3.5
// fringes and one of -6 fringes (so the delay crosses zero and whole fringes
// in both directions), with a random wobble. After each edge the block's
// fringe_count must equal d_k exactly. A plasma edge before the first
// reference edge must be ignored.
module tb_phase_meter;
  logic clk = 1'b0, rst_n = 1'b0;
  logic ref_rise, sig_rise = 1'b0;
  logic [6:0] ref_phase;
  logic signed [31:0] fringe_count;
  logic update, locked;
  int checks = 0, failures = 0;
  int cyc = -1;  // cycles since the first reference edge

  phase_meter dut (.clk, .rst_n, .ref_rise, .ref_phase, .sig_rise,
                   .fringe_count, .update, .locked);

  always #5ns clk = ~clk;

  assign ref_phase = (cyc < 0) ? 7'd0 : 7'(cyc % 100);
  assign ref_rise  = (cyc >= 0) && (cyc % 100 == 0);

  initial begin
    repeat (500000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int d[$];
  int pos_wraps = 0, neg_values = 0;

  initial begin
    int cur, k, next_t, updates;
    // delay history, in cycles
    cur = 37;
    for (int i = 0; i < 40; i++) d.push_back(cur + int'($urandom % 3) - 1);
    for (int i = 0; i < 70; i++) begin cur += 5; d.push_back(cur); end        // +350
    for (int i = 0; i < 30; i++) d.push_back(cur + int'($urandom % 5) - 2);
    for (int i = 0; i < 150; i++) begin cur -= 4; d.push_back(cur); end       // -600
    for (int i = 0; i < 30; i++) d.push_back(cur + int'($urandom % 5) - 2);
    for (int i = 0; i < 50; i++) begin cur += 7; d.push_back(cur); end
    foreach (d[i]) begin
      if (d[i] >= 100) pos_wraps++;
      if (d[i] < 0) neg_values++;
    end

    repeat (2) @(posedge clk);
    rst_n <= 1'b1;
    // stray plasma edge before any reference edge
    repeat (5) @(posedge clk);
    sig_rise <= 1'b1; @(posedge clk); sig_rise <= 1'b0;
    @(posedge clk); #1ns;
    checks++;
    if (update || locked) begin failures++; $display("FAIL edge before lock was counted"); end
    repeat (7) @(posedge clk);
    #1ns;

    // from here on cyc counts from the first reference edge
    k = 0; updates = 0;
    next_t = d[0];
    for (int t = 0; k < d.size(); t++) begin
      cyc = t;
      sig_rise = (t == next_t);
      @(posedge clk); #1ns;
      if (sig_rise) begin
        checks++;
        if (update !== 1'b1 || fringe_count !== d[k]) begin
          failures++;
          $display("FAIL edge %0d: count=%0d update=%0b want %0d", k, fringe_count, update, d[k]);
        end
        k++;
        if (k < d.size()) next_t = 100 * k + d[k];
      end else begin
        checks++;
        if (update !== 1'b0) begin failures++; $display("FAIL spurious update at t=%0d", t); end
      end
    end
    checks++;
    if (pos_wraps == 0 || neg_values == 0) begin
      failures++; $display("FAIL history does not cross fringes both ways");
    end
    $display("edges=%0d beyond_one_fringe=%0d negative=%0d", d.size(), pos_wraps, neg_values);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
