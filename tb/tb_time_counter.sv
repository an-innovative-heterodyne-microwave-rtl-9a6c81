// tb_time_counter: drives random tick and clear pulses into the time stamp
// counter and compares it every cycle with a counter kept by the testbench,
// including a clear that coincides with a tick and a wrap of a narrow counter.
module tb_time_counter;
  logic clk = 1'b0, rst_n = 1'b0;
  logic tick = 1'b0, clear = 1'b0;
  logic [7:0] count;
  int checks = 0, failures = 0;

  time_counter #(.TW(8)) dut (.clk, .rst_n, .tick, .clear, .count);

  always #5ns clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int model, wraps, coinc;
    model = 0; wraps = 0; coinc = 0;
    repeat (2) @(posedge clk);
    rst_n <= 1'b1;
    for (int i = 0; i < 5000; i++) begin
      tick  <= ($urandom % 3) == 0;
      clear <= (i > 3000) && ($urandom % 200) == 0;
      @(posedge clk);
      if (clear) begin model = 0; if (tick) coinc++; end
      else if (tick) begin model = (model + 1) % 256; if (model == 0) wraps++; end
      #1ns;
      checks++;
      if (count !== 8'(model)) begin
        failures++;
        $display("FAIL cycle %0d count=%0d want %0d", i, count, model);
      end
    end
    checks++;
    if (wraps == 0) begin failures++; $display("FAIL no wrap exercised"); end
    $display("wraps=%0d clear-with-tick=%0d", wraps, coinc);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
