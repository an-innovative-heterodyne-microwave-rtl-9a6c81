// tb_cmd_decoder: feeds every byte value 0..255 in random order, with idle
// cycles in between, and checks that exactly the right pulse (time reset,
// trigger, gain arm or bad command) follows one cycle later.
module tb_cmd_decoder;
  logic clk = 1'b0, rst_n = 1'b0;
  logic [7:0] data = '0;
  logic valid = 1'b0;
  logic time_reset, sw_trigger, gain_arm, bad_cmd;
  int checks = 0, failures = 0;

  cmd_decoder dut (.clk, .rst_n, .data, .valid, .time_reset, .sw_trigger, .gain_arm, .bad_cmd);

  always #5ns clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int order[256];
    logic [3:0] want, got;
    foreach (order[i]) order[i] = i;
    order.shuffle();
    repeat (2) @(posedge clk);
    rst_n <= 1'b1;
    foreach (order[i]) begin
      data <= 8'(order[i]); valid <= 1'b1;
      @(posedge clk); #1ns;
      data <= 8'($urandom); valid <= 1'b0;   // idle cycle with junk data
      want = {order[i] == 8'h52, order[i] == 8'h54, order[i] == 8'h41,
              !(order[i] inside {8'h52, 8'h54, 8'h41})};
      got  = {time_reset, sw_trigger, gain_arm, bad_cmd};
      checks++;
      if (got !== want) begin
        failures++; $display("FAIL byte %h: got %b want %b", order[i], got, want);
      end
      @(posedge clk); #1ns;
      checks++;
      if ({time_reset, sw_trigger, gain_arm, bad_cmd} !== 4'b0) begin
        failures++; $display("FAIL pulse after idle byte");
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
