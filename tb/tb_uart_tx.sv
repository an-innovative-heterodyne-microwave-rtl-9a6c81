// tb_uart_tx: checks the 12 Mbit/s transmitter at its default clock and rate.
// An independent receiver in the testbench finds each start bit and samples
// the line in the middle of every bit, using the ideal bit time 1/12 MHz =
// 83.333 ns. 120 random bytes are offered back to back; all must arrive
// intact with correct start and stop bits, with no gap between frames, and
// 120 frames (1200 bits) must take 100 us to within one clock cycle, i.e.
// six bytes per 5 us.
module tb_uart_tx;
  logic clk = 1'b0, rst_n = 1'b0;
  logic [7:0] data = '0;
  logic valid = 1'b0, ready, txd, busy;
  int checks = 0, failures = 0;

  uart_tx dut (.clk, .rst_n, .data, .valid, .ready, .txd, .busy);

  always #5ns clk = ~clk;

  localparam realtime BIT = 1000.0ns / 12.0;
  localparam int N = 120;

  logic [7:0] sent[$];
  realtime first_start, last_stop_end;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // producer: offer a new byte whenever the previous one was taken
  initial begin
    repeat (2) @(posedge clk);
    rst_n <= 1'b1;
    @(posedge clk);
    for (int i = 0; i < N; i++) begin
      data <= 8'($urandom); valid <= 1'b1;
      do @(posedge clk); while (!ready);
      sent.push_back(data);
    end
    valid <= 1'b0;
  end

  // receiver model
  initial begin
    logic [7:0] b;
    realtime t0;
    wait (rst_n);
    for (int i = 0; i < N; i++) begin
      @(negedge txd);
      t0 = $realtime;
      if (i == 0) first_start = t0;
      else begin
        checks++;
        if (t0 - last_stop_end > 12ns || last_stop_end - t0 > 12ns) begin
          failures++; $display("FAIL gap before frame %0d: %0t", i, t0 - last_stop_end);
        end
      end
      #(BIT / 2);
      checks++;
      if (txd !== 1'b0) begin failures++; $display("FAIL start bit %0d", i); end
      for (int k = 0; k < 8; k++) begin #(BIT); b[k] = txd; end
      #(BIT);
      checks++;
      if (txd !== 1'b1) begin failures++; $display("FAIL stop bit %0d", i); end
      last_stop_end = t0 + 10 * BIT;
      wait (sent.size() > i);
      checks++;
      if (b !== sent[i]) begin failures++; $display("FAIL byte %0d got %h want %h", i, b, sent[i]); end
      #(BIT / 4);   // stay clear of the last stop bit before looking for the next start
    end
    checks++;
    if (last_stop_end - first_start - N * 10 * BIT > 10ns ||
        N * 10 * BIT - (last_stop_end - first_start) > 10ns) begin
      failures++; $display("FAIL throughput: %0t for %0d frames", last_stop_end - first_start, N);
    end
    $display("%0d frames in %0t", N, last_stop_end - first_start);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
