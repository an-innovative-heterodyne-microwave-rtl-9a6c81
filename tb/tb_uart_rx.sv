// tb_uart_rx: drives the receiver with 8N1 frames at exactly 12 Mbit/s
// (83.333 ns bits) from a model transmitter, with random idle time between
// frames and a random 0..7 ns phase against the 100 MHz clock. 100 random
// bytes must come out unchanged; a frame with a low stop bit must give
// frame_err and no byte; a 30 ns glitch on the idle line must give nothing.
module tb_uart_rx;
  logic clk = 1'b0, rst_n = 1'b0;
  logic rxd = 1'b1;
  logic [7:0] data;
  logic valid, frame_err;
  int checks = 0, failures = 0;
  int n_valid = 0, n_err = 0;
  logic [7:0] got[$];

  uart_rx dut (.clk, .rst_n, .rxd, .data, .valid, .frame_err);

  always #5ns clk = ~clk;

  localparam realtime BIT = 1000.0ns / 12.0;

  always @(posedge clk) begin
    if (rst_n && valid) begin n_valid++; got.push_back(data); end
    if (rst_n && frame_err) n_err++;
  end

  task automatic send(input logic [7:0] b, input bit stop);
    rxd = 1'b0; #(BIT);
    for (int k = 0; k < 8; k++) begin rxd = b[k]; #(BIT); end
    rxd = stop; #(BIT);
    rxd = 1'b1;
  endtask

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [7:0] sent[$];
    logic [7:0] b;
    repeat (3) @(posedge clk);
    rst_n <= 1'b1;
    #100ns;
    for (int i = 0; i < 100; i++) begin
      b = 8'($urandom);
      #(1ns * ($urandom % 8));
      send(b, 1'b1);
      sent.push_back(b);
      #(1ns * ($urandom % 3) * 40);   // sometimes back to back
    end
    #(3 * BIT);
    checks++;
    if (n_valid != 100 || n_err != 0) begin
      failures++; $display("FAIL %0d bytes %0d errors, want 100 / 0", n_valid, n_err);
    end
    foreach (sent[i]) begin
      checks++;
      if (i >= got.size() || got[i] !== sent[i]) begin
        failures++; $display("FAIL byte %0d", i);
      end
    end
    // framing error
    send(8'hA5, 1'b0);
    #(3 * BIT);
    checks++;
    if (n_valid != 100 || n_err != 1) begin
      failures++; $display("FAIL bad stop bit: %0d bytes %0d errors", n_valid, n_err);
    end
    // glitch on idle line
    rxd = 1'b0; #30ns; rxd = 1'b1;
    #(12 * BIT);
    checks++;
    if (n_valid != 100 || n_err != 1) begin
      failures++; $display("FAIL glitch gave %0d bytes %0d errors", n_valid, n_err);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
