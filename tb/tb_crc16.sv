// tb_crc16: checks the CRC-16/CCITT-FALSE register against the published
// check value 0x29B1 for the ASCII string "123456789", and against a
// bit-serial model written here for 200 random packets of 1..8 bytes.
module tb_crc16;
  logic clk = 1'b0, rst_n = 1'b0;
  logic init = 1'b0, valid = 1'b0;
  logic [7:0] data = '0;
  logic [15:0] crc;
  int checks = 0, failures = 0;

  crc16 dut (.clk, .rst_n, .init, .valid, .data, .crc);

  always #5ns clk = ~clk;

  // Bit-serial reference: shift each message bit into a 16-bit LFSR.
  function automatic logic [15:0] model(input logic [7:0] msg[$]);
    logic [15:0] r;
    logic fb;
    r = 16'hFFFF;
    foreach (msg[i])
      for (int b = 7; b >= 0; b--) begin
        fb = r[15] ^ msg[i][b];
        r  = r << 1;
        if (fb) r = r ^ 16'h1021;
      end
    return r;
  endfunction

  task automatic run(input logic [7:0] msg[$], input logic [15:0] want);
    @(posedge clk) init <= 1'b1;
    @(posedge clk) init <= 1'b0;
    foreach (msg[i]) begin
      valid <= 1'b1; data <= msg[i];
      @(posedge clk);
    end
    valid <= 1'b0;
    #1ns;
    checks++;
    if (crc !== want) begin
      failures++;
      $display("FAIL crc=%h want %h (%0d bytes)", crc, want, msg.size());
    end
  endtask

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [7:0] msg[$];
    repeat (2) @(posedge clk);
    rst_n <= 1'b1;
    msg = {8'h31, 8'h32, 8'h33, 8'h34, 8'h35, 8'h36, 8'h37, 8'h38, 8'h39};
    run(msg, 16'h29B1);
    for (int p = 0; p < 200; p++) begin
      msg.delete();
      for (int i = 0; i < 1 + int'($urandom % 8); i++) msg.push_back(8'($urandom));
      run(msg, model(msg));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
