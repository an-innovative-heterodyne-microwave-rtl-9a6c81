// tb_packetizer: checks the packet stream with a model UART that accepts a
// byte every 7..12 cycles. Time stamp and fringe count change every cycle.
// For 50 packets the testbench records the counters in the pulse cycle of
// pkt_start and checks that the next six bytes are the low 16 bits of each,
// most significant byte first, followed by a CRC-16/CCITT-FALSE over those
// four bytes computed here, and that the next snapshot follows the sixth byte
// by exactly one cycle.
module tb_packetizer;
  logic clk = 1'b0, rst_n = 1'b0;
  logic [31:0] stamp = '0, fringe = '0;
  logic [7:0] tx_data;
  logic tx_valid, tx_ready = 1'b0, pkt_start;
  int checks = 0, failures = 0;

  packetizer dut (.clk, .rst_n, .stamp, .fringe, .tx_data, .tx_valid, .tx_ready, .pkt_start);

  always #5ns clk = ~clk;

  function automatic logic [15:0] crc_of(input logic [7:0] m[4]);
    logic [15:0] r = 16'hFFFF;
    for (int i = 0; i < 4; i++)
      for (int b = 7; b >= 0; b--)
        r = (r[15] ^ m[i][b]) ? ((r << 1) ^ 16'h1021) : (r << 1);
    return r;
  endfunction

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // counters keep moving
  always @(posedge clk) begin
    stamp  <= stamp + 32'd3;
    fringe <= fringe - 32'd1021;
  end

  // ready model
  int wait_left = 9;
  always @(posedge clk) begin
    if (wait_left == 0) begin tx_ready <= 1'b1; wait_left = 7 + int'($urandom % 6); end
    else begin tx_ready <= 1'b0; wait_left--; end
  end

  initial begin
    logic [7:0] want[6];
    logic [7:0] m[4];
    logic [15:0] c;
    int p, nbytes, last_fire_t, t;
    bit in_pkt;
    repeat (2) @(posedge clk);
    rst_n <= 1'b1;
    t = 0; p = 0; nbytes = 0; in_pkt = 1'b0; last_fire_t = 0;
    // Look at the signals 1 ns after each edge: what they show then is what
    // the next edge will act on.
    while (p <= 50) begin
      @(posedge clk); #1ns; t++;
      if (pkt_start) begin
        if (p > 0) begin
          checks++;
          if (in_pkt || t != last_fire_t) begin
            failures++; $display("FAIL snapshot %0d at %0d, last byte at %0d", p, t, last_fire_t);
          end
        end
        m = '{stamp[15:8], stamp[7:0], fringe[15:8], fringe[7:0]};
        c = crc_of(m);
        want = '{m[0], m[1], m[2], m[3], c[15:8], c[7:0]};
        nbytes = 0; in_pkt = 1'b1; p++;
      end else if (in_pkt) begin
        checks++;
        if (!tx_valid) begin failures++; $display("FAIL valid dropped inside packet %0d", p); end
        if (tx_valid && tx_ready) begin
          checks++;
          if (tx_data !== want[nbytes]) begin
            failures++; $display("FAIL packet %0d byte %0d: %h want %h", p, nbytes, tx_data, want[nbytes]);
          end
          nbytes++;
          last_fire_t = t + 1;   // the byte leaves at the next edge
          if (nbytes == 6) in_pkt = 1'b0;
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
