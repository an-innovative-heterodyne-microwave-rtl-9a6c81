// tb_interferometer_fpga: end-to-end run of the whole FPGA design at its
// default parameters (100 MHz clock, 1 MHz reference, 12 Mbit/s UART), seen
// only through its pins, for 800 us of a pre-shot and shot sequence.
//
// Around the design sit models of what the board is wired to:
//  * plasma signal: a logic square wave whose rising edge k comes D0 + d_k
//    cycles after reference edge k on the pin; the design must report
//    D0 + d_k + 2, the 2 being its input synchroniser. The phase history
//    d_k holds still, ramps up 3.5 fringes, ramps down 6 fringes (below
//    zero) and holds still.
//  * amplifier and window comparator: the step pulses on the pot pins move
//    two wiper counters kept here; the amplitude index is their sum minus an
//    attenuation the scenario changes; the comparator levels pulse once per
//    microsecond when the index reaches the lower or upper threshold.
//  * USB-UART bridge: a receiver that decodes the 12 Mbit/s stream into
//    six-byte packets and a transmitter that sends command bytes.
// Checks: every packet's CRC; 5 us between packets; the time stamp goes up by
// 5 per packet except after a time reset (command 'R', trigger pin, command
// 'T'), where it restarts from near 0; every reported fringe count equals a
// delay applied in the last 3 us plus the 2-cycle synchroniser offset; the
// gain climbs into the window, steps down when the signal grows, stays frozen after the trigger, and moves again after 'A'.
// Each of these mechanisms must happen at least once.
module tb_interferometer_fpga;
  logic clk = 1'b0, rst_n = 1'b0;
  logic ref_out, plasma_in = 1'b0, win_hi_in = 1'b0, win_lo_in = 1'b0;
  logic [1:0] pot_inc;
  logic pot_up, trig_in = 1'b0, uart_rxd = 1'b1, uart_txd, locked, gain_frozen;
  int checks = 0, failures = 0;

  interferometer_fpga dut (
    .clk, .rst_n, .ref_out, .plasma_in, .win_hi_in, .win_lo_in,
    .pot_inc, .pot_up, .trig_in, .uart_rxd, .uart_txd, .locked, .gain_frozen);

  always #5ns clk = ~clk;

  localparam realtime BIT = 1000.0ns / 12.0;
  localparam int D0 = 30;          // delay of the unshifted plasma signal
  localparam int LO = 136, HI = 139;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  // ------------------------------------------------------------ cycle count
  longint cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  // ------------------------------------------------------------ plasma model
  // applied delays, with the cycle at which each edge was driven
  int     ap_delay[$];
  longint ap_cyc[$];
  int n_pos_fringe = 0, n_neg = 0;

  function automatic int d_of(int k);
    if (k < 200) return 0;
    if (k < 375) return 2 * (k - 200);           // up to +350
    if (k < 400) return 350;
    if (k < 700) return 350 - 2 * (k - 400);     // down to -250
    return -250;
  endfunction

  // Edges are placed 1 ns after a clock edge, counted from the time the
  // reference pin rose, so the synchroniser takes them at the next edge.
  initial begin
    realtime t_ref0;
    int n;
    wait (rst_n);
    @(posedge ref_out);               // reference edge 0 on the pin
    t_ref0 = $realtime;
    for (int k = 0; ; k++) begin
      n = 100 * k + D0 + d_of(k);
      #(t_ref0 + n * 10ns + 1ns - $realtime);
      plasma_in = 1'b1;
      ap_delay.push_back(D0 + d_of(k));
      ap_cyc.push_back(cyc);
      #400ns;
      plasma_in = 1'b0;
    end
  end

  // ------------------------------------------------- amplifier/pot model
  int m1 = 64, m3 = 64, atten = 0;
  int n_up = 0, n_down = 0, n_frozen_steps = 0;
  logic [1:0] prev_inc = 2'b00;
  bit frozen_expected = 1'b0;
  always @(posedge clk) begin
    prev_inc <= rst_n ? pot_inc : 2'b00;
    if (rst_n && pot_inc[0] && !prev_inc[0]) begin m1 += pot_up ? 1 : -1; if (pot_up) n_up++; else n_down++; if (frozen_expected) n_frozen_steps++; end
    if (rst_n && pot_inc[1] && !prev_inc[1]) begin m3 += pot_up ? 1 : -1; if (pot_up) n_up++; else n_down++; if (frozen_expected) n_frozen_steps++; end
    win_lo_in <= (m1 + m3 - atten >= LO) && (cyc % 100 < 20);
    win_hi_in <= (m1 + m3 - atten >= HI) && (cyc % 100 < 10);
  end

  // ------------------------------------------------- host transmitter
  task automatic send_cmd(input logic [7:0] b);
    uart_rxd = 1'b0; #(BIT);
    for (int i = 0; i < 8; i++) begin uart_rxd = b[i]; #(BIT); end
    uart_rxd = 1'b1; #(BIT);
  endtask

  // ------------------------------------------------- host receiver
  int n_pkt = 0, n_crc_bad = 0, n_resets_seen = 0, n_resets_sent = 0, n_period_bad = 0;
  int baseline = -1000;
  bit reset_pending = 1'b0;
  realtime reset_time;

  function automatic logic [15:0] crc_of(input logic [7:0] m[6]);
    logic [15:0] r = 16'hFFFF;
    for (int i = 0; i < 4; i++)
      for (int b = 7; b >= 0; b--)
        r = (r[15] ^ m[i][b]) ? ((r << 1) ^ 16'h1021) : (r << 1);
    return r;
  endfunction

  initial begin
    logic [7:0] pk[6];
    logic [15:0] stamp, prev_stamp;
    int fringe;
    bit okd;
    realtime t_start, prev_start;
    longint t_cyc;
    wait (rst_n);
    forever begin
      for (int j = 0; j < 6; j++) begin
        @(negedge uart_txd);
        if (j == 0) begin t_start = $realtime; t_cyc = cyc; end
        #(BIT / 2);
        if (uart_txd !== 1'b0) begin failures++; $display("FAIL start bit"); end
        for (int b = 0; b < 8; b++) begin #(BIT); pk[j][b] = uart_txd; end
        #(BIT);
        if (uart_txd !== 1'b1) begin failures++; $display("FAIL stop bit"); end
        #(BIT / 4);
      end
      stamp  = {pk[0], pk[1]};
      fringe = int'($signed({pk[2], pk[3]}));
      checks++;
      if ({pk[4], pk[5]} !== crc_of(pk)) begin
        n_crc_bad++; failures++; $display("FAIL CRC of packet %0d", n_pkt);
      end
      if (n_pkt > 0) begin
        checks++;
        if (t_start - prev_start < 4990ns || t_start - prev_start > 5010ns) begin
          n_period_bad++; failures++;
          $display("FAIL packet period %0t at packet %0d", t_start - prev_start, n_pkt);
        end
        // time stamp
        checks++;
        if (stamp != prev_stamp + 16'd5) begin
          if (reset_pending && stamp <= 16'd6) begin
            n_resets_seen++; reset_pending = 1'b0;
          end else begin
            failures++;
            $display("FAIL stamp %0d after %0d (packet %0d)", stamp, prev_stamp, n_pkt);
          end
        end else if (reset_pending && $realtime - reset_time > 20us) begin
          failures++; reset_pending = 1'b0;
          $display("FAIL time reset not seen at packet %0d", n_pkt);
        end
      end
      // fringe count
      if (n_pkt == 20) begin
        baseline = fringe - D0;
        checks++;
        if (baseline != 2) begin
          failures++; $display("FAIL pipeline offset %0d, want 2 (synchroniser)", baseline);
        end
      end else if (n_pkt > 20) begin
        okd = 0;
        foreach (ap_delay[i])
          if (ap_cyc[i] <= t_cyc && ap_cyc[i] + 300 >= t_cyc && ap_delay[i] + baseline == fringe) okd = 1;
        checks++;
        if (!okd) begin failures++; $display("FAIL packet %0d fringe %0d matches no recent delay", n_pkt, fringe); end
        if (fringe >= 100 + baseline) n_pos_fringe++;
        if (fringe < 0) n_neg++;
      end
      prev_stamp = stamp; prev_start = t_start;
      n_pkt++;
    end
  end

  initial begin
    repeat (2_000_000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ------------------------------------------------- scenario
  int ups_phase1, downs_phase2, ups_after_arm;
  initial begin
    repeat (4) @(posedge clk);
    rst_n <= 1'b1;
    #250us;
    ups_phase1 = n_up;
    check(m1 + m3 - atten >= LO && m1 + m3 - atten < HI,
          $sformatf("pre-shot gain not in window: index %0d", m1 + m3 - atten));
    check(m3 == 72 && m1 == 64, $sformatf("gain taken from stage 3 first: %0d/%0d", m1, m3));
    check(locked, "phase meter locked");
    // host time reset
    send_cmd(8'h52); reset_pending = 1'b1; reset_time = $realtime; n_resets_sent++;
    // stronger signal: gain must come down
    atten = -5;
    #140us;
    downs_phase2 = n_down;
    check(m1 + m3 - atten >= LO && m1 + m3 - atten < HI,
          $sformatf("gain not back in window: index %0d", m1 + m3 - atten));
    // shot trigger on the pin: clears time, freezes gain
    #10us;
    trig_in = 1'b1; #200ns; trig_in = 1'b0;
    reset_pending = 1'b1; reset_time = $realtime; n_resets_sent++;
    #100ns;
    frozen_expected = 1'b1;
    check(gain_frozen, "gain frozen after trigger pin");
    atten = 10;                       // too weak now, but frozen
    #120us;
    frozen_expected = 1'b0;
    send_cmd(8'h41);                  // re-arm
    #1us;
    check(!gain_frozen, "gain armed again after 'A'");
    ups_after_arm = n_up;
    #80us;
    ups_after_arm = n_up - ups_after_arm;
    send_cmd(8'h78);                  // unknown command: no effect
    #30us;
    send_cmd(8'h54); reset_pending = 1'b1; reset_time = $realtime; n_resets_sent++;
    #1us;
    check(gain_frozen, "gain frozen after 'T'");
    #150us;
    // mechanism counts
    $display("packets=%0d crc_bad=%0d up=%0d down=%0d up_after_arm=%0d frozen_steps=%0d",
             n_pkt, n_crc_bad, ups_phase1, downs_phase2, ups_after_arm, n_frozen_steps);
    $display("time_resets sent=%0d seen=%0d fringe>=1=%0d negative=%0d baseline=%0d",
             n_resets_sent, n_resets_seen, n_pos_fringe, n_neg, baseline);
    check(n_pkt >= 150, "packets streamed");
    check(ups_phase1 >= 8, "automatic gain increase happened");
    check(downs_phase2 >= 3, "automatic gain decrease happened");
    check(n_frozen_steps == 0, "no pot step while frozen");
    check(ups_after_arm >= 2, "gain adjustment resumed after re-arm");
    check(n_resets_seen == 3, "all three time resets seen in the stream");
    check(n_pos_fringe > 0, "fringe count tracked beyond one whole fringe");
    check(n_neg > 0, "fringe count tracked below zero");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
