// tb_workloads: the two phase histories for which the interferometer's
// behaviour is reported, run through the whole FPGA design at its default
// parameters and read back from the 12 Mbit/s packet stream.
//
//  A. Fast shift: the phase moves by 4*pi (two fringes, 200 counts) in 10 us,
//     holds for 20 us and returns in 10 us, i.e. the plasma signal runs at
//     about 0.83 MHz and then 1.25 MHz. Beside the packet checks, the
//     design's fringe register is probed 3 cycles after every plasma edge
//     (2-cycle synchroniser + 1 register): the measurement follows the phase
//     one plasma period at a time, without waiting for a packet.
//  B. Plasma shot, shortened: after a trigger, the line density rises
//     linearly over 2.5 ms to 1.5e19 m^-3, which at 105 GHz across
//     the 52 mm plasma is 360 degrees = 100 counts, holds for 2 ms with a
//     +-1 count wobble and falls in 1 ms. (The real flat top lasts 200 ms;
//     only its length is cut.) The host side unwraps the 16-bit fields and
//     the plateau mean must be 100 counts above the pre-shot baseline.
// Every packet must pass its CRC, come 5 us after the previous one, carry a
// time stamp 5 above the previous one (or restart at the trigger) and a
// fringe count equal to a delay applied in the 3 us before it, plus the
// 2-cycle synchroniser offset.
module tb_workloads;
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
  localparam int D0 = 20;
  // phase history, in reference periods (1 us)
  localparam int A0 = 100;                  // fast shift starts
  localparam int B0 = 300;                  // shot trigger
  localparam int RISE = 2500, FLAT = 2000, FALL = 1000;
  localparam int END = B0 + 100 + RISE + FLAT + FALL + 100;

  longint cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  function automatic int d_of(int k);
    int s;
    if (k < A0) return 0;
    if (k < A0 + 10) return 20 * (k - A0);            // +200 in 10 us
    if (k < A0 + 30) return 200;
    if (k < A0 + 40) return 200 - 20 * (k - A0 - 30);
    if (k < B0 + 100) return 0;
    s = k - B0 - 100;
    if (s < RISE) return (100 * s) / RISE;
    s -= RISE;
    if (s < FLAT) return 100 + ((k * 7) % 3) - 1;     // +-1 count wobble
    s -= FLAT;
    if (s < FALL) return 100 - (100 * s) / FALL;
    return 0;
  endfunction

  int     ap_delay[$];
  longint ap_cyc[$];
  int     probe_bad = 0, probes = 0;

  initial begin
    realtime t_ref0;
    int n;
    wait (rst_n);
    @(posedge ref_out);
    t_ref0 = $realtime;
    for (int k = 0; k < END; k++) begin
      n = 100 * k + D0 + d_of(k);
      #(t_ref0 + n * 10ns + 1ns - $realtime);
      plasma_in = 1'b1;
      ap_delay.push_back(D0 + d_of(k));
      ap_cyc.push_back(cyc);
      repeat (3) @(posedge clk);
      #1ns;
      probes++;
      if (dut.u_phase.fringe_count !== D0 + d_of(k) + 2) begin
        probe_bad++;
        if (probe_bad < 5) $display("FAIL edge %0d: register %0d want %0d",
                                    k, dut.u_phase.fringe_count, D0 + d_of(k) + 2);
      end
      #370ns;
      plasma_in = 1'b0;
    end
  end

  function automatic logic [15:0] crc_of(input logic [7:0] m[6]);
    logic [15:0] r = 16'hFFFF;
    for (int i = 0; i < 4; i++)
      for (int b = 7; b >= 0; b--)
        r = (r[15] ^ m[i][b]) ? ((r << 1) ^ 16'h1021) : (r << 1);
    return r;
  endfunction

  // host: decode packets, unwrap, check
  int n_pkt = 0, n_bad = 0, n_trig_seen = 0, fast_peak = -1000;
  longint plateau_sum = 0;
  int plateau_n = 0;
  longint trig_cyc = -1;
  initial begin
    logic [7:0] pk[6];
    logic [15:0] stamp, prev_stamp, fr16, prev_fr16;
    longint fringe;                       // unwrapped
    realtime t_start, prev_start;
    longint t_cyc;
    int ok;
    wait (rst_n);
    fringe = 0;
    forever begin
      for (int j = 0; j < 6; j++) begin
        @(negedge uart_txd);
        if (j == 0) begin t_start = $realtime; t_cyc = cyc; end
        #(BIT / 2);
        for (int b = 0; b < 8; b++) begin #(BIT); pk[j][b] = uart_txd; end
        #(BIT);
        if (uart_txd !== 1'b1) n_bad++;
        #(BIT / 4);
      end
      stamp = {pk[0], pk[1]};
      fr16  = {pk[2], pk[3]};
      // unwrap the 16-bit fringe field as the host would
      if (n_pkt == 0) fringe = longint'($signed(fr16));
      else fringe += longint'($signed(16'(fr16 - prev_fr16)));
      checks++;
      if ({pk[4], pk[5]} !== crc_of(pk)) begin n_bad++; $display("FAIL CRC"); end
      if (n_pkt > 0) begin
        checks++;
        if (t_start - prev_start < 4990ns || t_start - prev_start > 5010ns) begin
          n_bad++; $display("FAIL period %0t", t_start - prev_start);
        end
        checks++;
        if (stamp != 16'(prev_stamp + 5)) begin
          if (trig_cyc >= 0 && n_trig_seen == 0 && stamp <= 16'd6) n_trig_seen++;
          else begin n_bad++; $display("FAIL stamp %0d after %0d", stamp, prev_stamp); end
        end
      end
      if (n_pkt > 2) begin
        ok = 0;
        // a delay applied in the last 3 us, or the last one if the plasma
        // signal has stopped
        foreach (ap_delay[i])
          if (ap_cyc[i] <= t_cyc && (ap_cyc[i] + 300 >= t_cyc || i == ap_delay.size() - 1) &&
              longint'(ap_delay[i] + 2) == fringe) ok = 1;
        checks++;
        if (!ok) begin n_bad++; $display("FAIL packet %0d fringe %0d", n_pkt, fringe); end
        if (t_cyc < 100 * (A0 + 50) && fringe - D0 - 2 > fast_peak) fast_peak = int'(fringe - D0 - 2);
        if (t_cyc > 100 * (B0 + 100 + RISE + 200) && t_cyc < 100 * (B0 + 100 + RISE + FLAT - 200)) begin
          plateau_sum += fringe - D0 - 2; plateau_n++;
        end
      end
      prev_stamp = stamp; prev_fr16 = fr16; prev_start = t_start;
      n_pkt++;
    end
  end

  initial begin
    repeat (20_000_000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    real mean;
    repeat (4) @(posedge clk);
    rst_n <= 1'b1;
    #(B0 * 1us);
    trig_in = 1'b1; trig_cyc = cyc; #200ns; trig_in = 1'b0;
    #((END - B0 + 20) * 1us);
    mean = (plateau_n > 0) ? real'(plateau_sum) / plateau_n : -1.0;
    $display("packets=%0d fast_peak=%0d plateau_mean=%0.2f over %0d packets probes=%0d",
             n_pkt, fast_peak, mean, plateau_n, probes);
    checks++; if (n_bad != 0) begin failures += n_bad; end
    checks++; if (probe_bad != 0) begin failures++; $display("FAIL %0d register probes", probe_bad); end
    checks++; if (fast_peak != 200) begin failures++; $display("FAIL fast shift peak %0d, want 200", fast_peak); end
    checks++; if (mean < 99.5 || mean > 100.5) begin failures++; $display("FAIL plateau mean"); end
    checks++; if (n_trig_seen != 1) begin failures++; $display("FAIL trigger restart not seen"); end
    checks++; if (!gain_frozen) begin failures++; $display("FAIL gain not frozen in the shot"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
