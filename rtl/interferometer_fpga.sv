// interferometer_fpga: the digital half of a heterodyne microwave
// interferometer, as it runs on a 100 MHz FPGA board.
//
// What it does: it divides the clock to a 1 MHz reference that the mixed-
// signal board filters into the sine wave driving the microwave upconverter.
// The beat signal coming back through the plasma arrives as a comparator
// logic level on `plasma_in`; its edge delay against the reference is counted
// in 10 ns steps (1/100 fringe) by phase_meter, across whole fringes. A time
// stamp counts reference periods. Both are streamed to the control computer
// as six-byte CRC-protected packets over a 12 Mbit/s UART, one every 5 us.
// Two window-comparator levels drive the automatic gain of the analog chain
// through step pulses to its digital potentiometers, until a trigger freezes
// the gain for the shot. The trigger (pin or host command 'T') also clears
// the time stamp; 'R' clears only the stamp, 'A' re-enables the gain loop.
//
// All asynchronous inputs pass a two-flop synchroniser, so a plasma edge
// reaches the phase meter two cycles after the pin; that constant offset is
// part of the baseline the computer subtracts. Ports are plain pins of the
// board: the analog parts, the USB-UART bridge and the computer are outside.
//
// The count resolution is REF_FREQ/CLK_FREQ of a fringe: 1/100 at the
// default 100 MHz. A faster clock gives a finer count with no other change
// (a 1 GHz clock would give 1/1000 fringe); the packet then carries the
// finer count in the same 16-bit field.
module interferometer_fpga
  import interf_pkg::*;
#(
  parameter int unsigned CLK_FREQ     = CLK_HZ,
  parameter int unsigned UART_BAUD    = BAUD,
  parameter int unsigned REF_FREQ     = REF_HZ,
  parameter int unsigned CW           = 32,
  parameter int unsigned TW           = 32,
  parameter int unsigned EVAL_CYCLES  = 1000,
  parameter int unsigned POT_STEPS    = 128,
  parameter int unsigned POT_INIT     = 64,
  parameter int unsigned PULSE_CYCLES = 50
) (
  input  logic       clk,         // 100 MHz board clock
  input  logic       rst_n,       // active-low reset (synchronous)
  output logic       ref_out,     // 1 MHz reference to the mixed-signal board
  input  logic       plasma_in,   // comparator output: logic plasma signal
  input  logic       win_hi_in,   // window comparator: above upper threshold
  input  logic       win_lo_in,   // window comparator: above lower threshold
  output logic [1:0] pot_inc,     // pot step pulses: [0] stage 1, [1] stage 3
  output logic       pot_up,      // pot step direction, 1 = more gain
  input  logic       trig_in,     // shot trigger, rising edge active
  input  logic       uart_rxd,    // from the USB-UART bridge
  output logic       uart_txd,    // to the USB-UART bridge
  output logic       locked,      // phase meter has paired its edges
  output logic       gain_frozen  // gain held for the shot
);
  // Clock cycles per reference period; one count is 1/DIV of a fringe.
  localparam int unsigned DIV = CLK_FREQ / REF_FREQ;

  // ---- input synchronisers
  logic plasma_q, plasma_rise;
  logic win_hi, win_lo, win_hi_rise_unused, win_lo_rise_unused;
  logic trig_q, trig_rise;
  logic rxd_q, rxd_rise_unused;

  sync2 u_sync_plasma (.clk, .rst_n, .d(plasma_in), .q(plasma_q), .rise(plasma_rise));
  sync2 u_sync_win_hi (.clk, .rst_n, .d(win_hi_in), .q(win_hi),   .rise(win_hi_rise_unused));
  sync2 u_sync_win_lo (.clk, .rst_n, .d(win_lo_in), .q(win_lo),   .rise(win_lo_rise_unused));
  sync2 u_sync_trig   (.clk, .rst_n, .d(trig_in),   .q(trig_q),   .rise(trig_rise));
  sync2 #(.RESET_VAL(1'b1)) u_sync_rxd
                      (.clk, .rst_n, .d(uart_rxd),  .q(rxd_q),    .rise(rxd_rise_unused));

  // ---- reference and measurement
  logic                   ref_rise;
  logic [$clog2(DIV)-1:0] ref_phase;
  logic signed [CW-1:0]   fringe_count;
  logic                   fringe_update;
  logic [TW-1:0]          stamp;

  ref_gen #(.DIV(DIV)) u_ref (
    .clk, .rst_n, .ref_out(ref_out), .ref_rise(ref_rise), .phase(ref_phase)
  );

  phase_meter #(.DIV(DIV), .CW(CW)) u_phase (
    .clk, .rst_n,
    .ref_rise     (ref_rise),
    .ref_phase    (ref_phase),
    .sig_rise     (plasma_rise),
    .fringe_count (fringe_count),
    .update       (fringe_update),
    .locked       (locked)
  );

  // ---- host commands
  logic [7:0] rx_data;
  logic       rx_valid, rx_frame_err;
  logic       cmd_time_reset, cmd_trigger, cmd_gain_arm, cmd_bad;
  logic       shot_trigger;

  uart_rx #(.CLK_HZ(CLK_FREQ), .BAUD(UART_BAUD)) u_rx (
    .clk, .rst_n, .rxd(rxd_q), .data(rx_data), .valid(rx_valid), .frame_err(rx_frame_err)
  );

  cmd_decoder u_cmd (
    .clk, .rst_n, .data(rx_data), .valid(rx_valid),
    .time_reset(cmd_time_reset), .sw_trigger(cmd_trigger),
    .gain_arm(cmd_gain_arm), .bad_cmd(cmd_bad)
  );

  assign shot_trigger = trig_rise | cmd_trigger;

  time_counter #(.TW(TW)) u_time (
    .clk, .rst_n, .tick(ref_rise), .clear(shot_trigger | cmd_time_reset), .count(stamp)
  );

  // ---- gain loop
  logic [$clog2(POT_STEPS)-1:0] pos1, pos3;
  gain_act_e                    gain_act;

  gain_ctrl #(
    .EVAL_CYCLES(EVAL_CYCLES), .POT_STEPS(POT_STEPS),
    .POT_INIT(POT_INIT), .PULSE_CYCLES(PULSE_CYCLES)
  ) u_gain (
    .clk, .rst_n,
    .win_hi   (win_hi),
    .win_lo   (win_lo),
    .freeze   (shot_trigger),
    .arm      (cmd_gain_arm),
    .pot_inc  (pot_inc),
    .pot_up   (pot_up),
    .pos1     (pos1),
    .pos3     (pos3),
    .frozen   (gain_frozen),
    .last_act (gain_act)
  );

  // ---- data stream
  logic [7:0] tx_data;
  logic       tx_valid, tx_ready, tx_busy, pkt_start;

  packetizer #(.TW(TW), .CW(CW)) u_pkt (
    .clk, .rst_n, .stamp(stamp), .fringe(fringe_count),
    .tx_data(tx_data), .tx_valid(tx_valid), .tx_ready(tx_ready), .pkt_start(pkt_start)
  );

  uart_tx #(.CLK_HZ(CLK_FREQ), .BAUD(UART_BAUD)) u_tx (
    .clk, .rst_n, .data(tx_data), .valid(tx_valid), .ready(tx_ready),
    .txd(uart_txd), .busy(tx_busy)
  );
endmodule
