// interf_pkg: constants and types shared by the interferometer FPGA logic.
//
// The board clock is 100 MHz and the modulation (reference) frequency is
// 1 MHz, so one reference period is 100 clock cycles and one clock cycle is
// one hundredth of a fringe. Host data leave over an 8N1 UART at 12 Mbit/s.
// These three numbers follow the paper. The command byte values and the
// packet layout are this design's own choices.
package interf_pkg;

  localparam int unsigned CLK_HZ = 100_000_000;  // board oscillator
  localparam int unsigned REF_HZ = 1_000_000;    // modulation frequency
  localparam int unsigned BAUD   = 12_000_000;   // UART line rate

  // Packet: no sync byte, six bytes, big-endian fields, CRC-16 last.
  localparam int unsigned PKT_BYTES = 6;

  // Host command bytes (ASCII, so they can be typed in a terminal).
  typedef enum logic [7:0] {
    CMD_TIME_RESET = 8'h52,  // 'R': clear the time stamp
    CMD_TRIGGER    = 8'h54,  // 'T': software trigger (clear time, freeze gain)
    CMD_GAIN_ARM   = 8'h41   // 'A': re-enable automatic gain adjustment
  } cmd_e;

  // One measurement as it is sent: low 16 bits of each counter.
  typedef struct packed {
    logic [15:0] stamp;   // time stamp, reference periods (1 us)
    logic [15:0] fringe;  // delay, 1/100 fringe, two's complement
  } sample_t;

  // Decision of the gain controller after one evaluation window.
  typedef enum logic [1:0] {
    ACT_HOLD = 2'd0,  // amplitude inside the window
    ACT_UP   = 2'd1,  // lower threshold never reached: more gain
    ACT_DOWN = 2'd2   // upper threshold exceeded: less gain
  } gain_act_e;

  // CRC-16/CCITT-FALSE byte update: polynomial 0x1021, MSB first.
  function automatic logic [15:0] crc16_byte(input logic [15:0] crc,
                                              input logic [7:0]  data);
    logic [15:0] c;
    c = crc;
    for (int i = 7; i >= 0; i--) begin
      if (c[15] ^ data[i]) c = {c[14:0], 1'b0} ^ 16'h1021;
      else                 c = {c[14:0], 1'b0};
    end
    return c;
  endfunction

endpackage
