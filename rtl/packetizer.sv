// packetizer: turns the running measurement into a stream of data packets.
//
// Whenever no packet is in flight the block takes a snapshot of the time
// stamp and the fringe count (`pkt_start` pulses in that cycle) and offers
// six bytes to the UART, most significant first:
//     stamp[15:8] stamp[7:0] fringe[15:8] fringe[7:0] crc[15:8] crc[7:0]
// The CRC-16 (see crc16) covers the first four bytes. Only the low 16 bits of
// each counter are sent; the computer unwraps them, which works as long as
// neither moves by 2**15 between packets (the stamp moves by 5, the fringe
// count by at most a few hundred). There is no sync byte: the receiver finds
// the packet boundary as the alignment at which the CRC checks.
//
// With uart_tx taking bytes back to back, a packet leaves every 60 bit times:
// 5 us at 12 Mbit/s, which is the measurement rate the paper reports for its
// streaming mode. The snapshot is taken in the cycle after the last byte of
// the previous packet was accepted. Sending fringe count, time stamp and CRC
// follows the paper; the field widths, order and the missing sync byte are
// this design's choice, made so that one packet fits in 5 us.
module packetizer
  import interf_pkg::*;
#(
  parameter int unsigned TW = 32,
  parameter int unsigned CW = 32
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic [TW-1:0] stamp,
  input  logic [CW-1:0] fringe,
  output logic [7:0]    tx_data,
  output logic          tx_valid,
  input  logic          tx_ready,
  output logic          pkt_start
);
  sample_t     snap;
  logic [2:0]  idx;
  logic [15:0] crc;
  logic        fire;

  assign fire      = tx_valid && tx_ready;
  assign pkt_start = !tx_valid;

  crc16 u_crc (
    .clk   (clk),
    .rst_n (rst_n),
    .init  (pkt_start),
    .valid (fire && idx < 3'd4),
    .data  (tx_data),
    .crc   (crc)
  );

  always_comb begin
    unique case (idx)
      3'd0:    tx_data = snap.stamp[15:8];
      3'd1:    tx_data = snap.stamp[7:0];
      3'd2:    tx_data = snap.fringe[15:8];
      3'd3:    tx_data = snap.fringe[7:0];
      3'd4:    tx_data = crc[15:8];
      default: tx_data = crc[7:0];
    endcase
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      tx_valid <= 1'b0;
      idx      <= '0;
      snap     <= '0;
    end else if (!tx_valid) begin
      snap     <= '{stamp: stamp[15:0], fringe: fringe[15:0]};
      idx      <= '0;
      tx_valid <= 1'b1;
    end else if (fire) begin
      if (idx == 3'(PKT_BYTES - 1)) tx_valid <= 1'b0;
      else                          idx <= idx + 1'b1;
    end
  end

  initial assert (TW >= 16 && CW >= 16) else $error("packetizer: counters narrower than 16 bits");
  a_idx: assert property (@(posedge clk) disable iff (!rst_n) idx < 3'(PKT_BYTES));
endmodule
