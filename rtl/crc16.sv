// crc16: byte-serial CRC-16 for the data packets.
//
// CRC-16/CCITT-FALSE: polynomial x^16 + x^12 + x^5 + 1 (0x1021), start value
// 0xFFFF, bits taken most significant first, no final inversion. `init`
// loads the start value; each cycle with `valid` folds one byte into the
// register, so `crc` holds the checksum of all bytes since `init` one cycle
// after the last one. The paper says only that CRC bytes are sent with each
// measurement; the polynomial and start value are this design's choice.
module crc16
  import interf_pkg::*;
(
  input  logic        clk,
  input  logic        rst_n,
  input  logic        init,
  input  logic        valid,
  input  logic [7:0]  data,
  output logic [15:0] crc
);
  always_ff @(posedge clk) begin
    if (!rst_n || init) crc <= 16'hFFFF;
    else if (valid)     crc <= crc16_byte(crc, data);
  end
endmodule
