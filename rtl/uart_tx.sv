// uart_tx: 8N1 serial transmitter for the link to the USB-UART bridge.
//
// The bit clock comes from a fractional accumulator: every clock cycle adds
// BAUD, and a bit boundary (`tick`) falls whenever the sum passes CLK_HZ. At
// 100 MHz and 12 Mbit/s the bit cells are 8 or 9 cycles long and average
// exactly 8.33 cycles, so ten-bit frames come out at exactly 12 Mbit/s with
// at most one cycle (10 ns) of jitter on any edge.
//
// Handshake: a byte is taken when `valid` and `ready` are both high. `ready`
// is high only on a bit boundary when the transmitter is idle or is just
// ending a stop bit, so a byte offered in time follows the previous frame
// with no gap: six bytes take 60 bit times, 500 cycles, 5 us. The start bit
// begins in the cycle after the byte is taken. The 12 Mbit/s rate follows
// the paper; the frame format and the accumulator are this design's choice.
module uart_tx #(
  parameter int unsigned CLK_HZ = 100_000_000,
  parameter int unsigned BAUD   = 12_000_000
) (
  input  logic       clk,
  input  logic       rst_n,
  input  logic [7:0] data,
  input  logic       valid,
  output logic       ready,
  output logic       txd,
  output logic       busy
);
  localparam int unsigned AW = $clog2(CLK_HZ + BAUD + 1);

  logic [AW-1:0] acc, acc_sum;
  logic          tick;
  logic [9:0]    sr;
  logic [3:0]    bitn;

  always_comb begin
    acc_sum = acc + AW'(BAUD);
    tick    = (acc_sum >= AW'(CLK_HZ));
    ready   = tick && (!busy || bitn == 4'd9);
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      acc  <= '0;
      sr   <= '1;
      bitn <= '0;
      busy <= 1'b0;
    end else begin
      acc <= tick ? acc_sum - AW'(CLK_HZ) : acc_sum;
      if (ready && valid) begin
        sr   <= {1'b1, data, 1'b0};
        bitn <= '0;
        busy <= 1'b1;
      end else if (tick && busy) begin
        if (bitn == 4'd9) begin
          busy <= 1'b0;
          sr   <= '1;
        end else begin
          sr   <= {1'b1, sr[9:1]};
          bitn <= bitn + 1'b1;
        end
      end
    end
  end

  assign txd = busy ? sr[0] : 1'b1;

  initial assert (BAUD < CLK_HZ / 2) else $error("uart_tx: BAUD too high for CLK_HZ");
endmodule
