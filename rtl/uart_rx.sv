// uart_rx: 8N1 serial receiver for commands from the control computer.
//
// `rxd` must already be synchronised to clk. A falling edge on the idle line
// starts a frame. Sampling uses the same fractional accumulator as uart_tx:
// it starts half a bit ahead, so the first sample falls in the middle of the
// start bit and each further one a whole bit (CLK_HZ/BAUD cycles on average)
// later. A start bit that is high again at its middle is taken as a glitch
// and dropped. After the eighth data bit the stop bit is sampled: if it is
// high, `data` is updated and `valid` is high for one cycle; if it is low,
// `frame_err` pulses instead and the byte is dropped. The data bits arrive
// least significant first. The paper says only that commands come from the
// computer over the USB-UART bridge; the receiver is this design's own.
module uart_rx #(
  parameter int unsigned CLK_HZ = 100_000_000,
  parameter int unsigned BAUD   = 12_000_000
) (
  input  logic       clk,
  input  logic       rst_n,
  input  logic       rxd,
  output logic [7:0] data,
  output logic       valid,
  output logic       frame_err
);
  localparam int unsigned AW = $clog2(CLK_HZ + BAUD + 1);

  typedef enum logic [1:0] {S_IDLE, S_START, S_DATA, S_STOP} state_e;

  state_e        state;
  logic [AW-1:0] acc, acc_sum;
  logic          samp;
  logic [2:0]    bitn;
  logic [7:0]    sr;

  always_comb begin
    acc_sum = acc + AW'(BAUD);
    samp    = (state != S_IDLE) && (acc_sum >= AW'(CLK_HZ));
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      state     <= S_IDLE;
      acc       <= '0;
      bitn      <= '0;
      sr        <= '0;
      data      <= '0;
      valid     <= 1'b0;
      frame_err <= 1'b0;
    end else begin
      valid     <= 1'b0;
      frame_err <= 1'b0;
      if (state == S_IDLE) begin
        if (!rxd) begin
          state <= S_START;
          acc   <= AW'(CLK_HZ / 2);
        end
      end else begin
        acc <= samp ? acc_sum - AW'(CLK_HZ) : acc_sum;
        if (samp) begin
          unique case (state)
            S_START: begin
              state <= rxd ? S_IDLE : S_DATA;
              bitn  <= '0;
            end
            S_DATA: begin
              sr   <= {rxd, sr[7:1]};
              bitn <= bitn + 1'b1;
              if (bitn == 3'd7) state <= S_STOP;
            end
            S_STOP: begin
              state <= S_IDLE;
              if (rxd) begin
                data  <= sr;
                valid <= 1'b1;
              end else begin
                frame_err <= 1'b1;
              end
            end
            default: state <= S_IDLE;
          endcase
        end
      end
    end
  end
endmodule
