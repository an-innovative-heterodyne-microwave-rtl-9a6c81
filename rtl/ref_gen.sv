// ref_gen: 1 MHz reference (modulation) signal from the 100 MHz clock.
//
// A modulo-DIV counter `phase` runs on every clock. The reference is high
// while phase < DIV/2 and low for the rest of the period, so with the paper's
// DIV = 100 it is a 1 MHz square wave of 50 % duty. The output pin is driven
// straight from a flip-flop so that it carries no glitches into the
// mixed-signal board's bandpass filter. `ref_rise` is high in the cycle in
// which phase is 0, i.e. in the cycle in which ref_out is first high, and
// `phase` tells any other block how many cycles ago the last rising edge was.
// In reset the divider sits at its last phase with the reference low, so the
// first clock edge after reset raises the pin and starts period 0: every
// period, the first included, shows its rising edge on the pin.
// The clock division follows the paper; the duty cycle and reset phase are
// this design's choice.
module ref_gen #(
  parameter int unsigned DIV = 100
) (
  input  logic                   clk,
  input  logic                   rst_n,
  output logic                   ref_out,
  output logic                   ref_rise,
  output logic [$clog2(DIV)-1:0] phase
);
  localparam int unsigned PW = $clog2(DIV);
  localparam logic [PW-1:0] LAST = PW'(DIV - 1);
  localparam logic [PW-1:0] HALF = PW'(DIV / 2);

  logic [PW-1:0] phase_nxt;

  always_comb phase_nxt = (phase == LAST) ? '0 : phase + 1'b1;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      phase   <= LAST;
      ref_out <= 1'b0;
    end else begin
      phase   <= phase_nxt;
      ref_out <= (phase_nxt < HALF);
    end
  end

  assign ref_rise = (phase == '0);

  initial assert (DIV >= 2) else $error("ref_gen: DIV must be at least 2");
endmodule
