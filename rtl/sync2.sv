// sync2: two-flop synchroniser for one asynchronous input, with a rising-edge
// detector behind it.
//
// The comparator outputs, the trigger and the UART receive line come from
// outside the 100 MHz clock domain. Each passes two flip-flops before any
// logic looks at it; a third flop gives the previous value so that `rise`
// is high for exactly one cycle per rising edge. Latency from pin to `q` is
// two cycles, to `rise` also two cycles. RESET_VAL sets the value the chain
// holds in reset (1 for an idle UART line).
module sync2 #(
  parameter bit RESET_VAL = 1'b0
) (
  input  logic clk,
  input  logic rst_n,
  input  logic d,     // asynchronous input
  output logic q,     // synchronised level
  output logic rise   // one-cycle pulse on a rising edge of q
);
  logic s1, s2, s3;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      s1 <= RESET_VAL;
      s2 <= RESET_VAL;
      s3 <= RESET_VAL;
    end else begin
      s1 <= d;
      s2 <= s1;
      s3 <= s2;
    end
  end

  assign q    = s2;
  assign rise = s2 & ~s3;
endmodule
