// time_counter: the interferometer's internal time stamp.
//
// The count goes up by one on every rising edge of the 1 MHz reference
// (`tick`), so it reads time in microseconds. `clear` sets it to zero; in the
// top it is driven by the host's time-reset command and by the trigger, which
// ties the stamp to the start of a plasma shot. A clear in the same cycle as
// a tick leaves the count at zero. The count wraps at 2**TW. Counting
// reference edges and clearing on command or trigger follow the paper; the
// width is this design's choice.
module time_counter #(
  parameter int unsigned TW = 32
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          tick,
  input  logic          clear,
  output logic [TW-1:0] count
);
  always_ff @(posedge clk) begin
    if (!rst_n || clear) count <= '0;
    else if (tick)       count <= count + 1'b1;
  end
endmodule
