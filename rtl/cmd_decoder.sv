// cmd_decoder: host command bytes to control pulses.
//
// Each byte received from the control computer is compared with the command
// codes of interf_pkg. 'R' pulses `time_reset` (clear the time stamp), 'T'
// pulses `sw_trigger` (the same action as the trigger input: clear the time
// stamp and freeze the gain for the shot), 'A' pulses `gain_arm` (allow
// automatic gain adjustment again). Any other byte pulses `bad_cmd` and does
// nothing else. Outputs are registered: one cycle after the byte's `valid`.
// That the computer can reset the time counter and trigger the shot follows
// the paper; the byte codes and the re-arm command are this design's own.
module cmd_decoder
  import interf_pkg::*;
(
  input  logic       clk,
  input  logic       rst_n,
  input  logic [7:0] data,
  input  logic       valid,
  output logic       time_reset,
  output logic       sw_trigger,
  output logic       gain_arm,
  output logic       bad_cmd
);
  always_ff @(posedge clk) begin
    if (!rst_n) begin
      time_reset <= 1'b0;
      sw_trigger <= 1'b0;
      gain_arm   <= 1'b0;
      bad_cmd    <= 1'b0;
    end else begin
      time_reset <= valid && (data == CMD_TIME_RESET);
      sw_trigger <= valid && (data == CMD_TRIGGER);
      gain_arm   <= valid && (data == CMD_GAIN_ARM);
      bad_cmd    <= valid && !(data inside {CMD_TIME_RESET, CMD_TRIGGER, CMD_GAIN_ARM});
    end
  end
endmodule
