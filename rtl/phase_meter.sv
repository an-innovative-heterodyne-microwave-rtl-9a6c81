// phase_meter: fringe counter of the heterodyne interferometer.
//
// The plasma signal is the 1 MHz beat from the microwave mixer, turned into
// logic by the comparator on the mixed-signal board. Its phase relative to the
// FPGA's own 1 MHz reference is the plasma phase shift. The block measures,
// with the 100 MHz clock as ruler, the delay from each rising edge of the
// reference to the *corresponding* rising edge of the plasma signal. One clock
// cycle is 1/DIV of a fringe (3.6 degrees for DIV = 100).
//
// Corresponding edges are paired by a signed balance `bal`: +1 for every
// reference rising edge, -1 for every plasma rising edge. When a plasma edge
// arrives, the reference edge it belongs to lies bal-1 periods before the
// latest reference edge, so
//     delay = DIV * (bal - 1) + ref_phase
// where ref_phase counts cycles since the latest reference edge. The balance
// keeps the count going across any number of whole fringes in either
// direction: a plasma edge that arrives just before "its" reference edge
// gives a small negative delay, one that slips a whole period later gives
// delay >= DIV. A growing delay is a falling phase.
//
// Start-up: nothing is counted until the first reference edge; the first
// plasma edge after it is paired with it, so the first result lies in
// 0..DIV-1. `fringe_count` is registered and changes one cycle after the
// plasma edge pulse, with `update` high in that cycle.
//
// The measurement by edge timing at 100 MHz and the tracking across whole
// fringes follow the paper; the balance counter is this design's way of
// doing that tracking, which the paper does not spell out.
module phase_meter #(
  parameter int unsigned DIV = 100,
  parameter int unsigned CW  = 32
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  logic                   ref_rise,
  input  logic [$clog2(DIV)-1:0] ref_phase,
  input  logic                   sig_rise,
  output logic signed [CW-1:0]   fringe_count,
  output logic                   update,
  output logic                   locked
);
  logic signed [CW-1:0] bal, bal_eff, delay;

  always_comb begin
    bal_eff = (locked ? bal : '0) + (ref_rise ? CW'(1) : CW'(0));
    delay   = (bal_eff - CW'(1)) * CW'(DIV) + CW'(ref_phase);
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      bal          <= '0;
      locked       <= 1'b0;
      fringe_count <= '0;
      update       <= 1'b0;
    end else begin
      update <= 1'b0;
      if (locked || ref_rise) begin
        locked <= 1'b1;
        if (sig_rise) begin
          fringe_count <= delay;
          update       <= 1'b1;
          bal          <= bal_eff - CW'(1);
        end else begin
          bal <= bal_eff;
        end
      end
    end
  end

  // The divider phase must be 0 exactly when the reference rises.
  a_phase0: assert property (@(posedge clk) disable iff (!rst_n)
                             ref_rise |-> (ref_phase == '0));
endmodule
