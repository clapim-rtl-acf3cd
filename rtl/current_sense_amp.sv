// current_sense_amp -- behavioural model of the latched current sense amplifier.
//
// Behavioural model: the real part is an analog circuit (precharge PMOS pair, clamp
// transistors gated by VCLP, cross-coupled latch). With all bitlines of the selected row
// grounded, the wordline current is the sum of the currents of the cells that hold 1, so
// it measures how many Edits Vector bits are set. The amplifier compares that current with
// a reference current set for the edit threshold `thr` and latches the outcome.
//
// This model replaces the currents by their digital meaning: the "current" is the number
// of 1s on `bl`, the reference sits between thr and thr+1 units, and OUT is 1 (a hit)
// when the number of 1s does not exceed thr. OUTN is its complement. The decision is
// taken while `en` is high (the clamp is open) and latched on the clock in which `latch`
// is high; OUT/OUTN hold their value until the next latch. The model is ideal: the paper's
// Monte Carlo results show that a real row with exactly thr edits is a hit in only about
// 80% of trials, which this model does not reproduce.
//
// Timing: one SA cycle is 36 ns in the paper, 12 clocks of 3 ns; the caller holds `en`
// for that time and pulses `latch` in its last clock.
module current_sense_amp
  import clapim_pkg::*;
#(
  parameter int unsigned NBL = K   // bitlines summed on the wordline
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             en,       // clamp open: the row current is being compared
  input  logic             latch,    // latch the comparison result
  input  logic [NBL-1:0]   bl,       // logical states of the cells on the sensed wordline
  input  logic [THR_W-1:0] thr,      // reference current, in units of one cell current
  output logic             out,      // 1: number of 1s <= thr (hit)
  output logic             outn
);

  logic [$clog2(NBL+1)-1:0] i_sum;

  always_comb begin
    i_sum = '0;
    for (int unsigned b = 0; b < NBL; b++)
      i_sum += $clog2(NBL+1)'(bl[b]);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) out <= 1'b0;
    else if (en && latch) out <= (32'(i_sum) <= 32'(thr));
  end

  assign outn = ~out;

endmodule
