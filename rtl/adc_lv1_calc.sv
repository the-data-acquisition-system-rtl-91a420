// adc_lv1_calc: per-clock Lv1 contribution of one ADC module.
//
// Every 8 ns sample clock each of the 16 channels has its pedestal removed
// (clipped at zero) to give an energy, and a channel with energy above
// hit_thr is a hit. The module sums the 16 energies and ORs the 16 hit
// flags; the pair is what the ADC module sends to its Lv1 trigger module
// over the optical link (a CsI module's energy sum, or a veto module's hit).
// This is the "Calc. Energy, Hit" and "Sum 16 ch." boxes of the ADC FPGA.
// The energy and hit definitions (pedestal subtraction, threshold compare)
// are this design's choice. Timing: l1 is registered, one clock after the
// samples it is computed from.
module adc_lv1_calc
  import koto_pkg::*;
(
  input  logic                     clk,
  input  logic                     rst,
  input  adc_row_t                 samples,
  input  adc_row_t                 ped,
  input  sample_t                  hit_thr,
  output adc_l1_t                  l1
);

  logic [ESUM_W-1:0] esum;
  logic              hit;

  always_comb begin
    esum = '0;
    hit  = 1'b0;
    for (int c = 0; c < CH_PER_ADC; c++) begin
      sample_t e;
      e = (samples[c] > ped[c]) ? sample_t'(samples[c] - ped[c]) : '0;
      esum += ESUM_W'(e);
      if (e > hit_thr) hit = 1'b1;
    end
  end

  always_ff @(posedge clk) begin
    if (rst) l1 <= '0;
    else     l1 <= '{esum: esum, hit: hit};
  end

endmodule
