// adc_module: the FPGA logic of one 16-channel, 14-bit, 125 MHz ADC module.
//
// Each clock the 16 digitized channels go two ways: adc_lv1_calc forms the
// energy sum and hit flag sent to the Lv1 trigger every 8 ns, and
// adc_pipeline holds the waveforms for 4 us. An Lv1 trigger copies a
// WINDOW-sample record from the pipeline exit, and adc_link_tx sends it to
// the Lv2 trigger module. This composition follows the ADC-module block
// diagram; the analog Bessel filter and the ADC chips sit in front of the
// `samples` port, the optical transceivers behind `l1` and `link`.
// Timing: l1 lags samples by one clock; see the sub-blocks for the rest.
module adc_module
  import koto_pkg::*;
#(
  parameter int unsigned DEPTH     = PIPE_DEPTH,
  parameter int unsigned WINDOW_N  = WINDOW,
  parameter int unsigned EVT_SLOTS = 2
) (
  input  logic                       clk,
  input  logic                       rst,
  input  adc_row_t                   samples,
  input  adc_row_t                   ped,
  input  sample_t                    hit_thr,
  input  logic [$clog2(DEPTH+1)-1:0] pipe_delay,
  input  logic                       lv1_trig,
  output adc_l1_t                    l1,
  output link_word_t                 link,
  output logic                       busy,
  output logic                       lost
);

  logic     rd_valid, rd_first, rd_last, rd_ready;
  adc_row_t rd_row;

  adc_lv1_calc u_calc (
    .clk, .rst, .samples, .ped, .hit_thr, .l1
  );

  adc_pipeline #(.DEPTH(DEPTH), .WINDOW_N(WINDOW_N), .EVT_SLOTS(EVT_SLOTS)) u_pipe (
    .clk, .rst, .samples, .delay(pipe_delay), .trig(lv1_trig), .busy, .lost,
    .rd_valid, .rd_row, .rd_first, .rd_last, .rd_ready
  );

  adc_link_tx u_tx (
    .clk, .rst, .rd_valid, .rd_row, .rd_first, .rd_last, .rd_ready, .link
  );

endmodule
