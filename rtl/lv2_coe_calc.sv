// lv2_coe_calc: centre-of-energy sums of one ADC module's event packet.
//
// It watches the words of one ADC link as they enter the Lv2 module. For
// each of the 16 channels it keeps the largest sample seen in the record;
// when the last word of the packet has passed, the energy of a channel is
// that peak minus its pedestal (clipped at zero), and the module outputs,
// for the event, se = sum(E), sx = sum(E*x), sy = sum(E*y), with x, y the
// channel's crystal position in mm, together with the event number from the
// packet header. The Lv2 master later forms COE = |(sx, sy)| / se.
// The COE itself follows the description; taking the peak as the energy is
// this design's choice.
// Timing: res_valid pulses for one clock, two clocks after the last word.
module lv2_coe_calc
  import koto_pkg::*;
#(
  parameter int unsigned WINDOW_N = WINDOW
) (
  input  logic       clk,
  input  logic       rst,
  input  link_word_t link,
  input  adc_row_t   ped,
  input  pos_t [CH_PER_ADC-1:0] pos_x,
  input  pos_t [CH_PER_ADC-1:0] pos_y,
  output logic       res_valid,
  output coe_t       res
);

  localparam int unsigned NW = WINDOW_N * CH_PER_ADC;
  localparam int unsigned IW = $clog2(NW + 1);

  adc_row_t          peak;
  logic [IW-1:0]     widx;
  logic              in_pkt, done;
  logic [EVNO_W-1:0] evno;
  coe_t              sums;

  always_ff @(posedge clk) begin
    if (rst) begin
      in_pkt <= 1'b0; done <= 1'b0; widx <= '0; evno <= '0; peak <= '0;
    end else begin
      done <= 1'b0;
      if (link.valid && link.sop) begin
        in_pkt <= 1'b1;
        widx   <= '0;
        evno   <= link.data;
        peak   <= '0;
      end else if (link.valid && in_pkt) begin
        automatic logic [3:0] c = widx[3:0];
        if (sample_t'(link.data) > peak[c]) peak[c] <= sample_t'(link.data);
        widx <= widx + 1'b1;
        if (widx == IW'(NW - 1)) begin
          in_pkt <= 1'b0;
          done   <= 1'b1;
        end
      end
    end
  end

  always_comb begin
    sums = '0;
    sums.evno = evno;
    for (int c = 0; c < CH_PER_ADC; c++) begin
      logic [SAMPLE_W:0] e;
      e = (peak[c] > ped[c]) ? {1'b0, peak[c] - ped[c]} : '0;
      sums.se += SE_W'(e);
      sums.sx += SX_W'($signed(e) * pos_x[c]);
      sums.sy += SX_W'($signed(e) * pos_y[c]);
    end
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      res_valid <= 1'b0; res <= '0;
    end else begin
      res_valid <= done;
      if (done) res <= sums;
    end
  end

endmodule
