// adc_link_tx: sends captured events from an ADC module to its Lv2 module.
//
// The 2.5 Gb/s optical link with 8b/10b coding carries 2 Gb/s of payload,
// i.e. exactly one 16-bit word per 125 MHz clock, so the link is modelled
// as a 16-bit word stream with a valid flag (the transceiver is outside this
// design). A packet is one header word, marked by sop and holding a 16-bit
// count of the events this module has sent, followed by WINDOW rows of 16
// words (channel 0 first), each a 14-bit sample zero-extended to 16 bits.
// The header layout and word order are this design's choice.
//
// Timing: the header leaves in the clock after a first row is offered; the
// words then follow back to back, PKT_WORDS = 1 + 16*WINDOW clocks per
// event. There is no back-pressure on the link.
module adc_link_tx
  import koto_pkg::*;
(
  input  logic       clk,
  input  logic       rst,
  input  logic       rd_valid,
  input  adc_row_t   rd_row,
  input  logic       rd_first,
  input  logic       rd_last,
  output logic       rd_ready,
  output link_word_t link
);

  typedef enum logic [1:0] {S_IDLE, S_DATA} state_t;
  state_t            state;
  logic [3:0]        ch;
  logic [EVNO_W-1:0] evno;

  assign rd_ready = (state == S_DATA) && (ch == 4'd15);

  always_ff @(posedge clk) begin
    if (rst) begin
      state <= S_IDLE; ch <= '0; evno <= '0; link <= '0;
    end else begin
      link <= '0;
      unique case (state)
        S_IDLE: if (rd_valid && rd_first) begin
          link  <= '{valid: 1'b1, sop: 1'b1, data: evno};
          evno  <= evno + 1'b1;
          ch    <= '0;
          state <= S_DATA;
        end
        S_DATA: begin
          link <= '{valid: 1'b1, sop: 1'b0, data: LINK_W'(rd_row[ch])};
          ch   <= ch + 1'b1;
          if (ch == 4'd15 && rd_last) state <= S_IDLE;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  a_row_present: assert property (@(posedge clk) disable iff (rst) (state == S_DATA) |-> rd_valid);

endmodule
