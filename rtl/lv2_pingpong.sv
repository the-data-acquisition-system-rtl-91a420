// lv2_pingpong: double-buffered event memory of an Lv2 trigger module.
//
// Accepted events are written into one of two external memories (2 Gbit
// each, 2^23 words of 256 bits) while the other is read out towards the
// Lv3 farm. The write side takes a word stream (wr_valid/wr_ready, wr_last
// on an event's last word) and only starts an event if EV_WORDS words still
// fit in the bank, otherwise it holds wr_ready low, which in turn fills the
// Lv2 buffers. The read side reads the other bank from address 0 up to the
// number of words written there, one word every second clock, and offers
// them on rd_valid/rd_data/rd_ready. The banks swap when the read bank is
// empty, the write bank holds at least one complete event and no event is
// being written; swaps counts swaps.
//
// The two memories used alternately follow the description; the memory
// port (synchronous, 1-clock read latency, one request per clock), the
// swap rule and the event-size rule are this design's choices.
// mem_a/mem_b carry the requests to the memories, rdata_a/rdata_b return
// the word read in the previous clock.
module lv2_pingpong
  import koto_pkg::*;
#(
  parameter int unsigned AW       = MEM_AW,
  parameter int unsigned EV_WORDS = PKT_WORDS
) (
  input  logic             clk,
  input  logic             rst,
  input  logic             wr_valid,
  input  logic [MEM_W-1:0] wr_data,
  input  logic             wr_last,
  output logic             wr_ready,
  output logic             mem_a_we,
  output logic [AW-1:0]    mem_a_waddr,
  output logic             mem_a_re,
  output logic [AW-1:0]    mem_a_raddr,
  output logic             mem_b_we,
  output logic [AW-1:0]    mem_b_waddr,
  output logic             mem_b_re,
  output logic [AW-1:0]    mem_b_raddr,
  output logic [MEM_W-1:0] mem_wdata,
  input  logic [MEM_W-1:0] rdata_a,
  input  logic [MEM_W-1:0] rdata_b,
  output logic             rd_valid,
  output logic [MEM_W-1:0] rd_data,
  input  logic             rd_ready,
  output logic             wsel,
  output logic [31:0]      swaps
);

  localparam logic [AW:0] CAP = {1'b1, {AW{1'b0}}};

  logic [AW:0]   wcnt;       // words in the write bank
  logic [AW:0]   rleft;      // words still to read from the read bank
  logic [AW-1:0] raddr;
  logic          in_event, pend, swap, room, wbeat, issue;

  assign room     = (wcnt + (AW+1)'(EV_WORDS)) <= CAP;
  assign swap     = (rleft == '0) && !pend && !rd_valid && !in_event && (wcnt != '0);
  assign wr_ready = !swap && (in_event || room);
  assign wbeat    = wr_valid && wr_ready;
  assign issue    = (rleft != '0) && !pend && !rd_valid;

  assign mem_wdata   = wr_data;
  assign mem_a_we    = wbeat && (wsel == 1'b0);
  assign mem_b_we    = wbeat && (wsel == 1'b1);
  assign mem_a_waddr = wcnt[AW-1:0];
  assign mem_b_waddr = wcnt[AW-1:0];
  assign mem_a_re    = issue && (wsel == 1'b1);
  assign mem_b_re    = issue && (wsel == 1'b0);
  assign mem_a_raddr = raddr;
  assign mem_b_raddr = raddr;

  always_ff @(posedge clk) begin
    if (rst) begin
      wsel <= 1'b0; wcnt <= '0; rleft <= '0; raddr <= '0; in_event <= 1'b0;
      pend <= 1'b0; rd_valid <= 1'b0; rd_data <= '0; swaps <= '0;
    end else begin
      if (swap) begin
        wsel  <= !wsel;
        rleft <= wcnt;
        raddr <= '0;
        wcnt  <= '0;
        swaps <= swaps + 1;
      end else if (wbeat) begin
        wcnt     <= wcnt + 1'b1;
        in_event <= !wr_last;
      end
      if (issue) begin
        pend  <= 1'b1;
        raddr <= raddr + 1'b1;
        rleft <= rleft - 1'b1;
      end
      if (pend) begin
        pend     <= 1'b0;
        rd_valid <= 1'b1;
        rd_data  <= wsel ? rdata_a : rdata_b;
      end else if (rd_valid && rd_ready) begin
        rd_valid <= 1'b0;
      end
    end
  end

  a_no_write_on_swap: assert property (@(posedge clk) disable iff (rst) swap |-> !wbeat);

endmodule
