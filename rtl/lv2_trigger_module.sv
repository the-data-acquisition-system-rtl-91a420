// lv2_trigger_module: one Lv2 trigger module serving up to 16 ADC modules.
//
// Data path. The packet of each ADC link is written into a per-link buffer
// (sync_fifo, BUF_WORDS words) where it waits for the Lv2 decision. When any
// link buffer has less than FULL_MARGIN words of space left, buf_full is
// raised; the Lv1 master then suspends Lv1 triggers, which is the dead time
// of the system. The margin leaves room for records already captured in the
// ADC modules (two per module) and the one being sent.
//
// Decision path. lv2_coe_calc reduces each arriving packet to (se, sx, sy);
// once every link has delivered its sums for an event, the module adds those
// of the links that carry calorimeter (CsI) modules (link_is_csi)
// and adds the result to the word coming down the COE daisy chain
// (chain_in, valid/ready), passing the sum on (chain_out). The first module
// of the chain (IS_FIRST) ignores chain_in. The Lv2 master at the end of
// the chain broadcasts accept/reject (dec) with the event number.
//
// Readout. Decisions are queued; for each one, the event's PKT_WORDS words
// are popped from all link buffers in lock step. An accepted event is
// passed on as 256-bit words (link j in bits 16j+15..16j; absent links read
// as zero) to the ping-pong memory controller, wr_last marking its last word;
// a rejected event is discarded. err latches any mismatch of event numbers
// between links, chain and decision, or a missing header.
//
// Buffer, COE and chain follow the description; sizes, margins and the
// handshakes are this design's choices.
module lv2_trigger_module
  import koto_pkg::*;
#(
  parameter int unsigned N_LINKS     = ADC_PER_MOD,
  parameter int unsigned WINDOW_N    = WINDOW,
  parameter int unsigned BUF_WORDS   = 8192,
  parameter int unsigned FULL_MARGIN = 3 * (1 + WINDOW_N * CH_PER_ADC),
  parameter bit          IS_FIRST    = 1'b0
) (
  input  logic                         clk,
  input  logic                         rst,
  input  link_word_t [N_LINKS-1:0]     link,
  input  adc_row_t   [N_LINKS-1:0]     ped,
  input  pos_t [N_LINKS-1:0][CH_PER_ADC-1:0] pos_x,
  input  pos_t [N_LINKS-1:0][CH_PER_ADC-1:0] pos_y,
  input  logic [N_LINKS-1:0]           link_is_csi,
  output logic                         buf_full,
  // COE daisy chain
  input  logic                         chain_in_valid,
  input  coe_t                         chain_in,
  output logic                         chain_in_ready,
  output logic                         chain_out_valid,
  output coe_t                         chain_out,
  input  logic                         chain_out_ready,
  // Lv2 decision broadcast
  input  lv2_dec_t                     dec,
  // accepted events to memory
  output logic                         wr_valid,
  output logic [MEM_W-1:0]             wr_data,
  output logic                         wr_last,
  input  logic                         wr_ready,
  output logic                         err
);

  localparam int unsigned PKT = 1 + WINDOW_N * CH_PER_ADC;
  localparam int unsigned CW  = $clog2(BUF_WORDS + 1);
  localparam int unsigned PW  = $clog2(PKT + 1);
  // queues of per-event results and decisions hold as many events as fit in the buffer
  localparam int unsigned QD  = BUF_WORDS / PKT + 2;
  localparam int unsigned QW  = $clog2(QD + 1);

  // ---------------- per-link buffers and COE ----------------
  logic [N_LINKS-1:0]          lb_empty, rq_empty, rq_pop, lb_near_full;
  logic [N_LINKS-1:0][16:0]    lb_dout;
  coe_t [N_LINKS-1:0]          rq_dout;
  logic                        pop_all;

  for (genvar i = 0; i < N_LINKS; i++) begin : g_link
    logic [CW-1:0] cnt;
    logic          lb_full_unused, rq_full_unused;
    logic [QW-1:0] rq_cnt_unused;
    logic          res_valid;
    coe_t          res;

    sync_fifo #(.W(17), .DEPTH(BUF_WORDS)) u_buf (
      .clk, .rst, .push(link[i].valid), .din({link[i].sop, link[i].data}),
      .pop(pop_all), .dout(lb_dout[i]), .empty(lb_empty[i]), .full(lb_full_unused), .count(cnt)
    );
    assign lb_near_full[i] = (cnt > CW'(BUF_WORDS - FULL_MARGIN));

    lv2_coe_calc #(.WINDOW_N(WINDOW_N)) u_coe (
      .clk, .rst, .link(link[i]), .ped(ped[i]), .pos_x(pos_x[i]), .pos_y(pos_y[i]),
      .res_valid, .res
    );

    sync_fifo #(.W($bits(coe_t)), .DEPTH(QD)) u_res (
      .clk, .rst, .push(res_valid), .din(res), .pop(rq_pop[i]), .dout(rq_dout[i]),
      .empty(rq_empty[i]), .full(rq_full_unused), .count(rq_cnt_unused)
    );
  end

  always_ff @(posedge clk) begin
    if (rst) buf_full <= 1'b0;
    else     buf_full <= |lb_near_full;
  end

  // ---------------- local COE sum and daisy chain ----------------
  coe_t local_sum;
  logic local_valid, fire, evno_bad;

  always_comb begin
    local_sum = '0;
    local_sum.evno = rq_dout[0].evno;
    evno_bad = 1'b0;
    for (int i = 0; i < N_LINKS; i++) begin
      if (link_is_csi[i]) begin
        local_sum.se += rq_dout[i].se;
        local_sum.sx += rq_dout[i].sx;
        local_sum.sy += rq_dout[i].sy;
      end
      if (rq_dout[i].evno != rq_dout[0].evno) evno_bad = 1'b1;
    end
  end

  assign local_valid    = (rq_empty == '0);
  assign fire           = local_valid && (IS_FIRST || chain_in_valid) && (!chain_out_valid || chain_out_ready);
  assign rq_pop         = fire ? '1 : '0;
  assign chain_in_ready = fire && !IS_FIRST;

  always_ff @(posedge clk) begin
    if (rst) begin
      chain_out_valid <= 1'b0; chain_out <= '0;
    end else begin
      if (chain_out_valid && chain_out_ready) chain_out_valid <= 1'b0;
      if (fire) begin
        chain_out_valid <= 1'b1;
        chain_out.evno  <= local_sum.evno;
        chain_out.se    <= local_sum.se + (IS_FIRST ? '0 : chain_in.se);
        chain_out.sx    <= local_sum.sx + (IS_FIRST ? '0 : chain_in.sx);
        chain_out.sy    <= local_sum.sy + (IS_FIRST ? '0 : chain_in.sy);
      end
    end
  end

  // ---------------- decision queue and readout ----------------
  lv2_dec_t       dq_dout;
  logic           dq_empty, dq_full_unused, dq_pop;
  logic [QW-1:0]  dq_cnt_unused;
  logic [PW-1:0]  widx;
  logic           all_ready, beat;

  sync_fifo #(.W($bits(lv2_dec_t)), .DEPTH(QD)) u_dec (
    .clk, .rst, .push(dec.valid), .din(dec), .pop(dq_pop), .dout(dq_dout),
    .empty(dq_empty), .full(dq_full_unused), .count(dq_cnt_unused)
  );

  assign all_ready = !dq_empty && (lb_empty == '0);
  assign wr_valid  = all_ready && dq_dout.accept;
  assign beat      = all_ready && (!dq_dout.accept || wr_ready);
  assign pop_all   = beat;
  assign wr_last   = (widx == PW'(PKT - 1));
  assign dq_pop    = beat && wr_last;

  always_comb begin
    wr_data = '0;
    for (int i = 0; i < N_LINKS; i++) wr_data[16*i +: 16] = lb_dout[i][15:0];
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      widx <= '0; err <= 1'b0;
    end else begin
      if (beat) widx <= wr_last ? '0 : widx + 1'b1;
      if (fire && (evno_bad || (!IS_FIRST && chain_in.evno != local_sum.evno))) err <= 1'b1;
      if (beat && widx == '0) begin
        for (int i = 0; i < N_LINKS; i++)
          if (!lb_dout[i][16] || lb_dout[i][15:0] != dq_dout.evno) err <= 1'b1;
      end
    end
  end

endmodule
