// adc_pipeline: the 4 us front-end pipeline of one ADC module and its
// trigger capture.
//
// All 16 channels are written every clock into a circular buffer of DEPTH
// rows (500 rows = 4 us at 125 MHz), so every sample is held while the Lv1
// decision is being made. The row leaving the pipeline is the one written
// `delay` clocks earlier (2 <= delay <= DEPTH, a run-time setting used to
// match the trigger latency of the system). When trig pulses, the next
// WINDOW rows that leave the pipeline are copied into a free slot of a small
// event buffer; a finished slot is then offered row by row on the rd_*
// stream (rd_first on the first row of an event, rd_last on the last).
//
// busy is high while no slot is free for another trigger; a trigger that
// still arrives then is dropped and flagged on `lost`. The pipeline itself
// follows the description (data saved "as it exits the pipeline"); the
// record length, the two-slot event buffer and the busy flag are choices of
// this design. Timing: pipe_out of a sample appears `delay` clocks after it
// entered; capture starts with the row leaving the pipeline in the clock
// after trig.
module adc_pipeline
  import koto_pkg::*;
#(
  parameter int unsigned DEPTH     = PIPE_DEPTH,
  parameter int unsigned WINDOW_N  = WINDOW,
  parameter int unsigned EVT_SLOTS = 2
) (
  input  logic                         clk,
  input  logic                         rst,
  input  adc_row_t                     samples,
  input  logic [$clog2(DEPTH+1)-1:0]   delay,
  input  logic                         trig,
  output logic                         busy,
  output logic                         lost,
  output logic                         rd_valid,
  output adc_row_t                     rd_row,
  output logic                         rd_first,
  output logic                         rd_last,
  input  logic                         rd_ready
);

  localparam int unsigned AW  = $clog2(DEPTH);
  localparam int unsigned WW  = $clog2(WINDOW_N);
  localparam int unsigned SW  = (EVT_SLOTS > 1) ? $clog2(EVT_SLOTS) : 1;
  localparam int unsigned EAW = $clog2(EVT_SLOTS * WINDOW_N);

  // ---------------- pipeline ----------------
  adc_row_t          pipe [DEPTH];
  logic [AW-1:0]     wp;
  logic [AW-1:0]     rp;
  adc_row_t          pipe_out;

  // read address = wp - delay + 1 (mod DEPTH); registered read gives the row
  // written exactly `delay` clocks before pipe_out is valid.
  always_comb begin
    int signed a;
    a = int'(wp) - int'(delay) + 1;
    if (a < 0) a += int'(DEPTH);
    rp = AW'(a);
  end

  always_ff @(posedge clk) begin
    pipe[wp] <= samples;
    pipe_out <= pipe[rp];
    if (rst)                     wp <= '0;
    else if (wp == AW'(DEPTH-1)) wp <= '0;
    else                         wp <= wp + 1'b1;
  end

  // ---------------- event buffer ----------------
  adc_row_t          evbuf [EVT_SLOTS * WINDOW_N];
  logic [SW-1:0]     wslot, rslot;
  logic [SW:0]       used;        // slots being filled or waiting to be read
  logic              capturing;
  logic [WW-1:0]     widx, ridx;
  logic [SW:0]       ready_cnt;   // complete slots not yet read
  logic              cap_done, rd_done;

  assign busy     = (used == (SW+1)'(EVT_SLOTS));
  assign cap_done = capturing && (widx == WW'(WINDOW_N-1));
  assign rd_valid = (ready_cnt != '0);
  assign rd_row   = evbuf[EAW'(rslot) * EAW'(WINDOW_N) + EAW'(ridx)];
  assign rd_first = rd_valid && (ridx == '0);
  assign rd_last  = rd_valid && (ridx == WW'(WINDOW_N-1));
  assign rd_done  = rd_valid && rd_ready && rd_last;

  always_ff @(posedge clk) begin
    if (capturing) evbuf[EAW'(wslot) * EAW'(WINDOW_N) + EAW'(widx)] <= pipe_out;
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      wslot <= '0; rslot <= '0; used <= '0; capturing <= 1'b0;
      widx <= '0; ridx <= '0; ready_cnt <= '0; lost <= 1'b0;
    end else begin
      lost <= 1'b0;
      // capture
      if (trig && !capturing && !busy) begin
        capturing <= 1'b1;
        widx      <= '0;
      end else if (trig) begin
        lost <= 1'b1;
      end
      if (capturing) begin
        widx <= widx + 1'b1;
        if (cap_done) begin
          capturing <= 1'b0;
          wslot     <= (wslot == SW'(EVT_SLOTS-1)) ? '0 : wslot + 1'b1;
        end
      end
      // read out
      if (rd_valid && rd_ready) begin
        ridx <= ridx + 1'b1;
        if (rd_last) begin
          ridx  <= '0;
          rslot <= (rslot == SW'(EVT_SLOTS-1)) ? '0 : rslot + 1'b1;
        end
      end
      ready_cnt <= ready_cnt + (SW+1)'(cap_done) - (SW+1)'(rd_done);
      used      <= used + (SW+1)'(trig && !capturing && !busy) - (SW+1)'(rd_done);
    end
  end

  // the read of the row written in the same clock is not bypassed
  a_delay_range: assert property (@(posedge clk) disable iff (rst) (delay >= 2) && (delay <= DEPTH));

  // a trigger during a capture is a protocol error of the Lv1 master
  a_no_trig_while_capturing: assert property (@(posedge clk) disable iff (rst) !(trig && capturing));

endmodule
