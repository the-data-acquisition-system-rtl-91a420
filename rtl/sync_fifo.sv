// sync_fifo: single-clock first-in first-out buffer with show-ahead output.
//
// dout shows the oldest entry whenever empty is low; pop removes it and push
// stores din in the same clock if required. Pushing when full or popping
// when empty is a caller error and is checked by assertions. count holds the
// number of stored entries. DEPTH need not be a power of two.
module sync_fifo #(
  parameter int unsigned W     = 16,
  parameter int unsigned DEPTH = 16
) (
  input  logic                       clk,
  input  logic                       rst,
  input  logic                       push,
  input  logic [W-1:0]               din,
  input  logic                       pop,
  output logic [W-1:0]               dout,
  output logic                       empty,
  output logic                       full,
  output logic [$clog2(DEPTH+1)-1:0] count
);

  localparam int unsigned AW = (DEPTH > 1) ? $clog2(DEPTH) : 1;

  logic [W-1:0]  mem [DEPTH];
  logic [AW-1:0] wp, rp;

  assign empty = (count == '0);
  assign full  = (count == ($clog2(DEPTH+1))'(DEPTH));
  assign dout  = mem[rp];

  always_ff @(posedge clk) begin
    if (push) mem[wp] <= din;
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      wp <= '0; rp <= '0; count <= '0;
    end else begin
      if (push) wp <= (wp == AW'(DEPTH-1)) ? '0 : wp + 1'b1;
      if (pop)  rp <= (rp == AW'(DEPTH-1)) ? '0 : rp + 1'b1;
      count <= count + ($clog2(DEPTH+1))'(push) - ($clog2(DEPTH+1))'(pop);
    end
  end

  a_no_overflow:  assert property (@(posedge clk) disable iff (rst) !(push && full && !pop));
  a_no_underflow: assert property (@(posedge clk) disable iff (rst) !(pop && empty));

endmodule
