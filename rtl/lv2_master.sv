// lv2_master: the Lv2 trigger decision on the centre of energy (COE).
//
// At the end of the COE daisy chain it receives, per event, the calorimeter
// totals se = sum(E), sx = sum(E*x), sy = sum(E*y). The COE radius is
// sqrt(sx^2 + sy^2) / se; the event is accepted when it exceeds coe_min_mm
// (165 mm in the 2013 physics run), a cut that selects events with large
// transverse momentum. To avoid a divider and a square root the comparison
// is made as sx^2 + sy^2 > (coe_min_mm * se)^2, exact for se > 0; an event
// with se = 0 is rejected. The decision is broadcast to all Lv2 modules with
// the event number. n_in and n_acc count decided and accepted events.
// The cut follows the description; the division-free form is this design's.
// Timing: chain_ready is always high; dec is registered, one clock after
// the chain word.
module lv2_master
  import koto_pkg::*;
(
  input  logic        clk,
  input  logic        rst,
  input  logic        chain_valid,
  input  coe_t        chain,
  output logic        chain_ready,
  input  logic [15:0] coe_min_mm,
  output lv2_dec_t    dec,
  output logic [31:0] n_in,
  output logic [31:0] n_acc
);

  localparam int unsigned RW = 2 * SX_W + 1;

  logic signed [2*SX_W-1:0] x2, y2;
  logic [RW-1:0]            r2;
  logic [SE_W+15:0]         rmin_se;
  logic [RW-1:0]            thr2;
  logic                     accept;

  assign chain_ready = 1'b1;
  assign x2      = chain.sx * chain.sx;
  assign y2      = chain.sy * chain.sy;
  assign r2      = RW'(unsigned'(x2)) + RW'(unsigned'(y2));
  assign rmin_se = (SE_W+16)'(chain.se) * (SE_W+16)'(coe_min_mm);
  assign thr2    = RW'(rmin_se) * RW'(rmin_se);
  assign accept  = (chain.se != '0) && (r2 > thr2);

  always_ff @(posedge clk) begin
    if (rst) begin
      dec <= '0; n_in <= '0; n_acc <= '0;
    end else begin
      dec <= '{valid: chain_valid, accept: chain_valid && accept, evno: chain.evno};
      if (chain_valid) begin
        n_in <= n_in + 1;
        if (accept) n_acc <= n_acc + 1;
      end
    end
  end

endmodule
