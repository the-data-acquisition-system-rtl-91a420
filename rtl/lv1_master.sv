// lv1_master: the Lv1 trigger decision, made every 8 ns.
//
// The word at the end of the Lv1 daisy chain holds the total CsI energy and
// one activity bit per veto subsystem. The trigger condition is
// "energy above esum_thr and no enabled veto bit set"; a trigger is
// requested on the clock the condition becomes true. A request is accepted,
// and broadcast to all ADC modules as a one-clock lv1_trig pulse, unless the
// system is suspended: an Lv2 buffer is full (lv2_full), an ADC module has
// no room for another record (adc_busy), or fewer than HOLDOFF clocks have
// passed since the last accepted trigger. n_req and n_acc count requested
// and accepted triggers (their difference is the dead-time loss), n_susp
// those lost to a full Lv2 buffer.
//
// The decision inputs and the suspension on a full Lv2 buffer follow the
// description; edge detection, the ADC busy input and the hold-off are this
// design's choices. Timing: lv1_trig is registered, one clock after the
// chain word that fired it.
module lv1_master
  import koto_pkg::*;
#(
  parameter int unsigned HOLDOFF = WINDOW + 8
) (
  input  logic                 clk,
  input  logic                 rst,
  input  l1_chain_t            chain,
  input  logic [L1_ESUM_W-1:0] esum_thr,
  input  logic [N_VETO-1:0]    veto_mask,
  input  logic                 lv2_full,
  input  logic                 adc_busy,
  output logic                 lv1_trig,
  output logic [31:0]          n_req,
  output logic [31:0]          n_acc,
  output logic [31:0]          n_susp
);

  logic cond, cond_d, req, hold;
  logic [$clog2(HOLDOFF+1)-1:0] hcnt;

  assign cond = (chain.esum > esum_thr) && ((chain.veto & veto_mask) == '0);
  assign req  = cond && !cond_d;
  assign hold = (hcnt != '0);

  always_ff @(posedge clk) begin
    if (rst) begin
      cond_d <= 1'b0; lv1_trig <= 1'b0; hcnt <= '0;
      n_req <= '0; n_acc <= '0; n_susp <= '0;
    end else begin
      cond_d   <= cond;
      lv1_trig <= 1'b0;
      if (hold) hcnt <= hcnt - 1'b1;
      if (req) begin
        n_req <= n_req + 1;
        if (!lv2_full && !adc_busy && !hold) begin
          lv1_trig <= 1'b1;
          n_acc    <= n_acc + 1;
          hcnt     <= ($clog2(HOLDOFF+1))'(HOLDOFF);
        end else if (lv2_full) begin
          n_susp <= n_susp + 1;
        end
      end
    end
  end

endmodule
