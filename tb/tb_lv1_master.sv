// tb_lv1_master: drives chain words directly. Checks that a trigger fires
// exactly one clock after the energy first exceeds the threshold, that an
// enabled veto blocks it while a masked-off veto does not, that a full Lv2
// buffer or a busy ADC suspends it (the request still counted, and counted
// as suspended for the Lv2 case), that a second request inside the
// hold-off window is not accepted, and the final request/accept counts.
module tb_lv1_master;
  import koto_pkg::*;
  localparam int HOLD = 20;
  logic clk = 0, rst = 1;
  l1_chain_t chain;
  logic [L1_ESUM_W-1:0] esum_thr;
  logic [N_VETO-1:0] veto_mask;
  logic lv2_full = 0, adc_busy = 0, lv1_trig;
  logic [31:0] n_req, n_acc, n_susp;
  int checks = 0, failures = 0, ntrig = 0;

  lv1_master #(.HOLDOFF(HOLD)) dut (.*);
  always #4 clk = ~clk;
  always @(negedge clk) if (lv1_trig) ntrig++;

  initial begin
    #10000000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  task automatic check(string what, bit cond);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", what); end
  endtask

  // one pulse of `len` clocks with energy e and veto bits v; returns whether
  // lv1_trig came exactly one clock after the first clock
  task automatic pulse(int e, logic [7:0] v, int len, output bit fired, output bit late);
    fired = 0; late = 0;
    @(posedge clk); chain <= '{esum: L1_ESUM_W'(e), veto: v};
    @(posedge clk); #1; fired = lv1_trig;    // chain word sampled at this edge, trig registered by it
    for (int i = 1; i < len; i++) begin @(posedge clk); #1; if (lv1_trig) late = 1; end
    chain <= '0;
    repeat (HOLD + 5) begin @(posedge clk); #1; if (lv1_trig) late = 1; end
  endtask

  initial begin
    bit f, l;
    chain = '0; esum_thr = 1000; veto_mask = 8'b0000_0101;
    repeat (3) @(posedge clk); rst <= 0;
    pulse(1500, 8'h00, 6, f, l); check("fires on energy", f && !l);
    pulse(900,  8'h00, 6, f, l); check("below threshold", !f && !l);
    pulse(1500, 8'h04, 6, f, l); check("enabled veto blocks", !f && !l);
    pulse(1500, 8'h02, 6, f, l); check("masked veto ignored", f && !l);
    lv2_full = 1;
    pulse(1500, 8'h00, 6, f, l); check("suspended by Lv2 full", !f && !l);
    lv2_full = 0; adc_busy = 1;
    pulse(1500, 8'h00, 6, f, l); check("suspended by ADC busy", !f && !l);
    adc_busy = 0;
    // two requests 4 clocks apart: the second falls inside the hold-off
    @(posedge clk); chain <= '{esum: 2000, veto: 0};
    @(posedge clk); chain <= '0; @(posedge clk); @(posedge clk);
    @(posedge clk); chain <= '{esum: 2000, veto: 0};
    @(posedge clk); chain <= '0;
    repeat (HOLD + 5) @(posedge clk);
    #1;
    check("trigger count", ntrig == 3);
    check("n_req", n_req == 6);
    check("n_acc", n_acc == 3);
    check("n_susp", n_susp == 1);
    $display("req=%0d acc=%0d susp=%0d trig=%0d", n_req, n_acc, n_susp, ntrig);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
