// tb_lv1_trigger_module: a daisy chain of three Lv1 trigger modules
// (STAGE 0, 1, 2) with random ADC inputs and a random CsI/veto assignment.
// Three clocks after any clock t, the end of the chain must carry the sum of
// the CsI energies of all 48 inputs at t and, per veto subsystem, the OR of
// the hits of its inputs at t; the time alignment is what is being checked.
module tb_lv1_trigger_module;
  import koto_pkg::*;
  localparam int NM = 3;
  logic clk = 0, rst = 1;
  adc_l1_t [NM-1:0][15:0] adc_in;
  logic [NM-1:0][15:0] is_csi;
  logic [NM-1:0][15:0][2:0] vidx;
  l1_chain_t [NM:0] ch;
  int checks = 0, failures = 0;
  l1_chain_t hist[$];

  assign ch[0] = '0;
  for (genvar m = 0; m < NM; m++) begin : g
    lv1_trigger_module #(.N_IN(16), .STAGE(m)) dut (
      .clk, .rst, .adc_in(adc_in[m]), .in_is_csi(is_csi[m]), .in_veto_idx(vidx[m]),
      .chain_in(ch[m]), .chain_out(ch[m+1]));
  end
  always #4 clk = ~clk;

  initial begin
    #10000000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  function automatic l1_chain_t expected();
    expected = '0;
    for (int m = 0; m < NM; m++) for (int i = 0; i < 16; i++) begin
      if (is_csi[m][i]) expected.esum += L1_ESUM_W'(adc_in[m][i].esum);
      else if (adc_in[m][i].hit) expected.veto[vidx[m][i]] = 1'b1;
    end
  endfunction

  initial begin
    for (int m = 0; m < NM; m++) for (int i = 0; i < 16; i++) begin
      is_csi[m][i] = ($urandom_range(0, 2) != 0); vidx[m][i] = 3'($urandom);
    end
    adc_in = '0;
    repeat (3) @(posedge clk); rst <= 0;
    for (int n = 0; n < 1000; n++) begin
      @(posedge clk);
      for (int m = 0; m < NM; m++) for (int i = 0; i < 16; i++)
        adc_in[m][i] <= '{esum: ESUM_W'($urandom), hit: ($urandom_range(0, 20) == 0)};
      #1;
      hist.push_back(expected());
      if (hist.size() > NM) begin
        l1_chain_t e; e = hist.pop_front();
        checks++;
        if (ch[NM] != e) begin failures++; if (failures < 5) $display("n=%0d got %h exp %h", n, ch[NM], e); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
