// tb_adc_module: whole ADC-module FPGA path. Channels carry time stamps.
// Checks (1) the per-clock Lv1 output against the sum of samples minus
// pedestals of the previous clock, and (2) that two triggers produce link
// packets with the running event number and the 64 rows digitized from
// T+1-D on (D = pipeline delay), channel by channel.
module tb_adc_module;
  import koto_pkg::*;
  localparam int D = 300;
  logic clk = 0, rst = 1;
  adc_row_t samples, ped;
  sample_t hit_thr;
  logic [$clog2(PIPE_DEPTH+1)-1:0] pipe_delay;
  logic lv1_trig = 0, busy, lost;
  adc_l1_t l1;
  link_word_t link;
  int checks = 0, failures = 0, cyc = 0, ntrig = 0;
  logic [16:0] exp_q[$];

  adc_module dut (.*);
  always #4 clk = ~clk;

  function automatic adc_row_t stamp(int n);
    for (int c = 0; c < 16; c++) stamp[c] = sample_t'((n * 16 + c) & 16'h3fff);
  endfunction
  function automatic int sum_above(adc_row_t s, adc_row_t p);
    sum_above = 0;
    for (int c = 0; c < 16; c++) if (s[c] > p[c]) sum_above += int'(s[c] - p[c]);
  endfunction

  adc_row_t prev;
  always @(posedge clk) begin
    cyc <= cyc + 1; prev <= samples; samples <= stamp(cyc + 1);
    if (!rst && cyc > 3) begin
      checks++;
      if (int'(l1.esum) != sum_above(prev, ped)) begin failures++; if (failures < 4) $display("esum %0d exp %0d", l1.esum, sum_above(prev, ped)); end
    end
    if (lv1_trig) begin
      exp_q.push_back({1'b1, 16'(ntrig)}); ntrig++;
      for (int i = 0; i < WINDOW; i++) for (int c = 0; c < 16; c++)
        exp_q.push_back({1'b0, 16'(stamp(cyc + 1 - D + i)[c])});
    end
    if (!rst && link.valid) begin
      logic [16:0] e;
      checks++;
      e = exp_q.pop_front();
      if ({link.sop, link.data} != e) begin failures++; if (failures < 8) $display("link %h exp %h", {link.sop, link.data}, e); end
    end
  end

  initial begin
    #100000000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    samples = '0; hit_thr = 14'd100; pipe_delay = 9'(D);
    for (int c = 0; c < 16; c++) ped[c] = sample_t'(c * 300);
    repeat (3) @(posedge clk); rst <= 0;
    repeat (600) @(posedge clk);
    lv1_trig <= 1; @(posedge clk); lv1_trig <= 0;
    repeat (100) @(posedge clk);
    lv1_trig <= 1; @(posedge clk); lv1_trig <= 0;
    repeat (2 * PKT_WORDS + 100) @(posedge clk);
    checks++;
    if (exp_q.size() != 0) begin failures++; $display("%0d link words missing", exp_q.size()); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
