// tb_adc_lv1_calc: random samples, pedestals and thresholds; the expected
// energy sum and hit flag are computed here from the definition (sample
// minus pedestal clipped at zero, hit when above threshold) and compared
// with the registered output one clock later.
module tb_adc_lv1_calc;
  import koto_pkg::*;
  logic clk = 0, rst = 1;
  adc_row_t samples, ped;
  sample_t hit_thr;
  adc_l1_t l1;
  int checks = 0, failures = 0, hits = 0;

  adc_lv1_calc dut (.*);
  always #4 clk = ~clk;

  initial begin
    #200000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    int unsigned exp_e; bit exp_h;
    samples = '0; ped = '0; hit_thr = '0;
    repeat (3) @(posedge clk);
    rst <= 0;
    for (int n = 0; n < 2000; n++) begin
      exp_e = 0; exp_h = 0;
      hit_thr = sample_t'($urandom_range(50, 2000));
      for (int c = 0; c < 16; c++) begin
        int unsigned s, p, e;
        p = $urandom_range(0, 400);
        s = (n % 3 == 0) ? $urandom_range(0, 16383) : p + $urandom_range(0, 40) - 20;
        if (s > 16383) s = 16383;
        samples[c] = sample_t'(s); ped[c] = sample_t'(p);
        e = (s > p) ? s - p : 0;
        exp_e += e;
        if (e > hit_thr) exp_h = 1;
      end
      @(posedge clk); #1;
      checks++;
      if (l1.esum != ESUM_W'(exp_e) || l1.hit != exp_h) begin
        failures++;
        if (failures < 5) $display("mismatch esum=%0d exp=%0d hit=%0d exp=%0d", l1.esum, exp_e, l1.hit, exp_h);
      end
      if (exp_h) hits++;
    end
    checks++; if (hits == 0 || hits == 2000) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
