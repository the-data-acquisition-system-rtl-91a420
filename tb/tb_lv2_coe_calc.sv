// tb_lv2_coe_calc: sends random event packets (one with all samples at or
// below pedestal) and compares se, sx, sy and the event number with sums
// computed here from the packet (per-channel peak minus pedestal, weighted by
// random signed positions). The result must arrive two clocks after the
// last word.
module tb_lv2_coe_calc;
  import koto_pkg::*;
  logic clk = 0, rst = 1;
  link_word_t link;
  adc_row_t ped;
  pos_t [15:0] pos_x, pos_y;
  logic res_valid;
  coe_t res;
  int checks = 0, failures = 0;

  lv2_coe_calc dut (.*);
  always #4 clk = ~clk;

  initial begin
    #10000000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    link = '0;
    for (int c = 0; c < 16; c++) begin
      ped[c] = sample_t'($urandom_range(100, 500));
      pos_x[c] = pos_t'($urandom_range(0, 1800)) - pos_t'(900);
      pos_y[c] = pos_t'($urandom_range(0, 1800)) - pos_t'(900);
    end
    repeat (3) @(posedge clk); rst <= 0;
    for (int ev = 0; ev < 6; ev++) begin
      int pk[16];
      longint se, sx, sy;
      se = 0; sx = 0; sy = 0;
      for (int c = 0; c < 16; c++) pk[c] = 0;
      @(posedge clk); link <= '{valid: 1, sop: 1, data: 16'(ev + 100)};
      for (int s = 0; s < WINDOW; s++) for (int c = 0; c < 16; c++) begin
        int v;
        v = (ev == 3) ? $urandom_range(0, ped[c]) : $urandom_range(0, 16383);
        if (v > pk[c]) pk[c] = v;
        @(posedge clk); link <= '{valid: 1, sop: 0, data: 16'(v)};
        if ($urandom_range(0, 9) == 0 && !(s == WINDOW-1 && c == 15)) begin @(posedge clk); link <= '0; end   // gap
      end
      for (int c = 0; c < 16; c++) if (pk[c] > ped[c]) begin
        se += pk[c] - ped[c]; sx += longint'(pk[c] - ped[c]) * pos_x[c]; sy += longint'(pk[c] - ped[c]) * pos_y[c];
      end
      // the last word was driven at the previous edge; count edges to the result
      begin
        int n;
        n = 0;
        do begin @(posedge clk); link <= '0; #1; n++; end while (!res_valid && n < 10);
        checks++; if (n != 2) begin failures++; $display("result after %0d clocks, ev %0d", n, ev); end
      end
      checks++;
      if (res.evno != 16'(ev + 100) || longint'(res.se) != se || longint'(res.sx) != sx || longint'(res.sy) != sy) begin
        failures++; $display("ev %0d se %0d/%0d sx %0d/%0d sy %0d/%0d", ev, res.se, se, res.sx, sx, res.sy, sy);
      end
      @(posedge clk); #1; checks++; if (res_valid) begin failures++; $display("res_valid too long"); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
