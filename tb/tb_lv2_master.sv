// tb_lv2_master: random COE sums, and hand-made cases on the 165 mm
// boundary. The expected decision is computed here in floating point as
// sqrt(sx^2+sy^2)/se > coe_min (cases within 1e-9 of the cut are taken from
// the exact boundary list only). Also checks the one-clock latency, the
// event number in the broadcast and the counters.
module tb_lv2_master;
  import koto_pkg::*;
  logic clk = 0, rst = 1;
  logic chain_valid = 0, chain_ready;
  coe_t chain;
  logic [15:0] coe_min_mm;
  lv2_dec_t dec;
  logic [31:0] n_in, n_acc;
  int checks = 0, failures = 0, nacc = 0, nin = 0;

  lv2_master dut (.*);
  always #4 clk = ~clk;

  initial begin
    #10000000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  task automatic one(longint sx, longint sy, longint se, int exp_acc, int evno);
    @(posedge clk);
    chain_valid <= 1; chain <= '{evno: 16'(evno), sx: SX_W'(sx), sy: SX_W'(sy), se: SE_W'(se)};
    @(posedge clk); chain_valid <= 0; #1;
    nin++; if (exp_acc) nacc++;
    checks++;
    if (!dec.valid || dec.accept != exp_acc[0] || dec.evno != 16'(evno)) begin
      failures++; $display("sx=%0d sy=%0d se=%0d: got v=%0d a=%0d exp a=%0d", sx, sy, se, dec.valid, dec.accept, exp_acc);
    end
    @(posedge clk); #1; checks++; if (dec.valid) begin failures++; $display("valid too long"); end
  endtask

  initial begin
    coe_min_mm = 16'(COE_MIN_MM);
    chain = '0;
    repeat (3) @(posedge clk); rst <= 0;
    // exact boundary: |r| = 165 * se is not above the cut
    one(16500, 0, 100, 0, 1);
    one(16501, 0, 100, 1, 2);
    one(0, -16500, 100, 0, 3);
    one(-9900, 13200, 100, 0, 4);     // 3-4-5 triangle: radius 16500
    one(-9900, 13201, 100, 1, 5);
    one(5, 5, 0, 0, 6);               // no energy
    for (int i = 0; i < 300; i++) begin
      longint se, sx, sy; real r;
      se = $urandom_range(1, 200000);
      sx = (longint'($urandom_range(0, 800)) - 400) * se;
      sy = (longint'($urandom_range(0, 800)) - 400) * se + $urandom_range(0, 1000);
      r  = $sqrt(real'(sx) * real'(sx) + real'(sy) * real'(sy)) / real'(se);
      if (r > 165.0 * (1.0 - 1e-9) && r < 165.0 * (1.0 + 1e-9)) continue;
      one(sx, sy, se, (r > 165.0) ? 1 : 0, i + 10);
    end
    checks++;
    if (n_in != 32'(nin) || n_acc != 32'(nacc)) begin failures++; $display("counters %0d %0d exp %0d %0d", n_in, n_acc, nin, nacc); end
    checks++; if (!chain_ready) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
