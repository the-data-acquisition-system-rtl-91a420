// tb_lv2_pingpong: a small memory (AW = 10, 1024 words) and 100-word
// events, so that a bank fills after 10 events. Events of random words are
// offered as fast as the controller takes them while the reader drains at a
// random pace. Checks that every word comes out once, in order, that the
// banks swap, that the writer is held off when the write bank is full, and
// that the two memories are never written and read in the same bank at the
// same time.
module tb_lv2_pingpong;
  import koto_pkg::*;
  localparam int AW = 10, EVW = 100, NEV = 40;
  logic clk = 0, rst = 1;
  logic wr_valid = 0, wr_last, wr_ready, rd_valid, rd_ready, wsel;
  logic [MEM_W-1:0] wr_data, rd_data, mem_wdata, rdata_a, rdata_b;
  logic mem_a_we, mem_a_re, mem_b_we, mem_b_re;
  logic [AW-1:0] mem_a_waddr, mem_a_raddr, mem_b_waddr, mem_b_raddr;
  logic [31:0] swaps;
  int checks = 0, failures = 0, stalls = 0;
  logic [MEM_W-1:0] sent[$];

  lv2_pingpong #(.AW(AW), .EV_WORDS(EVW)) dut (.*);
  mem_model #(.AW(AW)) ma (.clk, .we(mem_a_we), .waddr(mem_a_waddr), .wdata(mem_wdata), .re(mem_a_re), .raddr(mem_a_raddr), .rdata(rdata_a));
  mem_model #(.AW(AW)) mb (.clk, .we(mem_b_we), .waddr(mem_b_waddr), .wdata(mem_wdata), .re(mem_b_re), .raddr(mem_b_raddr), .rdata(rdata_b));
  always #4 clk = ~clk;

  initial begin
    #100000000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  function automatic logic [MEM_W-1:0] rnd();
    for (int i = 0; i < MEM_W / 32; i++) rnd[32*i +: 32] = $urandom;
  endfunction

  // writer
  int wev = 0, wi = 0;
  assign wr_last = (wi == EVW - 1);
  always @(posedge clk) if (!rst) begin
    if (wr_valid && !wr_ready) stalls++;
    if (wr_valid && wr_ready) begin
      sent.push_back(wr_data);
      if (wr_last) begin wi <= 0; wev <= wev + 1; end else wi <= wi + 1;
      wr_data <= rnd();
      if (wr_last && wev == NEV - 1) wr_valid <= 0;
    end
    if ((mem_a_we && mem_a_re) || (mem_b_we && mem_b_re)) begin failures++; $display("same bank written and read"); end
  end

  // reader: slow at first so that the write side fills up
  int got = 0;
  always @(posedge clk) begin
    rd_ready <= (got < 1500) ? ($urandom_range(0, 15) == 0) : ($urandom_range(0, 1) == 0);
    if (!rst && rd_valid && rd_ready) begin
      checks++;
      if (rd_data != sent[got]) begin failures++; if (failures < 5) $display("word %0d mismatch", got); end
      got++;
    end
  end

  initial begin
    wr_data = rnd(); rd_ready = 0;
    repeat (3) @(posedge clk); rst <= 0;
    @(posedge clk); wr_valid <= 1;
    wait (got == NEV * EVW);
    repeat (20) @(posedge clk);
    checks++; if (swaps < 4) begin failures++; $display("only %0d swaps", swaps); end
    checks++; if (stalls == 0) begin failures++; $display("writer never held off"); end
    checks++; if (rd_valid) begin failures++; $display("extra data"); end
    $display("swaps=%0d stalls=%0d", swaps, stalls);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
