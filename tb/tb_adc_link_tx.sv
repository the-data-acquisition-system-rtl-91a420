// tb_adc_link_tx: offers three random events of WINDOW rows (with gaps) and
// checks the link words: a header with sop and the running event count,
// then the 16 channels of every row in order, back to back, and exactly
// PKT_WORDS = 1 + 16*WINDOW valid words per event.
module tb_adc_link_tx;
  import koto_pkg::*;
  logic clk = 0, rst = 1;
  logic rd_valid = 0, rd_first, rd_last, rd_ready;
  adc_row_t rd_row;
  link_word_t link;
  int checks = 0, failures = 0;
  adc_row_t rows [3][WINDOW];
  int ev = 0, r = 0;
  logic [16:0] exp_q[$];

  adc_link_tx dut (.*);
  always #4 clk = ~clk;

  initial begin
    #10000000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  assign rd_row   = rows[ev % 3][r];
  assign rd_first = (r == 0);
  assign rd_last  = (r == WINDOW - 1);

  always @(posedge clk) if (rd_valid && rd_ready) begin
    if (r == WINDOW - 1) begin r <= 0; ev <= ev + 1; rd_valid <= 0; end
    else r <= r + 1;
  end

  // check the link stream
  int nwords = 0;
  always @(posedge clk) if (!rst && link.valid) begin
    checks++;
    if (exp_q.size() == 0) begin failures++; $display("unexpected word"); end
    else begin
      logic [16:0] e; e = exp_q.pop_front();
      if ({link.sop, link.data} != e) begin failures++; if (failures < 5) $display("word %0d got %h exp %h", nwords, link.data, e); end
    end
    nwords++;
  end

  initial begin
    for (int e = 0; e < 3; e++) for (int i = 0; i < WINDOW; i++)
      for (int c = 0; c < 16; c++) rows[e][i][c] = sample_t'($urandom);
    repeat (3) @(posedge clk); rst <= 0;
    for (int e = 0; e < 3; e++) begin
      int t0;
      repeat (5 + e * 7) @(posedge clk);
      exp_q.push_back({1'b1, 16'(e)});
      for (int i = 0; i < WINDOW; i++) for (int c = 0; c < 16; c++) exp_q.push_back({1'b0, 16'(rows[e][i][c])});
      rd_valid <= 1;
      @(posedge clk);
      // header must come in the next clock with sop
      #1; checks++;
      if (!(link.valid && link.sop && link.data == 16'(e))) begin failures++; $display("header missing ev %0d", e); end
      wait (rd_valid == 0);
      repeat (3) @(posedge clk);
      checks++;
      if (nwords != (e + 1) * PKT_WORDS) begin failures++; $display("word count %0d", nwords); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
