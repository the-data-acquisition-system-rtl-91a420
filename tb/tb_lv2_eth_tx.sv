// tb_lv2_eth_tx: three 70-word events (event numbers 13, 14, 15) with the
// MAC taking bytes at a random pace. The expected byte stream is built
// here: per event packets of 32, 32 and 6 words, each with the 8-byte header
// (destination = event number mod 8, source id, event number, sequence,
// payload length) followed by the words, link 0 first, high byte first.
// Checks every byte, sop/eop, and that the destination changes per event.
module tb_lv2_eth_tx;
  import koto_pkg::*;
  localparam int EVW = 70, PW = 32;
  logic clk = 0, rst = 1;
  logic in_valid = 0, in_ready, tx_valid, tx_sop, tx_eop, tx_ready;
  logic [MEM_W-1:0] in_data;
  logic [7:0] tx_data, tx_dest;
  logic [31:0] n_events;
  int checks = 0, failures = 0;
  logic [MEM_W-1:0] words[$];
  logic [17:0] exp_b[$];   // {sop, eop, byte, } plus dest kept apart
  logic [7:0]  exp_d[$];

  lv2_eth_tx #(.EV_WORDS(EVW), .PKT_MEM_WORDS(PW), .N_NODES(8), .SRC_ID(8'h5A)) dut (.*);
  always #4 clk = ~clk;

  initial begin
    #100000000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  assign in_data = words.size() ? words[0] : '0;
  always @(posedge clk) begin
    tx_ready <= ($urandom_range(0, 2) != 0);
    if (!rst && in_valid && in_ready) begin void'(words.pop_front()); end
  end
  always_comb in_valid = (words.size() != 0);

  always @(posedge clk) if (!rst && tx_valid && tx_ready) begin
    logic [17:0] e; logic [7:0] d;
    checks++;
    e = exp_b.pop_front(); d = exp_d.pop_front();
    if ({tx_sop, tx_eop, tx_data} != e[9:0] || tx_dest != d) begin
      failures++; if (failures < 6) $display("byte got %b %b %h dest %0d exp %b %b %h dest %0d", tx_sop, tx_eop, tx_data, tx_dest, e[9], e[8], e[7:0], d);
    end
  end

  initial begin
    tx_ready = 0;
    for (int ev = 13; ev < 16; ev++) begin
      logic [MEM_W-1:0] w[EVW];
      for (int i = 0; i < EVW; i++) begin
        for (int k = 0; k < MEM_W / 32; k++) w[i][32*k +: 32] = $urandom;
        if (i == 0) for (int l = 0; l < 16; l++) w[i][16*l +: 16] = 16'(ev);
      end
      for (int p = 0; p * PW < EVW; p++) begin
        int n; logic [7:0] hdr[8];
        n = (EVW - p * PW > PW) ? PW : EVW - p * PW;
        hdr = '{8'(ev % 8), 8'h5A, 8'(ev >> 8), 8'(ev), 8'(p >> 8), 8'(p), 8'((n * 32) >> 8), 8'(n * 32)};
        for (int b = 0; b < 8; b++) begin exp_b.push_back({8'b0, b == 0, 1'b0, hdr[b]}); exp_d.push_back(8'(ev % 8)); end
        for (int i = 0; i < n; i++) for (int b = 0; b < 32; b++) begin
          logic [7:0] by;
          by = w[p * PW + i][16 * (b / 2) + ((b % 2) ? 0 : 8) +: 8];
          exp_b.push_back({8'b0, 1'b0, (i == n - 1 && b == 31), by}); exp_d.push_back(8'(ev % 8));
        end
      end
      for (int i = 0; i < EVW; i++) words.push_back(w[i]);
    end
    repeat (3) @(posedge clk); rst <= 0;
    wait (exp_b.size() == 0);
    repeat (5) @(posedge clk);
    checks++; if (n_events != 3) begin failures++; $display("n_events %0d", n_events); end
    checks++; if (tx_valid) begin failures++; $display("extra bytes"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
