// tb_lv2_trigger_module: two Lv2 modules on a COE chain (4 and 3 links,
// 8-sample records, 1024-word buffers). Six events are sent on all links
// with no decision, so the buffers pass their full mark: buf_full must rise.
// The COE word at the end of the chain must equal sums computed here from
// the packets. Decisions (accept, reject alternating) are then broadcast;
// the accepted events must come out of each module word by word (links side
// by side, missing links zero), the rejected ones not at all, and buf_full
// must fall again. err must stay low.
module tb_lv2_trigger_module;
  import koto_pkg::*;
  localparam int W = 8, PKT = 1 + W * 16, NEV = 6;
  localparam int NL [2] = '{4, 3};
  logic clk = 0, rst = 1;
  link_word_t [6:0] link;
  adc_row_t [6:0] ped;
  pos_t [6:0][15:0] px, py;
  logic [1:0] bfull, err, wr_valid, wr_last, wr_ready;
  logic [2:0] cv, cr;
  coe_t [2:0] cc;
  lv2_dec_t dec;
  logic [1:0][MEM_W-1:0] wr_data;
  int checks = 0, failures = 0;
  logic [15:0] pk [NEV][7][PKT];
  longint ese [NEV], esx [NEV], esy [NEV];

  assign cv[0] = 1'b1; assign cc[0] = '0;
  lv2_trigger_module #(.N_LINKS(4), .WINDOW_N(W), .BUF_WORDS(1024), .IS_FIRST(1'b1)) m0 (
    .clk, .rst, .link(link[3:0]), .ped(ped[3:0]), .pos_x(px[3:0]), .pos_y(py[3:0]), .link_is_csi(4'b1111), .buf_full(bfull[0]),
    .chain_in_valid(cv[0]), .chain_in(cc[0]), .chain_in_ready(cr[0]),
    .chain_out_valid(cv[1]), .chain_out(cc[1]), .chain_out_ready(cr[1]),
    .dec, .wr_valid(wr_valid[0]), .wr_data(wr_data[0]), .wr_last(wr_last[0]), .wr_ready(wr_ready[0]), .err(err[0]));
  lv2_trigger_module #(.N_LINKS(3), .WINDOW_N(W), .BUF_WORDS(1024)) m1 (
    .clk, .rst, .link(link[6:4]), .ped(ped[6:4]), .pos_x(px[6:4]), .pos_y(py[6:4]), .link_is_csi(3'b011), .buf_full(bfull[1]),
    .chain_in_valid(cv[1]), .chain_in(cc[1]), .chain_in_ready(cr[1]),
    .chain_out_valid(cv[2]), .chain_out(cc[2]), .chain_out_ready(cr[2]),
    .dec, .wr_valid(wr_valid[1]), .wr_data(wr_data[1]), .wr_last(wr_last[1]), .wr_ready(wr_ready[1]), .err(err[1]));
  always #4 clk = ~clk;

  initial begin
    #100000000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  // chain end: random ready, compare with expected sums
  int nchain = 0;
  always @(posedge clk) begin
    cr[2] <= $urandom_range(0, 1);
    if (!rst && cv[2] && cr[2]) begin
      checks++;
      if (cc[2].evno != 16'(nchain) || longint'(cc[2].se) != ese[nchain] || longint'(cc[2].sx) != esx[nchain] || longint'(cc[2].sy) != esy[nchain]) begin
        failures++; $display("chain ev %0d: evno %0d se %0d/%0d", nchain, cc[2].evno, cc[2].se, ese[nchain]);
      end
      nchain++;
    end
  end

  // accepted-event output of both modules
  int oev [2] = '{0, 0}, owi [2] = '{0, 0}, nwords = 0;
  always @(posedge clk) for (int m = 0; m < 2; m++) begin
    wr_ready[m] <= ($urandom_range(0, 3) != 0);
    if (!rst && wr_valid[m] && wr_ready[m]) begin
      logic [MEM_W-1:0] e;
      e = '0;
      while (oev[m] % 2 == 1) oev[m]++;          // odd events are rejected
      for (int l = 0; l < NL[m]; l++) e[16*l +: 16] = pk[oev[m]][m*4 + l][owi[m]];
      checks++; nwords++;
      if (wr_data[m] != e || wr_last[m] != (owi[m] == PKT - 1)) begin
        failures++; if (failures < 6) $display("module %0d ev %0d word %0d mismatch", m, oev[m], owi[m]);
      end
      if (owi[m] == PKT - 1) begin owi[m] = 0; oev[m]++; end else owi[m]++;
    end
  end

  initial begin
    link = '0; dec = '0;
    for (int l = 0; l < 7; l++) for (int c = 0; c < 16; c++) begin
      ped[l][c] = sample_t'($urandom_range(0, 300));
      px[l][c] = pos_t'($urandom_range(0, 1000)) - pos_t'(500);
      py[l][c] = pos_t'($urandom_range(0, 1000)) - pos_t'(500);
    end
    for (int e = 0; e < NEV; e++) begin
      ese[e] = 0; esx[e] = 0; esy[e] = 0;
      for (int l = 0; l < 7; l++) begin
        int peak[16];
        bit csi; csi = (l != 6);   // link 6 carries a veto module
        pk[e][l][0] = 16'(e);
        for (int c = 0; c < 16; c++) peak[c] = 0;
        for (int i = 1; i < PKT; i++) begin
          pk[e][l][i] = 16'($urandom_range(0, 16383));
          if (int'(pk[e][l][i]) > peak[(i-1) % 16]) peak[(i-1) % 16] = int'(pk[e][l][i]);
        end
        for (int c = 0; c < 16; c++) if (csi && peak[c] > ped[l][c]) begin
          ese[e] += peak[c] - ped[l][c];
          esx[e] += longint'(peak[c] - ped[l][c]) * px[l][c];
          esy[e] += longint'(peak[c] - ped[l][c]) * py[l][c];
        end
      end
    end
    repeat (3) @(posedge clk); rst <= 0;
    for (int e = 0; e < NEV; e++) begin
      for (int i = 0; i < PKT; i++) begin
        @(posedge clk);
        for (int l = 0; l < 7; l++) link[l] <= '{valid: 1'b1, sop: (i == 0), data: pk[e][l][i]};
      end
      @(posedge clk); link <= '0;
      repeat (5) @(posedge clk);
    end
    repeat (10) @(posedge clk); #1;
    checks++; if (bfull != 2'b11) begin failures++; $display("buf_full not raised: %b", bfull); end
    checks++; if (nchain != NEV) begin failures++; $display("chain delivered %0d", nchain); end
    for (int e = 0; e < NEV; e++) begin
      @(posedge clk); dec <= '{valid: 1'b1, accept: (e % 2 == 0), evno: 16'(e)};
      @(posedge clk); dec <= '0;
      repeat (20) @(posedge clk);
    end
    repeat (4 * NEV * PKT) @(posedge clk);
    #1;
    checks++; if (nwords != 2 * (NEV / 2) * PKT) begin failures++; $display("words out %0d", nwords); end
    checks++; if (bfull != 2'b00) begin failures++; $display("buf_full stuck"); end
    checks++; if (err != 2'b00) begin failures++; $display("err raised"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
