// tb_koto_daq_top: end-to-end test of the whole system at reduced size:
// 20 ADC modules (2 Lv1 and 2 Lv2 modules, the second with 4 links),
// a 100-sample pipeline, 8-sample records, 1024-word Lv2 buffers and
// 512-word memory banks, so that every mechanism occurs in a short run:
// Lv1 accept, energy threshold, enabled and masked vetoes, suspension by a
// busy ADC module and by a full Lv2 buffer, Lv2 accept and reject, full
// write bank, bank swap, per-event destination and multi-packet events.
// See koto_e2e_body.svh for the detector model and the checks.
module tb_koto_daq_top;
  import koto_pkg::*;
  localparam int NA = 20, DEPTH = 100, W = 8, BUFW = 1024, AWM = 9;
  localparam bit FULL = 0;

  initial begin
    #4000000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  `include "koto_e2e_body.svh"

  koto_daq_top #(.N_ADC_MOD(NA), .DEPTH(DEPTH), .WINDOW_N(W), .EVT_SLOTS(2), .BUF_WORDS(BUFW), .AW(AWM)) dut (
    .clk, .rst, .samples, .ped, .hit_thr(14'd200), .pipe_delay(($clog2(DEPTH+1))'(PD)),
    .adc_is_csi(is_csi), .adc_veto_idx(vidx), .pos_x(px), .pos_y(py),
    .lv1_esum_thr(L1_ESUM_W'(THR)), .veto_mask(8'b0000_0001), .coe_min_mm(16'(COE_MIN_MM)),
    .mem_a_we, .mem_a_waddr, .mem_a_re, .mem_a_raddr, .mem_b_we, .mem_b_waddr, .mem_b_re, .mem_b_raddr,
    .mem_wdata, .rdata_a, .rdata_b, .tx_valid, .tx_data, .tx_sop, .tx_eop, .tx_dest, .tx_ready,
    .lv1_trig, .lv2_full, .adc_busy, .n_lv1_req, .n_lv1_acc, .n_lv1_susp, .n_lv2_in, .n_lv2_acc,
    .n_sent, .n_swaps, .adc_lost, .lv2_err
  );
endmodule
