// tb_koto_daq_top_full: the whole system at its full size and default
// parameters (250 ADC modules = 4000 channels, 16 Lv1 and 16 Lv2 modules,
// 500-sample pipeline, 64-sample records, 8192-word Lv2 buffers, 2-Gbit
// memory banks). Two events, one with a large and one with a small centre of
// energy, go through Lv1, Lv2, the memories and the packet senders of all 16
// Lv2 modules; every byte reaching the Lv3 side is checked. The detector
// model and the checks are in koto_e2e_body.svh.
module tb_koto_daq_top_full;
  import koto_pkg::*;
  localparam int NA = N_ADC, DEPTH = PIPE_DEPTH, W = WINDOW, BUFW = 8192, AWM = MEM_AW;
  localparam bit FULL = 1;

  initial begin
    #8000000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  `include "koto_e2e_body.svh"

  koto_daq_top dut (
    .clk, .rst, .samples, .ped, .hit_thr(14'd200), .pipe_delay(($clog2(DEPTH+1))'(PD)),
    .adc_is_csi(is_csi), .adc_veto_idx(vidx), .pos_x(px), .pos_y(py),
    .lv1_esum_thr(L1_ESUM_W'(THR)), .veto_mask(8'b0000_0001), .coe_min_mm(16'(COE_MIN_MM)),
    .mem_a_we, .mem_a_waddr, .mem_a_re, .mem_a_raddr, .mem_b_we, .mem_b_waddr, .mem_b_re, .mem_b_raddr,
    .mem_wdata, .rdata_a, .rdata_b, .tx_valid, .tx_data, .tx_sop, .tx_eop, .tx_dest, .tx_ready,
    .lv1_trig, .lv2_full, .adc_busy, .n_lv1_req, .n_lv1_acc, .n_lv1_susp, .n_lv2_in, .n_lv2_acc,
    .n_sent, .n_swaps, .adc_lost, .lv2_err
  );
endmodule
