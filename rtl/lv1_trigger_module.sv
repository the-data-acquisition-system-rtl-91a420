// lv1_trigger_module: one Lv1 trigger module on the Lv1 daisy chain.
//
// It receives, every clock, the energy sum and hit flag of up to N_IN ADC
// modules. Inputs marked as CsI calorimeter modules (in_is_csi) have their
// energies added; for the others (veto detectors) the hit flag is ORed into
// the veto-subsystem bit given by in_veto_idx. The local result is added to
// (energy) and ORed into (veto bits) the word arriving from the upstream
// module and the sum is passed downstream, so the last module of the chain
// hands the Lv1 master the calorimeter total and the veto summary.
//
// Because every hop costs one register, module number STAGE on the chain
// delays its own contribution by STAGE clocks: the chain word leaving module
// k then holds, from every module, data of the same sample clock. That
// alignment and the CsI/veto mapping inputs are this design's choices; the
// summing of 16 ADC modules and the daisy chain follow the description.
// Timing: chain_out = chain_in + local(t - STAGE), registered (1 clock).
module lv1_trigger_module
  import koto_pkg::*;
#(
  parameter int unsigned N_IN  = ADC_PER_MOD,
  parameter int unsigned STAGE = 0
) (
  input  logic                       clk,
  input  logic                       rst,
  input  adc_l1_t [N_IN-1:0]         adc_in,
  input  logic [N_IN-1:0]            in_is_csi,
  input  logic [N_IN-1:0][$clog2(N_VETO)-1:0] in_veto_idx,
  input  l1_chain_t                  chain_in,
  output l1_chain_t                  chain_out
);

  l1_chain_t local_sum;

  always_comb begin
    local_sum = '0;
    for (int i = 0; i < N_IN; i++) begin
      if (in_is_csi[i]) local_sum.esum += L1_ESUM_W'(adc_in[i].esum);
      else if (adc_in[i].hit) local_sum.veto[in_veto_idx[i]] = 1'b1;
    end
  end

  // alignment delay of STAGE clocks
  l1_chain_t dly [STAGE+1];
  assign dly[0] = local_sum;
  for (genvar s = 1; s <= STAGE; s++) begin : g_dly
    always_ff @(posedge clk) begin
      if (rst) dly[s] <= '0;
      else     dly[s] <= dly[s-1];
    end
  end

  always_ff @(posedge clk) begin
    if (rst) chain_out <= '0;
    else     chain_out <= '{esum: chain_in.esum + dly[STAGE].esum,
                            veto: chain_in.veto | dly[STAGE].veto};
  end

endmodule
