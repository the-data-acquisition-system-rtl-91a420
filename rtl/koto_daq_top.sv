// koto_daq_top: the digital part of the KOTO readout and trigger system.
//
// N_ADC ADC modules (250 for 4000 channels) digitize 16 channels each at
// 125 MHz. Every clock each sends its energy sum and hit flag to one of the
// Lv1 trigger modules (16 ADC modules per Lv1 module); the Lv1 modules add
// their contributions along a daisy chain whose end feeds the Lv1 master,
// which decides every 8 ns and broadcasts lv1_trig to all ADC modules. An
// ADC module then copies a record of its 4 us pipeline and sends it over its
// link to one of the Lv2 trigger modules (again 16 ADC modules each). The
// Lv2 modules buffer the records, compute centre-of-energy sums, add them on
// a second daisy chain ending at the Lv2 master, and on its decision write
// accepted events into ping-pong memories, from where the packet senders
// ship them, one destination node per event, towards the Lv3 farm. A full
// Lv2 buffer suspends Lv1 triggers.
//
// Outside this design and brought out as ports: the analog filters and ADC
// chips (samples), the two memories of each Lv2 module (mem_* / rdata_*),
// and the Ethernet MACs (tx_*). Configuration (pedestals, thresholds,
// crystal positions, which ADC modules are CsI or veto) is given as static
// inputs. ADC module k is served by Lv1 and Lv2 module k/16, input k%16.
module koto_daq_top
  import koto_pkg::*;
#(
  parameter int unsigned N_ADC_MOD = N_ADC,
  parameter int unsigned DEPTH     = PIPE_DEPTH,
  parameter int unsigned WINDOW_N  = WINDOW,
  parameter int unsigned EVT_SLOTS = 2,
  parameter int unsigned BUF_WORDS = 8192,
  parameter int unsigned AW        = MEM_AW,
  parameter int unsigned N_MOD     = (N_ADC_MOD + ADC_PER_MOD - 1) / ADC_PER_MOD
) (
  input  logic                                  clk,
  input  logic                                  rst,
  // front end
  input  adc_row_t [N_ADC_MOD-1:0]              samples,
  input  adc_row_t [N_ADC_MOD-1:0]              ped,
  input  sample_t                               hit_thr,
  input  logic [$clog2(DEPTH+1)-1:0]            pipe_delay,
  input  logic [N_ADC_MOD-1:0]                  adc_is_csi,
  input  logic [N_ADC_MOD-1:0][$clog2(N_VETO)-1:0] adc_veto_idx,
  input  pos_t [N_ADC_MOD-1:0][CH_PER_ADC-1:0]  pos_x,
  input  pos_t [N_ADC_MOD-1:0][CH_PER_ADC-1:0]  pos_y,
  // trigger settings
  input  logic [L1_ESUM_W-1:0]                  lv1_esum_thr,
  input  logic [N_VETO-1:0]                     veto_mask,
  input  logic [15:0]                           coe_min_mm,
  // event memories (two per Lv2 module)
  output logic [N_MOD-1:0]                      mem_a_we,
  output logic [N_MOD-1:0][AW-1:0]              mem_a_waddr,
  output logic [N_MOD-1:0]                      mem_a_re,
  output logic [N_MOD-1:0][AW-1:0]              mem_a_raddr,
  output logic [N_MOD-1:0]                      mem_b_we,
  output logic [N_MOD-1:0][AW-1:0]              mem_b_waddr,
  output logic [N_MOD-1:0]                      mem_b_re,
  output logic [N_MOD-1:0][AW-1:0]              mem_b_raddr,
  output logic [N_MOD-1:0][MEM_W-1:0]           mem_wdata,
  input  logic [N_MOD-1:0][MEM_W-1:0]           rdata_a,
  input  logic [N_MOD-1:0][MEM_W-1:0]           rdata_b,
  // Ethernet byte streams (one per Lv2 module)
  output logic [N_MOD-1:0]                      tx_valid,
  output logic [N_MOD-1:0][7:0]                 tx_data,
  output logic [N_MOD-1:0]                      tx_sop,
  output logic [N_MOD-1:0]                      tx_eop,
  output logic [N_MOD-1:0][7:0]                 tx_dest,
  input  logic [N_MOD-1:0]                      tx_ready,
  // status
  output logic                                  lv1_trig,
  output logic                                  lv2_full,
  output logic                                  adc_busy,
  output logic [31:0]                           n_lv1_req,
  output logic [31:0]                           n_lv1_acc,
  output logic [31:0]                           n_lv1_susp,
  output logic [31:0]                           n_lv2_in,
  output logic [31:0]                           n_lv2_acc,
  output logic [N_MOD-1:0][31:0]                n_sent,
  output logic [N_MOD-1:0][31:0]                n_swaps,
  output logic [N_ADC_MOD-1:0]                  adc_lost,
  output logic [N_MOD-1:0]                      lv2_err
);

  // ---------------- ADC modules ----------------
  adc_l1_t    [N_MOD*ADC_PER_MOD-1:0] l1;
  link_word_t [N_MOD*ADC_PER_MOD-1:0] link;
  logic       [N_ADC_MOD-1:0]         busy;

  for (genvar k = 0; k < N_ADC_MOD; k++) begin : g_adc
    adc_module #(.DEPTH(DEPTH), .WINDOW_N(WINDOW_N), .EVT_SLOTS(EVT_SLOTS)) u_adc (
      .clk, .rst, .samples(samples[k]), .ped(ped[k]), .hit_thr, .pipe_delay,
      .lv1_trig, .l1(l1[k]), .link(link[k]), .busy(busy[k]), .lost(adc_lost[k])
    );
  end
  for (genvar k = N_ADC_MOD; k < N_MOD*ADC_PER_MOD; k++) begin : g_unused
    assign l1[k]   = '0;
    assign link[k] = '0;
  end

  always_ff @(posedge clk) begin
    if (rst) adc_busy <= 1'b0;
    else     adc_busy <= |busy;
  end

  // ---------------- Lv1: daisy chain and master ----------------
  l1_chain_t [N_MOD:0] l1c;
  assign l1c[0] = '0;

  for (genvar m = 0; m < N_MOD; m++) begin : g_lv1
    logic [ADC_PER_MOD-1:0]                    is_csi;
    logic [ADC_PER_MOD-1:0][$clog2(N_VETO)-1:0] vidx;
    for (genvar i = 0; i < ADC_PER_MOD; i++) begin : g_cfg
      if (m*ADC_PER_MOD + i < N_ADC_MOD) begin : g_on
        assign is_csi[i] = adc_is_csi[m*ADC_PER_MOD + i];
        assign vidx[i]   = adc_veto_idx[m*ADC_PER_MOD + i];
      end else begin : g_off
        assign is_csi[i] = 1'b0;
        assign vidx[i]   = '0;
      end
    end
    lv1_trigger_module #(.N_IN(ADC_PER_MOD), .STAGE(m)) u_l1 (
      .clk, .rst, .adc_in(l1[m*ADC_PER_MOD +: ADC_PER_MOD]), .in_is_csi(is_csi), .in_veto_idx(vidx),
      .chain_in(l1c[m]), .chain_out(l1c[m+1])
    );
  end

  lv1_master #(.HOLDOFF(WINDOW_N + 8)) u_l1m (
    .clk, .rst, .chain(l1c[N_MOD]), .esum_thr(lv1_esum_thr), .veto_mask,
    .lv2_full, .adc_busy, .lv1_trig, .n_req(n_lv1_req), .n_acc(n_lv1_acc), .n_susp(n_lv1_susp)
  );

  // ---------------- Lv2 modules, COE chain and master ----------------
  logic [N_MOD:0] cv, cr;
  coe_t [N_MOD:0] cc;
  lv2_dec_t       dec;
  logic [N_MOD-1:0] bfull;

  assign cv[0] = 1'b1;
  assign cc[0] = '0;

  always_ff @(posedge clk) begin
    if (rst) lv2_full <= 1'b0;
    else     lv2_full <= |bfull;
  end

  for (genvar m = 0; m < N_MOD; m++) begin : g_lv2
    localparam int unsigned NL = (N_ADC_MOD - m*ADC_PER_MOD >= ADC_PER_MOD) ? ADC_PER_MOD
                                                                          : N_ADC_MOD - m*ADC_PER_MOD;
    logic             wr_valid, wr_last, wr_ready, rd_valid, rd_ready, wsel_unused;
    logic [MEM_W-1:0] wr_data, rd_data;
    logic [7:0]       dest;

    lv2_trigger_module #(.N_LINKS(NL), .WINDOW_N(WINDOW_N), .BUF_WORDS(BUF_WORDS), .IS_FIRST(m == 0)) u_l2 (
      .clk, .rst,
      .link(link[m*ADC_PER_MOD +: NL]), .ped(ped[m*ADC_PER_MOD +: NL]),
      .pos_x(pos_x[m*ADC_PER_MOD +: NL]), .pos_y(pos_y[m*ADC_PER_MOD +: NL]),
      .link_is_csi(adc_is_csi[m*ADC_PER_MOD +: NL]),
      .buf_full(bfull[m]),
      .chain_in_valid(cv[m]), .chain_in(cc[m]), .chain_in_ready(cr[m]),
      .chain_out_valid(cv[m+1]), .chain_out(cc[m+1]), .chain_out_ready(cr[m+1]),
      .dec, .wr_valid, .wr_data, .wr_last, .wr_ready, .err(lv2_err[m])
    );

    lv2_pingpong #(.AW(AW), .EV_WORDS(1 + WINDOW_N * CH_PER_ADC)) u_pp (
      .clk, .rst, .wr_valid, .wr_data, .wr_last, .wr_ready,
      .mem_a_we(mem_a_we[m]), .mem_a_waddr(mem_a_waddr[m]), .mem_a_re(mem_a_re[m]), .mem_a_raddr(mem_a_raddr[m]),
      .mem_b_we(mem_b_we[m]), .mem_b_waddr(mem_b_waddr[m]), .mem_b_re(mem_b_re[m]), .mem_b_raddr(mem_b_raddr[m]),
      .mem_wdata(mem_wdata[m]), .rdata_a(rdata_a[m]), .rdata_b(rdata_b[m]),
      .rd_valid, .rd_data, .rd_ready, .wsel(wsel_unused), .swaps(n_swaps[m])
    );

    lv2_eth_tx #(.EV_WORDS(1 + WINDOW_N * CH_PER_ADC), .SRC_ID(8'(m))) u_eth (
      .clk, .rst, .in_valid(rd_valid), .in_data(rd_data), .in_ready(rd_ready),
      .tx_valid(tx_valid[m]), .tx_data(tx_data[m]), .tx_sop(tx_sop[m]), .tx_eop(tx_eop[m]),
      .tx_dest(dest), .tx_ready(tx_ready[m]), .n_events(n_sent[m])
    );
    assign tx_dest[m] = dest;
  end

  lv2_master u_l2m (
    .clk, .rst, .chain_valid(cv[N_MOD]), .chain(cc[N_MOD]), .chain_ready(cr[N_MOD]),
    .coe_min_mm, .dec, .n_in(n_lv2_in), .n_acc(n_lv2_acc)
  );

  // cr[0] (ready of the constant chain source) is not needed
endmodule
