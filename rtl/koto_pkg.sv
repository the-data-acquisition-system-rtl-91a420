// koto_pkg: constants and types shared by the KOTO waveform-digitizing,
// pipelined trigger and readout chain.
//
// The numbers that come from the system description are the 14-bit sample
// width, the 125 MHz sample clock (8 ns per trigger decision), the 4 us
// front-end pipeline (500 samples), 16 channels per ADC module, 16 ADC
// modules per Lv1/Lv2 trigger module, 4000 channels (250 ADC modules), the
// 2-Gbit Lv2 event memories and the 165 mm centre-of-energy cut. Everything
// else here (record length, link word format, widths of the sums, event
// number width, header layout) is a choice of this design.
package koto_pkg;

  // ---- front end ----
  localparam int unsigned SAMPLE_W    = 14;   // ADC resolution
  localparam int unsigned CH_PER_ADC  = 16;   // channels per ADC module
  localparam int unsigned PIPE_DEPTH  = 500;  // 4 us at 125 MHz
  localparam int unsigned WINDOW      = 64;   // samples recorded per channel per event (design choice)
  localparam int unsigned N_ADC       = 250;  // 4000 channels / 16
  localparam int unsigned ADC_PER_MOD = 16;   // ADC modules per Lv1 or Lv2 trigger module

  typedef logic [SAMPLE_W-1:0] sample_t;
  typedef sample_t [CH_PER_ADC-1:0] adc_row_t;   // one clock of all 16 channels

  // ---- Lv1 path: per-clock energy sum and hit from one ADC module ----
  localparam int unsigned ESUM_W    = SAMPLE_W + 4;       // sum of 16 channels
  localparam int unsigned L1_ESUM_W = ESUM_W + 8;         // sum of up to 256 modules
  localparam int unsigned N_VETO    = 8;                  // veto summary bits on the chain

  typedef struct packed {
    logic [ESUM_W-1:0] esum;
    logic              hit;
  } adc_l1_t;

  typedef struct packed {
    logic [L1_ESUM_W-1:0] esum;   // total CsI energy (ADC counts above pedestal)
    logic [N_VETO-1:0]    veto;   // one activity bit per veto subsystem
  } l1_chain_t;

  // ---- ADC -> Lv2 optical link (2.5 Gb/s, 8b/10b: 16 payload bits per clock) ----
  localparam int unsigned LINK_W   = 16;
  localparam int unsigned PKT_WORDS = 1 + WINDOW * CH_PER_ADC;   // header + samples
  localparam int unsigned EVNO_W   = 16;

  typedef struct packed {
    logic              valid;
    logic              sop;     // header word (carries the event number)
    logic [LINK_W-1:0] data;
  } link_word_t;

  // ---- Lv2 centre-of-energy sums ----
  localparam int unsigned POS_W = 16;                     // crystal position, signed mm
  localparam int unsigned SE_W  = SAMPLE_W + 14;          // sum of energies
  localparam int unsigned SX_W  = SAMPLE_W + POS_W + 14;  // sum of energy * position
  localparam int unsigned COE_MIN_MM = 165;               // Lv2 cut used in the 2013 run

  typedef logic signed [POS_W-1:0] pos_t;

  typedef struct packed {
    logic [EVNO_W-1:0]      evno;
    logic signed [SX_W-1:0] sx;
    logic signed [SX_W-1:0] sy;
    logic [SE_W-1:0]        se;
  } coe_t;

  typedef struct packed {
    logic              valid;
    logic              accept;
    logic [EVNO_W-1:0] evno;
  } lv2_dec_t;

  // ---- Lv2 event memories (two 2-Gbit banks, 256-bit words) ----
  localparam int unsigned MEM_W      = LINK_W * ADC_PER_MOD;        // 256
  localparam int unsigned MEM_AW     = 23;                          // 2^23 * 256 bit = 2 Gbit
  typedef struct packed {
    logic              we;
    logic [MEM_AW-1:0] waddr;
    logic [MEM_W-1:0]  wdata;
    logic              re;
    logic [MEM_AW-1:0] raddr;
  } mem_req_t;

  // ---- Lv3 event building ----
  localparam int unsigned N_LV3_NODES = 8;
  localparam int unsigned ETH_HDR_BYTES = 8;

endpackage
