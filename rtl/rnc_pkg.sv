// rnc_pkg: types and constants shared by the RNC data-acquisition modules.
//
// Holds the field layout of the two-Q-word PSD packet, the particle-type
// encoding, the event-window trailer tag, the configuration bundle that the
// system-control register file hands to the processing chain, and the
// register map. Field positions of the PSD packet are the ones printed in the
// packet diagram of the design (TimeStamp up to bit 48, CI from bit 56, PU
// from 21, N/gamma/L from 18, Peak from 12 down to 0). Encodings and the
// register map are this design's own choices.
package rnc_pkg;

  // Conditioned sample: 12-bit ADC averaged over 4 samples gives 13 bits,
  // carried in a 16-bit word.
  localparam int unsigned SAMPLE_W = 16;
  localparam int unsigned ADC_W    = 12;
  localparam int unsigned TS_W     = 64;

  // End-of-event tag (8 bit). The value is not given; 8'hEE is chosen here.
  localparam logic [7:0] EVENT_END_TAG = 8'hEE;

  // Particle type field N/gamma/L, bits [18:16] of PSD Q-word 2 (one-hot).
  typedef enum logic [2:0] {
    PT_NONE    = 3'b000,
    PT_LED     = 3'b001,
    PT_GAMMA   = 3'b010,
    PT_NEUTRON = 3'b100
  } ptype_e;

  // PSD Q-word 1: reserved [63:49], TimeStamp [48:0].
  typedef struct packed {
    logic [14:0] rsv;
    logic [48:0] ts;
  } psd_qw1_t;

  // PSD Q-word 2: rsv [63:57], CI [56:32], rsv [31:22], PU [21:19],
  // N/gamma/L [18:16], rsv [15:13], Peak [12:0].
  typedef struct packed {
    logic [6:0]  rsv3;
    logic [24:0] ci;
    logic [9:0]  rsv2;
    logic [2:0]  pu;
    ptype_e      ptype;
    logic [2:0]  rsv1;
    logic [12:0] peak;
  } psd_qw2_t;

  // Run-time configuration of one processing channel.
  typedef struct packed {
    logic        invert;        // averaging: invert polarity
    logic        filter_bypass; // trigger and PSD use raw data
    logic        trig_deriv;    // 0: level trigger, 1: derivative trigger
    logic [15:0] threshold;     // trigger threshold (signed)
    logic [15:0] offset;        // baseline subtracted before the DTS
    logic [15:0] pwidth;        // pulse window length, 16-bit words
    logic [15:0] ptrg;          // pre-trigger samples
    logic [15:0] dts_m;         // DTS pole-zero coefficient
    logic [4:0]  dts_shift;     // DTS output scaling
    logic [15:0] psd_len;       // PSD integration length, samples
    logic [15:0] slope;         // PSD separation slope, 8.8 fixed point
    logic        phs_en;        // DMA 1 carries PHS (1) or PSD (0) packets
    logic        phs_use_ci;    // histogram CI (1) or peak (0)
    logic [4:0]  phs_shift;     // bin = value >> phs_shift
    logic [15:0] dt_lo, dt_hi;  // DT counting window, bins
    logic [15:0] dd_lo, dd_hi;  // DD counting window, bins
  } chan_cfg_t;

  // Register map, 32-bit registers, index = BAR0 byte address / 4.
  localparam int unsigned NREGS       = 32;
  localparam int unsigned R_CTRL      = 0;  // [0] acq_en [1] filter_bypass [2] trig_deriv
                                            // [3] phs_en [4] phs_use_ci [5] invert
                                            // [6] ts_clear [7] pll_start [8] dma_en
  localparam int unsigned R_THRESH    = 1;  // [15:0] threshold [31:16] DTS offset
  localparam int unsigned R_WINDOW    = 2;  // [15:0] pwidth [31:16] ptrg
  localparam int unsigned R_DTS       = 3;  // [15:0] m [20:16] shift
  localparam int unsigned R_PSD       = 4;  // [15:0] psd_len [31:16] slope
  localparam int unsigned R_PHS       = 5;  // [4:0] phs_shift
  localparam int unsigned R_WIN_DT    = 6;  // [15:0] lo [31:16] hi
  localparam int unsigned R_WIN_DD    = 7;  // [15:0] lo [31:16] hi
  localparam int unsigned R_DMA_BASE  = 8;  // 8..15: {hi,lo} for DMA0 ch0, DMA0 ch1, DMA1 ch0, DMA1 ch1
  localparam int unsigned R_STAT_LO   = 16; // DMA 2 status host address
  localparam int unsigned R_STAT_HI   = 17;
  localparam int unsigned R_RING_MASK = 18; // ring buffer size - 1, bytes
  localparam int unsigned R_PLL0      = 19; // 19..29: eleven 24-bit LMX2531 words
  localparam int unsigned R_LOST      = 30; // read only: lost events / overruns
  localparam int unsigned R_ID        = 31; // read only: identification
  localparam logic [31:0] ID_VALUE    = 32'h524E_4301;

  // DMA channel numbers.
  localparam logic [1:0] DMA_EVENTS = 2'd0;
  localparam logic [1:0] DMA_RT     = 2'd1;
  localparam logic [1:0] DMA_STATUS = 2'd2;

endpackage
