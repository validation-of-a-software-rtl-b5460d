// ltl_pkg: constants and types shared by the ListenToLight programmable-logic
// datapath.
//
// The channel counts, sample width, the 1024-bit stream width, the 4 MiB ring
// buffer and the 256 KB transfer block are the numbers of the architecture
// (256 channels = 16 AFE groups of 16 channels, 2 JESD204B lanes per group,
// 32 bits per lane per device clock). The JESD204B framing numbers (F, K, M)
// and the control-character codes are those of the JESD204B standard for an
// 8-converter, 1-lane, 16-bit link; the AFE's exact link configuration is
// this design's choice.
package ltl_pkg;

  // ---- channel organisation ------------------------------------------------
  localparam int unsigned SAMPLE_W      = 16;  // ADC bits per sample
  localparam int unsigned CH_PER_AFE    = 16;  // channels per AFE58JD48
  localparam int unsigned LANES_PER_AFE = 2;   // one JESD204B link per 8-ch bank
  localparam int unsigned LANE_W        = 32;  // PHY parallel width per lane
  localparam int unsigned AFE_W         = LANES_PER_AFE * LANE_W;  // 64 bits
  localparam int unsigned N_AFE_FULL    = 16;  // 256-channel system
  localparam int unsigned AXIS_W        = 1024;// coalesced stream width
  localparam int unsigned BYTES_PER_BEAT = AXIS_W / 8;              // 128
  localparam int unsigned BEATS_PER_SAMPLE_SET = (N_AFE_FULL * CH_PER_AFE * SAMPLE_W) / AXIS_W; // 4

  // ---- ring buffer and blocks ------------------------------------------------
  localparam int unsigned RING_BYTES    = 4 * 1024 * 1024;          // 4 MiB
  localparam int unsigned RING_DEPTH    = RING_BYTES / BYTES_PER_BEAT; // 32768 beats
  localparam int unsigned BLOCK_BYTES   = 256 * 1024;               // 256 KB
  localparam int unsigned BLOCK_BEATS   = BLOCK_BYTES / BYTES_PER_BEAT; // 2048 beats

  // ---- JESD204B link framing (per lane) -------------------------------------
  localparam int unsigned JESD_M = 8;   // converters per link
  localparam int unsigned JESD_L = 1;   // lanes per link
  localparam int unsigned JESD_F = 16;  // octets per frame (8 conv x 2 octets)
  localparam int unsigned JESD_K = 16;  // frames per multiframe
  localparam int unsigned WORDS_PER_FRAME = JESD_F / 4;              // 4
  localparam int unsigned WORDS_PER_MF    = JESD_F * JESD_K / 4;     // 64
  localparam int unsigned ILAS_MF         = 4;  // multiframes in ILAS

  // 8b/10b control characters as decoded octets (flagged as K by the PHY)
  localparam logic [7:0] K_R = 8'h1C;  // K28.0 start of multiframe (ILAS)
  localparam logic [7:0] K_A = 8'h7C;  // K28.3 lane alignment / end of multiframe
  localparam logic [7:0] K_Q = 8'h9C;  // K28.4 start of link configuration data
  localparam logic [7:0] K_K = 8'hBC;  // K28.5 code group synchronisation
  localparam logic [7:0] K_F = 8'hFC;  // K28.7 frame alignment

  // one lane word as delivered by the PHY (octet 0 is the first received)
  typedef struct packed {
    logic [3:0]  charisk;  // bit i: octet i is a control character
    logic [31:0] data;     // octet i in data[8*i +: 8]
  } lane_word_t;

  // trigger source
  typedef enum logic [0:0] {
    MODE_US = 1'b0,   // internal: software start fires the pulser trigger
    MODE_OA = 1'b1    // external optoacoustic (laser) trigger input
  } acq_mode_e;

endpackage
