// dragon_pkg: constants and types shared by the Dragon readout logic.
//
// The DRS4 geometry follows the readout board: eight DRS4 chips with 1024
// sampling cells per channel, four channels cascaded into one 4096-cell ring
// per signal. With eight signal channels per chip this gives 16 digitised
// lanes per board (seven PMTs in high and low gain, two spare). The ADC
// resolution (12 bits) and the 1M x 18 organisation of the 18 Mbit SRAM are
// this design's choices. Every word that travels from the event builder to
// the Ethernet carries 16 data bits and two framing flags, so it fits one
// 18-bit SRAM word exactly.
package dragon_pkg;

  localparam int CELLS_PER_CH = 1024;                 // DRS4 cells per channel
  localparam int CASCADE      = 4;                    // channels cascaded per signal
  localparam int DEPTH        = CELLS_PER_CH * CASCADE; // 4096-cell sampling ring
  localparam int POS_BITS     = $clog2(DEPTH);        // 12
  localparam int N_CHIP       = 8;                    // DRS4 chips per board
  localparam int CH_PER_CHIP  = 8;                    // signal channels used per chip
  localparam int N_LANE       = N_CHIP * CH_PER_CHIP / CASCADE; // 16
  localparam int LANE_BITS    = $clog2(N_LANE);       // 4
  localparam int N_PMT        = 7;                    // PMTs per cluster
  localparam int ADC_BITS     = 12;
  localparam int ROI_BITS     = POS_BITS + 1;         // ROI length 0..4096
  localparam int SRAM_AW      = 20;                   // 1M words
  localparam int SRAM_DW      = 18;                   // x 18 bits = 18 Mbit

  localparam logic [15:0] EV_MAGIC = 16'hD4A1;         // first header word
  localparam int          HDR_WORDS = 7;

  typedef logic [ADC_BITS-1:0] sample_t;

  // One word of the event stream (also the SRAM word).
  typedef struct packed {
    logic        sof;   // first word of an event
    logic        eof;   // last word of an event
    logic [15:0] data;
  } ev_word_t;

endpackage
