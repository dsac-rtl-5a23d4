// dsac_pkg: sizes and constants shared by the DSAC RowHammer/RowBleed tracker.
//
// The numbers follow the LPDDR4 baseline the design was sized for: 64K rows per
// bank (16-bit row address), a 20K RowHammer threshold (14-bit counters, enough
// for the 10K double-sided limit), 255 activates per refresh interval and a
// 20-bit pseudo-random source (enough to cover ~2,095K activates per refresh
// window). The adaptive TRR threshold is RH_TH/2 - MAC_tREFI.
// Linted on its own, the package's constants show as unused parameters;
// the modules that import them by dsac_pkg:: use every one.
package dsac_pkg;
  localparam int unsigned ROW_W    = 16;    // row address bits (64K rows/bank)
  localparam int unsigned CNT_W    = 14;    // row counter bits
  localparam int unsigned PRBS_W   = 20;    // LFSR / seed width
  localparam int unsigned RH_TH    = 20000; // RowHammer threshold (activates)
  localparam int unsigned MAC_TREFI = 255;  // max activates per tREFI
  localparam int unsigned TRR_TH   = RH_TH / 2 - MAC_TREFI; // 9745
  localparam int unsigned NUM_BANKS = 8;
  localparam int unsigned NUM_ENTRIES = 4;  // count-table entries per bank

  // Sequencer states of the per-bank TRR module controller.
  typedef enum logic [2:0] {
    ST_IDLE,   // waiting; an ACTIVE here is the minimum search (MAX_OR_MIN low)
    ST_UPD,    // apply hit / insertion / stochastic replacement
    ST_WADD,   // add the Time-Weighted Counting weight after a precharge
    ST_MAXS,   // maximum search (MAX_OR_MIN high), load the RowHammer register
    ST_VICT,   // issue victim rows RH-x / RH+x
    ST_CLR     // reset the aggressor's counter after TRR
  } ctrl_state_e;
endpackage
