// bh_pkg: shared configuration constants of the BlockHammer RowHammer guard.
//
// All module parameters in this design take their defaults from here. The
// numbers follow the example DDR4 configuration of BlockHammer (RowHammer
// threshold 32K, tuned for double-sided attacks to 16K, blacklisting threshold
// 8K, 1K-counter CBFs with four H3 hashes, 887-entry history buffer, 16 banks,
// 8 hardware threads, 64K rows per bank). Derived values (the throttling delay
// tDelay, the epoch length) are computed from the DRAM timing parameters with
// the formulas of the design, in integer picoseconds, and converted to cycles
// of the memory-controller clock.
//
// Own choices, not given by the source design: the controller clock
// (1200 MHz, the DDR4-2400 command clock), the width of the saturating CBF
// counters (the smallest that can hold NBL), the time unit of the history
// buffer timestamps (8 cycles, so that an entry fits in 32 bits) and the
// in-flight request ceiling of AttackThrottler (the 64-entry request queue).
package bh_pkg;

  // ---------------- DRAM organisation ----------------
  localparam int NUM_BANKS   = 16;      // banks per rank
  localparam int ROW_W       = 16;      // 64K rows per bank
  localparam int NUM_THREADS = 8;       // 8-core system

  // ---------------- DRAM timing (picoseconds) ----------------
  localparam longint TRC_PS    = 46_250;          // tRC  = 46.25 ns
  localparam longint TFAW_PS   = 35_000;          // tFAW = 35 ns
  localparam longint TREFW_PS  = 64'd64_000_000_000;  // tREFW = 64 ms
  localparam longint TCBF_PS   = 64'd64_000_000_000;  // CBF lifetime = tREFW
  localparam longint CLK_MHZ   = 1200;            // controller clock (own choice)

  // ---------------- RowHammer thresholds ----------------
  localparam int NRH       = 32_768;              // single-sided threshold 32K
  localparam int NRH_STAR  = NRH / 2;             // double-sided tuning 16K
  // Activations allowed per CBF lifetime: NRH* x tCBF / tREFW
  localparam int NRH_CBF   = int'((longint'(NRH_STAR) * TCBF_PS) / TREFW_PS);
  localparam int NBL       = 8_192;               // blacklisting threshold 8K
  // AttackThrottler saturation and RHLI scale (RHLI equation): NRH x tCBF / tREFW
  localparam int AT_NRH_CBF = int'((longint'(NRH) * TCBF_PS) / TREFW_PS);

  // ---------------- RowBlocker-BL ----------------
  localparam int CBF_SIZE  = 1024;                // counters per CBF
  localparam int NUM_HASH  = 4;                   // H3 hash functions per CBF
  localparam int CBF_CNT_W = $clog2(NBL + 1);     // saturating counter width

  // tDelay = (tCBF - NBL*tRC) / (NRH_CBF - NBL)
  localparam longint TDELAY_PS =
      (TCBF_PS - longint'(NBL) * TRC_PS) / (longint'(NRH_CBF) - longint'(NBL));
  // rounded up to whole cycles
  localparam int TDELAY_CYC = int'((TDELAY_PS * CLK_MHZ + 999_999) / 1_000_000);
  // D-CBF clear period = one epoch = half a CBF lifetime
  localparam int EPOCH_CYC  = int'((TCBF_PS / 2) * CLK_MHZ / 1_000_000);

  // ---------------- RowBlocker-HB ----------------
  // ceil(4 x tDelay / tFAW) evaluates to 888; the design point quotes 887.
  localparam int HB_ENTRIES  = 887;
  localparam int HB_TICK     = 8;                 // cycles per timestamp unit
  localparam int HB_TS_W     = 11;                // 20b row ID + 11b ts + valid = 32b
  localparam int HB_DELAY_TICKS = (TDELAY_CYC + HB_TICK - 1) / HB_TICK;

  // ---------------- AttackThrottler ----------------
  localparam int AT_CNT_W   = 16;                 // 2 x 16b = 4 bytes per pair
  localparam int AT_QMAX    = 64;                 // request queue depth
  localparam int AT_QSCALE  = 1;                  // quota scale (own choice)

endpackage
