// blockhammer: BlockHammer RowHammer guard for one DRAM rank, placed inside the
// memory controller next to the request scheduler.
//
// It joins RowBlocker (per-bank D-CBF blacklists, per-rank activation history,
// RH-unsafe verdict) and AttackThrottler (per <thread, bank> blacklisted-ACT
// counters, RHLI, in-flight quotas). RowBlocker's epoch clear drives
// AttackThrottler's counter swap for every bank, and RowBlocker's verdict on
// each issued ACT (blacklisted or not) feeds AttackThrottler's counters.
//
// Scheduler interface (all answers combinational, updates at the next edge):
//   q_bank/q_row      -> q_unsafe      ask before issuing an ACT; hold it while unsafe
//   act_valid/bank/row/thread          report every ACT that was issued
//   req_valid/thread/bank -> req_ready admit a new request of a thread to a bank
//   done_valid/thread/bank             a request of that pair completed
//   rhli_thread/bank  -> rhli_count, rhli_q8   RHLI read-out for system software
//   observe_only                       1: count and report, never block or throttle
//
// The scheduler itself, the DRAM and the processor are outside this design.
// Parameters default to the DDR4, NRH = 32K configuration (see bh_pkg).
module blockhammer #(
  parameter int NUM_BANKS   = bh_pkg::NUM_BANKS,
  parameter int BANK_W      = $clog2(NUM_BANKS),
  parameter int ROW_W       = bh_pkg::ROW_W,
  parameter int NUM_THREADS = bh_pkg::NUM_THREADS,
  parameter int THREAD_W    = $clog2(NUM_THREADS),
  parameter int CBF_SIZE    = bh_pkg::CBF_SIZE,
  parameter int NUM_HASH    = bh_pkg::NUM_HASH,
  parameter int NBL         = bh_pkg::NBL,
  parameter int NRH_CBF     = bh_pkg::AT_NRH_CBF,
  parameter int HB_ENTRIES  = bh_pkg::HB_ENTRIES,
  parameter int HB_TS_W     = bh_pkg::HB_TS_W,
  parameter int HB_TICK     = bh_pkg::HB_TICK,
  parameter int HB_DELAY_TICKS = bh_pkg::HB_DELAY_TICKS,
  parameter int EPOCH_CYC   = bh_pkg::EPOCH_CYC,
  parameter int AT_CNT_W    = bh_pkg::AT_CNT_W,
  parameter int AT_QMAX     = bh_pkg::AT_QMAX,
  parameter int AT_QSCALE   = bh_pkg::AT_QSCALE,
  parameter int INFL_W      = $clog2(AT_QMAX + 1) + 1
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                observe_only,
  // RH-safety query
  input  logic [BANK_W-1:0]   q_bank,
  input  logic [ROW_W-1:0]    q_row,
  output logic                q_unsafe,
  output logic                q_blacklisted,
  output logic                q_recent,
  // issued ACT
  input  logic                act_valid,
  input  logic [BANK_W-1:0]   act_bank,
  input  logic [ROW_W-1:0]    act_row,
  input  logic [THREAD_W-1:0] act_thread,
  output logic                act_blacklisted,
  // request admission and completion
  input  logic                req_valid,
  input  logic [THREAD_W-1:0] req_thread,
  input  logic [BANK_W-1:0]   req_bank,
  output logic                req_ready,
  output logic [INFL_W-1:0]   req_quota,
  input  logic                done_valid,
  input  logic [THREAD_W-1:0] done_thread,
  input  logic [BANK_W-1:0]   done_bank,
  // RHLI exposure
  input  logic [THREAD_W-1:0] rhli_thread,
  input  logic [BANK_W-1:0]   rhli_bank,
  output logic [AT_CNT_W-1:0] rhli_count,
  output logic [15:0]         rhli_q8,
  // status
  output logic                epoch_clear,
  output logic                hb_full,
  output logic                hb_overflow,
  output logic [$clog2(HB_ENTRIES+1)-1:0] hb_occupancy,
  output logic [$clog2(NBL + 1)-1:0] q_count,     // active-CBF estimate of the queried row
  output logic [NUM_BANKS-1:0] active_b          // per bank: 1 when CBF B is active
);

  rowblocker #(
    .NUM_BANKS(NUM_BANKS), .BANK_W(BANK_W), .ROW_W(ROW_W), .CBF_SIZE(CBF_SIZE),
    .NUM_HASH(NUM_HASH), .NBL(NBL), .HB_ENTRIES(HB_ENTRIES), .HB_TS_W(HB_TS_W),
    .HB_TICK(HB_TICK), .HB_DELAY_TICKS(HB_DELAY_TICKS), .EPOCH_CYC(EPOCH_CYC)
  ) u_rowblocker (
    .clk(clk), .rst_n(rst_n), .observe_only(observe_only),
    .q_bank(q_bank), .q_row(q_row), .q_unsafe(q_unsafe),
    .q_blacklisted(q_blacklisted), .q_recent(q_recent), .q_count(q_count),
    .act_valid(act_valid), .act_bank(act_bank), .act_row(act_row),
    .act_blacklisted(act_blacklisted),
    .epoch_clear(epoch_clear), .active_b(active_b),
    .hb_full(hb_full), .hb_overflow(hb_overflow), .hb_occupancy(hb_occupancy));

  attack_throttler #(
    .NUM_THREADS(NUM_THREADS), .NUM_BANKS(NUM_BANKS), .THREAD_W(THREAD_W),
    .BANK_W(BANK_W), .CNT_W(AT_CNT_W), .NRH_CBF(NRH_CBF), .NBL(NBL),
    .QMAX(AT_QMAX), .QSCALE(AT_QSCALE), .INFL_W(INFL_W)
  ) u_throttler (
    .clk(clk), .rst_n(rst_n), .observe_only(observe_only),
    .clear({NUM_BANKS{epoch_clear}}),
    .act_valid(act_valid), .act_thread(act_thread), .act_bank(act_bank),
    .act_blacklisted(act_blacklisted),
    .req_valid(req_valid), .req_thread(req_thread), .req_bank(req_bank),
    .req_ready(req_ready), .req_quota(req_quota),
    .done_valid(done_valid), .done_thread(done_thread), .done_bank(done_bank),
    .rhli_thread(rhli_thread), .rhli_bank(rhli_bank),
    .rhli_count(rhli_count), .rhli_q8(rhli_q8));
endmodule
