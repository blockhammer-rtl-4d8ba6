// rowblocker: RowBlocker for one DRAM rank.
//
// Before the memory request scheduler issues an ACT it presents the ACT's
// bank and row on the query port. RowBlocker looks the row up in two places at
// once: the bank's RowBlocker-BL (is the row blacklisted?) and the rank's
// RowBlocker-HB (was the row activated within the last tDelay?). Only when
// both answer yes is the ACT reported RowHammer-unsafe, and the scheduler must
// hold it back and may keep issuing other, safe requests. When the scheduler
// issues an ACT it reports it on the act port, which inserts the row into the
// bank's D-CBF and into the history buffer. A blacklisted row can thus be
// activated at most once per tDelay, which bounds its activation count within
// any refresh window below the RowHammer threshold.
//
// The epoch clock register counts cycles since the latest D-CBF clear and,
// every EPOCH_CYC cycles (half a CBF lifetime), clears the active CBF of every
// bank. A clear that falls on a cycle with an issued ACT is deferred by one
// cycle so that no activation is lost; `epoch_clear` is the pulse actually
// applied, shared with AttackThrottler.
//
// Modes: with `observe_only` set, blacklisting still runs but nothing is ever
// reported unsafe. In full-functional mode a full history buffer also makes
// every ACT unsafe (it cannot record further activations); a buffer of the
// default size cannot fill under DDR4 tFAW.
//
// Timing: query answers are combinational in the same cycle (the scheduler
// uses them in the cycle it picks an ACT); an issued ACT is visible to queries
// from the next cycle.
//
// Follows the source design: steps 1-9 of its overview (test, search, AND,
// insert into both structures), per-bank BL, per-rank HB, periodic clear.
// Own choices: all banks cleared together from one epoch register, clear
// deferral, full-buffer blocking, row ID = {bank, row}.
module rowblocker #(
  parameter int NUM_BANKS   = bh_pkg::NUM_BANKS,
  parameter int BANK_W      = $clog2(NUM_BANKS),
  parameter int ROW_W       = bh_pkg::ROW_W,
  parameter int CBF_SIZE    = bh_pkg::CBF_SIZE,
  parameter int NUM_HASH    = bh_pkg::NUM_HASH,
  parameter int NBL         = bh_pkg::NBL,
  parameter int HB_ENTRIES  = bh_pkg::HB_ENTRIES,
  parameter int HB_TS_W     = bh_pkg::HB_TS_W,
  parameter int HB_TICK     = bh_pkg::HB_TICK,
  parameter int HB_DELAY_TICKS = bh_pkg::HB_DELAY_TICKS,
  parameter int EPOCH_CYC   = bh_pkg::EPOCH_CYC
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              observe_only,
  // query: "is this ACT RowHammer-safe?"
  input  logic [BANK_W-1:0] q_bank,
  input  logic [ROW_W-1:0]  q_row,
  output logic              q_unsafe,
  output logic              q_blacklisted,
  output logic              q_recent,
  output logic [$clog2(NBL + 1)-1:0] q_count,   // active-CBF estimate
  // issued ACT
  input  logic              act_valid,
  input  logic [BANK_W-1:0] act_bank,
  input  logic [ROW_W-1:0]  act_row,
  output logic              act_blacklisted,
  // status
  output logic              epoch_clear,
  output logic [NUM_BANKS-1:0] active_b,
  output logic              hb_full,
  output logic              hb_overflow,
  output logic [$clog2(HB_ENTRIES+1)-1:0] hb_occupancy
);
  localparam int ID_W    = BANK_W + ROW_W;
  localparam int EPOCH_W = $clog2(EPOCH_CYC);

  logic [NUM_BANKS-1:0] bl_q, bl_act;
  logic [$clog2(NBL + 1)-1:0] bl_cnt [NUM_BANKS];
  logic [EPOCH_W-1:0] epoch_cnt;
  logic epoch_due, act_recent;

  for (genvar b = 0; b < NUM_BANKS; b++) begin : g_bank
    rowblocker_bl #(
      .ROW_W(ROW_W), .CBF_SIZE(CBF_SIZE), .NUM_HASH(NUM_HASH), .NBL(NBL),
      .SEED_INIT(64'h9E37_79B9_7F4A_7C15 ^ (64'(b + 1) * 64'hBF58_476D_1CE4_E5B9))
    ) u_bl (
      .clk(clk), .rst_n(rst_n),
      .clear(epoch_clear),
      .insert(act_valid && act_bank == BANK_W'(b)),
      .ins_row(act_row),
      .q_row(q_row),
      .q_blacklisted(bl_q[b]),
      .q_count(bl_cnt[b]),
      .act_blacklisted(bl_act[b]),
      .active_b(active_b[b]));
  end

  rowblocker_hb #(
    .ENTRIES(HB_ENTRIES), .ID_W(ID_W), .TS_W(HB_TS_W), .TICK(HB_TICK),
    .DELAY_TICKS(HB_DELAY_TICKS)
  ) u_hb (
    .clk(clk), .rst_n(rst_n),
    .insert(act_valid), .ins_id({act_bank, act_row}),
    .q_id({q_bank, q_row}), .q_recent(q_recent),
    .act_id({act_bank, act_row}), .act_recent(act_recent),
    .full(hb_full), .overflow(hb_overflow),
    .occupancy(hb_occupancy));

  assign q_blacklisted   = bl_q[q_bank];
  assign q_count         = bl_cnt[q_bank];
  assign act_blacklisted = bl_act[act_bank];
  assign q_unsafe        = !observe_only && ((q_blacklisted && q_recent) || hb_full);

  // epoch clock register: cycles since the latest clear
  assign epoch_due   = (epoch_cnt == EPOCH_W'(EPOCH_CYC - 1));
  assign epoch_clear = epoch_due && !act_valid;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)           epoch_cnt <= '0;
    else if (epoch_clear) epoch_cnt <= '0;
    else if (!epoch_due)  epoch_cnt <= epoch_cnt + 1'b1;
  end

  // The scheduler must never issue an ACT that RowBlocker reports unsafe.
  a_no_unsafe_act: assert property (@(posedge clk) disable iff (!rst_n)
    act_valid && !observe_only |-> !((act_blacklisted && act_recent) || hb_full));
endmodule
