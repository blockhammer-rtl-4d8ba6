// attack_throttler: AttackThrottler, which identifies and slows down threads
// that keep activating blacklisted rows.
//
// For every <thread, bank> pair it keeps two saturating counters of ACTs that
// the thread issued to blacklisted rows of that bank, used in the same
// time-interleaved way as the D-CBF: both are incremented, only the active one
// is read, and when RowBlocker clears a bank's active filter the active counter
// of every thread for that bank is cleared and the two counters swap roles.
// The counters saturate at NRH_CBF, the most activations a row may receive in
// one CBF lifetime.
//
// RowHammer likelihood index: RHLI = count / (NRH_CBF - NBL), 0 for a thread
// that never activates a blacklisted row, 1 when it has used up everything a
// blacklisted row can ever receive. Each pair gets an in-flight request quota
// that falls as RHLI rises:
//   RHLI = 0       -> QMAX (no throttling)
//   0 < RHLI < 1   -> min(QMAX, floor(QSCALE * (1/RHLI - 1)))
//   RHLI >= 1      -> 0    (the thread may send no more requests to the bank)
// A new request of a pair is accepted only while its in-flight count is below
// its quota. In observe-only mode every request is accepted but the counters
// still run.
//
// Interface: `act_*` reports each issued ACT with its thread and whether
// RowBlocker found the row blacklisted; `clear[b]` is RowBlocker's clear of
// bank b. `req_valid/req_thread/req_bank` asks to admit a new memory request,
// answered combinationally by `req_ready`; a request is admitted when both are
// high. `done_*` reports a completed request. The RHLI read port exposes the
// active counter and RHLI (8 fraction bits) of any pair to system software.
// All updates take effect at the next edge.
//
// Follows the source design: two interleaved counters per pair, saturation at
// NRH x tCBF/tREFW, 16-bit counters (4 bytes per pair), quota zero at RHLI 1,
// RHLI exposed to the OS. Own choices: the quota formula above (the design
// only says "inversely proportional"), QMAX = request queue depth, in-flight
// counting per pair, combinational quota for the requesting pair only.
module attack_throttler #(
  parameter int NUM_THREADS = bh_pkg::NUM_THREADS,
  parameter int NUM_BANKS   = bh_pkg::NUM_BANKS,
  parameter int THREAD_W    = $clog2(NUM_THREADS),
  parameter int BANK_W      = $clog2(NUM_BANKS),
  parameter int CNT_W       = bh_pkg::AT_CNT_W,
  parameter int NRH_CBF     = bh_pkg::AT_NRH_CBF,
  parameter int NBL         = bh_pkg::NBL,
  parameter int QMAX        = bh_pkg::AT_QMAX,
  parameter int QSCALE      = bh_pkg::AT_QSCALE,
  parameter int INFL_W      = $clog2(QMAX + 1) + 1
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                observe_only,
  input  logic [NUM_BANKS-1:0] clear,
  // issued ACTs
  input  logic                act_valid,
  input  logic [THREAD_W-1:0] act_thread,
  input  logic [BANK_W-1:0]   act_bank,
  input  logic                act_blacklisted,
  // request admission
  input  logic                req_valid,
  input  logic [THREAD_W-1:0] req_thread,
  input  logic [BANK_W-1:0]   req_bank,
  output logic                req_ready,
  output logic [INFL_W-1:0]   req_quota,
  // request completion
  input  logic                done_valid,
  input  logic [THREAD_W-1:0] done_thread,
  input  logic [BANK_W-1:0]   done_bank,
  // RHLI read port
  input  logic [THREAD_W-1:0] rhli_thread,
  input  logic [BANK_W-1:0]   rhli_bank,
  output logic [CNT_W-1:0]    rhli_count,
  output logic [15:0]         rhli_q8
);
  localparam int DEN = NRH_CBF - NBL;

  logic [CNT_W-1:0]  cnt0 [NUM_THREADS][NUM_BANKS];
  logic [CNT_W-1:0]  cnt1 [NUM_THREADS][NUM_BANKS];
  logic [NUM_BANKS-1:0] sel1;            // 1: counter 1 is active for the bank
  logic [INFL_W-1:0] inflight [NUM_THREADS][NUM_BANKS];

  function automatic logic [CNT_W-1:0] sat_inc(input logic [CNT_W-1:0] c);
    return (c >= CNT_W'(NRH_CBF)) ? c : c + 1'b1;
  endfunction

  // quota of the requesting pair
  logic [CNT_W-1:0] req_cnt;
  logic [31:0]      q_raw;
  assign req_cnt = sel1[req_bank] ? cnt1[req_thread][req_bank] : cnt0[req_thread][req_bank];

  always_comb begin
    q_raw = 32'(QMAX);
    if (req_cnt >= CNT_W'(DEN))  q_raw = 0;
    else if (req_cnt != '0)      q_raw = (32'(QSCALE) * (32'(DEN) - 32'(req_cnt))) / 32'(req_cnt);
    if (q_raw > 32'(QMAX))       q_raw = 32'(QMAX);
  end
  assign req_quota = INFL_W'(q_raw);
  assign req_ready = observe_only || (inflight[req_thread][req_bank] < req_quota);

  // RHLI read port
  assign rhli_count = sel1[rhli_bank] ? cnt1[rhli_thread][rhli_bank] : cnt0[rhli_thread][rhli_bank];
  assign rhli_q8    = 16'((32'(rhli_count) << 8) / 32'(DEN));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      sel1 <= '0;
      for (int t = 0; t < NUM_THREADS; t++)
        for (int b = 0; b < NUM_BANKS; b++) begin
          cnt0[t][b]     <= '0;
          cnt1[t][b]     <= '0;
          inflight[t][b] <= '0;
        end
    end else begin
      for (int t = 0; t < NUM_THREADS; t++)
        for (int b = 0; b < NUM_BANKS; b++) begin
          logic inc;
          inc = act_valid && act_blacklisted &&
                act_thread == THREAD_W'(t) && act_bank == BANK_W'(b);
          // counter 0
          if (clear[b] && !sel1[b]) cnt0[t][b] <= '0;
          else if (inc)             cnt0[t][b] <= sat_inc(cnt0[t][b]);
          // counter 1
          if (clear[b] && sel1[b])  cnt1[t][b] <= '0;
          else if (inc)             cnt1[t][b] <= sat_inc(cnt1[t][b]);
          // in-flight requests
          begin
            logic up, dn;
            up = req_valid && req_ready && req_thread == THREAD_W'(t) && req_bank == BANK_W'(b);
            dn = done_valid && done_thread == THREAD_W'(t) && done_bank == BANK_W'(b);
            if (up && !dn)      inflight[t][b] <= inflight[t][b] + 1'b1;
            else if (dn && !up) inflight[t][b] <= inflight[t][b] - 1'b1;
          end
        end
      for (int b = 0; b < NUM_BANKS; b++)
        if (clear[b]) sel1[b] <= !sel1[b];
    end
  end

  a_done_has_inflight: assert property (@(posedge clk) disable iff (!rst_n)
    done_valid |-> inflight[done_thread][done_bank] != '0);
  a_inflight_no_wrap: assert property (@(posedge clk) disable iff (!rst_n)
    req_valid && req_ready |-> inflight[req_thread][req_bank] != '1);
endmodule
