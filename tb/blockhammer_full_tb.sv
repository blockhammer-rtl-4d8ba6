// blockhammer_full_tb: BlockHammer at its default size (16 banks, 8 threads,
// 1K-counter CBFs, NBL = 8K, 887-entry history buffer, tDelay = 9320 cycles at
// 1.2 GHz) through one complete hammering episode.
//
// Thread 7 hammers rows A and B of bank 0 alternately at the bank's tRC
// (56 cycles), querying RowBlocker before every ACT; thread 0 activates random
// rows of the other banks at a low rate. Checks: each hammered row gets exactly
// NBL activations before RowBlocker reports it unsafe; afterwards every
// activation of a hammered row is at least tDelay after the previous one; the
// benign thread is never blocked; AttackThrottler counts every blacklisted
// activation of the attacker and its quota follows the quota rule. The attack
// runs until the attacker's quota has dropped below QMAX (about 2.8 M cycles,
// well under a minute of simulation); the attacker's requests are then
// admitted up to the quota, refused beyond it and admitted again after one
// completes.
module blockhammer_full_tb;
  import bh_pkg::*;
  localparam int BW = $clog2(NUM_BANKS), TW = $clog2(NUM_THREADS);
  localparam int TRC_CYC = int'((TRC_PS * CLK_MHZ + 999_999) / 1_000_000);
  localparam int IW = $clog2(AT_QMAX + 1) + 1;
  localparam int DEN = AT_NRH_CBF - NBL;

  logic clk = 0, rst_n = 0, observe_only = 0;
  logic [BW-1:0] q_bank = '0, act_bank = '0, req_bank = '0, done_bank = '0, rhli_bank = '0;
  logic [ROW_W-1:0] q_row = '0, act_row = '0;
  logic [TW-1:0] act_thread = '0, req_thread = '0, done_thread = '0, rhli_thread = '0;
  logic act_valid = 0, req_valid = 0, done_valid = 0;
  logic q_unsafe, q_bl, q_recent, act_bl, req_ready, epoch_clear, hb_full, hb_overflow;
  logic [IW-1:0] req_quota;
  logic [AT_CNT_W-1:0] rhli_count;
  logic [15:0] rhli_q8;
  logic [$clog2(HB_ENTRIES+1)-1:0] hb_occ;
  logic [$clog2(NBL+1)-1:0] q_count;
  logic [NUM_BANKS-1:0] active_b;
  int checks = 0, failures = 0;

  blockhammer dut (
    .clk(clk), .rst_n(rst_n), .observe_only(observe_only),
    .q_bank(q_bank), .q_row(q_row), .q_unsafe(q_unsafe), .q_blacklisted(q_bl), .q_recent(q_recent),
    .act_valid(act_valid), .act_bank(act_bank), .act_row(act_row), .act_thread(act_thread),
    .act_blacklisted(act_bl),
    .req_valid(req_valid), .req_thread(req_thread), .req_bank(req_bank), .req_ready(req_ready),
    .req_quota(req_quota), .done_valid(done_valid), .done_thread(done_thread), .done_bank(done_bank),
    .rhli_thread(rhli_thread), .rhli_bank(rhli_bank), .rhli_count(rhli_count), .rhli_q8(rhli_q8),
    .epoch_clear(epoch_clear), .hb_full(hb_full), .hb_overflow(hb_overflow), .hb_occupancy(hb_occ),
    .q_count(q_count), .active_b(active_b));

  always #5 clk = ~clk;

  // past NBL on both rows, then enough delayed ACTs for the attacker's quota
  // to fall below QMAX (count > (AT_NRH_CBF - NBL) / (QMAX + 1))
  localparam int HAMMER_ACTS = 2 * NBL + DEN / (AT_QMAX + 1) + 20;

  initial begin
    repeat (HAMMER_ACTS * TRC_CYC + (HAMMER_ACTS - 2 * NBL + 4) * TDELAY_CYC + 10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL @%0t: %s", $time, what); end
  endtask

  function automatic int quota_of(int cnt);
    int q;
    if (cnt == 0) return AT_QMAX;
    if (cnt >= DEN) return 0;
    q = AT_QSCALE * (DEN - cnt) / cnt;
    return (q > AT_QMAX) ? AT_QMAX : q;
  endfunction

  initial begin
    int cycle = 0, n[2], last[2], first_block[2], min_gap, n_bl = 0, n_benign = 0, k = 0, bank_free = 0;
    int unsafe_seen = 0;
    n[0] = 0; n[1] = 0; last[0] = 0; last[1] = 0; first_block[0] = -1; first_block[1] = -1;
    min_gap = 1 << 30;
    repeat (2) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    while (n[0] + n[1] < HAMMER_ACTS) begin
      int r;
      r = k % 2;
      act_valid = 0;
      // the benign thread: a random row of another bank every 97 cycles
      if (cycle % 97 == 0) begin
        q_bank = BW'($urandom_range(1, NUM_BANKS - 1)); q_row = ROW_W'($urandom);
        #1;
        check(q_unsafe == 0, "benign ACT blocked");
        act_valid = 1; act_bank = q_bank; act_row = q_row; act_thread = 0;
        n_benign++;
      end else if (cycle >= bank_free) begin
        q_bank = 0; q_row = r ? ROW_W'(16'h1235) : ROW_W'(16'h1233);
        #1;
        if (q_unsafe) begin
          unsafe_seen++;
          if (first_block[r] < 0) begin
            first_block[r] = n[r];
            check(n[r] == NBL, $sformatf("row %0d first blocked after %0d ACTs, NBL is %0d", r, n[r], NBL));
          end
          k++;                         // try the other row
        end else begin
          act_valid = 1; act_bank = 0; act_row = q_row; act_thread = TW'(NUM_THREADS - 1);
          #1;
          if (act_bl) n_bl++;
          if (n[r] > NBL) begin
            if (cycle - last[r] < min_gap) min_gap = cycle - last[r];
          end
          check(act_bl == (n[r] >= NBL), $sformatf("blacklist flag %0b at ACT %0d", act_bl, n[r] + 1));
          n[r]++; last[r] = cycle; k++;
          bank_free = cycle + TRC_CYC;
        end
      end
      @(posedge clk); cycle++;
      @(negedge clk);
      act_valid = 0;
    end
    repeat (2) @(negedge clk);
    check(min_gap >= TDELAY_CYC, $sformatf("blacklisted row re-activated after %0d < tDelay %0d cycles", min_gap, TDELAY_CYC));
    check(min_gap <= TDELAY_CYC + 2 * HB_TICK + TRC_CYC, $sformatf("blacklisted row delayed %0d cycles", min_gap));
    // AttackThrottler: every blacklisted ACT of the attacker counted
    rhli_thread = TW'(NUM_THREADS - 1); rhli_bank = 0;
    req_valid = 1; req_thread = TW'(NUM_THREADS - 1); req_bank = 0;
    #1;
    check(int'(rhli_count) == n_bl, $sformatf("RHLI counter %0d, blacklisted ACTs %0d", rhli_count, n_bl));
    check(int'(rhli_q8) == (n_bl * 256) / DEN, "RHLI read-out");
    check(int'(req_quota) == quota_of(n_bl), $sformatf("attacker quota %0d exp %0d", req_quota, quota_of(n_bl)));
    check(int'(req_quota) < AT_QMAX && req_ready, "attacker throttled below QMAX");
    // fill the attacker's quota: the next request must then be refused
    for (int i = 0; i < int'(req_quota); i++) begin
      check(req_ready == 1, "request within quota refused");
      @(posedge clk); #1;
    end
    check(req_ready == 0, "request beyond quota admitted");
    req_valid = 0; done_valid = 1; done_thread = TW'(NUM_THREADS - 1); done_bank = 0;
    @(posedge clk); #1; done_valid = 0; req_valid = 1;
    #1;
    check(req_ready == 1, "request not admitted after a completion");
    req_thread = 0; rhli_thread = 0; #1;
    check(rhli_count == 0 && int'(req_quota) == AT_QMAX, "benign thread not throttled");
    req_valid = 0;
    check(hb_overflow == 0 && n_benign > 0 && unsafe_seen > 0, "overflow or nothing exercised");
    $display("cycles %0d, ACTs A %0d B %0d, blacklisted %0d, min gap %0d (tDelay %0d), benign %0d, quota %0d",
             cycle, n[0], n[1], n_bl, min_gap, TDELAY_CYC, n_benign, quota_of(n_bl));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
