// attack_throttler_tb: AttackThrottler with 2 threads x 2 banks, NRH_CBF = 32,
// NBL = 16 (RHLI denominator 16), QMAX = 8, QSCALE = 4. Random ACT, clear,
// request and completion traffic is compared every cycle with a reference
// model of the two interleaved counters per pair, the in-flight counts, the
// quota rule and the RHLI read-out. Directed parts drive one pair to RHLI = 1
// (quota zero: no request admitted even with nothing in flight), to counter
// saturation, and check that observe-only mode admits everything.
module attack_throttler_tb;
  localparam int T = 2, B = 2, CW = 8, NRHC = 32, NBL = 16, QMAX = 8, QS = 4;
  localparam int DEN = NRHC - NBL;
  localparam int IW = $clog2(QMAX + 1) + 1;
  logic clk = 0, rst_n = 0, observe_only = 0;
  logic [B-1:0] clear = '0;
  logic act_valid = 0, act_bl = 0, req_valid = 0, done_valid = 0;
  logic act_thread = 0, act_bank = 0, req_thread = 0, req_bank = 0, done_thread = 0, done_bank = 0;
  logic rhli_thread = 0, rhli_bank = 0;
  logic req_ready;
  logic [IW-1:0] req_quota;
  logic [CW-1:0] rhli_count;
  logic [15:0] rhli_q8;
  int checks = 0, failures = 0;

  attack_throttler #(.NUM_THREADS(T), .NUM_BANKS(B), .CNT_W(CW), .NRH_CBF(NRHC), .NBL(NBL),
                     .QMAX(QMAX), .QSCALE(QS)) dut (
    .clk(clk), .rst_n(rst_n), .observe_only(observe_only), .clear(clear),
    .act_valid(act_valid), .act_thread(act_thread), .act_bank(act_bank), .act_blacklisted(act_bl),
    .req_valid(req_valid), .req_thread(req_thread), .req_bank(req_bank),
    .req_ready(req_ready), .req_quota(req_quota),
    .done_valid(done_valid), .done_thread(done_thread), .done_bank(done_bank),
    .rhli_thread(rhli_thread), .rhli_bank(rhli_bank), .rhli_count(rhli_count), .rhli_q8(rhli_q8));

  always #5 clk = ~clk;

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL @%0t: %s", $time, what); end
  endtask

  // ---- reference model ----
  int c0 [T][B], c1 [T][B], infl [T][B];
  bit s1 [B];

  function automatic int active_cnt(int t, int b);
    return s1[b] ? c1[t][b] : c0[t][b];
  endfunction
  // quota falls as RHLI = cnt/DEN rises: QS * (1/RHLI - 1), capped, 0 at RHLI >= 1
  function automatic int quota(int cnt);
    real rhli, q;
    if (cnt == 0) return QMAX;
    rhli = real'(cnt) / real'(DEN);
    if (rhli >= 1.0) return 0;
    q = $floor(real'(QS) * (1.0 / rhli - 1.0) + 1.0e-9);
    return (q > real'(QMAX)) ? QMAX : int'(q);
  endfunction

  task automatic compare();
    int cnt, q;
    cnt = active_cnt(int'(req_thread), int'(req_bank));
    q = quota(cnt);
    check(int'(req_quota) == q, $sformatf("quota t%0d b%0d cnt %0d: %0d exp %0d", req_thread, req_bank, cnt, req_quota, q));
    check(req_ready == (observe_only || infl[req_thread][req_bank] < q), "req_ready");
    cnt = active_cnt(int'(rhli_thread), int'(rhli_bank));
    check(int'(rhli_count) == cnt, $sformatf("rhli_count %0d exp %0d", rhli_count, cnt));
    check(int'(rhli_q8) == (cnt * 256) / DEN, "rhli_q8");
  endtask

  // apply the current inputs to the model at the clock edge
  task automatic step();
    bit acc;
    acc = req_valid && req_ready;
    @(posedge clk);
    for (int t = 0; t < T; t++) for (int b = 0; b < B; b++) begin
      bit inc, up, dn;
      inc = act_valid && act_bl && act_thread == t && act_bank == b;
      if (clear[b] && !s1[b]) c0[t][b] = 0; else if (inc && c0[t][b] < NRHC) c0[t][b]++;
      if (clear[b] &&  s1[b]) c1[t][b] = 0; else if (inc && c1[t][b] < NRHC) c1[t][b]++;
      up = acc && req_thread == t && req_bank == b;
      dn = done_valid && done_thread == t && done_bank == b;
      if (up && !dn) infl[t][b]++; else if (dn && !up) infl[t][b]--;
    end
    for (int b = 0; b < B; b++) if (clear[b]) s1[b] = !s1[b];
    @(negedge clk);
    act_valid = 0; req_valid = 0; done_valid = 0; clear = '0;
  endtask

  initial begin
    int n_zero_quota = 0, n_throttled = 0;
    for (int t = 0; t < T; t++) for (int b = 0; b < B; b++) begin c0[t][b] = 0; c1[t][b] = 0; infl[t][b] = 0; end
    s1[0] = 0; s1[1] = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    // ---- directed: thread 1 hammers blacklisted rows of bank 0 ----
    req_thread = 1; req_bank = 0; rhli_thread = 1; rhli_bank = 0;
    for (int i = 0; i < NRHC + 4; i++) begin
      #1 compare();
      act_valid = 1; act_thread = 1; act_bank = 0; act_bl = 1;
      step();
    end
    #1 compare();
    check(int'(rhli_count) == NRHC, "counter saturates at NRH x tCBF/tREFW");
    check(req_quota == 0 && req_ready == 0, "RHLI >= 1: thread fully blocked from the bank");
    req_thread = 0; #1 compare();
    check(req_ready == 1 && int'(req_quota) == QMAX, "other thread not throttled");
    observe_only = 1; req_thread = 1; #1 compare();
    check(req_ready == 1, "observe-only admits the attacker");
    observe_only = 0;
    // two clears: the attacker's counters drain (active cleared, then the other)
    clear = 2'b01; step(); #1 compare();
    check(int'(rhli_count) == NRHC, "passive counter also counted: still saturated");
    clear = 2'b01; step(); #1 compare();
    check(rhli_count == 0, "both counters cleared after two clears");
    // ---- random traffic ----
    for (int cyc = 0; cyc < 8000; cyc++) begin
      req_thread = 1'($urandom); req_bank = 1'($urandom);
      rhli_thread = 1'($urandom); rhli_bank = 1'($urandom);
      observe_only = ($urandom_range(0, 19) == 0);
      #1 compare();
      if (quota(active_cnt(int'(req_thread), int'(req_bank))) == 0) n_zero_quota++;
      if (!req_ready) n_throttled++;
      if ($urandom_range(0, 1)) begin
        act_valid = 1; act_thread = 1'($urandom); act_bank = 1'($urandom);
        act_bl = ($urandom_range(0, 2) == 0) || (act_thread == 1 && act_bank == 1);
      end
      if ($urandom_range(0, 249) == 0) clear = 2'($urandom);
      req_valid = ($urandom_range(0, 1) == 1) && infl[req_thread][req_bank] < 30;
      if ($urandom_range(0, 2) == 0) begin
        done_thread = 1'($urandom); done_bank = 1'($urandom);
        done_valid = infl[done_thread][done_bank] > 0 &&
                     !(req_valid && req_ready && req_thread == done_thread && req_bank == done_bank && infl[done_thread][done_bank] == 0);
      end
      step();
    end
    check(n_zero_quota > 0 && n_throttled > 0, "random phase never throttled");
    $display("zero-quota %0d throttled %0d", n_zero_quota, n_throttled);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
