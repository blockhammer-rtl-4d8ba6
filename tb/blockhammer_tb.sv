// blockhammer_tb: end-to-end run of BlockHammer at reduced size (4 banks,
// 4 threads, 128-counter CBFs, NBL = 8, NRH per CBF lifetime = 16, epoch = 1500
// cycles, tRC = 4 cycles, tFAW = 16 cycles, tDelay from the design formula =
// 371 cycles, 96-entry history buffer) inside a behavioural memory controller.
//
// Threads 0-2 are benign (random rows), thread 3 is a double-sided attacker
// alternating between two rows of every bank. Requests enter through
// AttackThrottler's admission port; the scheduler holds up to 16 requests,
// queries RowBlocker for one candidate per cycle, issues the ACT if it is
// safe and the bank and rank timing allow, and completes the request 10 cycles
// later (closed-page: every request needs an ACT).
//
// Phases: (1) full-functional with the attack, (2) observe-only, (3)
// full-functional with the tFAW limit switched off so that the history buffer
// fills. Checks: no row ever gets more than NRH_CBF ACTs in any window of one
// CBF lifetime while protection is on; observe-only never blocks; the attacker
// ends with a higher RHLI than every benign thread; every mechanism below
// occurs at least once.
module blockhammer_tb;
  localparam int NB = 4, BW = 2, ROW_W = 10, NT = 4, TW = 2;
  localparam int SIZE = 128, NBL = 8, NRHC = 16, EPOCH = 1500;
  localparam int TRC = 4, TFAW = 16, TCBF = 2 * EPOCH;
  localparam int TDELAY = (TCBF - NBL * TRC + (NRHC - NBL) - 1) / (NRHC - NBL);  // ceil
  localparam int TICK = 2, DTICKS = (TDELAY + TICK - 1) / TICK;
  localparam int HBE = 96, TSW = 9, QMAX = 8, QS = 2, CW = 8;
  localparam int IW = $clog2(QMAX + 1) + 1;
  localparam int QDEPTH = 16, LAT = 10;

  logic clk = 0, rst_n = 0, observe_only = 0;
  logic [BW-1:0] q_bank = '0, act_bank = '0, req_bank = '0, done_bank = '0, rhli_bank = '0;
  logic [ROW_W-1:0] q_row = '0, act_row = '0;
  logic [TW-1:0] act_thread = '0, req_thread = '0, done_thread = '0, rhli_thread = '0;
  logic act_valid = 0, req_valid = 0, done_valid = 0;
  logic q_unsafe, q_bl, q_recent, act_bl, req_ready, epoch_clear, hb_full, hb_overflow;
  logic [IW-1:0] req_quota;
  logic [CW-1:0] rhli_count;
  logic [15:0] rhli_q8;
  logic [$clog2(HBE+1)-1:0] hb_occ;
  logic [$clog2(NBL+1)-1:0] q_count;
  logic [NB-1:0] active_b;
  int checks = 0, failures = 0;

  blockhammer #(.NUM_BANKS(NB), .ROW_W(ROW_W), .NUM_THREADS(NT), .CBF_SIZE(SIZE), .NUM_HASH(4),
                .NBL(NBL), .NRH_CBF(NRHC), .HB_ENTRIES(HBE), .HB_TS_W(TSW), .HB_TICK(TICK),
                .HB_DELAY_TICKS(DTICKS), .EPOCH_CYC(EPOCH), .AT_CNT_W(CW), .AT_QMAX(QMAX),
                .AT_QSCALE(QS)) dut (
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

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL @%0t: %s", $time, what); end
  endtask

  typedef struct { int thread; int bank; int row; } req_t;
  typedef struct { int thread; int bank; int when; } cpl_t;

  req_t queue [$];
  cpl_t cpl [$];
  int bank_last [NB];
  int act_times [$];                  // rank ACT times (tFAW)
  int row_acts [NB * 1024][$];        // protected-mode ACT times per row
  int cycle = 0, scan = 0, attack_i = 0;
  bit tfaw_on = 1;
  // mechanism counters
  int n_act = 0, n_bl_act = 0, n_unsafe = 0, n_throttled = 0, n_quota0 = 0, n_clear = 0,
      n_obs_bl = 0, n_obs_unsafe = 0, n_hbfull_block = 0, n_benign_done = 0, n_attack_act = 0,
      n_attack_act_obs = 0, worst = 0;
  int max_rhli [NT];


  // one cycle of the memory controller; inputs are set after the negedge and
  // take effect at the next posedge
  task automatic mc_cycle();
    int cand;
    req_t r;
    act_valid = 0; req_valid = 0; done_valid = 0;
    // ---- completion ----
    if (cpl.size() > 0 && cpl[0].when <= cycle) begin
      done_valid = 1; done_thread = TW'(cpl[0].thread); done_bank = BW'(cpl[0].bank);
      if (cpl[0].thread != 3) n_benign_done++;
      void'(cpl.pop_front());
    end
    // ---- admission: one thread per cycle, round robin ----
    if (queue.size() < QDEPTH) begin
      r.thread = cycle % NT;
      if (r.thread == 3) begin
        r.bank = attack_i % NB; r.row = ((attack_i / NB) % 2) ? 10'h155 : 10'h157;
      end else begin
        r.bank = $urandom_range(0, NB - 1); r.row = $urandom_range(0, 1023);
      end
      if (r.thread == 3 || $urandom_range(0, 2) == 0) begin
        req_valid = 1; req_thread = TW'(r.thread); req_bank = BW'(r.bank);
        #1;
        if (req_ready) begin
          queue.push_back(r);
          if (r.thread == 3) attack_i++;
        end else begin
          n_throttled++;
          if (req_quota == 0) n_quota0++;
        end
      end
    end
    // ---- ACT scheduling: query one timing-eligible candidate per cycle ----
    while (act_times.size() > 0 && act_times[0] <= cycle - TFAW) void'(act_times.pop_front());
    cand = -1;
    if (queue.size() > 0 && (!tfaw_on || act_times.size() < 4)) begin
      for (int k = 0; k < queue.size(); k++) begin
        int j;
        j = (scan + k) % queue.size();
        if (cycle - bank_last[queue[j].bank] >= TRC) begin cand = j; break; end
      end
    end
    if (cand >= 0) begin
      r = queue[cand];
      q_bank = BW'(r.bank); q_row = ROW_W'(r.row);
      act_bank = BW'(r.bank); act_row = ROW_W'(r.row); act_thread = TW'(r.thread);
      #1;
      if (hb_full && q_unsafe) n_hbfull_block++;
      if (observe_only) check(q_unsafe == 0, "observe-only mode blocked an ACT");
      if (q_unsafe) begin
        n_unsafe++;
        scan = cand + 1;
      end else begin
        act_valid = 1;
        n_act++;
        if (act_bl) begin n_bl_act++; if (observe_only) n_obs_bl++; end
        if (r.thread == 3) begin if (observe_only) n_attack_act_obs++; else n_attack_act++; end
        bank_last[r.bank] = cycle;
        act_times.push_back(cycle);
        cpl.push_back('{thread: r.thread, bank: r.bank, when: cycle + LAT});
        if (!observe_only) begin
          int id;
          id = r.bank * 1024 + r.row;
          row_acts[id].push_back(cycle);
          while (row_acts[id][0] <= cycle - TCBF) void'(row_acts[id].pop_front());
          if (row_acts[id].size() > worst) worst = row_acts[id].size();
          check(row_acts[id].size() <= NRHC,
                $sformatf("row %0d/%0d: %0d ACTs within one CBF lifetime", r.bank, r.row, row_acts[id].size()));
        end
        queue.delete(cand);
        scan = cand;
      end
    end
    // ---- RHLI read-out sweep ----
    rhli_thread = TW'(cycle % NT); rhli_bank = BW'((cycle / NT) % NB);
    #1;
    if (int'(rhli_count) > max_rhli[cycle % NT]) max_rhli[cycle % NT] = int'(rhli_count);
    @(posedge clk);
    cycle++;
    if (epoch_clear) n_clear++;
    @(negedge clk);
  endtask

  initial begin
    for (int b = 0; b < NB; b++) bank_last[b] = -100;
    for (int t = 0; t < NT; t++) max_rhli[t] = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    // phase 1: protected, attack present
    repeat (6000) mc_cycle();
    check(max_rhli[3] > max_rhli[0] && max_rhli[3] > max_rhli[1] && max_rhli[3] > max_rhli[2],
          $sformatf("attacker RHLI %0d not above benign %0d %0d %0d", max_rhli[3], max_rhli[0], max_rhli[1], max_rhli[2]));
    // phase 2: observe-only
    observe_only = 1;
    repeat (3000) mc_cycle();
    observe_only = 0;
    // let in-flight attacker rows age out of the history buffer, then
    // phase 3: protected, no tFAW limit: the history buffer fills
    tfaw_on = 0;
    repeat (3000) mc_cycle();
    check(hb_overflow == 0, "history buffer overflowed");
    $display("ACTs %0d, blacklisted ACTs %0d, unsafe answers %0d, throttled requests %0d (quota 0: %0d)",
             n_act, n_bl_act, n_unsafe, n_throttled, n_quota0);
    $display("epoch clears %0d, observe-only blacklisted ACTs %0d, full-buffer blocks %0d, benign completions %0d",
             n_clear, n_obs_bl, n_hbfull_block, n_benign_done);
    $display("attacker ACTs protected %0d / observe-only %0d, worst ACTs per row per lifetime %0d (limit %0d), tDelay %0d",
             n_attack_act, n_attack_act_obs, worst, NRHC, TDELAY);
    $display("max RHLI count per thread: %0d %0d %0d %0d", max_rhli[0], max_rhli[1], max_rhli[2], max_rhli[3]);
    check(n_bl_act > 0, "no ACT to a blacklisted row");
    check(n_unsafe > 0, "RowBlocker never reported unsafe");
    check(n_throttled > 0, "AttackThrottler never throttled");
    check(n_quota0 > 0, "quota never reached zero");
    check(n_clear >= 7, "too few epoch clears");
    check(n_obs_bl > 0, "observe-only mode never saw a blacklisted ACT");
    check(n_hbfull_block > 0, "history buffer never filled");
    check(n_benign_done > 0, "no benign request completed");
    check(n_attack_act_obs > n_attack_act, "observe-only did not let the attacker through faster");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
