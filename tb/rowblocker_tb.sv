// rowblocker_tb: RowBlocker for a small rank (4 banks, 64-counter CBFs,
// NBL = 4, 16-entry history buffer, tDelay = 20 cycles, epoch = 600 cycles)
// driven by a behavioural scheduler that follows the RH-unsafe answer.
//  - a hammered row gets its first NBL activations at the tRC rate, then is
//    blacklisted and activated no more often than once per tDelay;
//  - other rows stay safe and are issued while the hammered row waits;
//  - the issued-ACT blacklisted flag matches the exact activation count;
//  - epoch clears come every EPOCH_CYC cycles and release a row that went quiet;
//  - observe-only mode never blocks;
//  - a full history buffer blocks every activation.
module rowblocker_tb;
  localparam int NB = 4, ROW_W = 8, SIZE = 64, NBL = 4, HBE = 16, TSW = 8, TICK = 1,
                 DT = 20, EPOCH = 600, TRC = 3;
  logic clk = 0, rst_n = 0, observe_only = 0;
  logic [1:0] q_bank = '0, act_bank = '0;
  logic [ROW_W-1:0] q_row = '0, act_row = '0;
  logic act_valid = 0;
  logic q_unsafe, q_bl, q_recent, act_bl, epoch_clear, hb_full, hb_overflow;
  logic [$clog2(NBL+1)-1:0] q_count;
  logic [NB-1:0] active_b;
  logic [$clog2(HBE+1)-1:0] hb_occ;
  int checks = 0, failures = 0;

  rowblocker #(.NUM_BANKS(NB), .ROW_W(ROW_W), .CBF_SIZE(SIZE), .NUM_HASH(4), .NBL(NBL),
               .HB_ENTRIES(HBE), .HB_TS_W(TSW), .HB_TICK(TICK), .HB_DELAY_TICKS(DT),
               .EPOCH_CYC(EPOCH)) dut (
    .clk(clk), .rst_n(rst_n), .observe_only(observe_only),
    .q_bank(q_bank), .q_row(q_row), .q_unsafe(q_unsafe), .q_blacklisted(q_bl),
    .q_recent(q_recent), .q_count(q_count),
    .act_valid(act_valid), .act_bank(act_bank), .act_row(act_row),
    .act_blacklisted(act_bl), .epoch_clear(epoch_clear), .active_b(active_b),
    .hb_full(hb_full), .hb_overflow(hb_overflow), .hb_occupancy(hb_occ));

  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL @%0t: %s", $time, what); end
  endtask

  int cycle = 0;
  int last_clear = -1, n_clears = 0;
  always @(posedge clk) if (rst_n) begin
    cycle++;
    if (epoch_clear) begin
      if (last_clear >= 0) check(cycle - last_clear >= EPOCH, "epoch shorter than EPOCH_CYC");
      last_clear = cycle; n_clears++;
    end
  end

  // issue one ACT in the current cycle (called at negedge, applied at posedge)
  task automatic issue(input int bank, input int row);
    act_valid = 1; act_bank = 2'(bank); act_row = ROW_W'(row);
    @(negedge clk);
    act_valid = 0;
  endtask

  localparam int HR = 8'h5A;        // hammered row in bank 0
  int acts_hr [$];                  // cycles of the hammered row's ACTs

  // hammer bank 0 / row HR as fast as the scheduler may for `cycles` cycles;
  // while it is unsafe, issue a safe ACT to another bank instead
  task automatic hammer(input int cycles, input bit expect_block);
    int next_ok = 0, n_other = 0, n_blocked = 0;
    for (int c = 0; c < cycles; c++) begin
      q_bank = 0; q_row = ROW_W'(HR);
      #1;
      if (!q_unsafe && cycle >= next_ok) begin
        act_bank = 0; act_row = ROW_W'(HR); #1;
        // flag for the ACT about to be issued
        check(act_bl == q_bl, "issued-ACT blacklist flag equals query answer");
        acts_hr.push_back(cycle);
        next_ok = cycle + TRC;
        issue(0, HR);
      end else begin
        if (q_unsafe) n_blocked++;
        q_bank = 1; q_row = ROW_W'(n_other * 7);
        #1;
        if (!q_unsafe && (c % TRC) == 0) begin
          issue(1, (n_other * 7) % 256); n_other++;
        end else @(negedge clk);
      end
    end
    if (expect_block) check(n_blocked > 0, "hammered row was never blocked");
    else              check(n_blocked == 0, "row blocked in observe-only mode");
    check(n_other > 0 || !expect_block, "no other ACT issued while blocked");
  endtask

  initial begin
    int gap_min, win, i0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    // ---- full-functional hammering inside the first epoch ----
    hammer(400, 1);
    check(acts_hr.size() >= NBL + 5, $sformatf("only %0d ACTs issued", acts_hr.size()));
    for (int k = 1; k < NBL; k++)
      check(acts_hr[k] - acts_hr[k-1] == TRC, "pre-blacklist ACTs not at tRC rate");
    gap_min = 1 << 30;
    for (int k = NBL + 1; k < acts_hr.size(); k++)
      if (acts_hr[k] - acts_hr[k-1] < gap_min) gap_min = acts_hr[k] - acts_hr[k-1];
    check(gap_min >= DT, $sformatf("blacklisted row re-activated after %0d cycles < tDelay %0d", gap_min, DT));
    check(gap_min <= DT + TRC + 2, $sformatf("blacklisted row held %0d cycles, much more than tDelay", gap_min));
    // ---- keep hammering across epochs; count ACTs per CBF lifetime ----
    hammer(2600, 1);
    check(n_clears >= 4, $sformatf("only %0d epoch clears", n_clears));
    win = 0;
    for (int a = 0; a < acts_hr.size(); a++) begin
      int n;
      n = 0;
      for (int b = a; b < acts_hr.size() && acts_hr[b] < acts_hr[a] + 2 * EPOCH; b++) n++;
      if (n > win) win = n;
    end
    // NBL at tRC plus one per tDelay over the rest of the lifetime, plus the
    // NBL a row may get while its counts move from one epoch to the next
    check(win <= 2 * NBL + (2 * EPOCH) / DT + 1, $sformatf("%0d ACTs in one CBF lifetime", win));
    // ---- quiet for two epochs: row released ----
    repeat (2 * EPOCH + 10) @(negedge clk);
    q_bank = 0; q_row = ROW_W'(HR); #1;
    check(q_bl == 0, "row still blacklisted after two quiet epochs");
    // ---- observe-only: blacklisting counts, nothing blocks ----
    observe_only = 1;
    acts_hr.delete();
    hammer(200, 0);
    q_bank = 0; q_row = ROW_W'(HR); #1;
    check(q_bl == 1 && q_unsafe == 0, "observe-only: blacklisted but not unsafe");
    for (int k = 1; k < acts_hr.size(); k++)
      check(acts_hr[k] - acts_hr[k-1] == TRC, "observe-only ACTs not at tRC rate");
    observe_only = 0;
    repeat (DT + 4) @(negedge clk);
    // ---- history buffer full: every ACT unsafe ----
    i0 = 0;
    for (int c = 0; c < 40; c++) begin
      q_bank = 2; q_row = ROW_W'(100 + i0); #1;
      if (hb_full) check(q_unsafe == 1, "full history buffer must block");
      if (!q_unsafe) begin issue(2, 100 + i0); i0++; end
      else @(negedge clk);
    end
    check(hb_overflow == 0, "overflow with a compliant scheduler");
    check(i0 == HBE || i0 > HBE, "buffer never filled");
    $display("blocked-gap %0d, max ACTs per lifetime %0d, clears %0d", gap_min, win, n_clears);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
