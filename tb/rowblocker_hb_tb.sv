// rowblocker_hb_tb: activation history buffer at a small size (8 entries,
// timestamp unit 2 cycles, tDelay = 5 units). A queue-based reference model of
// the FIFO (insert at tail, retire the head once older than tDelay, overwrite
// the oldest on overflow) is compared every cycle for the search result, the
// full flag, the occupancy and the overflow flag. A directed test measures how
// long a single activation is reported as recent: at least tDelay and at most
// tDelay plus two timestamp units.
module rowblocker_hb_tb;
  localparam int ENTRIES = 8, ID_W = 6, TS_W = 6, TICK = 2, D = 5;
  logic clk = 0, rst_n = 0;
  logic insert = 0;
  logic [ID_W-1:0] ins_id = '0, q_id = '0, act_id = '0;
  logic q_recent, act_recent, full, overflow;
  logic [$clog2(ENTRIES+1)-1:0] occupancy;
  int checks = 0, failures = 0;

  rowblocker_hb #(.ENTRIES(ENTRIES), .ID_W(ID_W), .TS_W(TS_W), .TICK(TICK), .DELAY_TICKS(D)) dut (
    .clk(clk), .rst_n(rst_n), .insert(insert), .ins_id(ins_id),
    .q_id(q_id), .q_recent(q_recent), .act_id(act_id), .act_recent(act_recent),
    .full(full), .overflow(overflow), .occupancy(occupancy));

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

  // ---------------- reference model ----------------
  typedef struct { int id; int ts; } ent_t;
  ent_t q [$];
  int now_ts = 0, tick = 0;
  bit m_overflow = 0;

  always @(posedge clk) if (rst_n) begin
    bit retire, mfull;
    retire = (q.size() > 0) && (((now_ts - q[0].ts) % (1 << TS_W) + (1 << TS_W)) % (1 << TS_W) > D);
    mfull  = (q.size() == ENTRIES);
    if (retire) void'(q.pop_front());
    if (insert) begin
      if (mfull && !retire) begin void'(q.pop_front()); m_overflow = 1; end
      q.push_back('{id: int'(ins_id), ts: now_ts});
    end
    if (tick == TICK - 1) begin tick = 0; now_ts = (now_ts + 1) % (1 << TS_W); end
    else tick++;
  end

  function automatic bit model_has(int id);
    foreach (q[i]) if (q[i].id == id) return 1;
    return 0;
  endfunction

  task automatic compare();
    check(q_recent == model_has(int'(q_id)), $sformatf("q_recent id %0d dut %0b model %0b", q_id, q_recent, model_has(int'(q_id))));
    check(act_recent == model_has(int'(act_id)), "act_recent");
    check(full == (q.size() == ENTRIES), "full");
    check(int'(occupancy) == q.size(), $sformatf("occupancy %0d model %0d", occupancy, q.size()));
    check(overflow == m_overflow, "overflow");
  endtask

  initial begin
    int life;
    bit saw_full = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    // ---- directed: lifetime of one activation ----
    @(negedge clk); ins_id = 6'd17; insert = 1; q_id = 6'd17;
    @(negedge clk); insert = 0;
    life = 0;
    while (q_recent && life < 100) begin compare(); @(negedge clk); life++; end
    check(life >= D * TICK, $sformatf("entry kept %0d cycles, tDelay is %0d", life, D * TICK));
    check(life <= (D + 2) * TICK, $sformatf("entry kept %0d cycles, too long", life));
    // ---- random traffic: sparse phases and bursts that overflow ----
    for (int cyc = 0; cyc < 6000; cyc++) begin
      int rate;
      rate = ((cyc / 500) % 3 == 2) ? 1 : 4;   // every third phase: back-to-back inserts
      @(negedge clk);
      insert = 0;
      q_id   = ID_W'($urandom_range(0, 15));
      act_id = ID_W'($urandom_range(0, 15));
      #1;
      compare();
      if (full) saw_full = 1;
      if ($urandom_range(1, rate) == 1) begin
        insert = 1; ins_id = ID_W'($urandom_range(0, 15));
      end
    end
    @(negedge clk); insert = 0;
    check(saw_full, "buffer never filled");
    check(overflow, "overflow never flagged");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
