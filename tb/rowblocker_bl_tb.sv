// rowblocker_bl_tb: D-CBF of one bank at a small size (64 counters, NBL = 6).
// Part 1 replays the single-row walk-through of the dual filter: blacklisted
// after NBL activations, still blacklisted right after a clear (the passive
// filter already counted the row), blacklisted again after a second epoch of
// hammering, and released after a quiet epoch. Part 2 drives random inserts
// and clears over many rows and checks against exact per-filter counts that
// no row that reached NBL in the active filter is ever reported clean.
module rowblocker_bl_tb;
  localparam int ROW_W = 10, SIZE = 64, NH = 4, NBL = 6, CNT_W = 3;
  logic clk = 0, rst_n = 0;
  logic clear = 0, insert = 0;
  logic [ROW_W-1:0] ins_row = '0, q_row = '0;
  logic q_bl, act_bl, active_b;
  logic [CNT_W-1:0] q_count;
  int checks = 0, failures = 0;

  rowblocker_bl #(.ROW_W(ROW_W), .CBF_SIZE(SIZE), .NUM_HASH(NH), .NBL(NBL)) dut (
    .clk(clk), .rst_n(rst_n), .clear(clear), .insert(insert), .ins_row(ins_row),
    .q_row(q_row), .q_blacklisted(q_bl), .q_count(q_count),
    .act_blacklisted(act_bl), .active_b(active_b));

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

  task automatic do_insert(input int row);
    @(negedge clk); ins_row = ROW_W'(row); insert = 1;
    @(negedge clk); insert = 0;
  endtask
  task automatic do_clear();
    @(negedge clk); clear = 1;
    @(negedge clk); clear = 0;
  endtask

  int cnt_a [1 << ROW_W];
  int cnt_b [1 << ROW_W];

  initial begin
    int r;
    r = 10'h2A5;
    repeat (2) @(posedge clk);
    rst_n = 1;
    q_row = ROW_W'(r);
    // ---- part 1: walk-through ----
    @(negedge clk);
    check(active_b == 0, "CBF A active after reset");
    check(q_bl == 0 && q_count == 0, "empty filter");
    for (int i = 1; i <= NBL; i++) begin
      do_insert(r);
      check(int'(q_count) == i, $sformatf("count %0d after %0d inserts", q_count, i));
      check(q_bl == (i >= NBL), $sformatf("blacklisted=%0b after %0d inserts", q_bl, i));
    end
    ins_row = ROW_W'(r); #1;
    check(act_bl == 1, "issue port agrees with query port");
    do_clear();
    check(active_b == 1, "CBF B active after first clear");
    check(q_bl == 1, "row stays blacklisted: passive filter had counted it");
    for (int i = 1; i <= NBL; i++) do_insert(r);
    do_clear();
    check(active_b == 0, "CBF A active again");
    check(q_bl == 1, "blacklisted again from CBF A's count in epoch 2");
    check(int'(q_count) == NBL, "CBF A holds only epoch-2 activations");
    do_clear();
    check(active_b == 1, "CBF B active");
    check(q_bl == 0 && q_count == 0, "row released after a quiet epoch");

    // ---- part 2: random traffic against exact counts ----
    do_clear(); do_clear();   // both filters empty now
    for (int i = 0; i < (1 << ROW_W); i++) begin cnt_a[i] = 0; cnt_b[i] = 0; end
    for (int cyc = 0; cyc < 4000; cyc++) begin
      int row, tr;
      @(negedge clk);
      clear = 0; insert = 0;
      q_row = ROW_W'($urandom_range(0, 31));
      #1;
      tr = active_b ? cnt_b[q_row] : cnt_a[q_row];
      check(int'(q_count) >= ((tr > 7) ? 7 : tr), $sformatf("false negative row %0d: %0d < %0d", q_row, q_count, tr));
      if (tr >= NBL) check(q_bl == 1, "row at NBL not blacklisted");
      if ($urandom_range(0, 299) == 0) begin
        clear = 1;
        for (int i = 0; i < (1 << ROW_W); i++)
          if (active_b) cnt_b[i] = 0; else cnt_a[i] = 0;
      end else if ($urandom_range(0, 1) == 1) begin
        row = $urandom_range(0, 31);
        insert = 1; ins_row = ROW_W'(row);
        cnt_a[row]++; cnt_b[row]++;
      end
    end
    @(negedge clk); clear = 0; insert = 0;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
