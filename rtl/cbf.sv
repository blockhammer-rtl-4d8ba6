// cbf: counting Bloom filter over DRAM row addresses.
//
// SIZE saturating counters of CNT_W bits, indexed by NUM_HASH H3 hash
// functions of the row address. Insert increments every counter the hashes of
// the row select (each selected counter once, saturating at all ones). Test
// returns the minimum of those counters: an upper bound on how often the row
// was inserted since the last clear, never below the true count. Clear zeroes
// every counter in one cycle and has priority over a simultaneous insert.
//
// Interface: two combinational test ports (a and b) so that the scheduler's
// query and the activation being issued can be tested in the same cycle;
// insert and clear take effect at the next clock edge. The hash seeds are
// inputs, held by the owner of the filter.
//
// Follows the source design: 1K counters, four H3 hashes, min-of-counters test,
// saturating counters that are never decremented. Own choices: counter width
// (smallest that holds NBL), hash shift amounts 0, 2, 4, 6, a plain array with
// NUM_HASH write ports (an SRAM macro, banked per hash, would be used in
// silicon), single-cycle clear.
module cbf #(
  parameter int SIZE     = bh_pkg::CBF_SIZE,
  parameter int IDX_W    = $clog2(SIZE),
  parameter int CNT_W    = bh_pkg::CBF_CNT_W,
  parameter int NUM_HASH = bh_pkg::NUM_HASH,
  parameter int ROW_W    = bh_pkg::ROW_W,
  parameter int SHIFT_STEP = 2
) (
  input  logic                          clk,
  input  logic                          rst_n,
  input  logic                          clear,
  input  logic                          insert,
  input  logic [ROW_W-1:0]              ins_row,
  input  logic [NUM_HASH-1:0][IDX_W-1:0] seeds,
  input  logic [ROW_W-1:0]              test_row_a,
  output logic [CNT_W-1:0]              test_min_a,
  input  logic [ROW_W-1:0]              test_row_b,
  output logic [CNT_W-1:0]              test_min_b
);
  logic [CNT_W-1:0] cnt [SIZE];

  logic [NUM_HASH-1:0][IDX_W-1:0] idx_ins, idx_a, idx_b;

  for (genvar h = 0; h < NUM_HASH; h++) begin : g_hash
    h3_hash #(.ROW_W(ROW_W), .IDX_W(IDX_W), .SHIFT(h * SHIFT_STEP)) u_ins (
      .row(ins_row), .seed(seeds[h]), .idx(idx_ins[h]));
    h3_hash #(.ROW_W(ROW_W), .IDX_W(IDX_W), .SHIFT(h * SHIFT_STEP)) u_a (
      .row(test_row_a), .seed(seeds[h]), .idx(idx_a[h]));
    h3_hash #(.ROW_W(ROW_W), .IDX_W(IDX_W), .SHIFT(h * SHIFT_STEP)) u_b (
      .row(test_row_b), .seed(seeds[h]), .idx(idx_b[h]));
  end

  always_comb begin
    test_min_a = '1;
    test_min_b = '1;
    for (int h = 0; h < NUM_HASH; h++) begin
      if (cnt[idx_a[h]] < test_min_a) test_min_a = cnt[idx_a[h]];
      if (cnt[idx_b[h]] < test_min_b) test_min_b = cnt[idx_b[h]];
    end
  end

  // counter array written like a memory: up to NUM_HASH counters are
  // incremented per insert. Every write takes its value from the counter's old
  // contents, so two hashes that select the same counter increment it once.
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < SIZE; i++) cnt[i] <= '0;
    end else if (clear) begin
      for (int i = 0; i < SIZE; i++) cnt[i] <= '0;
    end else if (insert) begin
      for (int h = 0; h < NUM_HASH; h++)
        if (cnt[idx_ins[h]] != '1) cnt[idx_ins[h]] <= cnt[idx_ins[h]] + 1'b1;
    end
  end
endmodule
