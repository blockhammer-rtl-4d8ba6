// rowblocker_bl: RowBlocker-BL, the per-bank blacklist built from a dual
// counting Bloom filter (D-CBF).
//
// Two CBFs (A and B) see every activation of the bank: each ACT is inserted
// into both. At any time one of them is "active" and alone answers whether a
// row is blacklisted: a row is blacklisted when its estimated activation count
// in the active CBF has reached NBL. On `clear` (once per epoch) the active
// CBF is zeroed, its hash seeds are replaced by fresh pseudo-random values and
// the two CBFs swap roles, so the newly active filter already holds the
// activations of the previous epoch. Each CBF therefore covers two epochs and
// a row with more than NBL activations in a rolling window is never missed.
//
// Interface: `q_row` is the scheduler's candidate ACT and `ins_row` the ACT
// being issued this cycle (its blacklisted status, before this ACT is counted,
// is `act_blacklisted`); both answers are combinational. `insert` and `clear`
// act at the next edge. The owner must not raise `clear` and `insert` in the
// same cycle (RowBlocker defers a clear by one cycle when an ACT is issued).
//
// Follows the source design: insertion into both filters, test from the active
// one, clear-and-swap, reseeding on clear. Own choices: LFSR seed source, reset
// state (both filters empty, A active), blacklisted means count >= NBL.
module rowblocker_bl #(
  parameter int ROW_W    = bh_pkg::ROW_W,
  parameter int CBF_SIZE = bh_pkg::CBF_SIZE,
  parameter int IDX_W    = $clog2(CBF_SIZE),
  parameter int NUM_HASH = bh_pkg::NUM_HASH,
  parameter int NBL      = bh_pkg::NBL,
  parameter int CNT_W    = $clog2(NBL + 1),
  parameter logic [63:0] SEED_INIT = 64'h9E37_79B9_7F4A_7C15
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             clear,
  input  logic             insert,
  input  logic [ROW_W-1:0] ins_row,
  input  logic [ROW_W-1:0] q_row,
  output logic             q_blacklisted,
  output logic [CNT_W-1:0] q_count,
  output logic             act_blacklisted,
  output logic             active_b        // 0: CBF A active, 1: CBF B active
);
  localparam int SEED_BITS = NUM_HASH * IDX_W;

  logic [NUM_HASH-1:0][IDX_W-1:0] seeds_a, seeds_b;
  logic [CNT_W-1:0] min_qa, min_qb, min_ia, min_ib;
  logic [63:0] rnd;

  lfsr #(.INIT(SEED_INIT)) u_rng (.clk(clk), .rst_n(rst_n), .value(rnd));

  cbf #(.SIZE(CBF_SIZE), .IDX_W(IDX_W), .CNT_W(CNT_W), .NUM_HASH(NUM_HASH),
        .ROW_W(ROW_W)) u_cbf_a (
    .clk(clk), .rst_n(rst_n), .clear(clear && !active_b), .insert(insert),
    .ins_row(ins_row), .seeds(seeds_a),
    .test_row_a(q_row), .test_min_a(min_qa),
    .test_row_b(ins_row), .test_min_b(min_ia));

  cbf #(.SIZE(CBF_SIZE), .IDX_W(IDX_W), .CNT_W(CNT_W), .NUM_HASH(NUM_HASH),
        .ROW_W(ROW_W)) u_cbf_b (
    .clk(clk), .rst_n(rst_n), .clear(clear && active_b), .insert(insert),
    .ins_row(ins_row), .seeds(seeds_b),
    .test_row_a(q_row), .test_min_a(min_qb),
    .test_row_b(ins_row), .test_min_b(min_ib));

  assign q_count         = active_b ? min_qb : min_qa;
  assign q_blacklisted   = q_count >= CNT_W'(NBL);
  assign act_blacklisted = (active_b ? min_ib : min_ia) >= CNT_W'(NBL);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      active_b <= 1'b0;
      seeds_a  <= SEED_INIT[SEED_BITS-1:0];
      seeds_b  <= ~SEED_INIT[SEED_BITS-1:0];
    end else if (clear) begin
      active_b <= !active_b;
      if (active_b) seeds_b <= rnd[SEED_BITS-1:0];
      else          seeds_a <= rnd[SEED_BITS-1:0];
    end
  end

  initial assert (SEED_BITS <= 64) else $error("rowblocker_bl: seeds wider than the LFSR");

  a_no_clear_with_insert: assert property (@(posedge clk) disable iff (!rst_n)
    !(clear && insert));
endmodule
