// rowblocker_hb: RowBlocker-HB, the per-rank row activation history buffer.
//
// A circular FIFO of {row ID, timestamp, valid} entries holding every row
// activation of the rank issued within the last tDelay. Every issued ACT is
// written at the tail with the current timestamp. Every cycle the entry at the
// head (the oldest) is checked; once it is older than tDelay its valid bit is
// cleared and the head advances. A search compares the searched row ID with
// every valid entry in parallel (a CAM) and reports "recently activated" on
// any match.
//
// Timestamps count in units of TICK cycles and are TS_W bits wide, so that an
// entry is 32 bits at the default sizes. An entry is retired when its age in
// ticks exceeds DELAY_TICKS = ceil(tDelay / TICK): it is therefore kept at
// least tDelay cycles and at most tDelay + 2*TICK cycles (errs on the safe
// side). Retirement is one entry per cycle; that suffices because at most one
// entry is inserted per cycle.
//
// Interface: two combinational search ports (scheduler query, issued ACT);
// `insert` acts at the next edge. `full` tells that the buffer has no free
// entry; RowBlocker then treats every ACT as unsafe. If an insert arrives
// while full, the oldest entry is overwritten and the sticky `overflow` flag
// is set. The buffer is sized for the worst case (4 ACTs per tFAW), so with a
// JEDEC-compliant scheduler neither happens.
//
// Follows the source design: circular queue with head/tail pointers, entry
// format, head checked every cycle, parallel lookup, size 887. Own choices:
// the timestamp unit, full/overflow handling, reset (buffer empty).
module rowblocker_hb #(
  parameter int ENTRIES     = bh_pkg::HB_ENTRIES,
  parameter int ID_W        = $clog2(bh_pkg::NUM_BANKS) + bh_pkg::ROW_W,
  parameter int TS_W        = bh_pkg::HB_TS_W,
  parameter int TICK        = bh_pkg::HB_TICK,
  parameter int DELAY_TICKS = bh_pkg::HB_DELAY_TICKS
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic            insert,
  input  logic [ID_W-1:0] ins_id,
  input  logic [ID_W-1:0] q_id,
  output logic            q_recent,
  input  logic [ID_W-1:0] act_id,
  output logic            act_recent,
  output logic            full,
  output logic            overflow,
  output logic [$clog2(ENTRIES+1)-1:0] occupancy
);
  localparam int PTR_W  = (ENTRIES > 1) ? $clog2(ENTRIES) : 1;
  localparam int TICK_W = (TICK > 1) ? $clog2(TICK) : 1;

  typedef struct packed {
    logic [ID_W-1:0] id;
    logic [TS_W-1:0] ts;
  } hb_entry_t;

  hb_entry_t          mem   [ENTRIES];
  logic [ENTRIES-1:0] valid;
  logic [PTR_W-1:0]   head, tail;
  logic [$clog2(ENTRIES+1)-1:0] count;
  logic [TS_W-1:0]    now_ts;
  logic [TICK_W-1:0]  tick_cnt;

  logic [TS_W-1:0] head_age;
  logic            retire, push_over;

  function automatic logic [PTR_W-1:0] next_ptr(input logic [PTR_W-1:0] p);
    return (p == PTR_W'(ENTRIES - 1)) ? '0 : p + 1'b1;
  endfunction

  assign head_age  = now_ts - mem[head].ts;
  assign retire    = valid[head] && (head_age > TS_W'(DELAY_TICKS));
  assign full      = (count == ($bits(count))'(ENTRIES));
  assign push_over = insert && full && !retire;   // overwrite the oldest entry
  assign occupancy = count;

  always_comb begin
    q_recent   = 1'b0;
    act_recent = 1'b0;
    for (int i = 0; i < ENTRIES; i++) begin
      if (valid[i] && mem[i].id == q_id)   q_recent   = 1'b1;
      if (valid[i] && mem[i].id == act_id) act_recent = 1'b1;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      now_ts   <= '0;
      tick_cnt <= '0;
    end else if (tick_cnt == TICK_W'(TICK - 1)) begin
      tick_cnt <= '0;
      now_ts   <= now_ts + 1'b1;
    end else begin
      tick_cnt <= tick_cnt + 1'b1;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      valid    <= '0;
      head     <= '0;
      tail     <= '0;
      count    <= '0;
      overflow <= 1'b0;
      for (int i = 0; i < ENTRIES; i++) mem[i] <= '0;
    end else begin
      if (retire) valid[head] <= 1'b0;
      if (retire || push_over) head <= next_ptr(head);
      if (insert) begin
        mem[tail]   <= '{id: ins_id, ts: now_ts};
        valid[tail] <= 1'b1;
        tail        <= next_ptr(tail);
      end
      if (push_over) overflow <= 1'b1;
      if (insert && !retire && !full) count <= count + 1'b1;
      else if (retire && !insert)     count <= count - 1'b1;
    end
  end

  // an entry must be retired before its age wraps around; retirement can lag
  // by at most ENTRIES cycles behind expiry
  initial assert (DELAY_TICKS + ENTRIES / TICK + 2 < (1 << TS_W))
    else $error("rowblocker_hb: timestamp too narrow for tDelay");
endmodule
