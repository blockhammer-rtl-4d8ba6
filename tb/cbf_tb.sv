// cbf_tb: random inserts, tests and clears of a small counting Bloom filter
// (64 counters of 4 bits, four hashes), compared every cycle with a reference
// counter array indexed by the hash definition ((row >> 2h) XOR seed_h).
// Also checks that the test result never falls below the true insert count
// of the row (no false negatives) and that counters saturate.
module cbf_tb;
  localparam int SIZE = 64, IDX_W = 6, CNT_W = 4, NH = 4, ROW_W = 10;
  logic clk = 0, rst_n = 0;
  logic clear, insert;
  logic [ROW_W-1:0] ins_row, ra, rb;
  logic [NH-1:0][IDX_W-1:0] seeds;
  logic [CNT_W-1:0] min_a, min_b;
  int checks = 0, failures = 0;

  cbf #(.SIZE(SIZE), .IDX_W(IDX_W), .CNT_W(CNT_W), .NUM_HASH(NH), .ROW_W(ROW_W)) dut (
    .clk(clk), .rst_n(rst_n), .clear(clear), .insert(insert), .ins_row(ins_row),
    .seeds(seeds), .test_row_a(ra), .test_min_a(min_a), .test_row_b(rb), .test_min_b(min_b));

  always #5 clk = ~clk;

  int model [SIZE];
  int truecnt [1 << ROW_W];

  function automatic int hidx(int row, int h);
    return ((row >> (2 * h)) ^ int'(seeds[h])) % SIZE;
  endfunction
  function automatic int model_min(int row);
    int m = 1 << 30;
    for (int h = 0; h < NH; h++) if (model[hidx(row, h)] < m) m = model[hidx(row, h)];
    return m;
  endfunction

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int rows [8];
    bit seen_sat = 0;
    foreach (rows[i]) rows[i] = $urandom_range(0, (1 << ROW_W) - 1);
    for (int i = 0; i < SIZE; i++) model[i] = 0;
    for (int i = 0; i < (1 << ROW_W); i++) truecnt[i] = 0;
    clear = 0; insert = 0; ins_row = '0; ra = '0; rb = '0;
    for (int h = 0; h < NH; h++) seeds[h] = IDX_W'($urandom);
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int cyc = 0; cyc < 3000; cyc++) begin
      @(negedge clk);
      // compare both test ports with the model
      ra = ROW_W'(rows[$urandom_range(0, 7)]);
      rb = ROW_W'($urandom_range(0, 1) ? rows[$urandom_range(0, 7)] : $urandom_range(0, 1023));
      #1;
      checks += 2;
      if (int'(min_a) != model_min(int'(ra))) begin
        failures++; $display("cyc %0d row %0d min_a %0d exp %0d", cyc, ra, min_a, model_min(int'(ra)));
      end
      if (int'(min_b) != model_min(int'(rb))) begin
        failures++; $display("cyc %0d row %0d min_b %0d exp %0d", cyc, rb, min_b, model_min(int'(rb)));
      end
      checks++;
      if (int'(min_a) < ((truecnt[ra] > 15) ? 15 : truecnt[ra])) begin
        failures++; $display("false negative row %0d", ra);
      end
      if (min_a == '1) seen_sat = 1;
      // next operation
      clear  = ($urandom_range(0, 199) == 0);
      insert = !clear && ($urandom_range(0, 2) != 0);
      ins_row = ROW_W'(rows[$urandom_range(0, 7)]);
      @(posedge clk);
      #1;
      if (clear) begin
        for (int i = 0; i < SIZE; i++) model[i] = 0;
        for (int i = 0; i < (1 << ROW_W); i++) truecnt[i] = 0;
        for (int h = 0; h < NH; h++) seeds[h] = IDX_W'($urandom);
      end else if (insert) begin
        int idxs [NH];
        for (int h = 0; h < NH; h++) idxs[h] = hidx(int'(ins_row), h);
        for (int i = 0; i < SIZE; i++) begin
          bit hit;
          hit = 0;
          for (int h = 0; h < NH; h++) if (idxs[h] == i) hit = 1;
          if (hit && model[i] < 15) model[i]++;
        end
        truecnt[ins_row]++;
      end
      clear = 0; insert = 0;
    end
    checks++;
    if (!seen_sat) begin failures++; $display("saturation never reached"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
