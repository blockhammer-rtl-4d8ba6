// h3_hash_tb: checks the H3 hash against the definition
// idx = ((row >> SHIFT) XOR seed) mod 2^IDX_W for random rows and seeds, at
// two shift amounts.
module h3_hash_tb;
  localparam int ROW_W = 16, IDX_W = 10;
  logic [ROW_W-1:0] row;
  logic [IDX_W-1:0] seed, idx0, idx3;
  int checks = 0, failures = 0;

  h3_hash #(.ROW_W(ROW_W), .IDX_W(IDX_W), .SHIFT(0)) u0 (.row(row), .seed(seed), .idx(idx0));
  h3_hash #(.ROW_W(ROW_W), .IDX_W(IDX_W), .SHIFT(3)) u3 (.row(row), .seed(seed), .idx(idx3));

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int unsigned r, s, e0, e3;
    for (int i = 0; i < 2000; i++) begin
      r = $urandom_range(0, (1 << ROW_W) - 1);
      s = $urandom_range(0, (1 << IDX_W) - 1);
      row = ROW_W'(r); seed = IDX_W'(s);
      #1;
      e0 = (r ^ s) % (1 << IDX_W);
      e3 = ((r / 8) ^ s) % (1 << IDX_W);
      checks += 2;
      if (idx0 != IDX_W'(e0)) begin failures++; $display("shift0 row=%h seed=%h got %h exp %h", r, s, idx0, e0); end
      if (idx3 != IDX_W'(e3)) begin failures++; $display("shift3 row=%h seed=%h got %h exp %h", r, s, idx3, e3); end
    end
    // a changed seed moves every row to a different index
    row = 16'h1234; seed = 10'h000; #1; e0 = 32'(idx0);
    seed = 10'h155; #1; checks++;
    if (32'(idx0) == e0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
