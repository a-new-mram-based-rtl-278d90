// exp_search_tb: random stored exponent differences in 64 columns are searched
// with random keys (and keys taken from a column, so matches occur) over all
// row counts; the match vector is compared with a per-column compare.
module exp_search_tb;
  localparam int C = 64, NB = 10;
  logic [C-1:0]  stored [NB];
  logic [3:0]    nbits;
  logic [NB-1:0] key;
  logic [C-1:0]  match;
  int checks = 0, failures = 0, hits = 0;

  exp_search #(.COLS(C), .NBITS(NB)) dut (.stored(stored), .nbits(nbits), .key(key), .match(match));

  initial begin
    for (int t = 0; t < 400; t++) begin
      logic [NB-1:0] val [C];
      for (int c = 0; c < C; c++) val[c] = NB'($urandom_range(7));   // few values
      for (int i = 0; i < NB; i++)
        for (int c = 0; c < C; c++) stored[i][c] = val[c][i];
      nbits = 4'($urandom_range(NB, 1));
      key   = (t % 2 == 0) ? val[$urandom_range(C - 1)] : NB'($urandom);
      #1;
      for (int c = 0; c < C; c++) begin
        logic [NB-1:0] m;
        logic          e;
        m = '0;
        for (int i = 0; i < NB; i++) if (i < int'(nbits)) m[i] = 1'b1;
        e = ((val[c] & m) == (key & m));
        checks++;
        if (e) hits++;
        if (match[c] !== e) begin
          failures++;
          if (failures < 10) $display("FAIL t=%0d col %0d", t, c);
        end
      end
    end
    checks++;
    if (hits == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
