// sot_cell_tb: exhaustive check of the SOT-MTJ write rule on a 3-cell row.
// Every combination of A, C and the stored bit is applied to each cell and
// the result is compared with the truth tables of AND (C=0: ~A & B),
// OR (C=1: A | B), XOR (C=~B: A ^ B) and copy (A=1: C).
module sot_cell_tb;
  logic [2:0] a, c, b, n;
  int checks = 0, failures = 0;

  sot_cell #(.WIDTH(3)) dut (.a(a), .c(c), .b_cur(b), .b_next(n));

  initial begin
    for (int v = 0; v < 512; v++) begin
      {a, c, b} = 9'(v);
      #1;
      for (int i = 0; i < 3; i++) begin
        logic exp;
        if (a[i] == 1'b0)      exp = b[i];
        else                   exp = c[i];
        checks++;
        if (n[i] !== exp) begin
          failures++;
          $display("FAIL a=%b c=%b b=%b got %b", a[i], c[i], b[i], n[i]);
        end
        // named functions of the paper
        if (c[i] == 1'b0) begin checks++; if (n[i] !== (~a[i] & b[i])) failures++; end
        if (c[i] == 1'b1) begin checks++; if (n[i] !== (a[i] | b[i]))  failures++; end
        if (c[i] == ~b[i]) begin checks++; if (n[i] !== (a[i] ^ b[i])) failures++; end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
