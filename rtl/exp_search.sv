// exp_search: column-parallel search of a stored exponent difference.
//
// Each column stores exp' (the difference of two operands' exponents) in
// NBITS rows. The search drives a key onto the rows (IN on the cell that holds
// the bit, ~IN on the cell that holds its complement, as in the paper's search
// cell pair); a column whose bits all equal the key keeps a low current and is
// reported as a match. Only the first `nbits` rows take part.
//
// Interface: stored[i][c] is bit i of column c; key bit i is compared with
// row i. match is combinational; the subarray registers it into its mask. The
// current-sensing is abstracted to an exact compare (this design's choice).
module exp_search #(
  parameter int COLS  = 1024,
  parameter int NBITS = 10
) (
  input  logic [COLS-1:0]                stored [NBITS],
  input  logic [$clog2(NBITS+1)-1:0]     nbits,
  input  logic [NBITS-1:0]               key,
  output logic [COLS-1:0]                match
);
  always_comb begin
    match = '1;
    for (int i = 0; i < NBITS; i++) begin
      if (i < int'(nbits)) match &= ~(stored[i] ^ {COLS{key[i]}});
    end
  end
endmodule
