// sot_cell: logic-in-write rule of a row of 1T-1R SOT-MRAM cells.
//
// In the paper's cell an SOT-MTJ only switches when the bias A (Vb on the
// read bit line) is applied; it then takes the state set by the direction C
// of the write current between WBL and SL. With A = 0 the cell keeps B. So
//   B' = A ? C : B
// which yields AND (C = 0: B' = ~A & B), OR (C = 1: B' = A | B),
// XOR (C = ~B: B' = A ^ B) and copy (A = 1: B' = C), exactly the three
// functions and the copy the paper uses. One instance covers WIDTH cells of
// one row; each column has its own A and C.
//
// Interface: a, c, b_cur in; b_next out. Purely combinational; the state is
// held by the subarray's storage, which loads b_next at the clock edge of a
// write step. Voltages and switching time are not modelled.
module sot_cell #(
  parameter int WIDTH = 1024
) (
  input  logic [WIDTH-1:0] a,
  input  logic [WIDTH-1:0] c,
  input  logic [WIDTH-1:0] b_cur,
  output logic [WIDTH-1:0] b_next
);
  always_comb begin
    for (int i = 0; i < WIDTH; i++) b_next[i] = pim_pkg::cell_rule(a[i], c[i], b_cur[i]);
  end
endmodule
