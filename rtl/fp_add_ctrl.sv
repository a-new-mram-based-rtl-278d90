// fp_add_ctrl: sequencer for column-parallel floating point addition R = A + B.
//
// Every column holds its own A, B and R (IEEE-style layout, bit i of a value in
// row base+i: mantissa rows 0..NM-1, exponent NM..NM+NE-1, sign NM+NE). The
// sequencer issues field operations to fa_engine, so all columns add at once:
//   1. hidden bits (OR of the exponent bits), mantissas with hidden bit
//   2. exponent difference exp' = ea - eb with the full adder; its sign
//      selects the result exponent max(ea, eb). The operand with the larger
//      exponent is placed unshifted (ALA or ALB), the other starts at 0
//   3. alignment by search, as in the paper: for k = -MW .. +MW (MW = NM+1)
//      the columns whose exp' equals k are found with one search and get the
//      smaller-exponent mantissa shifted right by |k| in one shifted copy, so
//      all columns needing the same shift are aligned together; a difference
//      beyond MW leaves that operand 0
//   4. S = ALA + ALB, or ALA - ALB when the signs differ (XOR with the sign
//      row and carry in); a negative S is negated and the sign of A flipped
//   5. normalisation: one right shift on carry out (exponent + 1), then NM+1
//      passes of "shift left by one where the hidden position is 0"
//      (exponent - 1 in those columns), then zero results get exponent 0
//   6. mantissa, exponent and sign are copied to R (R may equal B)
// Rounding is truncation; denormals, infinities, NaN and exponent overflow are
// not handled, and an exponent of 0 means the value zero (this design's
// choices). The search-based alignment with a flexible shift amount over a
// signed difference is the paper's; it counts 2(Nm+2) searches, this
// sequencer does 2(Nm+1)+1 (k = -(Nm+1) .. Nm+1). Normalisation is not
// described in the paper and is this design's own.
//
// Interface: start (one cycle, with a_base/b_base/r_base) while !busy; done
// pulses one cycle after the engine has finished the last step. Scratch rows
// start at SCR.
module fp_add_ctrl
  import pim_pkg::*;
#(
  parameter int   NM  = 23,
  parameter int   NE  = 8,
  parameter row_t SCR = 10'd256
) (
  input  logic clk,
  input  logic rst_n,
  input  logic start,
  input  row_t a_base,
  input  row_t b_base,
  input  row_t r_base,
  output logic busy,
  output logic done,
  output mop_t mop,
  output logic mop_valid,
  input  logic mop_ready
);
  localparam int MW = NM + 1;   // mantissa with hidden bit
  localparam int SW = MW + 2;   // sum field: carry and sign on top
  localparam int EW = NE + 2;   // signed exponent work field

  localparam row_t HA    = SCR;
  localparam row_t HB    = row_t'(SCR + 1);
  localparam row_t ES    = row_t'(SCR + 2);
  localparam row_t NEG   = row_t'(SCR + 3);
  localparam row_t SG    = row_t'(SCR + 5);
  localparam row_t EA_X  = row_t'(SCR + 8);
  localparam row_t EB_X  = row_t'(EA_X + EW);
  localparam row_t D1    = row_t'(EB_X + EW);
  localparam row_t E     = row_t'(D1 + EW);
  localparam row_t MA_X  = row_t'(E + EW);
  localparam row_t MB_X  = row_t'(MA_X + SW);
  localparam row_t ALA   = row_t'(MB_X + SW);
  localparam row_t ALB   = row_t'(ALA + SW);
  localparam row_t S     = row_t'(ALB + SW);
  localparam row_t DN    = row_t'(D1 + EW - 1);

  // Program counter values of the two loops and the end.
  localparam int L1_S = 21, L1_E = 23;   // alignment search loop, k = 0..2*MW
  localparam int L2_S = 37, L2_E = 40;   // left-normalisation loop, k = 0..MW-1
  localparam int LAST = 47;

  logic [5:0] pc;
  logic [5:0] k;
  row_t       ab, bb, rb;
  logic       drain;

  row_t a_exp, b_exp, a_sgn, b_sgn;
  int   kk;                       // signed shift of the search loop
  assign kk = int'(k) - MW;
  assign a_exp = row_t'(ab + NM);
  assign b_exp = row_t'(bb + NM);
  assign a_sgn = row_t'(ab + NM + NE);
  assign b_sgn = row_t'(bb + NM + NE);

  always_comb begin
    mop = m_mask_all();
    unique case (pc)
      6'd0:  mop = m_setc(HA, 1, 0);
      6'd1:  mop = m_cell(HA, NE, s_row(a_exp), s_const('1), 1'b1);
      6'd2:  mop = m_setc(HB, 1, 0);
      6'd3:  mop = m_cell(HB, NE, s_row(b_exp), s_const('1), 1'b1);
      6'd4:  mop = m_copy(MA_X, ab, NM);
      6'd5:  mop = m_copy(row_t'(MA_X + NM), HA, 1);
      6'd6:  mop = m_setc(row_t'(MA_X + MW), 2, 0);
      6'd7:  mop = m_copy(MB_X, bb, NM);
      6'd8:  mop = m_copy(row_t'(MB_X + NM), HB, 1);
      6'd9:  mop = m_setc(row_t'(MB_X + MW), 2, 0);
      6'd10: mop = m_copy(EA_X, a_exp, NE);
      6'd11: mop = m_setc(row_t'(EA_X + NE), 2, 0);
      6'd12: mop = m_copy(EB_X, b_exp, NE);
      6'd13: mop = m_setc(row_t'(EB_X + NE), 2, 0);
      // exp' = ea - eb; result exponent = max(ea, eb)
      6'd14: mop = m_add(D1, EW, s_row(EA_X), s_row(EB_X, 1'b1), s_const(1));
      6'd15: mop = m_copy(E, EA_X, EW);
      6'd16: mop = m_sel(E, DN, EB_X, EW);
      // unshifted operand: the one with the larger exponent; the other is 0
      6'd17: mop = m_setc(ALA, SW, 0);
      6'd18: mop = m_cell(ALA, MW, s_fixed(DN, 1'b1), s_row(MA_X));
      6'd19: mop = m_setc(ALB, SW, 0);
      6'd20: mop = m_sel(ALB, DN, MB_X, MW);
      // alignment: search exp' == k for k = -MW .. +MW, shifted copy of the
      // operand with the smaller exponent in the matching columns
      6'd21: mop = m_search(D1, EW, kk);
      6'd22: mop = (kk < 0) ? m_cell(ALA, MW, s_const('1), s_row(MA_X, 1'b0, -kk, MW))
                            : m_cell(ALB, MW, s_const('1), s_row(MB_X, 1'b0, kk, MW));
      6'd23: mop = m_mask_all();
      // signed mantissa addition: S = ALA +/- ALB
      6'd24: mop = m_copy(ES, a_sgn, 1);
      6'd25: mop = m_cell(ES, 1, s_fixed(b_sgn), s_dst_inv());
      6'd26: mop = m_xor1(ALB, ES, SW);
      6'd27: mop = m_add(S, SW, s_row(ALA), s_row(ALB), s_fixed(ES));
      6'd28: mop = m_copy(NEG, row_t'(S + SW - 1), 1);
      6'd29: mop = m_xor1(S, NEG, SW);
      6'd30: mop = m_add(S, SW, s_row(S), s_const(0), s_fixed(NEG));
      6'd31: mop = m_copy(SG, a_sgn, 1);
      6'd32: mop = m_xor1(SG, NEG, 1);
      // carry out: shift right by one, exponent + 1
      6'd33: mop = m_mask_row(row_t'(S + MW));
      6'd34: mop = m_cell(S, MW + 1, s_const('1), s_row(S, 1'b0, 1, MW + 1));
      6'd35: mop = m_add(E, EW, s_row(E), s_const(0), s_const(1));
      6'd36: mop = m_mask_all();
      // leading zeros: shift left by one, exponent - 1
      6'd37: mop = m_mask_row(row_t'(S + MW - 1), 1'b1);
      6'd38: mop = m_cell(S, MW, s_const('1), s_row(S, 1'b0, -1, MW), 1'b0, 1'b1);
      6'd39: mop = m_add(E, EW, s_row(E), s_const('1), s_const(0));
      6'd40: mop = m_mask_all();
      // zero result
      6'd41: mop = m_mask_row(row_t'(S + MW - 1), 1'b1);
      6'd42: mop = m_setc(E, EW, 0);
      6'd43: mop = m_setc(SG, 1, 0);
      6'd44: mop = m_mask_all();
      // write back
      6'd45: mop = m_copy(rb, S, NM);
      6'd46: mop = m_copy(row_t'(rb + NM), E, NE);
      6'd47: mop = m_copy(row_t'(rb + NM + NE), SG, 1);
      default: mop = m_mask_all();
    endcase
  end

  assign mop_valid = busy && !drain;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy  <= 1'b0;
      drain <= 1'b0;
      done  <= 1'b0;
      pc    <= '0;
      k     <= '0;
      ab    <= '0;
      bb    <= '0;
      rb    <= '0;
    end else begin
      done <= 1'b0;
      if (!busy) begin
        if (start) begin
          busy <= 1'b1;
          pc   <= '0;
          k    <= '0;
          ab   <= a_base;
          bb   <= b_base;
          rb   <= r_base;
        end
      end else if (drain) begin
        if (mop_ready) begin
          drain <= 1'b0;
          busy  <= 1'b0;
          done  <= 1'b1;
        end
      end else if (mop_ready) begin
        if (int'(pc) == L1_E && int'(k) != 2 * MW) begin
          pc <= 6'(L1_S);
          k  <= k + 1'b1;
        end else if (int'(pc) == L2_E && int'(k) != MW - 1) begin
          pc <= 6'(L2_S);
          k  <= k + 1'b1;
        end else if (int'(pc) == LAST) begin
          drain <= 1'b1;
        end else begin
          pc <= pc + 1'b1;
          if (int'(pc) == L1_E || int'(pc) == L2_E) k <= '0;
        end
      end
    end
  end
endmodule
