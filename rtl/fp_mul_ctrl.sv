// fp_mul_ctrl: sequencer for column-parallel floating point multiplication
// R = A * B.
//
// Same row layout as fp_add_ctrl (bit i of a value in row base+i; mantissa,
// exponent, sign). The sequencer issues field operations to fa_engine:
//   1. hidden bits, mantissas with hidden bit (MW = NM+1 bits)
//   2. sign = sa ^ sb; exponent = ea + eb - bias with the full adder
//   3. mantissa product by shift and add, as in the paper: two
//      "multiplication buffers" P0 / P1 hold the running partial product and
//      swap roles every multiplier bit B_i. Columns with B_i = 0 get
//      "copy & shift" (next = cur >> 1), columns with B_i = 1 get
//      "add & shift" (next = (cur + A) >> 1, the adder writing its sum one row
//      lower). The bit shifted out is the next low product bit (rows PL).
//      Both branches run, each under its own column mask, since every column
//      has its own B_i.
//   4. one-bit normalisation: if the product's top bit is set the mantissa is
//      taken one position higher and the exponent incremented
//   5. if either operand is zero (exponent 0) the result is +0
//   6. mantissa, exponent and sign are copied to R
// Rounding is truncation; denormals, infinities, NaN and exponent overflow or
// underflow are not handled (this design's choices). The shift-and-add scheme
// with two alternating buffers is the paper's; the paper's latency formula
// counts on average half the multiplier bits as additions, while here every
// bit costs both branches, so latency does not depend on the data.
//
// Interface and timing as fp_add_ctrl: start while !busy, done pulses one
// cycle after the engine finished. Scratch rows start at SCR.
module fp_mul_ctrl
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
  localparam int MW   = NM + 1;
  localparam int SW   = MW + 2;
  localparam int EW   = NE + 2;
  localparam int BIAS = 2 ** (NE - 1) - 1;

  localparam row_t HA   = SCR;
  localparam row_t HB   = row_t'(SCR + 1);
  localparam row_t OV   = row_t'(SCR + 4);
  localparam row_t SG   = row_t'(SCR + 5);
  localparam row_t ZM   = row_t'(SCR + 6);
  localparam row_t EA_X = row_t'(SCR + 8);
  localparam row_t EB_X = row_t'(EA_X + EW);
  localparam row_t E    = row_t'(EB_X + EW);
  localparam row_t MA_X = row_t'(E + EW);
  localparam row_t MB_X = row_t'(MA_X + SW);
  localparam row_t P0   = row_t'(MB_X + SW);
  localparam row_t P1   = row_t'(P0 + MW + 1);
  localparam row_t PL   = row_t'(P1 + MW + 1);
  localparam row_t RM   = row_t'(PL + MW);
  localparam row_t FIN  = (MW % 2 == 0) ? P0 : P1;

  localparam int L_S  = 19, L_E = 24;   // multiplier-bit loop, k = 0..MW-1
  localparam int LAST = 39;

  logic [5:0] pc;
  logic [5:0] k;
  row_t       ab, bb, rb;
  logic       drain;

  row_t a_exp, b_exp, a_sgn, b_sgn, cur, nxt;
  assign a_exp = row_t'(ab + NM);
  assign b_exp = row_t'(bb + NM);
  assign a_sgn = row_t'(ab + NM + NE);
  assign b_sgn = row_t'(bb + NM + NE);
  assign cur   = k[0] ? P1 : P0;
  assign nxt   = k[0] ? P0 : P1;

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
      6'd10: mop = m_copy(SG, a_sgn, 1);
      6'd11: mop = m_cell(SG, 1, s_fixed(b_sgn), s_dst_inv());
      6'd12: mop = m_copy(EA_X, a_exp, NE);
      6'd13: mop = m_setc(row_t'(EA_X + NE), 2, 0);
      6'd14: mop = m_copy(EB_X, b_exp, NE);
      6'd15: mop = m_setc(row_t'(EB_X + NE), 2, 0);
      6'd16: mop = m_add(E, EW, s_row(EA_X), s_row(EB_X), s_const(0));
      6'd17: mop = m_add(E, EW, s_row(E), s_const(32'(-BIAS)), s_const(0));
      6'd18: mop = m_setc(P0, MW + 1, 0);
      // B_i = 0: copy & shift
      6'd19: mop = m_mask_row(row_t'(MB_X + k), 1'b1);
      6'd20: mop = m_cell(nxt, MW + 1, s_const('1), s_row(cur, 1'b0, 1, MW + 1));
      6'd21: mop = m_copy(row_t'(PL + k), cur, 1);
      // B_i = 1: add & shift
      6'd22: mop = m_mask_row(row_t'(MB_X + k));
      6'd23: begin
        mop          = m_add(nxt, MW + 1, s_row(cur), s_row(MA_X), s_const(0));
        mop.use_lo   = 1'b1;
        mop.lo       = row_t'(PL + k);
        mop.use_cout = 1'b1;
        mop.cout     = row_t'(nxt + MW);
      end
      6'd24: mop = m_mask_all();
      // normalisation
      6'd25: mop = m_copy(OV, row_t'(FIN + MW - 1), 1);
      6'd26: mop = m_copy(RM, row_t'(PL + MW - 1), 1);
      6'd27: mop = m_copy(row_t'(RM + 1), FIN, NM - 1);
      6'd28: mop = m_sel(RM, OV, FIN, NM);
      6'd29: mop = m_add(E, EW, s_row(E), s_const(0), s_fixed(OV));
      // zero operand
      6'd30: mop = m_copy(ZM, HA, 1);
      6'd31: mop = m_cell(ZM, 1, s_fixed(HB, 1'b1), s_const(0));
      6'd32: mop = m_mask_row(ZM, 1'b1);
      6'd33: mop = m_setc(E, EW, 0);
      6'd34: mop = m_setc(RM, NM, 0);
      6'd35: mop = m_setc(SG, 1, 0);
      6'd36: mop = m_mask_all();
      // write back
      6'd37: mop = m_copy(rb, RM, NM);
      6'd38: mop = m_copy(row_t'(rb + NM), E, NE);
      6'd39: mop = m_copy(row_t'(rb + NM + NE), SG, 1);
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
        if (int'(pc) == L_E && int'(k) != MW - 1) begin
          pc <= 6'(L_S);
          k  <= k + 1'b1;
        end else if (int'(pc) == LAST) begin
          drain <= 1'b1;
        end else begin
          pc <= pc + 1'b1;
          if (int'(pc) == L_E) k <= '0;
        end
      end
    end
  end
endmodule
