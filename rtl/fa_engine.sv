// fa_engine: bit-serial vector engine that drives the SOT-MRAM subarray.
//
// It accepts one field operation (pim_pkg::mop_t) at a time and expands it,
// bit by bit, into subarray commands, one per clock:
//   MOP_CELL   : for j = 0..n-1 (or n-1..0 when desc) write dst+j with
//                A = a[j], C = c[j]; NOPS bits share one step (all their
//                sources are read before any is written, so in-place shifts
//                in either direction stay correct). With dst_fixed every bit
//                writes row dst, one bit per step (an accumulation). This
//                gives copy, shifted copy, select-by-row, XOR and constants.
//   MOP_ADD    : n-bit addition dst = a + c + z, 4 steps per bit, following
//                the paper's full adder (X = a[j], Y = c[j], Z = carry):
//                  step 1  cache X, Y (and Z for bit 0); for later bits save
//                          the carry held in the Z cache cell into row ZS
//                  step 2  CX <- XY     (A = ~Y, C = 0)
//                          CY <- X^Y    (A = X,  C = ~Y)
//                  step 3  CZ <- Z(X^Y) (A = ~(X^Y), C = 0)
//                          S_j <- X^Y   (copy)
//                  step 4  S_j <- X^Y^Z (A = Z, C = ~(X^Y))
//                          CZ <- XY + Z(X^Y)  (A = XY, C = 1)  = carry out
//                X and Y are only read, so operands survive; CX, CY, CZ are
//                the "MRAM cache" cells, reused for every bit. With use_lo the
//                sum is written shifted down by one row (bit 0 to row lo),
//                which the multiplier uses for its add & shift. With use_cout
//                one more step copies the final carry to row cout.
//   MOP_SEARCH, MOP_MASK_ROW, MOP_MASK_ALL : one command each.
// Every step is applied only in the columns enabled by the subarray mask.
//
// Handshake: mop is taken when mop_valid && mop_ready; mop_ready is high when
// idle. Latency: 1 cycle to take the operation, then ceil(n/NOPS) cycles
// (CELL; n with dst_fixed), 4n (+1 with use_cout) cycles (ADD), or 1 cycle
// (search, mask).
// stat_steps / stat_searches count issued compute steps and searches.
// The four full-adder steps are the paper's; the field-operation set, the
// carry save into ZS and the scratch-row positions are this design's choices.
module fa_engine
  import pim_pkg::*;
#(
  parameter row_t ROW_CX = 10'd1020,
  parameter row_t ROW_CY = 10'd1021,
  parameter row_t ROW_CZ = 10'd1022,
  parameter row_t ROW_ZS = 10'd1023
) (
  input  logic        clk,
  input  logic        rst_n,
  input  mop_t        mop,
  input  logic        mop_valid,
  output logic        mop_ready,
  output sa_cmd_t     sa_cmd,
  output logic [31:0] stat_steps,
  output logic [31:0] stat_searches
);
  mop_t           m;
  logic           busy;
  logic [N_W-1:0] j;
  logic [1:0]     ph;
  logic           cph;     // carry-out copy step

  assign mop_ready = !busy;

  // Bit index in walk order.
  logic [N_W-1:0] bj;
  assign bj = m.desc ? N_W'(m.n - 6'd1 - j) : j;

  function automatic sa_src_t conv(input mop_src_t s, input logic [N_W-1:0] b, input row_t dstrow);
    sa_src_t r = '0;
    int idx;
    r.inv = s.inv;
    unique case (s.kind)
      K_CONST: r.cval = s.cval[b[4:0]];
      K_ROW: begin
        idx = int'(b) + int'(s.shift);
        if (idx < 0 || idx >= int'(s.limit)) r.cval = 1'b0;
        else begin
          r.is_row = 1'b1;
          r.row    = row_t'(int'(s.base) + idx);
        end
      end
      K_FIXED: begin r.is_row = 1'b1; r.row = s.base; end
      K_DST:   begin r.is_row = 1'b1; r.row = dstrow; end
    endcase
    return r;
  endfunction

  function automatic sa_src_t k1();       // constant 1
    sa_src_t r = '0;
    r.cval = 1'b1;
    return r;
  endfunction

  function automatic sa_src_t k0();       // constant 0
    return '0;
  endfunction

  function automatic sa_src_t rr(input row_t row, input logic inv = 1'b0);
    sa_src_t r = '0;
    r.is_row = 1'b1;
    r.row    = row;
    r.inv    = inv;
    return r;
  endfunction

  function automatic sa_src_t neg(input sa_src_t s);
    sa_src_t r = s;
    r.inv = ~s.inv;
    return r;
  endfunction

  function automatic sa_op_t op(input row_t dst, input sa_src_t a, input sa_src_t c);
    sa_op_t o;
    o.en  = 1'b1;
    o.dst = dst;
    o.a   = a;
    o.c   = c;
    return o;
  endfunction

  // CELL: bits handled in this step (NOPS at a time unless dst_fixed).
  logic [N_W-1:0] remain, cell_cnt;
  logic [N_W-1:0] bjk      [NOPS];
  row_t           cell_dst [NOPS];
  assign remain   = N_W'(m.n - j);
  assign cell_cnt = (m.dst_fixed || remain < N_W'(NOPS)) ? (m.dst_fixed ? N_W'(1) : remain)
                                                         : N_W'(NOPS);

  always_comb begin
    for (int k = 0; k < NOPS; k++) begin
      bjk[k]      = m.desc ? N_W'(m.n - 6'd1 - j - N_W'(k)) : N_W'(j + N_W'(k));
      cell_dst[k] = m.dst_fixed ? m.dst : row_t'(m.dst + row_t'(bjk[k]));
    end
  end

  row_t    sum_dst;
  sa_src_t x_s, y_s, z0_s, z_s;

  always_comb begin
    if (m.use_lo) sum_dst = (bj == '0) ? m.lo : row_t'(m.dst + row_t'(bj) - row_t'(1));
    else          sum_dst = row_t'(m.dst + row_t'(bj));
    x_s  = conv(m.a, bj, sum_dst);
    y_s  = conv(m.c, bj, sum_dst);
    z0_s = conv(m.z, '0, sum_dst);
    z_s  = (bj == '0) ? z0_s : rr(ROW_ZS);

    sa_cmd = '0;
    sa_cmd.kind = SA_NOP;
    if (busy) begin
      unique case (m.kind)
        MOP_CELL: begin
          sa_cmd.kind = SA_STEP;
          for (int k = 0; k < NOPS; k++) begin
            if (N_W'(k) < cell_cnt)
              sa_cmd.ops[k] = op(cell_dst[k], conv(m.a, bjk[k], cell_dst[k]),
                                 conv(m.c, bjk[k], cell_dst[k]));
          end
        end
        MOP_ADD: begin
          sa_cmd.kind = SA_STEP;
          if (cph) begin
            sa_cmd.ops[0] = op(m.cout, k1(), rr(ROW_CZ));
          end else begin
            unique case (ph)
              2'd0: begin
                sa_cmd.ops[0] = op(ROW_CX, k1(), x_s);
                sa_cmd.ops[1] = op(ROW_CY, k1(), y_s);
                sa_cmd.ops[2] = (bj == '0) ? op(ROW_CZ, k1(), z0_s)
                                           : op(ROW_ZS, k1(), rr(ROW_CZ));
              end
              2'd1: begin
                sa_cmd.ops[0] = op(ROW_CX, neg(y_s), k0());
                sa_cmd.ops[1] = op(ROW_CY, x_s, rr(ROW_CY, 1'b1));
              end
              2'd2: begin
                sa_cmd.ops[0] = op(ROW_CZ, rr(ROW_CY, 1'b1), k0());
                sa_cmd.ops[1] = op(sum_dst, k1(), rr(ROW_CY));
              end
              default: begin
                sa_cmd.ops[0] = op(sum_dst, z_s, rr(ROW_CY, 1'b1));
                sa_cmd.ops[1] = op(ROW_CZ, rr(ROW_CX), k1());
              end
            endcase
          end
        end
        MOP_SEARCH: begin
          sa_cmd.kind   = SA_SEARCH;
          sa_cmd.srow   = m.srow;
          sa_cmd.snbits = m.snbits;
          sa_cmd.skey   = m.skey;
        end
        MOP_MASK_ROW: begin
          sa_cmd.kind = SA_MASK_ROW;
          sa_cmd.srow = m.srow;
          sa_cmd.minv = m.minv;
        end
        default: sa_cmd.kind = SA_MASK_ALL;
      endcase
    end
  end

  logic last_bit;
  assign last_bit = (j == N_W'(m.n - 6'd1));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy          <= 1'b0;
      m             <= '0;
      j             <= '0;
      ph            <= '0;
      cph           <= 1'b0;
      stat_steps    <= '0;
      stat_searches <= '0;
    end else begin
      if (sa_cmd.kind == SA_STEP)   stat_steps    <= stat_steps + 32'd1;
      if (sa_cmd.kind == SA_SEARCH) stat_searches <= stat_searches + 32'd1;
      if (!busy) begin
        if (mop_valid) begin
          busy <= 1'b1;
          m    <= mop;
          j    <= '0;
          ph   <= '0;
          cph  <= 1'b0;
        end
      end else begin
        unique case (m.kind)
          MOP_CELL: begin
            if (cell_cnt >= remain) busy <= 1'b0;
            else                    j    <= j + cell_cnt;
          end
          MOP_ADD: begin
            if (cph) begin
              busy <= 1'b0;
            end else if (ph == 2'd3) begin
              ph <= '0;
              if (last_bit) begin
                if (m.use_cout) cph  <= 1'b1;
                else            busy <= 1'b0;
              end else j <= j + 1'b1;
            end else ph <= ph + 1'b1;
          end
          default: busy <= 1'b0;
        endcase
      end
    end
  end

  a_nonzero_len: assert property (@(posedge clk) disable iff (!rst_n)
    mop_valid && mop_ready && (mop.kind == MOP_CELL || mop.kind == MOP_ADD) |-> mop.n != '0);
endmodule
