// pim_pkg: types and constants shared by the SOT-MRAM processing-in-memory
// accelerator.
//
// The accelerator computes inside a 1T-1R SOT-MRAM subarray. Every column
// (bit line) is one lane; the bits of a lane's operands sit in rows of that
// column. A compute step reads some source rows and then writes target rows,
// and each written cell follows the SOT-MTJ write rule B' = A ? C : B, where
// A is the bit-line bias (Vb applied or not) and C the direction of the write
// current. That single rule gives AND (C=0), OR (C=1), XOR (C=~B) and copy
// (A=1), as in the paper's logic-in-write scheme.
//
// Two command levels are defined here:
//   sa_cmd_t : one subarray command per clock (a step of up to NOPS cell
//              writes, a search, or a mask update).
//   mop_t    : a field operation for the bit-serial vector engine (cell op
//              over an n-bit field, n-bit addition, search, mask), which the
//              engine expands into subarray steps.
// Field layout, widths of addresses and NOPS = 3 (three writes per step, as in
// step 1 of the paper's full-adder procedure) are this design's choices.
package pim_pkg;

  localparam int ROW_W  = 10;   // row address width: 1024 rows
  localparam int NOPS   = 3;    // cell writes per compute step
  localparam int SKEY_W = 10;   // search key width (signed exponent difference)
  localparam int N_W    = 6;    // field length width (fields up to 63 bits)

  typedef logic [ROW_W-1:0] row_t;

  // ---------------------------------------------------------------- subarray
  // Value of one source bit per column: (is_row ? mem[row] : cval) ^ inv.
  typedef struct packed {
    logic is_row;
    logic cval;
    logic inv;
    row_t row;
  } sa_src_t;

  // One cell write in a step: mem[dst] <= a ? c : mem[dst] (enabled columns).
  typedef struct packed {
    logic    en;
    row_t    dst;
    sa_src_t a;
    sa_src_t c;
  } sa_op_t;

  typedef enum logic [2:0] {
    SA_NOP      = 3'd0,
    SA_STEP     = 3'd1,   // parallel read of all sources, then write
    SA_SEARCH   = 3'd2,   // mask <= (rows srow.. match skey)
    SA_MASK_ROW = 3'd3,   // mask <= mem[srow] ^ minv
    SA_MASK_ALL = 3'd4    // mask <= all ones
  } sa_kind_e;

  typedef struct packed {
    sa_kind_e               kind;
    sa_op_t [NOPS-1:0]      ops;
    row_t                   srow;
    logic [3:0]             snbits;
    logic [SKEY_W-1:0]      skey;
    logic                   minv;
  } sa_cmd_t;

  // ------------------------------------------------------------ field ops
  typedef enum logic [1:0] {
    K_CONST = 2'd0,   // bit j of cval
    K_ROW   = 2'd1,   // row base + j + shift, zero outside [0, limit)
    K_FIXED = 2'd2,   // row base for every bit
    K_DST   = 2'd3    // the destination row of bit j
  } src_kind_e;

  typedef struct packed {
    src_kind_e         kind;
    row_t              base;
    logic              inv;
    logic signed [6:0] shift;
    logic [N_W:0]      limit;
    logic [31:0]       cval;
  } mop_src_t;

  typedef enum logic [2:0] {
    MOP_CELL     = 3'd0,  // dst[j] <= a[j] ? c[j] : dst[j], j = 0..n-1
    MOP_ADD      = 3'd1,  // dst <= a + c + z using the 4-step full adder
    MOP_SEARCH   = 3'd2,
    MOP_MASK_ROW = 3'd3,
    MOP_MASK_ALL = 3'd4
  } mop_kind_e;

  typedef struct packed {
    mop_kind_e          kind;
    row_t               dst;
    logic               dst_fixed;  // every bit writes row dst (CELL)
    logic               desc;       // walk bits from n-1 down to 0 (CELL)
    logic [N_W-1:0]     n;
    mop_src_t           a;          // CELL: A;  ADD: operand X
    mop_src_t           c;          // CELL: C;  ADD: operand Y
    mop_src_t           z;          // ADD: carry in (K_CONST or K_FIXED)
    logic               use_lo;     // ADD: sum bit 0 to row lo, bit j to dst+j-1
    row_t               lo;
    logic               use_cout;   // ADD: carry out to row cout
    row_t               cout;
    row_t               srow;       // SEARCH / MASK_ROW
    logic [3:0]         snbits;
    logic [SKEY_W-1:0]  skey;
    logic               minv;
  } mop_t;

  // SOT-MTJ logic-in-write rule (paper Fig. 1).
  function automatic logic cell_rule(input logic a, input logic c, input logic b);
    return a ? c : b;
  endfunction

  // ------------------------------------------------------- builder helpers
  function automatic mop_src_t s_const(input logic [31:0] v);
    mop_src_t s = '0;
    s.kind = K_CONST;
    s.cval = v;
    return s;
  endfunction

  function automatic mop_src_t s_row(input row_t base, input logic inv = 1'b0,
                                     input int shift = 0, input int limit = 63);
    mop_src_t s = '0;
    s.kind  = K_ROW;
    s.base  = base;
    s.inv   = inv;
    s.shift = 7'(shift);
    s.limit = (N_W+1)'(limit);
    return s;
  endfunction

  function automatic mop_src_t s_fixed(input row_t r, input logic inv = 1'b0);
    mop_src_t s = '0;
    s.kind = K_FIXED;
    s.base = r;
    s.inv  = inv;
    return s;
  endfunction

  function automatic mop_src_t s_dst_inv();
    mop_src_t s = '0;
    s.kind = K_DST;
    s.inv  = 1'b1;
    return s;
  endfunction

  function automatic mop_t m_cell(input row_t dst, input int n, input mop_src_t a,
                                  input mop_src_t c, input logic fixed = 1'b0,
                                  input logic desc = 1'b0);
    mop_t m = '0;
    m.kind      = MOP_CELL;
    m.dst       = dst;
    m.n         = N_W'(n);
    m.a         = a;
    m.c         = c;
    m.dst_fixed = fixed;
    m.desc      = desc;
    return m;
  endfunction

  // dst <= src (n bits)
  function automatic mop_t m_copy(input row_t dst, input row_t src, input int n);
    return m_cell(dst, n, s_const('1), s_row(src));
  endfunction

  // dst <= constant v (n bits)
  function automatic mop_t m_setc(input row_t dst, input int n, input logic [31:0] v);
    return m_cell(dst, n, s_const('1), s_const(v));
  endfunction

  // dst <= sel ? src : dst, sel a single row (n bits)
  function automatic mop_t m_sel(input row_t dst, input row_t sel, input row_t src, input int n);
    return m_cell(dst, n, s_fixed(sel), s_row(src));
  endfunction

  // dst <= dst ^ x, x a single row broadcast to every bit (n bits)
  function automatic mop_t m_xor1(input row_t dst, input row_t x, input int n);
    return m_cell(dst, n, s_fixed(x), s_dst_inv());
  endfunction

  function automatic mop_t m_add(input row_t dst, input int n, input mop_src_t x,
                                 input mop_src_t y, input mop_src_t z);
    mop_t m = '0;
    m.kind = MOP_ADD;
    m.dst  = dst;
    m.n    = N_W'(n);
    m.a    = x;
    m.c    = y;
    m.z    = z;
    return m;
  endfunction

  function automatic mop_t m_search(input row_t r, input int nbits, input int key);
    mop_t m = '0;
    m.kind   = MOP_SEARCH;
    m.srow   = r;
    m.snbits = 4'(nbits);
    m.skey   = SKEY_W'(key);
    return m;
  endfunction

  function automatic mop_t m_mask_row(input row_t r, input logic inv = 1'b0);
    mop_t m = '0;
    m.kind = MOP_MASK_ROW;
    m.srow = r;
    m.minv = inv;
    return m;
  endfunction

  function automatic mop_t m_mask_all();
    mop_t m = '0;
    m.kind = MOP_MASK_ALL;
    return m;
  endfunction

  // Accelerator commands.
  typedef enum logic [1:0] {
    OP_MUL = 2'd0,   // R = A * B
    OP_ADD = 2'd1,   // R = A + B
    OP_MAC = 2'd2    // R = R + A * B
  } acc_op_e;

endpackage
