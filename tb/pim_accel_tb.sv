// pim_accel_tb: end-to-end test of the accelerator with 64 columns.
// Rounds of MUL, ADD and MAC commands run on random operands placed in every
// column; results are read back through the host port and compared with the
// reference model (MAC: R + A*B with the product truncated first, as built).
// Same-sign additions are also compared with real arithmetic (relative error
// below 2^-21). Step and search counts per command are checked.
// Mechanisms counted over all columns, each must occur at least once:
// alignment shift of A and of B found by search (exp' in -24..-1 and 1..24),
// shift beyond the mantissa,
// effective subtraction, negative sum negated, carry-out normalisation,
// left normalisation, zero result, product normalisation, zero operand in a
// product, and each of the three commands.
module pim_accel_tb;
  import pim_pkg::*;
  import fp_ref_pkg::*;
  localparam int C = 64;

  logic clk = 0, rst_n = 0;
  logic cmd_valid, cmd_ready, done;
  acc_op_e cmd_op;
  row_t cmd_a, cmd_b, cmd_r;
  logic host_wr_en;
  row_t host_wr_row, host_rd_row;
  logic [C-1:0] host_wr_data, host_rd_data;
  logic [31:0] stat_steps, stat_searches;
  int checks = 0, failures = 0;

  typedef enum int {M_SHIFT_A, M_SHIFT_B, M_FARSHIFT, M_SUB, M_NEG, M_OVF, M_LNORM, M_ZERO,
                    M_MULNORM, M_MULZERO, M_CMD_MUL, M_CMD_ADD, M_CMD_MAC, M_NUM} mech_e;
  int mech [M_NUM];

  pim_accel #(.COLS(C)) dut (.*);

  always #5 clk = ~clk;

  typedef logic [31:0] val_t [C];

  task automatic put(input int base, input val_t v);
    for (int i = 0; i < 32; i++) begin
      @(negedge clk);
      host_wr_en = 1; host_wr_row = row_t'(base + i);
      for (int c = 0; c < C; c++) host_wr_data[c] = v[c][i];
    end
    @(negedge clk);
    host_wr_en = 0;
  endtask

  task automatic get(input int base, output val_t v);
    for (int i = 0; i < 32; i++) begin
      host_rd_row = row_t'(base + i);
      #1ps;
      for (int c = 0; c < C; c++) v[c][i] = host_rd_data[c];
    end
  endtask

  task automatic run(input acc_op_e op, input int steps, input int searches);
    int s0, q0;
    s0 = int'(stat_steps); q0 = int'(stat_searches);
    @(negedge clk);
    cmd_valid = 1; cmd_op = op; cmd_a = row_t'(0); cmd_b = row_t'(32); cmd_r = row_t'(64);
    @(negedge clk);
    cmd_valid = 0;
    while (!done) @(negedge clk);
    checks++;
    if (int'(stat_steps) - s0 != steps || int'(stat_searches) - q0 != searches) begin
      failures++;
      $display("FAIL op %s steps %0d searches %0d", op.name(), int'(stat_steps) - s0,
               int'(stat_searches) - q0);
    end
  endtask

  // Which mechanisms an addition a + b goes through.
  task automatic note_add(input logic [31:0] a, input logic [31:0] b);
    int  d, ad;
    longint ma, mb, s;
    ma = longint'({(a[30:23] != 0), a[22:0]});
    mb = longint'({(b[30:23] != 0), b[22:0]});
    d  = int'(a[30:23]) - int'(b[30:23]);
    ad = d < 0 ? -d : d;
    if (d > 0 && ad <= 24) mech[M_SHIFT_B]++;
    if (d < 0 && ad <= 24) mech[M_SHIFT_A]++;
    if (ad > 24) mech[M_FARSHIFT]++;
    // the operand with the smaller exponent is shifted, the other kept
    if (d < 0) ma = ad > 24 ? 0 : ma >> ad;
    if (d > 0) mb = ad > 24 ? 0 : mb >> ad;
    if (a[31] != b[31]) begin
      mech[M_SUB]++;
      s = ma - mb;
      if (s < 0) begin mech[M_NEG]++; s = -s; end
    end else s = ma + mb;
    if (s >= (64'd1 << 24)) mech[M_OVF]++;
    else if (s != 0 && s < (64'd1 << 23)) mech[M_LNORM]++;
    if (s == 0) mech[M_ZERO]++;
  endtask

  task automatic note_mul(input logic [31:0] a, input logic [31:0] b);
    logic [47:0] p;
    if (a[30:23] == 0 || b[30:23] == 0) mech[M_MULZERO]++;
    else begin
      p = 48'({1'b1, a[22:0]}) * 48'({1'b1, b[22:0]});
      if (p[47]) mech[M_MULNORM]++;
    end
  endtask

  function automatic real to_real(input logic [31:0] v);
    real m;
    int  e;
    m = 1.0 + real'(v[22:0]) / 8388608.0;
    e = int'(v[30:23]) - 127;
    while (e > 0) begin m = m * 2.0; e--; end
    while (e < 0) begin m = m / 2.0; e++; end
    return v[31] ? -m : m;
  endfunction

  task automatic cmp(input string what, input logic [31:0] got, input logic [31:0] exp, input int c);
    checks++;
    if (got !== exp) begin
      failures++;
      if (failures < 10) $display("FAIL %s col %0d got %h exp %h", what, c, got, exp);
    end
  endtask

  initial begin
    val_t a, b, r, r0;
    cmd_valid = 0; cmd_op = OP_MUL; cmd_a = '0; cmd_b = '0; cmd_r = '0;
    host_wr_en = 0; host_wr_row = '0; host_wr_data = '0; host_rd_row = '0;
    foreach (mech[i]) mech[i] = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int t = 0; t < 3; t++) begin
      for (int c = 0; c < C; c++) begin
        a[c] = rand_fp(t == 0 ? 40 : 4);
        b[c] = rand_fp(t == 0 ? 40 : 4);
        if (c % 16 == 1) b[c] = {~a[c][31], a[c][30:0]};
        if (c % 16 == 2) b[c] = {~a[c][31], a[c][30:6], 6'($urandom)};
        r0[c] = rand_fp(4);
      end
      // MUL
      put(0, a); put(32, b);
      run(OP_MUL, 2886, 0);
      mech[M_CMD_MUL]++;
      get(64, r);
      for (int c = 0; c < C; c++) begin
        note_mul(a[c], b[c]);
        cmp("mul", r[c], ref_mul(a[c], b[c]), c);
      end
      // ADD
      run(OP_ADD, 1969, 49);
      mech[M_CMD_ADD]++;
      get(64, r);
      for (int c = 0; c < C; c++) begin
        note_add(a[c], b[c]);
        cmp("add", r[c], ref_add(a[c], b[c]), c);
        if (a[c][31] == b[c][31] && a[c][30:23] != 0 && b[c][30:23] != 0) begin
          real x, y, g;
          x = to_real(a[c]) + to_real(b[c]);
          g = to_real(r[c]);
          y = (g - x) / x;
          checks++;
          if (y > 4.8e-7 || y < -4.8e-7) begin failures++; $display("FAIL real add col %0d a=%h b=%h r=%h x=%g g=%g", c, a[c], b[c], r[c], x, g); end
        end
      end
      // MAC: R = R + A*B
      put(64, r0);
      run(OP_MAC, 2886 + 1969, 49);
      mech[M_CMD_MAC]++;
      get(64, r);
      for (int c = 0; c < C; c++) begin
        logic [31:0] p;
        p = ref_mul(a[c], b[c]);
        note_add(p, r0[c]);
        cmp("mac", r[c], ref_add(p, r0[c]), c);
      end
    end
    for (int i = 0; i < M_NUM; i++) begin
      $display("mechanism %s: %0d", mech_e'(i), mech[i]);
      checks++;
      if (mech[i] == 0) begin failures++; $display("FAIL mechanism %s never occurred", mech_e'(i)); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #3000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
