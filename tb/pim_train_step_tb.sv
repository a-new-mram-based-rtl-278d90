// pim_train_step_tb: one training step of a fully connected layer, run as a
// chain of accelerator commands on 64 columns.
//
// Each column is one output neuron with NIN weights. The layer's inputs x_j
// are the same for every neuron and are written into every column. The step is
// plain stochastic gradient descent with a linear output and squared error:
//   forward   y   = sum_j w_j * x_j        NIN MAC commands into y (starts at 0)
//   error     d   = y + (-t)               one ADD (the target is stored negated)
//   scale     g   = (-lr) * d              one MUL
//   update    w_j = w_j + g * x_j          NIN MAC commands, in place
// All values stay in the array between commands; the host only loads the
// operands at the start and reads the results at the end. Every intermediate
// and final value is compared bit for bit with the truncating reference model,
// evaluated in the same order. The step and search counts of the whole chain
// are checked against the per-command counts (MUL 2886 steps; ADD 1969 steps
// and 49 searches; MAC the sum of both).
//
// Row map (32 rows per value): x_j at 32j, y at 128, -t at 160, -lr at 224,
// g at 481, w_j at 513 + 32j. Rows 192..223 (MAC product) and 256..480
// (sequencer scratch) are left to the accelerator.
module pim_train_step_tb;
  import pim_pkg::*;
  import fp_ref_pkg::*;
  localparam int C   = 64;
  localparam int NIN = 4;
  localparam int X0 = 0, Y = 128, NT = 160, NLR = 224, G = 481, W0 = 513;
  localparam int MUL_STEPS = 2886, ADD_STEPS = 1969, ADD_SEARCH = 49;

  logic clk = 0, rst_n = 0;
  logic cmd_valid, cmd_ready, done;
  acc_op_e cmd_op;
  row_t cmd_a, cmd_b, cmd_r;
  logic host_wr_en;
  row_t host_wr_row, host_rd_row;
  logic [C-1:0] host_wr_data, host_rd_data;
  logic [31:0] stat_steps, stat_searches;
  int checks = 0, failures = 0;
  int ncmd_mul = 0, ncmd_add = 0, ncmd_mac = 0;

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

  task automatic run(input acc_op_e op, input int a, input int b, input int r);
    @(negedge clk);
    cmd_valid = 1; cmd_op = op;
    cmd_a = row_t'(a); cmd_b = row_t'(b); cmd_r = row_t'(r);
    @(negedge clk);
    cmd_valid = 0;
    while (!done) @(negedge clk);
    case (op)
      OP_MUL:  ncmd_mul++;
      OP_ADD:  ncmd_add++;
      default: ncmd_mac++;
    endcase
  endtask

  task automatic cmp_all(input string what, input val_t got, input val_t exp);
    for (int c = 0; c < C; c++) begin
      checks++;
      if (got[c] !== exp[c]) begin
        failures++;
        if (failures < 10) $display("FAIL %s col %0d got %h exp %h", what, c, got[c], exp[c]);
      end
    end
  endtask

  initial begin
    val_t x [NIN];
    val_t w [NIN];
    val_t nt, nlr, y_exp, d_exp, g_exp, v;
    int   s0, q0, exp_steps, exp_search;
    cmd_valid = 0; cmd_op = OP_MUL; cmd_a = '0; cmd_b = '0; cmd_r = '0;
    host_wr_en = 0; host_wr_row = '0; host_wr_data = '0; host_rd_row = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;

    // Operands: shared inputs, per-neuron weights and targets, -lr = -2^-7.
    for (int j = 0; j < NIN; j++) begin
      logic [31:0] xv;
      xv = rand_fp(3, 0);
      for (int c = 0; c < C; c++) begin
        x[j][c] = xv;
        w[j][c] = rand_fp(3, 0);
      end
    end
    for (int c = 0; c < C; c++) begin
      nt[c]    = rand_fp(3, 0) ^ 32'h8000_0000;
      nlr[c]   = {1'b1, 8'd120, 23'd0};
      y_exp[c] = 32'h0;
    end
    for (int j = 0; j < NIN; j++) begin
      put(X0 + 32 * j, x[j]);
      put(W0 + 32 * j, w[j]);
    end
    put(Y, y_exp); put(NT, nt); put(NLR, nlr);

    s0 = int'(stat_steps); q0 = int'(stat_searches);

    // forward: y = sum w_j x_j
    for (int j = 0; j < NIN; j++) begin
      run(OP_MAC, W0 + 32 * j, X0 + 32 * j, Y);
      for (int c = 0; c < C; c++) y_exp[c] = ref_add(ref_mul(w[j][c], x[j][c]), y_exp[c]);
    end
    get(Y, v); cmp_all("forward y", v, y_exp);

    // error and scaled gradient
    run(OP_ADD, Y, NT, Y);
    for (int c = 0; c < C; c++) d_exp[c] = ref_add(y_exp[c], nt[c]);
    get(Y, v); cmp_all("error d", v, d_exp);
    run(OP_MUL, NLR, Y, G);
    for (int c = 0; c < C; c++) g_exp[c] = ref_mul(nlr[c], d_exp[c]);
    get(G, v); cmp_all("gradient g", v, g_exp);

    // weight update: w_j = w_j + g x_j
    for (int j = 0; j < NIN; j++) begin
      run(OP_MAC, G, X0 + 32 * j, W0 + 32 * j);
      for (int c = 0; c < C; c++) w[j][c] = ref_add(ref_mul(g_exp[c], x[j][c]), w[j][c]);
      get(W0 + 32 * j, v); cmp_all("updated w", v, w[j]);
    end
    // the inputs must survive the whole step unchanged
    for (int j = 0; j < NIN; j++) begin
      get(X0 + 32 * j, v); cmp_all("input x", v, x[j]);
    end

    exp_steps  = ncmd_mul * MUL_STEPS + ncmd_add * ADD_STEPS + ncmd_mac * (MUL_STEPS + ADD_STEPS);
    exp_search = (ncmd_add + ncmd_mac) * ADD_SEARCH;
    checks++;
    if (int'(stat_steps) - s0 != exp_steps || int'(stat_searches) - q0 != exp_search) begin
      failures++;
      $display("FAIL chain steps %0d searches %0d, expected %0d and %0d",
               int'(stat_steps) - s0, int'(stat_searches) - q0, exp_steps, exp_search);
    end
    $display("training step: %0d MAC, %0d ADD, %0d MUL commands, %0d steps, %0d searches",
             ncmd_mac, ncmd_add, ncmd_mul, int'(stat_steps) - s0, int'(stat_searches) - q0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #2000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
