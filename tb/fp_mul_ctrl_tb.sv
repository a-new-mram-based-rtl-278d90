// fp_mul_ctrl_tb: column-parallel floating point multiplication R = A * B.
// The sequencer drives a vector engine and a 1024 x 32 subarray. Each round
// loads random 32-bit operands (exponents near the bias, some zeros, operands
// with equal or close exponents) into every column, runs one operation and
// compares every column with the integer reference model in fp_ref_pkg.
// The number of compute steps (2886) and searches (0) per operation
// is fixed by the sequence and checked for every round; with the default
// 23-bit mantissa and 8-bit exponent they follow from the per-operation step
// counts (n steps per n-bit copy, 4n per n-bit addition, 1 search per shift).
module fp_mul_ctrl_tb;
  import pim_pkg::*;
  import fp_ref_pkg::*;
  localparam int C = 32;
  localparam int EXP_STEPS = 2886, EXP_SEARCH = 0;

  logic clk = 0, rst_n = 0;
  logic start, busy, done;
  mop_t mop;
  logic mop_valid, mop_ready;
  sa_cmd_t sa_cmd;
  logic [31:0] stat_steps, stat_searches;
  logic host_wr_en;
  row_t host_wr_row, host_rd_row;
  logic [C-1:0] host_wr_data, host_rd_data, mask;
  int checks = 0, failures = 0;

  fp_mul_ctrl dut (.clk, .rst_n, .start, .a_base(row_t'(0)), .b_base(row_t'(32)),
    .r_base(row_t'(64)), .busy, .done, .mop, .mop_valid, .mop_ready);
  fa_engine u_eng (.clk, .rst_n, .mop, .mop_valid, .mop_ready, .sa_cmd, .stat_steps, .stat_searches);
  mram_subarray #(.ROWS(1024), .COLS(C)) u_sa (.clk, .rst_n, .cmd(sa_cmd), .host_wr_en,
    .host_wr_row, .host_wr_data, .host_rd_row, .host_rd_data, .mask);

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

  initial begin
    val_t a, b, r;
    int s0, q0;
    start = 0; host_wr_en = 0; host_wr_row = '0; host_wr_data = '0; host_rd_row = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int t = 0; t < 6; t++) begin
      for (int c = 0; c < C; c++) begin
        a[c] = rand_fp(t < 3 ? 30 : 3);
        b[c] = rand_fp(t < 3 ? 30 : 3);
        if (c % 8 == 1) b[c] = {~a[c][31], a[c][30:0]};          // exact cancellation
        if (c % 8 == 2) b[c] = {~a[c][31], a[c][30:5], 5'($urandom)}; // near cancellation
        if (c % 8 == 3) b[c][30:23] = a[c][30:23];                // equal exponents
      end
      put(0, a); put(32, b);
      s0 = int'(stat_steps); q0 = int'(stat_searches);
      @(negedge clk); start = 1;
      @(negedge clk); start = 0;
      while (!done) @(negedge clk);
      get(64, r);
      for (int c = 0; c < C; c++) begin
        logic [31:0] e;
        e = ref_mul(a[c], b[c]);
        checks++;
        if (r[c] !== e) begin
          failures++;
          if (failures < 10) $display("FAIL col %0d a=%h b=%h got %h exp %h", c, a[c], b[c], r[c], e);
        end
      end
      checks++;
      if (int'(stat_steps) - s0 != EXP_STEPS) begin
        failures++; $display("FAIL steps %0d", int'(stat_steps) - s0);
      end
      checks++;
      if (int'(stat_searches) - q0 != EXP_SEARCH) begin
        failures++; $display("FAIL searches %0d", int'(stat_searches) - q0);
      end
    end
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
