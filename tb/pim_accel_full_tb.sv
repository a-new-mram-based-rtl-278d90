// pim_accel_full_tb: the accelerator at its default size (1024 x 1024
// subarray, 32-bit floating point) runs one complete MAC, R = R + A*B, in all
// 1024 columns at once. Operands are random; every column's result is
// compared with the reference model, and the step and search counts of the
// command (2886 + 1969 steps, 49 searches) are checked.
module pim_accel_full_tb;
  import pim_pkg::*;
  import fp_ref_pkg::*;
  localparam int C = 1024;

  logic clk = 0, rst_n = 0;
  logic cmd_valid, cmd_ready, done;
  acc_op_e cmd_op;
  row_t cmd_a, cmd_b, cmd_r;
  logic host_wr_en;
  row_t host_wr_row, host_rd_row;
  logic [C-1:0] host_wr_data, host_rd_data;
  logic [31:0] stat_steps, stat_searches;
  int checks = 0, failures = 0, cycles = 0;

  pim_accel dut (.*);

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
    val_t a, b, r0, r;
    cmd_valid = 0; cmd_op = OP_MAC; cmd_a = '0; cmd_b = '0; cmd_r = '0;
    host_wr_en = 0; host_wr_row = '0; host_wr_data = '0; host_rd_row = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int c = 0; c < C; c++) begin
      a[c]  = rand_fp(20);
      b[c]  = rand_fp(20);
      r0[c] = rand_fp(20);
    end
    put(0, a); put(32, b); put(64, r0);
    @(negedge clk);
    cmd_valid = 1; cmd_op = OP_MAC; cmd_a = row_t'(0); cmd_b = row_t'(32); cmd_r = row_t'(64);
    @(negedge clk);
    cmd_valid = 0;
    while (!done) begin @(negedge clk); cycles++; end
    $display("MAC over %0d columns: %0d cycles, %0d steps, %0d searches", C, cycles,
             stat_steps, stat_searches);
    checks++;
    if (stat_steps != 32'(2886 + 1969) || stat_searches != 32'd49) failures++;
    get(64, r);
    for (int c = 0; c < C; c++) begin
      logic [31:0] e;
      e = ref_add(ref_mul(a[c], b[c]), r0[c]);
      checks++;
      if (r[c] !== e) begin
        failures++;
        if (failures < 10) $display("FAIL col %0d got %h exp %h", c, r[c], e);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
