// fa_engine_tb: field operations of the vector engine on a 1024 x 32 subarray.
// Checks, per column, against integer arithmetic:
//   - n-bit addition with carry in from a constant or a row, with and without
//     carry out, in place (dst = X) and with the sum shifted down (use_lo);
//     the latency must be 1 + 4n (+1 for the carry out) cycles, i.e. the
//     paper's four read-then-write steps per full-adder bit
//   - addition under a row mask (other columns unchanged)
//   - copy, right- and left-shifted copy, select by a row, XOR with a row,
//     constants, and a search that sets the mask.
module fa_engine_tb;
  import pim_pkg::*;
  localparam int C = 32;

  logic clk = 0, rst_n = 0;
  mop_t mop;
  logic mop_valid, mop_ready;
  sa_cmd_t sa_cmd;
  logic [31:0] stat_steps, stat_searches;
  logic host_wr_en;
  row_t host_wr_row, host_rd_row;
  logic [C-1:0] host_wr_data, host_rd_data, mask;
  int checks = 0, failures = 0;
  int lat;

  fa_engine dut (.*);
  mram_subarray #(.ROWS(1024), .COLS(C)) u_sa (.clk, .rst_n, .cmd(sa_cmd), .host_wr_en,
    .host_wr_row, .host_wr_data, .host_rd_row, .host_rd_data, .mask);

  always #5 clk = ~clk;

  typedef logic [63:0] vec_t [C];

  task automatic put(input int base, input int n, input vec_t v);
    for (int i = 0; i < n; i++) begin
      @(negedge clk);
      host_wr_en = 1; host_wr_row = row_t'(base + i);
      for (int c = 0; c < C; c++) host_wr_data[c] = v[c][i];
    end
    @(negedge clk);
    host_wr_en = 0;
  endtask

  task automatic get(input int base, input int n, output vec_t v);
    foreach (v[c]) v[c] = '0;
    for (int i = 0; i < n; i++) begin
      host_rd_row = row_t'(base + i);
      #1ps;
      for (int c = 0; c < C; c++) v[c][i] = host_rd_data[c];
    end
  endtask

  // Issue one field operation and measure cycles until the engine is idle.
  task automatic run(input mop_t m);
    @(negedge clk);
    mop = m; mop_valid = 1;
    lat = 0;
    @(negedge clk);
    mop_valid = 0;
    lat = 1;
    while (!mop_ready) begin @(negedge clk); lat++; end
  endtask

  task automatic chk(input string what, input logic [63:0] got, input logic [63:0] exp);
    checks++;
    if (got !== exp) begin
      failures++;
      if (failures < 20) $display("FAIL %s got %h exp %h", what, got, exp);
    end
  endtask

  function automatic vec_t rnd(input int n);
    vec_t v;
    foreach (v[c]) v[c] = {$urandom, $urandom} & ((64'd1 << n) - 1);
    return v;
  endfunction

  initial begin
    vec_t x, y, z, s, o, mrow;
    mop_t m;
    mop = '0; mop_valid = 0; host_wr_en = 0; host_wr_row = '0; host_wr_data = '0; host_rd_row = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int t = 0; t < 6; t++) begin
      int n;
      n = (t < 3) ? 16 : 7 + t;
      x = rnd(n); y = rnd(n); z = rnd(1);
      put(0, n, x); put(100, n, y); put(200, 1, z);
      // dst = X + Y + z(row), carry out to row 300
      m = m_add(row_t'(400), n, s_row(0), s_row(100), s_fixed(200));
      m.use_cout = 1; m.cout = row_t'(300);
      run(m);
      chk("add latency", 64'(lat), 64'(1 + 4 * n + 1));
      get(400, n, s); get(300, 1, o);
      for (int c = 0; c < C; c++) begin
        logic [63:0] full;
        full = x[c] + y[c] + z[c];
        chk("add sum", s[c], full & ((64'd1 << n) - 1));
        chk("add cout", o[c], 64'(full[n]));
      end
      // operands untouched
      get(0, n, s);
      for (int c = 0; c < C; c++) chk("X kept", s[c], x[c]);
      // in place: X = X + ~Y + 1  (subtraction)
      run(m_add(row_t'(0), n, s_row(0), s_row(100, 1'b1), s_const(1)));
      chk("sub latency", 64'(lat), 64'(1 + 4 * n));
      get(0, n, s);
      for (int c = 0; c < C; c++) chk("sub", s[c], (x[c] - y[c]) & ((64'd1 << n) - 1));
    end
    // masked addition with a constant
    x = rnd(12); mrow = rnd(1);
    put(0, 12, x); put(50, 1, mrow);
    run(m_mask_row(row_t'(50)));
    run(m_add(row_t'(0), 12, s_row(0), s_const(32'd1234), s_const(0)));
    run(m_mask_all());
    get(0, 12, s);
    for (int c = 0; c < C; c++)
      chk("masked add", s[c], mrow[c][0] ? ((x[c] + 1234) & 64'hFFF) : x[c]);
    // shifted sum (use_lo): bit 0 to row 60, bit j to row 70+j-1, cout to 70+n-1
    x = rnd(8); y = rnd(8);
    put(0, 8, x); put(100, 8, y);
    m = m_add(row_t'(70), 8, s_row(0), s_row(100), s_const(0));
    m.use_lo = 1; m.lo = row_t'(60); m.use_cout = 1; m.cout = row_t'(77);
    run(m);
    get(60, 1, o); get(70, 8, s);
    for (int c = 0; c < C; c++) begin
      logic [63:0] full;
      full = x[c] + y[c];
      chk("add&shift low", o[c], 64'(full[0]));
      chk("add&shift high", s[c], full >> 1);
    end
    // right-shifted copy, left-shifted in-place copy
    x = rnd(20);
    put(0, 20, x);
    run(m_cell(row_t'(100), 20, s_const('1), s_row(0, 1'b0, 5, 20)));
    chk("copy latency", 64'(lat), 64'(1 + 7));
    get(100, 20, s);
    for (int c = 0; c < C; c++) chk("shr5", s[c], x[c] >> 5);
    run(m_cell(row_t'(0), 20, s_const('1), s_row(0, 1'b0, -1, 20), 1'b0, 1'b1));
    get(0, 20, s);
    for (int c = 0; c < C; c++) chk("shl1", s[c], (x[c] << 1) & 64'hF_FFFF);
    // select, xor, constant
    x = rnd(10); y = rnd(10); mrow = rnd(1);
    put(0, 10, x); put(100, 10, y); put(50, 1, mrow);
    run(m_sel(row_t'(0), row_t'(50), row_t'(100), 10));
    get(0, 10, s);
    for (int c = 0; c < C; c++) chk("sel", s[c], mrow[c][0] ? y[c] : x[c]);
    run(m_xor1(row_t'(100), row_t'(50), 10));
    get(100, 10, s);
    for (int c = 0; c < C; c++) chk("xor", s[c], mrow[c][0] ? (~y[c] & 64'h3FF) : y[c]);
    run(m_setc(row_t'(100), 10, 32'h2A5));
    get(100, 10, s);
    for (int c = 0; c < C; c++) chk("const", s[c], 64'h2A5);
    // search: columns whose 4-bit field equals 5
    foreach (x[c]) x[c] = 64'(c % 8);
    put(0, 4, x);
    run(m_search(row_t'(0), 4, 5));
    for (int c = 0; c < C; c++) chk("search mask", 64'(mask[c]), 64'(c % 8 == 5));
    run(m_mask_all());
    chk("mask all", 64'(mask), 64'({C{1'b1}}));
    chk("search count", 64'(stat_searches), 64'd1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #5000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
