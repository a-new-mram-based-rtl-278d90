// mram_subarray_tb: random command test of the subarray against a bit model.
// A 48 x 32 array is filled through the host port, then random steps (three
// cell writes with distinct targets and random A/C sources, constant or from
// rows, possibly inverted), searches, row masks and mask resets are applied.
// After every command all rows and the mask are compared with the model, which
// reads every source before writing (read-then-write) and honours the mask.
module mram_subarray_tb;
  import pim_pkg::*;
  localparam int R = 48, C = 32;

  logic clk = 0, rst_n = 0;
  sa_cmd_t cmd;
  logic host_wr_en;
  row_t host_wr_row, host_rd_row;
  logic [C-1:0] host_wr_data, host_rd_data, mask;
  logic [C-1:0] model [R];
  logic [C-1:0] mmask;
  int checks = 0, failures = 0, n_step = 0, n_search = 0, n_maskrow = 0;

  mram_subarray #(.ROWS(R), .COLS(C)) dut (.*);

  always #5 clk = ~clk;

  function automatic logic [C-1:0] val(input sa_src_t s);
    logic [C-1:0] v;
    v = s.is_row ? model[s.row] : {C{s.cval}};
    return s.inv ? ~v : v;
  endfunction

  function automatic sa_src_t rsrc();
    sa_src_t s;
    s.is_row = 1'($urandom);
    s.cval   = 1'($urandom);
    s.inv    = 1'($urandom);
    s.row    = row_t'($urandom_range(R - 1));
    return s;
  endfunction

  task automatic check_all();
    for (int r = 0; r < R; r++) begin
      host_rd_row = row_t'(r);
      #1ps;
      checks++;
      if (host_rd_data !== model[r]) begin
        failures++;
        if (failures < 10) $display("FAIL row %0d got %h exp %h", r, host_rd_data, model[r]);
      end
    end
    checks++;
    if (mask !== mmask) begin failures++; $display("FAIL mask %h exp %h", mask, mmask); end
  endtask

  initial begin
    cmd = '0; host_wr_en = 0; host_wr_row = '0; host_wr_data = '0; host_rd_row = '0;
    mmask = '1;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int r = 0; r < R; r++) begin
      @(negedge clk);
      host_wr_en = 1; host_wr_row = row_t'(r); host_wr_data = C'($urandom);
      model[r] = host_wr_data;
    end
    @(negedge clk);
    host_wr_en = 0;
    check_all();
    for (int t = 0; t < 300; t++) begin
      int kind;
      logic [C-1:0] nm [R];
      logic [C-1:0] nmask;
      kind = int'($urandom_range(9));
      nmask = mmask;
      cmd = '0;
      foreach (model[r]) nm[r] = model[r];
      if (kind < 6) begin
        int d0, d1, d2;
        cmd.kind = SA_STEP;
        d0 = int'($urandom_range(R - 1));
        d1 = (d0 + 1 + int'($urandom_range(R - 2))) % R;
        do d2 = int'($urandom_range(R - 1)); while (d2 == d0 || d2 == d1);
        cmd.ops[0].dst = row_t'(d0); cmd.ops[1].dst = row_t'(d1); cmd.ops[2].dst = row_t'(d2);
        for (int k = 0; k < NOPS; k++) begin
          logic [C-1:0] av, cv, bv;
          cmd.ops[k].en = 1'($urandom_range(3) != 0);
          cmd.ops[k].a = rsrc();
          cmd.ops[k].c = rsrc();
          if (cmd.ops[k].en) begin
            av = val(cmd.ops[k].a); cv = val(cmd.ops[k].c); bv = model[cmd.ops[k].dst];
            nm[cmd.ops[k].dst] = (((av & cv) | (~av & bv)) & mmask) | (bv & ~mmask);
          end
        end
        n_step++;
      end else if (kind < 8) begin
        int b, nb;
        logic [9:0] key;
        cmd.kind = SA_SEARCH;
        b  = int'($urandom_range(R - 4));
        nb = int'($urandom_range(3, 1));
        // key taken from a random column so that it matches somewhere
        key = '0;
        for (int i = 0; i < nb; i++) key[i] = model[b + i][$urandom_range(C - 1)];
        cmd.srow = row_t'(b); cmd.snbits = 4'(nb); cmd.skey = key;
        nmask = '1;
        for (int i = 0; i < nb; i++) nmask &= ~(model[b + i] ^ {C{key[i]}});
        n_search++;
      end else if (kind == 8) begin
        cmd.kind = SA_MASK_ROW;
        cmd.srow = row_t'($urandom_range(R - 1));
        cmd.minv = 1'($urandom);
        nmask = model[cmd.srow] ^ {C{cmd.minv}};
        n_maskrow++;
      end else begin
        cmd.kind = SA_MASK_ALL;
        nmask = '1;
      end
      @(negedge clk);
      cmd = '0;
      foreach (model[r]) model[r] = nm[r];
      mmask = nmask;
      check_all();
    end
    checks++;
    if (n_step == 0 || n_search == 0 || n_maskrow == 0) failures++;
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
