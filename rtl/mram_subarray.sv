// mram_subarray: a ROWS x COLS array of 1T-1R SOT-MRAM cells with compute.
//
// Each column is a lane. One command is accepted per clock:
//   SA_STEP     : the sources of up to NOPS cell writes are read (all in the
//                 same cycle, from the state before the step), then every
//                 enabled write j loads row ops[j].dst with the SOT write rule
//                 B' = A ? C : B (sot_cell), in the columns whose mask bit is 1.
//                 This is the paper's "parallel read and then write" step.
//   SA_SEARCH   : rows srow .. srow+snbits-1 of every column are compared with
//                 skey (exp_search); the match vector becomes the mask.
//   SA_MASK_ROW : mask <= row srow (inverted when minv).
//   SA_MASK_ALL : mask <= all ones.
// A host port writes and reads whole rows; a host write takes priority and
// must not coincide with a step (asserted). Targets of one step must differ.
//
// Timing: writes and mask updates take effect at the rising clock edge that
// ends the cycle of the command; host_rd_data is a combinational read.
// The memory is not reset (as a real array); the mask resets to all ones.
// The paper gives the array size (1024 x 1024) and the logic-in-write rule;
// the command set, the mask and NOPS = 3 are this design's choices.
module mram_subarray
  import pim_pkg::*;
#(
  parameter int ROWS = 1024,
  parameter int COLS = 1024
) (
  input  logic            clk,
  input  logic            rst_n,
  input  sa_cmd_t         cmd,
  input  logic            host_wr_en,
  input  row_t            host_wr_row,
  input  logic [COLS-1:0] host_wr_data,
  input  row_t            host_rd_row,
  output logic [COLS-1:0] host_rd_data,
  output logic [COLS-1:0] mask
);
  localparam int SNB = SKEY_W;

  logic [COLS-1:0] mem [ROWS];

  // Read of one row (rows past the end read as zero).
  function automatic logic [COLS-1:0] rd(input row_t r);
    return (int'(r) < ROWS) ? mem[r] : '0;
  endfunction

  function automatic logic [COLS-1:0] src_val(input sa_src_t s);
    logic [COLS-1:0] v;
    v = s.is_row ? rd(s.row) : {COLS{s.cval}};
    return s.inv ? ~v : v;
  endfunction

  logic [COLS-1:0] a_v   [NOPS];
  logic [COLS-1:0] c_v   [NOPS];
  logic [COLS-1:0] b_v   [NOPS];
  logic [COLS-1:0] nxt_v [NOPS];

  always_comb begin
    for (int k = 0; k < NOPS; k++) begin
      a_v[k] = src_val(cmd.ops[k].a);
      c_v[k] = src_val(cmd.ops[k].c);
      b_v[k] = rd(cmd.ops[k].dst);
    end
  end

  for (genvar k = 0; k < NOPS; k++) begin : g_cell
    sot_cell #(.WIDTH(COLS)) u_cell (
      .a(a_v[k]), .c(c_v[k]), .b_cur(b_v[k]), .b_next(nxt_v[k])
    );
  end

  // Search rows.
  logic [COLS-1:0] srch_rows [SNB];
  logic [COLS-1:0] srch_match;
  always_comb begin
    for (int i = 0; i < SNB; i++) srch_rows[i] = rd(row_t'(int'(cmd.srow) + i));
  end

  exp_search #(.COLS(COLS), .NBITS(SNB)) u_search (
    .stored(srch_rows),
    .nbits (cmd.snbits),
    .key   (cmd.skey),
    .match (srch_match)
  );

  always_ff @(posedge clk) begin
    if (host_wr_en) begin
      if (int'(host_wr_row) < ROWS) mem[host_wr_row] <= host_wr_data;
    end else if (cmd.kind == SA_STEP) begin
      for (int k = 0; k < NOPS; k++) begin
        if (cmd.ops[k].en && int'(cmd.ops[k].dst) < ROWS)
          mem[cmd.ops[k].dst] <= (nxt_v[k] & mask) | (b_v[k] & ~mask);
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) mask <= '1;
    else begin
      unique case (cmd.kind)
        SA_SEARCH:   mask <= srch_match;
        SA_MASK_ROW: mask <= rd(cmd.srow) ^ {COLS{cmd.minv}};
        SA_MASK_ALL: mask <= '1;
        default:     ;
      endcase
    end
  end

  assign host_rd_data = rd(host_rd_row);

  // Protocol rules.
  a_no_host_during_step: assert property (@(posedge clk) disable iff (!rst_n)
    host_wr_en |-> cmd.kind == SA_NOP);
  a_distinct_targets: assert property (@(posedge clk) disable iff (!rst_n)
    cmd.kind == SA_STEP |->
      !(cmd.ops[0].en && cmd.ops[1].en && cmd.ops[0].dst == cmd.ops[1].dst) &&
      !(cmd.ops[0].en && cmd.ops[2].en && cmd.ops[0].dst == cmd.ops[2].dst) &&
      !(cmd.ops[1].en && cmd.ops[2].en && cmd.ops[1].dst == cmd.ops[2].dst));
endmodule
