// pim_accel: SOT-MRAM digital processing-in-memory accelerator, one subarray.
//
// A ROWS x COLS 1T-1R SOT-MRAM subarray computes in place: every column is a
// lane holding its own 32-bit floating point operands, and one command runs
// the same floating point operation in all COLS columns at once. Arithmetic is
// done only by logic-in-write steps of the cells (AND, OR, XOR, copy), the
// four-step full adder, and searches for the exponent alignment.
//
//   mram_subarray  storage, compute steps, search, column mask
//   fa_engine      expands field operations into subarray steps
//   fp_mul_ctrl    multiplication sequence
//   fp_add_ctrl    addition sequence
//
// Commands (cmd_valid && cmd_ready): cmd_op with operand rows cmd_a, cmd_b and
// result rows cmd_r, each the first of 32 rows (bit i of a value in row base+i):
//   OP_MUL  R = A * B
//   OP_ADD  R = A + B
//   OP_MAC  R = R + A * B (product in rows PTMP.., then added into R)
// done pulses for one cycle when the command has finished. While idle
// (cmd_ready) the host may write a row with host_wr_en and read any row on
// host_rd_row / host_rd_data (combinational). Values are placed transposed:
// to give column c the value v, bit i of v goes to column c of row base+i.
// Scratch rows: 256..~600 for the sequencers, 1020..1023 for the full adder
// cache, PTMP.. for the MAC product; operands should lie elsewhere.
// stat_steps and stat_searches count compute steps and searches since reset.
//
// The single-subarray organisation and the command interface are this
// design's own; the paper only states that it reuses the FloatPIM
// architecture with 1024 x 1024 subarrays.
module pim_accel
  import pim_pkg::*;
#(
  parameter int   ROWS = 1024,
  parameter int   COLS = 1024,
  parameter int   NM   = 23,
  parameter int   NE   = 8,
  parameter row_t PTMP = 10'd192
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic            cmd_valid,
  output logic            cmd_ready,
  input  acc_op_e         cmd_op,
  input  row_t            cmd_a,
  input  row_t            cmd_b,
  input  row_t            cmd_r,
  output logic            done,
  input  logic            host_wr_en,
  input  row_t            host_wr_row,
  input  logic [COLS-1:0] host_wr_data,
  input  row_t            host_rd_row,
  output logic [COLS-1:0] host_rd_data,
  output logic [31:0]     stat_steps,
  output logic [31:0]     stat_searches
);
  typedef enum logic [2:0] {S_IDLE, S_MUL, S_ADD, S_MAC_MUL, S_MAC_ADD} state_e;
  state_e st;

  row_t ra, rb, rr;

  logic mul_start, mul_busy, mul_done, mul_valid;
  logic add_start, add_busy, add_done, add_valid;
  mop_t mul_mop, add_mop, mop;
  logic mop_valid, mop_ready;
  row_t mul_r, add_a, add_b;
  sa_cmd_t sa_cmd;
  logic [COLS-1:0] mask;

  assign cmd_ready = (st == S_IDLE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st   <= S_IDLE;
      ra   <= '0;
      rb   <= '0;
      rr   <= '0;
      done <= 1'b0;
    end else begin
      done <= 1'b0;
      unique case (st)
        S_IDLE: if (cmd_valid) begin
          ra <= cmd_a;
          rb <= cmd_b;
          rr <= cmd_r;
          unique case (cmd_op)
            OP_MUL:  st <= S_MUL;
            OP_ADD:  st <= S_ADD;
            default: st <= S_MAC_MUL;
          endcase
        end
        S_MUL:     if (mul_done) begin st <= S_IDLE; done <= 1'b1; end
        S_ADD:     if (add_done) begin st <= S_IDLE; done <= 1'b1; end
        S_MAC_MUL: if (mul_done) st <= S_MAC_ADD;
        S_MAC_ADD: if (add_done) begin st <= S_IDLE; done <= 1'b1; end
        default:   st <= S_IDLE;
      endcase
    end
  end

  // Start each sequencer once when its state is entered.
  logic started;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) started <= 1'b0;
    else if (st == S_IDLE || mul_done || add_done) started <= 1'b0;
    else started <= 1'b1;
  end

  assign mul_start = !started && (st == S_MUL || st == S_MAC_MUL);
  assign add_start = !started && (st == S_ADD || st == S_MAC_ADD);
  assign mul_r     = (st == S_MAC_MUL) ? PTMP : rr;
  assign add_a     = (st == S_MAC_ADD) ? PTMP : ra;
  assign add_b     = (st == S_MAC_ADD) ? rr   : rb;

  fp_mul_ctrl #(.NM(NM), .NE(NE)) u_mul (
    .clk, .rst_n, .start(mul_start), .a_base(ra), .b_base(rb), .r_base(mul_r),
    .busy(mul_busy), .done(mul_done), .mop(mul_mop), .mop_valid(mul_valid),
    .mop_ready(mop_ready && mul_busy)
  );

  fp_add_ctrl #(.NM(NM), .NE(NE)) u_add (
    .clk, .rst_n, .start(add_start), .a_base(add_a), .b_base(add_b), .r_base(rr),
    .busy(add_busy), .done(add_done), .mop(add_mop), .mop_valid(add_valid),
    .mop_ready(mop_ready && add_busy)
  );

  assign mop       = mul_busy ? mul_mop : add_mop;
  assign mop_valid = mul_valid || add_valid;

  fa_engine u_eng (
    .clk, .rst_n, .mop, .mop_valid, .mop_ready, .sa_cmd,
    .stat_steps, .stat_searches
  );

  mram_subarray #(.ROWS(ROWS), .COLS(COLS)) u_array (
    .clk, .rst_n, .cmd(sa_cmd),
    .host_wr_en(host_wr_en && cmd_ready), .host_wr_row, .host_wr_data,
    .host_rd_row, .host_rd_data, .mask
  );

  a_one_sequencer: assert property (@(posedge clk) disable iff (!rst_n) !(mul_busy && add_busy));
  a_host_idle:     assert property (@(posedge clk) disable iff (!rst_n) host_wr_en |-> cmd_ready);
endmodule
