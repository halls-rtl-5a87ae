// stt_bank: one 32KB STT-RAM cache bank of HALLS with its own valid checker,
// tag comparator and per-block retention counters.
//
// The bank is direct-mapped on its own: it holds BANK_ROWS 16B rows, each with
// a data word, and metadata (valid, dirty, tag, 4-bit retention counter) that
// is only used on the head row of a logical line; a 32B or 64B line is 2 or 4
// consecutive rows. Bank hit = valid AND (stored tag == requested tag), as in
// the paper's bank detail figure.
//
// Operations (bank_op_t) are accepted when `sel` is high and the bank is idle:
//   lookup : HIT_LAT cycles after the accepting edge `done` pulses with rsp (hit, valid, dirty,
//            stored tag of mrow, data of row).
//   data_we/meta_we : the write happens on the accepting edge; `done` pulses
//            so that the op takes W_LAT cycles (the cluster's write latency,
//            Table 2; at least 2). A meta
//            write sets valid/dirty/tag of mrow and resets its counter, so a
//            block's lifetime restarts at every write, as the paper states.
//
// Retention counter (paper: a state machine clocked at retention time / N,
// advancing from the initial state; at the maximum state the block is evicted,
// dirty blocks written back first). Here each `tick` starts a sweep that
// walks all rows in cycles when no operation is accepted, advancing the
// counter of every valid head row. A block whose counter reaches 2^CNT_W-1 is
// evicted: a clean block is invalidated at once (exp_clean pulses); for a dirty one the sweep
// stops, raises exp_req with exp_row, and waits for exp_ack (after the
// controller has written the line back) before invalidating it. A tick that
// arrives during a sweep is remembered and starts the next sweep. The sweep
// form of the counter and its ordering against operations are this design's.
//
// When pwr_en is low (bank shut down) the bank accepts nothing and does not
// sweep; its contents are kept (STT-RAM is non-volatile).
module stt_bank
  import halls_pkg::*;
#(
  parameter int unsigned W_LAT = 3,        // write latency in cycles
  parameter int unsigned ROWS  = BANK_ROWS
) (
  input  logic       clk,
  input  logic       rst_n,
  input  logic       pwr_en,
  input  logic       tick,
  input  logic       sel,
  input  bank_op_t   op,
  output logic       ready,
  output logic       done,
  output bank_rsp_t  rsp,
  output logic       exp_req,
  output logic [ROW_W-1:0] exp_row,
  input  logic       exp_ack,
  output logic       exp_clean           // pulse: a clean block expired
);
  localparam logic [CNT_W-1:0] CNT_MAX = '1;
  if (W_LAT < 2 || W_LAT > 15) $error("stt_bank: W_LAT must be 2..15");

  logic [DATA_W-1:0] data_mem [ROWS];
  logic [TAG_W-1:0]  tag_mem  [ROWS];
  logic [CNT_W-1:0]  cnt_mem  [ROWS];
  logic [ROWS-1:0]   valid_q, dirty_q;

  logic [3:0]        busy_cnt;
  logic              accept;
  logic [ROW_W-1:0]  sw_ptr;
  logic              sw_active, sw_pend, exp_wait;

  assign ready  = pwr_en && busy_cnt == 0;
  assign accept = sel && ready;

  // Sweep step on cycles without an accepted op.
  logic sw_step;
  assign sw_step = pwr_en && sw_active && !exp_wait && !accept && busy_cnt == 0;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      valid_q   <= '0;
      dirty_q   <= '0;
      busy_cnt  <= '0;
      done      <= 1'b0;
      rsp       <= '0;
      sw_ptr    <= '0;
      sw_active <= 1'b0;
      sw_pend   <= 1'b0;
      exp_wait  <= 1'b0;
      exp_clean <= 1'b0;
    end else begin
      done      <= 1'b0;
      exp_clean <= 1'b0;
      if (tick) sw_pend <= 1'b1;
      if (busy_cnt != 0) begin
        busy_cnt <= busy_cnt - 1'b1;
        if (busy_cnt == 1) done <= 1'b1;
      end
      if (accept) begin
        if (op.lookup) begin
          rsp.hit   <= valid_q[op.mrow] && tag_mem[op.mrow] == op.tag;
          rsp.valid <= valid_q[op.mrow];
          rsp.dirty <= dirty_q[op.mrow];
          rsp.tag   <= tag_mem[op.mrow];
          rsp.rdata <= data_mem[op.row];
          busy_cnt  <= 4'(HIT_LAT - 1);
        end else begin
          busy_cnt  <= 4'(W_LAT - 1);
        end
        if (op.data_we) data_mem[op.row] <= op.wdata;
        if (op.meta_we) begin
          valid_q[op.mrow] <= op.m_valid;
          dirty_q[op.mrow] <= op.m_dirty;
          tag_mem[op.mrow] <= op.tag;
          cnt_mem[op.mrow] <= '0;
        end
      end
      // expiry of a dirty block: controller has written it back
      if (exp_wait && exp_ack) begin
        exp_wait        <= 1'b0;
        valid_q[sw_ptr] <= 1'b0;
        dirty_q[sw_ptr] <= 1'b0;
        sw_ptr          <= sw_ptr + 1'b1;
        if (32'(sw_ptr) == ROWS - 1) sw_active <= 1'b0;
      end
      if (!sw_active && !exp_wait && sw_pend && !tick) begin
        sw_active <= 1'b1;
        sw_pend   <= 1'b0;
        sw_ptr    <= '0;
      end
      if (sw_step) begin
        if (valid_q[sw_ptr] && cnt_mem[sw_ptr] == CNT_MAX - 1'b1) begin
          cnt_mem[sw_ptr] <= CNT_MAX;
          if (dirty_q[sw_ptr]) begin
            exp_wait <= 1'b1;              // hold pointer until written back
          end else begin
            valid_q[sw_ptr] <= 1'b0;
            exp_clean       <= 1'b1;
            sw_ptr <= sw_ptr + 1'b1;
            if (32'(sw_ptr) == ROWS - 1) sw_active <= 1'b0;
          end
        end else begin
          if (valid_q[sw_ptr]) cnt_mem[sw_ptr] <= cnt_mem[sw_ptr] + 1'b1;
          sw_ptr <= sw_ptr + 1'b1;
          if (32'(sw_ptr) == ROWS - 1) sw_active <= 1'b0;
        end
      end
    end
  end

  assign exp_req = exp_wait;
  assign exp_row = sw_ptr;

  // An operation is only issued to an idle, powered bank.
  a_sel_ready: assert property (@(posedge clk) disable iff (!rst_n) sel |-> ready);
  a_ack_req:   assert property (@(posedge clk) disable iff (!rst_n) exp_ack |-> exp_wait);

endmodule
