// config_tuner: HALLS configuration tuning (the paper's Algorithm 1).
//
// Starting from the largest configuration (1MB, 64B lines, 16 ways) it runs
// the application for one tuning interval per configuration and keeps the
// configuration with the lowest measured latency. Parameters are explored in
// the paper's order, size, then line size, then associativity, each halved
// step by step while halving lowers the latency; the first step that does not
// lower it (strictly) ends that parameter's loop, and the next parameter is
// explored from the best configuration found so far. Only the best
// configuration and its latency are stored.
//
// Where this design departs from a literal reading of Algorithm 1:
//  * each parameter's loop starts one halving below the best value, instead
//    of re-sampling the value already measured;
//  * after a failed step the current configuration goes back to the best
//    one (the listing leaves the failed value in CurConfig);
//  * associativity is capped at the number of active banks, because every
//    way needs at least one bank (e.g. 128KB allows at most 4 ways).
//
// Handshake: a `start` pulse begins tuning. For every sample the tuner holds
// `sample_req` high with the configuration on `cur_cfg` until `sample_done`
// pulses with that interval's latency (cycles). `done` then stays high with
// `best_cfg` and `min_latency` until the next `start`.
module config_tuner
  import halls_pkg::*;
#(
  parameter int unsigned LW          = 32,
  parameter int unsigned SIZE_MIN_LG = 2,   // 128KB = 4 banks
  parameter int unsigned LINE_MIN_LG = 0,   // 16B
  parameter int unsigned WAY_MIN_LG  = 0    // direct mapped
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          start,
  output logic          sample_req,
  output cfg_t          cur_cfg,
  input  logic          sample_done,
  input  logic [LW-1:0] latency,
  output logic          done,
  output cfg_t          best_cfg,
  output logic [LW-1:0] min_latency,
  output logic [3:0]    n_samples
);
  typedef enum logic [2:0] {S_IDLE, S_SAMPLE, S_EVAL, S_NEXT, S_DONE} state_t;
  typedef enum logic [1:0] {P_SIZE, P_LINE, P_WAYS, P_END} param_t;

  state_t        state;
  param_t        param;
  logic [LW-1:0] lat_q;

  assign sample_req = state == S_SAMPLE;
  assign done       = state == S_DONE;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state       <= S_IDLE;
      param       <= P_SIZE;
      cur_cfg     <= CFG_MAX;
      best_cfg    <= CFG_MAX;
      min_latency <= '1;
      lat_q       <= '0;
      n_samples   <= '0;
    end else if (start) begin
      state       <= S_SAMPLE;
      param       <= P_SIZE;
      cur_cfg     <= CFG_MAX;
      best_cfg    <= CFG_MAX;
      min_latency <= '1;          // Latency_max
      n_samples   <= '0;
    end else begin
      unique case (state)
        S_IDLE, S_DONE: ;
        S_SAMPLE: if (sample_done) begin
          lat_q     <= latency;
          n_samples <= n_samples + 1'b1;
          state     <= S_EVAL;
        end
        S_EVAL: begin
          if (lat_q < min_latency) begin
            min_latency <= lat_q;
            best_cfg    <= cur_cfg;
          end else begin
            cur_cfg <= best_cfg;   // break: keep the best, go to next parameter
            param   <= param_t'(param + 1'b1);
          end
          state <= S_NEXT;
        end
        S_NEXT: begin
          unique case (param)
            P_SIZE: if (32'(cur_cfg.size_lg) > SIZE_MIN_LG) begin
              cur_cfg.size_lg <= cur_cfg.size_lg - 1'b1;
              if (cur_cfg.way_lg > cur_cfg.size_lg - 1'b1)
                cur_cfg.way_lg <= cur_cfg.size_lg - 1'b1;
              state <= S_SAMPLE;
            end else param <= P_LINE;
            P_LINE: if (32'(cur_cfg.line_lg) > LINE_MIN_LG) begin
              cur_cfg.line_lg <= cur_cfg.line_lg - 1'b1;
              state <= S_SAMPLE;
            end else param <= P_WAYS;
            P_WAYS: if (32'(cur_cfg.way_lg) > WAY_MIN_LG) begin
              cur_cfg.way_lg <= cur_cfg.way_lg - 1'b1;
              state <= S_SAMPLE;
            end else param <= P_END;
            default: state <= S_DONE;
          endcase
        end
        default: state <= S_IDLE;
      endcase
    end
  end
endmodule
