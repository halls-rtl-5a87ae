// halls_ctrl: cache controller of the HALLS last-level cache.
//
// It serves one CPU request at a time, a read or write of one 16B chunk, on
// the current virtual bank layout and mapping (from vbank_map_table). The
// set_addr_decoder turns the address into tag, index rows and the physical
// bank of every way; the controller sends one lookup to all of those banks at
// once (each bank compares its own tag) and collects the bank hits.
//   * Read hit: the chunk is returned. Write hit: the chunk is written, the
//     line marked dirty and its retention counter restarted.
//   * Miss: the victim way is the first invalid way, else a random one
//     (random replacement, the paper's system table). A dirty victim is
//     written back row by row; the new line is then fetched from memory row
//     by row (multi-line fetch: a 32B/64B line is 2/4 physical 16B rows) and
//     the request is looked up again, now hitting.
//   * Expiry: when a bank's retention counter expires a dirty line, the line
//     is written back and the bank told (exp_ack) to drop it. Expiries are
//     served before new CPU requests.
//   * Reconfiguration: on reconf_req the controller writes back every dirty
//     line of every powered bank and invalidates every valid line, then pulses
//     reconf_done, which also loads the new layout and mapping. The paper only
//     says that reconfiguration swaps cache data ("context switching"); this
//     write-back-and-empty policy is this design's.
// Write-back, write-allocate, one outstanding request, and the memory
// handshake (mem_req held until a one-cycle mem_ack; read data valid with
// mem_ack) are this design's choices. CPU handshake: a request is taken when
// cpu_req_valid && cpu_req_ready; cpu_rsp_valid pulses once per request with
// the read data and whether it hit at first lookup.
module halls_ctrl
  import halls_pkg::*;
(
  input  logic                       clk,
  input  logic                       rst_n,
  // CPU / L1 side
  input  logic                       cpu_req_valid,
  output logic                       cpu_req_ready,
  input  logic                       cpu_req_we,
  input  logic [ADDR_W-1:0]          cpu_req_addr,
  input  logic [DATA_W-1:0]          cpu_req_wdata,
  output logic                       cpu_rsp_valid,
  output logic [DATA_W-1:0]          cpu_rsp_rdata,
  output logic                       cpu_rsp_hit,
  // main memory side
  output logic                       mem_req,
  output logic                       mem_we,
  output logic [ADDR_W-1:0]          mem_addr,
  output logic [DATA_W-1:0]          mem_wdata,
  input  logic                       mem_ack,
  input  logic [DATA_W-1:0]          mem_rdata,
  // layout and mapping
  input  cfg_t                       cfg,
  input  vmap_t                      vmap,
  input  logic [N_BANKS-1:0][PB_W-1:0] p2v,
  input  logic [N_BANKS-1:0]         pwr_en,
  input  logic                       reconf_req,
  output logic                       reconf_done,
  // banks
  output logic [N_BANKS-1:0]         bank_sel,
  output bank_op_t                   bank_op,
  input  logic [N_BANKS-1:0]         bank_done,
  input  bank_rsp_t [N_BANKS-1:0]    bank_rsp,
  input  logic [N_BANKS-1:0]         exp_req,
  input  logic [N_BANKS-1:0][ROW_W-1:0] exp_row,
  output logic [N_BANKS-1:0]         exp_ack,
  // events for performance counters and monitoring
  output logic [N_BANKS-1:0]         ev_hit,
  output logic [N_BANKS-1:0]         ev_write,
  output logic [N_BANKS-1:0]         ev_fill,
  output logic                       ev_miss,
  output logic                       ev_writeback,
  output logic                       ev_expiry_wb
);
  typedef enum logic [4:0] {
    S_IDLE, S_LK_ISS, S_LK_WAIT, S_LK_EVAL, S_WR_WAIT,
    S_VWB_ISS, S_VWB_WAIT, S_VWB_MEM,
    S_FILL_MEM, S_FILL_WAIT,
    S_EV_ISS, S_EV_WAIT, S_EV_MEM, S_EV_INV, S_EV_INVW,
    S_FL_STEP, S_FL_END, S_EX_END
  } state_t;

  state_t              st;
  logic                req_we;
  logic [ADDR_W-1:0]   req_addr;
  logic [DATA_W-1:0]   req_wdata;
  logic                missed;
  logic [N_BANKS-1:0]  pend;
  logic [N_BANKS-1:0]  sel_q;
  bank_op_t            op_q;
  logic [PB_W-1:0]     vb;        // victim / target physical bank
  logic [2:0]          k;         // row of the line being moved
  logic [TAG_W-1:0]    wb_tag;
  logic [ADDR_W-1:0]   ev_set;
  logic [ROW_W-1:0]    ev_row;
  logic                ev_ret_flush;
  logic [PB_W:0]       fb;        // flush bank
  logic [ROW_W:0]      fr;        // flush row
  logic [15:0]         lfsr;

  // decoder on the held request
  logic [TAG_W-1:0]             d_tag;
  logic [ADDR_W-1:0]            d_set;
  logic [ROW_W-1:0]             d_head, d_row;
  logic [MAX_WAYS-1:0]          d_way_en;
  logic [MAX_WAYS-1:0][PB_W-1:0] d_way_vb, d_way_pb;
  logic [N_BANKS-1:0]           d_sel, bank_hit;
  logic                         d_hit;
  logic [$clog2(MAX_WAYS)-1:0]  d_hit_way;

  always_comb for (int b = 0; b < N_BANKS; b++) bank_hit[b] = bank_rsp[b].hit;

  set_addr_decoder u_dec (
    .addr(req_addr), .cfg, .vmap, .tag(d_tag), .set(d_set), .head_row(d_head),
    .row(d_row), .way_en(d_way_en), .way_vbank(d_way_vb), .way_pbank(d_way_pb),
    .bank_sel(d_sel), .bank_hit, .hit(d_hit), .hit_way(d_hit_way)
  );

  logic [3:0] rows_per_line;
  assign rows_per_line = 4'd1 << cfg.line_lg;

  // victim way: first invalid way, else random
  logic [$clog2(MAX_WAYS)-1:0] vic_way;
  logic                        vic_found;
  always_comb begin
    vic_found = 1'b0;
    vic_way   = $clog2(MAX_WAYS)'(lfsr) & $clog2(MAX_WAYS)'((1 << cfg.way_lg) - 1);
    for (int w = 0; w < MAX_WAYS; w++)
      if (d_way_en[w] && !bank_rsp[d_way_pb[w]].valid && !vic_found) begin
        vic_found = 1'b1;
        vic_way   = $clog2(MAX_WAYS)'(w);
      end
  end

  // lowest expiring bank
  logic [PB_W-1:0] ex_b;
  always_comb begin
    ex_b = '0;
    for (int b = N_BANKS - 1; b >= 0; b--) if (exp_req[b]) ex_b = PB_W'(b);
  end

  assign bank_sel      = sel_q;
  assign bank_op       = op_q;
  assign cpu_req_ready = st == S_IDLE && !reconf_req && exp_req == '0;
  assign mem_req       = st == S_VWB_MEM || st == S_FILL_MEM || st == S_EV_MEM;
  assign mem_we        = st != S_FILL_MEM;

  always_comb begin
    mem_addr  = '0;
    mem_wdata = bank_rsp[vb].rdata;
    unique case (st)
      S_VWB_MEM:  mem_addr = line_addr(cfg, wb_tag, d_set, ADDR_W'(k));
      S_FILL_MEM: mem_addr = line_addr(cfg, d_tag, d_set, ADDR_W'(k));
      S_EV_MEM:   mem_addr = line_addr(cfg, wb_tag, ev_set, ADDR_W'(k));
      default:    ;
    endcase
  end

  function automatic bank_op_t mk_lookup(logic [ROW_W-1:0] row, logic [ROW_W-1:0] mrow,
                                         logic [TAG_W-1:0] tag);
    bank_op_t o;
    o = '0;
    o.lookup = 1'b1;
    o.row = row; o.mrow = mrow; o.tag = tag;
    return o;
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st            <= S_IDLE;
      req_we        <= 1'b0;
      req_addr      <= '0;
      req_wdata     <= '0;
      missed        <= 1'b0;
      pend          <= '0;
      sel_q         <= '0;
      op_q          <= '0;
      vb            <= '0;
      k             <= '0;
      wb_tag        <= '0;
      ev_set        <= '0;
      ev_row        <= '0;
      ev_ret_flush  <= 1'b0;
      fb            <= '0;
      fr            <= '0;
      lfsr          <= 16'hACE1;
      cpu_rsp_valid <= 1'b0;
      cpu_rsp_rdata <= '0;
      cpu_rsp_hit   <= 1'b0;
      reconf_done   <= 1'b0;
      exp_ack       <= '0;
      ev_hit        <= '0;
      ev_write      <= '0;
      ev_fill       <= '0;
      ev_miss       <= 1'b0;
      ev_writeback  <= 1'b0;
      ev_expiry_wb  <= 1'b0;
    end else begin
      lfsr          <= {lfsr[14:0], lfsr[15] ^ lfsr[13] ^ lfsr[12] ^ lfsr[10]};
      sel_q         <= '0;
      cpu_rsp_valid <= 1'b0;
      reconf_done   <= 1'b0;
      exp_ack       <= '0;
      ev_hit        <= '0;
      ev_write      <= '0;
      ev_fill       <= '0;
      ev_miss       <= 1'b0;
      ev_writeback  <= 1'b0;
      ev_expiry_wb  <= 1'b0;
      if (st == S_LK_WAIT || st == S_WR_WAIT || st == S_VWB_WAIT || st == S_FILL_WAIT ||
          st == S_EV_WAIT || st == S_EV_INVW)
        pend <= pend & ~bank_done;

      unique case (st)
        S_IDLE: begin
          if (reconf_req) begin
            fb <= '0;
            fr <= '0;
            st <= S_FL_STEP;
          end else if (exp_req != '0) begin
            if (!pwr_en[ex_b]) begin
              exp_ack[ex_b] <= 1'b1;      // bank is shut down and was emptied
              st            <= S_EX_END;
            end else begin
              vb           <= ex_b;
              ev_row       <= exp_row[ex_b];
              ev_ret_flush <= 1'b0;
              k            <= '0;
              st           <= S_EV_ISS;
            end
          end else if (cpu_req_valid) begin
            req_we    <= cpu_req_we;
            req_addr  <= cpu_req_addr;
            req_wdata <= cpu_req_wdata;
            missed    <= 1'b0;
            st        <= S_LK_ISS;
          end
        end
        S_EX_END: st <= S_IDLE;           // let exp_req / reconf_req drop

        // ---------------- CPU request ----------------
        S_LK_ISS: begin
          sel_q <= d_sel;
          pend  <= d_sel;
          op_q  <= mk_lookup(d_row, d_head, d_tag);
          st    <= S_LK_WAIT;
        end
        S_LK_WAIT: if ((pend & ~bank_done) == '0 && sel_q == '0) st <= S_LK_EVAL;
        S_LK_EVAL: begin
          if (d_hit) begin
            vb <= d_way_pb[d_hit_way];
            if (!missed) ev_hit[d_way_pb[d_hit_way]] <= 1'b1;
            if (req_we) begin
              sel_q        <= '0;
              sel_q[d_way_pb[d_hit_way]] <= 1'b1;
              pend         <= '0;
              pend[d_way_pb[d_hit_way]]  <= 1'b1;
              op_q         <= '0;
              op_q.data_we <= 1'b1;
              op_q.meta_we <= 1'b1;
              op_q.row     <= d_row;
              op_q.mrow    <= d_head;
              op_q.tag     <= d_tag;
              op_q.m_valid <= 1'b1;
              op_q.m_dirty <= 1'b1;
              op_q.wdata   <= req_wdata;
              ev_write[d_way_pb[d_hit_way]] <= 1'b1;
              st           <= S_WR_WAIT;
            end else begin
              cpu_rsp_valid <= 1'b1;
              cpu_rsp_rdata <= bank_rsp[d_way_pb[d_hit_way]].rdata;
              cpu_rsp_hit   <= !missed;
              st            <= S_IDLE;
            end
          end else begin
            missed  <= 1'b1;
            ev_miss <= 1'b1;
            vb      <= d_way_pb[vic_way];
            ev_fill[d_way_pb[vic_way]] <= 1'b1;
            k       <= '0;
            wb_tag  <= bank_rsp[d_way_pb[vic_way]].tag;
            if (bank_rsp[d_way_pb[vic_way]].valid && bank_rsp[d_way_pb[vic_way]].dirty) begin
              ev_writeback <= 1'b1;
              st <= S_VWB_ISS;
            end else st <= S_FILL_MEM;
          end
        end
        S_WR_WAIT: if ((pend & ~bank_done) == '0 && sel_q == '0) begin
          cpu_rsp_valid <= 1'b1;
          cpu_rsp_rdata <= '0;
          cpu_rsp_hit   <= !missed;
          st            <= S_IDLE;
        end

        // victim write-back, one row at a time
        S_VWB_ISS: begin
          sel_q     <= '0;
          sel_q[vb] <= 1'b1;
          pend      <= '0;
          pend[vb]  <= 1'b1;
          op_q      <= mk_lookup(d_head | ROW_W'(k), d_head, '0);
          st        <= S_VWB_WAIT;
        end
        S_VWB_WAIT: if ((pend & ~bank_done) == '0 && sel_q == '0) st <= S_VWB_MEM;
        S_VWB_MEM: if (mem_ack) begin
          if (32'(k) == 32'(rows_per_line) - 1) begin
            k  <= '0;
            st <= S_FILL_MEM;
          end else begin
            k  <= k + 1'b1;
            st <= S_VWB_ISS;
          end
        end

        // line fill, one row at a time; the line becomes valid with its last row
        S_FILL_MEM: if (mem_ack) begin
          sel_q        <= '0;
          sel_q[vb]    <= 1'b1;
          pend         <= '0;
          pend[vb]     <= 1'b1;
          op_q         <= '0;
          op_q.data_we <= 1'b1;
          op_q.row     <= d_head | ROW_W'(k);
          op_q.mrow    <= d_head;
          op_q.tag     <= d_tag;
          op_q.wdata   <= mem_rdata;
          op_q.meta_we <= 32'(k) == 32'(rows_per_line) - 1;
          op_q.m_valid <= 1'b1;
          op_q.m_dirty <= 1'b0;
          ev_write[vb] <= 1'b1;
          st           <= S_FILL_WAIT;
        end
        S_FILL_WAIT: if ((pend & ~bank_done) == '0 && sel_q == '0) begin
          if (32'(k) == 32'(rows_per_line) - 1) st <= S_LK_ISS;
          else begin
            k  <= k + 1'b1;
            st <= S_FILL_MEM;
          end
        end

        // ---------------- evict one line (bank vb, head row ev_row) ----------------
        S_EV_ISS: begin
          sel_q     <= '0;
          sel_q[vb] <= 1'b1;
          pend      <= '0;
          pend[vb]  <= 1'b1;
          op_q      <= mk_lookup(ev_row | ROW_W'(k), ev_row, '0);
          ev_set    <= row_set(cfg, p2v[vb], ev_row);
          st        <= S_EV_WAIT;
        end
        S_EV_WAIT: if ((pend & ~bank_done) == '0 && sel_q == '0) begin
          if (k == 0) begin
            wb_tag   <= bank_rsp[vb].tag;
            if (!bank_rsp[vb].valid) st <= ev_ret_flush ? S_FL_STEP : S_EX_END;
            else if (bank_rsp[vb].dirty) st <= S_EV_MEM;
            else st <= S_EV_INV;
          end else st <= S_EV_MEM;
          if (k == 0 && !bank_rsp[vb].valid) begin
            if (ev_ret_flush) fr <= fr + (ROW_W+1)'(rows_per_line);
            else exp_ack[vb] <= 1'b1;
          end
        end
        S_EV_MEM: if (mem_ack) begin
          if (k == 0) begin
            if (ev_ret_flush) ev_writeback <= 1'b1;
            else ev_expiry_wb <= 1'b1;
          end
          if (32'(k) == 32'(rows_per_line) - 1) begin
            k  <= '0;
            st <= S_EV_INV;
          end else begin
            k  <= k + 1'b1;
            st <= S_EV_ISS;
          end
        end
        S_EV_INV: begin
          sel_q        <= '0;
          sel_q[vb]    <= 1'b1;
          pend         <= '0;
          pend[vb]     <= 1'b1;
          op_q         <= '0;
          op_q.meta_we <= 1'b1;
          op_q.mrow    <= ev_row;
          op_q.row     <= ev_row;
          op_q.m_valid <= 1'b0;
          op_q.m_dirty <= 1'b0;
          st           <= S_EV_INVW;
        end
        S_EV_INVW: if ((pend & ~bank_done) == '0 && sel_q == '0) begin
          k <= '0;
          if (ev_ret_flush) begin
            fr <= fr + (ROW_W+1)'(rows_per_line);
            st <= S_FL_STEP;
          end else begin
            exp_ack[vb] <= 1'b1;
            st          <= S_EX_END;
          end
        end

        // ---------------- flush for reconfiguration ----------------
        S_FL_STEP: begin
          if (fb == (PB_W+1)'(N_BANKS)) st <= S_FL_END;
          else if (!pwr_en[PB_W'(fb)] || fr >= (ROW_W+1)'(BANK_ROWS)) begin
            fb <= fb + 1'b1;
            fr <= '0;
          end else begin
            vb           <= PB_W'(fb);
            ev_row       <= ROW_W'(fr);
            ev_ret_flush <= 1'b1;
            k            <= '0;
            st           <= S_EV_ISS;
          end
        end
        S_FL_END: begin
          reconf_done <= 1'b1;
          st          <= S_EX_END;   // one cycle for reconf_req to drop
        end
        default: st <= S_IDLE;
      endcase
    end
  end

  // memory handshake: a request stays up, unchanged, until acknowledged
  a_mem_stable: assert property (@(posedge clk) disable iff (!rst_n)
    mem_req && !mem_ack |=> mem_req && $stable(mem_addr));
endmodule
