// vbank_map_table: the virtual bank layout register and the
// virtual-to-physical bank mapping table of HALLS.
//
// Both are written by the cache tuner (paper's architecture figure: "From
// cache tuner") and read by the set address decoder. They are loaded together
// by a one-cycle `load` pulse, which the controller gives only after it has
// emptied the cache, so no line is ever looked up under a layout other than
// the one it was filled under. The table also provides the reverse mapping
// (physical bank -> virtual bank) used to rebuild addresses of lines being
// written back, and the power enable of each physical bank: a bank that no
// virtual bank of the current layout uses is shut down. Checks on load
// (this design's): each virtual bank of the layout must map to a distinct
// physical bank, and ways may not exceed banks.
// Reset state: the largest configuration (1MB, 64B lines, 16 ways) with the
// configuration-tuning mapping of halls_pkg.
module vbank_map_table
  import halls_pkg::*;
(
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  load,
  input  cfg_t                  cfg_in,
  input  vmap_t                 vmap_in,
  output cfg_t                  cfg,
  output vmap_t                 vmap,
  output logic [N_BANKS-1:0][PB_W-1:0] p2v,
  output logic [N_BANKS-1:0]    pwr_en
);
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cfg  <= CFG_MAX;
      vmap <= cfg_tuning_map();
    end else if (load) begin
      cfg  <= cfg_in;
      vmap <= vmap_in;
    end
  end

  always_comb begin
    pwr_en = '0;
    p2v    = '0;
    for (int v = 0; v < N_BANKS; v++) begin
      if (v < (1 << cfg.size_lg)) begin
        pwr_en[pbank_idx(vmap[v])] = 1'b1;
        p2v[pbank_idx(vmap[v])]    = PB_W'(v);
      end
    end
  end

  // A loaded layout is legal: ways <= banks, sizes in range, no physical bank
  // used twice.
  function automatic logic map_ok(cfg_t c, vmap_t m);
    logic [N_BANKS-1:0] used;
    used = '0;
    map_ok = c.size_lg >= 2 && c.size_lg <= 5 && c.line_lg <= 2 && c.way_lg <= c.size_lg;
    for (int v = 0; v < N_BANKS; v++)
      if (v < (1 << c.size_lg)) begin
        if (used[pbank_idx(m[v])]) map_ok = 1'b0;
        used[pbank_idx(m[v])] = 1'b1;
      end
  endfunction

  a_legal_load: assert property (@(posedge clk) disable iff (!rst_n) load |-> map_ok(cfg_in, vmap_in));
endmodule
