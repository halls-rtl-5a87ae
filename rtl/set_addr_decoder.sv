// set_addr_decoder: the modified set address decoder of HALLS.
//
// Combinational. From the CPU request address, the virtual bank layout (the
// configuration: size, line size, associativity) and the virtual-to-physical
// bank mapping table, it derives the tag, the set, the head row of the line
// inside a bank (index) and the row of the requested 16B chunk, and for every
// way of the set the virtual bank (setgroup*ways + way, as in the paper's
// virtual bank layout figure) and the physical bank (ClusterID, BankID) that
// serves it. `bank_sel` is the resulting one-hot-per-way select of the 32
// physical banks, grouped by cluster. It also gathers the bank hit bits of the
// selected banks into one hit and the index of the hitting way/bank, which is
// the "Hit" path back to the decoder in the architecture figure.
// The address split is given in halls_pkg; it is this design's reading of
// the layout figure (sets split across banks in contiguous set ranges).
module set_addr_decoder
  import halls_pkg::*;
(
  input  logic [ADDR_W-1:0]            addr,
  input  cfg_t                         cfg,
  input  vmap_t                        vmap,
  output logic [TAG_W-1:0]             tag,
  output logic [ADDR_W-1:0]            set,
  output logic [ROW_W-1:0]             head_row,
  output logic [ROW_W-1:0]             row,
  output logic [MAX_WAYS-1:0]          way_en,
  output logic [MAX_WAYS-1:0][PB_W-1:0] way_vbank,
  output logic [MAX_WAYS-1:0][PB_W-1:0] way_pbank,
  output logic [N_BANKS-1:0]           bank_sel,
  input  logic [N_BANKS-1:0]           bank_hit,
  output logic                         hit,
  output logic [$clog2(MAX_WAYS)-1:0]  hit_way
);
  logic [ADDR_W-1:0] blk, grp, lib, chunk;
  int unsigned       slg;

  always_comb begin
    slg      = set_lg(cfg);
    blk      = addr >> (4 + cfg.line_lg);
    set      = blk & ((ADDR_W'(1) << slg) - 1);
    tag      = TAG_W'(blk >> slg);
    chunk    = (addr >> 4) & ((ADDR_W'(1) << cfg.line_lg) - 1);
    grp      = set >> (ROW_W - int'(cfg.line_lg));
    lib      = set & ((ADDR_W'(1) << (ROW_W - int'(cfg.line_lg))) - 1);
    head_row = ROW_W'(lib << cfg.line_lg);
    row      = head_row | ROW_W'(chunk);
    bank_sel = '0;
    hit      = 1'b0;
    hit_way  = '0;
    for (int w = 0; w < MAX_WAYS; w++) begin
      way_en[w]    = w < (1 << cfg.way_lg);
      way_vbank[w] = PB_W'((grp << cfg.way_lg) + ADDR_W'(w));
      way_pbank[w] = PB_W'(pbank_idx(vmap[way_vbank[w]]));
      if (way_en[w]) begin
        bank_sel[way_pbank[w]] = 1'b1;
        if (bank_hit[way_pbank[w]] && !hit) begin
          hit     = 1'b1;
          hit_way = $clog2(MAX_WAYS)'(w);
        end
      end
    end
  end
endmodule
