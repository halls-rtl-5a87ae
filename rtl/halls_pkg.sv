// halls_pkg: types, constants and address-layout helpers shared by the HALLS
// last-level cache.
//
// HALLS is a 1MB last-level STT-RAM cache built from 32 independent 32KB banks
// grouped in four 8-bank retention-time clusters (100us, 1ms, 10ms, 100ms).
// Every bank stores 16B physical rows. Cache size, line size and
// associativity are set at run time: banks are shut down to shrink the cache,
// banks are concatenated to add ways, and several consecutive 16B rows are
// fetched to form a 32B or 64B line. The sizes here (32 banks, 32KB banks,
// 16B rows, 4 clusters of 8, 4-bit block counters, write latencies 3/4/6/7
// cycles, hit latency 2 cycles) are the paper's. The 32-bit address, the
// encodings of the structs and the bank operation format are this design's.
//
// A configuration is held in log2 form:
//   size_lg : log2(number of active banks)  2..5  (128KB..1MB)
//   line_lg : log2(line size / 16B)         0..2  (16B..64B)
//   way_lg  : log2(associativity)           0..4  (1..16 ways), never above size_lg
// Address split for a configuration (A = 2^way_lg ways, R = 2^line_lg rows/line):
//   addr[3:0]                      byte in a 16B row
//   addr[4 +: line_lg]             row within the line ("chunk")
//   set  = addr >> (4+line_lg), SET_LG = size_lg - way_lg + 11 - line_lg bits
//   tag  = addr >> (4+line_lg+SET_LG)
//   setgroup = set >> (11-line_lg), line-in-bank = low (11-line_lg) bits of set
//   virtual bank of way w = setgroup*A + w (layout of the paper's VBank figure)
package halls_pkg;

  localparam int ADDR_W        = 32;
  localparam int ROW_BYTES     = 16;                 // physical line size
  localparam int DATA_W        = ROW_BYTES * 8;      // 128 bits per row
  localparam int BANK_BYTES    = 32 * 1024;          // 32KB banks
  localparam int BANK_ROWS     = BANK_BYTES / ROW_BYTES; // 2048
  localparam int ROW_W         = $clog2(BANK_ROWS);  // 11
  localparam int N_CLUSTERS    = 4;
  localparam int BANKS_PER_CL  = 8;
  localparam int N_BANKS       = N_CLUSTERS * BANKS_PER_CL; // 32
  localparam int PB_W          = $clog2(N_BANKS);    // 5
  localparam int MAX_WAYS      = 16;
  localparam int TAG_W         = ADDR_W - 15;        // tag never longer than this
  localparam int CNT_W         = 4;                  // per-block retention counter
  localparam int HIT_LAT       = 2;                  // cycles, Table 2

  // Configuration in log2 form (see header).
  typedef struct packed {
    logic [2:0] size_lg;
    logic [1:0] line_lg;
    logic [2:0] way_lg;
  } cfg_t;

  localparam cfg_t CFG_MAX = '{size_lg: 3'd5, line_lg: 2'd2, way_lg: 3'd4};

  // A physical bank: retention cluster and bank within the cluster (BankID).
  typedef struct packed {
    logic [1:0] cluster;
    logic [2:0] bank;
  } pbank_t;

  typedef pbank_t [N_BANKS-1:0] vmap_t;  // indexed by virtual bank

  // One operation sent to a bank.
  typedef struct packed {
    logic              lookup;   // read row + tag check at mrow
    logic              data_we;  // write wdata to row
    logic              meta_we;  // write valid/dirty/tag at mrow, clear its counter
    logic [ROW_W-1:0]  row;      // data row
    logic [ROW_W-1:0]  mrow;     // head row of the line: holds valid/tag/dirty/counter
    logic [TAG_W-1:0]  tag;
    logic              m_valid;
    logic              m_dirty;
    logic [DATA_W-1:0] wdata;
  } bank_op_t;

  // A bank's answer to a lookup.
  typedef struct packed {
    logic              hit;
    logic              valid;
    logic              dirty;
    logic [TAG_W-1:0]  tag;
    logic [DATA_W-1:0] rdata;
  } bank_rsp_t;

  // Write latency of each cluster in cycles (Table 2: 100us, 1ms, 10ms, 100ms).
  localparam int WLAT [N_CLUSTERS] = '{3, 4, 6, 7};

  function automatic int unsigned pbank_idx(pbank_t p);
    return 32'({p.cluster, p.bank});
  endfunction

  // Number of set-index bits of a configuration.
  function automatic int unsigned set_lg(cfg_t c);
    return int'(c.size_lg) - int'(c.way_lg) + ROW_W - int'(c.line_lg);
  endfunction

  // Byte address of row `chunk` of the line with this tag and set.
  function automatic logic [ADDR_W-1:0] line_addr(cfg_t c, logic [TAG_W-1:0] tag,
                                                  logic [ADDR_W-1:0] set,
                                                  logic [ADDR_W-1:0] chunk);
    logic [ADDR_W-1:0] blk;
    blk = (ADDR_W'(tag) << set_lg(c)) | set;
    return (blk << (4 + c.line_lg)) | (chunk << 4);
  endfunction

  // Set index held by head row `row` of a bank that serves virtual bank `vb`.
  function automatic logic [ADDR_W-1:0] row_set(cfg_t c, logic [PB_W-1:0] vb,
                                                logic [ROW_W-1:0] row);
    logic [ADDR_W-1:0] grp;
    grp = ADDR_W'(vb) >> c.way_lg;
    return (grp << (ROW_W - int'(c.line_lg))) | (ADDR_W'(row) >> c.line_lg);
  endfunction

  // Mapping used while the configuration is tuned: virtual bank v goes to the
  // 10ms cluster first (cluster (2 + v/8) mod 4), bank v mod 8.
  function automatic vmap_t cfg_tuning_map();
    vmap_t m;
    for (int v = 0; v < N_BANKS; v++) begin
      m[v].cluster = 2'((2 + v / BANKS_PER_CL) % N_CLUSTERS);
      m[v].bank    = 3'(v % BANKS_PER_CL);
    end
    return m;
  endfunction

endpackage
