// tictoc_pkg: types and constants shared by the TicToc DRAM-cache controller.
//
// The DRAM cache is direct-mapped with 64-byte lines. Every line address
// splits into a set index (which cache line it maps to) and a tag. Each
// cache line carries its own metadata in an 8-byte sideband next to the
// 64-byte data (the spare ECC bits): that is the TIC ("tag inside
// cacheline") copy. A second copy, the TOC ("tag outside cacheline")
// metadata, packs one byte per line for 64 consecutive sets into one
// 64-byte metadata line kept in a separate region of the DRAM cache and
// cached on chip.
//
// Sizes that follow the paper: 4GB cache of 64B lines (2^26 sets), one
// byte of metadata per line made of 6 tag bits, 1 dirty bit and 1 valid
// bit, 64 entries per metadata line, 512-entry metadata cache, 8-byte
// ECC+tag+dirty sideband. Own choices: the bit order inside the metadata
// byte and the sideband, the channel command format, and the 11-bit
// sampling record (signature, written-to bit, signature-valid bit) kept in
// the sideband of a metadata line.
package tictoc_pkg;

  // ---------------------------------------------------------------- sizes
  localparam int unsigned LINE_BITS  = 512;  // 64-byte line
  localparam int unsigned SIDE_BITS  = 64;   // 8-byte ECC+TAG+D sideband
  localparam int unsigned TAG_BITS   = 6;    // tag bits per line
  localparam int unsigned PC_BITS    = 48;   // program counter width
  localparam int unsigned SIG_BITS   = 9;    // write-predictor signature
  localparam int unsigned SLOT_BITS  = 6;    // 64 entries per metadata line
  localparam int unsigned DADDR_BITS = 34;   // device line address on the channel

  typedef logic [LINE_BITS-1:0] line_t;
  typedef logic [SIDE_BITS-1:0] side_t;
  typedef logic [TAG_BITS-1:0]  tag_t;
  typedef logic [PC_BITS-1:0]   pc_t;
  typedef logic [SIG_BITS-1:0]  sig_t;
  typedef logic [DADDR_BITS-1:0] daddr_t;

  // One-byte metadata of a line. The same byte appears in the TIC
  // sideband (bits 7:0) and as one of the 64 bytes of a TOC metadata line.
  typedef struct packed {
    logic valid;
    logic dirty;
    tag_t tag;
  } meta_t;

  // Sampling record of the one sampled line per metadata line, held in the
  // sideband of the metadata line: signature of the installing PC, the
  // written-to bit, and whether the signature is known (lines installed by
  // a writeback have no installing PC).
  typedef struct packed {
    logic sv;
    logic w;
    sig_t sig;
  } samp_t;
  localparam int unsigned SAMP_BITS = $bits(samp_t);

  // ------------------------------------------------------------- channel
  // One command channel shared by the DRAM cache and the 3D-XPoint memory.
  typedef enum logic [1:0] {
    DEV_CACHE = 2'd0,   // DRAM cache data line
    DEV_META  = 2'd1,   // DRAM cache metadata line (TOC region)
    DEV_XP    = 2'd2    // 3D-XPoint main memory
  } dev_e;

  typedef struct packed {
    dev_e   dev;
    logic   write;
    daddr_t addr;
    line_t  data;
    side_t  side;
  } ch_cmd_t;

  typedef struct packed {
    dev_e  dev;
    line_t data;
    side_t side;
  } ch_rsp_t;

  // ------------------------------------------------------------- events
  // One-cycle pulses naming the mechanism a request went through, for
  // performance counters outside the controller.
  typedef struct packed {
    logic tic_path;         // predicted hit: cache line read first (TIC)
    logic toc_path;         // predicted miss: metadata consulted first (TOC)
    logic l4_hit;           // read hit in the DRAM cache
    logic l4_miss;          // read miss in the DRAM cache
    logic mispredict;       // hit/miss prediction was wrong
    logic mc_hit;           // metadata-cache hit
    logic mc_miss;          // metadata-cache miss (metadata line fetched)
    logic mc_writeback;     // modified metadata line written back to DRAM
    logic dcd_skip;         // writeback with DCP and DCD set: no TOC access
    logic toc_dirty_upd;    // TOC dirty bit changed by a writeback
    logic pdm_saved;        // writeback found TOC dirty already set (PDM)
    logic pdm_install;      // line installed Predicted-Dirty
    logic clean_install;    // demand line installed clean
    logic wb_install;       // writeback miss installed (write-allocate)
    logic bypass;           // demand miss not installed
    logic victim_probe;     // victim read to learn its TIC dirty bit
    logic victim_wb;        // dirty victim written to 3D-XPoint
    logic swp_train;        // write predictor trained by a sampled eviction
  } evt_t;

  // ------------------------------------------------------------- helpers
  // The metadata byte sits in bits 7:0 of the sideband.
  function automatic meta_t side_meta(logic [7:0] b);
    return meta_t'(b);
  endfunction

  function automatic side_t meta_side(meta_t m);
    return side_t'(m);
  endfunction

  // The sampling record sits in the low SAMP_BITS bits of a metadata
  // line's sideband.
  function automatic samp_t side_samp(logic [SAMP_BITS-1:0] b);
    return samp_t'(b);
  endfunction

  // Signature of a program counter: PC modulo the table size, i.e. its low
  // SIG_BITS bits (callers pass those bits).
  function automatic sig_t pc_sig(logic [SIG_BITS-1:0] pc_low);
    return sig_t'(pc_low);
  endfunction

endpackage
