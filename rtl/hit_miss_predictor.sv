// hit_miss_predictor: PC-based DRAM-cache hit/miss predictor.
//
// TicToc asks this predictor, for every read that missed in the last-level
// cache, whether the DRAM cache will hit. A predicted hit takes the TIC path
// (read the cache line, whose sideband holds its tag); a predicted miss takes
// the TOC path (consult the metadata cache first). The paper uses a PC-based
// predictor of about 1KB taken from earlier work and does not describe its
// insides; this module builds the usual form of such a predictor: per core, a
// table of saturating counters indexed by a hash of the requesting PC. A
// counter counts up on an observed miss and down on an observed hit; its most
// significant bit set means "predict miss". 8 cores x 256 entries x 3 bits =
// 768 bytes, in line with the paper's ~1KB.
//
// Interface: the prediction is combinational from (pred_core, pred_pc).
// Training (upd_en with the observed outcome) takes effect on the next clock
// edge. Reset clears all counters (predict hit).
module hit_miss_predictor
  import tictoc_pkg::*;
#(
  parameter int unsigned CORES    = 8,
  parameter int unsigned ENTRIES  = 256,
  parameter int unsigned CTR_BITS = 3
) (
  input  logic                     clk,
  input  logic                     rst_n,
  // prediction
  input  logic [$clog2(CORES)-1:0] pred_core,
  input  pc_t                      pred_pc,
  output logic                     pred_miss,
  // training
  input  logic                     upd_en,
  input  logic [$clog2(CORES)-1:0] upd_core,
  input  pc_t                      upd_pc,
  input  logic                     upd_hit
);
  localparam int unsigned IDX_BITS = $clog2(ENTRIES);
  localparam logic [CTR_BITS-1:0] CTR_MAX = '1;

  logic [CTR_BITS-1:0] ctr [CORES*ENTRIES];

  // Fold the PC into the table index.
  function automatic logic [IDX_BITS-1:0] pc_hash(pc_t pc);
    logic [IDX_BITS-1:0] h;
    h = '0;
    for (int unsigned b = 0; b < PC_BITS; b += IDX_BITS)
      h ^= IDX_BITS'(pc >> b);
    return h;
  endfunction

  function automatic int unsigned slot(logic [$clog2(CORES)-1:0] core, pc_t pc);
    return int'(core) * ENTRIES + int'(pc_hash(pc));
  endfunction

  assign pred_miss = ctr[slot(pred_core, pred_pc)][CTR_BITS-1];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int unsigned i = 0; i < CORES*ENTRIES; i++) ctr[i] <= '0;
    end else if (upd_en) begin
      if (!upd_hit && ctr[slot(upd_core, upd_pc)] != CTR_MAX)
        ctr[slot(upd_core, upd_pc)] <= ctr[slot(upd_core, upd_pc)] + 1'b1;
      else if (upd_hit && ctr[slot(upd_core, upd_pc)] != '0)
        ctr[slot(upd_core, upd_pc)] <= ctr[slot(upd_core, upd_pc)] - 1'b1;
    end
  end

endmodule
