// metadata_cache: on-chip cache of TOC metadata lines.
//
// A TOC metadata line is 64 bytes holding the one-byte metadata (valid,
// dirty, 6-bit tag) of 64 consecutive DRAM-cache sets, plus the sampling
// record of the write predictor in its sideband. The paper keeps recently
// used metadata lines in a 512-entry, 32KB on-chip cache so that misses with
// spatial locality need no DRAM access to learn residency and dirtiness.
//
// The paper gives the size only. Own choices: direct-mapped (the index is the
// low 9 bits of the metadata-line number, the rest is the tag), write-back
// (a modified entry is written to DRAM when it is replaced; the controller
// does that write, using the victim fields below), and a one-cycle
// synchronous read like an SRAM macro.
//
// Interface:
//   lookup : lk_en with lk_mline; one cycle later lk_hit, the stored line
//            and sampling record of that index, and the current occupant of
//            the index (lk_vic_*), so the controller can write it back.
//   write  : wr_en stores wr_line/wr_samp for wr_mline, marks the entry
//            valid, and sets its dirty flag to wr_dirty.
// A lookup in the same cycle as a write to the same index returns the old
// contents.
module metadata_cache
  import tictoc_pkg::*;
#(
  parameter int unsigned ENTRIES     = 512,
  parameter int unsigned MLINE_BITS  = 20    // 2^26 sets / 64 per metadata line
) (
  input  logic                  clk,
  input  logic                  rst_n,
  // lookup
  input  logic                  lk_en,
  input  logic [MLINE_BITS-1:0] lk_mline,
  output logic                  lk_hit,
  output line_t                 lk_line,
  output samp_t                 lk_samp,
  output logic                  lk_vic_valid,
  output logic                  lk_vic_dirty,
  output logic [MLINE_BITS-1:0] lk_vic_mline,
  // write / fill
  input  logic                  wr_en,
  input  logic [MLINE_BITS-1:0] wr_mline,
  input  line_t                 wr_line,
  input  samp_t                 wr_samp,
  input  logic                  wr_dirty
);
  localparam int unsigned IDX_BITS = $clog2(ENTRIES);
  localparam int unsigned CT_BITS  = MLINE_BITS - IDX_BITS;

  line_t               data_q  [ENTRIES];
  samp_t               samp_q  [ENTRIES];
  logic [CT_BITS-1:0]  tag_q   [ENTRIES];
  logic [ENTRIES-1:0]  valid_q;
  logic [ENTRIES-1:0]  dirty_q;

  logic [IDX_BITS-1:0] lk_idx, wr_idx;
  logic [CT_BITS-1:0]  lk_tag, wr_tag;
  assign lk_idx = lk_mline[IDX_BITS-1:0];
  assign lk_tag = lk_mline[MLINE_BITS-1:IDX_BITS];
  assign wr_idx = wr_mline[IDX_BITS-1:0];
  assign wr_tag = wr_mline[MLINE_BITS-1:IDX_BITS];

  // storage arrays (no reset: guarded by valid_q)
  always_ff @(posedge clk) begin
    if (wr_en) begin
      data_q[wr_idx] <= wr_line;
      samp_q[wr_idx] <= wr_samp;
      tag_q[wr_idx]  <= wr_tag;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      valid_q <= '0;
      dirty_q <= '0;
    end else if (wr_en) begin
      valid_q[wr_idx] <= 1'b1;
      dirty_q[wr_idx] <= wr_dirty;
    end
  end

  // synchronous lookup port
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      lk_hit       <= 1'b0;
      lk_vic_valid <= 1'b0;
      lk_vic_dirty <= 1'b0;
      lk_vic_mline <= '0;
      lk_line      <= '0;
      lk_samp      <= '0;
    end else if (lk_en) begin
      lk_hit       <= valid_q[lk_idx] && (tag_q[lk_idx] == lk_tag);
      lk_vic_valid <= valid_q[lk_idx];
      lk_vic_dirty <= valid_q[lk_idx] && dirty_q[lk_idx];
      lk_vic_mline <= {tag_q[lk_idx], lk_idx};
      lk_line      <= data_q[lk_idx];
      lk_samp      <= samp_q[lk_idx];
    end
  end

endmodule
