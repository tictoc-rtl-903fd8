// write_predictor: Signature-based Write Predictor (SWP).
//
// Predicts, when a line is installed in the DRAM cache, whether it will be
// written before it leaves. Predicted-write lines are installed
// "Predicted-Dirty" (TOC dirty bit set at install) and are always installed
// by the write-aware bypass policy.
//
// Following the paper: a table of 512 saturating 3-bit counters indexed by
// the signature of the installing PC. A small sample of DRAM-cache lines
// records their installing signature and a written-to bit; when such a
// sampled line is evicted, the counter of its signature is incremented if the
// line was written and decremented otherwise. A non-zero counter predicts
// "write-likely". Own choices: signature = PC mod 512 (the figure prints
// PC%(1<<10), the text gives 512 entries with a 9-bit PC field; the 9-bit
// form is used so that every signature has its own counter), and counters
// reset to zero (predict clean until trained).
//
// Interface: prediction is combinational from pred_sig. A training event
// (train_en, train_sig, train_written) updates the counter on the next clock
// edge; a training event and a prediction for the same signature in the same
// cycle see the old counter value.
module write_predictor
  import tictoc_pkg::*;
#(
  parameter int unsigned ENTRIES  = 512,
  parameter int unsigned CTR_BITS = 3
) (
  input  logic clk,
  input  logic rst_n,
  input  sig_t pred_sig,
  output logic pred_dirty,
  input  logic train_en,
  input  sig_t train_sig,
  input  logic train_written
);
  localparam int unsigned IDX_BITS = $clog2(ENTRIES);
  localparam logic [CTR_BITS-1:0] CTR_MAX = '1;

  logic [CTR_BITS-1:0] ctr [ENTRIES];
  logic [IDX_BITS-1:0] pidx, tidx;

  assign pidx = IDX_BITS'(pred_sig);
  assign tidx = IDX_BITS'(train_sig);
  assign pred_dirty = (ctr[pidx] != '0);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int unsigned i = 0; i < ENTRIES; i++) ctr[i] <= '0;
    end else if (train_en) begin
      if (train_written && ctr[tidx] != CTR_MAX) ctr[tidx] <= ctr[tidx] + 1'b1;
      else if (!train_written && ctr[tidx] != '0) ctr[tidx] <= ctr[tidx] - 1'b1;
    end
  end

endmodule
