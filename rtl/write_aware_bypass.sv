// write_aware_bypass: install-or-bypass decision for DRAM-cache misses.
//
// Following the paper's Write-Aware Bypass: a writeback from the last-level
// cache that misses in the DRAM cache is always installed (write-allocate,
// so the DRAM cache buffers writes to 3D-XPoint); a demand read miss whose
// installing PC the write predictor marks write-likely is always installed
// too (preemptive write-allocate); every other demand miss is bypassed with
// probability 90% (installed with probability 10%).
//
// Own choice: the 10% draw uses a 16-bit Fibonacci LFSR (taps 16,14,13,11)
// that advances once per decision; the line is installed when the LFSR value
// is below round(65536/10) = 6554. INSTALL_PER_MILLE sets the fraction kept.
//
// Interface: dec_en marks a decision cycle; install is combinational for
// that cycle and the LFSR steps at the clock edge that ends it.
module write_aware_bypass #(
  parameter int unsigned INSTALL_PER_MILLE = 100   // 10% installed, 90% bypassed
) (
  input  logic clk,
  input  logic rst_n,
  input  logic dec_en,
  input  logic is_writeback,
  input  logic pred_dirty,
  output logic install
);
  localparam logic [16:0] THRESH = 17'((65536 * INSTALL_PER_MILLE + 500) / 1000);

  logic [15:0] lfsr;

  logic random_install;
  assign random_install = ({1'b0, lfsr} < THRESH);
  assign install        = is_writeback | pred_dirty | random_install;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)      lfsr <= 16'hACE1;
    else if (dec_en) lfsr <= {lfsr[14:0], lfsr[15] ^ lfsr[13] ^ lfsr[12] ^ lfsr[10]};
  end

endmodule
