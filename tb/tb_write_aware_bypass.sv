// tb_write_aware_bypass: self-checking test of the install/bypass decision.
// Writebacks and predicted-dirty demand misses must always install; other
// demand misses must follow a reference copy of the 16-bit LFSR draw exactly
// and, over 20000 decisions, be installed close to 10% of the time (90%
// bypass), between 9% and 11%.
module tb_write_aware_bypass;
  logic clk = 1'b0, rst_n = 1'b0;
  logic dec_en, is_writeback, pred_dirty, install;
  int checks = 0, failures = 0;
  logic [15:0] ref_lfsr;
  int kept = 0, total = 0;

  write_aware_bypass dut (.*);
  always #5 clk = ~clk;

  initial begin : watchdog
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(string what, logic got, logic exp);
    checks++;
    if (got !== exp) begin failures++; $display("FAIL %s: got %0b exp %0b", what, got, exp); end
  endtask

  initial begin
    dec_en = 1'b0; is_writeback = 1'b0; pred_dirty = 1'b0;
    ref_lfsr = 16'hACE1;
    repeat (2) @(posedge clk);
    rst_n = 1'b1; #1;
    for (int n = 0; n < 30000; n++) begin
      int kind;
      kind = $urandom_range(0, 9);
      is_writeback = (kind == 0);
      pred_dirty   = (kind == 1);
      dec_en       = 1'b1;
      #1;
      if (kind == 0)      check("writeback always installs", install, 1'b1);
      else if (kind == 1) check("predicted dirty always installs", install, 1'b1);
      else begin
        check("random draw matches reference", install, ref_lfsr < 16'd6554);
        total++;
        if (install) kept++;
      end
      @(posedge clk); #1;
      ref_lfsr = {ref_lfsr[14:0], ref_lfsr[15] ^ ref_lfsr[13] ^ ref_lfsr[12] ^ ref_lfsr[10]};
    end
    dec_en = 1'b0;
    checks++;
    if (kept * 100 < total * 9 || kept * 100 > total * 11) begin
      failures++;
      $display("FAIL install fraction %0d/%0d", kept, total);
    end
    $display("installed %0d of %0d clean demand misses", kept, total);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
