// tb_write_predictor: self-checking test of the Signature-based Write
// Predictor at its default size (512 counters of 3 bits). A reference table
// mirrors every training event: written-to evictions count up (saturating at
// 7), never-written evictions count down (saturating at 0), and a non-zero
// counter must predict "write-likely". Directed part: a fresh signature
// predicts clean, one written eviction makes it predict dirty, one clean
// eviction returns it to clean, and the signature is PC mod 512.
module tb_write_predictor;
  import tictoc_pkg::*;
  logic clk = 1'b0, rst_n = 1'b0;
  sig_t pred_sig, train_sig;
  logic pred_dirty, train_en, train_written;
  int checks = 0, failures = 0;
  int ref_ctr [512];

  write_predictor dut (.*);
  always #5 clk = ~clk;

  initial begin : watchdog
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(string what, logic got, logic exp);
    checks++;
    if (got !== exp) begin failures++; $display("FAIL %s: got %0b exp %0b", what, got, exp); end
  endtask

  task automatic train(sig_t s, logic w);
    train_en = 1'b1; train_sig = s; train_written = w;
    @(posedge clk); #1;
    train_en = 1'b0;
    if (w && ref_ctr[s] < 7) ref_ctr[s]++;
    if (!w && ref_ctr[s] > 0) ref_ctr[s]--;
  endtask

  task automatic probe(sig_t s);
    pred_sig = s; #1;
    check("prediction", pred_dirty, ref_ctr[s] != 0);
  endtask

  initial begin
    train_en = 1'b0; train_sig = '0; train_written = 1'b0; pred_sig = '0;
    foreach (ref_ctr[i]) ref_ctr[i] = 0;
    repeat (2) @(posedge clk);
    rst_n = 1'b1; #1;
    pred_sig = pc_sig(9'h037); #1;
    check("signature is PC mod 512", 1'(pred_sig == 9'h037), 1'b1);
    check("fresh signature predicts clean", pred_dirty, 1'b0);
    train(9'h037, 1'b1);
    pred_sig = 9'h037; #1;
    check("one written eviction predicts dirty", pred_dirty, 1'b1);
    pred_sig = 9'h137; #1;
    check("neighbour signature stays clean", pred_dirty, 1'b0);
    train(9'h037, 1'b0);
    pred_sig = 9'h037; #1;
    check("clean eviction back to zero", pred_dirty, 1'b0);
    for (int k = 0; k < 9; k++) train(9'h0AA, 1'b1);
    for (int k = 0; k < 6; k++) train(9'h0AA, 1'b0);
    pred_sig = 9'h0AA; #1;
    check("saturates at 7", pred_dirty, 1'b1);
    train(9'h0AA, 1'b0);
    pred_sig = 9'h0AA; #1;
    check("7 clean evictions reach zero", pred_dirty, 1'b0);
    for (int n = 0; n < 5000; n++) begin
      sig_t s;
      s = sig_t'($urandom_range(0, 31) * 16);
      train(s, ($urandom_range(0, 99) < 45));
      probe(s);
      probe(sig_t'($urandom));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
