// tb_hit_miss_predictor: self-checking test of the PC-based hit/miss
// predictor at its default size (8 cores x 256 counters of 3 bits).
// A reference table in the testbench mirrors every update; after each
// random training event the prediction for a random (core, PC) and for the
// trained one is compared with the reference. Directed part: four misses in
// a row turn a counter to "predict miss", four hits turn it back, and
// training one core does not change another core's prediction.
module tb_hit_miss_predictor;
  import tictoc_pkg::*;
  localparam int CORES = 8, ENTRIES = 256;

  logic clk = 1'b0, rst_n = 1'b0;
  logic [2:0] pred_core, upd_core;
  pc_t pred_pc, upd_pc;
  logic pred_miss, upd_en, upd_hit;
  int checks = 0, failures = 0;
  int ref_ctr [CORES][ENTRIES];

  hit_miss_predictor dut (.*);

  always #5 clk = ~clk;

  initial begin : watchdog
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic int hidx(pc_t pc);
    logic [7:0] h = '0;
    for (int b = 0; b < 48; b += 8) h ^= pc[b +: 8];
    return int'(h);
  endfunction

  task automatic check(string what, logic got, logic exp);
    checks++;
    if (got !== exp) begin
      failures++;
      $display("FAIL %s: got %0b expected %0b", what, got, exp);
    end
  endtask

  task automatic train(logic [2:0] c, pc_t pc, logic hit);
    int i = hidx(pc);
    upd_en = 1'b1; upd_core = c; upd_pc = pc; upd_hit = hit;
    @(posedge clk); #1;
    upd_en = 1'b0;
    if (!hit && ref_ctr[c][i] < 7) ref_ctr[c][i]++;
    if (hit && ref_ctr[c][i] > 0) ref_ctr[c][i]--;
  endtask

  task automatic probe(logic [2:0] c, pc_t pc);
    pred_core = c; pred_pc = pc; #1;
    check("prediction", pred_miss, ref_ctr[c][hidx(pc)] >= 4);
  endtask

  initial begin
    upd_en = 1'b0; upd_core = '0; upd_pc = '0; upd_hit = 1'b0;
    pred_core = '0; pred_pc = '0;
    foreach (ref_ctr[c, i]) ref_ctr[c][i] = 0;
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    #1;
    // directed
    probe(3, 48'h4000_1234);
    for (int k = 0; k < 3; k++) train(3, 48'h4000_1234, 1'b0);
    probe(3, 48'h4000_1234);
    check("3 misses still predict hit", pred_miss, 1'b0);
    train(3, 48'h4000_1234, 1'b0);
    probe(3, 48'h4000_1234);
    check("4 misses predict miss", pred_miss, 1'b1);
    probe(4, 48'h4000_1234);
    check("other core unaffected", pred_miss, 1'b0);
    for (int k = 0; k < 10; k++) train(3, 48'h4000_1234, 1'b0);
    for (int k = 0; k < 4; k++) train(3, 48'h4000_1234, 1'b1);
    probe(3, 48'h4000_1234);
    check("saturated at 7, 4 hits predict hit", pred_miss, 1'b0);
    // random, few PCs so counters move
    for (int n = 0; n < 4000; n++) begin
      logic [2:0] c;
      pc_t pc;
      c = 3'($urandom_range(0, 7));
      pc = {40'h0000_7f00_00, 8'($urandom_range(0, 15))} + 48'($urandom_range(0, 3) << 8);
      train(c, pc, ($urandom_range(0, 99) < 40));
      probe(c, pc);
      probe(3'($urandom_range(0, 7)), {16'h0, 32'($urandom)});
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
