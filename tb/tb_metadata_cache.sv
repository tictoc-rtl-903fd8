// tb_metadata_cache: self-checking test of the metadata cache at its default
// size (512 direct-mapped entries of one 64-byte metadata line each).
// A reference model (one slot per index holding metadata-line number, line,
// sampling record, dirty flag) mirrors every write. Random lookups over a
// pool of metadata lines that collide on the same indices check the hit
// flag, the returned line and record on a hit, and the occupant reported for
// write-back (valid, dirty, metadata-line number) one cycle after the lookup.
module tb_metadata_cache;
  import tictoc_pkg::*;
  localparam int ENTRIES = 512;
  logic clk = 1'b0, rst_n = 1'b0;
  logic lk_en, lk_hit, lk_vic_valid, lk_vic_dirty, wr_en, wr_dirty;
  logic [19:0] lk_mline, lk_vic_mline, wr_mline;
  line_t lk_line, wr_line;
  samp_t lk_samp, wr_samp;
  int checks = 0, failures = 0;

  logic        m_valid [ENTRIES];
  logic        m_dirty [ENTRIES];
  logic [19:0] m_ml    [ENTRIES];
  line_t       m_line  [ENTRIES];
  samp_t       m_samp  [ENTRIES];

  metadata_cache dut (.*);
  always #5 clk = ~clk;

  initial begin : watchdog
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(string what, logic [511:0] got, logic [511:0] exp);
    checks++;
    if (got !== exp) begin failures++; $display("FAIL %s: got %0h exp %0h", what, got, exp); end
  endtask

  function automatic logic [19:0] pick();
    // 8 indices, 4 aliases each
    return 20'($urandom_range(0, 3) * ENTRIES + $urandom_range(0, 7) * 37);
  endfunction

  task automatic lookup(logic [19:0] ml);
    int i = int'(ml[8:0]);
    lk_en = 1'b1; lk_mline = ml;
    @(posedge clk); #1;
    lk_en = 1'b0;
    check("hit", 512'(lk_hit), 512'(m_valid[i] && m_ml[i] == ml));
    check("victim valid", 512'(lk_vic_valid), 512'(m_valid[i]));
    if (m_valid[i]) begin
      check("victim dirty", 512'(lk_vic_dirty), 512'(m_dirty[i]));
      check("victim line number", 512'(lk_vic_mline), 512'(m_ml[i]));
      check("line", lk_line, m_line[i]);
      check("sampling record", 512'(lk_samp), 512'(m_samp[i]));
    end
  endtask

  task automatic write(logic [19:0] ml, logic dirty);
    int i = int'(ml[8:0]);
    line_t l;
    for (int k = 0; k < 16; k++) l[k*32 +: 32] = $urandom;
    wr_en = 1'b1; wr_mline = ml; wr_line = l; wr_samp = samp_t'($urandom); wr_dirty = dirty;
    m_valid[i] = 1'b1; m_dirty[i] = dirty; m_ml[i] = ml; m_line[i] = l; m_samp[i] = wr_samp;
    @(posedge clk); #1;
    wr_en = 1'b0;
  endtask

  initial begin
    lk_en = 1'b0; wr_en = 1'b0; lk_mline = '0; wr_mline = '0; wr_line = '0;
    wr_samp = '0; wr_dirty = 1'b0;
    foreach (m_valid[i]) begin m_valid[i] = 1'b0; m_dirty[i] = 1'b0; end
    repeat (2) @(posedge clk);
    rst_n = 1'b1; #1;
    lookup(20'd5);
    check("empty cache misses", 512'(lk_hit), 512'(0));
    write(20'd5, 1'b0);
    lookup(20'd5);
    check("filled line hits", 512'(lk_hit), 512'(1));
    lookup(20'd5 + 20'd512);
    check("alias misses", 512'(lk_hit), 512'(0));
    check("alias sees occupant", 512'(lk_vic_mline), 512'(5));
    for (int n = 0; n < 6000; n++) begin
      logic [19:0] ml;
      ml = pick();
      if ($urandom_range(0, 2) == 0) write(ml, 1'($urandom_range(0, 1)));
      else lookup(ml);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
