// tb_tictoc_stream: streaming workloads through the TicToc controller at its
// default sizes, checking the bandwidth each request costs.
//
// Two access patterns stand in for the two kinds of memory-intensive
// programs the design targets; they differ from real programs mainly in
// footprint, which here is WINDOW sets x PASSES tags:
//   * write-once stream (like zeusmp or lbm): one PC reads a line and the
//     last-level cache writes it back modified, over a window of sets; each
//     pass uses the next tag, so every pass evicts the previous one. The
//     write predictor must learn from the sampled lines' evictions that this
//     PC writes, after which lines are installed Predicted-Dirty, handed to
//     the last-level cache with DCP = DCD = 1, and written back in exactly
//     one channel access.
//   * read-only stream (like libquantum): another PC reads a different window
//     pass after pass and never writes. The predictor must keep calling it
//     clean, so close to 90% of its misses bypass the DRAM cache.
// Finally the lines of the first write pass, long evicted, are read again and
// must come from 3D-XPoint with the data last written (victim writebacks).
//
// Checks: every read's data against a reference memory; after a warm-up of
// two passes, at least 90% of write-stream writebacks cost one access and at
// least 90% of write-stream misses are installed Predicted-Dirty; the
// read-only stream bypasses between 85% and 95% of its misses and installs
// no line Predicted-Dirty. It prints the average channel accesses per read
// and per writeback of each phase.
module tb_tictoc_stream;
  import tictoc_pkg::*;

  localparam int WINDOW = 2048;   // sets per pass (32 metadata lines)
  localparam int PASSES = 6;      // tags streamed over the window
  localparam int BASE_W = 4096;   // first set of the write-stream window
  localparam int BASE_R = 65536;  // first set of the read-stream window
  localparam pc_t PC_W  = 48'h0000_0040_3a11;
  localparam pc_t PC_R  = 48'h0000_0040_5c2e;   // different PC mod 512

  logic clk = 1'b0, rst_n = 1'b0;
  logic req_valid, req_ready, req_is_wb, req_dcp, req_dcd;
  logic [31:0] req_laddr;
  pc_t req_pc;
  logic [2:0] req_core;
  line_t req_data;
  logic rsp_valid, rsp_dcp, rsp_dcd, rsp_l4_hit, done;
  line_t rsp_data;
  logic ch_cmd_valid, ch_cmd_ready, ch_rsp_valid;
  ch_cmd_t ch_cmd;
  ch_rsp_t ch_rsp;
  logic evict_valid;
  logic [31:0] evict_laddr;
  evt_t evt;

  tictoc_top dut (.*);

  hybrid_mem_model mem (
    .clk, .rst_n, .cmd_valid(ch_cmd_valid), .cmd_ready(ch_cmd_ready), .cmd(ch_cmd),
    .rsp_valid(ch_rsp_valid), .rsp(ch_rsp)
  );

  always #5 clk = ~clk;

  int checks = 0, failures = 0;

  initial begin : watchdog
    repeat (8000000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // mechanism pulses of the current request
  int n_pdm, n_clean, n_bypass;
  always @(posedge clk) begin
    if (rst_n) begin
      if (evt.pdm_install)   n_pdm++;
      if (evt.clean_install) n_clean++;
      if (evt.bypass)        n_bypass++;
    end
  end

  line_t got_data;
  logic got_dcp, got_dcd, got_rsp;
  always @(posedge clk)
    if (rst_n && rsp_valid) begin
      got_rsp <= 1'b1; got_data <= rsp_data; got_dcp <= rsp_dcp; got_dcd <= rsp_dcd;
    end

  line_t gold [logic [31:0]];

  function automatic line_t xp_init(logic [31:0] a);
    line_t l;
    for (int i = 0; i < 16; i++) l[i*32 +: 32] = a ^ (32'h9E37_79B9 * (i + 1));
    return l;
  endfunction

  function automatic line_t gold_of(logic [31:0] a);
    return gold.exists(a) ? gold[a] : xp_init(a);
  endfunction

  function automatic logic [31:0] addr(int tag, int set);
    return {6'(tag), 26'(set)};
  endfunction

  int acc;
  task automatic request(logic wb, logic [31:0] a, pc_t pc, line_t d, logic dcp, logic dcd);
    int acc0;
    do @(negedge clk); while (!req_ready);
    acc0 = int'(mem.total());
    got_rsp = 1'b0;
    req_valid = 1'b1; req_is_wb = wb; req_laddr = a; req_pc = pc; req_core = 3'd0;
    req_data = d; req_dcp = dcp; req_dcd = dcd;
    @(negedge clk);
    req_valid = 1'b0;
    do @(negedge clk); while (!done);
    acc = int'(mem.total()) - acc0;
  endtask

  task automatic read_check(logic [31:0] a, pc_t pc);
    request(1'b0, a, pc, '0, 1'b0, 1'b0);
    checks++;
    if (!got_rsp || got_data !== gold_of(a)) begin
      failures++;
      $display("FAIL read %h: data %h expected %h", a, got_data[31:0], gold_of(a) >> 0);
    end
  endtask

  task automatic ratio_check(string what, int num, int den, int lo_pct, int hi_pct);
    checks++;
    $display("%-44s %0d / %0d", what, num, den);
    if (den == 0 || num * 100 < lo_pct * den || num * 100 > hi_pct * den) begin
      failures++;
      $display("FAIL %s: %0d of %0d outside %0d..%0d%%", what, num, den, lo_pct, hi_pct);
    end
  endtask

  initial begin
    int rd_acc, wb_acc, n_rd, n_wb, wb_one, misses, pdm0;
    req_valid = 1'b0; req_is_wb = 1'b0; req_laddr = '0; req_pc = '0; req_core = '0;
    req_data = '0; req_dcp = 1'b0; req_dcd = 1'b0;
    n_pdm = 0; n_clean = 0; n_bypass = 0;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    repeat (2) @(posedge clk);

    // ---------------------------------------------- write-once stream
    rd_acc = 0; wb_acc = 0; n_rd = 0; n_wb = 0; wb_one = 0; misses = 0; pdm0 = 0;
    for (int p = 0; p < PASSES; p++) begin
      if (p == 2) begin
        // warm-up over: measure from here on
        rd_acc = 0; wb_acc = 0; n_rd = 0; n_wb = 0; wb_one = 0;
        misses = n_pdm + n_clean + n_bypass; pdm0 = n_pdm;
      end
      for (int s = 0; s < WINDOW; s++) begin
        logic [31:0] a;
        logic dcp, dcd;
        line_t d;
        a = addr(p, BASE_W + s);
        read_check(a, PC_W);
        rd_acc += acc; n_rd++;
        dcp = got_dcp; dcd = got_dcd;
        d = {16{32'(a) ^ 32'hA5A5_0000 ^ 32'(p)}};
        request(1'b1, a, '0, d, dcp, dcd);
        gold[a] = d;
        wb_acc += acc; n_wb++;
        if (acc == 1) wb_one++;
      end
    end
    $display("write stream: %0d.%02d accesses per read, %0d.%02d per writeback",
             rd_acc / n_rd, (rd_acc * 100 / n_rd) % 100, wb_acc / n_wb, (wb_acc * 100 / n_wb) % 100);
    ratio_check("write stream: writebacks costing 1 access", wb_one, n_wb, 90, 100);
    ratio_check("write stream: misses installed Predicted-Dirty", n_pdm - pdm0,
                n_pdm + n_clean + n_bypass - misses, 90, 100);

    // ---------------------------------------------- read-only stream
    begin
      int m0, b0, p0;
      m0 = n_pdm + n_clean + n_bypass; b0 = n_bypass; p0 = n_pdm;
      rd_acc = 0; n_rd = 0;
      for (int p = 0; p < PASSES; p++)
        for (int s = 0; s < WINDOW; s++) begin
          read_check(addr(p, BASE_R + s), PC_R);
          rd_acc += acc; n_rd++;
        end
      $display("read stream: %0d.%02d accesses per read", rd_acc / n_rd,
               (rd_acc * 100 / n_rd) % 100);
      ratio_check("read stream: misses bypassed", n_bypass - b0,
                  n_pdm + n_clean + n_bypass - m0, 85, 95);
      ratio_check("read stream: misses installed Predicted-Dirty", n_pdm - p0,
                  n_pdm + n_clean + n_bypass - m0, 0, 0);
    end

    // ---------------------------------------------- first pass again
    for (int s = 0; s < WINDOW; s++) read_check(addr(0, BASE_W + s), PC_R);

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
