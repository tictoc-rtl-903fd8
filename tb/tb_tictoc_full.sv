// tb_tictoc_full: randomized end-to-end test of the TicToc controller with
// every parameter at its default (4GB direct-mapped cache, 512-entry
// metadata cache, 90% bypass, 512-entry write predictor, 8 x 256-entry
// hit/miss predictor).
//
// The testbench plays the last-level cache. It reads lines (remembering the
// DCP/DCD bits handed back), modifies some of them, and evicts them again:
// modified lines are written back with their DCP/DCD bits, clean ones are
// dropped silently. Lines read by "writer" PCs are modified 90% of the time,
// lines read by "reader" PCs never, so the write predictor has a pattern to
// learn. When the controller reports that a DRAM-cache line was replaced,
// the copy held here loses its DCP and DCD bits. Addresses come from a small
// pool that collides in the DRAM cache (4 tags per set) and in the metadata
// cache (metadata lines 512 apart), so every path is exercised.
//
// Checks: every read returns the latest data written for that address (a
// reference memory kept here); at the end, for every set of the pool, the
// TIC metadata in the cache line and the TOC metadata (metadata cache or
// metadata region) agree on valid and tag, and a TIC-dirty line is TOC-dirty
// (TOC dirty without TIC dirty is the Predicted-Dirty state); and each
// mechanism the controller reports happened at least once.
module tb_tictoc_full;
  import tictoc_pkg::*;

  localparam int N_OPS = 20000;

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
  longint cyc = 0;

  initial begin : watchdog
    repeat (4000000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ------------------------------------------------ mechanism counters
  localparam int NM = 18;
  localparam string MECH [NM] = '{
    "tic_path", "toc_path", "l4_hit", "l4_miss", "mispredict", "mc_hit", "mc_miss",
    "mc_writeback", "dcd_skip", "toc_dirty_upd", "pdm_saved", "pdm_install",
    "clean_install", "wb_install", "bypass", "victim_probe", "victim_wb", "swp_train"};
  int n_mech [NM];
  logic [NM-1:0] evt_bits;
  assign evt_bits = {evt.tic_path, evt.toc_path, evt.l4_hit, evt.l4_miss, evt.mispredict,
                     evt.mc_hit, evt.mc_miss, evt.mc_writeback, evt.dcd_skip,
                     evt.toc_dirty_upd, evt.pdm_saved, evt.pdm_install, evt.clean_install,
                     evt.wb_install, evt.bypass, evt.victim_probe, evt.victim_wb,
                     evt.swp_train};

  // ------------------------------------------------ last-level cache model
  logic        l3_dcp  [logic [31:0]];
  logic        l3_dcd  [logic [31:0]];
  logic        l3_mod  [logic [31:0]];
  line_t       gold    [logic [31:0]];

  line_t got_data;
  logic got_dcp, got_dcd, got_rsp;
  always @(posedge clk) begin
    cyc <= cyc + 1;
    // count only out of reset: before the first clock edge in reset the
    // controller's outputs hold arbitrary start-up values
    if (rst_n) for (int i = 0; i < NM; i++) if (evt_bits[NM-1-i]) n_mech[i]++;
    if (rsp_valid) begin
      got_rsp <= 1'b1; got_data <= rsp_data; got_dcp <= rsp_dcp; got_dcd <= rsp_dcd;
    end
    if (rst_n && evict_valid && l3_dcp.exists(evict_laddr)) begin
      l3_dcp[evict_laddr] = 1'b0;
      l3_dcd[evict_laddr] = 1'b0;
    end
  end

  function automatic line_t xp_init(logic [31:0] a);
    line_t l;
    for (int i = 0; i < 16; i++) l[i*32 +: 32] = a ^ (32'h9E37_79B9 * (i + 1));
    return l;
  endfunction

  function automatic line_t gold_of(logic [31:0] a);
    return gold.exists(a) ? gold[a] : xp_init(a);
  endfunction

  localparam int MLINES [4] = '{0, 1, 512, 513};
  function automatic logic [31:0] rand_addr();
    return {6'($urandom_range(0, 3)), 20'(MLINES[$urandom_range(0, 3)]),
            6'($urandom_range(0, 3))};
  endfunction

  task automatic request(logic wb, logic [31:0] a, pc_t pc, logic [2:0] core,
                         line_t d, logic dcp, logic dcd);
    do @(negedge clk); while (!req_ready);
    got_rsp = 1'b0;
    req_valid = 1'b1; req_is_wb = wb; req_laddr = a; req_pc = pc; req_core = core;
    req_data = d; req_dcp = dcp; req_dcd = dcd;
    @(negedge clk);
    req_valid = 1'b0;
    do @(negedge clk); while (!done);
  endtask

  // ------------------------------------------------ end-of-run consistency
  task automatic check_metadata();
    for (int m = 0; m < 4; m++) begin
      int ml = MLINES[m];
      line_t tl;
      int mi = ml % 512;
      if (dut.u_mc.valid_q[mi] && dut.u_mc.tag_q[mi] == 11'(ml / 512)) tl = dut.u_mc.data_q[mi];
      else tl = mem.meta_peek(daddr_t'(ml));
      for (int s = 0; s < 4; s++) begin
        meta_t toc, tic;
        toc = meta_t'(tl[s*8 +: 8]);
        tic = side_meta(mem.cache_side_peek(daddr_t'({ml[19:0], 6'(s)}))[7:0]);
        checks++;
        if (toc.valid != tic.valid || (tic.valid && toc.tag != tic.tag) ||
            (tic.valid && tic.dirty && !toc.dirty)) begin
          failures++;
          $display("FAIL metadata mismatch mline %0d slot %0d: TOC %b TIC %b", ml, s, toc, tic);
        end
      end
    end
  endtask

  pc_t writer_pc [4] = '{48'h0000_0040_1010, 48'h0000_0040_1123, 48'h0000_0040_1236,
                         48'h0000_0040_1349};
  pc_t reader_pc [4] = '{48'h0000_0040_2054, 48'h0000_0040_2167, 48'h0000_0040_227a,
                         48'h0000_0040_238d};

  int n_reads = 0, n_wbs = 0;
  initial begin
    req_valid = 1'b0; req_is_wb = 1'b0; req_laddr = '0; req_pc = '0; req_core = '0;
    req_data = '0; req_dcp = 1'b0; req_dcd = 1'b0;
    foreach (n_mech[i]) n_mech[i] = 0;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    repeat (2) @(posedge clk);

    for (int op = 0; op < N_OPS; op++) begin
      int r;
      r = $urandom_range(0, 99);
      if (l3_dcp.num() > 0 && (r < 45 || l3_dcp.num() >= 12)) begin
        // evict one line from the last-level cache
        logic [31:0] a;
        int k;
        k = $urandom_range(0, l3_dcp.num() - 1);
        void'(l3_dcp.first(a));
        repeat (k) void'(l3_dcp.next(a));
        if (l3_mod[a]) begin
          line_t d;
          for (int i = 0; i < 16; i++) d[i*32 +: 32] = $urandom;
          request(1'b1, a, '0, 3'd0, d, l3_dcp[a], l3_dcd[a]);
          gold[a] = d;
          n_wbs++;
        end
        l3_dcp.delete(a); l3_dcd.delete(a); l3_mod.delete(a);
      end else begin
        logic [31:0] a;
        logic writer;
        pc_t pc;
        do a = rand_addr(); while (l3_dcp.exists(a));
        writer = ($urandom_range(0, 1) == 1);
        pc = writer ? writer_pc[$urandom_range(0, 3)] : reader_pc[$urandom_range(0, 3)];
        request(1'b0, a, pc, 3'($urandom_range(0, 7)), '0, 1'b0, 1'b0);
        n_reads++;
        checks++;
        if (!got_rsp || got_data !== gold_of(a)) begin
          failures++;
          $display("FAIL op %0d read %h: data %h expected %h", op, a, got_data[31:0],
                   gold_of(a) >> 0);
        end
        l3_dcp[a] = got_dcp;
        l3_dcd[a] = got_dcd;
        l3_mod[a] = writer && ($urandom_range(0, 9) != 0);
      end
    end
    check_metadata();

    $display("%0d reads, %0d writebacks, %0d cycles", n_reads, n_wbs, cyc);
    $display("channel: cache R %0d W %0d, metadata R %0d W %0d, 3D-XPoint R %0d W %0d",
             mem.n_rd[0], mem.n_wr[0], mem.n_rd[1], mem.n_wr[1], mem.n_rd[2], mem.n_wr[2]);
    for (int i = 0; i < NM; i++) begin
      $display("  %-14s %0d", MECH[i], n_mech[i]);
      checks++;
      if (n_mech[i] == 0) begin
        failures++;
        $display("FAIL mechanism %s never happened", MECH[i]);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
