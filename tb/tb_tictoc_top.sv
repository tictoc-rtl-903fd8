// tb_tictoc_top: directed end-to-end test of the TicToc controller.
//
// The controller drives a behavioural shared channel (hybrid_mem_model).
// The bypass is set to install every miss (INSTALL_PER_MILLE = 1000) so that
// every step has one known outcome; everything else is at its default size.
// Each step issues one request and checks (a) the data returned against
// values worked out here (3D-XPoint pattern or the last data written back),
// (b) the DCP/DCD bits handed to the last-level cache, and (c) the number of
// channel accesses the request cost, which is the quantity the TicToc
// techniques reduce:
//   TIC hit 1; TOC miss with metadata-cache hit and clean victim 2 (memory
//   read + install); writeback with DCP+DCD 1; Preemptive-Dirty-Marked line
//   install 2, its writeback 1 (no metadata access); a miss replacing a
//   Predicted-Dirty line that was never written 3 (probe, memory read,
//   install, no memory write).
// It also checks that on a metadata-cache miss the memory read is issued in
// parallel with the metadata fetch (latency close to one 3D-XPoint read),
// that a dirty metadata-cache entry is written back to the metadata region,
// and that the write predictor learns from a sampled line's eviction.
module tb_tictoc_top;
  import tictoc_pkg::*;

  localparam int XP_LAT = 78, DRAM_LAT = 13;

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

  tictoc_top #(.INSTALL_PER_MILLE(1000)) dut (.*);

  hybrid_mem_model #(.DRAM_LAT(DRAM_LAT), .XP_LAT(XP_LAT)) mem (
    .clk, .rst_n, .cmd_valid(ch_cmd_valid), .cmd_ready(ch_cmd_ready), .cmd(ch_cmd),
    .rsp_valid(ch_rsp_valid), .rsp(ch_rsp)
  );

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  int n_evt [string];
  localparam string MECH [10] = '{"tic_path", "toc_path", "mc_miss", "mc_writeback", "dcd_skip",
                                  "pdm_install", "victim_probe", "victim_wb", "swp_train",
                                  "wb_install"};

  initial begin : watchdog
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // captured response of the current request
  line_t got_data;
  logic got_dcp, got_dcd, got_hit, got_rsp;
  logic got_evict;
  logic [31:0] got_evict_addr;
  int cyc, rsp_cyc;
  always @(posedge clk) begin
    cyc <= cyc + 1;
    if (rsp_valid) begin
      got_rsp <= 1'b1; got_data <= rsp_data; got_dcp <= rsp_dcp; got_dcd <= rsp_dcd;
      got_hit <= rsp_l4_hit; rsp_cyc <= cyc;
    end
    // count only out of reset: before the first clock edge in reset the
    // controller's outputs hold arbitrary start-up values
    if (rst_n && evict_valid) begin got_evict <= 1'b1; got_evict_addr <= evict_laddr; end
    if (rst_n) begin
    if (evt.tic_path)      n_evt["tic_path"]++;
    if (evt.toc_path)      n_evt["toc_path"]++;
    if (evt.mc_miss)       n_evt["mc_miss"]++;
    if (evt.mc_writeback)  n_evt["mc_writeback"]++;
    if (evt.dcd_skip)      n_evt["dcd_skip"]++;
    if (evt.pdm_install)   n_evt["pdm_install"]++;
    if (evt.victim_probe)  n_evt["victim_probe"]++;
    if (evt.victim_wb)     n_evt["victim_wb"]++;
    if (evt.swp_train)     n_evt["swp_train"]++;
    if (evt.wb_install)    n_evt["wb_install"]++;
    end
  end

  function automatic line_t xp_init(logic [31:0] a);
    line_t l;
    for (int i = 0; i < 16; i++) l[i*32 +: 32] = a ^ (32'h9E37_79B9 * (i + 1));
    return l;
  endfunction

  function automatic logic [31:0] la(int tag, int mline, int slot);
    return {6'(tag), 20'(mline), 6'(slot)};
  endfunction

  function automatic line_t pat(int k);
    return {16{32'hD000_0000 + 32'(k)}};
  endfunction

  task automatic check(string what, logic [511:0] got, logic [511:0] exp);
    checks++;
    if (got !== exp) begin
      failures++;
      $display("FAIL %s: got %0h expected %0h", what, got, exp);
    end
  endtask

  int acc, lat;
  task automatic request(logic wb, logic [31:0] a, pc_t pc, logic [2:0] core,
                         line_t d, logic dcp, logic dcd);
    int acc0, t0;
    acc0 = mem.total();
    got_rsp = 1'b0; got_evict = 1'b0;
    // drive and sample on the falling edge, away from the DUT's clock edge
    do @(negedge clk); while (!req_ready);
    req_valid = 1'b1; req_is_wb = wb; req_laddr = a; req_pc = pc; req_core = core;
    req_data = d; req_dcp = dcp; req_dcd = dcd;
    t0 = cyc;
    @(negedge clk);
    req_valid = 1'b0;
    do @(negedge clk); while (!done);
    acc = mem.total() - acc0;
    lat = rsp_cyc - t0;
  endtask

  task automatic rd(string what, logic [31:0] a, pc_t pc, logic [2:0] core,
                    line_t exp, int exp_acc, logic exp_dcd, logic exp_hit);
    request(1'b0, a, pc, core, '0, 1'b0, 1'b0);
    check({what, ": response given"}, 512'(got_rsp), 512'(1));
    check({what, ": data"}, got_data, exp);
    check({what, ": channel accesses"}, 512'(acc), 512'(exp_acc));
    check({what, ": DCP"}, 512'(got_dcp), 512'(1));
    check({what, ": DCD"}, 512'(got_dcd), 512'(exp_dcd));
    check({what, ": L4 hit"}, 512'(got_hit), 512'(exp_hit));
  endtask

  task automatic wbk(string what, logic [31:0] a, line_t d, logic dcp, logic dcd,
                     int exp_acc);
    request(1'b1, a, '0, 3'd0, d, dcp, dcd);
    check({what, ": no read response"}, 512'(got_rsp), 512'(0));
    check({what, ": channel accesses"}, 512'(acc), 512'(exp_acc));
  endtask

  localparam pc_t PC_A = 48'h0000_0040_0100;   // core 0, stays on the TIC path
  localparam pc_t PC_B = 48'h0000_0040_2288;   // core 1, trained to the TOC path

  logic [31:0] X, Y, Z, W, V, S, S2, U, U3, U4, G, X3;
  initial begin
    req_valid = 1'b0; req_is_wb = 1'b0; req_laddr = '0; req_pc = '0; req_core = '0;
    req_data = '0; req_dcp = 1'b0; req_dcd = 1'b0; cyc = 0; rsp_cyc = 0;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    repeat (2) @(posedge clk);

    X = la(1, 3, 5); Y = la(2, 3, 5);
    // 1: predicted hit, actual miss, metadata line not cached:
    //    TIC read + memory read + metadata read + install = 4
    rd("1 first read", X, PC_A, 0, xp_init(X), 4, 1'b0, 1'b0);
    // 2: TIC hit = 1 access
    rd("2 TIC hit", X, PC_A, 0, xp_init(X), 1, 1'b0, 1'b1);
    // 3: first write: cache write, TOC dirty bit set in the metadata cache
    wbk("3 writeback DCP only", X, pat(1), 1'b1, 1'b0, 1);
    // 4: hit returns written data and DCD = 1
    rd("4 TIC hit dirty", X, PC_A, 0, pat(1), 1, 1'b1, 1'b1);
    // 5: DCP+DCD: one access, no TOC
    wbk("5 writeback DCP+DCD", X, pat(2), 1'b1, 1'b1, 1);
    // 6: conflict miss on TIC path with dirty victim: TIC read + memory read +
    //    victim writeback + install = 4
    rd("6 conflict miss", Y, PC_A, 0, xp_init(Y), 4, 1'b0, 1'b0);
    check("6 eviction reported", 512'(got_evict), 512'(1));
    check("6 eviction address", 512'(got_evict_addr), 512'(X));
    check("6 victim data in 3D-XPoint", mem.xp_peek(daddr_t'(X)), pat(2));
    // 7: X comes back from memory with its written data: 3 accesses
    rd("7 refetch", X, PC_A, 0, pat(2), 3, 1'b0, 1'b0);

    // train core 1 / PC_B to predict miss: four TIC-path misses, 3 accesses each
    for (int i = 0; i < 4; i++)
      rd("train hit/miss predictor", la(0, 3, 10 + i), PC_B, 1, xp_init(la(0, 3, 10 + i)),
         3, 1'b0, 1'b0);
    // 8: TOC path, metadata-cache hit, clean (empty) victim: 2 accesses
    Z = la(0, 3, 20);
    rd("8 TOC miss", Z, PC_B, 1, xp_init(Z), 2, 1'b0, 1'b0);
    // 9: predicted miss, TOC says resident: one cache read
    rd("9 TOC hit", Z, PC_B, 1, xp_init(Z), 1, 1'b0, 1'b1);
    // 10: TOC path with metadata-cache miss: memory read issued in parallel
    //     with the metadata fetch: memory + metadata read + install = 3
    W = la(0, 700, 7);
    rd("10 metadata-cache miss", W, PC_B, 1, xp_init(W), 3, 1'b0, 1'b0);
    checks++;
    if (lat > XP_LAT + 12) begin
      failures++;
      $display("FAIL 10: latency %0d, memory read not overlapped with metadata fetch", lat);
    end
    $display("metadata-cache-miss read latency %0d cycles (3D-XPoint read %0d)", lat, XP_LAT);
    // 11: dirty metadata-cache entry written back when replaced
    wbk("11 writeback sets TOC dirty", W, pat(3), 1'b1, 1'b0, 1);
    V = la(0, 188, 7);                    // same metadata-cache index as line 700
    rd("11 metadata-cache conflict", V, PC_B, 1, xp_init(V), 4, 1'b0, 1'b0);
    check("11 metadata line written back", 512'(mem.meta_peek(daddr_t'(700))
          >> (7 * 8) & 512'hff), 512'hC0);

    // write-predictor training through a sampled line (slot 0)
    S = la(0, 3, 0); S2 = la(1, 3, 0);
    rd("12 sampled install", S, PC_B, 1, xp_init(S), 2, 1'b0, 1'b0);
    wbk("13 sampled first write", S, pat(4), 1'b1, 1'b0, 1);
    // 14: dirty victim: probe + memory read + victim writeback + install = 4
    rd("14 sampled eviction", S2, PC_B, 1, xp_init(S2), 4, 1'b0, 1'b0);
    check("14 write predictor trained", 512'(n_evt["swp_train"]), 512'(1));
    // 15: PC_B now write-likely: Predicted-Dirty install, DCD = 1
    U = la(0, 3, 30);
    rd("15 PDM install", U, PC_B, 1, xp_init(U), 2, 1'b1, 1'b0);
    wbk("16 PDM writeback", U, pat(5), 1'b1, 1'b1, 1);
    // 17/18: Predicted-Dirty line never written, then replaced:
    //        probe + memory read + install = 3, no 3D-XPoint write
    U3 = la(0, 3, 31); U4 = la(1, 3, 31);
    rd("17 PDM install", U3, PC_B, 1, xp_init(U3), 2, 1'b1, 1'b0);
    rd("18 replace clean PDM line", U4, PC_B, 1, xp_init(U4), 3, 1'b1, 1'b0);
    // 19: writeback miss: write-allocate into an empty set = 1 access
    G = la(2, 3, 40);
    wbk("19 write-allocate", G, pat(6), 1'b0, 1'b0, 1);
    rd("20 read allocated line", G, PC_B, 1, pat(6), 1, 1'b1, 1'b1);
    // 21: writeback without DCP to a resident clean line: 1 access
    wbk("21 writeback no DCP, resident", X, pat(7), 1'b0, 1'b0, 1);
    // 22: writeback miss over a dirty line: probe + victim write + install = 3
    X3 = la(3, 3, 5);
    wbk("22 write-allocate over dirty", X3, pat(8), 1'b0, 1'b0, 3);
    check("22 victim data in 3D-XPoint", mem.xp_peek(daddr_t'(X)), pat(7));
    rd("23 read back", X3, PC_A, 0, pat(8), 1, 1'b1, 1'b1);

    foreach (n_evt[k]) $display("  %-14s %0d", k, n_evt[k]);
    foreach (MECH[i]) begin
      checks++;
      if (!n_evt.exists(MECH[i]) || n_evt[MECH[i]] == 0) begin
        failures++;
        $display("FAIL mechanism %s never happened", MECH[i]);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
