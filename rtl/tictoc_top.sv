// tictoc_top: TicToc DRAM-cache controller for a DRAM + 3D-XPoint memory.
//
// The DRAM cache is direct-mapped with 64-byte lines and keeps two copies of
// each line's metadata (valid, dirty, tag): one inside the line's ECC
// sideband (TIC), read together with the data, and one in 64-byte TOC
// metadata lines that cover 64 sets each and are cached on chip in the
// metadata cache. The controller picks per request which copy to consult,
// so that hits cost one DRAM access (TIC) and misses cost no DRAM-cache
// probe when the metadata cache holds the set's metadata (TOC). Both DRAM
// cache and 3D-XPoint sit behind one shared channel, so every access counted
// here takes bandwidth from the other device.
//
// Read (last-level-cache miss):
//   * predicted hit  -> TIC path: read the cache line. Tag match: return it.
//     Mismatch: the victim's data and TIC dirty bit are already at hand;
//     read 3D-XPoint.
//   * predicted miss -> TOC path: look up the metadata cache. On a
//     metadata-cache miss the metadata line and the 3D-XPoint line are read
//     in parallel. TOC hit: read the cache line. TOC miss: read 3D-XPoint;
//     if the TOC marks the victim dirty, read (probe) it to learn its TIC
//     dirty bit.
//   * After a miss the write-aware bypass decides whether to install. An
//     install writes a dirty victim to 3D-XPoint, writes the new line with
//     TIC dirty = 0, and sets its TOC entry with dirty = write-predictor
//     output ("Predicted-Dirty" when the predictor says write-likely).
// Writeback (dirty last-level-cache eviction, carrying its DCP and DCD bits):
//   * DCP and DCD set -> write the line; TOC untouched (1 access).
//   * otherwise consult TOC. Resident: write the line and set the TOC dirty
//     bit unless it is already set (Preemptive Dirty Marking). Not resident:
//     always install (write-allocate), evicting as above.
// When an install replaces a valid line, evict_valid pulses with that line's
// address so the last-level cache can clear the DCP bit of its copy.
// DCD returned with read data: the TIC dirty bit of the line read, or, for a
// line installed Predicted-Dirty, 1, so that its writebacks need no TOC
// access. Sampled lines (slot 0 of each metadata line, 1 in 64) return
// DCD = 0 until written, so their first write reaches the TOC and sets the
// written-to bit that trains the write predictor.
//
// Follows the paper: the TIC/TOC path choice, the access sequences of each
// case, DCP/DCD writeback filtering, PDM with the write predictor, the
// write-aware bypass, 1-byte metadata with 64 entries per metadata line, the
// 512-entry metadata cache. Own choices: one request in flight at a time
// (the paper gives no queueing or scheduling), the channel command format,
// the sampled-line choice, metadata-cache organisation, the order of the
// commands inside each case, and that the metadata cache is written back.
//
// Interface and timing: req_valid/req_ready handshake, one request accepted
// in IDLE. rsp_valid pulses once per read with the data and the DCP/DCD bits
// for the last-level cache; done pulses when the controller has finished a
// request (writebacks included) and is idle again. Channel: ch_cmd_valid /
// ch_cmd_ready; writes are posted; every read is answered by one ch_rsp_valid
// beat tagged with its device; at most one read per device is outstanding.
//
// Notes for lint and synthesis: rst_n is used both as the asynchronous
// reset of the flip-flops and in the `disable iff` of the channel assertions
// at the end, which lint reports as a net used both ways; the assertions are
// simulation checks only. The sideband bits above the metadata byte (cache
// lines) or the sampling record (metadata lines) are driven as zero: they
// belong to the ECC code, which the memory controller adds and which is not
// part of this design. The top device-address bits are zero for the same
// reason: each device uses only the address bits it needs.
module tictoc_top
  import tictoc_pkg::*;
#(
  parameter int unsigned CORES             = 8,
  parameter int unsigned SET_BITS          = 26,   // 4GB / 64B lines
  parameter int unsigned MC_ENTRIES        = 512,  // 32KB metadata cache
  parameter int unsigned HMP_ENTRIES       = 256,  // per core
  parameter int unsigned SWP_ENTRIES       = 512,
  parameter int unsigned INSTALL_PER_MILLE = 100,  // 90% bypass
  localparam int unsigned LADDR_BITS = SET_BITS + TAG_BITS,
  localparam int unsigned MLINE_BITS = SET_BITS - SLOT_BITS,
  localparam int unsigned CORE_BITS  = $clog2(CORES)
) (
  input  logic                  clk,
  input  logic                  rst_n,
  // requests from the last-level cache
  input  logic                  req_valid,
  output logic                  req_ready,
  input  logic                  req_is_wb,
  input  logic [LADDR_BITS-1:0] req_laddr,
  input  pc_t                   req_pc,
  input  logic [CORE_BITS-1:0]  req_core,
  input  line_t                 req_data,
  input  logic                  req_dcp,
  input  logic                  req_dcd,
  // read responses to the last-level cache
  output logic                  rsp_valid,
  output line_t                 rsp_data,
  output logic                  rsp_dcp,
  output logic                  rsp_dcd,
  output logic                  rsp_l4_hit,
  output logic                  done,
  // shared DRAM-cache / 3D-XPoint channel
  output logic                  ch_cmd_valid,
  input  logic                  ch_cmd_ready,
  output ch_cmd_t               ch_cmd,
  input  logic                  ch_rsp_valid,
  input  ch_rsp_t               ch_rsp,
  // a valid DRAM-cache line was replaced (the last-level cache clears its DCP)
  output logic                  evict_valid,
  output logic [LADDR_BITS-1:0] evict_laddr,
  // mechanism pulses
  output evt_t                  evt
);

  typedef enum logic [4:0] {
    S_IDLE, S_DISPATCH,
    S_TIC_RD, S_TIC_WAIT,
    S_MC_LK, S_MC_CHK, S_PAR_XP, S_MC_WBK, S_META_RD, S_META_WAIT, S_CONT,
    S_TOCHIT_RD, S_TOCHIT_WAIT,
    S_XP_RD, S_PROBE_RD, S_MISS_WAIT, S_DECIDE,
    S_VIC_WB, S_INST_WR, S_INST_META,
    S_WB_WRITE, S_WB_META, S_DONE
  } state_e;

  // what to do once the metadata line is at hand
  typedef enum logic [1:0] { C_RDMISS, C_WB, C_INSTALL } cont_e;

  state_e state;
  cont_e  cont;

  // latched request
  logic                  r_wb, r_dcp, r_dcd;
  logic [LADDR_BITS-1:0] r_laddr;
  pc_t                   r_pc;
  logic [CORE_BITS-1:0]  r_core;
  line_t                 r_data;

  logic [SET_BITS-1:0]   set_idx;
  tag_t                  tag;
  logic [MLINE_BITS-1:0] mline;
  logic [SLOT_BITS-1:0]  slot;
  logic                  sampled;
  assign set_idx = r_laddr[SET_BITS-1:0];
  assign tag     = r_laddr[LADDR_BITS-1:SET_BITS];
  assign mline   = set_idx[SET_BITS-1:SLOT_BITS];
  assign slot    = set_idx[SLOT_BITS-1:0];
  assign sampled = (slot == '0);

  // working copy of the TOC metadata line
  line_t toc_line;
  samp_t toc_samp;
  logic  have_meta;
  meta_t toc_e;
  assign toc_e = meta_t'(toc_line[slot*8 +: 8]);
  logic  toc_hit;
  assign toc_hit = toc_e.valid && (toc_e.tag == tag);

  // read data captured from the channel
  line_t mem_data, c_data;
  logic [7:0] c_side;   // metadata byte of the line's sideband
  logic  mem_got, c_got;
  logic  mem_out, c_out, meta_out;       // reads outstanding

  // miss bookkeeping
  logic  need_mem, need_probe;
  logic  vic_dirty;
  tag_t  vic_tag;
  line_t vic_data;
  logic  meta_upd;

  // --------------------------------------------------------- sub-blocks
  logic hmp_pred_miss, hmp_upd_en, hmp_upd_hit;
  hit_miss_predictor #(.CORES(CORES), .ENTRIES(HMP_ENTRIES)) u_hmp (
    .clk, .rst_n,
    .pred_core(r_core), .pred_pc(r_pc), .pred_miss(hmp_pred_miss),
    .upd_en(hmp_upd_en), .upd_core(r_core), .upd_pc(r_pc), .upd_hit(hmp_upd_hit)
  );

  logic swp_pred_dirty, swp_train_en;
  write_predictor #(.ENTRIES(SWP_ENTRIES)) u_swp (
    .clk, .rst_n,
    .pred_sig(pc_sig(r_pc[SIG_BITS-1:0])), .pred_dirty(swp_pred_dirty),
    .train_en(swp_train_en), .train_sig(toc_samp.sig), .train_written(toc_samp.w)
  );

  logic mc_lk_en, mc_lk_hit, mc_vic_valid, mc_vic_dirty;
  logic [MLINE_BITS-1:0] mc_vic_mline;
  line_t mc_lk_line;
  samp_t mc_lk_samp;
  logic  mc_wr_en, mc_wr_dirty;
  line_t mc_wr_line;
  samp_t mc_wr_samp;
  metadata_cache #(.ENTRIES(MC_ENTRIES), .MLINE_BITS(MLINE_BITS)) u_mc (
    .clk, .rst_n,
    .lk_en(mc_lk_en), .lk_mline(mline), .lk_hit(mc_lk_hit), .lk_line(mc_lk_line),
    .lk_samp(mc_lk_samp), .lk_vic_valid(mc_vic_valid), .lk_vic_dirty(mc_vic_dirty),
    .lk_vic_mline(mc_vic_mline),
    .wr_en(mc_wr_en), .wr_mline(mline), .wr_line(mc_wr_line), .wr_samp(mc_wr_samp),
    .wr_dirty(mc_wr_dirty)
  );

  logic byp_en, byp_install;
  write_aware_bypass #(.INSTALL_PER_MILLE(INSTALL_PER_MILLE)) u_byp (
    .clk, .rst_n, .dec_en(byp_en), .is_writeback(r_wb), .pred_dirty(swp_pred_dirty),
    .install(byp_install)
  );

  // --------------------------------------------------- metadata updates
  // New TOC line / sampling record after an install or a writeback.
  meta_t new_e;
  samp_t new_samp;
  line_t new_line;
  always_comb begin
    new_e    = toc_e;
    new_samp = toc_samp;
    if (state == S_INST_META) begin
      new_e.valid = 1'b1;
      new_e.tag   = tag;
      new_e.dirty = r_wb ? 1'b1 : swp_pred_dirty;
      if (sampled) new_samp = r_wb ? '{sv: 1'b0, w: 1'b1, sig: '0}
                                   : '{sv: 1'b1, w: 1'b0, sig: pc_sig(r_pc[SIG_BITS-1:0])};
    end else begin                       // S_WB_META: resident line written
      new_e.dirty = 1'b1;
      if (sampled) new_samp.w = 1'b1;
    end
    new_line = toc_line;
    new_line[slot*8 +: 8] = new_e;
  end

  // ------------------------------------------------------ channel command
  always_comb begin
    ch_cmd_valid = 1'b1;
    ch_cmd       = '{dev: DEV_CACHE, write: 1'b0, addr: daddr_t'(set_idx),
                     data: '0, side: '0};
    unique case (state)
      S_TIC_RD, S_TOCHIT_RD, S_PROBE_RD: ;     // cache line read
      S_PAR_XP, S_XP_RD: begin
        ch_cmd.dev  = DEV_XP;
        ch_cmd.addr = daddr_t'(r_laddr);
      end
      S_MC_WBK: begin
        ch_cmd.dev   = DEV_META;
        ch_cmd.write = 1'b1;
        ch_cmd.addr  = daddr_t'(mc_vic_mline);
        ch_cmd.data  = mc_lk_line;
        ch_cmd.side  = side_t'(mc_lk_samp);
      end
      S_META_RD: begin
        ch_cmd.dev  = DEV_META;
        ch_cmd.addr = daddr_t'(mline);
      end
      S_VIC_WB: begin
        ch_cmd.dev   = DEV_XP;
        ch_cmd.write = 1'b1;
        ch_cmd.addr  = daddr_t'({vic_tag, set_idx});
        ch_cmd.data  = vic_data;
      end
      S_INST_WR: begin
        ch_cmd.write = 1'b1;
        ch_cmd.data  = r_wb ? r_data : mem_data;
        ch_cmd.side  = meta_side('{valid: 1'b1, dirty: r_wb, tag: tag});
      end
      S_WB_WRITE: begin
        ch_cmd.write = 1'b1;
        ch_cmd.data  = r_data;
        ch_cmd.side  = meta_side('{valid: 1'b1, dirty: 1'b1, tag: tag});
      end
      default: ch_cmd_valid = 1'b0;
    endcase
  end

  logic fire;
  assign fire = ch_cmd_valid && ch_cmd_ready;

  // --------------------------------------------------- response capture
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      mem_got <= 1'b0; c_got <= 1'b0;
      mem_out <= 1'b0; c_out <= 1'b0; meta_out <= 1'b0;
      mem_data <= '0; c_data <= '0; c_side <= '0;
    end else begin
      if (state == S_IDLE) begin
        mem_got <= 1'b0; c_got <= 1'b0;
      end
      if (fire && !ch_cmd.write) begin
        unique case (ch_cmd.dev)
          DEV_XP:    begin mem_out  <= 1'b1; mem_got  <= 1'b0; end
          DEV_CACHE: begin c_out    <= 1'b1; c_got    <= 1'b0; end
          default:   meta_out <= 1'b1;
        endcase
      end
      if (ch_rsp_valid) begin
        unique case (ch_rsp.dev)
          DEV_XP:    begin mem_out <= 1'b0; mem_got <= 1'b1; mem_data <= ch_rsp.data; end
          DEV_CACHE: begin c_out <= 1'b0; c_got <= 1'b1; c_data <= ch_rsp.data;
                           c_side <= ch_rsp.side[7:0]; end
          default:   meta_out <= 1'b0;
        endcase
      end
    end
  end

  // ------------------------------------------------------------ control
  meta_t c_meta;
  assign c_meta = side_meta(c_side);

  always_comb begin
    mc_lk_en    = (state == S_MC_LK);
    mc_wr_en    = 1'b0;
    mc_wr_line  = new_line;
    mc_wr_samp  = new_samp;
    mc_wr_dirty = 1'b1;
    if (state == S_META_WAIT && ch_rsp_valid && ch_rsp.dev == DEV_META) begin
      mc_wr_en    = 1'b1;                      // fill, clean
      mc_wr_line  = ch_rsp.data;
      mc_wr_samp  = side_samp(ch_rsp.side[SAMP_BITS-1:0]);
      mc_wr_dirty = 1'b0;
    end else if (state == S_INST_META || state == S_WB_META) begin
      mc_wr_en    = 1'b1;
    end
    // a sampled line leaves: train the write predictor with its record
    swp_train_en = (state == S_INST_META) && sampled && toc_e.valid && toc_samp.sv;
    byp_en       = (state == S_DECIDE);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE;  cont <= C_RDMISS;
      r_wb <= 1'b0; r_dcp <= 1'b0; r_dcd <= 1'b0; r_laddr <= '0; r_pc <= '0;
      r_core <= '0; r_data <= '0;
      toc_line <= '0; toc_samp <= '0; have_meta <= 1'b0;
      need_mem <= 1'b0; need_probe <= 1'b0; vic_dirty <= 1'b0; vic_tag <= '0;
      vic_data <= '0; meta_upd <= 1'b0;
      rsp_valid <= 1'b0; rsp_data <= '0; rsp_dcp <= 1'b0; rsp_dcd <= 1'b0;
      rsp_l4_hit <= 1'b0; done <= 1'b0; evt <= '0;
      evict_valid <= 1'b0; evict_laddr <= '0;
      hmp_upd_en <= 1'b0; hmp_upd_hit <= 1'b0;
    end else begin
      rsp_valid  <= 1'b0;
      done       <= 1'b0;
      evt        <= '0;
      evict_valid <= 1'b0;
      hmp_upd_en <= 1'b0;
      if (state == S_META_WAIT && ch_rsp_valid && ch_rsp.dev == DEV_META) begin
        toc_line <= ch_rsp.data;
        toc_samp <= side_samp(ch_rsp.side[SAMP_BITS-1:0]);
      end
      unique case (state)
        S_IDLE: if (req_valid) begin
          r_wb <= req_is_wb; r_dcp <= req_dcp; r_dcd <= req_dcd; r_laddr <= req_laddr;
          r_pc <= req_pc; r_core <= req_core; r_data <= req_data;
          have_meta <= 1'b0; need_mem <= 1'b0; need_probe <= 1'b0; vic_dirty <= 1'b0;
          meta_upd <= 1'b0;
          state <= S_DISPATCH;
        end

        S_DISPATCH: begin
          if (!r_wb) begin
            if (!hmp_pred_miss) begin
              evt.tic_path <= 1'b1;
              state <= S_TIC_RD;
            end else begin
              evt.toc_path <= 1'b1;
              cont  <= C_RDMISS;
              state <= S_MC_LK;
            end
          end else if (r_dcp && r_dcd) begin
            evt.dcd_skip <= 1'b1;
            meta_upd <= 1'b0;
            state <= S_WB_WRITE;
          end else begin
            cont  <= C_WB;
            state <= S_MC_LK;
          end
        end

        // ---- TIC path: one access gives tag and data
        S_TIC_RD: if (fire) state <= S_TIC_WAIT;
        S_TIC_WAIT: if (c_got) begin
          hmp_upd_en <= 1'b1;
          if (c_meta.valid && c_meta.tag == tag) begin
            hmp_upd_hit <= 1'b1;
            evt.l4_hit  <= 1'b1;
            rsp_valid <= 1'b1; rsp_data <= c_data; rsp_dcp <= 1'b1;
            rsp_dcd   <= c_meta.dirty; rsp_l4_hit <= 1'b1;
            state <= S_DONE;
          end else begin
            hmp_upd_hit <= 1'b0;
            evt.l4_miss <= 1'b1; evt.mispredict <= 1'b1;
            vic_dirty <= c_meta.valid && c_meta.dirty;
            vic_tag   <= c_meta.tag;
            vic_data  <= c_data;
            need_mem  <= 1'b1;
            state <= S_XP_RD;
          end
        end

        // ---- metadata line: metadata cache, else fetch from DRAM
        S_MC_LK: state <= S_MC_CHK;
        S_MC_CHK: if (mc_lk_hit) begin
          evt.mc_hit <= 1'b1;
          toc_line <= mc_lk_line; toc_samp <= mc_lk_samp; have_meta <= 1'b1;
          state <= S_CONT;
        end else begin
          evt.mc_miss <= 1'b1;
          if (cont == C_RDMISS)  state <= S_PAR_XP;  // memory read in parallel
          else if (mc_vic_valid && mc_vic_dirty) state <= S_MC_WBK;
          else                   state <= S_META_RD;
        end
        S_PAR_XP: if (fire) begin
          need_mem <= 1'b1;
          state <= (mc_vic_valid && mc_vic_dirty) ? S_MC_WBK : S_META_RD;
        end
        S_MC_WBK: if (fire) begin
          evt.mc_writeback <= 1'b1;
          state <= S_META_RD;
        end
        S_META_RD: if (fire) state <= S_META_WAIT;
        S_META_WAIT: if (ch_rsp_valid && ch_rsp.dev == DEV_META) begin
          have_meta <= 1'b1;
          state <= S_CONT;
        end

        S_CONT: begin
          unique case (cont)
            C_RDMISS: begin
              hmp_upd_en <= 1'b1;
              if (toc_hit) begin                  // predicted miss, actual hit
                hmp_upd_hit <= 1'b1;
                evt.l4_hit <= 1'b1; evt.mispredict <= 1'b1;
                state <= S_TOCHIT_RD;
              end else begin
                hmp_upd_hit <= 1'b0;
                evt.l4_miss <= 1'b1;
                vic_tag    <= toc_e.tag;
                need_probe <= toc_e.valid && toc_e.dirty;
                state <= need_mem ? ((toc_e.valid && toc_e.dirty) ? S_PROBE_RD : S_MISS_WAIT)
                                  : S_XP_RD;
                need_mem <= 1'b1;
              end
            end
            C_WB: begin
              if (toc_hit) begin                  // resident: write + dirty bit
                meta_upd <= !toc_e.dirty || (sampled && !toc_samp.w);
                if (!toc_e.dirty) evt.toc_dirty_upd <= 1'b1;
                else              evt.pdm_saved     <= 1'b1;
                state <= S_WB_WRITE;
              end else begin                      // write-allocate
                vic_tag    <= toc_e.tag;
                need_probe <= toc_e.valid && toc_e.dirty;
                state <= (toc_e.valid && toc_e.dirty) ? S_PROBE_RD : S_MISS_WAIT;
              end
            end
            default: state <= vic_dirty ? S_VIC_WB : S_INST_WR;   // C_INSTALL
          endcase
        end

        // ---- predicted miss that hit
        S_TOCHIT_RD: if (fire) state <= S_TOCHIT_WAIT;
        S_TOCHIT_WAIT: if (c_got) begin
          rsp_valid <= 1'b1; rsp_data <= c_data; rsp_dcp <= 1'b1; rsp_l4_hit <= 1'b1;
          rsp_dcd   <= c_meta.dirty || (toc_e.dirty && !sampled);
          state <= S_DONE;
        end

        // ---- miss handling
        S_XP_RD: if (fire) begin
          state <= need_probe ? S_PROBE_RD : S_MISS_WAIT;
        end
        S_PROBE_RD: if (fire) begin
          evt.victim_probe <= 1'b1;
          state <= S_MISS_WAIT;
        end
        S_MISS_WAIT: if ((!need_mem || mem_got) && (!need_probe || c_got)) begin
          if (need_probe) begin
            vic_dirty <= c_meta.valid && c_meta.dirty && c_meta.tag == vic_tag;
            vic_data  <= c_data;
          end
          state <= r_wb ? S_CONT : S_DECIDE;
          if (r_wb) cont <= C_INSTALL;
        end
        S_DECIDE: begin
          rsp_valid <= 1'b1; rsp_data <= mem_data; rsp_l4_hit <= 1'b0;
          rsp_dcp   <= byp_install;
          rsp_dcd   <= byp_install && swp_pred_dirty && !sampled;
          if (byp_install) begin
            cont <= C_INSTALL;
            state <= have_meta ? S_CONT : S_MC_LK;
          end else begin
            evt.bypass <= 1'b1;
            state <= S_DONE;
          end
        end

        // ---- install
        S_VIC_WB: if (fire) begin
          evt.victim_wb <= 1'b1;
          state <= S_INST_WR;
        end
        S_INST_WR: if (fire) state <= S_INST_META;
        S_INST_META: begin
          evt.swp_train <= swp_train_en;
          evict_valid   <= toc_e.valid;
          evict_laddr   <= {toc_e.tag, set_idx};
          if (r_wb)                evt.wb_install    <= 1'b1;
          else if (swp_pred_dirty) evt.pdm_install   <= 1'b1;
          else                     evt.clean_install <= 1'b1;
          state <= S_DONE;
        end

        // ---- writeback to a resident line
        S_WB_WRITE: if (fire) state <= meta_upd ? S_WB_META : S_DONE;
        S_WB_META:  state <= S_DONE;

        S_DONE: if (!mem_out && !c_out && !meta_out) begin
          done  <= 1'b1;
          state <= S_IDLE;
        end

        default: state <= S_IDLE;
      endcase
    end
  end

  assign req_ready = (state == S_IDLE);

  // ------------------------------------------------------------ checks
  // A command held without ready must not change.
  a_cmd_stable: assert property (@(posedge clk) disable iff (!rst_n)
    ch_cmd_valid && !ch_cmd_ready |=> ch_cmd_valid && $stable(ch_cmd));
  // At most one read outstanding per device.
  a_one_read: assert property (@(posedge clk) disable iff (!rst_n)
    fire && !ch_cmd.write && ch_cmd.dev == DEV_XP |-> !mem_out);

endmodule
