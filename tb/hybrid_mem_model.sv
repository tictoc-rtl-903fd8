// hybrid_mem_model: behavioural model of one memory channel shared by a DRAM
// cache and a 3D-XPoint main memory, for simulation only (not synthesizable).
//
// Commands arrive on a valid/ready port. Every command, read or write,
// holds the shared bus for BURST cycles (ready stays low meanwhile), so all
// accesses compete for the same bandwidth. A read is answered after a
// device latency with one response beat tagged with its device; DRAM-cache
// data and metadata reads take DRAM_LAT cycles, 3D-XPoint reads XP_LAT. The
// latencies keep the roughly 6x read gap between the two technologies but are
// shortened for simulation speed. Storage is sparse (associative arrays):
// cache lines read as all-zero (invalid) until written, metadata lines as
// zero, and 3D-XPoint lines hold a pattern derived from the address until
// written (see xp_init). Counters of accesses per device and direction are
// public for testbenches.
module hybrid_mem_model
  import tictoc_pkg::*;
#(
  parameter int unsigned BURST    = 4,
  parameter int unsigned DRAM_LAT = 13,
  parameter int unsigned XP_LAT   = 78
) (
  input  logic    clk,
  input  logic    rst_n,
  input  logic    cmd_valid,
  output logic    cmd_ready,
  input  ch_cmd_t cmd,
  output logic    rsp_valid,
  output ch_rsp_t rsp
);
  line_t cache_d [daddr_t];
  side_t cache_s [daddr_t];
  line_t meta_d  [daddr_t];
  side_t meta_s  [daddr_t];
  line_t xp_d    [daddr_t];

  int unsigned n_rd [3];
  int unsigned n_wr [3];

  int unsigned busy;
  // one pending read per device
  logic    pend   [3];
  int      timer  [3];
  ch_rsp_t pdata  [3];

  function automatic line_t xp_init(daddr_t a);
    line_t l;
    for (int i = 0; i < 16; i++) l[i*32 +: 32] = a[31:0] ^ (32'h9E37_79B9 * (i + 1));
    return l;
  endfunction

  function automatic line_t xp_peek(daddr_t a);
    return xp_d.exists(a) ? xp_d[a] : xp_init(a);
  endfunction

  function automatic side_t cache_side_peek(daddr_t a);
    return cache_s.exists(a) ? cache_s[a] : '0;
  endfunction

  function automatic line_t meta_peek(daddr_t a);
    return meta_d.exists(a) ? meta_d[a] : '0;
  endfunction

  function automatic int unsigned total();
    return n_rd[0] + n_rd[1] + n_rd[2] + n_wr[0] + n_wr[1] + n_wr[2];
  endfunction

  assign cmd_ready = (busy == 0);

  always @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy <= 0;
      rsp_valid <= 1'b0;
      for (int d = 0; d < 3; d++) begin
        pend[d] <= 1'b0; timer[d] <= 0; n_rd[d] = 0; n_wr[d] = 0;
      end
    end else begin
      rsp_valid <= 1'b0;
      if (busy != 0) busy <= busy - 1;
      for (int d = 0; d < 3; d++) if (pend[d] && timer[d] > 0) timer[d] <= timer[d] - 1;
      // deliver at most one response per cycle
      begin : deliver
        for (int d = 0; d < 3; d++) begin
          if (pend[d] && timer[d] == 0) begin
            rsp_valid <= 1'b1;
            rsp       <= pdata[d];
            pend[d]   <= 1'b0;
            disable deliver;
          end
        end
      end
      if (cmd_valid && cmd_ready) begin
        int d;
        d = int'(cmd.dev);
        busy <= BURST - 1;
        if (cmd.write) begin
          n_wr[d] = n_wr[d] + 1;
          unique case (cmd.dev)
            DEV_CACHE: begin cache_d[cmd.addr] = cmd.data; cache_s[cmd.addr] = cmd.side; end
            DEV_META:  begin meta_d[cmd.addr]  = cmd.data; meta_s[cmd.addr]  = cmd.side; end
            default:   xp_d[cmd.addr] = cmd.data;
          endcase
        end else begin
          n_rd[d] = n_rd[d] + 1;
          if (pend[d]) $error("second outstanding read to device %0d", d);
          pend[d]       <= 1'b1;
          timer[d]      <= (cmd.dev == DEV_XP) ? XP_LAT : DRAM_LAT;
          pdata[d].dev  <= cmd.dev;
          unique case (cmd.dev)
            DEV_CACHE: begin
              pdata[d].data <= cache_d.exists(cmd.addr) ? cache_d[cmd.addr] : '0;
              pdata[d].side <= cache_side_peek(cmd.addr);
            end
            DEV_META: begin
              pdata[d].data <= meta_peek(cmd.addr);
              pdata[d].side <= meta_s.exists(cmd.addr) ? meta_s[cmd.addr] : '0;
            end
            default: begin
              pdata[d].data <= xp_peek(cmd.addr);
              pdata[d].side <= '0;
            end
          endcase
        end
      end
    end
  end

endmodule
