// ras_top: the rANS acceleration system.
//
// A probability model (outside this design) writes BF16 distributions into
// the global memory. The streaming prefetch converter (SPC) turns the
// selected distribution, once, into the fixed-point CDF table that all lanes
// share. NUM_LANES independent lanes then encode symbol planes into, or
// decode them out of, their own banks of the low-bit memory (the byte
// stream) and the middle-state memory (final/initial coder state). Lanes
// reach the CDF table through a round-robin arbitrated bus; each lane's
// clock is gated while it is idle.
// Everything that would connect to the probability model, the DRAM and the
// host I/O interface of a full system is a port here: the global-memory
// write port, the per-lane symbol and pixel streams, the job controls and
// the host ports of the two state memories.
// Structure and block split follow the paper's architecture figure; sizes
// other than the 32-bit state and the window of +-8 are this design's.
module ras_top
  import ras_pkg::*;
#(
  parameter int unsigned NUM_LANES = 4,
  parameter int unsigned NUM_DISTS = 4,
  parameter int unsigned MS_DEPTH  = 4,
  parameter int unsigned LB_DEPTH  = 8192,
  parameter int unsigned CREDITS   = 4,
  parameter int unsigned DELTA     = 8,
  parameter int unsigned MAX_W     = 64
) (
  input  logic                         clk,
  input  logic                         rst_n,
  // global memory write port (probability model side)
  input  logic                         gm_wr_en,
  input  logic [$clog2(NUM_DISTS)-1:0] gm_wr_blk,
  input  sym_t                         gm_wr_idx,
  input  bf16_t                        gm_wr_data,
  // SPC control
  input  logic                         spc_start,
  input  logic [$clog2(NUM_DISTS)-1:0] spc_sel,
  output logic                         spc_busy,
  output logic                         spc_done,
  output logic signed [PROB_BITS+1:0]  spc_corr,
  output logic [SYM_BITS:0]            spc_clamps,
  output logic                         spc_err,
  // lane job control
  input  logic [NUM_LANES-1:0]         lane_start,
  input  lane_mode_e                   lane_mode     [NUM_LANES],
  input  logic [$clog2(MS_DEPTH)-1:0]  lane_job      [NUM_LANES],
  input  logic [CNT_BITS-1:0]          lane_num_syms [NUM_LANES],
  input  logic [COL_BITS-1:0]          lane_width    [NUM_LANES],
  input  ptr_t                         lane_base     [NUM_LANES],
  output logic [NUM_LANES-1:0]         lane_busy,
  output logic [NUM_LANES-1:0]         lane_done,
  output logic [NUM_LANES-1:0]         lane_clk_en,
  // symbol streams in, pixel streams out
  input  logic [NUM_LANES-1:0]         sym_valid,
  input  sym_t                         sym           [NUM_LANES],
  output logic [NUM_LANES-1:0]         sym_ready,
  output logic [NUM_LANES-1:0]         pix_valid,
  output sym_t                         pix           [NUM_LANES],
  input  logic [NUM_LANES-1:0]         pix_ready,
  // host access to the stored streams and states
  input  logic                         host_lb_we,
  input  logic [$clog2(NUM_LANES)-1:0] host_lb_bank,
  input  ptr_t                         host_lb_addr,
  input  logic [7:0]                   host_lb_wdata,
  output logic [7:0]                   host_lb_rdata,
  input  logic                         host_ms_we,
  input  logic [$clog2(NUM_LANES)-1:0] host_ms_bank,
  input  logic [$clog2(MS_DEPTH)-1:0]  host_ms_idx,
  input  ms_entry_t                    host_ms_wdata,
  output ms_entry_t                    host_ms_rdata,
  // observation
  output logic [NUM_LANES-1:0]         bus_req,
  output logic [NUM_LANES-1:0]         bus_gnt,
  output logic [NUM_LANES-1:0]         lane_starved,
  output logic [31:0]                  lane_probes   [NUM_LANES],
  output logic [31:0]                  lane_hits     [NUM_LANES],
  output logic [31:0]                  lane_misses   [NUM_LANES]
);

  // global memory -> SPC -> CDF table
  logic [$clog2(NUM_DISTS)-1:0] gm_rd_blk;
  sym_t       gm_rd_idx;
  bf16_t      gm_rd_data;
  logic       tbl_we;
  logic [SYM_BITS:0] tbl_waddr;
  cum_t       tbl_wdata;
  logic       tbl_re;
  sym_t       tbl_raddr;
  cdf_pair_t  tbl_rdata;

  ras_global_mem #(.NUM_DISTS(NUM_DISTS)) u_gmem (
    .clk, .wr_en(gm_wr_en), .wr_blk(gm_wr_blk), .wr_idx(gm_wr_idx), .wr_data(gm_wr_data),
    .rd_blk(gm_rd_blk), .rd_idx(gm_rd_idx), .rd_data(gm_rd_data)
  );

  ras_spc #(.NUM_DISTS(NUM_DISTS)) u_spc (
    .clk, .rst_n, .start(spc_start), .sel(spc_sel),
    .gm_blk(gm_rd_blk), .gm_idx(gm_rd_idx), .gm_data(gm_rd_data),
    .tbl_we, .tbl_addr(tbl_waddr), .tbl_data(tbl_wdata),
    .busy(spc_busy), .done(spc_done), .corr(spc_corr), .clamp_count(spc_clamps), .err(spc_err)
  );

  ras_cdf_table u_tbl (
    .clk, .we(tbl_we), .waddr(tbl_waddr), .wdata(tbl_wdata),
    .re(tbl_re), .raddr(tbl_raddr), .rdata(tbl_rdata)
  );

  // bus
  sym_t                 bus_addr [NUM_LANES];
  logic [NUM_LANES-1:0] bus_rsp_valid;

  ras_bus_arb #(.NUM_LANES(NUM_LANES)) u_arb (
    .clk, .rst_n, .req(bus_req), .addr(bus_addr), .gnt(bus_gnt),
    .tbl_re, .tbl_addr(tbl_raddr), .rsp_valid(bus_rsp_valid)
  );

  // state memories
  logic [NUM_LANES-1:0]        lb_we;
  logic [1:0]                  lb_cnt   [NUM_LANES];
  ptr_t                        lb_waddr [NUM_LANES];
  logic [15:0]                 lb_wdata [NUM_LANES];
  ptr_t                        lb_raddr [NUM_LANES];
  logic [15:0]                 lb_rdata [NUM_LANES];
  logic [NUM_LANES-1:0]        ms_we;
  logic [$clog2(MS_DEPTH)-1:0] ms_idx   [NUM_LANES];
  ms_entry_t                   ms_wdata [NUM_LANES];
  ms_entry_t                   ms_rdata [NUM_LANES];

  ras_lowbit_mem #(.NUM_LANES(NUM_LANES), .LB_DEPTH(LB_DEPTH)) u_lbmem (
    .clk, .we(lb_we), .wcnt(lb_cnt), .waddr(lb_waddr), .wdata(lb_wdata),
    .raddr(lb_raddr), .rdata(lb_rdata),
    .host_we(host_lb_we), .host_bank(host_lb_bank), .host_addr(host_lb_addr),
    .host_wdata(host_lb_wdata), .host_rdata(host_lb_rdata)
  );

  ras_ms_mem #(.NUM_LANES(NUM_LANES), .MS_DEPTH(MS_DEPTH)) u_msmem (
    .clk, .we(ms_we), .idx(ms_idx), .wdata(ms_wdata), .rdata(ms_rdata),
    .host_we(host_ms_we), .host_bank(host_ms_bank), .host_idx(host_ms_idx),
    .host_wdata(host_ms_wdata), .host_rdata(host_ms_rdata)
  );

  for (genvar l = 0; l < NUM_LANES; l++) begin : g_lane
    ras_lane #(.MS_DEPTH(MS_DEPTH), .CREDITS(CREDITS), .DELTA(DELTA), .MAX_W(MAX_W)) u_lane (
      .clk, .rst_n,
      .start(lane_start[l]), .mode(lane_mode[l]), .job(lane_job[l]),
      .num_syms(lane_num_syms[l]), .width(lane_width[l]), .base(lane_base[l]),
      .busy(lane_busy[l]), .done(lane_done[l]), .clk_en(lane_clk_en[l]),
      .sym_valid(sym_valid[l]), .sym(sym[l]), .sym_ready(sym_ready[l]),
      .pix_valid(pix_valid[l]), .pix(pix[l]), .pix_ready(pix_ready[l]),
      .bus_req(bus_req[l]), .bus_addr(bus_addr[l]), .bus_gnt(bus_gnt[l]),
      .bus_rsp_valid(bus_rsp_valid[l]), .bus_rdata(tbl_rdata),
      .lb_we(lb_we[l]), .lb_cnt(lb_cnt[l]), .lb_waddr(lb_waddr[l]), .lb_wdata(lb_wdata[l]),
      .lb_raddr(lb_raddr[l]), .lb_rdata(lb_rdata[l]),
      .ms_we(ms_we[l]), .ms_idx(ms_idx[l]), .ms_wdata(ms_wdata[l]), .ms_rdata(ms_rdata[l]),
      .starved(lane_starved[l]), .probes(lane_probes[l]), .hits(lane_hits[l]), .misses(lane_misses[l])
    );
  end

endmodule
