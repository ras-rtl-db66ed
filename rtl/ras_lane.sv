// ras_lane: one coding lane.
//
// Holds an encoder and a decoder that share the lane's single port on the
// CDF-table bus and its banks of the middle-state and low-bit memories. A
// job is started with `start`; `mode` (MODE_ENC or MODE_DEC) picks the
// engine, `job` the middle-state entry, and num_syms/width/base describe the
// plane. The engines of a lane never run at the same time.
// The lane's logic runs on a gated clock: ras_clock_gate passes clk only
// while a job is starting, running or signalling done, so an idle lane does
// not toggle. clk_en shows the gate's enable.
// Lanes, per-lane memories and lane clock gating are from the paper; the
// one-engine-at-a-time rule and this control interface are this design's.
module ras_lane
  import ras_pkg::*;
#(
  parameter int unsigned MS_DEPTH = 4,
  parameter int unsigned CREDITS  = 4,
  parameter int unsigned DELTA    = 8,
  parameter int unsigned MAX_W    = 64
) (
  input  logic                        clk,
  input  logic                        rst_n,
  // job control
  input  logic                        start,
  input  lane_mode_e                  mode,
  input  logic [$clog2(MS_DEPTH)-1:0] job,
  input  logic [CNT_BITS-1:0]         num_syms,
  input  logic [COL_BITS-1:0]         width,
  input  ptr_t                        base,
  output logic                        busy,
  output logic                        done,
  output logic                        clk_en,
  // symbol stream in (encode) and pixel stream out (decode)
  input  logic                        sym_valid,
  input  sym_t                        sym,
  output logic                        sym_ready,
  output logic                        pix_valid,
  output sym_t                        pix,
  input  logic                        pix_ready,
  // CDF-table bus
  output logic                        bus_req,
  output sym_t                        bus_addr,
  input  logic                        bus_gnt,
  input  logic                        bus_rsp_valid,
  input  cdf_pair_t                   bus_rdata,
  // low-bit memory bank
  output logic                        lb_we,
  output logic [1:0]                  lb_cnt,
  output ptr_t                        lb_waddr,
  output logic [15:0]                 lb_wdata,
  output ptr_t                        lb_raddr,
  input  logic [15:0]                 lb_rdata,
  // middle-state memory bank
  output logic                        ms_we,
  output logic [$clog2(MS_DEPTH)-1:0] ms_idx,
  output ms_entry_t                   ms_wdata,
  input  ms_entry_t                   ms_rdata,
  // statistics
  output logic                        starved,
  output logic [31:0]                 probes,
  output logic [31:0]                 hits,
  output logic [31:0]                 misses
);

  logic gclk;
  lane_mode_e mode_q;
  logic [$clog2(MS_DEPTH)-1:0] job_q;

  logic enc_busy, enc_done, dec_busy, dec_done;
  logic enc_req, dec_req;
  sym_t enc_addr, dec_addr;

  assign busy   = enc_busy | dec_busy;
  assign done   = enc_done | dec_done;
  assign clk_en = start | busy | done;

  ras_clock_gate u_cg (.clk, .en(clk_en), .gclk);

  always_ff @(posedge gclk or negedge rst_n) begin
    if (!rst_n) begin
      mode_q <= MODE_ENC;
      job_q  <= '0;
    end else if (start && !busy) begin
      mode_q <= mode;
      job_q  <= job;
    end
  end

  wire sel_dec = start ? (mode == MODE_DEC) : (mode_q == MODE_DEC);
  assign ms_idx = start ? job : job_q;

  ras_encoder #(.CREDITS(CREDITS)) u_enc (
    .clk(gclk), .rst_n,
    .start(start && !busy && mode == MODE_ENC), .num_syms, .base,
    .busy(enc_busy), .done(enc_done),
    .sym_valid, .sym, .sym_ready,
    .bus_req(enc_req), .bus_addr(enc_addr), .bus_gnt(bus_gnt && !sel_dec),
    .bus_rsp_valid(bus_rsp_valid && mode_q == MODE_ENC), .bus_rdata,
    .lb_we, .lb_cnt, .lb_addr(lb_waddr), .lb_data(lb_wdata),
    .ms_we, .ms_wdata, .starved
  );

  ras_decoder #(.DELTA(DELTA), .MAX_W(MAX_W)) u_dec (
    .clk(gclk), .rst_n,
    .start(start && !busy && mode == MODE_DEC), .num_syms, .width, .ms_rdata,
    .busy(dec_busy), .done(dec_done),
    .bus_req(dec_req), .bus_addr(dec_addr), .bus_gnt(bus_gnt && sel_dec),
    .bus_rsp_valid(bus_rsp_valid && mode_q == MODE_DEC), .bus_rdata,
    .lb_raddr, .lb_rdata,
    .pix_valid, .pix, .pix_ready,
    .probes, .hits, .misses
  );

  assign bus_req  = sel_dec ? dec_req : enc_req;
  assign bus_addr = sel_dec ? dec_addr : enc_addr;

endmodule
