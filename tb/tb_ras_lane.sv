// tb_ras_lane: one lane encodes a plane into memory models, switches mode
// and decodes it back. Checks the decoded pixels, that the stored byte
// stream and final state match the reference encoder, that both jobs use
// the middle-state entry they were given, and that the lane clock stops
// while the lane is idle (no gated-clock edges between jobs).
module tb_ras_lane;
  import ras_pkg::*;
  import tb_ras_ref_pkg::*;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic start, busy, done, clk_en;
  lane_mode_e mode;
  logic [1:0] job;
  logic [CNT_BITS-1:0] num_syms;
  logic [COL_BITS-1:0] width;
  ptr_t base;
  logic sym_valid, sym_ready, pix_valid, pix_ready;
  sym_t sym, pix;
  logic bus_req, bus_gnt, bus_rsp_valid;
  sym_t bus_addr;
  cdf_pair_t bus_rdata;
  logic lb_we;
  logic [1:0] lb_cnt;
  ptr_t lb_waddr, lb_raddr;
  logic [15:0] lb_wdata, lb_rdata;
  logic ms_we;
  logic [1:0] ms_idx;
  ms_entry_t ms_wdata, ms_rdata;
  logic starved;
  logic [31:0] probes, hits, misses;

  cdf_t cdf;
  byte unsigned lbm [8192];
  ms_entry_t msm [4];
  byte unsigned img[$], rev[$], outp[$];
  int sidx;
  int gedges;
  int checks = 0, failures = 0;

  ras_lane #(.MS_DEPTH(4), .CREDITS(4), .DELTA(8), .MAX_W(64)) dut (.*);

  always @(posedge dut.gclk) gedges++;

  always_comb bus_gnt = bus_req && ($urandom_range(0, 3) != 0);
  always_ff @(posedge clk) begin
    bus_rsp_valid <= bus_req && bus_gnt;
    if (bus_req && bus_gnt) begin
      bus_rdata.cum      <= cum_t'(cdf[bus_addr]);
      bus_rdata.cum_next <= cum_t'(cdf[bus_addr + 1]);
    end
    if (lb_we && lb_cnt >= 1) lbm[13'(lb_waddr)] <= lb_wdata[7:0];
    if (lb_we && lb_cnt == 2) lbm[13'(lb_waddr + 1)] <= lb_wdata[15:8];
    if (ms_we) msm[ms_idx] <= ms_wdata;
    if (sym_valid && sym_ready) sidx <= sidx + 1;
    if (pix_valid && pix_ready) outp.push_back(pix);
  end
  assign lb_rdata  = {lbm[13'(lb_raddr - 1)], lbm[13'(lb_raddr - 2)]};
  assign ms_rdata  = msm[ms_idx];
  assign sym_valid = (sidx < rev.size());
  assign sym       = (sidx < rev.size()) ? rev[sidx] : '0;
  assign pix_ready = 1'b1;

  initial begin
    dist_t d;
    int rc, rcl, e0;
    int unsigned rstate;
    byte unsigned rbytes[$];
    localparam int W = 24, H = 16;
    start = 0; mode = MODE_ENC; job = 0; num_syms = 0; width = 0; base = 0; sidx = 0; gedges = 0;
    for (int i = 0; i < 4; i++) msm[i] = '0;
    make_dist(100, 0.95, 1.0e-5, d);
    ref_build_cdf(d, cdf, rc, rcl);
    for (int r = 0; r < H; r++)
      for (int c = 0; c < W; c++) img.push_back(8'(90 + r + c / 2 + $urandom_range(0, 3)));
    for (int i = W*H - 1; i >= 0; i--) rev.push_back(img[i]);
    ref_encode(cdf, rev, rstate, rbytes);
    repeat (2) @(negedge clk);
    rst_n = 1;
    gedges = 0;
    repeat (3) @(negedge clk);
    checks++; if (gedges != 0) begin failures++; $display("idle edges %0d", gedges); end
    // encode into job 2
    start = 1; mode = MODE_ENC; job = 2; num_syms = CNT_BITS'(W*H); base = 100;
    @(negedge clk); start = 0;
    while (!done) @(negedge clk);
    repeat (3) @(negedge clk);
    checks++;
    if (msm[2].state != rstate || msm[2].ptr != 100 + ptr_t'(rbytes.size())) failures++;
    foreach (rbytes[i]) begin checks++; if (lbm[100 + i] != rbytes[i]) failures++; end
    e0 = gedges;
    repeat (20) @(negedge clk);
    checks++; if (gedges != e0) begin failures++; $display("edges between jobs %0d", gedges - e0); end
    // decode job 2
    start = 1; mode = MODE_DEC; job = 2; width = COL_BITS'(W);
    @(negedge clk); start = 0;
    while (!done) @(negedge clk);
    @(negedge clk);
    checks++; if (outp.size() != W*H) failures++;
    foreach (img[i]) begin checks++; if (i < outp.size() && outp[i] != img[i]) failures++; end
    $display("lane: %0d bytes, probes %0d hits %0d misses %0d, gated edges %0d",
             rbytes.size(), probes, hits, misses, gedges);
    checks++; if (hits == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #2000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
