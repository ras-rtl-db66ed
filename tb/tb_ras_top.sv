// tb_ras_top: end-to-end test of the whole accelerator at its default size.
//
// 1. A BF16 distribution is written into global memory and converted by the
//    SPC; the CDF table is compared with the reference conversion.
// 2. Image workload A, a 64x64 RGB image (ImageNet64 size): lanes 0..2 each
//    encode one colour plane at the same time while lane 3 stays idle and
//    clock-gated. The byte streams (read through the host port) and final
//    states are compared with the reference encoder.
// 3. The same lanes switch to decode and reproduce the planes, with random
//    back-pressure on the pixel outputs.
// 4. Workload B, a 32x32 RGB image plus one more 32x32 plane (ImageNet32 /
//    CIFAR-10 size), uses all four lanes and other middle-state entries.
// Every mechanism is counted and must occur: bus contention, encoder
// starvation, 1- and 2-byte re-normalisation, prediction hits and misses,
// clamped frequencies, a non-zero mass correction, lane clock gating, mode
// switches and pixel back-pressure. Cycle counts and search statistics are
// printed for each workload.
module tb_ras_top;
  import ras_pkg::*;
  import tb_ras_ref_pkg::*;

  localparam int NL = 4;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic gm_wr_en;
  logic [1:0] gm_wr_blk;
  sym_t gm_wr_idx;
  bf16_t gm_wr_data;
  logic spc_start, spc_busy, spc_done, spc_err;
  logic [1:0] spc_sel;
  logic signed [17:0] spc_corr;
  logic [8:0] spc_clamps;
  logic [NL-1:0] lane_start, lane_busy, lane_done, lane_clk_en;
  lane_mode_e lane_mode [NL];
  logic [1:0] lane_job [NL];
  logic [CNT_BITS-1:0] lane_num_syms [NL];
  logic [COL_BITS-1:0] lane_width [NL];
  ptr_t lane_base [NL];
  logic [NL-1:0] sym_valid, sym_ready, pix_valid, pix_ready;
  sym_t sym [NL], pix [NL];
  logic host_lb_we, host_ms_we;
  logic [1:0] host_lb_bank, host_ms_bank, host_ms_idx;
  ptr_t host_lb_addr;
  logic [7:0] host_lb_wdata, host_lb_rdata;
  ms_entry_t host_ms_wdata, host_ms_rdata;
  logic [NL-1:0] bus_req, bus_gnt, lane_starved;
  logic [31:0] lane_probes [NL], lane_hits [NL], lane_misses [NL];

  ras_top dut (.*);

  // ---------------- testbench state ----------------
  cdf_t cdf;
  byte unsigned plane [NL][$];     // pixels in raster order
  byte unsigned rev   [NL][$];     // encode order
  byte unsigned outp  [NL][$];
  int sidx [NL];
  int ready_pct;
  int checks = 0, failures = 0;
  // mechanism counters
  int n_contend, n_starve, n_rn1, n_rn2, n_gated, n_backpressure, n_modesw;
  longint n_hits, n_misses, n_probes, n_syms_dec;

  always_comb
    for (int l = 0; l < NL; l++) begin
      sym_valid[l] = sidx[l] < rev[l].size();
      sym[l]       = (sidx[l] < rev[l].size()) ? rev[l][sidx[l]] : '0;
    end

  always_ff @(posedge clk) begin
    for (int l = 0; l < NL; l++) begin
      if (sym_valid[l] && sym_ready[l]) sidx[l] <= sidx[l] + 1;
      if (pix_valid[l] && pix_ready[l]) outp[l].push_back(pix[l]);
      if (pix_valid[l] && !pix_ready[l]) n_backpressure++;
      if (bus_req[l] && !bus_gnt[l]) n_contend++;
      if (lane_starved[l]) n_starve++;
      if (dut.lb_we[l] && dut.lb_cnt[l] == 2'd1) n_rn1++;
      if (dut.lb_we[l] && dut.lb_cnt[l] == 2'd2) n_rn2++;
      if (!lane_clk_en[l] && |lane_busy) n_gated++;
      pix_ready[l] <= ($urandom_range(0, 99) < ready_pct);
    end
  end

  task automatic make_plane(int l, int w, int h, int seed);
    plane[l] = {};
    for (int r = 0; r < h; r++)
      for (int c = 0; c < w; c++) begin
        int v;
        v = 60 + seed + (r * 2) + ((c * 3) / 2) + $urandom_range(0, 5);
        if ($urandom_range(0, 49) == 0) v = $urandom_range(0, 255);
        plane[l].push_back(8'(v));
      end
    rev[l] = {};
    for (int i = w*h - 1; i >= 0; i--) rev[l].push_back(plane[l][i]);
  endtask

  // Encode the planes of `lanes` into job `job` at `base`, then decode them.
  task automatic run_workload(string name, logic [NL-1:0] lanes, int w, int h, int job, int base);
    int cyc_enc, cyc_dec;
    longint p0, h0, m0;
    int unsigned rstate [NL];
    byte unsigned rbytes [NL][$];
    // encode
    @(negedge clk);
    for (int l = 0; l < NL; l++) begin
      sidx[l] = 0;
      if (lanes[l]) ref_encode(cdf, rev[l], rstate[l], rbytes[l]);
      lane_mode[l] = MODE_ENC; lane_job[l] = 2'(job); lane_num_syms[l] = CNT_BITS'(w*h);
      lane_width[l] = COL_BITS'(w); lane_base[l] = ptr_t'(base);
    end
    lane_start = lanes;
    @(negedge clk); lane_start = '0;
    cyc_enc = 1;
    while ((lane_busy & lanes) != 0) begin @(negedge clk); cyc_enc++; end
    // check streams and states through the host ports
    for (int l = 0; l < NL; l++) if (lanes[l]) begin
      host_ms_bank = 2'(l); host_ms_idx = 2'(job); #1;
      checks++;
      if (host_ms_rdata.state != rstate[l] || host_ms_rdata.ptr != ptr_t'(base + rbytes[l].size())) begin
        failures++;
        $display("%s lane %0d: final state %h expected %h", name, l, host_ms_rdata.state, rstate[l]);
      end
      foreach (rbytes[l][i]) begin
        host_lb_bank = 2'(l); host_lb_addr = ptr_t'(base + i);
        @(negedge clk);
        checks++;
        if (host_lb_rdata != rbytes[l][i]) failures++;
      end
    end
    // decode
    for (int l = 0; l < NL; l++) begin
      outp[l] = {};
      lane_mode[l] = MODE_DEC;
      if (lanes[l]) n_modesw++;
    end
    p0 = 0; h0 = 0; m0 = 0;
    lane_start = lanes;
    @(negedge clk); lane_start = '0;
    cyc_dec = 1;
    while ((lane_busy & lanes) != 0) begin @(negedge clk); cyc_dec++; end
    @(negedge clk);
    for (int l = 0; l < NL; l++) if (lanes[l]) begin
      checks++;
      if (outp[l].size() != plane[l].size()) failures++;
      foreach (plane[l][i]) begin
        checks++;
        if (i >= outp[l].size() || outp[l][i] != plane[l][i]) failures++;
      end
      p0 += lane_probes[l]; h0 += lane_hits[l]; m0 += lane_misses[l];
    end
    n_probes += p0; n_hits += h0; n_misses += m0; n_syms_dec += $countones(lanes) * w * h;
    $display("%s: %0d lanes x %0dx%0d, encode %0d cycles, decode %0d cycles, %0.2f probes/px, %0d hits, %0d misses",
             name, $countones(lanes), w, h, cyc_enc, cyc_dec,
             real'(p0) / ($countones(lanes) * w * h), h0, m0);
  endtask

  initial begin
    dist_t d;
    int rc, rcl;
    gm_wr_en = 0; gm_wr_blk = 0; gm_wr_idx = 0; gm_wr_data = 0;
    spc_start = 0; spc_sel = 0; lane_start = 0;
    host_lb_we = 0; host_ms_we = 0; host_lb_bank = 0; host_ms_bank = 0; host_ms_idx = 0;
    host_lb_addr = 0; host_lb_wdata = 0; host_ms_wdata = '0;
    ready_pct = 85;
    n_contend = 0; n_starve = 0; n_rn1 = 0; n_rn2 = 0; n_gated = 0; n_backpressure = 0;
    n_modesw = 0; n_hits = 0; n_misses = 0; n_probes = 0; n_syms_dec = 0;
    for (int l = 0; l < NL; l++) begin
      sidx[l] = 0; lane_mode[l] = MODE_ENC; lane_job[l] = 0; lane_num_syms[l] = 0;
      lane_width[l] = 0; lane_base[l] = 0; pix_ready[l] = 1;
    end
    repeat (3) @(negedge clk);
    rst_n = 1;
    // 1. distribution into block 1 and SPC conversion
    make_dist(140, 0.93, 0.0, d);
    for (int i = 0; i < 256; i++) begin
      @(negedge clk); gm_wr_en = 1; gm_wr_blk = 1; gm_wr_idx = 8'(i); gm_wr_data = d[i];
    end
    @(negedge clk); gm_wr_en = 0;
    ref_build_cdf(d, cdf, rc, rcl);
    spc_start = 1; spc_sel = 1;
    @(negedge clk); spc_start = 0;
    while (!spc_done) @(negedge clk);
    @(negedge clk);
    for (int i = 0; i <= 256; i++) begin
      checks++;
      if (int'(dut.u_tbl.mem[i]) != int'(cdf[i])) failures++;
    end
    checks++; if (int'(spc_corr) != rc || int'(spc_clamps) != rcl || spc_err) failures++;
    $display("SPC: correction %0d, clamped symbols %0d", spc_corr, spc_clamps);
    // 2./3. ImageNet64-sized RGB image on lanes 0..2
    for (int l = 0; l < 3; l++) make_plane(l, 64, 64, 20 * l);
    run_workload("64x64x3", 4'b0111, 64, 64, 0, 0);
    // 4. ImageNet32 / CIFAR-10-sized RGB image plus one plane on lane 3
    for (int l = 0; l < 4; l++) make_plane(l, 32, 32, 15 * l);
    run_workload("32x32x3+1", 4'b1111, 32, 32, 1, 0);
    $display("mechanisms: contention %0d, starved %0d, renorm1 %0d, renorm2 %0d, hits %0d, misses %0d, clamps %0d, correction %0d, gated lane-cycles %0d, mode switches %0d, back-pressure %0d",
             n_contend, n_starve, n_rn1, n_rn2, n_hits, n_misses, spc_clamps, spc_corr,
             n_gated, n_modesw, n_backpressure);
    $display("average binary-search probes per pixel: %0.2f (full search alone: 8)",
             real'(n_probes) / real'(n_syms_dec));
    if (n_contend == 0)      begin failures++; $display("never: bus contention"); end
    if (n_starve == 0)       begin failures++; $display("never: encoder starved"); end
    if (n_rn1 == 0)          begin failures++; $display("never: 1-byte renorm"); end
    if (n_rn2 == 0)          begin failures++; $display("never: 2-byte renorm"); end
    if (n_hits == 0)         begin failures++; $display("never: prediction hit"); end
    if (n_misses == 0)       begin failures++; $display("never: prediction miss"); end
    if (spc_clamps == 0)     begin failures++; $display("never: clamp"); end
    if (spc_corr == 0)       begin failures++; $display("never: mass correction"); end
    if (n_gated == 0)        begin failures++; $display("never: lane gated"); end
    if (n_modesw == 0)       begin failures++; $display("never: mode switch"); end
    if (n_backpressure == 0) begin failures++; $display("never: back-pressure"); end
    checks += 11;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #20000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
