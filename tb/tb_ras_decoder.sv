// tb_ras_decoder: decodes planes that the reference encoder compressed and
// checks every pixel, the number of binary-search probes, prediction hits
// and misses (against the reference predictor and search), the byte pointer
// returning to the stream base, and the cycle count: a symbol costs
// 4 + probes cycles, plus one per miss, when the bus always grants.
// Plane 1 is smooth with a few outliers (hits and misses); plane 2 is
// decoded with random bus grants and random pixel back-pressure.
module tb_ras_decoder;
  import ras_pkg::*;
  import tb_ras_ref_pkg::*;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic start, busy, done;
  logic [CNT_BITS-1:0] num_syms;
  logic [COL_BITS-1:0] width;
  ms_entry_t ms_rdata;
  logic bus_req, bus_gnt, bus_rsp_valid;
  sym_t bus_addr;
  cdf_pair_t bus_rdata;
  ptr_t lb_raddr;
  logic [15:0] lb_rdata;
  logic pix_valid, pix_ready;
  sym_t pix;
  logic [31:0] probes, hits, misses;

  cdf_t cdf;
  byte unsigned lbm [8192];
  byte unsigned outp[$];
  int grant_pct, ready_pct;
  int checks = 0, failures = 0;

  ras_decoder #(.DELTA(8), .MAX_W(64)) dut (.*);

  always_comb bus_gnt = bus_req && ($urandom_range(0, 99) < grant_pct);
  always_ff @(posedge clk) begin
    bus_rsp_valid <= bus_req && bus_gnt;
    if (bus_req && bus_gnt) begin
      bus_rdata.cum      <= cum_t'(cdf[bus_addr]);
      bus_rdata.cum_next <= cum_t'(cdf[bus_addr + 1]);
    end
  end
  assign lb_rdata = {lbm[13'(lb_raddr - 1)], lbm[13'(lb_raddr - 2)]};
  logic rdy_q;
  always_ff @(posedge clk) rdy_q <= ($urandom_range(0, 99) < ready_pct);
  assign pix_ready = rdy_q;
  always_ff @(posedge clk) if (pix_valid && pix_ready) outp.push_back(pix);

  task automatic run(input byte unsigned img[$], input int w, input int gp, input int rp);
    byte unsigned rev[$], rbytes[$];
    int unsigned rstate, x, slot;
    int n, exp_probes, exp_hits, exp_misses, cyc, pr;
    bit hit;
    ptr_t b;
    n = img.size();
    for (int i = n - 1; i >= 0; i--) rev.push_back(img[i]);
    ref_encode(cdf, rev, rstate, rbytes);
    b = ptr_t'($urandom_range(2, 50));
    foreach (rbytes[i]) lbm[int'(b) + i] = rbytes[i];
    // reference decode for the expected statistics
    x = rstate; exp_probes = 0; exp_hits = 0; exp_misses = 0;
    begin
      int p;
      p = int'(b) + rbytes.size();
      for (int i = 0; i < n; i++) begin
        int s, mu;
        slot = x & 16'hFFFF;
        mu = ref_predict(img, w, i / w, i % w);
        s = ref_decode_sym(cdf, slot, mu, pr, hit);
        exp_probes += pr;
        if (hit) exp_hits++; else exp_misses++;
        x = (cdf[s+1] - cdf[s]) * (x >> 16) + slot - cdf[s];
        while (x < 32'h0080_0000) begin p--; x = (x << 8) | lbm[p]; end
      end
    end
    grant_pct = gp; ready_pct = rp; outp = {};
    @(negedge clk);
    ms_rdata.state = rstate; ms_rdata.ptr = b + ptr_t'(rbytes.size());
    num_syms = CNT_BITS'(n); width = COL_BITS'(w); start = 1;
    @(negedge clk); start = 0;
    cyc = 1;
    while (!done) begin @(negedge clk); cyc++; end
    checks++;
    if (outp.size() != n) failures++;
    for (int i = 0; i < n && i < outp.size(); i++) begin
      checks++;
      if (outp[i] != img[i]) begin
        failures++;
        if (failures < 10) $display("pixel %0d: %0d expected %0d", i, outp[i], img[i]);
      end
    end
    checks++; if (dut.ptr != b) failures++;
    checks++; if (probes != 32'(exp_probes) || hits != 32'(exp_hits) || misses != 32'(exp_misses)) failures++;
    $display("run: %0d px, %0d cycles, probes %0d (%0.2f/px, ref %0d), hits %0d misses %0d",
             n, cyc, probes, real'(probes) / n, exp_probes, hits, misses);
    if (gp == 100 && rp == 100) begin
      checks++;
      if (cyc < 4*n + exp_probes + exp_misses || cyc > 4*n + exp_probes + exp_misses + 3) begin
        failures++;
        $display("cycle count %0d, model %0d", cyc, 4*n + exp_probes + exp_misses);
      end
    end
  endtask

  initial begin
    dist_t d;
    byte unsigned img[$];
    int rc, rcl;
    start = 0; num_syms = 0; width = 0; ms_rdata = '0;
    grant_pct = 100; ready_pct = 100;
    repeat (2) @(negedge clk);
    rst_n = 1;
    make_dist(128, 0.97, 1.0e-5, d);
    ref_build_cdf(d, cdf, rc, rcl);
    for (int r = 0; r < 20; r++)
      for (int c = 0; c < 32; c++) begin
        int v;
        v = 128 + (r * 3) - (c * 2) + $urandom_range(0, 4);
        if ($urandom_range(0, 19) == 0) v = $urandom_range(0, 255);
        img.push_back(8'(v));
      end
    run(img, 32, 100, 100);
    checks++; if (hits == 0 || misses == 0) failures++;
    img = {};
    for (int i = 0; i < 300; i++) img.push_back(8'($urandom_range(100, 160)));
    run(img, 15, 50, 60);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #5000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
