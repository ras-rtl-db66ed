// tb_ras_encoder: encodes symbol streams through a bus and memory model and
// compares every byte written, its address, the final state and the final
// pointer with the reference rANS encoder. Run 1 grants every request and
// checks the rate of one symbol per cycle (N symbols in at most N+8
// cycles); run 2 grants at random and stalls the symbol source, so credits
// run out and the core starves; run 3 uses a sharp distribution so that
// re-normalisation emits 0, 1 and 2 bytes per symbol.
module tb_ras_encoder;
  import ras_pkg::*;
  import tb_ras_ref_pkg::*;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic start, busy, done;
  logic [CNT_BITS-1:0] num_syms;
  ptr_t base;
  logic sym_valid, sym_ready;
  sym_t sym;
  logic bus_req, bus_gnt, bus_rsp_valid;
  sym_t bus_addr;
  cdf_pair_t bus_rdata;
  logic lb_we;
  logic [1:0] lb_cnt;
  ptr_t lb_addr;
  logic [15:0] lb_data;
  logic ms_we;
  ms_entry_t ms_wdata;
  logic starved;

  cdf_t cdf;
  byte unsigned syms[$], got[$];
  int grant_pct, src_pct;
  int nb_hist [3];
  int starve_cycles, deny_cycles;
  ptr_t exp_addr;
  int checks = 0, failures = 0;

  ras_encoder #(.CREDITS(4)) dut (.*);

  // bus model: table read answered one cycle after the grant
  always_comb bus_gnt = bus_req && ($urandom_range(0, 99) < grant_pct);
  always_ff @(posedge clk) begin
    bus_rsp_valid <= bus_req && bus_gnt;
    if (bus_req && bus_gnt) begin
      bus_rdata.cum      <= cum_t'(cdf[bus_addr]);
      bus_rdata.cum_next <= cum_t'(cdf[bus_addr + 1]);
    end
  end

  // symbol source
  int sidx;
  logic src_on;
  always_comb begin
    sym_valid = src_on && sidx < syms.size();
    sym = (sidx < syms.size()) ? sym_t'(syms[sidx]) : '0;
  end
  always_ff @(posedge clk) begin
    if (sym_valid && sym_ready) sidx <= sidx + 1;
    src_on <= ($urandom_range(0, 99) < src_pct);
    if (lb_we) begin
      nb_hist[lb_cnt]++;
      if (lb_addr != exp_addr) failures++;
      got.push_back(lb_data[7:0]);
      if (lb_cnt == 2) got.push_back(lb_data[15:8]);
      exp_addr <= lb_addr + ptr_t'(lb_cnt);
    end
    if (starved) starve_cycles++;
    if (bus_req && !bus_gnt) deny_cycles++;
  end

  task automatic run(input dist_t d, input int n, input int gp, input int sp, input bit timed);
    int rcorr, rclamps, cyc;
    int unsigned rstate;
    byte unsigned rbytes[$];
    ref_build_cdf(d, cdf, rcorr, rclamps);
    syms = {};
    for (int i = 0; i < n; i++) begin
      // draw from the CDF with a uniform slot: the symbol whose interval holds it
      int unsigned u;
      int pr;
      u = $urandom_range(0, 65535);
      syms.push_back(8'(ref_search(cdf, u, 0, 255, pr)));
    end
    ref_encode(cdf, syms, rstate, rbytes);
    grant_pct = gp; src_pct = sp;
    got = {};
    @(negedge clk);
    sidx = 0; base = ptr_t'($urandom_range(0, 100)); exp_addr = base;
    num_syms = CNT_BITS'(n); start = 1;
    @(negedge clk); start = 0;
    cyc = 1;
    while (!done) begin @(negedge clk); cyc++; end
    checks++;
    if (got.size() != rbytes.size()) begin
      failures++;
      $display("byte count %0d expected %0d", got.size(), rbytes.size());
    end else begin
      foreach (rbytes[i]) begin checks++; if (got[i] != rbytes[i]) failures++; end
    end
    checks++;
    if (!ms_we || ms_wdata.state != rstate || ms_wdata.ptr != base + ptr_t'(rbytes.size())) begin
      failures++;
      $display("final state %h expected %h, ptr %0d", ms_wdata.state, rstate, ms_wdata.ptr);
    end
    $display("run: %0d symbols, %0d bytes, %0d cycles", n, got.size(), cyc);
    if (timed) begin checks++; if (cyc > n + 8) failures++; end
  endtask

  initial begin
    dist_t d;
    start = 0; num_syms = 0; base = 0; sidx = 0; src_on = 0;
    grant_pct = 100; src_pct = 100; starve_cycles = 0; deny_cycles = 0;
    for (int i = 0; i < 3; i++) nb_hist[i] = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    make_dist(128, 0.9, 1.0e-6, d);
    run(d, 1000, 100, 100, 1'b1);
    run(d, 700, 40, 60, 1'b0);
    make_dist(60, 0.3, 1.0e-5, d);
    run(d, 1500, 100, 100, 1'b1);
    $display("bytes per emitting cycle: 1:%0d 2:%0d, starved %0d, denied %0d",
             nb_hist[1], nb_hist[2], starve_cycles, deny_cycles);
    checks++; if (nb_hist[1] == 0 || nb_hist[2] == 0) failures++;
    checks++; if (starve_cycles == 0 || deny_cycles == 0) failures++;
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
