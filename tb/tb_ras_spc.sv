// tb_ras_spc: converts four distributions held in a global-memory model
// (uniform, a broad bump with a tiny floor, a sharp bump whose tail rounds
// to zero, random weights) and compares every CDF entry written, the mass
// correction and the count of clamped symbols with the reference model.
// Also checks sum f = 2^16, strict monotonicity and the conversion time of
// 2*(256+1)+2 cycles from start to done.
module tb_ras_spc;
  import ras_pkg::*;
  import tb_ras_ref_pkg::*;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic start;
  logic [1:0] sel, gm_blk;
  sym_t gm_idx;
  bf16_t gm_data;
  logic tbl_we;
  logic [8:0] tbl_addr;
  cum_t tbl_data;
  logic busy, done, err;
  logic signed [17:0] corr;
  logic [8:0] clamp_count;

  dist_t dists [4];
  int unsigned tbl [257];
  int checks = 0, failures = 0;

  ras_spc #(.NUM_DISTS(4)) dut (.*);

  // global memory model, one-cycle read
  always_ff @(posedge clk) gm_data <= dists[gm_blk][gm_idx];
  always_ff @(posedge clk) if (tbl_we) tbl[tbl_addr] <= int'(tbl_data);

  initial begin
    cdf_t c;
    int rcorr, rclamps, cyc;
    start = 0; sel = 0;
    for (int i = 0; i < 256; i++) dists[0][i] = real_to_bf16(1.0 / 256.0);
    make_dist(128, 0.9, 1.0e-7, dists[1]);
    make_dist(30, 0.5, 0.0, dists[2]);
    for (int i = 0; i < 256; i++) dists[3][i] = real_to_bf16(real'($urandom_range(1, 1000)) / 128000.0);
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int t = 0; t < 4; t++) begin
      @(negedge clk); start = 1; sel = 2'(t);
      @(negedge clk); start = 0;
      cyc = 1;
      while (!done) begin @(negedge clk); cyc++; end
      @(negedge clk);
      ref_build_cdf(dists[t], c, rcorr, rclamps);
      $display("dist %0d: corr=%0d clamps=%0d cycles=%0d", t, corr, clamp_count, cyc);
      for (int i = 0; i <= 256; i++) begin
        checks++;
        if (tbl[i] != c[i]) begin
          failures++;
          if (failures < 10) $display("dist %0d C(%0d)=%0d expected %0d", t, i, tbl[i], c[i]);
        end
      end
      checks++; if (int'(corr) != rcorr) failures++;
      checks++; if (int'(clamp_count) != rclamps) failures++;
      checks++; if (tbl[256] != 65536 || err) failures++;
      for (int i = 0; i < 256; i++) begin
        checks++; if (tbl[i+1] <= tbl[i]) failures++;
      end
      checks++; if (cyc != 2*257+2) begin failures++; $display("cycles %0d", cyc); end
    end
    checks++; if (rcorr == 0) failures++;   // last distribution needs a correction
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
