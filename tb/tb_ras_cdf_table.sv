// tb_ras_cdf_table: writes a random increasing table C(0..256), then
// checks that each read returns C(x) and C(x+1) one cycle later and that the
// output holds while re is low.
module tb_ras_cdf_table;
  import ras_pkg::*;

  logic clk = 0;
  always #5 clk = ~clk;

  logic we, re;
  logic [8:0] waddr;
  cum_t wdata;
  sym_t raddr;
  cdf_pair_t rdata;
  int unsigned c [257];
  int checks = 0, failures = 0;

  ras_cdf_table dut (.*);

  initial begin
    we = 0; re = 0; waddr = 0; wdata = 0; raddr = 0;
    c[0] = 0;
    for (int i = 1; i <= 256; i++) c[i] = c[i-1] + $urandom_range(1, 500);
    for (int i = 0; i <= 256; i++) begin
      @(negedge clk); we = 1; waddr = 9'(i); wdata = cum_t'(c[i]);
    end
    @(negedge clk); we = 0;
    for (int k = 0; k < 2000; k++) begin
      int x;
      x = $urandom_range(0, 255);
      @(negedge clk); re = 1; raddr = 8'(x);
      @(negedge clk); re = 0;
      checks++;
      if (rdata.cum != cum_t'(c[x]) || rdata.cum_next != cum_t'(c[x+1])) begin
        failures++;
        if (failures < 10) $display("x=%0d got %0d/%0d", x, rdata.cum, rdata.cum_next);
      end
      raddr = 8'(x ^ 8'h55);
      @(negedge clk);
      checks++;
      if (rdata.cum != cum_t'(c[x])) failures++;
    end
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
