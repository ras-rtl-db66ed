// tb_ras_global_mem: fills every block of the global memory with random
// BF16 words, then reads all of them back through the selection mux and
// checks value and one-cycle read latency.
module tb_ras_global_mem;
  import ras_pkg::*;

  localparam int ND = 4;
  logic clk = 0;
  always #5 clk = ~clk;

  logic wr_en;
  logic [1:0] wr_blk, rd_blk;
  sym_t wr_idx, rd_idx;
  bf16_t wr_data, rd_data;
  bf16_t model [ND*256];
  int checks = 0, failures = 0;

  ras_global_mem #(.NUM_DISTS(ND)) dut (.*);

  initial begin
    wr_en = 0; wr_blk = 0; wr_idx = 0; wr_data = 0; rd_blk = 0; rd_idx = 0;
    for (int i = 0; i < ND*256; i++) begin
      @(negedge clk);
      wr_en = 1; wr_blk = 2'(i / 256); wr_idx = 8'(i); wr_data = 16'($urandom);
      model[i] = wr_data;
    end
    @(negedge clk) wr_en = 0;
    for (int k = 0; k < 3000; k++) begin
      int a;
      a = $urandom_range(0, ND*256-1);
      rd_blk = 2'(a / 256); rd_idx = 8'(a);
      @(posedge clk); #1;
      checks++;
      if (rd_data != model[a]) begin
        failures++;
        if (failures < 10) $display("addr %0d: got %h expected %h", a, rd_data, model[a]);
      end
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
