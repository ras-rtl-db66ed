// tb_ras_history_mem: writes a random plane row by row, as the decoder
// does, and before each write checks the eight neighbours, the left pixel
// and their valid flags against the full plane kept in the testbench.
module tb_ras_history_mem;
  import ras_pkg::*;

  localparam int W = 13, H = 9;
  logic clk = 0;
  always #5 clk = ~clk;

  logic we;
  logic [1:0] wslot, slot;
  logic [COL_BITS-1:0] wcol, col;
  logic [ROW_BITS-1:0] row;
  sym_t wdata, last;
  sym_t nbr [8];
  logic nbr_ok, last_ok;
  byte unsigned img [H][W];
  int checks = 0, failures = 0;

  ras_history_mem #(.MAX_W(16)) dut (.*);

  initial begin
    we = 0; wslot = 0; wcol = 0; wdata = 0;
    for (int r = 0; r < H; r++)
      for (int c = 0; c < W; c++) img[r][c] = 8'($urandom);
    for (int r = 0; r < H; r++)
      for (int c = 0; c < W; c++) begin
        @(negedge clk);
        slot = 2'(r % 3); row = ROW_BITS'(r); col = COL_BITS'(c);
        #1;
        checks++;
        if (nbr_ok != (r >= 2 && c >= 2) || last_ok != (c >= 1)) failures++;
        if (r >= 2 && c >= 2) begin
          int k;
          k = 0;
          for (int dr = -2; dr <= 0; dr++)
            for (int dc = -2; dc <= 0; dc++)
              if (!(dr == 0 && dc == 0)) begin
                checks++;
                if (nbr[k] != img[r+dr][c+dc]) failures++;
                k++;
              end
        end
        if (c >= 1) begin checks++; if (last != img[r][c-1]) failures++; end
        we = 1; wslot = 2'(r % 3); wcol = COL_BITS'(c); wdata = img[r][c];
        @(negedge clk); we = 0;
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
