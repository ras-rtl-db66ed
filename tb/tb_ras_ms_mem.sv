// tb_ras_ms_mem: random writes through the lane ports and the host port of
// the middle-state memory, checked against a model through both read paths.
module tb_ras_ms_mem;
  import ras_pkg::*;

  localparam int NL = 4, D = 4;
  logic clk = 0;
  always #5 clk = ~clk;

  logic [NL-1:0] we;
  logic [1:0] idx [NL];
  ms_entry_t wdata [NL], rdata [NL];
  logic host_we;
  logic [1:0] host_bank, host_idx;
  ms_entry_t host_wdata, host_rdata;
  ms_entry_t model [NL][D];
  int checks = 0, failures = 0;

  ras_ms_mem #(.NUM_LANES(NL), .MS_DEPTH(D)) dut (.*);

  initial begin
    we = 0; host_we = 0; host_bank = 0; host_idx = 0; host_wdata = '0;
    for (int b = 0; b < NL; b++) begin idx[b] = 0; wdata[b] = '0; end
    for (int b = 0; b < NL; b++)
      for (int i = 0; i < D; i++) begin
        @(negedge clk); host_we = 1; host_bank = 2'(b); host_idx = 2'(i);
        host_wdata = {32'($urandom), 14'($urandom)};
        model[b][i] = host_wdata;
      end
    @(negedge clk); host_we = 0;
    for (int k = 0; k < 500; k++) begin
      @(negedge clk);
      for (int b = 0; b < NL; b++) begin
        we[b] = 1'($urandom);
        idx[b] = 2'($urandom);
        wdata[b] = {32'($urandom), 14'($urandom)};
        if (we[b]) model[b][idx[b]] = wdata[b];
      end
      @(negedge clk);
      we = '0;
      for (int b = 0; b < NL; b++) begin
        idx[b] = 2'($urandom);
        #1;
        checks++;
        if (rdata[b] != model[b][idx[b]]) failures++;
      end
      host_bank = 2'($urandom); host_idx = 2'($urandom); #1;
      checks++;
      if (host_rdata != model[host_bank][host_idx]) failures++;
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
