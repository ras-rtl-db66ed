// tb_ras_lowbit_mem: pushes random 0/1/2-byte groups into every bank as an
// encoder does, then pops them back the way a decoder reads them (two bytes
// below the pointer) and through the registered host read port.
module tb_ras_lowbit_mem;
  import ras_pkg::*;

  localparam int NL = 4, D = 1024;
  logic clk = 0;
  always #5 clk = ~clk;

  logic [NL-1:0] we;
  logic [1:0] wcnt [NL];
  ptr_t waddr [NL], raddr [NL];
  logic [15:0] wdata [NL], rdata [NL];
  logic host_we;
  logic [1:0] host_bank;
  ptr_t host_addr;
  logic [7:0] host_wdata, host_rdata;
  byte unsigned model [NL][$];
  int checks = 0, failures = 0;

  ras_lowbit_mem #(.NUM_LANES(NL), .LB_DEPTH(D)) dut (.*);

  initial begin
    we = 0; host_we = 0; host_bank = 0; host_addr = 0; host_wdata = 0;
    for (int b = 0; b < NL; b++) begin wcnt[b] = 0; waddr[b] = 0; raddr[b] = 0; wdata[b] = 0; end
    for (int k = 0; k < 300; k++) begin
      @(negedge clk);
      for (int b = 0; b < NL; b++) begin
        wcnt[b] = 2'($urandom_range(0, 2));
        we[b] = (wcnt[b] != 0);
        waddr[b] = ptr_t'(model[b].size());
        wdata[b] = 16'($urandom);
        if (wcnt[b] >= 1) model[b].push_back(wdata[b][7:0]);
        if (wcnt[b] == 2) model[b].push_back(wdata[b][15:8]);
      end
    end
    @(negedge clk); we = '0;
    for (int b = 0; b < NL; b++) begin
      for (int p = model[b].size(); p >= 2; p--) begin
        raddr[b] = ptr_t'(p); #1;
        checks++;
        if (rdata[b] != {model[b][p-1], model[b][p-2]}) failures++;
      end
    end
    // host port: write one byte, read bytes back one cycle later
    @(negedge clk); host_we = 1; host_bank = 2; host_addr = 5; host_wdata = 8'hA5; model[2][5] = 8'hA5;
    @(negedge clk); host_we = 0;
    for (int k = 0; k < 200; k++) begin
      host_bank = 2'($urandom); host_addr = ptr_t'($urandom_range(0, model[host_bank].size()-1));
      @(negedge clk);
      checks++;
      if (host_rdata != model[host_bank][host_addr]) failures++;
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
