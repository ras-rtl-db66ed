// tb_ras_bus_arb: random request patterns against a round-robin model:
// at most one grant, only to a requester, the first requester after the last
// granted lane, the table address of that lane, and rsp_valid one cycle
// after the grant. Also checks that a lane that stops requesting gives its
// share to the others.
module tb_ras_bus_arb;
  import ras_pkg::*;

  localparam int NL = 4;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic [NL-1:0] req, gnt, rsp_valid, gnt_prev;
  sym_t addr [NL];
  logic tbl_re;
  sym_t tbl_addr;
  int last = NL - 1;
  int grants [NL];
  int checks = 0, failures = 0;

  ras_bus_arb #(.NUM_LANES(NL)) dut (.*);

  initial begin
    req = 0;
    for (int i = 0; i < NL; i++) begin addr[i] = 0; grants[i] = 0; end
    gnt_prev = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int k = 0; k < 4000; k++) begin
      int exp_l;
      @(negedge clk);
      checks++;
      if (rsp_valid != gnt_prev) failures++;
      // lane 3 stops requesting for the second half
      for (int i = 0; i < NL; i++) begin
        req[i] = (k < 2000 || i != 3) ? 1'($urandom_range(0, 3) != 0) : 1'b0;
        addr[i] = 8'($urandom);
      end
      #1;
      exp_l = -1;
      for (int j = 1; j <= NL; j++)
        if (exp_l < 0 && req[(last + j) % NL]) exp_l = (last + j) % NL;
      checks++;
      if (exp_l < 0) begin
        if (gnt != 0 || tbl_re) failures++;
      end else begin
        if (gnt != NL'(1 << exp_l) || !tbl_re || tbl_addr != addr[exp_l]) begin
          failures++;
          if (failures < 10) $display("cycle %0d req=%b gnt=%b expected lane %0d", k, req, gnt, exp_l);
        end
        last = exp_l;
        if (k >= 2000) grants[exp_l]++;
      end
      gnt_prev = gnt;
    end
    checks++;
    if (grants[3] != 0 || grants[0] < 500) failures++;
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
