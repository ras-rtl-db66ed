// tb_ras_divmod: random and corner-case check of the division/modulo
// datapath against the language's / and % operators.
module tb_ras_divmod;
  import ras_pkg::*;

  state_t a, q;
  freq_t  d, r;
  int checks = 0, failures = 0;

  ras_divmod dut (.dividend(a), .divisor(d), .quot(q), .rem(r));

  task automatic check_one(state_t aa, freq_t dd);
    a = aa; d = dd; #1;
    checks++;
    if (q != aa / 32'(dd) || 32'(r) != aa % 32'(dd)) begin
      failures++;
      if (failures < 10) $display("mismatch %0d / %0d: q=%0d r=%0d", aa, dd, q, r);
    end
  endtask

  initial begin
    check_one(32'hFFFF_FFFF, 16'd1);
    check_one(32'hFFFF_FFFF, 16'hFFFF);
    check_one(32'd0, 16'd7);
    check_one(32'h7FFF_FFFF, 16'h8000);
    for (int i = 0; i < 20000; i++) check_one($urandom, 16'($urandom_range(1, 65535)));
    for (int i = 0; i < 5000; i++) check_one($urandom, 16'($urandom_range(1, 300)));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #10000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
