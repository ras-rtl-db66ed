// tb_ras_predictor: the worked neighbourhood (196 211 194 / 200 214 203 /
// 204 189) must give anchor 201 and window [193, 209]; random
// neighbourhoods, the fallbacks and the clipping at 0 and 255 are checked
// against a direct computation.
module tb_ras_predictor;
  import ras_pkg::*;

  sym_t nbr [8];
  logic nbr_ok, last_ok;
  sym_t last, mu, lo, hi;
  int checks = 0, failures = 0;

  ras_predictor #(.DELTA(8)) dut (.*);

  task automatic expect_mu(int m);
    int el, eh;
    el = (m < 8) ? 0 : m - 8;
    eh = (m > 247) ? 255 : m + 8;
    #1;
    checks++;
    if (int'(mu) != m || int'(lo) != el || int'(hi) != eh) begin
      failures++;
      if (failures < 10) $display("mu=%0d lo=%0d hi=%0d expected %0d", mu, lo, hi, m);
    end
  endtask

  initial begin
    int v [8] = '{196, 211, 194, 200, 214, 203, 204, 189};
    for (int i = 0; i < 8; i++) nbr[i] = 8'(v[i]);
    nbr_ok = 1; last_ok = 1; last = 189;
    expect_mu(201);
    for (int k = 0; k < 2000; k++) begin
      int s;
      s = 0;
      for (int i = 0; i < 8; i++) begin nbr[i] = 8'($urandom); s += nbr[i]; end
      last = 8'($urandom);
      nbr_ok = 1'($urandom); last_ok = 1'($urandom);
      expect_mu(nbr_ok ? s / 8 : (last_ok ? int'(last) : 0));
    end
    nbr_ok = 0; last_ok = 1; last = 3;   expect_mu(3);
    last = 252;                         expect_mu(252);
    last_ok = 0;                        expect_mu(0);
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
