// tb_ras_bf16_fix: exhaustive check of the BF16 -> frequency converter.
// Every one of the 65536 BF16 codes is converted and compared with
// max(1, round(p * 2^16)) computed in real arithmetic (negative, zero and
// subnormal codes expect 1, p >= 1, infinities and NaN expect 65535).
module tb_ras_bf16_fix;
  import ras_pkg::*;
  import tb_ras_ref_pkg::*;

  bf16_t b;
  freq_t f;
  logic  clamped;
  int checks = 0, failures = 0;

  ras_bf16_fix dut (.bf16(b), .freq(f), .clamped(clamped));

  initial begin
    for (int i = 0; i < 65536; i++) begin
      b = 16'(i);
      #1;
      checks++;
      if (int'(f) != int'(ref_freq(b))) begin
        failures++;
        if (failures < 10) $display("mismatch bf16=%h rtl=%0d ref=%0d", b, f, ref_freq(b));
      end
    end
    // worked example: p = 0.5 -> 32768, p = 2^-20 -> clamped to 1
    b = 16'h3F00; #1; checks++; if (f != 16'd32768) failures++;
    b = 16'h3580; #1; checks++; if (f != 16'd1 || !clamped) failures++;
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
