// tb_bypass_unit: exhaustive over priority bits, B_BITS 1..4, every gear,
// the enables, gqa mode and the core's speed; reference is
// bypass = tensor_bypass | (en & prio < gear & (!gqa | slow)).
module tb_bypass_unit;
  import dco_pkg::*;
  logic tensor_bypass, en_bypass, gqa_mode, core_slow, bypass, dyn_bypass;
  logic [BB_MAX-1:0] tag_lo;
  logic [2:0] b_bits;
  logic [GEAR_W-1:0] gear;
  int checks = 0, failures = 0;

  bypass_unit dut (.*);

  initial begin
    #1000000;
    failures++; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int bb = 1; bb <= BB_MAX; bb++)
      for (int t = 0; t < 16; t++)
        for (int g = 0; g <= (1 << bb); g++)
          for (int m = 0; m < 16; m++) begin
            bit exp;
            int prio;
            b_bits = 3'(bb); tag_lo = BB_MAX'(t); gear = GEAR_W'(g);
            {tensor_bypass, en_bypass, gqa_mode, core_slow} = 4'(m);
            prio = t % (1 << bb);
            exp = tensor_bypass || (en_bypass && prio < g && (!gqa_mode || core_slow));
            #1;
            checks++;
            if (bypass !== exp) begin
              failures++;
              $display("FAIL: bb=%0d tag=%0d gear=%0d mode=%b", bb, t, g, m);
            end
          end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
