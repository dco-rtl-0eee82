// tb_victim_select: random sets (valid bits, dead bits, tags, an LRU
// permutation, B_BITS, policy enables) against a reference policy written
// here: invalid way first, then the oldest dead way, then the oldest way
// of the lowest tag[B_BITS-1:0] tier, or the oldest way with
// anti-thrashing off.
module tb_victim_select;
  import dco_pkg::*;
  localparam int WAYS = 8;
  logic [WAYS-1:0] valid, dead;
  logic [BB_MAX-1:0] tag_lo [WAYS];
  logic [2:0] age [WAYS];
  logic [2:0] b_bits;
  logic en_dbp, en_at;
  logic [2:0] victim;
  logic [1:0] reason;
  int checks = 0, failures = 0;

  victim_select #(.WAYS(WAYS)) dut (.*);

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    #100000;
    failures++; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int at_seen = 0, dead_seen = 0;
    for (int n = 0; n < 3000; n++) begin
      int perm[WAYS];
      int exp_v, exp_r, best_age, minp;
      for (int w = 0; w < WAYS; w++) perm[w] = w;
      perm.shuffle();
      valid  = ($urandom % 8 == 0) ? 8'($urandom) : '1;
      dead   = ($urandom % 2 == 0) ? 8'($urandom & $urandom) : '0;
      b_bits = 3'($urandom % 5);
      en_dbp = ($urandom % 4) != 0;
      en_at  = ($urandom % 4) != 0;
      for (int w = 0; w < WAYS; w++) begin
        tag_lo[w] = BB_MAX'($urandom);
        age[w]    = 3'(perm[w]);
      end
      // reference
      minp = 1 << 30;
      for (int w = 0; w < WAYS; w++)
        if ((int'(tag_lo[w]) % (1 << b_bits)) < minp) minp = int'(tag_lo[w]) % (1 << b_bits);
      exp_v = -1; best_age = -1;
      if (valid != '1) begin
        exp_r = 0;
        for (int w = WAYS - 1; w >= 0; w--) if (!valid[w]) exp_v = w;
      end else begin
        for (int w = 0; w < WAYS; w++) begin
          bit c;
          if (en_dbp && dead != 0) begin exp_r = 1; c = dead[w]; end
          else if (en_at) begin exp_r = 2; c = (int'(tag_lo[w]) % (1 << b_bits)) == minp; end
          else begin exp_r = 3; c = 1; end
          if (c && int'(age[w]) > best_age) begin best_age = age[w]; exp_v = w; end
        end
      end
      #1;
      check(int'(victim) == exp_v, $sformatf("victim %0d expected %0d", victim, exp_v));
      check(int'(reason) == exp_r, "reason");
      if (exp_r == 2 && best_age != WAYS - 1) at_seen++;
      if (exp_r == 1) dead_seen++;
    end
    // anti-thrashing must sometimes spare the LRU way, and DBP must act
    check(at_seen > 0, "anti-thrashing overrode LRU");
    check(dead_seen > 0, "dead block chosen");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
