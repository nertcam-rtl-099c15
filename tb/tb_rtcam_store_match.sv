// tb_rtcam_store_match: self-checking test of exact-hit, next-empty and full logic.
//
// Drives the default 1024-entry instance with random match and empty vectors of
// varying density (including the all-empty and all-full corner cases) and compares
// with a bit-by-bit scan for the lowest empty entry.
module tb_rtcam_store_match;
  import nertcam_pkg::*;
  localparam int N = ENTRIES;

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  logic [N-1:0] tmatch, empty, exact_hit, next_empty;
  logic any_exact, full;
  rtcam_store_match dut (.tmatch, .empty, .exact_hit, .any_exact, .next_empty, .full);

  initial begin : watchdog
    #100000;
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int t = 0; t < 300; t++) begin
      logic [N-1:0] exp_hit, exp_ne;
      int first;
      int dens_e, dens_m;
      dens_e = (t % 5 == 0) ? 0 : (t % 5 == 1) ? 100 : int'($urandom_range(1, 99));
      dens_m = int'($urandom_range(0, 3));
      for (int i = 0; i < N; i++) begin
        empty[i]  = ($urandom_range(0, 99) < dens_e);
        tmatch[i] = ($urandom_range(0, 999) < dens_m);
      end
      if (t == 7) empty = '0;
      if (t == 8) begin empty = '0; empty[N-1] = 1'b1; end
      #1;
      first = -1;
      exp_ne = '0;
      for (int i = 0; i < N; i++) begin
        exp_hit[i] = tmatch[i] && !empty[i];
        if (first < 0 && empty[i]) first = i;
      end
      if (first >= 0) exp_ne[first] = 1'b1;
      check(exact_hit == exp_hit, $sformatf("exact_hit t=%0d", t));
      check(any_exact == (exp_hit != '0), $sformatf("any_exact t=%0d", t));
      check(next_empty == exp_ne, $sformatf("next_empty t=%0d first=%0d", t, first));
      check(full == (first < 0), $sformatf("full t=%0d", t));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
