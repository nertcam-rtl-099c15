// tb_rtcam_validate: self-checking test of the class condensing and revalidation.
//
// Each of the default 1024 entries gets a random one-hot class and random valid and
// empty bits. The expected class vector is built by marking the class index of
// every valid stored entry; an entry is expected to be revalidated when it is
// stored and its class index is marked.
module tb_rtcam_validate;
  import nertcam_pkg::*;
  localparam int N = ENTRIES;
  localparam int C = C_BITS;

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  logic [C-1:0] cls [N];
  logic [N-1:0] valid, empty, revalid;
  logic [C-1:0] classes;
  rtcam_validate dut (.cls, .valid, .empty, .classes, .revalid);

  int cidx [N];

  initial begin : watchdog
    #100000;
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int t = 0; t < 200; t++) begin
      bit marked [C];
      logic [C-1:0] exp_cls;
      int dens_v;
      dens_v = (t == 0) ? 0 : int'($urandom_range(0, 3));
      for (int k = 0; k < C; k++) marked[k] = 0;
      for (int i = 0; i < N; i++) begin
        cidx[i]  = int'($urandom_range(0, C - 1));
        cls[i]   = '0;
        cls[i][cidx[i]] = 1'b1;
        empty[i] = ($urandom_range(0, 3) == 0);
        valid[i] = ($urandom_range(0, 999) < dens_v);
      end
      #1;
      exp_cls = '0;
      for (int i = 0; i < N; i++)
        if (valid[i] && !empty[i]) marked[cidx[i]] = 1;
      for (int k = 0; k < C; k++) exp_cls[k] = marked[k];
      check(classes == exp_cls, $sformatf("classes t=%0d got %b exp %b", t, classes, exp_cls));
      for (int i = 0; i < N; i++)
        if (revalid[i] != (!empty[i] && marked[cidx[i]])) begin
          check(0, $sformatf("revalid t=%0d entry %0d", t, i));
          break;
        end
      check(1, "revalid vector");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
