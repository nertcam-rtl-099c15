// tb_nertcam_full: the NeRTCAM system at its default size (1024 entries,
// 128-bit features, 25 locations, 10 classes) running an MNIST-shaped workload.
//
// The workload has the shape of the 500-entry configuration the design is sized
// for: 10 classes x 5 samples x 10 sensations. Real digit SDRs are not available
// here, so the data are synthetic: each class has a prototype feature at each of
// the 25 grid locations, and a sample senses 10 random locations, seeing the
// prototype feature with probability 3/4 and a random feature otherwise.
// Repeated triplets across samples are rejected as duplicates, as the design
// specifies. The agent then recognises test objects by sensing prototype pairs
// in random order, with PREDICT queries in between, and the run ends with a
// context switch, a failed inference, a DELETE and a CLEAR. Every command is
// checked against the reference model (error, cycles, predictions, inferred
// classes, full); the number of stored entries and of correctly identified test
// objects is printed.
module tb_nertcam_full;
  import nertcam_pkg::*;
  import nertcam_ref_pkg::*;

  localparam int F = F_BITS, L = L_BITS, C = C_BITS, N = ENTRIES, W = F + L + C;

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  logic clk = 1'b0, rst_n;
  cmd_e cmd;
  logic [4:0] padding;
  logic [W-1:0] sdr;
  logic [F-1:0] vf;
  logic [L-1:0] vl;
  logic [C-1:0] vc, ic;
  logic full, busy;
  err_e error;

  nertcam dut (
    .clk, .rst_n, .cmd, .padding, .sdr,
    .valid_features(vf), .valid_locations(vl), .valid_classes(vc),
    .inferred_classes(ic), .full, .error, .busy);

  always #5 clk = ~clk;

  nertcam_ref #(F, L, C, N) ref_m = new();
  int count [OUT_COUNT];

  initial begin : watchdog
    repeat (100000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic logic [W-1:0] trip(int f, int l, int c);
    logic [W-1:0] s;
    s = '0;
    if (f >= 0) s[C + L + f] = 1'b1;
    if (l >= 0) s[C + l] = 1'b1;
    if (c >= 0) s[c] = 1'b1;
    return s;
  endfunction

  task automatic do_cmd(input cmd_e c, input logic [W-1:0] s, input int pad);
    int n;
    @(negedge clk);
    cmd = c; sdr = s; padding = 5'(pad);
    ref_m.exec(c, pad, s);
    #1;
    if (c == CMD_PREDICT_FEAT || c == CMD_PREDICT_LOC) begin
      check(vf == ref_m.p_feat, "valid_features");
      check(vl == ref_m.p_loc, "valid_locations");
      check(vc == ref_m.p_cls, "valid_classes");
    end
    @(posedge clk);
    n = 1;
    forever begin
      @(negedge clk);
      if (!busy) break;
      cmd = CMD_NOP;
      @(posedge clk);
      n++;
    end
    cmd = CMD_NOP; sdr = '0; padding = '0;
    #1;
    check(n == ref_m.cycles, $sformatf("cmd %s took %0d cycles, expected %0d", c.name(), n, ref_m.cycles));
    check(error == ref_m.err, $sformatf("cmd %s error %s expected %s", c.name(), error.name(), ref_m.err.name()));
    check(ic == ref_m.icls, "inferred_classes");
    check(full == ref_m.full(), "full");
    count[ref_m.outcome]++;
  endtask

  int proto [C][L];
  int order [L];
  int correct = 0, tests = 0;

  initial begin
    for (int k = 0; k < OUT_COUNT; k++) count[k] = 0;
    for (int k = 0; k < C; k++)
      for (int l = 0; l < L; l++) proto[k][l] = int'($urandom_range(0, F - 1));
    for (int l = 0; l < L; l++) order[l] = l;
    rst_n = 1'b0; cmd = CMD_NOP; sdr = '0; padding = '0;
    repeat (2) @(posedge clk);
    @(negedge clk) rst_n = 1'b1;

    do_cmd(CMD_CLEAR, '0, 0);
    // Learning: 10 classes x 5 samples x 10 sensations.
    for (int smp = 0; smp < 5; smp++)
      for (int k = 0; k < C; k++)
        for (int j = 0; j < 10; j++) begin
          int l, f;
          if (j == 0) order.shuffle();
          l = order[j];
          f = ($urandom_range(0, 3) != 0) ? proto[k][l] : int'($urandom_range(0, F - 1));
          do_cmd(CMD_STORE, trip(f, l, k), 0);
        end
    $display("stored entries: %0d of %0d (%0d duplicates rejected)", ref_m.stored(), N,
             count[OUT_STORE_DUP]);

    // Recognition of 10 test objects, up to 10 sensations each.
    for (int t = 0; t < 10; t++) begin
      int k;
      k = t % C;
      do_cmd(CMD_RESET, '0, 0);
      for (int j = 0; j < 10; j++) begin
        int l;
        l = int'($urandom_range(0, L - 1));
        if (j == 1) do_cmd(CMD_PREDICT_FEAT, trip(-1, l, -1), 1);
        if (j == 1) do_cmd(CMD_RESET, '0, 0);
        do_cmd(CMD_INFER, trip(proto[k][l], l, -1), 0);
        if ($onehot(ic) && error == ERR_NONE) break;
      end
      tests++;
      if (ic == C'(1) << k) correct++;
    end
    $display("test objects identified as their own class: %0d of %0d", correct, tests);

    do_cmd(CMD_PREDICT_LOC, trip(proto[0][0], -1, -1), 0);
    do_cmd(CMD_RESET, '0, 0);
    do_cmd(CMD_INFER, trip(proto[1][0], 0, -1), 0);
    do_cmd(CMD_INFER, trip(proto[2][5], 5, -1), 0);       // likely context switch
    do_cmd(CMD_INFER, trip(F - 1, L - 1, -1), 0);           // may or may not be learned
    do_cmd(CMD_DELETE, ref_m.d[0], 0);
    do_cmd(CMD_DELETE, ref_m.d[0], 0);
    do_cmd(CMD_CLEAR, '0, 0);
    check(ref_m.stored() == 0, "memory empty after CLEAR");

    check(count[OUT_STORE_OK] > 0 && count[OUT_INFER_OK] > 0 && count[OUT_PREDICT_FEAT] > 0,
          "workload exercised store, infer and predict");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
