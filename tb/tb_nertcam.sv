// tb_nertcam: end-to-end test of the NeRTCAM system at a reduced size.
//
// 16 entries, 16-bit features, a 3x3 location grid (9 bits) and 4 classes, so the
// memory fills and every mechanism can be reached quickly. Four "objects" (classes)
// are learned as feature-at-location triplets; the agent then recognises them by
// sensing pairs in random order, predicts features and locations (with and
// without padding), switches objects without a RESET, senses unlearned pairs,
// deletes and re-stores triplets, and finally issues random command mixes.
// Every command is checked against the command-level reference model: error
// code, cycle count (acceptance to return to the Starting State), the prediction
// outputs in the PREDICT cycle, the inferred classes and full. While the system
// is busy the testbench drives random garbage on cmd, sdr and padding, which must
// be ignored. Each mechanism is counted and one that never happened is a failure.
module tb_nertcam;
  import nertcam_pkg::*;
  import nertcam_ref_pkg::*;

  localparam int F = 16, L = 9, C = 4, N = 16, W = F + L + C;

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

  nertcam #(.F(F), .L(L), .C(C), .N(N)) dut (
    .clk, .rst_n, .cmd, .padding, .sdr,
    .valid_features(vf), .valid_locations(vl), .valid_classes(vc),
    .inferred_classes(ic), .full, .error, .busy);

  always #5 clk = ~clk;

  nertcam_ref #(F, L, C, N) ref_m = new();
  int count [OUT_COUNT];
  int n_garbage = 0, n_padded = 0, n_identified = 0;

  initial begin : watchdog
    repeat (200000) @(posedge clk);
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

  // Issue one command and check it against the model.
  task automatic do_cmd(input cmd_e c, input logic [W-1:0] s, input int pad);
    int n;
    @(negedge clk);
    cmd = c; sdr = s; padding = 5'(pad);
    ref_m.exec(c, pad, s);
    #1;
    check(!busy, "accepting while not busy");
    if (c == CMD_PREDICT_FEAT || c == CMD_PREDICT_LOC) begin
      check(vf == ref_m.p_feat, $sformatf("valid_features %h exp %h", vf, ref_m.p_feat));
      check(vl == ref_m.p_loc, $sformatf("valid_locations %h exp %h", vl, ref_m.p_loc));
      check(vc == ref_m.p_cls, $sformatf("valid_classes %h exp %h", vc, ref_m.p_cls));
    end else begin
      check(vf == '0 && vl == '0 && vc == '0, "no prediction outside PREDICT");
    end
    @(posedge clk);
    n = 1;
    forever begin
      @(negedge clk);
      if (!busy) break;
      cmd = cmd_e'($urandom_range(1, 7));
      sdr = W'({$urandom(), $urandom()});
      padding = 5'($urandom());
      n_garbage++;
      @(posedge clk);
      n++;
    end
    cmd = CMD_NOP; sdr = '0; padding = '0;
    #1;
    check(n == ref_m.cycles, $sformatf("cmd %s took %0d cycles, expected %0d", c.name(), n, ref_m.cycles));
    check(error == ref_m.err, $sformatf("cmd %s error %s expected %s", c.name(), error.name(), ref_m.err.name()));
    check(ic == ref_m.icls, $sformatf("inferred_classes %b expected %b", ic, ref_m.icls));
    check(full == ref_m.full(), "full");
    count[ref_m.outcome]++;
    if (pad > 0 && (c == CMD_INFER || c == CMD_PREDICT_FEAT)) n_padded++;
    if (ref_m.outcome inside {OUT_INFER_OK, OUT_CONTEXT_SWITCH} && $onehot(ic)) n_identified++;
  endtask

  // Objects: for class k, a feature at each of four locations.
  int obj_f [C][4];
  int obj_l [C][4];

  initial begin
    for (int k = 0; k < OUT_COUNT; k++) count[k] = 0;
    rst_n = 1'b0; cmd = CMD_NOP; sdr = '0; padding = '0;
    repeat (2) @(posedge clk);
    @(negedge clk) rst_n = 1'b1;

    for (int k = 0; k < C; k++)
      for (int j = 0; j < 4; j++) begin
        obj_l[k][j] = (k + 2 * j) % L;
        obj_f[k][j] = (3 * k + j) % F;
      end

    do_cmd(CMD_CLEAR, '0, 0);
    // Learn all four objects: 16 triplets fill the memory.
    for (int k = 0; k < C; k++)
      for (int j = 0; j < 4; j++)
        do_cmd(CMD_STORE, trip(obj_f[k][j], obj_l[k][j], k), 0);
    do_cmd(CMD_STORE, trip(obj_f[0][0], obj_l[0][0], 0), 0);  // duplicate
    do_cmd(CMD_STORE, trip(15, 8, 3), 0);                     // full
    // Recognise object 2 by sensing its pairs in order.
    do_cmd(CMD_RESET, '0, 0);
    for (int j = 0; j < 4; j++) do_cmd(CMD_INFER, trip(obj_f[2][j], obj_l[2][j], -1), 0);
    // Predict within the recognised object, exact and padded.
    do_cmd(CMD_PREDICT_FEAT, trip(-1, obj_l[2][1], -1), 0);
    do_cmd(CMD_RESET, '0, 0);
    do_cmd(CMD_PREDICT_FEAT, trip(-1, 4, -1), 1);
    do_cmd(CMD_RESET, '0, 0);
    do_cmd(CMD_PREDICT_LOC, trip(obj_f[1][2], -1, -1), 0);
    // Context switch: after object 2, sense a pair only object 3 has.
    do_cmd(CMD_RESET, '0, 0);
    do_cmd(CMD_INFER, trip(obj_f[2][0], obj_l[2][0], -1), 0);
    do_cmd(CMD_INFER, trip(obj_f[3][3], obj_l[3][3], -1), 0);
    // Unlearned pair: inference fails.
    do_cmd(CMD_INFER, trip(15, 0, -1), 0);
    // Fuzzy infer.
    do_cmd(CMD_INFER, trip(obj_f[1][0], (obj_l[1][0] + 1) % L, -1), 1);
    // Delete one, delete it again, store something new in the freed slot.
    do_cmd(CMD_DELETE, trip(obj_f[3][3], obj_l[3][3], 3), 0);
    do_cmd(CMD_DELETE, trip(obj_f[3][3], obj_l[3][3], 3), 0);
    do_cmd(CMD_STORE, trip(15, 8, 3), 0);

    // Random phase: narrow alphabets so matches, duplicates and misses all occur.
    for (int t = 0; t < 3000; t++) begin
      int r;
      cmd_e c;
      logic [W-1:0] s;
      int pad;
      r = int'($urandom_range(0, 99));
      pad = ($urandom_range(0, 3) == 0) ? int'($urandom_range(1, 2)) : 0;
      if (r < 2)       c = CMD_CLEAR;
      else if (r < 10) c = CMD_RESET;
      else if (r < 35) c = CMD_STORE;
      else if (r < 50) c = CMD_DELETE;
      else if (r < 80) c = CMD_INFER;
      else if (r < 90) c = CMD_PREDICT_FEAT;
      else             c = CMD_PREDICT_LOC;
      s = trip(int'($urandom_range(0, 5)), int'($urandom_range(0, L - 1)), int'($urandom_range(0, C - 1)));
      s = s & ~ref_m.dc_of(c, 0, s);
      if (c == CMD_CLEAR || c == CMD_RESET) s = '0;
      if (!(c == CMD_INFER || c == CMD_PREDICT_FEAT)) pad = 0;
      do_cmd(c, s, pad);
    end

    begin
      automatic string names [OUT_COUNT] = '{"CLEAR", "RESET", "PREDICT_FEAT", "PREDICT_LOC",
        "STORE_OK", "STORE_DUP", "STORE_FULL", "DELETE_OK", "DELETE_MISSING",
        "INFER_OK", "CONTEXT_SWITCH", "INFER_FAILED", "NOP"};
      for (int k = 0; k < OUT_COUNT; k++) begin
        $display("mechanism %-15s %0d", names[k], count[k]);
        if (k != OUT_NOP) check(count[k] > 0, $sformatf("mechanism %s never happened", names[k]));
      end
      $display("mechanism %-15s %0d", "BUSY_IGNORED", n_garbage);
      $display("mechanism %-15s %0d", "PADDING", n_padded);
      $display("mechanism %-15s %0d", "IDENTIFIED", n_identified);
      check(n_garbage > 0, "inputs while busy never driven");
      check(n_padded > 0, "padding never used");
      check(n_identified > 0, "no object ever identified to a single class");
    end

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
