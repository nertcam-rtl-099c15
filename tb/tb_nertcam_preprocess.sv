// tb_nertcam_preprocess: self-checking test of the don't-care mask generator.
//
// Three instances: the 9-bit illustration (3 bits per field), whose masks for
// INFER, PREDICT feature and PREDICT location are checked against the literal
// vectors 000000111, 111000111 and 000111111; a 5-bit-location instance checking
// the padding example (location 00100, padding 1 -> location mask 01110); and the
// full MNIST-size instance driven with random one-hot locations, random padding
// and every command, compared with a mask built here position by position.
module tb_nertcam_preprocess;
  import nertcam_pkg::*;

  int checks = 0, failures = 0;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  // 9-bit illustration.
  cmd_e       c9;
  logic [4:0] p9;
  logic [8:0] s9, d9;
  nertcam_preprocess #(.F(3), .L(3), .C(3)) u9 (.cmd(c9), .padding(p9), .sdr(s9), .dc(d9));

  // Padding example: 3-bit feature, 5-bit location, 3-bit class.
  cmd_e        c11;
  logic [4:0]  p11;
  logic [10:0] s11, d11;
  nertcam_preprocess #(.F(3), .L(5), .C(3)) u11 (.cmd(c11), .padding(p11), .sdr(s11), .dc(d11));

  // Default size.
  localparam int W = F_BITS + L_BITS + C_BITS;
  cmd_e        cf;
  logic [4:0]  pf;
  logic [W-1:0] sf, df;
  nertcam_preprocess uf (.cmd(cf), .padding(pf), .sdr(sf), .dc(df));

  function automatic logic [W-1:0] ref_dc(cmd_e c, int loc_idx, int pad);
    logic [W-1:0] m = '0;
    logic [L_BITS-1:0] lp = '0;
    for (int k = loc_idx - pad; k <= loc_idx + pad; k++)
      if (k >= 0 && k < int'(L_BITS)) lp[k] = 1'b1;
    if (pad == 0) lp = '0;
    case (c)
      CMD_INFER: begin
        for (int b = 0; b < int'(C_BITS); b++) m[b] = 1'b1;
        for (int b = 0; b < int'(L_BITS); b++) m[C_BITS + b] = lp[b];
      end
      CMD_PREDICT_FEAT: begin
        for (int b = 0; b < int'(C_BITS); b++) m[b] = 1'b1;
        for (int b = 0; b < int'(L_BITS); b++) m[C_BITS + b] = lp[b];
        for (int b = 0; b < int'(F_BITS); b++) m[C_BITS + L_BITS + b] = 1'b1;
      end
      CMD_PREDICT_LOC: for (int b = 0; b < int'(C_BITS + L_BITS); b++) m[b] = 1'b1;
      default: m = '0;
    endcase
    return m;
  endfunction

  initial begin : watchdog
    #100000;
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    // 9-bit illustration, padding 0.
    p9 = '0;
    c9 = CMD_STORE;   s9 = 9'b010_001_100; #1; check(d9 == 9'b000000000, "9b STORE");
    c9 = CMD_DELETE;  #1; check(d9 == 9'b000000000, "9b DELETE");
    c9 = CMD_CLEAR;   s9 = '0; #1; check(d9 == 9'b000000000, "9b CLEAR");
    c9 = CMD_RESET;   #1; check(d9 == 9'b000000000, "9b RESET");
    c9 = CMD_INFER;   s9 = 9'b010_001_000; #1; check(d9 == 9'b000000111, "9b INFER");
    c9 = CMD_PREDICT_FEAT; s9 = 9'b000_010_000; #1; check(d9 == 9'b111000111, "9b PREDICT feature");
    c9 = CMD_PREDICT_LOC;  s9 = 9'b100_000_000; #1; check(d9 == 9'b000111111, "9b PREDICT location");

    // Padding example from the design: location 00100, padding 1.
    c11 = CMD_PREDICT_FEAT; s11 = {3'b000, 5'b00100, 3'b000}; p11 = 5'd1; #1;
    check(d11 == {3'b111, 5'b01110, 3'b111}, "padding example 00100/1 -> 01110");
    p11 = 5'd0; #1;
    check(d11 == {3'b111, 5'b00000, 3'b111}, "padding 0 keeps location exact");
    s11 = {3'b000, 5'b00001, 3'b000}; p11 = 5'd2; #1;
    check(d11 == {3'b111, 5'b00111, 3'b111}, "padding clipped at the edge");
    c11 = CMD_PREDICT_LOC; s11 = {3'b010, 5'b00000, 3'b000}; p11 = 5'd2; #1;
    check(d11 == {3'b000, 5'b11111, 3'b111}, "PREDICT location ignores padding");
    c11 = CMD_STORE; s11 = {3'b010, 5'b00100, 3'b001}; p11 = 5'd3; #1;
    check(d11 == '0, "STORE ignores padding");

    // Full size, random.
    for (int t = 0; t < 400; t++) begin
      int li, pad;
      cmd_e c;
      li  = int'($urandom_range(0, L_BITS - 1));
      pad = int'($urandom_range(0, 6));
      c   = cmd_e'($urandom_range(0, 7));
      sf  = '0;
      sf[C_BITS + li] = 1'b1;
      sf[C_BITS + L_BITS + $urandom_range(0, F_BITS - 1)] = 1'b1;
      cf = c; pf = 5'(pad); #1;
      check(df == ref_dc(c, li, pad), $sformatf("full size cmd=%0d loc=%0d pad=%0d", c, li, pad));
    end

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
