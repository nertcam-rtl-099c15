// tb_nertcam_prediction_map: self-checking test of the prediction map.
//
// Random entries and hit vectors at the default size; for every command the three
// outputs are compared with per-bit ORs computed here. Non-PREDICT commands must
// give zeros, PREDICT feature must hold locations low and PREDICT location must
// hold features low.
module tb_nertcam_prediction_map;
  import nertcam_pkg::*;
  localparam int F = F_BITS, L = L_BITS, C = C_BITS, N = ENTRIES, W = F + L + C;

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  cmd_e cmd;
  logic [W-1:0] mem_data [N];
  logic [N-1:0] mem_hit;
  logic [F-1:0] vf;
  logic [L-1:0] vl;
  logic [C-1:0] vc;
  nertcam_prediction_map dut (.cmd, .mem_data, .mem_hit,
                              .valid_features(vf), .valid_locations(vl), .valid_classes(vc));

  initial begin : watchdog
    #100000;
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int t = 0; t < 120; t++) begin
      logic [F-1:0] ef;
      logic [L-1:0] el;
      logic [C-1:0] ec;
      for (int i = 0; i < N; i++) begin
        mem_data[i] = '0;
        mem_data[i][C + L + $urandom_range(0, F - 1)] = 1'b1;
        mem_data[i][C + $urandom_range(0, L - 1)] = 1'b1;
        mem_data[i][$urandom_range(0, C - 1)] = 1'b1;
        mem_hit[i] = ($urandom_range(0, 99) < 2);
      end
      cmd = cmd_e'(t % 8);
      #1;
      ef = '0; el = '0; ec = '0;
      for (int i = 0; i < N; i++) begin
        if (!mem_hit[i]) continue;
        for (int b = 0; b < F; b++) if (mem_data[i][W - F + b]) ef[b] = 1'b1;
        for (int b = 0; b < L; b++) if (mem_data[i][C + b]) el[b] = 1'b1;
        for (int b = 0; b < C; b++) if (mem_data[i][b]) ec[b] = 1'b1;
      end
      if (cmd == CMD_PREDICT_FEAT) begin
        check(vf == ef && vl == '0 && vc == ec, $sformatf("PREDICT feature t=%0d", t));
      end else if (cmd == CMD_PREDICT_LOC) begin
        check(vf == '0 && vl == el && vc == ec, $sformatf("PREDICT location t=%0d", t));
      end else begin
        check(vf == '0 && vl == '0 && vc == '0, $sformatf("no output for cmd %0d", cmd));
      end
    end
    // Prediction with no hits gives zeros.
    mem_hit = '0; cmd = CMD_PREDICT_FEAT; #1;
    check(vf == '0 && vc == '0, "no hit -> zero prediction");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
