// tb_nertcam_fsm: self-checking test of every transition of the state machine.
//
// The testbench plays the RTCAM: it answers each lookup with a chosen V/NV on
// valid_entry and drives `full`. For each command and outcome it checks the
// micro-op issued in every cycle, `busy`, the final error code and the number of
// cycles from acceptance back to the Starting State: 1 for CLEAR, RESET and
// PREDICT, 2/3 for failed/successful STORE and DELETE, 2 for a successful INFER
// and 4 for an INFER that context-switches or fails.
module tb_nertcam_fsm;
  import nertcam_pkg::*;

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  logic   clk = 1'b0;
  logic   rst_n;
  cmd_e   cmd;
  logic   valid_entry, full;
  uop_e   op;
  logic   busy;
  err_e   error;
  state_e state;

  nertcam_fsm dut (.clk, .rst_n, .cmd, .valid_entry, .full, .op, .busy, .error, .state);

  always #5 clk = ~clk;

  initial begin : watchdog
    repeat (2000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // Run one command. vs[k] is the V/NV answer seen in the k-th busy cycle.
  // exp_ops lists the micro-op expected in each cycle, the first in SS.
  task automatic run(input cmd_e c, input bit vs [4], input bit fl,
                     input uop_e exp_ops [$], input err_e exp_err, input string name);
    int n = exp_ops.size();
    @(negedge clk);
    cmd = c; full = fl; valid_entry = 1'b0;
    for (int k = 0; k < n; k++) begin
      if (k > 0) begin
        @(negedge clk);
        valid_entry = vs[k-1];
      end
      #1;
      check(op == exp_ops[k], $sformatf("%s: cycle %0d op %s expected %s", name, k,
                                        op.name(), exp_ops[k].name()));
      check(busy == (k > 0), $sformatf("%s: cycle %0d busy=%0b", name, k, busy));
    end
    @(posedge clk); #1;
    check(state == ST_SS && !busy, $sformatf("%s: back in SS after %0d cycles", name, n));
    check(error == exp_err, $sformatf("%s: error %s expected %s", name, error.name(), exp_err.name()));
    @(negedge clk);
    cmd = CMD_NOP;
  endtask

  bit vvv [4] = '{1, 1, 1, 1};
  bit nnn [4] = '{0, 0, 0, 0};
  bit nvv [4] = '{0, 1, 1, 1};

  initial begin
    rst_n = 1'b0; cmd = CMD_NOP; valid_entry = 1'b0; full = 1'b0;
    repeat (2) @(posedge clk);
    @(negedge clk) rst_n = 1'b1;
    #1 check(state == ST_SS && !busy && error == ERR_NONE && op == UOP_NOP, "idle after reset");

    run(CMD_CLEAR,        nnn, 0, '{UOP_CLEAR},  ERR_NONE, "CLEAR");
    run(CMD_RESET,        nnn, 0, '{UOP_RESET},  ERR_NONE, "RESET");
    run(CMD_PREDICT_FEAT, nnn, 0, '{UOP_LOOKUP}, ERR_NONE, "PREDICT feature");
    run(CMD_PREDICT_LOC,  nnn, 0, '{UOP_LOOKUP}, ERR_NONE, "PREDICT location");
    run(CMD_STORE,  nnn, 0, '{UOP_LOOKUP, UOP_RESET, UOP_STORE},  ERR_NONE,          "STORE ok");
    run(CMD_STORE,  vvv, 0, '{UOP_LOOKUP, UOP_RESET},             ERR_STORE_FAILED,  "STORE duplicate");
    run(CMD_STORE,  nnn, 1, '{UOP_LOOKUP, UOP_RESET, UOP_NOP},    ERR_STORE_FAILED,  "STORE full");
    run(CMD_DELETE, vvv, 0, '{UOP_LOOKUP, UOP_RESET, UOP_DELETE}, ERR_NONE,          "DELETE ok");
    run(CMD_DELETE, nnn, 0, '{UOP_LOOKUP, UOP_RESET},             ERR_DELETE_FAILED, "DELETE missing");
    run(CMD_INFER,  vvv, 0, '{UOP_LOOKUP, UOP_VALIDATE},          ERR_NONE,          "INFER ok");
    run(CMD_INFER,  nvv, 0, '{UOP_LOOKUP, UOP_RESET, UOP_LOOKUP, UOP_VALIDATE},
        ERR_CONTEXT_SWITCH, "INFER context switch");
    run(CMD_INFER,  nnn, 0, '{UOP_LOOKUP, UOP_RESET, UOP_LOOKUP, UOP_RESET},
        ERR_INFER_FAILED, "INFER failed");
    // Error is cleared by the next accepted command.
    run(CMD_RESET,  nnn, 0, '{UOP_RESET}, ERR_NONE, "error cleared by next command");
    // NOP does nothing.
    @(negedge clk); cmd = CMD_NOP; #1;
    check(op == UOP_NOP && !busy, "NOP idle");

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
