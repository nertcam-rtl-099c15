// tb_rtcam: self-checking test of the RTCAM against a behavioural model.
//
// A small instance (8 entries, 8/5/4-bit fields) so that the memory fills up and
// fields collide often. Every cycle the testbench picks a random micro-op, command,
// SDR and don't-care mask (respecting the two rules the state machine guarantees:
// no store into a full memory, no delete without a stored match), predicts
// mem_hit, valid_entry, full and classes from its own copy of the memory, and
// checks them and the mem_out data. A directed opening sequence stores, infers and
// validates a known set of triplets first.
module tb_rtcam;
  import nertcam_pkg::*;
  localparam int F = 8, L = 5, C = 4, N = 8, W = F + L + C;

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  logic clk = 1'b0, rst_n;
  logic [W-1:0] sdr, dc;
  cmd_e cmd;
  uop_e op;
  logic [W-1:0] mem_data [N];
  logic [N-1:0] mem_hit;
  logic valid_entry, full;
  logic [C-1:0] classes;

  rtcam #(.F(F), .L(L), .C(C), .N(N)) dut (.clk, .rst_n, .sdr, .dc, .cmd, .op,
    .mem_data, .mem_hit, .valid_entry, .full, .classes);

  always #5 clk = ~clk;

  // Model state.
  logic [W-1:0] md [N];
  bit mv [N], me [N];
  logic [C-1:0] mcls;

  initial begin : watchdog
    repeat (20000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic logic [W-1:0] triplet(int f, int l, int c);
    logic [W-1:0] s = '0;
    s[C + L + f] = 1'b1;
    s[C + l] = 1'b1;
    s[c] = 1'b1;
    return s;
  endfunction

  function automatic bit m_full();
    for (int i = 0; i < N; i++) if (me[i]) return 0;
    return 1;
  endfunction

  function automatic bit m_tmatch(int i);
    return ((md[i] ^ sdr) & ~dc) == '0;
  endfunction

  function automatic bit m_any_exact();
    for (int i = 0; i < N; i++) if (!me[i] && m_tmatch(i)) return 1;
    return 0;
  endfunction

  // Check the outputs for the current inputs, then clock and update the model.
  task automatic step();
    logic [N-1:0] exp_hit;
    bit any_v = 0;
    #1;
    for (int i = 0; i < N; i++) begin
      bit lh;
      lh = !me[i] && m_tmatch(i) && ((cmd == CMD_STORE || cmd == CMD_DELETE) || mv[i]);
      exp_hit[i] = (op == UOP_LOOKUP) ? lh : (mv[i] && !me[i]);
      if (mv[i] && !me[i]) any_v = 1;
      if (!me[i]) check(mem_data[i] == md[i], $sformatf("mem_data[%0d]", i));
    end
    check(mem_hit == exp_hit, $sformatf("mem_hit %b exp %b op %s", mem_hit, exp_hit, op.name()));
    check(valid_entry == any_v, "valid_entry");
    check(full == m_full(), "full");
    check(classes == mcls, "classes");
    @(posedge clk);
    // Model update.
    case (op)
      UOP_CLEAR: begin
        for (int i = 0; i < N; i++) begin md[i] = '0; mv[i] = 1; me[i] = 1; end
        mcls = '0;
      end
      UOP_RESET: for (int i = 0; i < N; i++) mv[i] = 1;
      UOP_STORE: begin
        for (int i = 0; i < N; i++) if (me[i]) begin
          md[i] = sdr; me[i] = 0; mv[i] = 1; break;
        end
      end
      UOP_DELETE: for (int i = 0; i < N; i++) if (!me[i] && m_tmatch(i)) me[i] = 1;
      UOP_LOOKUP: for (int i = 0; i < N; i++) mv[i] = exp_hit[i];
      UOP_VALIDATE: begin
        logic [C-1:0] k;
        k = '0;
        for (int i = 0; i < N; i++) if (mv[i] && !me[i]) k |= md[i][C-1:0];
        for (int i = 0; i < N; i++) mv[i] = !me[i] && ((md[i][C-1:0] & k) != '0);
        mcls = k;
      end
      default: ;
    endcase
    @(negedge clk);
  endtask

  task automatic drive(input uop_e o, input cmd_e c, input logic [W-1:0] s, input logic [W-1:0] d);
    op = o; cmd = c; sdr = s; dc = d;
    step();
  endtask

  localparam logic [W-1:0] DC_INFER = {{F{1'b0}}, {L{1'b0}}, {C{1'b1}}};
  localparam logic [W-1:0] DC_PF    = {{F{1'b1}}, {L{1'b0}}, {C{1'b1}}};
  localparam logic [W-1:0] DC_PL    = {{F{1'b0}}, {L{1'b1}}, {C{1'b1}}};

  initial begin
    rst_n = 1'b0; op = UOP_NOP; cmd = CMD_NOP; sdr = '0; dc = '0;
    for (int i = 0; i < N; i++) begin md[i] = '0; mv[i] = 1; me[i] = 1; end
    mcls = '0;
    repeat (2) @(posedge clk);
    @(negedge clk) rst_n = 1'b1;

    // Directed: store three triplets, class 0 has (f1,l1) and (f2,l2); class 1 has (f1,l3).
    drive(UOP_CLEAR, CMD_CLEAR, '0, '0);
    drive(UOP_STORE, CMD_STORE, triplet(1, 1, 0), '0);
    drive(UOP_STORE, CMD_STORE, triplet(2, 2, 0), '0);
    drive(UOP_STORE, CMD_STORE, triplet(1, 3, 1), '0);
    // Duplicate lookup of a stored triplet hits it.
    drive(UOP_LOOKUP, CMD_STORE, triplet(2, 2, 0), '0);
    check(valid_entry, "duplicate found");
    drive(UOP_RESET, CMD_STORE, triplet(2, 2, 0), '0);
    // INFER (f1,l1): lookup then validate -> class 0 only, both its entries valid.
    drive(UOP_LOOKUP, CMD_INFER, triplet(1, 1, 0) & ~DC_INFER, DC_INFER);
    drive(UOP_VALIDATE, CMD_INFER, triplet(1, 1, 0) & ~DC_INFER, DC_INFER);
    check(classes == 4'b0001, "inferred class 0");
    check(mem_hit == 8'b0000_0011, "validated entries of class 0");
    // PREDICT feature at l2 among valid entries: entry 1 only.
    drive(UOP_LOOKUP, CMD_PREDICT_FEAT, triplet(0, 2, 0) & ~DC_PF, DC_PF);
    // Delete (f2,l2,c0).
    drive(UOP_DELETE, CMD_DELETE, triplet(2, 2, 0), '0);
    check(!full, "not full");

    // Random.
    for (int t = 0; t < 4000; t++) begin
      uop_e o;
      cmd_e c;
      logic [W-1:0] s, d;
      int r, rf, rl, rc;
      r  = int'($urandom_range(0, 99));
      rf = int'($urandom_range(0, 2));
      rl = int'($urandom_range(0, 3));
      rc = int'($urandom_range(0, 2));
      s = triplet(rf, rl, rc);
      d = '0;
      if (r < 3)       begin o = UOP_CLEAR;    c = CMD_CLEAR;  s = '0; end
      else if (r < 13) begin o = UOP_RESET;    c = CMD_RESET;  s = '0; end
      else if (r < 40) begin o = UOP_STORE;    c = CMD_STORE;  end
      else if (r < 50) begin o = UOP_DELETE;   c = CMD_DELETE; end
      else if (r < 80) begin
        o = UOP_LOOKUP;
        case ($urandom_range(0, 4))
          0: begin c = CMD_STORE;        end
          1: begin c = CMD_INFER;        d = DC_INFER; end
          2: begin c = CMD_PREDICT_FEAT; d = DC_PF; end
          3: begin c = CMD_PREDICT_LOC;  d = DC_PL; end
          default: begin c = CMD_INFER;  d = DC_INFER | W'($urandom()) & {{F{1'b0}}, {L{1'b1}}, {C{1'b0}}}; end
        endcase
        s = s & ~d;
      end
      else if (r < 92) begin o = UOP_VALIDATE; c = CMD_INFER; end
      else             begin o = UOP_NOP;      c = CMD_NOP; end
      sdr = s; dc = d;
      if (o == UOP_STORE && m_full()) o = UOP_RESET;
      if (o == UOP_DELETE && !m_any_exact()) o = UOP_NOP;
      drive(o, c, s, d);
    end

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
