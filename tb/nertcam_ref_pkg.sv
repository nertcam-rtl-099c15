// nertcam_ref_pkg: command-level reference model of the NeRTCAM system, used by
// the system testbenches.
//
// The class keeps its own copy of the memory (data, valid and empty bits) and of
// the inferred-class register, and executes one agent command at a time the way
// the design specifies it: what the command does to the memory, what it reports
// (error code, prediction vectors, inferred classes, full) and how many clock
// cycles it takes. The don't-care mask is rebuilt here from the field layout,
// independently of the RTL. `outcome` names the mechanism a command exercised so
// that testbenches can count them.
package nertcam_ref_pkg;
  import nertcam_pkg::*;

  typedef enum int {
    OUT_CLEAR, OUT_RESET, OUT_PREDICT_FEAT, OUT_PREDICT_LOC,
    OUT_STORE_OK, OUT_STORE_DUP, OUT_STORE_FULL,
    OUT_DELETE_OK, OUT_DELETE_MISSING,
    OUT_INFER_OK, OUT_CONTEXT_SWITCH, OUT_INFER_FAILED, OUT_NOP,
    OUT_COUNT
  } outcome_e;

  class nertcam_ref #(int F = 128, int L = 25, int C = 10, int N = 1024);
    localparam int W = F + L + C;

    logic [W-1:0] d [N];
    bit           v [N];
    bit           e [N];
    logic [C-1:0] icls;

    // Results of the last command.
    int           cycles;
    err_e         err;
    logic [F-1:0] p_feat;
    logic [L-1:0] p_loc;
    logic [C-1:0] p_cls;
    outcome_e     outcome;

    function new();
      for (int i = 0; i < N; i++) begin d[i] = '0; v[i] = 1; e[i] = 1; end
      icls = '0;
      err  = ERR_NONE;
    endfunction

    function bit full();
      for (int i = 0; i < N; i++) if (e[i]) return 0;
      return 1;
    endfunction

    function int stored();
      int n = 0;
      for (int i = 0; i < N; i++) if (!e[i]) n++;
      return n;
    endfunction

    function logic [W-1:0] dc_of(cmd_e c, int pad, logic [W-1:0] s);
      logic [W-1:0] m;
      m = '0;
      if (c == CMD_INFER || c == CMD_PREDICT_FEAT || c == CMD_PREDICT_LOC)
        for (int b = 0; b < C; b++) m[b] = 1'b1;
      if (c == CMD_PREDICT_FEAT)
        for (int b = 0; b < F; b++) m[C + L + b] = 1'b1;
      if (c == CMD_PREDICT_LOC)
        for (int b = 0; b < L; b++) m[C + b] = 1'b1;
      if ((c == CMD_INFER || c == CMD_PREDICT_FEAT) && pad > 0)
        for (int b = 0; b < L; b++)
          if (s[C + b])
            for (int k = b - pad; k <= b + pad; k++)
              if (k >= 0 && k < L) m[C + k] = 1'b1;
      return m;
    endfunction

    function bit hit(int i, logic [W-1:0] s, logic [W-1:0] m, bit only_valid);
      if (e[i]) return 0;
      if (only_valid && !v[i]) return 0;
      for (int b = 0; b < W; b++)
        if (!m[b] && (d[i][b] != s[b])) return 0;
      return 1;
    endfunction

    function void all_valid();
      for (int i = 0; i < N; i++) v[i] = 1;
    endfunction

    function void validate();
      logic [C-1:0] k;
      k = '0;
      for (int i = 0; i < N; i++) if (v[i] && !e[i]) k |= d[i][C-1:0];
      for (int i = 0; i < N; i++) v[i] = !e[i] && ((d[i][C-1:0] & k) != '0);
      icls = k;
    endfunction

    function void exec(cmd_e c, int pad, logic [W-1:0] s);
      logic [W-1:0] m;
      bit h [N];
      bit any;
      m = dc_of(c, pad, s);
      p_feat = '0; p_loc = '0; p_cls = '0;
      if (c != CMD_NOP) err = ERR_NONE;
      case (c)
        CMD_NOP:   begin cycles = 1; outcome = OUT_NOP; end
        CMD_CLEAR: begin
          for (int i = 0; i < N; i++) begin d[i] = '0; v[i] = 1; e[i] = 1; end
          icls = '0; cycles = 1; outcome = OUT_CLEAR;
        end
        CMD_RESET: begin all_valid(); cycles = 1; outcome = OUT_RESET; end
        CMD_PREDICT_FEAT, CMD_PREDICT_LOC: begin
          logic [W-1:0] acc;
          acc = '0;
          for (int i = 0; i < N; i++) begin
            h[i] = hit(i, s, m, 1);
            if (h[i]) acc |= d[i];
          end
          for (int i = 0; i < N; i++) v[i] = h[i];
          p_cls = acc[C-1:0];
          if (c == CMD_PREDICT_FEAT) begin p_feat = acc[W-1 -: F]; outcome = OUT_PREDICT_FEAT; end
          else                       begin p_loc  = acc[C +: L];  outcome = OUT_PREDICT_LOC;  end
          cycles = 1;
        end
        CMD_STORE: begin
          any = 0;
          for (int i = 0; i < N; i++) if (hit(i, s, m, 0)) any = 1;
          all_valid();
          if (any) begin
            err = ERR_STORE_FAILED; cycles = 2; outcome = OUT_STORE_DUP;
          end else if (full()) begin
            err = ERR_STORE_FAILED; cycles = 3; outcome = OUT_STORE_FULL;
          end else begin
            for (int i = 0; i < N; i++) if (e[i]) begin d[i] = s; e[i] = 0; v[i] = 1; break; end
            cycles = 3; outcome = OUT_STORE_OK;
          end
        end
        CMD_DELETE: begin
          any = 0;
          for (int i = 0; i < N; i++) begin h[i] = hit(i, s, m, 0); if (h[i]) any = 1; end
          all_valid();
          if (any) begin
            for (int i = 0; i < N; i++) if (h[i]) e[i] = 1;
            cycles = 3; outcome = OUT_DELETE_OK;
          end else begin
            err = ERR_DELETE_FAILED; cycles = 2; outcome = OUT_DELETE_MISSING;
          end
        end
        CMD_INFER: begin
          any = 0;
          for (int i = 0; i < N; i++) begin h[i] = hit(i, s, m, 1); if (h[i]) any = 1; end
          for (int i = 0; i < N; i++) v[i] = h[i];
          if (any) begin
            validate(); cycles = 2; outcome = OUT_INFER_OK;
          end else begin
            all_valid();
            for (int i = 0; i < N; i++) begin h[i] = hit(i, s, m, 1); if (h[i]) any = 1; end
            for (int i = 0; i < N; i++) v[i] = h[i];
            cycles = 4;
            if (any) begin
              validate(); err = ERR_CONTEXT_SWITCH; outcome = OUT_CONTEXT_SWITCH;
            end else begin
              all_valid(); err = ERR_INFER_FAILED; outcome = OUT_INFER_FAILED;
            end
          end
        end
        default: ;
      endcase
    endfunction
  endclass

endpackage
