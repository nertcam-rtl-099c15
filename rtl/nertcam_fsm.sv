// nertcam_fsm: the NeRTCAM state machine.
//
// Turns each agent command (macro-op) into a sequence of single-cycle RTCAM
// micro-ops. Four states: SS (Starting State, ready), FL (First Lookup), IR
// (Internal Reset) and SL (Second Lookup). Only SS accepts a command; `busy` is
// high in the other three. The micro-op is a Mealy output: it is issued in the
// cycle of the transition that the design's state diagram labels with it, and
// the RTCAM applies it at the following clock edge. `valid_entry` (V/NV) is the
// RTCAM's registered "some entry is valid", so in FL and SL it reports the result
// of the lookup issued one cycle earlier.
//
//   SS  CLEAR/clear, RESET/reset, PREDICT/lookup          stay in SS (1 cycle)
//   SS  STORE, DELETE, INFER / lookup                     -> FL
//   FL  V  & STORE  / reset  -> SS  Store_Failed          (2 cycles)
//   FL  NV & STORE  / reset  -> IR;  IR STORE / store  -> SS   (3 cycles)
//   FL  NV & DELETE / reset  -> SS  Delete_Failed         (2 cycles)
//   FL  V  & DELETE / reset  -> IR;  IR DELETE / delete -> SS  (3 cycles)
//   FL  V  & INFER  / validate -> SS                      (2 cycles)
//   FL  NV & INFER  / reset  -> IR;  IR INFER / lookup -> SL
//   SL  V  & INFER  / validate -> SS  Context_Switch      (4 cycles)
//   SL  NV & INFER  / reset    -> SS  Infer_Failed        (4 cycles)
// All of these transitions are the design's. Its own choices here: a STORE that
// reaches IR with the memory full issues no micro-op and ends with Store_Failed
// (the design asks that the agent be told, but draws no transition for it); the
// error code is a register, cleared when the next command is accepted and set in
// the cycle the failing (or context-switching) command returns to SS; the cycle
// count of a command is counted from its acceptance in SS to the first cycle back
// in SS. `cmd` must stay at the accepted command while busy; the system top holds
// it in a register.
//
// Interface: clk, asynchronous active-low rst_n, cmd, valid_entry, full in; op,
// busy, error, state out.
module nertcam_fsm
  import nertcam_pkg::*;
(
  input  logic   clk,
  input  logic   rst_n,
  input  cmd_e   cmd,
  input  logic   valid_entry,
  input  logic   full,
  output uop_e   op,
  output logic   busy,
  output err_e   error,
  output state_e state
);

  state_e state_q, state_d;
  err_e   err_q, err_d;

  always_comb begin
    state_d = state_q;
    err_d   = err_q;
    op      = UOP_NOP;
    unique case (state_q)
      ST_SS: begin
        if (cmd != CMD_NOP) err_d = ERR_NONE;
        unique case (cmd)
          CMD_CLEAR:        op = UOP_CLEAR;
          CMD_RESET:        op = UOP_RESET;
          CMD_PREDICT_FEAT,
          CMD_PREDICT_LOC:  op = UOP_LOOKUP;
          CMD_STORE,
          CMD_DELETE,
          CMD_INFER: begin
            op      = UOP_LOOKUP;
            state_d = ST_FL;
          end
          default:          op = UOP_NOP;
        endcase
      end
      ST_FL: begin
        unique case (cmd)
          CMD_STORE: begin
            op = UOP_RESET;
            if (valid_entry) begin
              err_d   = ERR_STORE_FAILED;
              state_d = ST_SS;
            end else begin
              state_d = ST_IR;
            end
          end
          CMD_DELETE: begin
            op = UOP_RESET;
            if (valid_entry) begin
              state_d = ST_IR;
            end else begin
              err_d   = ERR_DELETE_FAILED;
              state_d = ST_SS;
            end
          end
          CMD_INFER: begin
            if (valid_entry) begin
              op      = UOP_VALIDATE;
              state_d = ST_SS;
            end else begin
              op      = UOP_RESET;
              state_d = ST_IR;
            end
          end
          default: state_d = ST_SS;
        endcase
      end
      ST_IR: begin
        unique case (cmd)
          CMD_STORE: begin
            state_d = ST_SS;
            if (full) err_d = ERR_STORE_FAILED;
            else      op    = UOP_STORE;
          end
          CMD_DELETE: begin
            op      = UOP_DELETE;
            state_d = ST_SS;
          end
          CMD_INFER: begin
            op      = UOP_LOOKUP;
            state_d = ST_SL;
          end
          default: state_d = ST_SS;
        endcase
      end
      ST_SL: begin
        state_d = ST_SS;
        if (cmd == CMD_INFER && valid_entry) begin
          op    = UOP_VALIDATE;
          err_d = ERR_CONTEXT_SWITCH;
        end else begin
          op    = UOP_RESET;
          err_d = ERR_INFER_FAILED;
        end
      end
      default: state_d = ST_SS;
    endcase
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state_q <= ST_SS;
      err_q   <= ERR_NONE;
    end else begin
      state_q <= state_d;
      err_q   <= err_d;
    end
  end

  assign busy  = (state_q != ST_SS);
  assign error = err_q;
  assign state = state_q;

  // Only INFER ever reaches the second lookup.
  a_sl_only_infer: assert property (@(posedge clk) disable iff (!rst_n)
    (state_q == ST_SL) |-> (cmd == CMD_INFER));
  // The command may not change while the machine is busy.
  a_cmd_stable: assert property (@(posedge clk) disable iff (!rst_n)
    (state_q != ST_SS) |-> $stable(cmd));

endmodule
