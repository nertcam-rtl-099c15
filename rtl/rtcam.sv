// rtcam: the Reverse Ternary CAM that holds the {feature, location, class} triplets.
//
// A conventional ternary CAM stores don't-care bits and is searched with a binary
// key. Here it is the other way round: entries are fully specified binary SDRs and
// the search key carries the don't-cares. Entry i matches when every bit either
// is masked by DC or equals the input SDR:  ((data[i] ^ sdr) & ~dc) == 0.
//
// Each of the N entries is F+L+C data bits plus a valid bit V (still consistent
// with what the agent has sensed) and an empty bit E, all in flip-flops. The
// state machine drives one micro-op per cycle on `op`; its effect lands at the
// next rising clock edge:
//   UOP_CLEAR    every entry empty, data zeroed, V set, class output cleared
//   UOP_RESET    every V set to 1 (stored triplets kept)
//   UOP_STORE    input SDR written to the lowest empty entry, E low, V high;
//                ignored when full
//   UOP_DELETE   every stored entry equal to the input SDR is made invalid and
//                empty (V low, E high)
//   UOP_LOOKUP   V <= hit. For INFER and PREDICT the search covers only valid
//                entries, so successive INFERs narrow the candidate set. For STORE
//                and DELETE (told apart by `cmd`) it covers every stored entry,
//                so a duplicate is found even when it is not currently valid.
//   UOP_VALIDATE V <= entries of the classes still valid (rtcam_validate), and
//                the k-hot class vector is registered on `classes`.
// Outputs: `mem_data`/`mem_hit` form mem_out, the stored data with, per entry, the
// lookup hit in a lookup cycle (combinational, so a PREDICT is answered in its own
// cycle) or the current valid bit otherwise. `valid_entry` (the V/NV signal of the
// state machine) is the OR of V over stored entries, from registers: in the cycle
// after a lookup it says whether anything matched. `full` is high when no entry is
// empty. `classes` is the inferred-class register.
// The memory organisation, the micro-ops and the sub-modules follow the design;
// restricting STORE/DELETE lookups to nothing but stored entries (ignoring V),
// the lowest-index store slot and keeping data through a hardware reset (only the
// flags are reset, so after reset every entry is empty) are this implementation's.
//
// Interface: clk, asynchronous active-low rst_n, sdr (I), dc (DC), cmd (agent
// control), op (micro-op); mem_data, mem_hit, valid_entry, full, classes.
module rtcam
  import nertcam_pkg::*;
#(
  parameter int unsigned F = F_BITS,
  parameter int unsigned L = L_BITS,
  parameter int unsigned C = C_BITS,
  parameter int unsigned N = ENTRIES,
  localparam int unsigned W = F + L + C
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic [W-1:0] sdr,
  input  logic [W-1:0] dc,
  input  cmd_e         cmd,
  input  uop_e         op,
  output logic [W-1:0] mem_data [N],
  output logic [N-1:0] mem_hit,
  output logic         valid_entry,
  output logic         full,
  output logic [C-1:0] classes
);

  // Memory module: data, valid and empty bits.
  logic [W-1:0] data [N];
  logic [N-1:0] v_q;
  logic [N-1:0] e_q;
  logic [C-1:0] classes_q;

  // Ternary comparison of every entry with the search key.
  logic [N-1:0] tmatch;
  always_comb begin
    for (int i = 0; i < N; i++)
      tmatch[i] = (((data[i] ^ sdr) & ~dc) == '0);
  end

  // Store/delete match module.
  logic [N-1:0] exact_hit;
  logic         any_exact;
  logic [N-1:0] next_empty;
  rtcam_store_match #(.N(N)) u_store_match (
    .tmatch     (tmatch),
    .empty      (e_q),
    .exact_hit  (exact_hit),
    .any_exact  (any_exact),
    .next_empty (next_empty),
    .full       (full)
  );

  // Validation module.
  logic [C-1:0] cls [N];
  logic [C-1:0] val_classes;
  logic [N-1:0] revalid;
  always_comb begin
    for (int i = 0; i < N; i++) cls[i] = data[i][C-1:0];
  end
  rtcam_validate #(.N(N), .C(C)) u_validate (
    .cls     (cls),
    .valid   (v_q),
    .empty   (e_q),
    .classes (val_classes),
    .revalid (revalid)
  );

  // Lookup hits: whole memory for STORE/DELETE, valid entries otherwise.
  logic         scope_all;
  logic [N-1:0] lookup_hit;
  assign scope_all  = (cmd == CMD_STORE) || (cmd == CMD_DELETE);
  assign lookup_hit = scope_all ? exact_hit : (exact_hit & v_q);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      v_q       <= '1;
      e_q       <= '1;
      classes_q <= '0;
    end else begin
      unique case (op)
        UOP_CLEAR: begin
          v_q       <= '1;
          e_q       <= '1;
          classes_q <= '0;
        end
        UOP_RESET:  v_q <= '1;
        UOP_STORE: begin
          if (!full) begin
            v_q <= v_q | next_empty;
            e_q <= e_q & ~next_empty;
          end
        end
        UOP_DELETE: begin
          v_q <= v_q & ~exact_hit;
          e_q <= e_q | exact_hit;
        end
        UOP_LOOKUP: v_q <= lookup_hit;
        UOP_VALIDATE: begin
          v_q       <= revalid;
          classes_q <= val_classes;
        end
        default: ;
      endcase
    end
  end

  // Data array: written by STORE, zeroed by CLEAR.
  always_ff @(posedge clk) begin
    for (int i = 0; i < N; i++) begin
      if (op == UOP_CLEAR)
        data[i] <= '0;
      else if (op == UOP_STORE && !full && next_empty[i])
        data[i] <= sdr;
    end
  end

  always_comb begin
    for (int i = 0; i < N; i++) mem_data[i] = data[i];
  end
  assign mem_hit     = (op == UOP_LOOKUP) ? lookup_hit : (v_q & ~e_q);
  assign valid_entry = |(v_q & ~e_q);
  assign classes     = classes_q;

  // The state machine never asks for a store into a full memory.
  a_no_store_when_full: assert property (@(posedge clk) disable iff (!rst_n)
    (op == UOP_STORE) |-> !full);
  // A delete is issued only for a triplet that is stored.
  a_delete_has_match: assert property (@(posedge clk) disable iff (!rst_n)
    (op == UOP_DELETE) |-> any_exact);

endmodule
