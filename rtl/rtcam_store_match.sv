// rtcam_store_match: exact-match and free-entry logic for STORE and DELETE.
//
// Combinational. `tmatch` is the per-entry result of the RTCAM comparator; for
// STORE and DELETE the don't-care mask is all zeros, so it is an exact comparison
// of each entry with the input SDR. An entry counts as an exact hit only while it
// holds data (empty bit low). `any_exact` tells the state machine whether the
// triplet is already stored (STORE then fails, DELETE then proceeds).
// `next_empty` is a one-hot pick of the lowest-numbered empty entry, where a STORE
// writes; `full` is high when no entry is empty. The design says only "the next
// empty entry"; taking the lowest index, found with the two's-complement trick
// empty & -empty, is this implementation's choice.
//
// Interface: tmatch[N-1:0], empty[N-1:0] in; exact_hit, any_exact, next_empty,
// full out.
module rtcam_store_match
  import nertcam_pkg::*;
#(
  parameter int unsigned N = ENTRIES
) (
  input  logic [N-1:0] tmatch,
  input  logic [N-1:0] empty,
  output logic [N-1:0] exact_hit,
  output logic         any_exact,
  output logic [N-1:0] next_empty,
  output logic         full
);

  assign exact_hit  = tmatch & ~empty;
  assign any_exact  = |exact_hit;
  assign next_empty = empty & (~empty + N'(1));
  assign full       = ~|empty;

endmodule
