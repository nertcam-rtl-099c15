// rtcam_validate: the validation step of INFER.
//
// Combinational. After the lookup of an INFER only the entries holding the sensed
// feature-location pair are valid. Validation turns that into "every entry of
// every class still in the running": it ORs the class fields of all valid,
// non-empty entries into a k-hot class vector `classes`, then marks valid every
// non-empty entry whose one-hot class has a bit in that vector (`revalid`). This
// is the design's search with I = {0.., 0.., classes} and DC = {1.., 1.., 0..}
// after the valid bits are reset, read as "any marked class bit set", which is
// what the design states the search yields. The RTCAM loads `revalid` into its
// valid bits and `classes` into its inferred-class output register in one cycle.
//
// Interface: cls[N] (class field of each entry), valid, empty in; classes,
// revalid out.
module rtcam_validate
  import nertcam_pkg::*;
#(
  parameter int unsigned N = ENTRIES,
  parameter int unsigned C = C_BITS
) (
  input  logic [C-1:0] cls [N],
  input  logic [N-1:0] valid,
  input  logic [N-1:0] empty,
  output logic [C-1:0] classes,
  output logic [N-1:0] revalid
);

  always_comb begin
    classes = '0;
    for (int i = 0; i < N; i++)
      if (valid[i] && !empty[i]) classes |= cls[i];
  end

  always_comb begin
    for (int i = 0; i < N; i++)
      revalid[i] = !empty[i] && ((cls[i] & classes) != '0);
  end

endmodule
