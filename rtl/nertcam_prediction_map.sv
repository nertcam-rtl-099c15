// nertcam_prediction_map: condenses the RTCAM's matching entries into k-hot
// prediction vectors.
//
// Combinational. In a PREDICT cycle the RTCAM marks on `mem_hit` the valid entries
// that match the partial SDR; this block ORs the feature, location and class fields
// of those entries into one k-hot vector each. PREDICT feature (a location was
// given) outputs the valid features and classes and holds locations low, since
// every hit carries the given location; PREDICT location outputs locations and
// classes and holds features low. Any other command gives all zeros. An all-zero
// output during a PREDICT therefore means the prediction failed: nothing valid
// matches the given feature or location. This behaviour is the design's; the
// OR-reduction is the simplest circuit that performs it.
//
// Interface: cmd, mem_data[N], mem_hit in; valid_features, valid_locations,
// valid_classes out.
module nertcam_prediction_map
  import nertcam_pkg::*;
#(
  parameter int unsigned F = F_BITS,
  parameter int unsigned L = L_BITS,
  parameter int unsigned C = C_BITS,
  parameter int unsigned N = ENTRIES,
  localparam int unsigned W = F + L + C
) (
  input  cmd_e         cmd,
  input  logic [W-1:0] mem_data [N],
  input  logic [N-1:0] mem_hit,
  output logic [F-1:0] valid_features,
  output logic [L-1:0] valid_locations,
  output logic [C-1:0] valid_classes
);

  logic [W-1:0] condensed;

  always_comb begin
    condensed = '0;
    for (int i = 0; i < N; i++)
      if (mem_hit[i]) condensed |= mem_data[i];
  end

  always_comb begin
    valid_features  = '0;
    valid_locations = '0;
    valid_classes   = '0;
    if (cmd == CMD_PREDICT_FEAT) begin
      valid_features = condensed[C+L +: F];
      valid_classes  = condensed[C-1:0];
    end else if (cmd == CMD_PREDICT_LOC) begin
      valid_locations = condensed[C +: L];
      valid_classes   = condensed[C-1:0];
    end
  end

endmodule
