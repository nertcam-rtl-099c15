// nertcam_preprocess: builds the don't-care (DC) mask for a command.
//
// Purely combinational. A DC bit of 1 means "ignore this SDR bit in the search".
// The mask depends on the command only, following the design's table:
//   STORE, DELETE, CLEAR, RESET : all zeros (fully specified, or SDR ignored)
//   INFER                       : class field ones        {0.., 0.., 1..}
//   PREDICT feature             : feature and class ones  {1.., 0.., 1..}
//   PREDICT location            : location and class ones {0.., 1.., 1..}
// For INFER and PREDICT feature, which both carry a location, the location field of
// the mask is then widened for a fuzzy search: every location bit within `padding`
// positions of a set bit of the input location gets a 1, the set bit itself
// included, so location 00100 with padding 1 gives a location mask of 01110. With
// padding 0 the location field of the mask stays zero. Distance is measured along
// the flattened 1-D location vector, as in the design's own example.
// Applying padding to INFER as well as to PREDICT feature, and the 5-bit width of
// the padding input, are this implementation's choices. The NOP code gives an
// all-zero mask.
//
// Interface: cmd, padding, sdr in; dc out, same width as sdr. No clock.
module nertcam_preprocess
  import nertcam_pkg::*;
#(
  parameter int unsigned F     = F_BITS,
  parameter int unsigned L     = L_BITS,
  parameter int unsigned C     = C_BITS,
  parameter int unsigned PAD_W = PAD_BITS
) (
  input  cmd_e               cmd,
  input  logic [PAD_W-1:0]   padding,
  input  logic [F+L+C-1:0]   sdr,
  output logic [F+L+C-1:0]   dc
);

  logic [L-1:0] loc;
  logic [L-1:0] loc_pad;
  logic         use_pad;

  assign loc = sdr[C +: L];

  // Location padding: bit j is set when some set input bit i lies within
  // `padding` positions of j.
  always_comb begin
    loc_pad = '0;
    for (int j = 0; j < L; j++) begin
      for (int i = 0; i < L; i++) begin
        if (loc[i] && ((i >= j) ? (i - j) : (j - i)) <= int'(padding))
          loc_pad[j] = 1'b1;
      end
    end
  end

  assign use_pad = (padding != '0);

  always_comb begin
    dc = '0;
    unique case (cmd)
      CMD_INFER: begin
        dc[C-1:0]  = '1;
        dc[C +: L] = use_pad ? loc_pad : '0;
      end
      CMD_PREDICT_FEAT: begin
        dc[C-1:0]   = '1;
        dc[C +: L]  = use_pad ? loc_pad : '0;
        dc[C+L +: F] = '1;
      end
      CMD_PREDICT_LOC: begin
        dc[C-1:0]  = '1;
        dc[C +: L] = '1;
      end
      default: dc = '0;
    endcase
  end

endmodule
