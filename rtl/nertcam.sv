// nertcam: the NeRTCAM system, an associative memory for the "place cells" of a
// cortical-column reference frame.
//
// The agent stores {feature, location, class} triplets (STORE, DELETE, CLEAR),
// then recognises an object by sensing one feature at one location after another
// (INFER): each INFER keeps only the classes that contain every pair sensed so
// far, and reports them on `inferred_classes`. PREDICT asks what features are
// expected at a location (PREDICT feature) or where a feature is expected
// (PREDICT location) among the entries still valid; the answer appears on
// `valid_features` / `valid_locations` / `valid_classes` in the same cycle.
// RESET forgets the inference so far without touching the stored triplets.
//
// Four parts, wired as in the design's system diagram: the preprocess block
// makes the don't-care mask from the command and padding, the RTCAM searches and
// updates the memory, the state machine sequences the micro-ops, and the
// prediction map condenses the matches. A command is accepted when `busy` is low
// and the code on `cmd` is not NOP: CLEAR, RESET and PREDICT take that one cycle;
// STORE and DELETE take 2 (failed) or 3 (done) cycles; INFER takes 2, or 4 when
// the first lookup finds nothing and a second lookup after an internal reset is
// tried (context switch or failure). While busy, inputs are ignored: the accepted
// command, SDR and padding are held in registers here, so the agent need not hold
// them. That input register and the separate `inferred_classes` output are this
// implementation's choices; `error` holds the code of the last command until the
// next one is accepted.
//
// Interface: clk, asynchronous active-low rst_n; cmd, padding, sdr
// ({feature, location, class}) from the agent; valid_features, valid_locations,
// valid_classes (prediction map), inferred_classes (RTCAM), full, error, busy.
module nertcam
  import nertcam_pkg::*;
#(
  parameter int unsigned F     = F_BITS,
  parameter int unsigned L     = L_BITS,
  parameter int unsigned C     = C_BITS,
  parameter int unsigned N     = ENTRIES,
  parameter int unsigned PAD_W = PAD_BITS,
  localparam int unsigned W    = F + L + C
) (
  input  logic             clk,
  input  logic             rst_n,
  input  cmd_e             cmd,
  input  logic [PAD_W-1:0] padding,
  input  logic [W-1:0]     sdr,
  output logic [F-1:0]     valid_features,
  output logic [L-1:0]     valid_locations,
  output logic [C-1:0]     valid_classes,
  output logic [C-1:0]     inferred_classes,
  output logic             full,
  output err_e             error,
  output logic             busy
);

  // Agent input register: captured on acceptance, used while busy.
  cmd_e             cmd_q;
  logic [PAD_W-1:0] pad_q;
  logic [W-1:0]     sdr_q;

  cmd_e             cmd_eff;
  logic [PAD_W-1:0] pad_eff;
  logic [W-1:0]     sdr_eff;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cmd_q <= CMD_NOP;
      pad_q <= '0;
      sdr_q <= '0;
    end else if (!busy) begin
      cmd_q <= cmd;
      pad_q <= padding;
      sdr_q <= sdr;
    end
  end

  assign cmd_eff = busy ? cmd_q : cmd;
  assign pad_eff = busy ? pad_q : padding;
  assign sdr_eff = busy ? sdr_q : sdr;

  logic [W-1:0] dc;
  nertcam_preprocess #(.F(F), .L(L), .C(C), .PAD_W(PAD_W)) u_preprocess (
    .cmd     (cmd_eff),
    .padding (pad_eff),
    .sdr     (sdr_eff),
    .dc      (dc)
  );

  uop_e         op;
  logic         valid_entry;
  logic [W-1:0] mem_data [N];
  logic [N-1:0] mem_hit;
  state_e       state;

  nertcam_fsm u_fsm (
    .clk         (clk),
    .rst_n       (rst_n),
    .cmd         (cmd_eff),
    .valid_entry (valid_entry),
    .full        (full),
    .op          (op),
    .busy        (busy),
    .error       (error),
    .state       (state)
  );

  rtcam #(.F(F), .L(L), .C(C), .N(N)) u_rtcam (
    .clk         (clk),
    .rst_n       (rst_n),
    .sdr         (sdr_eff),
    .dc          (dc),
    .cmd         (cmd_eff),
    .op          (op),
    .mem_data    (mem_data),
    .mem_hit     (mem_hit),
    .valid_entry (valid_entry),
    .full        (full),
    .classes     (inferred_classes)
  );

  nertcam_prediction_map #(.F(F), .L(L), .C(C), .N(N)) u_prediction_map (
    .cmd             (cmd_eff),
    .mem_data        (mem_data),
    .mem_hit         (mem_hit),
    .valid_features  (valid_features),
    .valid_locations (valid_locations),
    .valid_classes   (valid_classes)
  );

  // Busy is exactly "not in the Starting State".
  a_busy_state: assert property (@(posedge clk) disable iff (!rst_n)
    busy == (state != ST_SS));

endmodule
