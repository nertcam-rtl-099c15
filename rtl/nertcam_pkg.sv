// nertcam_pkg: shared constants and encodings of the NeRTCAM reference-frame CAM.
//
// The SDR (sparse distributed representation) that the agent sends is one flat
// vector laid out, from the most significant bit down, as {feature, location, class}.
// The default field sizes are the MNIST configuration of the design: a 128-bit
// feature vector, a 5x5 sensor grid flattened to 25 location bits, and 10 digit
// classes, so 163 SDR bits and 165 bits per stored entry with the valid and empty
// flags. The default depth is the 1024-entry configuration.
//
// The command set (six agent commands, PREDICT in two flavours), the micro-op set
// and the four error kinds are those of the design; their binary encodings, and
// the "no command" / "no micro-op" / "no error" codes, are this implementation's
// own. Commands, micro-ops and error codes each fit the 3-bit buses drawn for the
// RTCAM's CONTROL, OPERATION and ERROR ports.
package nertcam_pkg;

  // Default sizes (MNIST configuration).
  localparam int unsigned F_BITS  = 128;   // feature field
  localparam int unsigned L_BITS  = 25;    // location field (5x5 grid)
  localparam int unsigned C_BITS  = 10;    // class field (10 digits)
  localparam int unsigned ENTRIES = 1024;  // RTCAM depth
  localparam int unsigned PAD_BITS = 5;    // width of the padding input

  // Agent control commands (macro-ops).
  typedef enum logic [2:0] {
    CMD_NOP          = 3'd0,
    CMD_CLEAR        = 3'd1,
    CMD_RESET        = 3'd2,
    CMD_STORE        = 3'd3,
    CMD_DELETE       = 3'd4,
    CMD_INFER        = 3'd5,
    CMD_PREDICT_FEAT = 3'd6,  // location given, features predicted
    CMD_PREDICT_LOC  = 3'd7   // feature given, locations predicted
  } cmd_e;

  // Internal operations (micro-ops) issued by the state machine to the RTCAM.
  typedef enum logic [2:0] {
    UOP_NOP      = 3'd0,
    UOP_CLEAR    = 3'd1,
    UOP_RESET    = 3'd2,
    UOP_STORE    = 3'd3,
    UOP_DELETE   = 3'd4,
    UOP_LOOKUP   = 3'd5,
    UOP_VALIDATE = 3'd6
  } uop_e;

  // Error / status codes reported to the agent.
  typedef enum logic [2:0] {
    ERR_NONE           = 3'd0,
    ERR_STORE_FAILED   = 3'd1,  // exact match already stored, or memory full
    ERR_DELETE_FAILED  = 3'd2,  // no exact match to delete
    ERR_INFER_FAILED   = 3'd3,  // lookup empty even after the internal reset
    ERR_CONTEXT_SWITCH = 3'd4   // lookup empty, but matched after the internal reset
  } err_e;

  // State machine states.
  typedef enum logic [1:0] {
    ST_SS = 2'd0,  // Starting State: ready, accepts commands
    ST_FL = 2'd1,  // First Lookup
    ST_IR = 2'd2,  // Internal Reset
    ST_SL = 2'd3   // Second Lookup
  } state_e;

  function automatic logic is_predict(cmd_e c);
    return (c == CMD_PREDICT_FEAT) || (c == CMD_PREDICT_LOC);
  endfunction

endpackage
