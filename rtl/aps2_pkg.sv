// aps2_pkg: instruction set, field layout and link symbols shared by the
// pulse sequencer (APS2), its output engines and the trigger distribution
// module (TDM).
//
// The instruction list (WAVEFORM .. PREFETCH) and the engine command lists
// follow the sequencer's published instruction set. The 64-bit width follows
// from its cache line of 128 instructions in 1 kB. The bit layout, the opcode
// numbers and the link symbol codes are this design's own choice.
//
// Sequencer instruction, 64 bits:
//   [63:60] opcode
//   [59:56] engine mask (WAVEFORM: bit0/1 = analog 1/2; MARKER: bit0..3 =
//           marker 1..4), compare operation (CMP, bits 57:56) or the
//           conditional flag (GOTO / CALL, bit 56)
//   [55:0]  payload: the engine command for WAVEFORM / MARKER / MODULATOR,
//           the repeat value (LOAD_REPEAT, [15:0]), the compare mask (CMP,
//           [7:0]) or the instruction address (REPEAT, GOTO, CALL,
//           PREFETCH, [26:0])
package aps2_pkg;

  localparam int unsigned INSTR_W    = 64;
  localparam int unsigned IADDR_W    = 27;   // 128 M instructions in 1 GB
  localparam int unsigned CMD_W      = 56;   // engine command payload
  localparam int unsigned SPC        = 4;    // samples per sequencer clock
  localparam int unsigned SAMPLE_W   = 16;   // waveform sample (I or Q)
  localparam int unsigned PHASE_W    = 24;   // NCO phase, full turn = 2^24
  localparam int unsigned NWF        = 2;    // analog (waveform) engines
  localparam int unsigned NMK        = 4;    // marker engines
  localparam int unsigned NENG       = NWF + NMK + 1; // + modulation engine

  typedef enum logic [3:0] {
    OP_WAVEFORM    = 4'd0,
    OP_MARKER      = 4'd1,
    OP_MODULATOR   = 4'd2,
    OP_WAIT        = 4'd3,
    OP_SYNC        = 4'd4,
    OP_LOAD_REPEAT = 4'd5,
    OP_REPEAT      = 4'd6,
    OP_LOAD_CMP    = 4'd7,
    OP_CMP         = 4'd8,
    OP_GOTO        = 4'd9,
    OP_CALL        = 4'd10,
    OP_RETURN      = 4'd11,
    OP_PREFETCH    = 4'd12
  } opcode_e;

  typedef enum logic [1:0] {
    CMP_EQ = 2'd0, CMP_NE = 2'd1, CMP_LT = 2'd2, CMP_GT = 2'd3
  } cmp_op_e;

  // Engine commands (the 56-bit payload). Common to all engines: the
  // operation sits in the top bits [55:52].
  // Waveform engine: [51] time-amplitude flag, [47:24] count in 4-sample
  // words, [16:0] sample address in the waveform cache (multiple of 4);
  // PREFETCH: [16] page to fill, [31:0] SDRAM word address of the source.
  typedef enum logic [3:0] {
    WF_PLAY = 4'd0, WF_WAIT = 4'd1, WF_SYNC = 4'd2, WF_PREFETCH = 4'd3
  } wf_op_e;

  // Marker engine: [51:48] last word pattern, [47:24] count in words,
  // [0] marker state.
  typedef enum logic [3:0] {
    MK_PLAY = 4'd0, MK_WAIT = 4'd1, MK_SYNC = 4'd2
  } mk_op_e;

  // Modulation engine: [51:48] NCO mask (phase commands) or, for MODULATE,
  // the NCO index in [49:48]; [47:24] MODULATE count in words; [23:0] phase.
  typedef enum logic [3:0] {
    MOD_WAIT = 4'd0, MOD_SYNC = 4'd1, MOD_RESET_PHASE = 4'd2,
    MOD_SET_PHASE_OFFSET = 4'd3, MOD_SET_PHASE_INCREMENT = 4'd4,
    MOD_UPDATE_FRAME = 4'd5, MOD_MODULATE = 4'd6
  } mod_op_e;

  // Serial link symbol: K flag plus one byte, as a transceiver with 8b/10b
  // coding delivers it.
  typedef struct packed {
    logic       k;
    logic [7:0] data;
  } link_sym_t;

  localparam logic [7:0] K_TRIGGER = 8'hBC;  // reserved trigger symbol
  localparam logic [7:0] K_IDLE    = 8'h3C;

  function automatic logic [INSTR_W-1:0] mk_instr(opcode_e op, logic [3:0] sel,
                                                 logic [CMD_W-1:0] payload);
    return {op, sel, payload};
  endfunction

endpackage
