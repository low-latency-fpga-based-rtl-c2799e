// qc_pkg: constants and types shared by the atom-rearrangement feedback loop.
//
// The loop detects which of N_TRAP optical tweezers hold an atom, plans how to
// fill the N_TARGET left-most sites, and sends MOVE / CLOSE instructions to a
// multi-tone AWG. The trap count (24), target size (10) and the frame counts
// per command (15 per move, 12 per close) follow the published system; the
// frame layout, opcodes and tone frequency plan are this design's own choices.
package qc_pkg;

  localparam int unsigned N_TRAP   = 24;  // tweezers in the 1D array
  localparam int unsigned N_TARGET = 10;  // left-most sites to fill (main setting of n_target_i)
  localparam int unsigned CNT_W    = 16;  // photon-count width
  localparam int unsigned FRAME_W  = 32;  // RF-command frame width
  localparam int unsigned FTW_W    = 32;  // DDS frequency tuning word width
  localparam int unsigned AMP_W    = 16;  // tone amplitude width (unsigned)
  localparam int unsigned IDX_W    = 8;   // trap index field width in frames

  localparam int unsigned FRAMES_PER_MOVE  = 15;
  localparam int unsigned FRAMES_PER_CLOSE = 12;

  // Tone plan: trap p sits at F0 + p*DF (FTW units of f_clk / 2^32).
  // 0x51EB851F = 80 MHz and 0x0147AE14 = 1 MHz at a 250 MHz clock.
  localparam logic [FTW_W-1:0] F0_FTW   = 32'h51EB_851F;
  localparam logic [FTW_W-1:0] DF_FTW   = 32'h0147_AE14;
  localparam logic [AMP_W-1:0] AMP_FULL = 16'h0AAA;   // 24 tones sum below 2^16

  typedef enum logic [7:0] {
    OP_NONE  = 8'h00,
    OP_MOVE  = 8'h01,
    OP_CLOSE = 8'h02
  } op_e;

  // Planner -> encoder command.
  typedef struct packed {
    op_e              op;
    logic [IDX_W-1:0] src;   // trap the atom leaves (MOVE) or the trap closed (CLOSE)
    logic [IDX_W-1:0] dst;   // trap the atom arrives at (MOVE only)
    logic             last;  // last command of the list
  } plan_cmd_t;

  // Decoded AWG instruction.
  typedef struct packed {
    op_e              op;
    logic [IDX_W-1:0] src;
    logic [IDX_W-1:0] dst;
    logic [FTW_W-1:0] f_start;
    logic [FTW_W-1:0] f_stop;
    logic [FTW_W-1:0] f_step;   // signed chirp increment per clock (MOVE)
    logic [31:0]      a_step;   // amplitude ramp increment per clock, 16.16 fixed point
  } awg_cmd_t;

  // Phases of one rearrangement round in the AWG.
  typedef enum logic [2:0] {
    PH_IDLE,
    PH_RAMP_DOWN,
    PH_MOVE,
    PH_COMMIT,
    PH_RAMP_UP
  } round_phase_e;

  // Header frame: {opcode, src, dst, frame index within the list (low 8 bits)}.
  function automatic logic [FRAME_W-1:0] hdr_frame(op_e op, logic [IDX_W-1:0] src,
                                                   logic [IDX_W-1:0] dst, logic [7:0] seq);
    return {op, src, dst, seq};
  endfunction

  function automatic logic [FTW_W-1:0] trap_ftw(logic [IDX_W-1:0] p);
    return F0_FTW + FTW_W'(p) * DF_FTW;
  endfunction

endpackage
