// pim_pkg: types, constants and helper functions shared by the error-correcting
// processing-in-memory (PiM) blocks.
//
// The array executes NOR-based bulk bitwise logic row by row. Each logic level of
// a gate program is protected either by a Hamming code whose parity bits are
// updated in memory after every gate (ECiM) or by two redundant copies of every
// gate output (TRiM); an external Checker corrects single errors once per level.
//
// Followed from the paper: Hamming(255,247) (8 parity bits), H = [A | I], XOR as
// NOR22 followed by a 4-input threshold gate, left/right parity blocks, TRiM with
// 3-output gates. This design's own choices: the micro-operation encoding, the
// column layout of a row (compute region, parity region, copy offsets), the
// column order of A (ascending non-power-of-two syndromes, which reproduces the
// Hamming(7,4) A matrix printed in the paper's worked example) and 8-bit column
// addresses (arrays of at most 256 columns).
package pim_pkg;

  // ---------------- Hamming code ----------------
  localparam int unsigned NPAR  = 8;                 // n-k parity bits
  localparam int unsigned HAM_N = (1 << NPAR) - 1;   // 255
  localparam int unsigned HAM_K = HAM_N - NPAR;      // 247

  // Cells per parity bit per side: two ping-pong copies of the running parity
  // (PA, PB), the redundant NOR output R, and the two NOR22 outputs S1, S2.
  localparam int unsigned PCELLS   = 5;
  localparam int unsigned CELL_PA  = 0;
  localparam int unsigned CELL_PB  = 1;
  localparam int unsigned CELL_R   = 2;
  localparam int unsigned CELL_S1  = 3;
  localparam int unsigned CELL_S2  = 4;
  localparam int unsigned PAR_COLS = 2 * NPAR * PCELLS;   // 80 columns

  // Number of level slots in the controller's level-mask table.
  localparam int unsigned LVL_SLOTS = 4;
  localparam int unsigned LVL_W     = 2;

  typedef logic [7:0] col_t;

  typedef enum logic {
    SCH_ECIM = 1'b0,
    SCH_TRIM = 1'b1
  } scheme_e;

  // ---------------- gate program (what the host loads) ----------------
  typedef enum logic [1:0] {
    OP_NOP   = 2'd0,
    OP_NOR   = 2'd1,   // o = NOR(a, b)
    OP_LEVEL = 2'd2,   // end of a logic level: check and correct
    OP_HALT  = 2'd3
  } op_e;

  typedef struct packed {
    op_e  op;
    col_t a;
    col_t b;
    col_t o;
  } instr_t;

  // ---------------- micro-operations (what one row executes in one cycle) ----
  typedef enum logic [1:0] {
    XK_NONE = 2'd0,
    XK_XOR1 = 2'd1,   // NOR22(p, r) -> s1, s2
    XK_XOR2 = 2'd2    // THR(p, r, s1, s2) -> p'
  } xk_e;

  typedef enum logic [2:0] {
    CK_NONE = 3'd0,
    CK_R0   = 3'd1,   // read (ECiM codeword, or TRiM copy 0)
    CK_R1   = 3'd2,   // TRiM copy 1
    CK_R2   = 3'd3,   // TRiM copy 2
    CK_W    = 3'd4    // write-back of corrected level output
  } chk_e;

  typedef struct packed {
    logic            valid;
    logic            trim;    // 3-output NOR (TRiM copies)
    logic            side;    // ECiM: parity side receiving the redundant outputs
    logic [NPAR-1:0] pmask;   // ECiM: parity bits that get a redundant output
    col_t            a;
    col_t            b;
    col_t            o;
  } comp_uop_t;

  typedef struct packed {
    xk_e        kind;
    logic [2:0] pidx;   // parity bit index
    logic       src;    // current running-parity copy (0: PA, 1: PB)
  } par_uop_t;

  typedef struct packed {
    comp_uop_t       comp;
    par_uop_t        par_l;
    par_uop_t        par_r;
    logic            clr;     // clear this row's parity region
    chk_e            chk;
    logic [LVL_W-1:0] lvl;    // level slot for the checker
    logic [NPAR-1:0] pp_l;    // current parity copies (for the checker read)
    logic [NPAR-1:0] pp_r;
  } uop_t;

  // Event counters of one array's controller.
  typedef struct packed {
    logic [31:0] cycles;      // cycles from start to done
    logic [31:0] gates;       // NOR gates of the program issued
    logic [31:0] side_stall;  // cycles a NOR waited for its parity side
    logic [31:0] chk_stall;   // cycles a level check waited for checker bandwidth
    logic [31:0] levels;      // logic levels checked (per array, not per row)
    logic [31:0] fix_data;    // ECiM rows with a corrected data bit
    logic [31:0] fix_par;     // ECiM rows with an erroneous parity bit
    logic [31:0] fix_tmr;     // TRiM rows whose copies disagreed
  } stats_t;

  // ---------------- helpers ----------------
  // Column d (0-based) of A: the d-th integer in 1..2^NPAR-1 that is not a power
  // of two, bit i meaning parity bit p(i+1). Gives A = [1101;1011;0111] for the
  // 3-parity case, as in the paper's Hamming(7,4) example.
  function automatic logic [NPAR-1:0] ham_col(int unsigned d);
    int unsigned cnt;
    logic [NPAR-1:0] res;
    cnt = 0;
    res = '0;
    for (int unsigned v = 1; v < (1 << NPAR); v++) begin
      if ((v & (v - 1)) != 0) begin
        if (cnt == d) res = NPAR'(v);
        cnt++;
      end
    end
    return res;
  endfunction

  // Column of a parity-region cell.
  function automatic int unsigned par_cell(int unsigned cols, logic side,
                                           int unsigned pidx, int unsigned kind);
    return cols - PAR_COLS + (side ? NPAR * PCELLS : 0) + pidx * PCELLS + kind;
  endfunction

endpackage
