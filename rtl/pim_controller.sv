// pim_controller: per-array controller that runs a NOR gate program on every row
// of a PiM array at once, keeps the error-correction metadata up to date in
// memory, and has the Checker correct each row after every logic level.
//
// How it works.
// The host loads a program of NOR gates (a, b -> o) split into logic levels by
// OP_LEVEL markers and ended by OP_HALT. The controller expands it into one
// micro-operation (uop) per cycle, the schedule of a single row:
//   * ECiM: every NOR is a multi-output NOR whose extra outputs land in the
//     redundant cells R of the parity bits that column o of A names. Gates
//     alternate between the left and the right parity side. On that side each
//     named parity bit p is then updated p <- p ^ r in two gates, XOR1 = NOR22
//     and XOR2 = THR, writing the new p into the other cell of a ping-pong pair.
//     A NOR waits (side stall) if its side is still busy with the previous gate.
//   * TRiM: every NOR is a 3-output NOR writing o and two copies.
//   * At a level end (after the parity sides drain) the row is checked: ECiM
//     reads the codeword once (R) and writes back a correction (W); TRiM reads
//     the three copies (R R R) then writes back the majority (W). The W step
//     also clears the parity region for the next level.
// Delayed row start: row r executes the uop the expander produced r*D cycles
// earlier (D = 2 for ECiM, 4 for TRiM, the length of one row's R/W sequence),
// taken from a delay line. Checker reads and writes of one row therefore fall
// between the computation steps of the other rows and never collide. For that
// to hold across levels, consecutive level checks start at least ROWS*D cycles
// apart; a shorter level waits (checker stall).
//
// Interface: program write port (prog_*), start/scheme/busy/done, the per-row
// uops and the row read/write port of the array, the checker ports, and event
// counters (stats). Program and array port writes are accepted any time; the
// host must only use them while busy is low. One uop per cycle; a level of G
// gates with parity weight w takes at least max(G, G*(2w+1)/2) cycles plus D.
//
// From the paper: NOR-based computation checked at logic-level granularity,
// parity update after every NOR via NOR22 + THR, left/right parity blocks taking
// alternate gates, up to three gates active per row, TRiM copies by 3-output
// gates, R/W then R R R W sequences, rows started in a delayed fashion. This
// design's own choices: the program format, one parity chain per side at a time
// (the paper's finer rotation over several parity blocks per side is not
// modelled), the codeword of a level being the level's output columns (data bit
// index = column), final parity = left XOR right parity, the pacing rule, and
// writing back only when the checker reports an error in the level output.
module pim_controller
  import pim_pkg::*;
#(
  parameter int unsigned ROWS       = 256,
  parameter int unsigned COLS       = 256,
  parameter int unsigned PROG_DEPTH = 256,
  localparam int unsigned RW   = (ROWS > 1) ? $clog2(ROWS) : 1,
  localparam int unsigned PW   = (PROG_DEPTH > 1) ? $clog2(PROG_DEPTH) : 1,
  localparam int unsigned COMP = COLS - PAR_COLS,   // ECiM compute columns
  localparam int unsigned TW   = COLS / 3           // TRiM copy width
) (
  input  logic            clk,
  input  logic            rst_n,
  // program load
  input  logic            prog_we,
  input  logic [PW-1:0]   prog_addr,
  input  instr_t          prog_wdata,
  // control
  input  logic            start,
  input  scheme_e         scheme,
  output logic            busy,
  output logic            done,
  // array
  output uop_t            row_uop [ROWS],
  output logic [RW-1:0]   rd_row,
  input  logic [COLS-1:0] rd_data,
  output logic            wr_en,
  output logic [RW-1:0]   wr_row,
  output logic [COLS-1:0] wr_data,
  output logic [COLS-1:0] wr_mask,
  // ECiM checker
  output logic            ec_valid,
  output logic [HAM_K-1:0] ec_data,
  output logic [NPAR-1:0] ec_par,
  input  logic            ec_out_valid,
  input  logic [HAM_K-1:0] ec_out_data,
  input  logic            ec_out_err,
  input  logic            ec_out_err_data,
  input  logic [7:0]      ec_out_err_idx,
  // TRiM checker
  output logic            tc_valid,
  output logic [1:0]      tc_beat,
  output logic [TW-1:0]   tc_copy,
  input  logic            tc_out_valid,
  input  logic [TW-1:0]   tc_out_major,
  input  logic            tc_out_mismatch,
  // event counters
  output stats_t          stats
);

  localparam int unsigned DL    = (ROWS > 1) ? (ROWS - 1) * 4 : 1;
  localparam int unsigned GAP_W = $clog2(ROWS * 4 + 2) + 1;

  typedef enum logic [2:0] {S_IDLE, S_CLR, S_RUN, S_CHK, S_DRAIN, S_DONE} state_e;

  // ---------------- program memory ----------------
  instr_t prog [PROG_DEPTH];
  always_ff @(posedge clk) begin
    if (prog_we) prog[prog_addr] <= prog_wdata;
  end

  // Hardwired columns of A for every compute column.
  logic [NPAR-1:0] acol [COMP];
  for (genvar d = 0; d < COMP; d++) begin : g_acol
    assign acol[d] = ham_col(d);
  end

  // ---------------- state ----------------
  state_e            state;
  scheme_e           scheme_q;
  logic [PW-1:0]     pc;
  logic              gate_side;
  logic [1:0]        sbusy;
  logic [NPAR-1:0]   srem  [2];
  logic [1:0]        sphase;
  logic [NPAR-1:0]   pp    [2];
  logic [LVL_W-1:0]  lvl_q;
  logic [COMP-1:0]   lvl_mask [LVL_SLOTS];
  logic [GAP_W-1:0]  gap;
  logic              first_chk;
  logic [1:0]        chk_seq;
  logic [GAP_W-1:0]  drain_cnt;
  uop_t              dl [DL];

  logic [2:0]        dstep;

  // row currently talking to the checker
  logic            chk_hit;
  logic [RW-1:0]   chk_row;
  uop_t            chk_u;
  logic [COMP-1:0] cmask;
  assign dstep = (scheme_q == SCH_TRIM) ? 3'd4 : 3'd2;

  // ---------------- expander (combinational part) ----------------
  uop_t              cur;
  instr_t            ins;
  logic              issue_nor;
  logic              side_wait;
  logic              chk_wait;
  logic              chk_last;
  logic [NPAR-1:0]   new_pmask;
  logic [2:0]        spidx [2];
  par_uop_t          spu   [2];

  assign ins = prog[pc];

  always_comb begin
    // Side engines: lowest pending parity bit, XOR1 then XOR2.
    for (int s = 0; s < 2; s++) begin
      spidx[s] = '0;
      for (int i = NPAR - 1; i >= 0; i--) begin
        if (srem[s][i]) spidx[s] = 3'(i);
      end
      spu[s] = '0;
      if (sbusy[s]) begin
        spu[s].kind = sphase[s] ? XK_XOR2 : XK_XOR1;
        spu[s].pidx = spidx[s];
        spu[s].src  = pp[s][spidx[s]];
      end
    end

    cur        = '0;
    cur.par_l  = spu[0];
    cur.par_r  = spu[1];
    cur.lvl    = lvl_q;
    issue_nor  = 1'b0;
    side_wait  = 1'b0;
    chk_wait   = 1'b0;
    chk_last   = 1'b0;
    new_pmask  = (32'(ins.o) < COMP) ? acol[ins.o] : '0;

    case (state)
      S_CLR: cur.clr = 1'b1;
      S_RUN: begin
        if (ins.op == OP_NOR) begin
          if (scheme_q == SCH_ECIM && sbusy[gate_side]) begin
            side_wait = 1'b1;
          end else begin
            issue_nor       = 1'b1;
            cur.comp.valid  = 1'b1;
            cur.comp.trim   = (scheme_q == SCH_TRIM);
            cur.comp.side   = gate_side;
            cur.comp.pmask  = (scheme_q == SCH_ECIM) ? new_pmask : '0;
            cur.comp.a      = ins.a;
            cur.comp.b      = ins.b;
            cur.comp.o      = ins.o;
          end
        end
      end
      S_CHK: begin
        if (chk_seq == 2'd0 && !first_chk && 32'(gap) < ROWS * 32'(dstep)) begin
          chk_wait = 1'b1;
        end else begin
          cur.pp_l = pp[0];
          cur.pp_r = pp[1];
          if (scheme_q == SCH_ECIM) begin
            cur.chk  = (chk_seq == 2'd0) ? CK_R0 : CK_W;
            chk_last = (chk_seq == 2'd1);
          end else begin
            case (chk_seq)
              2'd0:    cur.chk = CK_R0;
              2'd1:    cur.chk = CK_R1;
              2'd2:    cur.chk = CK_R2;
              default: cur.chk = CK_W;
            endcase
            chk_last = (chk_seq == 2'd3);
          end
          cur.clr = chk_last;
        end
      end
      default: ;
    endcase
  end

  // ---------------- expander (sequential part) ----------------
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state     <= S_IDLE;
      scheme_q  <= SCH_ECIM;
      pc        <= '0;
      gate_side <= 1'b0;
      sbusy     <= '0;
      sphase    <= '0;
      srem[0]   <= '0;
      srem[1]   <= '0;
      pp[0]     <= '0;
      pp[1]     <= '0;
      lvl_q     <= '0;
      for (int l = 0; l < LVL_SLOTS; l++) lvl_mask[l] <= '0;
      gap       <= '0;
      first_chk <= 1'b1;
      chk_seq   <= '0;
      drain_cnt <= '0;
      stats     <= '0;
    end else begin
      if (gap != '1) gap <= gap + 1'b1;
      if (busy) stats.cycles <= stats.cycles + 1;

      // correction counters
      if (busy && chk_hit && chk_u.chk == CK_W) begin
        if (scheme_q == SCH_ECIM && ec_out_valid && ec_out_err) begin
          if (ec_out_err_data) stats.fix_data <= stats.fix_data + 1;
          else                 stats.fix_par  <= stats.fix_par + 1;
        end
        if (scheme_q == SCH_TRIM && tc_out_valid && tc_out_mismatch)
          stats.fix_tmr <= stats.fix_tmr + 1;
      end

      // side engines advance
      for (int s = 0; s < 2; s++) begin
        if (sbusy[s]) begin
          if (sphase[s]) begin
            pp[s][spidx[s]]   <= ~pp[s][spidx[s]];
            srem[s][spidx[s]] <= 1'b0;
            sphase[s]         <= 1'b0;
            if ((srem[s] & ~(NPAR'(1) << spidx[s])) == '0) sbusy[s] <= 1'b0;
          end else begin
            sphase[s] <= 1'b1;
          end
        end
      end

      case (state)
        S_IDLE, S_DONE: begin
          if (start) begin
            state     <= S_CLR;
            scheme_q  <= scheme;
            stats     <= '0;
          end
        end
        S_CLR: begin
          state     <= S_RUN;
          pc        <= '0;
          gate_side <= 1'b0;
          pp[0]     <= '0;
          pp[1]     <= '0;
          lvl_q     <= '0;
          lvl_mask[0] <= '0;
          first_chk <= 1'b1;
        end
        S_RUN: begin
          case (ins.op)
            OP_NOP: pc <= pc + 1'b1;
            OP_NOR: begin
              if (issue_nor) begin
                pc <= pc + 1'b1;
                stats.gates <= stats.gates + 1;
                lvl_mask[lvl_q] <= lvl_mask[lvl_q] | (COMP'(1) << ins.o);
                if (scheme_q == SCH_ECIM) begin
                  sbusy[gate_side]  <= (new_pmask != '0);
                  srem[gate_side]   <= new_pmask;
                  sphase[gate_side] <= 1'b0;
                  gate_side         <= ~gate_side;
                end
              end else if (side_wait) begin
                stats.side_stall <= stats.side_stall + 1;
              end
            end
            OP_LEVEL: begin
              if (sbusy == 2'b00) begin
                state   <= S_CHK;
                chk_seq <= '0;
              end
            end
            default: begin   // OP_HALT
              state     <= S_DRAIN;
              drain_cnt <= '0;
            end
          endcase
        end
        S_CHK: begin
          if (chk_wait) begin
            stats.chk_stall <= stats.chk_stall + 1;
          end else begin
            if (chk_seq == 2'd0) begin
              gap       <= GAP_W'(1);
              first_chk <= 1'b0;
              stats.levels <= stats.levels + 1;
            end
            chk_seq <= chk_seq + 1'b1;
            if (chk_last) begin
              state     <= S_RUN;
              pc        <= pc + 1'b1;
              lvl_q     <= lvl_q + 1'b1;
              lvl_mask[lvl_q + 1'b1] <= '0;
              pp[0]     <= '0;
              pp[1]     <= '0;
              gate_side <= 1'b0;
            end
          end
        end
        S_DRAIN: begin
          drain_cnt <= drain_cnt + 1'b1;
          if (32'(drain_cnt) >= (ROWS - 1) * 32'(dstep) + 1) state <= S_DONE;
        end
        default: ;
      endcase
    end
  end

  assign busy = (state != S_IDLE) && (state != S_DONE);
  assign done = (state == S_DONE);

  // ---------------- delayed row start ----------------
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < DL; i++) dl[i] <= '0;
    end else begin
      dl[0] <= cur;
      for (int i = 1; i < DL; i++) dl[i] <= dl[i-1];
    end
  end

  always_comb begin
    row_uop[0] = cur;
    for (int r = 1; r < ROWS; r++) begin
      row_uop[r] = (scheme_q == SCH_TRIM) ? dl[r * 4 - 1] : dl[r * 2 - 1];
    end
  end

  // ---------------- checker traffic ----------------

  always_comb begin
    chk_hit = 1'b0;
    chk_row = '0;
    chk_u   = '0;
    for (int r = 0; r < ROWS; r++) begin
      if (row_uop[r].chk != CK_NONE) begin
        chk_hit = 1'b1;
        chk_row = RW'(r);
        chk_u   = row_uop[r];
      end
    end
    cmask  = lvl_mask[chk_u.lvl];
    rd_row = chk_row;
  end

  always_comb begin
    ec_valid = 1'b0;
    ec_data  = '0;
    ec_par   = '0;
    tc_valid = 1'b0;
    tc_beat  = '0;
    tc_copy  = '0;
    wr_en    = 1'b0;
    wr_row   = chk_row;
    wr_data  = '0;
    wr_mask  = '0;

    if (chk_hit) begin
      if (scheme_q == SCH_ECIM) begin
        if (chk_u.chk == CK_R0) begin
          ec_valid = 1'b1;
          ec_data[COMP-1:0] = rd_data[COMP-1:0] & cmask;
          for (int i = 0; i < NPAR; i++) begin
            ec_par[i] = rd_data[par_cell(COLS, 1'b0, i, chk_u.pp_l[i] ? CELL_PB : CELL_PA)]
                      ^ rd_data[par_cell(COLS, 1'b1, i, chk_u.pp_r[i] ? CELL_PB : CELL_PA)];
          end
        end else if (chk_u.chk == CK_W && ec_out_valid && ec_out_err_data
                     && 32'(ec_out_err_idx) < COMP) begin
          wr_en = 1'b1;
          wr_data[COMP-1:0] = ec_out_data[COMP-1:0];
          wr_mask[ec_out_err_idx] = 1'b1;
        end
      end else begin
        if (chk_u.chk == CK_R0 || chk_u.chk == CK_R1 || chk_u.chk == CK_R2) begin
          tc_valid = 1'b1;
          tc_beat  = 2'(chk_u.chk - CK_R0);
          tc_copy  = rd_data[32'(tc_beat) * TW +: TW] & cmask[TW-1:0];
        end else if (chk_u.chk == CK_W && tc_out_valid && tc_out_mismatch) begin
          wr_en = 1'b1;
          wr_data[TW-1:0] = tc_out_major;
          wr_mask[TW-1:0] = cmask[TW-1:0];
        end
      end
    end
  end

  // ---------------- rules ----------------
  logic [31:0] n_chk;
  always_comb begin
    n_chk = '0;
    for (int r = 0; r < ROWS; r++) n_chk += 32'(row_uop[r].chk != CK_NONE);
  end
  a_one_check_row: assert property (@(posedge clk) disable iff (!rst_n) n_chk <= 1);
  a_ecim_col: assert property (@(posedge clk) disable iff (!rst_n)
      state == S_RUN && ins.op == OP_NOR && scheme_q == SCH_ECIM |-> 32'(ins.o) < COMP);
  a_trim_col: assert property (@(posedge clk) disable iff (!rst_n)
      state == S_RUN && ins.op == OP_NOR && scheme_q == SCH_TRIM |-> 32'(ins.o) < TW);
  a_w_has_result: assert property (@(posedge clk) disable iff (!rst_n)
      chk_hit && chk_u.chk == CK_W |-> (scheme_q == SCH_ECIM ? ec_out_valid : tc_out_valid));

endmodule
