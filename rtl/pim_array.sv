// pim_array: behavioural model of a resistive nonvolatile PiM array (STT-MRAM,
// SOT/SHE-MRAM or ReRAM) that computes inside the array. It is not synthesizable
// logic in the sense of the real part: the real array is a crossbar of resistive
// cells whose gates come from bias voltages and current thresholds. This model
// reproduces only the logic of those gates, cycle by cycle.
//
// Each row executes, per cycle, the micro-operation uop[r] given to it, so that
// different rows can be at different steps (the delayed row start of the
// controller). A micro-operation holds up to three gates that run in separate
// column partitions at the same time: one in the compute columns and one on
// each of the left and right parity sides. Output cells are preset and switched
// in the same step (one gate delay = one cycle). Gates:
//   * NOR (compute slot): o = NOR(a, b). The same value is also written to the
//     redundant cells R of every parity bit in pmask on the chosen side (a
//     (1+w)-output NOR), or, for TRiM, to o+COLS/3 and o+2*COLS/3 (3-output NOR).
//   * XOR1 (parity slot): NOR22(p, r) -> s1, s2.
//   * XOR2 (parity slot): THR(p, r, s1, s2) -> p', where THR outputs 1 only when
//     three or more of its four inputs are 0. XOR1 then XOR2 gives p' = p ^ r.
//   * clr: presets the whole parity region of the row to 0.
// All gates of a cycle read the state before the clock edge.
// Conventional access: rd_row/rd_data is an asynchronous row read (the sense
// path); wr_en writes wr_data into the bits of wr_row selected by wr_mask.
// inj_en flips cell (inj_row, inj_col) at the clock edge, after the gates of
// that cycle: it models a gate or storage error for testing.
//
// From the paper: the gate set (multi-output NOR, NOR22, 4-input THR with preset
// 0), XOR in two steps, row-level parallelism, partitions that each run one gate
// at a time, three gates active per row, 256x256 arrays. This model's choices:
// logic 1 as the switched state of every gate, preset folded into the gate step,
// and the column layout given in pim_pkg. No resistance, voltage or energy is
// modelled.
module pim_array
  import pim_pkg::*;
#(
  parameter int unsigned ROWS = 256,
  parameter int unsigned COLS = 256,
  localparam int unsigned RW  = (ROWS > 1) ? $clog2(ROWS) : 1
) (
  input  logic            clk,
  input  uop_t            uop     [ROWS],
  input  logic [RW-1:0]   rd_row,
  output logic [COLS-1:0] rd_data,
  input  logic            wr_en,
  input  logic [RW-1:0]   wr_row,
  input  logic [COLS-1:0] wr_data,
  input  logic [COLS-1:0] wr_mask,
  input  logic            inj_en,
  input  logic [RW-1:0]   inj_row,
  input  col_t            inj_col
);

  localparam int unsigned TOFF = COLS / 3;

  logic [COLS-1:0] cells [ROWS];

  assign rd_data = cells[rd_row];

  function automatic logic [COLS-1:0] do_par(logic [COLS-1:0] old, logic [COLS-1:0] nxt,
                                             logic side, par_uop_t pu);
    int unsigned cp, cq, cr, c1, c2;
    int unsigned zeros;
    cp = par_cell(COLS, side, pu.pidx, pu.src ? CELL_PB : CELL_PA);
    cq = par_cell(COLS, side, pu.pidx, pu.src ? CELL_PA : CELL_PB);
    cr = par_cell(COLS, side, pu.pidx, CELL_R);
    c1 = par_cell(COLS, side, pu.pidx, CELL_S1);
    c2 = par_cell(COLS, side, pu.pidx, CELL_S2);
    case (pu.kind)
      XK_XOR1: begin
        nxt[c1] = ~(old[cp] | old[cr]);
        nxt[c2] = ~(old[cp] | old[cr]);
      end
      XK_XOR2: begin
        zeros = 32'(!old[cp]) + 32'(!old[cr]) + 32'(!old[c1]) + 32'(!old[c2]);
        nxt[cq] = (zeros >= 3);
      end
      default: ;
    endcase
    return nxt;
  endfunction

  always_ff @(posedge clk) begin
    for (int unsigned r = 0; r < ROWS; r++) begin
      logic [COLS-1:0] old, nxt;
      logic v;
      old = cells[r];
      nxt = old;
      if (uop[r].comp.valid) begin
        v = ~(old[uop[r].comp.a] | old[uop[r].comp.b]);
        nxt[uop[r].comp.o] = v;
        if (uop[r].comp.trim) begin
          nxt[32'(uop[r].comp.o) + TOFF]     = v;
          nxt[32'(uop[r].comp.o) + 2 * TOFF] = v;
        end else begin
          for (int unsigned i = 0; i < NPAR; i++) begin
            if (uop[r].comp.pmask[i]) nxt[par_cell(COLS, uop[r].comp.side, i, CELL_R)] = v;
          end
        end
      end
      nxt = do_par(old, nxt, 1'b0, uop[r].par_l);
      nxt = do_par(old, nxt, 1'b1, uop[r].par_r);
      if (uop[r].clr) nxt[COLS-1 -: PAR_COLS] = '0;
      if (wr_en && 32'(wr_row) == r) nxt = (nxt & ~wr_mask) | (wr_data & wr_mask);
      if (inj_en && 32'(inj_row) == r) nxt[inj_col] = ~nxt[inj_col];
      cells[r] <= nxt;
    end
  end

endmodule
