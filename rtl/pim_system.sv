// pim_system: top of the error-correcting nonvolatile PiM accelerator, a fleet
// of NUM_TILES PiM tiles (array + controller + Checkers) behind one host port.
//
// Every tile runs its own copy of a gate program on all rows of its array, so
// the fleet computes NUM_TILES*ROWS independent instances of one circuit. The
// host selects a tile with host_tile for program loading (prog_*), row writes
// (wr_*) and row reads (rd_*). start and scheme go to all tiles at once; done
// rises when every tile has finished; busy while any tile runs. stats is the
// sum of the tiles' event counters (cycles is the largest tile's count).
// inj_* reaches the array model of tile inj_tile, for error-injection tests.
//
// Timing: rd_data is combinational from host_tile and rd_row. From the paper:
// up to 16 arrays of 256x256 cells, each with its controller and Checker
// (defaults NUM_TILES=16, ROWS=COLS=256). This design's choices: the host port,
// the broadcast start and the summed counters.
module pim_system
  import pim_pkg::*;
#(
  parameter int unsigned NUM_TILES  = 16,
  parameter int unsigned ROWS       = 256,
  parameter int unsigned COLS       = 256,
  parameter int unsigned PROG_DEPTH = 256,
  localparam int unsigned TSW = (NUM_TILES > 1) ? $clog2(NUM_TILES) : 1,
  localparam int unsigned RW  = (ROWS > 1) ? $clog2(ROWS) : 1,
  localparam int unsigned PW  = (PROG_DEPTH > 1) ? $clog2(PROG_DEPTH) : 1
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic [TSW-1:0]  host_tile,
  input  logic            prog_we,
  input  logic [PW-1:0]   prog_addr,
  input  instr_t          prog_wdata,
  input  logic            wr_en,
  input  logic [RW-1:0]   wr_row,
  input  logic [COLS-1:0] wr_data,
  input  logic [COLS-1:0] wr_mask,
  input  logic [RW-1:0]   rd_row,
  output logic [COLS-1:0] rd_data,
  input  logic            start,
  input  scheme_e         scheme,
  output logic            busy,
  output logic            done,
  input  logic            inj_en,
  input  logic [TSW-1:0]  inj_tile,
  input  logic [RW-1:0]   inj_row,
  input  col_t            inj_col,
  output stats_t          stats
);

  logic [NUM_TILES-1:0] t_busy, t_done;
  logic [COLS-1:0]      t_rd  [NUM_TILES];
  stats_t               t_st  [NUM_TILES];

  for (genvar t = 0; t < NUM_TILES; t++) begin : g_tile
    pim_tile #(.ROWS(ROWS), .COLS(COLS), .PROG_DEPTH(PROG_DEPTH)) u_tile (
      .clk, .rst_n,
      .prog_we(prog_we && 32'(host_tile) == t), .prog_addr, .prog_wdata,
      .start, .scheme, .busy(t_busy[t]), .done(t_done[t]),
      .host_wr_en(wr_en && 32'(host_tile) == t), .host_wr_row(wr_row),
      .host_wr_data(wr_data), .host_wr_mask(wr_mask),
      .host_rd_row(rd_row), .host_rd_data(t_rd[t]),
      .inj_en(inj_en && 32'(inj_tile) == t), .inj_row, .inj_col,
      .stats(t_st[t])
    );
  end

  assign rd_data = t_rd[host_tile];
  assign busy    = |t_busy;
  assign done    = &t_done;

  always_comb begin
    stats = '0;
    for (int t = 0; t < NUM_TILES; t++) begin
      if (t_st[t].cycles > stats.cycles) stats.cycles = t_st[t].cycles;
      stats.gates      += t_st[t].gates;
      stats.side_stall += t_st[t].side_stall;
      stats.chk_stall  += t_st[t].chk_stall;
      stats.levels     += t_st[t].levels;
      stats.fix_data   += t_st[t].fix_data;
      stats.fix_par    += t_st[t].fix_par;
      stats.fix_tmr    += t_st[t].fix_tmr;
    end
  end

endmodule
