// pim_tile: one PiM array with its controller and its two hardened Checkers
// (ECiM Hamming corrector and TRiM majority voter), the unit repeated across
// the accelerator.
//
// The controller drives the array's per-row micro-operations and owns the
// array's row read/write port while a program runs. When the controller is idle
// the host port gets the array: host_wr_* writes a row (bit mask per column),
// host_rd_row selects the row seen on host_rd_data. The scheme input selects
// ECiM or TRiM for the next start; only the checker of the running scheme is
// fed. inj_* is the error-injection hook of the array model, for tests.
//
// Timing: host_rd_data is combinational from host_rd_row. Everything else is as
// described in pim_controller. From the paper: an array, its PiM controller and
// its Checker placed next to it (the paper's system figure). This design's own
// choice: both checkers in every tile with a run-time scheme select, so the two
// protection schemes the paper proposes can run on the same hardware.
module pim_tile
  import pim_pkg::*;
#(
  parameter int unsigned ROWS       = 256,
  parameter int unsigned COLS       = 256,
  parameter int unsigned PROG_DEPTH = 256,
  localparam int unsigned RW = (ROWS > 1) ? $clog2(ROWS) : 1,
  localparam int unsigned PW = (PROG_DEPTH > 1) ? $clog2(PROG_DEPTH) : 1
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic            prog_we,
  input  logic [PW-1:0]   prog_addr,
  input  instr_t          prog_wdata,
  input  logic            start,
  input  scheme_e         scheme,
  output logic            busy,
  output logic            done,
  input  logic            host_wr_en,
  input  logic [RW-1:0]   host_wr_row,
  input  logic [COLS-1:0] host_wr_data,
  input  logic [COLS-1:0] host_wr_mask,
  input  logic [RW-1:0]   host_rd_row,
  output logic [COLS-1:0] host_rd_data,
  input  logic            inj_en,
  input  logic [RW-1:0]   inj_row,
  input  col_t            inj_col,
  output stats_t          stats
);

  localparam int unsigned TW = COLS / 3;

  uop_t            row_uop [ROWS];
  logic [RW-1:0]   c_rd_row, a_rd_row, c_wr_row, a_wr_row;
  logic [COLS-1:0] rd_data, c_wr_data, c_wr_mask, a_wr_data, a_wr_mask;
  logic            c_wr_en, a_wr_en;

  logic             ec_valid, ec_out_valid, ec_out_err, ec_out_err_data;
  logic [HAM_K-1:0] ec_data, ec_out_data;
  logic [NPAR-1:0]  ec_par, ec_out_par, ec_out_syn;
  logic [7:0]       ec_out_err_idx;
  logic             tc_valid, tc_out_valid, tc_out_mismatch;
  logic [1:0]       tc_beat, tc_out_bad;
  logic [TW-1:0]    tc_copy, tc_out_major;

  pim_controller #(.ROWS(ROWS), .COLS(COLS), .PROG_DEPTH(PROG_DEPTH)) u_ctrl (
    .clk, .rst_n, .prog_we, .prog_addr, .prog_wdata, .start, .scheme, .busy, .done,
    .row_uop, .rd_row(c_rd_row), .rd_data, .wr_en(c_wr_en), .wr_row(c_wr_row),
    .wr_data(c_wr_data), .wr_mask(c_wr_mask),
    .ec_valid, .ec_data, .ec_par, .ec_out_valid, .ec_out_data, .ec_out_err,
    .ec_out_err_data, .ec_out_err_idx,
    .tc_valid, .tc_beat, .tc_copy, .tc_out_valid, .tc_out_major, .tc_out_mismatch,
    .stats
  );

  always_comb begin
    if (busy) begin
      a_rd_row  = c_rd_row;
      a_wr_en   = c_wr_en;
      a_wr_row  = c_wr_row;
      a_wr_data = c_wr_data;
      a_wr_mask = c_wr_mask;
    end else begin
      a_rd_row  = host_rd_row;
      a_wr_en   = host_wr_en;
      a_wr_row  = host_wr_row;
      a_wr_data = host_wr_data;
      a_wr_mask = host_wr_mask;
    end
  end
  assign host_rd_data = rd_data;

  pim_array #(.ROWS(ROWS), .COLS(COLS)) u_array (
    .clk, .uop(row_uop), .rd_row(a_rd_row), .rd_data, .wr_en(a_wr_en), .wr_row(a_wr_row),
    .wr_data(a_wr_data), .wr_mask(a_wr_mask), .inj_en, .inj_row, .inj_col
  );

  ecim_checker u_ecim (
    .clk, .rst_n, .in_valid(ec_valid), .in_data(ec_data), .in_par(ec_par),
    .out_valid(ec_out_valid), .out_data(ec_out_data), .out_par(ec_out_par),
    .out_err(ec_out_err), .out_err_data(ec_out_err_data), .out_err_idx(ec_out_err_idx),
    .out_syndrome(ec_out_syn)
  );

  trim_checker #(.W(TW)) u_trim (
    .clk, .rst_n, .in_valid(tc_valid), .in_beat(tc_beat), .in_copy(tc_copy),
    .out_valid(tc_out_valid), .out_major(tc_out_major), .out_mismatch(tc_out_mismatch),
    .out_bad(tc_out_bad)
  );

endmodule
