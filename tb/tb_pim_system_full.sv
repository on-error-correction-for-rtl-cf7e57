// tb_pim_system_full: one complete operation of the PiM accelerator at its
// default size: 16 tiles of 256x256 cells, 4096 rows computing at once.
//
// Every row of every tile is loaded with two random inputs and runs the
// two-level AND circuit of the Hamming(7,4) example (o1 = NOR(in2,0),
// o2 = NOR(in1,0); out = NOR(o1,o2)) under ECiM. One gate-output error is
// injected into o1 of one row of tile 5 and one error into a parity-update
// output of one row of tile 9. The test checks that every row's result is
// in1 AND in2, that exactly one data and one parity correction were made, that
// both levels were checked in all 16 tiles, and the run time: two levels of
// checks 256*2 cycles apart plus a drain of 255*2+2 cycles.
module tb_pim_system_full;
  import pim_pkg::*;
  localparam int unsigned NT   = 16;
  localparam int unsigned ROWS = 256;
  localparam int unsigned COLS = 256;

  logic clk = 1'b0;
  logic rst_n;
  always #5 clk = ~clk;

  logic [3:0]      host_tile, inj_tile;
  logic            prog_we, wr_en, start, busy, done, inj_en;
  logic [7:0]      prog_addr, wr_row, rd_row, inj_row;
  instr_t          prog_wdata;
  logic [COLS-1:0] wr_data, wr_mask, rd_data;
  scheme_e         scheme;
  col_t            inj_col;
  stats_t          stats;

  pim_system dut (.*);

  int checks = 0;
  int failures = 0;
  task automatic check(string what, logic cond);
    checks++;
    if (!cond) begin
      failures++;
      $display("FAIL %s", what);
    end
  endtask

  instr_t prog [6];
  logic [1:0] inp [NT][ROWS];

  // injection targets
  uop_t u5, u9;
  assign u5 = dut.g_tile[5].u_tile.row_uop[77];
  assign u9 = dut.g_tile[9].u_tile.row_uop[200];
  int done5, done9;
  always @(negedge clk) begin
    inj_en <= 1'b0;
    if (rst_n && busy) begin
      if (done5 == 0 && u5.comp.valid && u5.comp.o == 8'd0) begin
        inj_en <= 1'b1; inj_tile <= 4'd5; inj_row <= 8'd77; inj_col <= 8'd0;
        done5 = 1;
      end else if (done9 == 0 && u9.comp.valid && u9.comp.o == 8'd2) begin
        // o3 updates p2 and p3: corrupt the redundant output for p2 (right or left side)
        inj_en <= 1'b1; inj_tile <= 4'd9; inj_row <= 8'd200;
        inj_col <= 8'(COLS - PAR_COLS + (u9.comp.side ? NPAR * PCELLS : 0) + 1 * PCELLS + CELL_R);
        done9 = 1;
      end
    end
  end

  initial begin
    repeat (40000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int t0, cyc;
    rst_n = 1'b0; host_tile = '0; prog_we = 1'b0; prog_addr = '0; prog_wdata = '0;
    wr_en = 1'b0; wr_row = '0; wr_data = '0; wr_mask = '0; rd_row = '0; start = 1'b0;
    scheme = SCH_ECIM; inj_en = 1'b0; inj_tile = '0; inj_row = '0; inj_col = '0;
    done5 = 0; done9 = 0;
    prog[0] = '{op: OP_NOR,   a: 8'd11, b: 8'd12, o: 8'd0};
    prog[1] = '{op: OP_NOR,   a: 8'd10, b: 8'd12, o: 8'd1};
    prog[2] = '{op: OP_LEVEL, a: 8'd0,  b: 8'd0,  o: 8'd0};
    prog[3] = '{op: OP_NOR,   a: 8'd0,  b: 8'd1,  o: 8'd2};
    prog[4] = '{op: OP_LEVEL, a: 8'd0,  b: 8'd0,  o: 8'd0};
    prog[5] = '{op: OP_HALT,  a: 8'd0,  b: 8'd0,  o: 8'd0};
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    for (int t = 0; t < NT; t++) begin
      for (int i = 0; i < 6; i++) begin
        @(negedge clk);
        host_tile = 4'(t); prog_we = 1'b1; prog_addr = 8'(i); prog_wdata = prog[i];
      end
      @(negedge clk);
      prog_we = 1'b0;
      for (int r = 0; r < ROWS; r++) begin
        inp[t][r] = 2'($urandom);
        @(negedge clk);
        wr_en = 1'b1; wr_row = 8'(r); wr_mask = '1;
        wr_data = '0; wr_data[10] = inp[t][r][0]; wr_data[11] = inp[t][r][1];
      end
      @(negedge clk);
      wr_en = 1'b0;
    end
    @(negedge clk);
    start = 1'b1;
    @(negedge clk);
    start = 1'b0;
    t0 = 0;
    cyc = 0;
    while (!done) begin
      @(negedge clk);
      cyc++;
    end
    for (int t = 0; t < NT; t++) begin
      host_tile = 4'(t);
      for (int r = 0; r < ROWS; r++) begin
        rd_row = 8'(r);
        #1;
        check("AND result", rd_data[2] == (inp[t][r][0] & inp[t][r][1]));
        check("inputs kept", rd_data[11:10] == inp[t][r]);
      end
    end
    check("errors injected", done5 == 1 && done9 == 1);
    check("one data correction", stats.fix_data == 1);
    check("one parity correction", stats.fix_par == 1);
    check("levels checked in all tiles", stats.levels == 2 * NT);
    // level 1 check starts after 2 NORs + side drain; level 2 is paced 512 cycles later
    check($sformatf("run time %0d", stats.cycles), stats.cycles >= 512 + 510 && stats.cycles < 512 + 510 + 40);
    $display("full size: cycles=%0d fix_data=%0d fix_par=%0d chk_stall=%0d side_stall=%0d",
             stats.cycles, stats.fix_data, stats.fix_par, stats.chk_stall, stats.side_stall);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
