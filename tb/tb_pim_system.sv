// tb_pim_system: end-to-end test of the PiM accelerator top at reduced size
// (2 tiles of 8 rows, full 256-column rows).
//
// Tile 0 runs the two-level AND circuit of the classic Hamming(7,4) example
// (o1 = NOR(in2,0), o2 = NOR(in1,0) in level 1, out = NOR(o1,o2) in level 2,
// with o1, o2, out in data bits 0, 1, 2 so that their parity bits are p1p2,
// p1p3, p2p3). Tile 1 runs a random layered NOR circuit. Both are run under
// ECiM and then, after a scheme switch, under TRiM, with single errors injected
// into gate outputs and into parity-update outputs or copies. Every row of
// every tile is read back through the host port and compared with a reference
// computed here. Each mechanism must occur at least once: parity-side stall,
// checker-bandwidth stall, ECiM data correction, ECiM parity correction, TRiM
// correction and the scheme switch.
module tb_pim_system;
  import pim_pkg::*;
  localparam int unsigned NT   = 2;
  localparam int unsigned ROWS = 8;
  localparam int unsigned COLS = 256;
  localparam int unsigned TW   = COLS / 3;
  localparam int unsigned PD   = 64;

  logic clk = 1'b0;
  logic rst_n;
  always #5 clk = ~clk;

  logic            host_tile, prog_we, wr_en, start, busy, done, inj_en, inj_tile;
  logic [5:0]      prog_addr;
  instr_t          prog_wdata;
  logic [2:0]      wr_row, rd_row, inj_row;
  logic [COLS-1:0] wr_data, wr_mask, rd_data;
  scheme_e         scheme;
  col_t            inj_col;
  stats_t          stats;

  pim_system #(.NUM_TILES(NT), .ROWS(ROWS), .COLS(COLS), .PROG_DEPTH(PD)) dut (.*);

  int checks = 0;
  int failures = 0;
  task automatic check(string what, logic cond);
    checks++;
    if (!cond) begin
      failures++;
      $display("FAIL %s", what);
    end
  endtask

  instr_t prog [NT][PD];
  int     nprog [NT];
  logic [COLS-1:0] init_row [NT][ROWS];
  logic [COLS-1:0] ref_row  [NT][ROWS];
  int     outs [NT][$];

  task automatic add(int t, op_e op, int a, int b, int o);
    prog[t][nprog[t]] = '{op: op, a: 8'(a), b: 8'(b), o: 8'(o)};
    if (op == OP_NOR) outs[t].push_back(o);
    nprog[t]++;
  endtask

  // in1 = col 10, in2 = col 11, constant 0 = col 12
  task automatic prog_and(int t);
    nprog[t] = 0; outs[t].delete();
    add(t, OP_NOR, 11, 12, 0);   // o1
    add(t, OP_NOR, 10, 12, 1);   // o2
    add(t, OP_LEVEL, 0, 0, 0);
    add(t, OP_NOR, 0, 1, 2);     // o3 = in1 AND in2
    add(t, OP_LEVEL, 0, 0, 0);
    add(t, OP_HALT, 0, 0, 0);
  endtask

  // inputs in cols 10..17, outputs from col 20 on, constant 0 = col 12
  task automatic prog_rand(int t);
    int nc, hi;
    nprog[t] = 0; outs[t].delete();
    nc = 20;
    for (int l = 0; l < 3; l++) begin
      hi = nc;
      for (int g = 0; g < 5; g++) begin
        add(t, OP_NOR, (l == 0) ? $urandom_range(10, 17) : $urandom_range(20, hi - 1),
               $urandom_range(10, 17), nc);
        nc++;
      end
      add(t, OP_LEVEL, 0, 0, 0);
    end
    add(t, OP_HALT, 0, 0, 0);
  endtask

  task automatic load();
    for (int t = 0; t < NT; t++) begin
      for (int i = 0; i < nprog[t]; i++) begin
        @(negedge clk);
        host_tile = 1'(t); prog_we = 1'b1; prog_addr = 6'(i); prog_wdata = prog[t][i];
      end
      @(negedge clk);
      prog_we = 1'b0;
      for (int r = 0; r < ROWS; r++) begin
        init_row[t][r] = '0;
        for (int i = 10; i < 18; i++) init_row[t][r][i] = 1'($urandom);
        init_row[t][r][12] = 1'b0;
        ref_row[t][r] = init_row[t][r];
        for (int i = 0; i < nprog[t]; i++)
          if (prog[t][i].op == OP_NOR)
            ref_row[t][r][prog[t][i].o] = ~(ref_row[t][r][prog[t][i].a] | ref_row[t][r][prog[t][i].b]);
        @(negedge clk);
        host_tile = 1'(t); wr_en = 1'b1; wr_row = 3'(r); wr_data = init_row[t][r]; wr_mask = '1;
      end
      @(negedge clk);
      wr_en = 1'b0;
    end
  endtask

  // error injection, at most one per row and level, via the tiles' uops
  int inj_enable, inj_cnt;
  int row_lvl [NT][ROWS];
  int row_inj [NT][ROWS];
  uop_t u0 [ROWS];
  uop_t u1 [ROWS];
  assign u0 = dut.g_tile[0].u_tile.row_uop;
  assign u1 = dut.g_tile[1].u_tile.row_uop;

  always @(negedge clk) begin
    inj_en <= 1'b0;
    if (rst_n && busy) begin
      int t, r, pick;
      uop_t u;
      t = $urandom_range(NT - 1);
      pick = 0;
      for (int rr = 0; rr < ROWS; rr++) begin
        if (u0[rr].chk == CK_W) row_lvl[0][rr]++;
        if (u1[rr].chk == CK_W) row_lvl[1][rr]++;
      end
      r = $urandom_range(ROWS - 1);
      u = (t == 0) ? u0[r] : u1[r];
      if (inj_enable != 0 && u.comp.valid && row_inj[t][r] != row_lvl[t][r]
          && $urandom_range(1) == 0) begin
        row_inj[t][r] = row_lvl[t][r];
        inj_en   <= 1'b1;
        inj_tile <= 1'(t);
        inj_row  <= 3'(r);
        inj_cnt++;
        if ($urandom_range(1) == 0) inj_col <= u.comp.o;
        else if (u.comp.trim) inj_col <= 8'(32'(u.comp.o) + TW);
        else begin
          int i;
          i = 0;
          for (int k = NPAR - 1; k >= 0; k--) if (u.comp.pmask[k]) i = k;
          inj_col <= 8'(COLS - PAR_COLS + (u.comp.side ? NPAR * PCELLS : 0) + i * PCELLS + CELL_R);
        end
      end
    end
  end

  int n_side, n_chk, n_fdata, n_fpar, n_ftmr, n_switch;
  scheme_e last_scheme;

  task automatic run(scheme_e sch);
    for (int t = 0; t < NT; t++) for (int r = 0; r < ROWS; r++) begin
      row_lvl[t][r] = 0; row_inj[t][r] = -1;
    end
    load();
    inj_cnt = 0;
    if (sch != last_scheme) n_switch++;
    last_scheme = sch;
    @(negedge clk);
    scheme = sch; start = 1'b1; inj_enable = 1;
    @(negedge clk);
    start = 1'b0;
    while (!done) @(negedge clk);
    inj_enable = 0;
    for (int t = 0; t < NT; t++) begin
      host_tile = 1'(t);
      for (int r = 0; r < ROWS; r++) begin
        rd_row = 3'(r);
        #1;
        for (int i = 0; i < outs[t].size(); i++)
          check($sformatf("tile %0d row %0d col %0d", t, r, outs[t][i]),
                rd_data[outs[t][i]] == ref_row[t][r][outs[t][i]]);
        if (t == 0) check("AND result", rd_data[2] == (init_row[t][r][10] & init_row[t][r][11]));
      end
    end
    check("levels", stats.levels == 32'(2 + 3));
    n_side  += stats.side_stall;
    n_chk   += stats.chk_stall;
    n_fdata += stats.fix_data;
    n_fpar  += stats.fix_par;
    n_ftmr  += stats.fix_tmr;
    if (sch == SCH_ECIM) check("ECiM fixes = injections", stats.fix_data + stats.fix_par == 32'(inj_cnt));
    else                 check("TRiM fixes = injections", stats.fix_tmr == 32'(inj_cnt));
    $display("scheme=%0d cycles=%0d side_stall=%0d chk_stall=%0d fix d/p/t=%0d/%0d/%0d injected=%0d",
             sch, stats.cycles, stats.side_stall, stats.chk_stall, stats.fix_data, stats.fix_par,
             stats.fix_tmr, inj_cnt);
  endtask

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    rst_n = 1'b0; host_tile = '0; prog_we = 1'b0; prog_addr = '0; prog_wdata = '0;
    wr_en = 1'b0; wr_row = '0; wr_data = '0; wr_mask = '0; rd_row = '0; start = 1'b0;
    scheme = SCH_ECIM; inj_en = 1'b0; inj_tile = '0; inj_row = '0; inj_col = '0;
    inj_enable = 0; inj_cnt = 0;
    n_side = 0; n_chk = 0; n_fdata = 0; n_fpar = 0; n_ftmr = 0; n_switch = 0;
    last_scheme = SCH_ECIM;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    prog_and(0);
    prog_rand(1);
    for (int k = 0; k < 3; k++) begin
      run(SCH_ECIM);
      run(SCH_TRIM);
    end
    $display("mechanisms: side_stall=%0d chk_stall=%0d ecim_data_fix=%0d ecim_parity_fix=%0d trim_fix=%0d scheme_switch=%0d",
             n_side, n_chk, n_fdata, n_fpar, n_ftmr, n_switch);
    check("parity-side stall happened", n_side > 0);
    check("checker stall happened", n_chk > 0);
    check("ECiM data correction happened", n_fdata > 0);
    check("ECiM parity correction happened", n_fpar > 0);
    check("TRiM correction happened", n_ftmr > 0);
    check("scheme switch happened", n_switch > 0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
