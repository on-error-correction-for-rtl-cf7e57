// tb_pim_controller: self-checking test of the PiM controller together with the
// array model and both Checkers, at 8 rows.
//
// A random layered NOR circuit (gates of one level read only inputs and earlier
// levels) is loaded, run under ECiM and then under TRiM, and every row's outputs
// are compared with a reference evaluation done here. During the runs single
// errors are injected, at most one per row and level, into a gate output just as
// it is written, into a redundant parity-update output (ECiM) or into a copy
// (TRiM); the corrections the controller reports must match. The test also
// checks the delayed row start (row r starts r*D cycles after row 0 and reads
// the checker r*D cycles after row 0), and the run time and stall counts
// against a cycle model of the schedule: a NOR issues when its parity side is
// free, a side is busy 2w cycles after its NOR (w parity bits to update, two
// gates each), a level check waits for both sides and starts at least ROWS*D
// cycles after the previous one, and a drain of (ROWS-1)*D+2 cycles ends a run.
module tb_pim_controller;
  import pim_pkg::*;
  localparam int unsigned ROWS = 8;
  localparam int unsigned COLS = 256;
  localparam int unsigned PROG_DEPTH = 64;
  localparam int unsigned COMP = COLS - PAR_COLS;
  localparam int unsigned TW = COLS / 3;
  localparam int unsigned NIN = 8;
  localparam int unsigned ZCOL = 80;       // constant-0 column
  localparam int unsigned NLEV = 4;

  logic clk = 1'b0;
  logic rst_n;
  always #5 clk = ~clk;

  // ---------------- DUT ----------------
  logic            prog_we, start, busy, done;
  logic [5:0]      prog_addr;
  instr_t          prog_wdata;
  scheme_e         scheme;
  uop_t            row_uop [ROWS];
  logic [2:0]      c_rd_row, c_wr_row, h_rd_row, h_wr_row, inj_row;
  logic [COLS-1:0] rd_data, c_wr_data, c_wr_mask, h_wr_data, h_wr_mask;
  logic            c_wr_en, h_wr_en, inj_en;
  col_t            inj_col;
  logic             ec_valid, ec_out_valid, ec_out_err, ec_out_err_data;
  logic [HAM_K-1:0] ec_data, ec_out_data;
  logic [NPAR-1:0]  ec_par, ec_out_par, ec_out_syn;
  logic [7:0]       ec_out_err_idx;
  logic             tc_valid, tc_out_valid, tc_out_mismatch;
  logic [1:0]       tc_beat, tc_out_bad;
  logic [TW-1:0]    tc_copy, tc_out_major;
  stats_t           stats;

  pim_controller #(.ROWS(ROWS), .COLS(COLS), .PROG_DEPTH(PROG_DEPTH)) dut (
    .clk, .rst_n, .prog_we, .prog_addr, .prog_wdata, .start, .scheme, .busy, .done,
    .row_uop, .rd_row(c_rd_row), .rd_data, .wr_en(c_wr_en), .wr_row(c_wr_row),
    .wr_data(c_wr_data), .wr_mask(c_wr_mask),
    .ec_valid, .ec_data, .ec_par, .ec_out_valid, .ec_out_data, .ec_out_err,
    .ec_out_err_data, .ec_out_err_idx,
    .tc_valid, .tc_beat, .tc_copy, .tc_out_valid, .tc_out_major, .tc_out_mismatch,
    .stats
  );
  pim_array #(.ROWS(ROWS), .COLS(COLS)) u_array (
    .clk, .uop(row_uop), .rd_row(busy ? c_rd_row : h_rd_row), .rd_data,
    .wr_en(busy ? c_wr_en : h_wr_en), .wr_row(busy ? c_wr_row : h_wr_row),
    .wr_data(busy ? c_wr_data : h_wr_data), .wr_mask(busy ? c_wr_mask : h_wr_mask),
    .inj_en, .inj_row, .inj_col
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

  // ---------------- bookkeeping ----------------
  int checks = 0;
  int failures = 0;
  task automatic check(string what, logic cond);
    checks++;
    if (!cond) begin
      failures++;
      $display("FAIL %s  (t=%0t)", what, $time);
    end
  endtask

  instr_t prog [PROG_DEPTH];
  int     nprog;
  logic [COLS-1:0] init_row [ROWS];
  logic [COLS-1:0] ref_row  [ROWS];
  int     gcount [NLEV];
  int     out_cols [$];

  // A for the cycle model: weight of column d of A.
  function automatic int weight(int d);
    int unsigned v, cnt;
    cnt = 0;
    for (v = 3; v < 256; v++) begin
      if ((v & (v - 1)) != 0) begin
        if (cnt == d) return $countones(v);
        cnt++;
      end
    end
    return 0;
  endfunction

  task automatic build_program();
    int next_col, avail_hi, k;
    next_col = NIN;
    nprog = 0;
    out_cols.delete();
    for (int l = 0; l < NLEV; l++) begin
      avail_hi = next_col;
      gcount[l] = (l == 1) ? 1 : $urandom_range(3, 7);   // level 1 is deliberately short
      for (int g = 0; g < gcount[l]; g++) begin
        prog[nprog].op = OP_NOR;
        prog[nprog].a  = 8'($urandom_range(avail_hi - 1));
        prog[nprog].b  = ($urandom_range(3) == 0) ? 8'(ZCOL) : 8'($urandom_range(avail_hi - 1));
        prog[nprog].o  = 8'(next_col);
        out_cols.push_back(next_col);
        next_col++;
        nprog++;
      end
      prog[nprog] = '{op: OP_LEVEL, a: 8'd0, b: 8'd0, o: 8'd0};
      nprog++;
    end
    prog[nprog] = '{op: OP_HALT, a: 8'd0, b: 8'd0, o: 8'd0};
    nprog++;
    k = 0;
    for (int i = 0; i < nprog; i++) begin
      @(negedge clk);
      prog_we = 1'b1; prog_addr = 6'(i); prog_wdata = prog[i];
    end
    @(negedge clk);
    prog_we = 1'b0;
  endtask

  task automatic load_rows();
    for (int r = 0; r < ROWS; r++) begin
      init_row[r] = '0;
      for (int i = 0; i < NIN; i++) init_row[r][i] = 1'($urandom);
      ref_row[r] = init_row[r];
      for (int i = 0; i < nprog; i++) begin
        if (prog[i].op == OP_NOR)
          ref_row[r][prog[i].o] = ~(ref_row[r][prog[i].a] | ref_row[r][prog[i].b]);
      end
      @(negedge clk);
      h_wr_en = 1'b1; h_wr_row = 3'(r); h_wr_data = init_row[r]; h_wr_mask = '1;
    end
    @(negedge clk);
    h_wr_en = 1'b0;
  endtask

  // cycle model of the schedule
  int m_cycles, m_side, m_chk;
  task automatic model(scheme_e sch);
    int t, free0, free1, s, ti, w, last_r0, first, c, r0, d;
    d = (sch == SCH_TRIM) ? 4 : 2;
    t = 1; free0 = 0; free1 = 0; s = 0; m_side = 0; m_chk = 0; first = 1; last_r0 = 0;
    for (int i = 0; i < nprog; i++) begin
      case (prog[i].op)
        OP_NOR: begin
          if (sch == SCH_ECIM) begin
            w  = weight(prog[i].o);
            ti = (s == 0) ? ((t > free0) ? t : free0) : ((t > free1) ? t : free1);
            m_side += ti - t;
            if (s == 0) free0 = ti + 2 * w + 1; else free1 = ti + 2 * w + 1;
            s ^= 1;
            t = ti + 1;
          end else t++;
        end
        OP_LEVEL: begin
          c = t;
          if (free0 > c) c = free0;
          if (free1 > c) c = free1;
          r0 = c + 1;
          if (!first && r0 < last_r0 + ROWS * d) r0 = last_r0 + ROWS * d;
          m_chk += r0 - (c + 1);
          first = 0;
          last_r0 = r0;
          t = r0 + d;
          s = 0;
        end
        OP_HALT: begin
          m_cycles = t + 1 + (ROWS - 1) * d + 2;
        end
        default: t++;
      endcase
    end
  endtask

  // injection monitor
  int  inj_data, inj_meta, inj_enable;
  int  row_lvl [ROWS];
  int  row_inj_lvl [ROWS];
  int  first_comp [ROWS];
  int  first_rd [ROWS];
  int  cyc;
  always @(posedge clk) cyc <= cyc + 1;

  always @(negedge clk) begin
    inj_en <= 1'b0;
    if (rst_n && busy) begin
      int cand [$];
      cand.delete();
      for (int r = 0; r < ROWS; r++) begin
        if (row_uop[r].comp.valid && first_comp[r] < 0) first_comp[r] = cyc;
        if (row_uop[r].chk == CK_R0 && first_rd[r] < 0) first_rd[r] = cyc;
        if (row_uop[r].chk == CK_W) row_lvl[r]++;
        if (inj_enable != 0 && row_uop[r].comp.valid && row_inj_lvl[r] != row_lvl[r])
          cand.push_back(r);
      end
      if (cand.size() > 0 && $urandom_range(2) == 0) begin
        int r, kind;
        r = cand[$urandom_range(cand.size() - 1)];
        kind = $urandom_range(1);
        row_inj_lvl[r] = row_lvl[r];
        inj_en  <= 1'b1;
        inj_row <= 3'(r);
        if (kind == 0) begin
          inj_col <= row_uop[r].comp.o;
          inj_data++;
        end else if (row_uop[r].comp.trim) begin
          inj_col <= 8'(32'(row_uop[r].comp.o) + TW * $urandom_range(1, 2));
          inj_meta++;
        end else begin
          int i;
          i = 0;
          for (int k = NPAR - 1; k >= 0; k--) if (row_uop[r].comp.pmask[k]) i = k;
          inj_col <= 8'(COLS - PAR_COLS + (row_uop[r].comp.side ? NPAR * PCELLS : 0)
                        + i * PCELLS + CELL_R);
          inj_meta++;
        end
      end
    end
  end

  task automatic run(scheme_e sch, int with_errors);
    int d;
    d = (sch == SCH_TRIM) ? 4 : 2;
    for (int r = 0; r < ROWS; r++) begin
      row_lvl[r] = 0; row_inj_lvl[r] = -1; first_comp[r] = -1; first_rd[r] = -1;
    end
    inj_data = 0; inj_meta = 0;
    load_rows();
    model(sch);
    @(negedge clk);
    scheme = sch; start = 1'b1;
    inj_enable = with_errors;
    @(negedge clk);
    start = 1'b0;
    while (!done) @(negedge clk);
    inj_enable = 0;
    // results
    for (int r = 0; r < ROWS; r++) begin
      h_rd_row = 3'(r);
      #1;
      for (int i = 0; i < out_cols.size(); i++)
        check($sformatf("row %0d col %0d result", r, out_cols[i]),
              rd_data[out_cols[i]] == ref_row[r][out_cols[i]]);
      check("inputs intact", rd_data[NIN-1:0] == init_row[r][NIN-1:0]);
      check("delayed start of compute", first_comp[r] - first_comp[0] == r * d);
      check("delayed checker read", first_rd[r] - first_rd[0] == r * d);
    end
    check("levels checked", stats.levels == NLEV);
    check("gates issued", 32'(out_cols.size()) == stats.gates);
    check($sformatf("cycles %0d vs model %0d", stats.cycles, m_cycles), stats.cycles == 32'(m_cycles));
    check("side stalls vs model", stats.side_stall == 32'(m_side));
    check("checker stalls vs model", stats.chk_stall == 32'(m_chk));
    check("checker stall happened", stats.chk_stall > 0);
    if (sch == SCH_ECIM) begin
      check("side stall happened", stats.side_stall > 0);
      check("data corrections", stats.fix_data == 32'(inj_data));
      check("parity corrections", stats.fix_par == 32'(inj_meta));
      check("no TRiM fixes in ECiM", stats.fix_tmr == 0);
    end else begin
      check("TRiM corrections", stats.fix_tmr == 32'(inj_data + inj_meta));
      check("no ECiM fixes in TRiM", stats.fix_data == 0 && stats.fix_par == 0);
    end
    if (with_errors != 0) check("errors were injected", inj_data > 0 && inj_meta > 0);
    $display("run scheme=%0d cycles=%0d side_stall=%0d chk_stall=%0d fix_data=%0d fix_par=%0d fix_tmr=%0d inj=%0d/%0d",
             sch, stats.cycles, stats.side_stall, stats.chk_stall, stats.fix_data,
             stats.fix_par, stats.fix_tmr, inj_data, inj_meta);
  endtask

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    cyc = 0;
    rst_n = 1'b0; prog_we = 1'b0; prog_addr = '0; prog_wdata = '0; start = 1'b0;
    scheme = SCH_ECIM; h_wr_en = 1'b0; h_wr_row = '0; h_wr_data = '0; h_wr_mask = '0;
    h_rd_row = '0; inj_en = 1'b0; inj_row = '0; inj_col = '0; inj_enable = 0;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    for (int it = 0; it < 3; it++) begin
      build_program();
      run(SCH_ECIM, 0);
      run(SCH_ECIM, 1);
      run(SCH_TRIM, 1);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
