// tb_pim_array: self-checking test of the PiM array model's in-array gates.
// Four rows run the four input combinations of every gate at the same time:
// NOR with redundant outputs to parity R cells, the two-step XOR (NOR22 then
// THR) on both parity sides, the TRiM 3-output NOR, the parity-region clear,
// masked row writes and error injection. Expected values are plain Boolean
// expressions computed here.
module tb_pim_array;
  import pim_pkg::*;
  localparam int unsigned ROWS = 4;
  localparam int unsigned COLS = 256;
  localparam int unsigned TOFF = COLS / 3;

  logic clk = 1'b0;
  always #5 clk = ~clk;

  uop_t            uop [ROWS];
  logic [1:0]      rd_row, wr_row, inj_row;
  logic [COLS-1:0] rd_data, wr_data, wr_mask;
  logic            wr_en, inj_en;
  col_t            inj_col;

  pim_array #(.ROWS(ROWS), .COLS(COLS)) dut (.*);

  int checks = 0;
  int failures = 0;

  task automatic check(string what, logic cond);
    checks++;
    if (!cond) begin
      failures++;
      $display("FAIL %s", what);
    end
  endtask

  function automatic int unsigned pc(logic side, int unsigned i, int unsigned k);
    return COLS - 80 + (side ? 40 : 0) + i * 5 + k;
  endfunction

  task automatic idle();
    for (int r = 0; r < ROWS; r++) uop[r] = '0;
  endtask

  task automatic wr(int r, int c, logic v);
    @(negedge clk);
    wr_en = 1'b1; wr_row = 2'(r);
    wr_data = '0; wr_data[c] = v;
    wr_mask = '0; wr_mask[c] = 1'b1;
    @(negedge clk);
    wr_en = 1'b0;
  endtask

  task automatic step();
    @(posedge clk);
    #1;
    idle();
  endtask

  function automatic logic cellv(int r, int c);
    return dut.cells[r][c];
  endfunction

  initial begin
    repeat (2000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    idle();
    wr_en = 1'b0; inj_en = 1'b0; wr_row = '0; inj_row = '0; inj_col = '0;
    wr_data = '0; wr_mask = '0; rd_row = '0;
    // all rows to zero
    for (int r = 0; r < ROWS; r++) begin
      @(negedge clk);
      wr_en = 1'b1; wr_row = 2'(r); wr_data = '0; wr_mask = '1;
    end
    @(negedge clk);
    wr_en = 1'b0;
    // inputs: row r holds a = r[1] at column 0, b = r[0] at column 1
    for (int r = 0; r < ROWS; r++) begin
      wr(r, 0, r[1]);
      wr(r, 1, r[0]);
    end
    for (int r = 0; r < ROWS; r++) begin
      rd_row = 2'(r);
      #1 check("row read", rd_data[0] == r[1] && rd_data[1] == r[0]);
    end
    // ECiM NOR: o = col 5, redundant outputs on the right side for p0, p3, p7
    @(negedge clk);
    for (int r = 0; r < ROWS; r++) begin
      uop[r].comp = '{valid: 1'b1, trim: 1'b0, side: 1'b1, pmask: 8'b1000_1001,
                      a: 8'd0, b: 8'd1, o: 8'd5};
    end
    step();
    for (int r = 0; r < ROWS; r++) begin
      logic e;
      e = ~(r[1] | r[0]);
      check("NOR output", cellv(r, 5) == e);
      check("NOR redundant p0", cellv(r, pc(1, 0, CELL_R)) == e);
      check("NOR redundant p3", cellv(r, pc(1, 3, CELL_R)) == e);
      check("NOR redundant p7", cellv(r, pc(1, 7, CELL_R)) == e);
      check("NOR no stray p1", cellv(r, pc(1, 1, CELL_R)) == 1'b0);
      check("NOR no stray left", cellv(r, pc(0, 0, CELL_R)) == 1'b0);
    end
    // XOR on both sides: set p (PA) and r of parity 2 per row from the inputs
    for (int r = 0; r < ROWS; r++) begin
      wr(r, pc(0, 2, CELL_PA), r[1]);
      wr(r, pc(0, 2, CELL_R),  r[0]);
      wr(r, pc(1, 2, CELL_PB), r[0]);
      wr(r, pc(1, 2, CELL_R),  r[1]);
    end
    @(negedge clk);
    for (int r = 0; r < ROWS; r++) begin
      uop[r].par_l = '{kind: XK_XOR1, pidx: 3'd2, src: 1'b0};
      uop[r].par_r = '{kind: XK_XOR1, pidx: 3'd2, src: 1'b1};
    end
    step();
    for (int r = 0; r < ROWS; r++) begin
      check("XOR1 = NOR22 s1", cellv(r, pc(0, 2, CELL_S1)) == ~(r[1] | r[0]));
      check("XOR1 = NOR22 s2", cellv(r, pc(0, 2, CELL_S2)) == ~(r[1] | r[0]));
    end
    @(negedge clk);
    for (int r = 0; r < ROWS; r++) begin
      uop[r].par_l = '{kind: XK_XOR2, pidx: 3'd2, src: 1'b0};
      uop[r].par_r = '{kind: XK_XOR2, pidx: 3'd2, src: 1'b1};
    end
    step();
    for (int r = 0; r < ROWS; r++) begin
      check("XOR left p' = p ^ r", cellv(r, pc(0, 2, CELL_PB)) == (r[1] ^ r[0]));
      check("XOR right p' = p ^ r", cellv(r, pc(1, 2, CELL_PA)) == (r[1] ^ r[0]));
      check("XOR left p kept", cellv(r, pc(0, 2, CELL_PA)) == r[1]);
    end
    // THR alone: inputs p, r, s1, s2 = four bits, output 1 iff >= 3 zeros
    for (int v = 0; v < 16; v++) begin
      int z;
      for (int k = 0; k < 4; k++) wr(v % ROWS, pc(0, 5, (k == 0) ? CELL_PA : k + 1), v[k]);
      @(negedge clk);
      uop[v % ROWS].par_l = '{kind: XK_XOR2, pidx: 3'd5, src: 1'b0};
      step();
      z = 4 - $countones(v[3:0]);
      check("THR threshold", cellv(v % ROWS, pc(0, 5, CELL_PB)) == (z >= 3));
    end
    // TRiM 3-output NOR into column 10 and its copies
    @(negedge clk);
    for (int r = 0; r < ROWS; r++)
      uop[r].comp = '{valid: 1'b1, trim: 1'b1, side: 1'b0, pmask: '0, a: 8'd0, b: 8'd1, o: 8'd10};
    step();
    for (int r = 0; r < ROWS; r++) begin
      logic e;
      e = ~(r[1] | r[0]);
      check("TRiM copy 0", cellv(r, 10) == e);
      check("TRiM copy 1", cellv(r, 10 + TOFF) == e);
      check("TRiM copy 2", cellv(r, 10 + 2 * TOFF) == e);
    end
    // only the rows that get a uop compute (delayed start)
    wr(0, 20, 1'b1); wr(1, 20, 1'b1);
    @(negedge clk);
    uop[1].comp = '{valid: 1'b1, trim: 1'b0, side: 1'b0, pmask: '0, a: 8'd0, b: 8'd1, o: 8'd20};
    step();
    check("row without uop untouched", cellv(0, 20) == 1'b1);
    check("row with uop computed", cellv(1, 20) == ~(1'b0 | 1'b1));
    // clear of the parity region
    @(negedge clk);
    uop[2].clr = 1'b1;
    step();
    check("clr parity region", dut.cells[2][COLS-1 -: 80] == '0);
    check("clr keeps compute", cellv(2, 0) == 1'b1 && cellv(2, 5) == 1'b0);
    check("clr only its row", dut.cells[0][COLS-1 -: 80] != '0);
    // error injection
    @(negedge clk);
    inj_en = 1'b1; inj_row = 2'd3; inj_col = 8'd0;
    @(negedge clk);
    inj_en = 1'b0;
    check("injected flip", cellv(3, 0) == 1'b0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
