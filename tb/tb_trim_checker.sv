// tb_trim_checker: self-checking test of the TRiM majority voter.
// Sends three copies per level (beats 0, 1, 2 on consecutive cycles), either
// identical or with one copy corrupted in one or more bits, and checks the
// majority, the mismatch flag, the reported bad copy and that the result
// arrives exactly one cycle after the third copy (the W slot).
module tb_trim_checker;
  localparam int unsigned W = 85;

  logic clk = 1'b0;
  logic rst_n;
  always #5 clk = ~clk;

  logic         in_valid;
  logic [1:0]   in_beat;
  logic [W-1:0] in_copy;
  logic         out_valid, out_mismatch;
  logic [W-1:0] out_major;
  logic [1:0]   out_bad;

  trim_checker #(.W(W)) dut (.*);

  int checks = 0;
  int failures = 0;

  task automatic check(string what, logic cond);
    checks++;
    if (!cond) begin
      failures++;
      $display("FAIL %s", what);
    end
  endtask

  function automatic logic [W-1:0] rnd();
    logic [W-1:0] v;
    for (int i = 0; i < W; i++) v[i] = 1'($urandom);
    return v;
  endfunction

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [W-1:0] good, c [3];
    int bad, nflip;
    rst_n = 1'b0; in_valid = 1'b0; in_beat = '0; in_copy = '0;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    for (int t = 0; t < 400; t++) begin
      good = rnd();
      c[0] = good; c[1] = good; c[2] = good;
      bad = (t % 4 == 3) ? -1 : $urandom_range(2);
      if (bad >= 0) begin
        nflip = (t % 2) ? 1 : $urandom_range(1, 5);
        for (int k = 0; k < nflip; k++) c[bad][$urandom_range(W - 1)] ^= 1'b1;
        if (c[bad] == good) c[bad][0] ^= 1'b1;
      end
      for (int b = 0; b < 3; b++) begin
        @(negedge clk);
        in_valid = 1'b1;
        in_beat  = 2'(b);
        in_copy  = c[b];
        if (b > 0) check("no early result", !out_valid);
      end
      @(negedge clk);
      in_valid = 1'b0;
      check("result in W slot", out_valid);
      check("majority", out_major == good);
      check("mismatch flag", out_mismatch == (bad >= 0));
      check("bad copy", out_bad == ((bad >= 0) ? 2'(bad) : 2'd3));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
