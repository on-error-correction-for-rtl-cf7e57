// tb_ecim_checker: self-checking test of the Hamming(255,247) checker.
// Encodes random level outputs with its own parity generator (A's columns are
// enumerated here as the non-power-of-two values 3, 5, 6, 7, 9, ...), then
// presents clean codewords, codewords with one flipped data bit and codewords
// with one flipped parity bit. Checks the error flags, the reported index, the
// corrected data and parity, and the one-cycle latency.
module tb_ecim_checker;
  import pim_pkg::*;

  logic clk = 1'b0;
  logic rst_n;
  always #5 clk = ~clk;

  logic             in_valid;
  logic [HAM_K-1:0] in_data;
  logic [NPAR-1:0]  in_par;
  logic             out_valid, out_err, out_err_data;
  logic [HAM_K-1:0] out_data;
  logic [NPAR-1:0]  out_par, out_syndrome;
  logic [7:0]       out_err_idx;

  ecim_checker dut (.*);

  int checks = 0;
  int failures = 0;

  logic [NPAR-1:0] col [HAM_K];
  initial begin
    int unsigned v;
    v = 3;
    for (int d = 0; d < HAM_K; d++) begin
      col[d] = NPAR'(v);
      v++;
      if ((v & (v - 1)) == 0) v++;   // skip the next power of two
    end
  end

  function automatic logic [NPAR-1:0] encode(logic [HAM_K-1:0] d);
    logic [NPAR-1:0] p = '0;
    for (int i = 0; i < HAM_K; i++) if (d[i]) p ^= col[i];
    return p;
  endfunction

  task automatic check(string what, logic cond);
    checks++;
    if (!cond) begin
      failures++;
      $display("FAIL %s", what);
    end
  endtask

  task automatic apply(logic [HAM_K-1:0] d, logic [NPAR-1:0] p);
    @(negedge clk);
    in_valid = 1'b1;
    in_data  = d;
    in_par   = p;
    @(negedge clk);
    in_valid = 1'b0;
    check("latency", out_valid);
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [HAM_K-1:0] d, e;
    logic [NPAR-1:0]  p;
    int pos;
    rst_n = 1'b0; in_valid = 1'b0; in_data = '0; in_par = '0;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    // the first four columns must be those of the paper's Hamming(7,4) A, extended
    check("A col 0", col[0] == 8'd3);
    check("A col 3", col[3] == 8'd7);
    for (int t = 0; t < 300; t++) begin
      for (int w = 0; w < HAM_K; w++) d[w] = 1'($urandom);
      p = encode(d);
      case (t % 3)
        0: begin
          apply(d, p);
          check("clean: no error", !out_err && out_data == d && out_par == p);
        end
        1: begin
          pos = $urandom_range(HAM_K - 1);
          e = d;
          e[pos] = ~e[pos];
          apply(e, p);
          check("data error flagged", out_err && out_err_data);
          check("data error index", out_err_idx == 8'(pos));
          check("data corrected", out_data == d && out_par == p);
          check("syndrome = column", out_syndrome == col[pos]);
        end
        default: begin
          pos = $urandom_range(NPAR - 1);
          apply(d, p ^ (NPAR'(1) << pos));
          check("parity error flagged", out_err && !out_err_data);
          check("parity error: data kept", out_data == d);
          check("parity corrected", out_par == p);
        end
      endcase
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
