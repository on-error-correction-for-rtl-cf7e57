// ecim_checker: the ECiM Checker, a hardened Hamming single-error corrector that
// sits next to a PiM array.
//
// Once all gates of a logic level (and their in-memory parity updates) are done,
// the controller reads the row and hands the level outputs (data, K bits) and
// the running parity bits (NPAR bits) to this block. It multiplies the codeword
// by the hardwired parity-check matrix H = [A | I] (AND for products, XOR for
// sums) to get the syndrome. A zero syndrome means no error. A syndrome equal to
// a column of A points at one data bit, which is flipped; a syndrome with a
// single set bit points at a parity bit. The corrected level output is what the
// controller writes back to the array.
//
// Interface: in_valid/in_data/in_par in; one cycle later out_valid with the
// corrected data and parity, out_err (syndrome non-zero), out_err_data (the
// error was in a data bit), out_err_idx (the data bit index) and out_syndrome.
// Latency 1 cycle, one codeword per cycle.
//
// From the paper: Hamming(255,247), H = [A|I] hardwired, syndrome by AND/XOR,
// correction by flipping the pointed-to bit. This design's choices: the column
// order of A (see pim_pkg::ham_col), a registered output, and the closed-form
// syndrome-to-index decode (index = s - 2 - floor(log2 s) for that order).
module ecim_checker
  import pim_pkg::*;
(
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 in_valid,
  input  logic [HAM_K-1:0]     in_data,
  input  logic [NPAR-1:0]      in_par,
  output logic                 out_valid,
  output logic [HAM_K-1:0]     out_data,
  output logic [NPAR-1:0]      out_par,
  output logic                 out_err,
  output logic                 out_err_data,
  output logic [7:0]           out_err_idx,
  output logic [NPAR-1:0]      out_syndrome
);

  // Hardwired columns of A.
  logic [NPAR-1:0] acol [HAM_K];
  for (genvar d = 0; d < HAM_K; d++) begin : g_acol
    assign acol[d] = ham_col(d);
  end

  logic [NPAR-1:0] syn;
  logic            syn_pow2;
  logic [3:0]      syn_log2;
  logic [8:0]      idx_full;
  logic [HAM_K-1:0] data_fix;
  logic [NPAR-1:0]  par_fix;

  always_comb begin
    syn = in_par;
    for (int d = 0; d < HAM_K; d++) begin
      syn ^= acol[d] & {NPAR{in_data[d]}};
    end
    syn_pow2 = (syn != '0) && ((syn & (syn - NPAR'(1))) == '0);
    syn_log2 = '0;
    for (int i = 0; i < NPAR; i++) begin
      if (syn[i]) syn_log2 = 4'(i);
    end
    idx_full = 9'(syn) - 9'd2 - 9'(syn_log2);
    data_fix = '0;
    par_fix  = '0;
    if (syn != '0) begin
      if (syn_pow2) par_fix = syn;
      else          data_fix[idx_full[7:0]] = 1'b1;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid    <= 1'b0;
      out_data     <= '0;
      out_par      <= '0;
      out_err      <= 1'b0;
      out_err_data <= 1'b0;
      out_err_idx  <= '0;
      out_syndrome <= '0;
    end else begin
      out_valid <= in_valid;
      if (in_valid) begin
        out_data     <= in_data ^ data_fix;
        out_par      <= in_par ^ par_fix;
        out_err      <= (syn != '0);
        out_err_data <= (syn != '0) && !syn_pow2;
        out_err_idx  <= idx_full[7:0];
        out_syndrome <= syn;
      end
    end
  end

endmodule
