// trim_checker: the TRiM Checker, a hardened majority voter that sits next to a
// PiM array.
//
// In TRiM every gate of a logic level is computed three times in the same row
// (a 3-output gate writes the result and two redundant copies). After a level,
// the controller reads the three copies one after another (three reads, R R R)
// and this block votes bit by bit. If the copies disagree anywhere, the
// majority is what the controller writes back (W) over the main copy.
//
// Interface: in_valid with in_beat = 0, 1, 2 and the copy in in_copy. Copies 0
// and 1 are stored; when copy 2 arrives the vote is taken and registered, so
// out_valid, out_major and out_mismatch appear the cycle after beat 2, which is
// the W slot of the paper's R R R W sequence. out_bad marks the copy (0..2) that
// lost the vote, or 3 if two or more copies are involved in the disagreement.
//
// From the paper: three copies, majority vote, mismatch as the detection signal,
// write-back of the majority. This design's choices: the copy width (a third of
// a 256-column row, so the three copies of a level fit one row), the beat
// protocol and the out_bad diagnostic.
module trim_checker #(
  parameter int unsigned W = 85
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         in_valid,
  input  logic [1:0]   in_beat,
  input  logic [W-1:0] in_copy,
  output logic         out_valid,
  output logic [W-1:0] out_major,
  output logic         out_mismatch,
  output logic [1:0]   out_bad
);

  logic [W-1:0] c0, c1;
  logic [W-1:0] maj;
  logic         d01, d02, d12;
  logic [1:0]   bad;

  always_comb begin
    maj = (c0 & c1) | (c0 & in_copy) | (c1 & in_copy);
    d01 = |(c0 ^ c1);
    d02 = |(c0 ^ in_copy);
    d12 = |(c1 ^ in_copy);
    // The copy that differs from both others is the bad one.
    if (!d01 && !d02)      bad = 2'd3;   // no mismatch at all
    else if (!d12)         bad = 2'd0;
    else if (!d02)         bad = 2'd1;
    else if (!d01)         bad = 2'd2;
    else                   bad = 2'd3;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      c0           <= '0;
      c1           <= '0;
      out_valid    <= 1'b0;
      out_major    <= '0;
      out_mismatch <= 1'b0;
      out_bad      <= 2'd3;
    end else begin
      out_valid <= in_valid && (in_beat == 2'd2);
      if (in_valid && in_beat == 2'd0) c0 <= in_copy;
      if (in_valid && in_beat == 2'd1) c1 <= in_copy;
      if (in_valid && in_beat == 2'd2) begin
        out_major    <= maj;
        out_mismatch <= d01 || d02;
        out_bad      <= bad;
      end
    end
  end

  // Copies must arrive in order 0, 1, 2 on consecutive cycles.
  logic [1:0] exp_beat;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) exp_beat <= 2'd0;
    else if (in_valid) exp_beat <= (in_beat == 2'd2) ? 2'd0 : in_beat + 2'd1;
  end
  a_beat_order: assert property (@(posedge clk) disable iff (!rst_n)
                                 in_valid |-> in_beat == exp_beat);
  a_beat_back2back: assert property (@(posedge clk) disable iff (!rst_n)
                                     in_valid && in_beat != 2'd2 |=> in_valid);

endmodule
