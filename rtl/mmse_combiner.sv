// mmse_combiner -- output stage of the Q^H y product.  With the extended
// (MMSE) channel model the array multiplies y1 by Q1 and, one clock later,
// y2 by Q2 (both halves of Q^H are stored in the same cells), so each row
// emits two partial results; this block adds them, v = Q1 y1 + Q2 y2.  For
// zero-forcing only the Q1 y1 word arrives and passes unchanged.
//
// Interface: clr empties the accumulators; while en is high every valid
// word in[i] is added to v[i]; cnt[i] counts the words received by row i.  One register stage.
// The paper names this operation at the array output; the accumulator form
// is this design's choice.
module mmse_combiner
  import lr_pkg::*;
#(
  parameter int M = 4
) (
  input  logic       clk,
  input  logic       rst_n,
  input  logic       clr,
  input  logic       en,
  input  dm_t        in  [M],
  output d_t         v   [M],
  output logic [1:0] cnt [M]
);
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < M; i++) begin v[i] <= '0; cnt[i] <= '0; end
    end else if (clr) begin
      for (int i = 0; i < M; i++) begin v[i] <= '0; cnt[i] <= '0; end
    end else if (en) begin
      for (int i = 0; i < M; i++) if (in[i].v) begin
        v[i]   <= to_d('{re: w_t'(v[i].re) + w_t'(in[i].d.re),
                         im: w_t'(v[i].im) + w_t'(in[i].d.im)}, 0);
        cnt[i] <= cnt[i] + 2'd1;
      end
    end
  end
endmodule
