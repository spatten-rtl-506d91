// token_score_acc: cumulative token importance scores (module 1).
//
// One score per token of the context. Every beat adds up to 8 attention
// probabilities (Q0.12) to the scores of their tokens; scores saturate at the
// top of their SW bits. They are kept across queries, heads, layers and
// generation iterations and are only cleared by `clear` at the start of a new
// sentence. RDP read ports feed the top-k engine. The tokens of one beat must
// be distinct. The score width is this design's choice.
// Timing: an add is visible on the read ports in the next cycle.
module token_score_acc import spatten_pkg::*; #(
  parameter int NTOK = MAXTOK,
  parameter int PAR  = 8,
  parameter int RDP  = 16,
  parameter int SW   = 20
) (
  input  logic                          clk,
  input  logic                          rst_n,
  input  logic                          clear,
  input  logic                          acc_valid,
  input  logic [PAR-1:0]                acc_mask,
  input  logic [PAR-1:0][$clog2(NTOK)-1:0] acc_id,
  input  logic [PAR-1:0][EW-1:0]        acc_prob,
  input  logic [RDP-1:0][$clog2(NTOK)-1:0] rd_id,
  output logic [RDP-1:0][SW-1:0]        rd_score
);
  logic [SW-1:0] score [NTOK];
  always_comb for (int r = 0; r < RDP; r++) rd_score[r] = score[rd_id[r]];
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int t = 0; t < NTOK; t++) score[t] <= '0;
    end else if (clear) begin
      for (int t = 0; t < NTOK; t++) score[t] <= '0;
    end else if (acc_valid) begin
      for (int i = 0; i < PAR; i++) if (acc_mask[i]) begin
        logic [SW:0] s;
        s = {1'b0, score[acc_id[i]]} + (SW+1)'(acc_prob[i]);
        score[acc_id[i]] <= s[SW] ? '1 : s[SW-1:0];
      end
    end
  end
endmodule
