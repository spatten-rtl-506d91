// head_score_acc: cumulative head importance scores (module 12).
//
// For each finished attention output of a head (D = 64 << dlog elements of
// 12 bits) the sum of the absolute values of its elements is added to that
// head's score, which saturates at SW bits. Scores persist across layers
// until `clear`. All scores are readable in parallel for the head top-k.
// Timing: the add is visible one cycle after acc_valid.
module head_score_acc import spatten_pkg::*; #(
  parameter int NH = MAXHEAD,
  parameter int SW = 24
) (
  input  logic                       clk,
  input  logic                       rst_n,
  input  logic                       clear,
  input  logic [1:0]                 dlog,
  input  logic                       acc_valid,
  input  logic [$clog2(NH)-1:0]      acc_head,
  input  logic [MULTS-1:0][EW-1:0]   acc_vals,
  output logic [NH-1:0][SW-1:0]      score
);
  logic [EW+9:0] mag;
  always_comb begin
    mag = '0;
    for (int j = 0; j < MULTS; j++) begin
      int v;
      v = int'($signed(acc_vals[j]));
      if (j < (SEG << dlog)) mag += (EW+10)'(v < 0 ? -v : v);
    end
  end
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) score <= '0;
    else if (clear) score <= '0;
    else if (acc_valid) begin
      logic [SW:0] s;
      s = {1'b0, score[acc_head]} + (SW+1)'(mag);
      score[acc_head] <= s[SW] ? '1 : s[SW-1:0];
    end
  end
endmodule
