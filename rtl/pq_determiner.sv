// pq_determiner: progressive-quantization decision (module 9).
//
// While a row of probabilities streams by, each of the 8 lanes keeps a running
// maximum. At the row's last beat every lane compares its maximum with the
// threshold; the row needs its LSBs when all lanes are below it, i.e. when the
// largest probability of the row is below the threshold (a flat
// distribution). The paper's typical threshold is 0.1 (410 in Q0.12).
// Timing: dec_valid/need_lsb one cycle after the last beat.
module pq_determiner import spatten_pkg::*; #(
  parameter int PAR = 8
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  logic [EW-1:0]          thres,
  input  logic                   in_valid,
  input  logic [PAR-1:0][EW-1:0] in_prob,
  input  logic [PAR-1:0]         in_mask,
  input  logic                   in_last,
  output logic                   dec_valid,
  output logic                   need_lsb,
  output logic [EW-1:0]          row_max
);
  logic [PAR-1:0][EW-1:0] mx, nmx;
  logic [PAR-1:0]         below;
  logic [EW-1:0]          rmax;
  always_comb begin
    rmax = '0;
    for (int i = 0; i < PAR; i++) begin
      nmx[i]   = (in_valid && in_mask[i] && in_prob[i] > mx[i]) ? in_prob[i] : mx[i];
      below[i] = nmx[i] < thres;
      if (nmx[i] > rmax) rmax = nmx[i];
    end
  end
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      mx <= '0; dec_valid <= 1'b0; need_lsb <= 1'b0; row_max <= '0;
    end else begin
      dec_valid <= 1'b0;
      if (in_valid && in_last) begin
        dec_valid <= 1'b1;
        need_lsb  <= &below;
        row_max   <= rmax;
        mx <= '0;
      end else mx <= nmx;
    end
  end
endmodule
