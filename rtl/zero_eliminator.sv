// zero_eliminator: moves the valid elements of an N-wide vector to the lowest
// positions, keeping their order, and reports how many there are.
//
// As in the paper, a prefix sum first counts for every element the invalid
// ("zero") entries in front of it (zero_cnt). A shifter of log2(N) layers then
// moves each element down by 1, 2, 4, ... places: in layer n an element moves
// when bit n of its zero_cnt is set. Elements are marked by a valid bit rather
// than by the value zero, so a real zero score survives; that is this design's
// choice. Purely combinational.
module zero_eliminator #(
  parameter int N = 16,
  parameter int W = 16
) (
  input  logic [N-1:0]          in_valid,
  input  logic [N-1:0][W-1:0]   in_data,
  output logic [N-1:0]          out_valid,
  output logic [N-1:0][W-1:0]   out_data,
  output logic [$clog2(N):0]    out_count
);
  localparam int S  = $clog2(N);
  localparam int CW = S + 1;

  logic [S:0][N-1:0]          v;
  logic [S:0][N-1:0][W-1:0]   d;
  logic [S:0][N-1:0][CW-1:0]  c;

  always_comb begin
    // prefix sum of invalid entries in front of each element
    c[0][0] = '0;
    for (int i = 1; i < N; i++)
      c[0][i] = c[0][i-1] + CW'(!in_valid[i-1]);
    v[0] = in_valid;
    d[0] = in_data;
    out_count = '0;
    for (int i = 0; i < N; i++) out_count += CW'(in_valid[i]);
    // log2(N) shift layers
    for (int s = 0; s < S; s++) begin
      for (int i = 0; i < N; i++) begin
        v[s+1][i] = 1'b0;
        d[s+1][i] = '0;
        c[s+1][i] = '0;
        if (i + (1 << s) < N && v[s][i + (1 << s)] && c[s][i + (1 << s)][s]) begin
          v[s+1][i] = 1'b1;
          d[s+1][i] = d[s][i + (1 << s)];
          c[s+1][i] = c[s][i + (1 << s)];
        end else if (v[s][i] && !c[s][i][s]) begin
          v[s+1][i] = 1'b1;
          d[s+1][i] = d[s][i];
          c[s+1][i] = c[s][i];
        end
      end
    end
    out_valid = v[S];
    out_data  = d[S];
  end
endmodule
